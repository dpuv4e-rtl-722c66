// weight_load: the weight loader of the PL side (paper Fig. 2, "Weights
// Load"): moves convolution weights from DRAM into the shared weight buffer
// and biases into the bias buffers of all engines.
//
// A WLOAD instruction gives a DRAM word address, a destination address and a
// length in DRAM words. Each 512-bit DRAM word is either two weight rows
// (written at buf_addr + 2i, an even row) or eight bias rows (written as one
// bias buffer word at buf_addr + i, the same for every engine). Read requests
// are issued back to back and the returning words are written as they arrive
// (in request order). `done` pulses after the last write. The paper names the
// loader but not its structure; this simple DMA is this design's choice.
module weight_load
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  xfer_t             cmd,
  output logic              busy,
  output logic              done,
  // DRAM port
  output logic              req_valid,
  input  logic              req_ready,
  output ddr_req_t          req,
  input  logic              rsp_valid,
  input  logic [DDR_W-1:0]  rsp_data,
  // weight buffer write (two rows)
  output logic              wb_we,
  output logic [15:0]       wb_waddr,
  output logic [2*WB_W-1:0] wb_wdata,
  // bias buffer write (broadcast)
  output logic              bb_we,
  output logic [8:0]        bb_waddr,
  output logic [FMB_W-1:0]  bb_wdata
);

  logic [DDR_AW-1:0] raddr;
  logic [15:0]       nreq, nrsp, len, dst;
  logic              to_bias;

  assign req_valid = busy && (nreq != len);
  assign req.we    = 1'b0;
  assign req.addr  = raddr;
  assign req.wdata = '0;
  assign wb_we     = busy && rsp_valid && !to_bias;
  assign wb_waddr  = dst;
  assign wb_wdata  = rsp_data;
  assign bb_we     = busy && rsp_valid && to_bias;
  assign bb_waddr  = dst[8:0];
  assign bb_wdata  = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; raddr <= '0; nreq <= '0; nrsp <= '0;
      len <= '0; dst <= '0; to_bias <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= (cmd.len != 16'd0);
        done    <= (cmd.len == 16'd0);
        raddr   <= cmd.ddr_addr;
        dst     <= cmd.buf_addr;
        len     <= cmd.len;
        to_bias <= cmd.to_bias;
        nreq    <= '0;
        nrsp    <= '0;
      end else if (busy) begin
        if (req_valid && req_ready) begin
          raddr <= raddr + 1'b1;
          nreq  <= nreq + 16'd1;
        end
        if (rsp_valid) begin
          dst  <= dst + (to_bias ? 16'd1 : 16'd2);
          nrsp <= nrsp + 16'd1;
          if (nrsp == len - 16'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
