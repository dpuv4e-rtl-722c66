// load_unit: moves a feature map from DRAM into the engine's FM buffer.
//
// A LOAD instruction names a DRAM word address, an FM buffer word address and
// a length in words (one 512-bit DRAM word = one FM buffer word = 64 channels
// of a pixel). The unit issues read requests back to back as fast as the DRAM
// port accepts them and writes every returning word into the FM buffer in the
// order of the requests (the DRAM port returns reads in order). `done` pulses
// for one cycle after the last word is written. The paper names the unit
// (Fig. 2) without describing it; this simplest DMA is this design's choice.
module load_unit
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
  // FM buffer write port
  output logic              fm_we,
  output logic [15:0]       fm_waddr,
  output logic [FMB_W-1:0]  fm_wdata
);

  logic [DDR_AW-1:0] raddr;
  logic [15:0]       nreq, nrsp, len, waddr;

  assign req_valid = busy && (nreq != len);
  assign req.we    = 1'b0;
  assign req.addr  = raddr;
  assign req.wdata = '0;
  assign fm_we     = busy && rsp_valid;
  assign fm_waddr  = waddr;
  assign fm_wdata  = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      raddr <= '0; nreq <= '0; nrsp <= '0; len <= '0; waddr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= (cmd.len != 16'd0);
        done  <= (cmd.len == 16'd0);
        raddr <= cmd.ddr_addr;
        waddr <= cmd.buf_addr;
        len   <= cmd.len;
        nreq  <= '0;
        nrsp  <= '0;
      end else if (busy) begin
        if (req_valid && req_ready) begin
          raddr <= raddr + 1'b1;
          nreq  <= nreq + 16'd1;
        end
        if (rsp_valid) begin
          waddr <= waddr + 16'd1;
          nrsp  <= nrsp + 16'd1;
          if (nrsp == len - 16'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
