// store_unit: moves a feature map from the engine's FM buffer to DRAM.
//
// A SAVE instruction names an FM buffer word address, a DRAM word address and
// a length in words. The unit reads FM buffer words (one cycle read latency)
// into a 3-word queue and issues the head of the queue as a posted DRAM
// write; it keeps reading while the queue has room, so it moves one word per
// cycle when the DRAM port accepts one per cycle. `done` pulses after the last
// write is accepted. Named in the paper (Fig. 2) but not described; this
// simple DMA is this design's choice.
module store_unit
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
  // FM buffer read port
  output logic              fm_re,
  output logic [15:0]       fm_raddr,
  input  logic [FMB_W-1:0]  fm_rdata
);

  logic [DDR_AW-1:0] waddr;
  logic [15:0]       raddr, nrd, nwr, len;
  logic              rd_pend;          // a read was issued last cycle
  logic [FMB_W-1:0]  q [4];            // words read, waiting for DRAM
  logic [1:0]        wp, rp;
  logic [2:0]        cnt;
  logic              pop;

  // read while the queue has room for the word and the one in flight
  assign fm_re     = busy && (nrd != len) && (int'(cnt) + int'(rd_pend) < 3);
  assign fm_raddr  = raddr;
  assign req_valid = (cnt != 3'd0);
  assign req.we    = 1'b1;
  assign req.addr  = waddr;
  assign req.wdata = q[rp];
  assign pop       = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; waddr <= '0; raddr <= '0;
      nrd <= '0; nwr <= '0; len <= '0; rd_pend <= 1'b0; wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      rd_pend <= fm_re;
      if (start && !busy) begin
        busy  <= (cmd.len != 16'd0);
        done  <= (cmd.len == 16'd0);
        waddr <= cmd.ddr_addr;
        raddr <= cmd.buf_addr;
        len   <= cmd.len;
        nrd   <= '0;
        nwr   <= '0;
      end else if (busy) begin
        if (fm_re) begin
          raddr <= raddr + 16'd1;
          nrd   <= nrd + 16'd1;
        end
        if (pop) begin
          rp    <= rp + 2'd1;
          waddr <= waddr + 1'b1;
          nwr   <= nwr + 16'd1;
          if (nwr == len - 16'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        if (rd_pend) wp <= wp + 2'd1;
        cnt <= cnt + 3'(rd_pend) - 3'(pop);
      end
    end
  end

  always_ff @(posedge clk) if (rd_pend) q[wp] <= fm_rdata;

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) cnt <= 3'd3);

endmodule
