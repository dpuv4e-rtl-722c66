// conv_nl_core: the NL core that follows the ACC core in a Conv PE chain.
//
// When the ACC core reports a full AccOut half, the NL core reads it four
// 32-bit sums at a time (four consecutive output channels of one pixel),
// quantises each to INT8 (arithmetic right shift by the tile's shift with
// round-half-up, optional ReLU, saturation) and sends the four bytes as one
// word on its 32-bit result stream. A tile of 4 x 16 pixels x 32 channels is
// 512 words, pixel-major (pixel px = ih*16 + iw, then 8 words of 4 channels).
// After the last word it releases the AccOut half (nl_done) so the ACC core
// can reuse it: the two halves make the ACC/NL pair a ping/pong pipeline.
//
// The paper states that the NL core performs activation, element-wise
// operations and quantisation and writes a ping/pong NLOut buffer; it does not
// give the quantisation formula or the activation set. The shift/round/ReLU
// here is this design's choice; the element-wise operations are provided by
// the MISC unit instead. The result stream is registered (valid/ready).
module conv_nl_core
  import dpu_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tile_valid,
  input  logic [5:0]           tile_shift,
  input  act_e                 tile_act,
  output logic                 nl_done,
  output logic [8:0]           rd_word,
  input  logic [4*PSUM_W-1:0]  rd_data,
  output logic                 res_valid,
  input  logic                 res_ready,
  output logic [FM_SW-1:0]     res_data
);

  logic [8:0] cnt;
  logic       busy_last;   // last word has been issued, waiting to release
  logic       fire;

  assign rd_word = cnt;
  assign nl_done = busy_last;   // one cycle, the ACC core frees the half at the next edge
  assign fire    = tile_valid && !busy_last && (!res_valid || res_ready);

  logic [FM_SW-1:0] q;
  always_comb
    for (int j = 0; j < 4; j++)
      q[8*j +: 8] = quant8(64'($signed(rd_data[PSUM_W*j +: PSUM_W])), tile_shift, tile_act);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      busy_last <= 1'b0;
      res_valid <= 1'b0;
      res_data  <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (fire) begin
        res_valid <= 1'b1;
        res_data  <= q;
        cnt       <= cnt + 9'd1;
        if (cnt == 9'(NL_WORDS - 1)) busy_last <= 1'b1;
      end
      if (busy_last) busy_last <= 1'b0;
    end
  end

endmodule
