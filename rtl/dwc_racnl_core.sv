// dwc_racnl_core: the RACNL core paired with a DWC MAC core.
//
// It takes the 16-lane accumulator beats of its MAC core from the cascade,
// adds the per-channel bias, quantises (round-half-up right shift, optional
// ReLU, INT8 saturation) and sends the 16 result bytes as 4 words on its
// 32-bit result stream (channel 4w..4w+3 in word w, lowest channel in the low
// byte). The paper says the core does "results accumulation, non-linear
// operations, and quantization"; the formula is this design's choice, as in
// the Conv PE NL core.
//
// Bias stream (16 bit, this design's format): halfword 0 = number of
// iterations (16 beats each) that use this packet, halfword 1 = {act[9:8],
// shift[5:0]}, then 16 biases of 32 bits, low halfword first. The cascade
// stalls until a packet is present. A beat is turned into 4 result words,
// so the core accepts a cascade beat at most every 4 cycles; at the
// 2 beats per >= 12-cycle atomic of the MAC core this is never the bottleneck.
module dwc_racnl_core
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bias_valid,
  output logic              bias_ready,
  input  logic [WT_SW-1:0]  bias_data,
  input  logic              cin_valid,
  output logic              cin_ready,
  input  dwc_cascade_t      cin_data,
  output logic              res_valid,
  input  logic              res_ready,
  output logic [FM_SW-1:0]  res_data
);

  localparam int unsigned BW = BIAS_HDR + 2 * DWC_C;   // 34 halfwords

  logic [WT_SW-1:0] bmem [BW];
  logic [5:0]  b_cnt;
  logic        b_ok;
  logic [15:0] beats_left_it;   // iterations left
  logic [3:0]  beat;            // beat within the iteration

  logic [7:0]  q [DWC_C];        // quantised beat
  logic [1:0]  wsel;
  logic        q_v;

  assign bias_ready = !b_ok;
  assign cin_ready  = b_ok && !q_v;

  always_ff @(posedge clk)
    if (bias_valid && bias_ready) bmem[b_cnt] <= bias_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_cnt <= '0; b_ok <= 1'b0; beats_left_it <= '0; beat <= '0;
      q <= '{default: '0}; q_v <= 1'b0; wsel <= '0;
    end else begin
      if (bias_valid && bias_ready) begin
        if (b_cnt == 6'(BW - 1)) begin
          b_cnt <= '0;
          b_ok  <= 1'b1;
          beats_left_it <= (bmem[0] == 16'd0) ? 16'd1 : bmem[0];
          beat  <= '0;
        end else b_cnt <= b_cnt + 6'd1;
      end
      if (cin_valid && cin_ready) begin
        for (int l = 0; l < DWC_C; l++)
          q[l] <= quant8(64'($signed(cin_data[l])) +
                         64'($signed({bmem[BIAS_HDR + 2*l + 1], bmem[BIAS_HDR + 2*l]})),
                         bmem[1][5:0], act_e'(bmem[1][9:8]));
        q_v  <= 1'b1;
        wsel <= '0;
        beat <= beat + 4'd1;
        if (beat == 4'd15) begin
          beats_left_it <= beats_left_it - 16'd1;
          if (beats_left_it == 16'd1) b_ok <= 1'b0;
        end
      end
      if (res_valid && res_ready) begin
        wsel <= wsel + 2'd1;
        if (wsel == 2'd3) q_v <= 1'b0;
      end
    end
  end

  assign res_valid = q_v;
  always_comb
    for (int b = 0; b < 4; b++) res_data[8*b +: 8] = q[4*wsel + 2'(b)];

endmodule
