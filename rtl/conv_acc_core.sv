// conv_acc_core: the ACC core at the end of a Conv PE MAC chain.
//
// The core first receives a bias packet on its 16-bit bias stream, then
// acc_times tiles of 256 cascade beats (8 x 48-bit partial sums each) from the
// tail MAC core of its chain. Each beat is added to the PsumStack entry of its
// pixel and output channel: the first iteration starts from the bias, later
// iterations add to the stored partial sum, and the last iteration writes the
// final sum into one half of the AccOut ping/pong buffer, which the NL core
// reads (in the AIE this buffer is memory shared by the ACC and NL cores).
// The runtime parameters of the packet (shift, activation) travel with the
// AccOut half as the "Param Ping/Pong" of the paper's Fig. 4.
//
// Sizes are the paper's: PsumStack = AccOut = 4 x 16 x 32 x 4 B = 8 KB,
// bias = 32 x 4 B, ping/pong for the bias and AccOut buffers (Eq. 3, 4).
// This design's choices: the bias packet layout (halfword 0 = accumulation
// count, halfword 1 = {act[1:0] in bits 9:8, shift in bits 5:0}, then 32
// biases as low/high halfword pairs), saturation of the 48-bit cascade sum to
// 32 bits, and the AccOut read port: the NL core reads 4 consecutive output
// channels of one pixel per cycle, combinationally, and releases a half with
// nl_done. The cascade input stalls (back-pressure) when no bias packet is
// present, or when the last iteration would need an AccOut half still held by
// the NL core.
module conv_acc_core
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bias_valid,
  output logic              bias_ready,
  input  logic [WT_SW-1:0]  bias_data,
  input  logic              cin_valid,
  output logic              cin_ready,
  input  cascade_t          cin_data,
  // AccOut to the NL core
  output logic              tile_valid,     // an AccOut half is full
  output logic              tile_bank,      // which half
  output logic [5:0]        tile_shift,
  output act_e              tile_act,
  input  logic              nl_done,        // NL core releases tile_bank
  input  logic [8:0]        rd_word,        // NL word: px*8 + (oc/4)
  output logic [4*PSUM_W-1:0] rd_data       // 4 sums, oc 4*(rd_word%8) + 0..3
);

  localparam int unsigned NPS = CORE_PIX * CORE_OC;   // 2048 entries

  logic signed [PSUM_W-1:0] psum   [NPS];
  logic signed [PSUM_W-1:0] accout [2][NPS];
  logic [WT_SW-1:0]         bmem   [2][BIAS_WORDS];

  logic [1:0]  b_full;
  logic        b_lb, b_cb;          // bias load bank, bias compute bank
  logic [6:0]  b_cnt;
  logic [1:0]  a_full;
  logic        a_wb;                // AccOut write bank
  logic [5:0]  p_shift [2];
  act_e        p_act   [2];
  logic        nl_bank;             // oldest full AccOut half
  logic [7:0]  step;
  logic [15:0] iter;

  assign bias_ready = !b_full[b_lb];

  logic [15:0] acc_times;
  logic        last_iter;
  assign acc_times = (bmem[b_cb][0] == 16'd0) ? 16'd1 : bmem[b_cb][0];
  assign last_iter = (iter == acc_times - 16'd1);
  assign cin_ready = b_full[b_cb] && !(last_iter && a_full[a_wb]);

  logic fire;
  assign fire = cin_valid && cin_ready;

  logic [5:0]  px;
  logic [1:0]  ocg;
  assign px  = {step[3:2], step[7:4]};
  assign ocg = step[1:0];

  function automatic logic signed [PSUM_W-1:0] sat32(input logic signed [ACC_W+1:0] v);
    if (v > (ACC_W+2)'(32'sh7fffffff))       return 32'sh7fffffff;
    else if (v < -(ACC_W+2)'(33'sh080000000)) return 32'sh80000000;
    else                                      return v[PSUM_W-1:0];
  endfunction

  logic signed [PSUM_W-1:0] newv [MAC_OC];
  always_comb begin
    for (int o = 0; o < MAC_OC; o++) begin
      logic [10:0] idx;
      logic [4:0]  oc;
      logic signed [ACC_W+1:0] base;
      oc  = {ocg, 3'(o)};
      idx = {px, oc};
      base = (iter == 16'd0) ? (ACC_W+2)'($signed({bmem[b_cb][BIAS_HDR + 2*oc + 1],
                                                   bmem[b_cb][BIAS_HDR + 2*oc]}))
                             : (ACC_W+2)'(psum[idx]);
      newv[o] = sat32(base + (ACC_W+2)'(cin_data[o]));
    end
  end

  always_ff @(posedge clk) begin
    if (bias_valid && bias_ready) bmem[b_lb][b_cnt] <= bias_data;
    if (fire)
      for (int o = 0; o < MAC_OC; o++) begin
        if (last_iter) accout[a_wb][{px, ocg, 3'(o)}] <= newv[o];
        else           psum[{px, ocg, 3'(o)}]         <= newv[o];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_full  <= '0;
      b_lb    <= 1'b0;
      b_cb    <= 1'b0;
      b_cnt   <= '0;
      a_full  <= '0;
      a_wb    <= 1'b0;
      nl_bank <= 1'b0;
      step    <= '0;
      iter    <= '0;
      p_shift <= '{default: '0};
      p_act   <= '{default: ACT_NONE};
    end else begin
      if (bias_valid && bias_ready) begin
        if (b_cnt == 7'(BIAS_WORDS - 1)) begin
          b_cnt        <= '0;
          b_full[b_lb] <= 1'b1;
          b_lb         <= !b_lb;
        end else begin
          b_cnt <= b_cnt + 7'd1;
        end
      end
      if (nl_done) begin
        a_full[nl_bank] <= 1'b0;
        nl_bank         <= !nl_bank;
      end
      if (fire) begin
        step <= step + 8'd1;
        if (step == 8'(CORE_STEPS - 1)) begin
          if (last_iter) begin
            iter         <= '0;
            a_full[a_wb] <= 1'b1;
            p_shift[a_wb] <= bmem[b_cb][1][5:0];
            p_act[a_wb]   <= act_e'(bmem[b_cb][1][9:8]);
            a_wb         <= !a_wb;
            b_full[b_cb] <= 1'b0;
            b_cb         <= !b_cb;
          end else begin
            iter <= iter + 16'd1;
          end
        end
      end
    end
  end

  assign tile_valid = a_full[nl_bank];
  assign tile_bank  = nl_bank;
  assign tile_shift = p_shift[nl_bank];
  assign tile_act   = p_act[nl_bank];

  always_comb
    for (int j = 0; j < 4; j++)
      rd_data[PSUM_W*j +: PSUM_W] = accout[nl_bank][{rd_word, 2'(j)}];

  a_done_only_when_full : assert property (@(posedge clk) disable iff (!rst_n)
    nl_done |-> tile_valid);

endmodule
