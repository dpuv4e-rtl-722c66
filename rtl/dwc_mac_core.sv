// dwc_mac_core: MAC core of the depth-wise convolution PE.
//
// The core convolves one feature-map tile of 16 channels with one K x K
// depth-wise kernel (K = 1..7, stride S = 1 or 2). Per cycle it computes two
// 16-lane INT8 products and adds both to one of two 16-lane accumulators:
// acc[a] += F[c0] * w0 + F[c0+1] * w1, where F[c0], F[c0+1] are two adjacent
// input pixels ("pair" j: columns 2j, 2j+1 of the current window) and w0, w1
// come from a weight layout in which zeros have been inserted so that both
// accumulators use the same two pixels (paper Fig. 7: W00 W01 | 0 W00 | W02 0 |
// W01 W02 for K = 3, S = 1). The two accumulators are two neighbouring output
// columns, so one "atomic" computation yields 1(OH) x 2(OW) x 16(C) outputs.
// Steps whose two weights would both be zero are skipped, which makes the
// stride-2 kernels as fast as the stride-1 ones. Steps per kernel row:
//   K=3: 4, K=5: 6, K=7: 8   ->  atomic = 12, 30, 56 cycles
// One iteration is 2(OH) x 8(OW) x 16(C) = 8 atomics (96, 240, 448 cycles),
// reading an input tile of ((2-1)*S+K) x ((8-1)*S+K) pixels, which takes
// 4 stream beats per pixel to load (160/288/448 beats at S=1, 340/532/756 at
// S=2). These match the paper's Fig. 8.
//
// Interface (formats are this design's choice):
//   weight stream (16 bit): halfword 0 = {S[5:4], K[3:0]}, halfword 1 = number
//     of iterations that use these weights, then the shuffled weight vector
//     pairs, row by row, in step order (pair j ascending, accumulator inner),
//     32 bytes per step: 16 lanes of w0 then 16 lanes of w1.
//   FM stream (32 bit): the input tile, row-major, 16 bytes (channels) per
//     pixel, ping/pong buffered so the next tile loads while one computes.
//   cascade out: 16 x 24-bit sums, two beats per atomic (accumulator 0, 1);
//     atomics in order oh = 0..1, then column pair 0..3.
// The 24-bit lane holds any sum of up to 49 INT8 x INT8 products.
module dwc_mac_core
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fm_valid,
  output logic              fm_ready,
  input  logic [FM_SW-1:0]  fm_data,
  input  logic              wt_valid,
  output logic              wt_ready,
  input  logic [WT_SW-1:0]  wt_data,
  output logic              cout_valid,
  input  logic              cout_ready,
  output dwc_cascade_t      cout_data,
  output logic              busy          // a MAC step is executed this cycle
);

  localparam int unsigned FMB = (DWC_MAXPIX + 2) * DWC_C;   // bytes per bank
  localparam int unsigned WTB = DWC_MAXWV * DWC_C;          // bytes

  logic [7:0] fm_mem [2][FMB];
  logic [7:0] wt_mem [WTB];

  // ---------------------------------------------------------- weights
  logic [3:0]  k;
  logic [1:0]  s;
  logic [15:0] n_iter, it;
  logic        w_ok;           // weights loaded, iterations left
  logic [10:0] w_cnt;          // halfwords received
  logic [10:0] w_len;          // halfwords of weights after the header
  logic [3:0]  ns;             // steps per kernel row

  assign ns       = 4'(dwc_row_steps(32'(k), 32'(s)));
  assign w_len    = 11'(k) * 11'(ns) * 11'd16;
  assign wt_ready = !w_ok;

  // ---------------------------------------------------------- FM tiles
  logic [7:0]  ihin, iwin;
  logic [9:0]  fm_words;
  assign ihin     = 8'(s) + 8'(k);                  // (2-1)*S + K
  assign iwin     = 8'(7) * 8'(s) + 8'(k);          // (8-1)*S + K
  assign fm_words = 10'(ihin) * 10'(iwin) * 10'd4;

  logic [1:0] fm_full;
  logic       fm_lb, cb;
  logic [9:0] fm_cnt;
  assign fm_ready = w_ok && !fm_full[fm_lb];

  always_ff @(posedge clk) begin
    if (fm_valid && fm_ready)
      for (int b = 0; b < 4; b++) fm_mem[fm_lb][{fm_cnt, 2'(b)}] <= fm_data[8*b +: 8];
    if (wt_valid && wt_ready && w_cnt >= 11'd2)
      for (int b = 0; b < 2; b++) wt_mem[{w_cnt - 11'd2, 1'(b)}] <= wt_data[8*b +: 8];
  end

  // ---------------------------------------------------------- schedule
  logic       oh;            // output row of the iteration
  logic [1:0] owp;           // column pair (output columns 2owp, 2owp+1)
  logic [2:0] kr;            // kernel row
  logic [2:0] j;             // input pixel pair within the window
  logic       a;             // accumulator
  logic [3:0] st;            // step within the row
  logic [6:0] wp;            // weight pair index = kr*ns + st

  function automatic logic step_ok(logic [2:0] jj, logic aa, logic [3:0] kk, logic [1:0] ss);
    int lo, hi;
    lo = int'(aa) * int'(ss);
    hi = lo + int'(kk) - 1;
    return (2*int'(jj) + 1 >= lo) && (2*int'(jj) <= hi);
  endfunction

  // next valid (j, a) after the current one, in order j ascending, a inner
  logic [2:0] nj;
  logic       na;
  always_comb begin
    logic found;
    nj = '0; na = 1'b0; found = 1'b0;
    for (int c = 1; c <= 10; c++) begin
      int idx;
      idx = 2*int'(j) + int'(a) + c;
      if (!found && idx < 10 && step_ok(3'(idx/2), 1'(idx%2), k, s)) begin
        nj = 3'(idx/2); na = 1'(idx%2); found = 1'b1;
      end
    end
  end

  logic tile_rdy, row_last, atom_first, atom_last, iter_last, out_busy, fire;
  assign tile_rdy   = w_ok && fm_full[cb];
  assign row_last   = (st == ns - 4'd1);
  assign atom_first = (kr == 3'd0) && (st == 4'd0);
  assign atom_last  = row_last && (kr == 3'(k - 4'd1));
  assign iter_last  = atom_last && oh && (owp == 2'd3);
  assign fire       = tile_rdy && !(atom_last && out_busy);
  assign busy       = fire;

  // pixel addresses of the pair
  logic [7:0]  row, col;
  logic [8:0]  pix0;
  assign row  = 8'(oh) * 8'(s) + 8'(kr);
  assign col  = 8'(owp) * 8'd2 * 8'(s) + 8'(j) * 8'd2;
  assign pix0 = 9'(row) * 9'(iwin) + 9'(col);

  dwc_acc_t acc [2][DWC_C];
  dwc_acc_t nacc [2][DWC_C];
  always_comb begin
    for (int aa = 0; aa < 2; aa++)
      for (int l = 0; l < DWC_C; l++) begin
        dwc_acc_t p;
        p = DWC_AW'($signed(fm_mem[cb][{pix0, 4'(l)}]))        * DWC_AW'($signed(wt_mem[{wp, 1'b0, 4'(l)}])) +
            DWC_AW'($signed(fm_mem[cb][{pix0 + 9'd1, 4'(l)}])) * DWC_AW'($signed(wt_mem[{wp, 1'b1, 4'(l)}]));
        nacc[aa][l] = (atom_first ? '0 : acc[aa][l]) + ((1'(aa) == a) ? p : '0);
      end
  end

  // output double beat
  dwc_cascade_t ob [2];
  logic [1:0]   ob_v;
  assign out_busy   = |ob_v;
  assign cout_valid = |ob_v;
  assign cout_data  = ob_v[0] ? ob[0] : ob[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= 4'd3; s <= 2'd1; n_iter <= '0; it <= '0;
      w_ok <= 1'b0; w_cnt <= '0;
      fm_full <= '0; fm_lb <= 1'b0; cb <= 1'b0; fm_cnt <= '0;
      oh <= 1'b0; owp <= '0; kr <= '0; j <= '0; a <= 1'b0; st <= '0; wp <= '0;
      acc <= '{default: '0};
      ob  <= '{default: '0};
      ob_v <= '0;
    end else begin
      // weight packet
      if (wt_valid && wt_ready) begin
        if (w_cnt == 11'd0) begin
          k <= wt_data[3:0]; s <= wt_data[5:4];
        end
        if (w_cnt == 11'd1) n_iter <= wt_data;
        if (w_cnt >= 11'd2 && w_cnt == w_len + 11'd1) begin
          w_cnt <= '0;
          w_ok  <= 1'b1;
          it    <= '0;
          // first valid step of a row
          j <= '0; a <= 1'b0; st <= '0; wp <= '0; kr <= '0; oh <= 1'b0; owp <= '0;
        end else begin
          w_cnt <= w_cnt + 11'd1;
        end
      end
      // FM tiles
      if (fm_valid && fm_ready) begin
        if (fm_cnt == fm_words - 10'd1) begin
          fm_cnt <= '0;
          fm_full[fm_lb] <= 1'b1;
          fm_lb <= !fm_lb;
        end else fm_cnt <= fm_cnt + 10'd1;
      end
      // output beats
      if (cout_valid && cout_ready) begin
        if (ob_v[0]) ob_v[0] <= 1'b0;
        else         ob_v[1] <= 1'b0;
      end
      // compute
      if (fire) begin
        acc <= nacc;
        wp  <= wp + 7'd1;
        if (row_last) begin
          st <= '0;
          j  <= '0; a <= 1'b0;
          if (atom_last) begin
            kr <= '0;
            wp <= '0;
            for (int l = 0; l < DWC_C; l++) begin
              ob[0][l] <= nacc[0][l];
              ob[1][l] <= nacc[1][l];
            end
            ob_v <= 2'b11;
            owp <= owp + 2'd1;
            if (owp == 2'd3) oh <= !oh;
            if (iter_last) begin
              fm_full[cb] <= 1'b0;
              cb <= !cb;
              it <= it + 16'd1;
              if (it == n_iter - 16'd1) w_ok <= 1'b0;
            end
          end else kr <= kr + 3'd1;
        end else begin
          st <= st + 4'd1;
          j  <= nj; a <= na;
        end
      end
    end
  end

  // j = 0, a = 0 is always a valid first step: 2*0+1 >= 0 and 0 <= K-1.
  a_first_ok : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> step_ok(j, a, k, s));

endmodule
