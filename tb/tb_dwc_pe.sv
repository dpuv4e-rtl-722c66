// tb_dwc_pe: self-checking test of the depth-wise convolution PE.
//
// Each of the 4 clusters gets its own random 16-channel kernel (K = 5,
// stride 1) and bias packet; each of the 24 MAC cores gets its own two random
// input tiles. Every result byte of every pair is compared with bias +
// depth-wise convolution, quantised (shift, ReLU, saturation), all worked out
// here from the definitions. It also checks that the 6 cores of a cluster
// share their weight stream: each cluster's weight stream carries one copy of
// its weights, yet all 24 pairs finish.
module tb_dwc_pe;
  import dpu_pkg::*;

  localparam int K = 5, S = 1, NIT = 2;
  localparam int IHI = S + K, IWI = 7*S + K;
  localparam int NPIX = IHI * IWI;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic [23:0] fm_valid, fm_ready, res_valid, res_ready, mac_busy;
  logic [31:0] fm_data [24], res_data [24];
  logic [3:0]  wt_valid, wt_ready, bias_valid, bias_ready;
  logic [15:0] wt_data [4], bias_data [4];

  dwc_pe dut (.*);

  logic signed [7:0]  W [4][K][K][16];
  logic signed [31:0] B [4][16];
  logic signed [7:0]  F [24][NIT][NPIX][16];
  logic [15:0] ws [4][512];
  int wlen;
  int w_cnt [4], b_cnt [4], f_cnt [24], r_cnt [24];
  int checks = 0, failures = 0;

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      wt_data[c] = ws[c][w_cnt[c]];
      if (b_cnt[c] == 0)      bias_data[c] = 16'(NIT);
      else if (b_cnt[c] == 1) bias_data[c] = {6'd0, 2'd1, 2'd0, 6'd6};
      else if (b_cnt[c] < 34) bias_data[c] = (b_cnt[c] % 2 == 0) ? B[c][(b_cnt[c]-2)/2][15:0] : B[c][(b_cnt[c]-2)/2][31:16];
      else                    bias_data[c] = '0;
    end
    for (int p = 0; p < 24; p++) begin
      int t, k;
      t = f_cnt[p] / (NPIX*4); k = f_cnt[p] % (NPIX*4);
      for (int i = 0; i < 4; i++)
        fm_data[p][8*i +: 8] = (t < NIT) ? F[p][t][k/4][4*(k%4)+i] : 8'h0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      if (wt_valid[c] && wt_ready[c]) w_cnt[c] <= w_cnt[c] + 1;
      if (bias_valid[c] && bias_ready[c]) b_cnt[c] <= b_cnt[c] + 1;
    end
    for (int p = 0; p < 24; p++) begin
      if (fm_valid[p] && fm_ready[p]) f_cnt[p] <= f_cnt[p] + 1;
      if (res_valid[p] && res_ready[p]) begin
        int t, beat, at, a, oh, ow, cl;
        t = r_cnt[p] / 64; beat = (r_cnt[p] % 64) / 4;
        at = beat / 2; a = beat % 2; oh = at / 4; ow = (at % 4)*2 + a;
        cl = (p % 8) / 2;
        for (int i = 0; i < 4; i++) begin
          int l;
          longint e;
          l = 4*(r_cnt[p] % 4) + i;
          e = B[cl][l];
          for (int kr = 0; kr < K; kr++)
            for (int kc = 0; kc < K; kc++)
              e += longint'(F[p][t][(oh*S+kr)*IWI + ow*S+kc][l]) * longint'(W[cl][kr][kc][l]);
          checks++;
          if (res_data[p][8*i +: 8] !== quant8(64'(e), 6'd6, ACT_RELU)) begin
            failures++;
            if (failures < 6) $display("pair %0d word %0d byte %0d got %h exp %h", p, r_cnt[p], i, res_data[p][8*i +: 8], quant8(64'(e), 6'd6, ACT_RELU));
          end
        end
        r_cnt[p]++;
      end
    end
  end

  always @(negedge clk) begin
    for (int c = 0; c < 4; c++) begin
      wt_valid[c]   = w_cnt[c] < wlen && $urandom % 4 != 0;
      bias_valid[c] = b_cnt[c] < 34 && $urandom % 4 != 0;
    end
    for (int p = 0; p < 24; p++) begin
      fm_valid[p]  = f_cnt[p] < NIT*NPIX*4 && $urandom % 4 != 0;
      res_ready[p] = $urandom % 4 != 0;
    end
  end

  initial begin
    bit done;
    int cyc;
    foreach (W[a, b, c, d]) W[a][b][c][d] = 8'($urandom);
    foreach (B[a, b]) B[a][b] = $signed(32'($urandom % 20000)) - 10000;
    foreach (F[a, b, c, d]) F[a][b][c][d] = 8'($urandom);
    for (int c = 0; c < 4; c++) begin
      wlen = 0;
      ws[c][wlen++] = 16'({2'(S), 4'(K)});
      ws[c][wlen++] = 16'(NIT);
      for (int kr = 0; kr < K; kr++)
        for (int j = 0; j < 5; j++)
          for (int a = 0; a < 2; a++) begin
            int t0, t1;
            t0 = 2*j - a*S; t1 = 2*j + 1 - a*S;
            if (!((t0 >= 0 && t0 < K) || (t1 >= 0 && t1 < K))) continue;
            for (int h = 0; h < 8; h++)
              ws[c][wlen++] = {(t0 >= 0 && t0 < K) ? W[c][kr][t0][2*h+1] : 8'h0,
                               (t0 >= 0 && t0 < K) ? W[c][kr][t0][2*h]   : 8'h0};
            for (int h = 0; h < 8; h++)
              ws[c][wlen++] = {(t1 >= 0 && t1 < K) ? W[c][kr][t1][2*h+1] : 8'h0,
                               (t1 >= 0 && t1 < K) ? W[c][kr][t1][2*h]   : 8'h0};
          end
    end
    foreach (w_cnt[i]) begin w_cnt[i] = 0; b_cnt[i] = 0; end
    foreach (f_cnt[i]) begin f_cnt[i] = 0; r_cnt[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    done = 0; cyc = 0;
    while (!done && cyc < 20000) begin
      @(posedge clk); cyc++;
      done = 1;
      foreach (r_cnt[p]) if (r_cnt[p] < NIT*64) done = 0;
    end
    checks++;
    if (!done) begin failures++; $display("not all pairs finished"); end
    checks++;
    if (w_cnt[0] != wlen) begin failures++; $display("weight stream not shared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
