// tb_dwc_mac_core: self-checking test of the DWC MAC core.
//
// For each kernel/stride case (3x3/1, 5x5/1, 7x7/1, 3x3/2, 5x5/2, 7x7/2) the
// testbench draws a random 16-channel K x K kernel, builds the zero-inserted
// weight layout itself (for each kernel row, for pixel pair j and accumulator
// a, taps 2j+e-a*S that fall outside 0..K-1 become zero and all-zero steps are
// dropped), streams two random input tiles and compares every output lane with
// the depth-wise convolution computed directly from its definition. It also
// checks that an iteration computes for exactly 8 x K x steps cycles
// (96 / 240 / 448 for K = 3 / 5 / 7, both strides) and that a tile is
// (S+K) x (7S+K) x 4 stream beats. Streams have random gaps, the cascade
// random back-pressure.
module tb_dwc_mac_core;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic        fm_valid, fm_ready, wt_valid, wt_ready, cout_valid, cout_ready, busy;
  logic [31:0] fm_data;
  logic [15:0] wt_data;
  dwc_cascade_t cout_data;

  dwc_mac_core dut (.*);

  int checks = 0, failures = 0;
  int K, S, IHI, IWI, NIT;
  logic signed [7:0] W [7][7][16];
  logic signed [7:0] F [2][9][21][16];
  logic [15:0] wstream [1024];
  int wlen, w_cnt, f_cnt, o_cnt, busy_cnt;

  assign wt_data = wstream[w_cnt];
  always_comb begin
    int t, k, p, b;
    t = f_cnt / (IHI*IWI*4); k = f_cnt % (IHI*IWI*4);
    p = k / 4; b = k % 4;
    for (int i = 0; i < 4; i++)
      fm_data[8*i +: 8] = (t < NIT) ? F[t][p / IWI][p % IWI][4*b + i] : 8'h0;
  end

  always @(posedge clk) if (rst_n) begin
    if (wt_valid && wt_ready) w_cnt <= w_cnt + 1;
    if (fm_valid && fm_ready) f_cnt <= f_cnt + 1;
    if (busy) busy_cnt <= busy_cnt + 1;
    if (cout_valid && cout_ready) begin
      int t, at, a, oh, ow;
      t = o_cnt / 16; at = (o_cnt % 16) / 2; a = o_cnt % 2;
      oh = at / 4; ow = (at % 4) * 2 + a;
      for (int l = 0; l < 16; l++) begin
        int e;
        e = 0;
        for (int kr = 0; kr < K; kr++)
          for (int kc = 0; kc < K; kc++)
            e += int'(F[t][oh*S+kr][ow*S+kc][l]) * int'(W[kr][kc][l]);
        checks++;
        if (int'(cout_data[l]) != e) begin
          failures++;
          if (failures < 6) $display("K%0d S%0d beat %0d lane %0d got %0d exp %0d", K, S, o_cnt, l, int'(cout_data[l]), e);
        end
      end
      o_cnt++;
    end
  end
  always @(negedge clk) begin
    wt_valid   = w_cnt < wlen && $urandom % 4 != 0;
    fm_valid   = f_cnt < NIT*IHI*IWI*4 && $urandom % 4 != 0;
    cout_ready = $urandom % 3 != 0;
  end

  task automatic run_case(int kk, int ss, int exp_proc, int exp_load);
    int steps;
    K = kk; S = ss; NIT = 2;
    IHI = S + K; IWI = 7*S + K;
    foreach (W[a, b, c]) W[a][b][c] = 8'($urandom);
    foreach (F[a, b, c, d]) F[a][b][c][d] = 8'($urandom);
    // build the weight stream
    wlen = 0;
    wstream[wlen++] = 16'({S[1:0], K[3:0]});
    wstream[wlen++] = 16'(NIT);
    steps = 0;
    for (int kr = 0; kr < K; kr++)
      for (int j = 0; j < 5; j++)
        for (int a = 0; a < 2; a++) begin
          int t0, t1;
          logic [7:0] v [2][16];
          t0 = 2*j - a*S; t1 = 2*j + 1 - a*S;
          if (!((t0 >= 0 && t0 < K) || (t1 >= 0 && t1 < K))) continue;
          if (kr == 0) steps++;
          for (int l = 0; l < 16; l++) begin
            v[0][l] = (t0 >= 0 && t0 < K) ? W[kr][t0][l] : 8'h0;
            v[1][l] = (t1 >= 0 && t1 < K) ? W[kr][t1][l] : 8'h0;
          end
          for (int e = 0; e < 2; e++)
            for (int h = 0; h < 8; h++) wstream[wlen++] = {v[e][2*h+1], v[e][2*h]};
        end
    w_cnt = 0; f_cnt = 0; o_cnt = 0; busy_cnt = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (o_cnt < NIT*16) @(posedge clk);
    checks++;
    if (busy_cnt != NIT * 8 * K * steps || 8*K*steps != exp_proc) begin
      failures++;
      $display("K%0d S%0d: %0d compute cycles, expected %0d per iteration", K, S, busy_cnt / NIT, exp_proc);
    end
    checks++;
    if (IHI*IWI*4 != exp_load) begin failures++; $display("load beats %0d", IHI*IWI*4); end
    $display("K=%0d S=%0d: %0d cycles compute, %0d beats load per iteration", K, S, busy_cnt / NIT, IHI*IWI*4);
  endtask

  initial begin
    run_case(3, 1, 96, 160);
    run_case(5, 1, 240, 288);
    run_case(7, 1, 448, 448);
    run_case(3, 2, 96, 340);
    run_case(5, 2, 240, 532);
    run_case(7, 2, 448, 756);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
