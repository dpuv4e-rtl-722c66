// tb_low_channel_conv: self-checking test of the low-channel convolution unit.
//
// Loads 7 random weight blocks (21 x 32 INT8 each), random biases, then
// streams 4 groups of 7 input beats (4 rows x 21 bytes, as for a 7x7 kernel
// over 3 channels, one kernel row per beat). Each result beat (4 rows x 32
// output channels) is compared with bias + the sum over the 7 beats and 21
// lanes, shifted, ReLU'd and saturated here. The first two groups run with
// the result always taken and must stream at one input beat per cycle
// (4 x 21 x 32 MACs per cycle, the paper's parallelism); the last two run
// with random gaps and back-pressure.
module tb_low_channel_conv;
  import dpu_pkg::*;

  localparam int NB = 7, NG = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic [3:0] acc_n = 4'(NB);
  logic [5:0] shift = 6'd9;
  act_e act = ACT_RELU;
  logic signed [31:0] bias [32];
  logic w_valid = 0, w_ready, w_restart = 0, in_valid = 0, in_ready, out_valid, out_ready;
  logic [255:0] w_data = '0;
  logic [4*21*8-1:0] in_data;
  logic [4*32*8-1:0] out_data;
  logic signed [7:0] wt [NB][21][32];
  logic signed [7:0] x [NG][NB][4][21];
  int in_cnt = 0, out_cnt = 0, checks = 0, failures = 0;
  bit rnd = 0, go = 0;

  low_channel_conv dut (.*);

  always_comb begin
    int g, b;
    g = in_cnt / NB; b = in_cnt % NB;
    for (int h = 0; h < 4; h++)
      for (int i = 0; i < 21; i++) in_data[8*(h*21+i) +: 8] = (g < NG) ? x[g][b][h][i] : 8'h0;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) in_cnt <= in_cnt + 1;
    if (out_valid && out_ready) begin
      for (int h = 0; h < 4; h++)
        for (int o = 0; o < 32; o++) begin
          longint s;
          logic [7:0] e;
          s = bias[o];
          for (int b = 0; b < NB; b++)
            for (int i = 0; i < 21; i++) s += longint'(x[out_cnt][b][h][i]) * longint'(wt[b][i][o]);
          e = quant8(64'(s), shift, act);
          checks++;
          if (out_data[8*(h*32+o) +: 8] !== e) begin
            failures++;
            if (failures < 5) $display("group %0d row %0d oc %0d got %h exp %h", out_cnt, h, o, out_data[8*(h*32+o) +: 8], e);
          end
        end
      out_cnt <= out_cnt + 1;
    end
  end

  always @(negedge clk) begin
    in_valid  = go && in_cnt < NG*NB && (!rnd || $urandom % 3 != 0);
    out_ready = !rnd || $urandom % 2 != 0;
  end

  initial begin
    int cyc;
    foreach (wt[a, b, c]) wt[a][b][c] = 8'($urandom);
    foreach (x[a, b, c, d]) x[a][b][c][d] = 8'($urandom);
    foreach (bias[i]) bias[i] = $signed(32'($urandom % 20000)) - 10000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NB*21; p++) begin
      @(negedge clk);
      w_valid = 1; w_restart = (p == NB*21 - 1);
      for (int o = 0; o < 32; o++) w_data[8*o +: 8] = wt[p/21][p%21][o];
    end
    @(negedge clk); w_valid = 0; w_restart = 0; go = 1;
    cyc = 0;
    while (out_cnt < 2) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc > 2*NB + 3) begin failures++; $display("two groups took %0d cycles", cyc); end
    $display("two groups (%0d beats) in %0d cycles", 2*NB, cyc);
    rnd = 1;
    while (out_cnt < NG) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
