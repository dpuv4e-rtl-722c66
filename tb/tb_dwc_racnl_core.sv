// tb_dwc_racnl_core: self-checking test of the DWC RACNL core.
//
// Two bias packets (2 iterations with ReLU and shift 4, then 1 iteration with
// no activation and shift 0, which saturates) are each followed by 16-beat
// iterations of random 24-bit accumulator vectors. Every result byte is
// compared with bias + accumulator, quantised here. The cascade must stall
// while no bias packet is loaded (checked between the two packets, which the
// testbench holds back), and the result stream is back-pressured at random.
module tb_dwc_racnl_core;
  import dpu_pkg::*;

  localparam int NB = 48;    // beats: 2 iterations + 1 iteration

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic        bias_valid, bias_ready, cin_valid, cin_ready, res_valid, res_ready;
  logic [15:0] bias_data;
  dwc_cascade_t cin_data;
  logic [31:0] res_data;

  dwc_racnl_core dut (.*);

  logic signed [31:0] B [2][16];
  dwc_cascade_t cas [NB];
  int b_cnt, c_cnt, r_cnt, stalls_nobias;
  bit hold_bias;
  int checks = 0, failures = 0;

  always_comb begin
    int t, k;
    t = b_cnt / 34; k = b_cnt % 34;
    if (t > 1)       bias_data = '0;
    else if (k == 0) bias_data = (t == 0) ? 16'd2 : 16'd1;
    else if (k == 1) bias_data = (t == 0) ? {6'd0, 2'd1, 2'd0, 6'd4} : 16'd0;
    else             bias_data = (k % 2 == 0) ? B[t][(k-2)/2][15:0] : B[t][(k-2)/2][31:16];
  end
  assign cin_data = (c_cnt < NB) ? cas[c_cnt] : '0;

  always @(posedge clk) if (rst_n) begin
    if (bias_valid && bias_ready) b_cnt <= b_cnt + 1;
    if (cin_valid && cin_ready) c_cnt <= c_cnt + 1;
    if (cin_valid && !cin_ready && hold_bias) stalls_nobias <= stalls_nobias + 1;
    if (res_valid && res_ready) begin
      int beat, t;
      beat = r_cnt / 4;
      t = (beat < 32) ? 0 : 1;
      for (int i = 0; i < 4; i++) begin
        int l;
        logic [7:0] e;
        l = 4*(r_cnt % 4) + i;
        e = (t == 0) ? quant8(64'(cas[beat][l]) + 64'(B[0][l]), 6'd4, ACT_RELU)
                     : quant8(64'(cas[beat][l]) + 64'(B[1][l]), 6'd0, ACT_NONE);
        checks++;
        if (res_data[8*i +: 8] !== e) begin
          failures++;
          if (failures < 6) $display("word %0d byte %0d got %h exp %h", r_cnt, i, res_data[8*i +: 8], e);
        end
      end
      r_cnt++;
    end
  end
  always @(negedge clk) begin
    bias_valid = b_cnt < 68 && !(hold_bias && b_cnt >= 34) && $urandom % 3 != 0;
    cin_valid  = c_cnt < NB && $urandom % 4 != 0;
    res_ready  = $urandom % 3 != 0;
  end

  initial begin
    foreach (B[a, b]) B[a][b] = $signed(32'($urandom % 4000)) - 2000;
    foreach (cas[n]) for (int l = 0; l < 16; l++) cas[n][l] = 24'($signed(32'($urandom % 200000)) - 100000);
    b_cnt = 0; c_cnt = 0; r_cnt = 0; stalls_nobias = 0; hold_bias = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (c_cnt < 32) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++;
    if (stalls_nobias == 0 || c_cnt != 32) begin failures++; $display("cascade did not stall without bias"); end
    hold_bias = 0;
    while (r_cnt < NB*4) @(posedge clk);
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
