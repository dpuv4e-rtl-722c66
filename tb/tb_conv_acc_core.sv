// tb_conv_acc_core: self-checking test of the ACC core.
//
// Three tiles are sent, with 1, 3 and 2 accumulation iterations. Each tile is
// a bias packet (count, shift/act, 32 biases) and count x 256 random cascade
// beats. The testbench plays the NL core: when a tile is reported it reads all
// 512 words of the AccOut half and compares each 32-bit sum with the bias plus
// the cascade sums of that pixel and channel, saturated to 32 bits (tile 2 is
// built to saturate). It holds each tile for a while before releasing it, so
// the ACC core must stall its cascade input when both AccOut halves are full;
// the stall and the parameters passed along (shift, act) are checked.
module tb_conv_acc_core;
  import dpu_pkg::*;

  localparam int NT = 3;
  localparam int ITS [NT] = '{1, 3, 2};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic        bias_valid, bias_ready, cin_valid, cin_ready;
  logic [15:0] bias_data;
  cascade_t    cin_data;
  logic        tile_valid, tile_bank, nl_done;
  logic [5:0]  tile_shift;
  act_e        tile_act;
  logic [8:0]  rd_word;
  logic [127:0] rd_data;

  conv_acc_core dut (.*);

  logic signed [31:0] bias [NT][32];
  cascade_t cas [6*256];
  int tstart [NT];
  int b_cnt, c_cnt;
  int checks = 0, failures = 0, stalls = 0;

  always_comb begin
    int t, k;
    t = b_cnt / 66; k = b_cnt % 66;
    if (t >= NT)      bias_data = '0;
    else if (k == 0)  bias_data = 16'(ITS[t]);
    else if (k == 1)  bias_data = {6'd0, 2'(t % 2), 2'd0, 6'(t + 3)};
    else              bias_data = (k % 2 == 0) ? bias[t][(k-2)/2][15:0] : bias[t][(k-2)/2][31:16];
  end
  assign cin_data = (c_cnt < 6*256) ? cas[c_cnt] : '0;

  function automatic logic signed [31:0] expect_sum(int t, int px, int oc);
    longint s;
    int idx;
    s = bias[t][oc];
    for (int it = 0; it < ITS[t]; it++) begin
      // beat s = {iw, ih, ocg}: px = ih*16 + iw
      idx = tstart[t] + it*256 + (px % 16)*16 + (px / 16)*4 + oc / 8;
      s += longint'(cas[idx][oc % 8]);
      if (s > 64'sd2147483647) s = 64'sd2147483647;
      if (s < -64'sd2147483648) s = -64'sd2147483648;
    end
    return 32'(s);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (bias_valid && bias_ready) b_cnt <= b_cnt + 1;
    if (cin_valid && cin_ready) c_cnt <= c_cnt + 1;
    if (cin_valid && !cin_ready) stalls <= stalls + 1;
  end
  always @(negedge clk) begin
    bias_valid = b_cnt < NT*66 && $urandom % 2 == 0;
    cin_valid  = c_cnt < 6*256 && $urandom % 4 != 0;
  end

  initial begin
    tstart[0] = 0; tstart[1] = 256; tstart[2] = 4*256;
    foreach (bias[t, o]) bias[t][o] = $signed(32'($urandom % 2000000)) - 1000000;
    for (int n = 0; n < 6*256; n++)
      for (int o = 0; o < 8; o++)
        cas[n][o] = (n >= 4*256) ? 48'sd1500000000 : 48'($signed(32'($urandom % 4000000)) - 2000000);
    b_cnt = 0; c_cnt = 0; nl_done = 0; rd_word = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      while (!tile_valid) @(posedge clk);
      repeat (600) @(posedge clk);           // hold the tile: forces back-pressure
      checks++;
      if (tile_shift !== 6'(t + 3) || tile_act !== act_e'(t % 2)) begin
        failures++; $display("param mismatch tile %0d", t);
      end
      for (int w = 0; w < 512; w++) begin
        rd_word = 9'(w);
        #1;
        for (int j = 0; j < 4; j++) begin
          logic signed [31:0] e;
          e = expect_sum(t, w / 8, (w % 8)*4 + j);
          checks++;
          if ($signed(rd_data[32*j +: 32]) !== e) begin
            failures++;
            if (failures < 6) $display("tile %0d word %0d lane %0d got %0d exp %0d", t, w, j, $signed(rd_data[32*j +: 32]), e);
          end
        end
      end
      @(negedge clk) nl_done = 1;
      @(negedge clk) nl_done = 0;
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
