// tb_conv_nl_core: self-checking test of the NL core.
//
// The testbench plays the ACC core: it offers two tiles of random 32-bit sums
// (one with ReLU and shift 8, one without activation and shift 0, which
// saturates most values) through the AccOut read port. Every result word is
// compared with the four sums of that word quantised independently here
// (round-half-up shift, ReLU, saturation to INT8). The result stream is
// back-pressured at random. Exactly one nl_done pulse per tile, after its
// 512th word, is checked. At full rate a tile must take 512 cycles.
module tb_conv_nl_core;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic        tile_valid, nl_done, res_valid, res_ready;
  logic [5:0]  tile_shift;
  act_e        tile_act;
  logic [8:0]  rd_word;
  logic [127:0] rd_data;
  logic [31:0] res_data;

  conv_nl_core dut (.*);

  logic signed [31:0] mem [2][2048];
  int t_cur, r_cnt, done_cnt;
  int checks = 0, failures = 0;
  bit rnd;

  always_comb for (int j = 0; j < 4; j++) rd_data[32*j +: 32] = mem[t_cur][{rd_word, 2'(j)}];
  assign tile_shift = (t_cur == 0) ? 6'd8 : 6'd0;
  assign tile_act   = (t_cur == 0) ? ACT_RELU : ACT_NONE;

  function automatic logic [7:0] q(logic signed [31:0] v, int sh, bit relu);
    longint r;
    r = (sh == 0) ? longint'(v) : ((longint'(v) + (64'sd1 << (sh-1))) >>> sh);
    if (relu && r < 0) r = 0;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return 8'(r);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (nl_done) done_cnt <= done_cnt + 1;
    if (res_valid && res_ready) begin
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (res_data[8*j +: 8] !== q(mem[r_cnt/512][(r_cnt%512)*4+j], (r_cnt < 512) ? 8 : 0, r_cnt < 512)) begin
          failures++;
          if (failures < 6) $display("word %0d lane %0d got %h", r_cnt, j, res_data[8*j +: 8]);
        end
      end
      r_cnt++;
    end
  end
  always @(negedge clk) res_ready = !rnd || $urandom % 3 != 0;

  initial begin
    int cyc;
    foreach (mem[t, i]) mem[t][i] = $signed(32'($urandom % 200000)) - 100000;
    t_cur = 0; r_cnt = 0; done_cnt = 0; tile_valid = 0; rnd = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) tile_valid = 1;
    while (!nl_done) @(posedge clk);
    @(negedge clk);
    checks++;
    if (r_cnt != 512 || done_cnt != 1) begin failures++; $display("tile 0: %0d words, %0d done", r_cnt, done_cnt); end
    t_cur = 1; rnd = 0;
    cyc = 0;
    while (!nl_done) begin @(posedge clk); cyc++; end
    @(negedge clk) tile_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (r_cnt != 1024 || done_cnt != 2) begin failures++; $display("tile 1: %0d words, %0d done", r_cnt, done_cnt); end
    checks++;
    if (cyc > 514) begin failures++; $display("full-rate tile took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
