// tb_conv_mac_core: self-checking test of one Conv PE MAC core (not the head
// of its chain). Three tiles of random FM and weights are streamed in; a
// random 8 x 48-bit cascade input accompanies each of the 256 steps of a tile.
// Every cascade output is compared with cascade input + the 16-term dot
// product of the pixel and output channels selected by the step order
// s = {iw, ih, ocg}. A first pass uses random stream gaps and random
// back-pressure (stalls must be seen); a second pass at full rate must produce
// one cascade beat per cycle after the first tile is loaded: 3 tiles in about
// 4 x 256 cycles.
module tb_conv_mac_core;
  import dpu_pkg::*;

  localparam int NTL = 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic        fm_valid, fm_ready, wt_valid, wt_ready;
  logic [31:0] fm_data;
  logic [15:0] wt_data;
  logic        cin_valid, cin_ready, cout_valid, cout_ready, stall;
  cascade_t    cin_data, cout_data;

  conv_mac_core #(.IS_HEAD(1'b0)) dut (.*);

  logic [7:0] fmb [NTL][1024];
  logic [7:0] wtb [NTL][512];
  cascade_t   cinb [NTL*256];
  int fm_cnt, wt_cnt, ci_cnt, co_cnt;
  int checks = 0, failures = 0, stalls = 0;
  bit rnd;

  assign fm_data  = (fm_cnt < NTL*256) ? {fmb[fm_cnt/256][4*(fm_cnt%256)+3], fmb[fm_cnt/256][4*(fm_cnt%256)+2],
                     fmb[fm_cnt/256][4*(fm_cnt%256)+1], fmb[fm_cnt/256][4*(fm_cnt%256)]} : '0;
  assign wt_data  = (wt_cnt < NTL*256) ? {wtb[wt_cnt/256][2*(wt_cnt%256)+1], wtb[wt_cnt/256][2*(wt_cnt%256)]} : '0;
  assign cin_data = (ci_cnt < NTL*256) ? cinb[ci_cnt] : '0;

  function automatic cascade_t expect_beat(int n);
    int t, s, px, ocg;
    cascade_t e;
    t = n / 256; s = n % 256;
    px = (s / 4 % 4) * 16 + s / 16;
    ocg = s % 4;
    for (int o = 0; o < 8; o++) begin
      longint v;
      v = cinb[n][o];
      for (int i = 0; i < 16; i++)
        v += longint'($signed(fmb[t][px*16+i])) * longint'($signed(wtb[t][(ocg*8+o)*16+i]));
      e[o] = 48'(v);
    end
    return e;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (fm_valid && fm_ready) fm_cnt <= fm_cnt + 1;
    if (wt_valid && wt_ready) wt_cnt <= wt_cnt + 1;
    if (cin_valid && cin_ready) ci_cnt <= ci_cnt + 1;
    if (stall) stalls <= stalls + 1;
    if (cout_valid && cout_ready) begin
      checks++;
      if (cout_data !== expect_beat(co_cnt)) begin
        failures++;
        if (failures < 5) $display("MISMATCH beat %0d", co_cnt);
      end
      co_cnt++;
    end
  end

  always @(negedge clk) begin
    fm_valid   = fm_cnt < NTL*256 && (!rnd || $urandom % 3 != 0);
    wt_valid   = wt_cnt < NTL*256 && (!rnd || $urandom % 3 != 0);
    cin_valid  = ci_cnt < NTL*256 && (!rnd || $urandom % 3 != 0);
    cout_ready = !rnd || $urandom % 3 != 0;
  end

  task automatic run(bit r);
    int cyc;
    rnd = r;
    rst_n = 0;
    fm_cnt = 0; wt_cnt = 0; ci_cnt = 0; co_cnt = 0;
    foreach (fmb[a, b]) fmb[a][b] = 8'($urandom);
    foreach (wtb[a, b]) wtb[a][b] = 8'($urandom);
    foreach (cinb[a]) for (int o = 0; o < 8; o++) cinb[a][o] = 48'($signed(32'($urandom)));
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (co_cnt < NTL*256 && cyc < 10000) begin @(posedge clk); cyc++; end
    checks++;
    if (co_cnt != NTL*256) begin failures++; $display("run %0d incomplete", r); end
    if (!r) begin
      checks++;
      if (cyc > (NTL+1)*256 + 8) begin failures++; $display("full rate took %0d cycles", cyc); end
      $display("full rate: %0d cycles for %0d tiles", cyc, NTL);
    end
  endtask

  initial begin
    run(1);
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    run(0);
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
