// tb_misc_unit: self-checking test of the MISC unit.
//
// Two random 5 x 7 feature maps of 2 channel blocks (128 channels) are written
// into an FM buffer. Then: ADD with operand shifts (1, 0), which saturates for
// some channels; MAXPOOL 3x3 stride 2 (windows reaching past the edge ignore
// the missing taps); MAXPOOL 2x2 stride 2; AVGPOOL 3x3 stride 2 and a 7x7
// global average (sum times a reciprocal). Every output byte is compared with
// values computed here. The ADD (two reads with their data cycles, then one
// write per word) must take at most 5*h*w*cb + 8 cycles.
module tb_misc_unit;
  import dpu_pkg::*;

  localparam int H = 5, W = 7, CB = 2;
  localparam int A = 0, B = 100, O1 = 200, O2 = 300, O3 = 400, O4 = 420, O5 = 450;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done, fm_re, fm_we, twe = 0, we;
  misc_t cmd;
  logic [15:0] fm_raddr, fm_waddr, twaddr = 0, waddr;
  logic [FMB_W-1:0] fm_rdata, fm_wdata, twdata = 0, wdata;
  logic signed [7:0] fa [H][W][128], fb [H][W][128];
  int checks = 0, failures = 0;

  misc_unit dut (.*);
  assign we    = fm_we | twe;
  assign waddr = twe ? twaddr : fm_waddr;
  assign wdata = twe ? twdata : fm_wdata;
  fm_buffer #(.DEPTH(512)) fmb (.clk, .we, .waddr, .wdata, .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata));

  function automatic logic [7:0] got(int base, int y, int x, int w, int ch);
    return fmb.mem[base + (y*w + x)*CB + ch/64][8*(ch%64) +: 8];
  endfunction

  task automatic go(misc_t m, output int cyc);
    cmd = m;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin @(posedge clk); cyc++; end
    @(posedge clk);
  endtask

  task automatic pool(int k, int s, int base);
    misc_t m;
    int cyc, oh, ow;
    oh = (H - 1) / s + 1; ow = (W - 1) / s + 1;
    if (k == 2) begin oh = H / 2; ow = W / 2; end
    m = '0; m.op = MISC_MAXPOOL; m.a_base = A; m.out_base = 16'(base); m.h = H; m.w = W; m.cb = CB;
    m.k = 3'(k); m.stride = 2'(s); m.out_h = 8'(oh); m.out_w = 8'(ow);
    go(m, cyc);
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int ch = 0; ch < 128; ch++) begin
          logic signed [7:0] mx;
          mx = -128;
          for (int dy = 0; dy < k; dy++)
            for (int dx = 0; dx < k; dx++)
              if (y*s+dy < H && x*s+dx < W && fa[y*s+dy][x*s+dx][ch] > mx) mx = fa[y*s+dy][x*s+dx][ch];
          checks++;
          if (got(base, y, x, ow, ch) !== mx) begin
            failures++; if (failures < 5) $display("pool k%0d (%0d,%0d,%0d) got %h exp %h", k, y, x, ch, got(base, y, x, ow, ch), mx);
          end
        end
  endtask

  // Average pooling: window sums times mul = round(65536 / taps), rounded,
  // saturated; taps outside the input add nothing.
  task automatic avgpool(int k, int s, int oh, int ow, int base);
    misc_t m;
    int cyc, mul;
    mul = (65536 + k*k/2) / (k*k);
    m = '0; m.op = MISC_AVGPOOL; m.a_base = A; m.out_base = 16'(base); m.h = H; m.w = W; m.cb = CB;
    m.k = 3'(k); m.stride = 2'(s); m.out_h = 8'(oh); m.out_w = 8'(ow); m.avg_mul = 16'(mul);
    go(m, cyc);
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int ch = 0; ch < 128; ch++) begin
          longint sm;
          logic signed [7:0] e;
          sm = 0;
          for (int dy = 0; dy < k; dy++)
            for (int dx = 0; dx < k; dx++)
              if (y*s+dy < H && x*s+dx < W) sm += longint'(fa[y*s+dy][x*s+dx][ch]);
          e = sat8((sm * mul + 32768) >>> 16);
          checks++;
          if (got(base, y, x, ow, ch) !== e) begin
            failures++; if (failures < 5) $display("avgpool k%0d (%0d,%0d,%0d) got %h exp %h", k, y, x, ch, got(base, y, x, ow, ch), e);
          end
        end
  endtask

  initial begin
    misc_t m;
    int cyc;
    foreach (fa[a, b, c]) begin fa[a][b][c] = 8'($urandom); fb[a][b][c] = 8'($urandom); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int cb = 0; cb < CB; cb++) begin
          for (int op = 0; op < 2; op++) begin
            @(negedge clk);
            twe = 1; twaddr = 16'((op ? B : A) + (y*W + x)*CB + cb);
            for (int c = 0; c < 64; c++) twdata[8*c +: 8] = op ? fb[y][x][cb*64+c] : fa[y][x][cb*64+c];
          end
        end
    @(negedge clk); twe = 0;
    m = '0; m.op = MISC_ADD; m.a_base = A; m.b_base = B; m.out_base = O1; m.h = H; m.w = W; m.cb = CB;
    m.sa = 1; m.sb = 0;
    go(m, cyc);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int ch = 0; ch < 128; ch++) begin
          logic signed [7:0] e;
          e = sat8(64'(fa[y][x][ch] >>> 1) + 64'(fb[y][x][ch]));
          checks++;
          if (got(O1, y, x, W, ch) !== e) begin failures++; if (failures < 5) $display("add (%0d,%0d,%0d) got %h exp %h", y, x, ch, got(O1, y, x, W, ch), e); end
        end
    checks++;
    if (cyc > 5*H*W*CB + 8) begin failures++; $display("ADD took %0d cycles", cyc); end
    $display("ADD: %0d cycles for %0d words", cyc, H*W*CB);
    pool(3, 2, O2);
    pool(2, 2, O3);
    avgpool(3, 2, 3, 4, O4);
    avgpool(7, 1, 1, 1, O5);   // global average over the 5 x 7 map
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
