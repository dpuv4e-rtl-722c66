// tb_conv_controller: self-checking test of the convolution controller with
// a real Conv PE, FM buffer, bias buffer and weight buffer.
//
// One CONV tile of a 1x1, stride-2 convolution over 128 input channels
// (2 input blocks, so N = 2 graph iterations) from a 16 x 30 map into an
// 8 x 15 output (the 16th tile column falls outside the map and must not be
// written), written as output blocks 2 and 3 of a 4-block layout, with
// channel reuse of the bias (every output group takes lane 0 of the bias
// rows) and no activation. Memories are preloaded directly. Every output
// byte is compared with values computed here; words next to the written ones
// must be untouched; the tile must finish within (N+1)*256 + 512 cycles plus
// a margin (one MAC step per cycle).
module tb_conv_controller;
  import dpu_pkg::*;

  localparam int IH = 16, IW = 30, OH = 8, OW = 15, ICB = 2, N = ICB, SHIFT = 11;
  localparam int F_OUT = 2000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done;
  conv_t cmd;
  logic fm_re, fm_we, wreq_valid, wreq_ready, wrsp_valid, bb_re;
  logic [15:0] fm_raddr, fm_waddr, wreq_addr;
  logic [FMB_W-1:0] fm_rdata, fm_wdata, bb_rdata;
  logic [WB_W-1:0] wrsp_data;
  logic [8:0] bb_raddr;
  logic [7:0] pfv, pfr, prv, prr;
  logic [FM_SW-1:0] pfd [8], prd [8];
  logic [15:0] pwv, pwr;
  logic [WT_SW-1:0] pwd [16];
  logic [3:0] pbv, pbr;
  logic [WT_SW-1:0] pbd [4];
  logic [31:0] mac_stall;
  logic [15:0] wq_addr [1];

  conv_controller dut (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .fm_re, .fm_raddr, .fm_rdata, .fm_we, .fm_waddr, .fm_wdata,
    .wreq_valid, .wreq_ready, .wreq_addr, .wrsp_valid, .wrsp_data,
    .bb_re, .bb_raddr, .bb_rdata,
    .pe_fm_valid(pfv), .pe_fm_ready(pfr), .pe_fm_data(pfd),
    .pe_wt_valid(pwv), .pe_wt_ready(pwr), .pe_wt_data(pwd),
    .pe_bias_valid(pbv), .pe_bias_ready(pbr), .pe_bias_data(pbd),
    .pe_res_valid(prv), .pe_res_ready(prr), .pe_res_data(prd)
  );
  conv_pe pe (.clk, .rst_n, .fm_valid(pfv), .fm_ready(pfr), .fm_data(pfd),
              .wt_valid(pwv), .wt_ready(pwr), .wt_data(pwd),
              .bias_valid(pbv), .bias_ready(pbr), .bias_data(pbd),
              .res_valid(prv), .res_ready(prr), .res_data(prd), .mac_stall);
  fm_buffer #(.DEPTH(4096)) fmb (.clk, .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata),
                                 .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata));
  sdp_ram #(.WIDTH(FMB_W), .DEPTH(16), .AW(9)) bb (.clk, .we(1'b0), .waddr('0), .wdata('0),
                                                   .re(bb_re), .raddr(bb_raddr), .rdata(bb_rdata));
  assign wq_addr[0] = wreq_addr;
  weight_buffer #(.NENG(1), .DEPTH(1024)) wb (.clk, .rst_n, .we(1'b0), .waddr('0), .wdata('0),
    .req_valid(wreq_valid), .req_ready(wreq_ready), .req_addr(wq_addr),
    .rsp_valid(wrsp_valid), .rsp_data(wrsp_data));

  logic signed [7:0]  img [IH][IW][128];
  logic signed [7:0]  wt  [128][128];      // [oc][ic]
  logic signed [31:0] bias [32];
  int checks = 0, failures = 0;

  initial begin
    int cyc;
    foreach (img[a, b, c]) img[a][b][c] = 8'($urandom);
    foreach (wt[a, b]) wt[a][b] = 8'($urandom);
    foreach (bias[i]) bias[i] = $signed(32'($urandom % 40000)) - 20000;
    for (int i = 0; i < 4096; i++) fmb.mem[i] = '0;
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++)
        for (int ch = 0; ch < 128; ch++) fmb.mem[(y*IW + x)*ICB + ch/64][8*(ch%64) +: 8] = img[y][x][ch];
    for (int n = 0; n < N; n++)
      for (int k = 0; k < 256; k++)
        for (int s = 0; s < 16; s++)
          for (int by = 0; by < 2; by++) begin
            int og, c, b;
            og = s / 4; c = s % 4; b = 2*k + by;
            wb.mem[n*256 + k][16*s + 8*by +: 8] = wt[og*32 + b/16][n*64 + c*16 + b%16];
          end
    for (int i = 0; i < 16; i++) bb.mem[i] = {FMB_W/32{$urandom}};
    for (int r = 0; r < 64; r++) begin            // lane 0 only is meaningful
      logic [31:0] bv;
      bv = bias[r/2];
      bb.mem[r/8][64*(r%8) +: 16] = (r % 2 == 0) ? bv[15:0] : bv[31:16];
    end
    cmd = '0;
    cmd.in_base = 0; cmd.out_base = F_OUT; cmd.in_h = IH; cmd.in_w = IW; cmd.out_h = OH; cmd.out_w = OW;
    cmd.in_cb = ICB; cmd.out_cb = 4; cmd.oc_blk = 2; cmd.k = 1; cmd.stride = 2; cmd.pad = 0;
    cmd.w_base = 0; cmd.b_base = 0; cmd.shift = SHIFT; cmd.act = ACT_NONE; cmd.bias_reuse = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < 16; x++)
        for (int blk = 0; blk < 4; blk++) begin
          logic [FMB_W-1:0] w;
          w = fmb.mem[F_OUT + (y*OW + x)*4 + blk];
          if (blk < 2 || x >= OW) begin
            checks++;
            if (x < OW && w !== '0) begin failures++; $display("block %0d written", blk); end
          end else
            for (int c = 0; c < 64; c++) begin
              int oc;
              longint s;
              logic [7:0] e;
              oc = (blk - 2)*64 + c;
              s = bias[oc % 32];
              for (int ic = 0; ic < 128; ic++) s += longint'(img[2*y][2*x][ic]) * longint'(wt[oc][ic]);
              e = quant8(64'(s), 6'(SHIFT), ACT_NONE);
              checks++;
              if (w[8*c +: 8] !== e) begin
                failures++;
                if (failures < 6) $display("(%0d,%0d) oc %0d got %h exp %h", y, x, oc, w[8*c +: 8], e);
              end
            end
        end
    // the word after the last output pixel must be untouched
    checks++;
    if (fmb.mem[F_OUT + OH*OW*4] !== '0) begin failures++; $display("write past the map"); end
    checks++;
    if (cyc > (N+1)*256 + 512 + 128) begin failures++; $display("tile took %0d cycles", cyc); end
    $display("tile: %0d cycles for %0d iterations", cyc, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
