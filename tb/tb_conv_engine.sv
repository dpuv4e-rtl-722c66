// tb_conv_engine: self-checking test of one convolution engine.
//
// The engine gets its instructions directly: LOAD a 12 x 16 x 64 image from
// the DRAM model, CONV the second row of tiles (output rows 8..15, of which
// only 8..11 exist) of a 3x3, stride-1, pad-1 convolution to 128 channels
// with ReLU, then SAVE the 4 x 16 x 128 result. Weights sit in a weight
// buffer preloaded here; biases are written through the engine's bias
// buffer port. The saved DRAM words are compared with values computed here,
// every instruction must be taken only when the engine is idle, and the
// CONV must take no more than (N+1)*256 + 512 cycles plus a margin.
module tb_conv_engine;
  import dpu_pkg::*;

  localparam int H = 12, W = 16, K = 3, N = K*K, SHIFT = 13;
  localparam int A_IMG = 0, A_OUT = 1000, F_OUT = 400;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic instr_valid = 0, instr_ready;
  instr_t instr;
  logic ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  ddr_req_t ddr_req;
  logic [DDR_W-1:0] ddr_rsp_data;
  logic [3:0] rsp_id;
  logic wreq_valid, wreq_ready, wrsp_valid, bb_we = 0, conv_active;
  logic [15:0] wreq_addr, wq_addr [1];
  logic [WB_W-1:0] wrsp_data;
  logic [8:0] bb_waddr = 0;
  logic [FMB_W-1:0] bb_wdata = 0;
  logic [31:0] mac_stall;

  conv_engine #(.FMB_DEPTH(1024), .BB_DEPTH(16)) dut (.*);
  ddr_model #(.DEPTH(2048)) dram (.clk, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req(ddr_req),
    .req_id(4'd0), .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data), .rsp_id);
  assign wq_addr[0] = wreq_addr;
  weight_buffer #(.NENG(1), .DEPTH(4096)) wb (.clk, .rst_n, .we(1'b0), .waddr('0), .wdata('0),
    .req_valid(wreq_valid), .req_ready(wreq_ready), .req_addr(wq_addr),
    .rsp_valid(wrsp_valid), .rsp_data(wrsp_data));

  logic signed [7:0]  img [H][W][64];
  logic signed [7:0]  wt  [128][64][K][K];
  logic signed [31:0] bias [128];
  int checks = 0, failures = 0, conv_cycles = 0;

  always @(posedge clk) if (conv_active) conv_cycles++;

  task automatic issue(opcode_e op, logic [ARG_W-1:0] arg);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = '0; instr.op = op; instr.engine_mask = 8'h01; instr.arg = arg;
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    checks++;
    if (instr_ready) begin failures++; $display("engine still idle after taking an instruction"); end
  endtask

  function automatic logic [ARG_W-1:0] xfer(int ddr, int buf_a, int len);
    xfer_t x;
    x = '0; x.ddr_addr = DDR_AW'(ddr); x.buf_addr = 16'(buf_a); x.len = 16'(len);
    return ARG_W'(x);
  endfunction

  initial begin
    conv_t cv;
    foreach (img[a, b, c]) img[a][b][c] = 8'($urandom);
    foreach (wt[a, b, c, d]) wt[a][b][c][d] = 8'($urandom);
    foreach (bias[i]) bias[i] = $signed(32'($urandom % 40000)) - 20000;
    for (int i = 0; i < 2048; i++) dram.mem[i] = '0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int ch = 0; ch < 64; ch++) dram.mem[A_IMG + y*W + x][8*ch +: 8] = img[y][x][ch];
    for (int n = 0; n < N; n++)
      for (int k = 0; k < 256; k++)
        for (int s = 0; s < 16; s++)
          for (int by = 0; by < 2; by++) begin
            int og, c, b;
            og = s / 4; c = s % 4; b = 2*k + by;
            wb.mem[n*256 + k][16*s + 8*by +: 8] = wt[og*32 + b/16][c*16 + b%16][n/K][n%K];
          end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // biases through the bias buffer port (8 rows per word, lane og)
    for (int wd = 0; wd < 8; wd++) begin
      @(negedge clk);
      bb_we = 1; bb_waddr = 9'(wd);
      for (int r8 = 0; r8 < 8; r8++)
        for (int og = 0; og < 4; og++) begin
          int r;
          logic [31:0] bv;
          r = wd*8 + r8; bv = bias[og*32 + r/2];
          bb_wdata[64*r8 + 16*og +: 16] = (r % 2 == 0) ? bv[15:0] : bv[31:16];
        end
    end
    @(negedge clk); bb_we = 0;
    issue(OP_LOAD, xfer(A_IMG, 0, H*W));
    cv = '0;
    cv.in_base = 0; cv.out_base = F_OUT; cv.in_h = H; cv.in_w = W; cv.out_h = H; cv.out_w = W;
    cv.in_cb = 1; cv.out_cb = 2; cv.oc_blk = 0; cv.k = K; cv.stride = 1; cv.pad = 1;
    cv.oy0 = 8; cv.ox0 = 0; cv.w_base = 0; cv.b_base = 0; cv.shift = SHIFT; cv.act = ACT_RELU;
    issue(OP_CONV, ARG_W'(cv));
    issue(OP_SAVE, xfer(A_OUT, F_OUT + 8*W*2, 4*W*2));
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    for (int y = 8; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int oc = 0; oc < 128; oc++) begin
          longint s;
          logic [7:0] e, g;
          s = bias[oc];
          for (int kh = 0; kh < K; kh++)
            for (int kw = 0; kw < K; kw++) begin
              int iy, ix;
              iy = y + kh - 1; ix = x + kw - 1;
              if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                for (int ic = 0; ic < 64; ic++) s += longint'(img[iy][ix][ic]) * longint'(wt[oc][ic][kh][kw]);
            end
          e = quant8(64'(s), 6'(SHIFT), ACT_RELU);
          g = dram.mem[A_OUT + ((y-8)*W + x)*2 + oc/64][8*(oc%64) +: 8];
          checks++;
          if (g !== e) begin failures++; if (failures < 6) $display("(%0d,%0d) oc %0d got %h exp %h", y, x, oc, g, e); end
        end
    checks++;
    if (conv_cycles > (N+1)*256 + 512 + 128) begin failures++; $display("CONV took %0d cycles", conv_cycles); end
    $display("CONV: %0d cycles for %0d iterations", conv_cycles, N);
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
