// tb_dpuv4e_full: the end-to-end test of tb_dpuv4e_top with the DPU at its
// default size: 8 engines, 16384-word FM buffers, a 32768-row weight buffer
// and 512-word bias buffers, no parameter overridden. All 8 engines run the
// same program on 8 different images (batch 8 on shared weights): WLOAD
// weights and biases, LOAD each image, a 3x3 CONV tile with ReLU, MISC ADD,
// MISC MAXPOOL 2x2, MISC AVGPOOL (global average), SAVE of every result, END. Results are compared with
// values computed here from the definitions; the CONV tile must keep one MAC
// step per cycle ((N+1)*256 + 512 cycles plus margin), and cascade bubbles,
// shared weight reads and DRAM back-pressure must each occur.
module tb_dpuv4e_full;
  import dpu_pkg::*;

  localparam int NENG = 8;
  localparam int H = 8, W = 12, K = 3, NIT = K*K;
  localparam int SHIFT = 13;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic              start = 0;
  logic [DDR_AW-1:0] instr_base;
  logic              busy, done;
  logic [31:0]       n_instr;
  logic              ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  ddr_req_t          ddr_req;
  logic [3:0]        ddr_req_id, ddr_rsp_id;
  logic [DDR_W-1:0]  ddr_rsp_data;
  logic [31:0]       eng_mac_stall [NENG];
  logic [NENG-1:0]   eng_conv_active, wb_rsp_valid;
  logic signed [31:0] lc_bias [32];
  logic              lc_w_ready, lc_in_ready, lc_out_valid;
  logic [4*32*8-1:0] lc_out_data;
  logic [DWC_PAIRS-1:0] dwc_fm_ready, dwc_res_valid, dwc_mac_busy;
  logic [DWC_CLUST-1:0] dwc_wt_ready, dwc_bias_ready;
  logic [FM_SW-1:0]  dwc_fm_data [DWC_PAIRS], dwc_res_data [DWC_PAIRS];
  logic [WT_SW-1:0]  dwc_wt_data [DWC_CLUST], dwc_bias_data [DWC_CLUST];

  dpuv4e_top dut (
    .clk, .rst_n, .start, .instr_base, .busy, .done, .n_instr,
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_req_id,
    .ddr_rsp_valid, .ddr_rsp_data, .ddr_rsp_id,
    .eng_mac_stall, .eng_conv_active, .wb_rsp_valid,
    .lc_acc_n(4'd1), .lc_shift(6'd0), .lc_act(ACT_NONE), .lc_bias,
    .lc_w_valid(1'b0), .lc_w_ready, .lc_w_data('0), .lc_w_restart(1'b0),
    .lc_in_valid(1'b0), .lc_in_ready, .lc_in_data('0),
    .lc_out_valid, .lc_out_ready(1'b1), .lc_out_data,
    .dwc_fm_valid('0), .dwc_fm_ready, .dwc_fm_data,
    .dwc_wt_valid('0), .dwc_wt_ready, .dwc_wt_data,
    .dwc_bias_valid('0), .dwc_bias_ready, .dwc_bias_data,
    .dwc_res_valid, .dwc_res_ready('1), .dwc_res_data, .dwc_mac_busy
  );

  ddr_model #(.DEPTH(16384)) dram (
    .clk, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req(ddr_req), .req_id(ddr_req_id),
    .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data), .rsp_id(ddr_rsp_id)
  );

  // DRAM map (word addresses)
  localparam int A_PROG = 0, A_WT = 64, A_BIAS = 1280, A_IMG = 1300, A_OUT = 2200;
  // FM buffer map
  localparam int F_IN = 0, F_CONV = 128, F_ADD = 384, F_POOL = 640, F_AVG = 700;

  logic signed [7:0]  img [NENG][H][W][64];
  logic signed [7:0]  wt  [128][64][K][K];
  logic signed [31:0] bias [128];
  logic signed [7:0]  e_conv [NENG][H][W][128];
  logic signed [7:0]  e_add  [NENG][H][W][128];
  logic signed [7:0]  e_pool [NENG][H/2][W/2][128];
  logic signed [7:0]  e_avg  [NENG][128];
  localparam int AVG_MUL = (65536 + (H/2)*(W/2)/2) / ((H/2)*(W/2));

  int checks = 0, failures = 0;
  int pc;

  task automatic put(instr_t ins);
    dram.mem[A_PROG + pc] = DDR_W'(ins);
    pc++;
  endtask

  function automatic instr_t mk(opcode_e op, logic [7:0] mask, logic [ARG_W-1:0] arg);
    instr_t i;
    i.op = op; i.engine_mask = mask; i.arg = arg;
    return i;
  endfunction

  function automatic logic [ARG_W-1:0] xfer(int ddr, int buf_a, int len, bit to_bias);
    xfer_t x;
    x.ddr_addr = DDR_AW'(ddr); x.buf_addr = 16'(buf_a); x.len = 16'(len); x.to_bias = to_bias;
    return ARG_W'(x);
  endfunction

  // ---------------------------------------------------------------- counters
  int n_bubble = 0, n_shared = 0, n_refused = 0, conv_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < NENG; e++) n_bubble += $countones(eng_mac_stall[e]);
    if ($countones(wb_rsp_valid) > 1) n_shared++;
    if (ddr_req_valid && !ddr_req_ready) n_refused++;
    if (eng_conv_active[0]) conv_cycles++;
  end

  initial begin
    instr_t ins;
    conv_t  cv;
    misc_t  mi;
    foreach (lc_bias[i]) lc_bias[i] = 0;
    foreach (img[a, b, c, d]) img[a][b][c][d] = 8'($urandom);
    foreach (wt[a, b, c, d])  wt[a][b][c][d]  = 8'($urandom);
    foreach (bias[i]) bias[i] = $signed(32'($urandom % 40000)) - 20000;
    for (int i = 0; i < 16384; i++) dram.mem[i] = '0;
    // weights: row n*256 + k, lane og*4+c = bytes 2k, 2k+1 of core (og, c),
    // byte b = oc_local*16 + ic_local
    for (int n = 0; n < NIT; n++)
      for (int k = 0; k < 256; k++) begin
        logic [WB_W-1:0] row;
        int kh, kw;
        kh = n / K; kw = n % K;
        for (int s = 0; s < 16; s++) begin
          int og, c;
          og = s / 4; c = s % 4;
          for (int by = 0; by < 2; by++) begin
            int b;
            b = 2*k + by;
            row[16*s + 8*by +: 8] = wt[og*32 + b/16][c*16 + b%16][kh][kw];
          end
        end
        dram.mem[A_WT + (n*256 + k)/2][WB_W*((n*256+k)%2) +: WB_W] = row;
      end
    // biases: row r lane og = halfword r of the packet body of group og
    for (int r = 0; r < 64; r++)
      for (int og = 0; og < 4; og++) begin
        logic [31:0] bv;
        bv = bias[og*32 + r/2];
        dram.mem[A_BIAS + r/8][64*(r%8) + 16*og +: 16] = (r % 2 == 0) ? bv[15:0] : bv[31:16];
      end
    // images: word (y*W + x), channel ch at byte ch
    for (int e = 0; e < NENG; e++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int ch = 0; ch < 64; ch++)
            dram.mem[A_IMG + e*H*W + y*W + x][8*ch +: 8] = img[e][y][x][ch];
    // expected results
    for (int e = 0; e < NENG; e++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int oc = 0; oc < 128; oc++) begin
            longint s;
            s = bias[oc];
            for (int kh = 0; kh < K; kh++)
              for (int kw = 0; kw < K; kw++) begin
                int iy, ix;
                iy = y + kh - 1; ix = x + kw - 1;
                if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                  for (int ic = 0; ic < 64; ic++)
                    s += longint'(img[e][iy][ix][ic]) * longint'(wt[oc][ic][kh][kw]);
              end
            e_conv[e][y][x][oc] = quant8(64'(s), 6'(SHIFT), ACT_RELU);
            e_add[e][y][x][oc]  = sat8(64'(e_conv[e][y][x][oc] >>> 1) + 64'(e_conv[e][y][x][oc] >>> 1));
          end
      for (int y = 0; y < H/2; y++)
        for (int x = 0; x < W/2; x++)
          for (int oc = 0; oc < 128; oc++) begin
            logic signed [7:0] m;
            m = e_add[e][2*y][2*x][oc];
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (e_add[e][2*y+dy][2*x+dx][oc] > m) m = e_add[e][2*y+dy][2*x+dx][oc];
            e_pool[e][y][x][oc] = m;
          end
      for (int oc = 0; oc < 128; oc++) begin
        longint sm;
        sm = 0;
        for (int y = 0; y < H/2; y++)
          for (int x = 0; x < W/2; x++) sm += longint'(e_pool[e][y][x][oc]);
        e_avg[e][oc] = sat8((sm * AVG_MUL + 32768) >>> 16);
      end
    end
    // program
    pc = 0;
    put(mk(OP_WLOAD, 8'h00, xfer(A_WT, 0, NIT*128, 0)));
    put(mk(OP_WLOAD, 8'h00, xfer(A_BIAS, 0, 8, 1)));
    for (int e = 0; e < NENG; e++)
      put(mk(OP_LOAD, 8'(1 << e), xfer(A_IMG + e*H*W, F_IN, H*W, 0)));
    cv = '0;
    cv.in_base = F_IN; cv.out_base = F_CONV; cv.in_h = H; cv.in_w = W; cv.out_h = H; cv.out_w = W;
    cv.in_cb = 1; cv.out_cb = 2; cv.oc_blk = 0; cv.k = K; cv.stride = 1; cv.pad = 1;
    cv.oy0 = 0; cv.ox0 = 0; cv.w_base = 0; cv.b_base = 0; cv.shift = SHIFT; cv.act = ACT_RELU;
    put(mk(OP_CONV, 8'((1 << NENG) - 1), ARG_W'(cv)));
    mi = '0;
    mi.op = MISC_ADD; mi.a_base = F_CONV; mi.b_base = F_CONV; mi.out_base = F_ADD;
    mi.h = H; mi.w = W; mi.cb = 2; mi.sa = 1; mi.sb = 1;
    put(mk(OP_MISC, 8'((1 << NENG) - 1), ARG_W'(mi)));
    mi = '0;
    mi.op = MISC_MAXPOOL; mi.a_base = F_ADD; mi.out_base = F_POOL; mi.h = H; mi.w = W; mi.cb = 2;
    mi.k = 2; mi.stride = 2; mi.out_h = H/2; mi.out_w = W/2;
    put(mk(OP_MISC, 8'((1 << NENG) - 1), ARG_W'(mi)));
    mi = '0;   // global average of the pooled map (window W/2 covers it)
    mi.op = MISC_AVGPOOL; mi.a_base = F_POOL; mi.out_base = F_AVG; mi.h = H/2; mi.w = W/2; mi.cb = 2;
    mi.k = W/2; mi.stride = 1; mi.out_h = 1; mi.out_w = 1; mi.avg_mul = AVG_MUL;
    put(mk(OP_MISC, 8'((1 << NENG) - 1), ARG_W'(mi)));
    for (int e = 0; e < NENG; e++) begin
      put(mk(OP_SAVE, 8'(1 << e), xfer(A_OUT + e*1024, F_CONV, H*W*2, 0)));
      put(mk(OP_SAVE, 8'(1 << e), xfer(A_OUT + e*1024 + 256, F_ADD, H*W*2, 0)));
      put(mk(OP_SAVE, 8'(1 << e), xfer(A_OUT + e*1024 + 512, F_POOL, H*W/2, 0)));
      put(mk(OP_SAVE, 8'(1 << e), xfer(A_OUT + e*1024 + 600, F_AVG, 2, 0)));
    end
    put(mk(OP_SYNC, 8'h00, '0));
    put(mk(OP_END, 8'h00, '0));

    instr_base = A_PROG;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);

    // ---------------------------------------------------------------- check
    for (int e = 0; e < NENG; e++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int oc = 0; oc < 128; oc++) begin
            logic [7:0] gc, ga;
            gc = dram.mem[A_OUT + e*1024 + (y*W + x)*2 + oc/64][8*(oc%64) +: 8];
            ga = dram.mem[A_OUT + e*1024 + 256 + (y*W + x)*2 + oc/64][8*(oc%64) +: 8];
            checks += 2;
            if (gc !== e_conv[e][y][x][oc]) begin
              failures++;
              if (failures < 8) $display("conv e%0d (%0d,%0d) oc%0d got %h exp %h", e, y, x, oc, gc, e_conv[e][y][x][oc]);
            end
            if (ga !== e_add[e][y][x][oc]) begin
              failures++;
              if (failures < 8) $display("add e%0d (%0d,%0d) oc%0d got %h exp %h", e, y, x, oc, ga, e_add[e][y][x][oc]);
            end
            if (y < H/2 && x < W/2) begin
              logic [7:0] gp;
              gp = dram.mem[A_OUT + e*1024 + 512 + (y*(W/2) + x)*2 + oc/64][8*(oc%64) +: 8];
              checks++;
              if (gp !== e_pool[e][y][x][oc]) begin
                failures++;
                if (failures < 8) $display("pool e%0d (%0d,%0d) oc%0d got %h exp %h", e, y, x, oc, gp, e_pool[e][y][x][oc]);
              end
            end
          end
    for (int e = 0; e < NENG; e++)
      for (int oc = 0; oc < 128; oc++) begin
        logic [7:0] g;
        g = dram.mem[A_OUT + e*1024 + 600 + oc/64][8*(oc%64) +: 8];
        checks++;
        if (g !== e_avg[e][oc]) begin
          failures++;
          if (failures < 8) $display("avg e%0d oc%0d got %h exp %h", e, oc, g, e_avg[e][oc]);
        end
      end
    // ---------------------------------------------------------------- mechanisms
    $display("instructions %0d, conv cycles %0d (bound %0d), cascade bubbles %0d, shared weight reads %0d, DRAM refusals %0d",
             n_instr, conv_cycles, (NIT+1)*256 + 512 + 128, n_bubble, n_shared, n_refused);
    checks++; if (n_instr != pc) begin failures++; $display("retired %0d of %0d instructions", n_instr, pc); end
    checks++; if (conv_cycles > (NIT+1)*256 + 512 + 128) begin failures++; $display("CONV too slow"); end
    checks++; if (n_bubble == 0) begin failures++; $display("no cascade bubble seen"); end
    checks++; if (n_shared == 0) begin failures++; $display("no shared weight read seen"); end
    checks++; if (n_refused == 0) begin failures++; $display("no DRAM back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
