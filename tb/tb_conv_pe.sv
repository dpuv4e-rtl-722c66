// tb_conv_pe: self-checking test of the convolution PE.
//
// Two output tiles are run, each accumulated over NIT graph iterations
// (8 x 16 pixels x 64 input channels x 128 output channels per iteration),
// with random INT8 feature maps, weights and 32-bit biases. The expected
// INT8 results are computed here directly from the definition of the
// convolution sum (bias + sum over iterations, MAC cores and channels),
// then shifted, rounded, ReLU'd and saturated. The test runs twice: once
// with random gaps on every stream and random back-pressure on the results
// (pipeline bubbles must appear in the cascade), once at full rate, where
// the PE must sustain one MAC step per cycle: the two tiles must finish in
// about (2*NIT + 1) * 256 + 512 cycles (load of the first tile, 2*NIT
// iterations of 256 cycles, drain of the last NL tile).
module tb_conv_pe;
  import dpu_pkg::*;

  localparam int NIT = 2;           // iterations per tile
  localparam int NT  = 2;           // tiles
  localparam int NI  = NIT * NT;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic [7:0]  fmb [NI][2][4][1024];
  logic [7:0]  wtb [NI][4][4][512];
  logic signed [31:0] bias [NT][128];
  logic [5:0]  shift [NT];
  act_e        act   [NT];

  logic [7:0]  fm_valid, fm_ready;
  logic [31:0] fm_data [8];
  logic [15:0] wt_valid, wt_ready;
  logic [15:0] wt_data [16];
  logic [3:0]  bias_valid, bias_ready;
  logic [15:0] bias_data [4];
  logic [7:0]  res_valid, res_ready;
  logic [31:0] res_data [8];
  logic [31:0] mac_stall;

  conv_pe dut (.*);

  int checks = 0, failures = 0;
  int fm_cnt [8], wt_cnt [16], b_cnt [4], r_cnt [8];
  bit rnd_mode;
  int stalls = 0;

  // stream drivers
  always_comb begin
    for (int i = 0; i < 8; i++) begin
      int it, k;
      it = fm_cnt[i] / 256; k = fm_cnt[i] % 256;
      fm_data[i] = (it < NI) ? {fmb[it][i/4][i%4][4*k+3], fmb[it][i/4][i%4][4*k+2],
                                fmb[it][i/4][i%4][4*k+1], fmb[it][i/4][i%4][4*k]} : '0;
    end
    for (int i = 0; i < 16; i++) begin
      int it, k;
      it = wt_cnt[i] / 256; k = wt_cnt[i] % 256;
      wt_data[i] = (it < NI) ? {wtb[it][i/4][i%4][2*k+1], wtb[it][i/4][i%4][2*k]} : '0;
    end
    for (int i = 0; i < 4; i++) begin
      int t, k;
      t = b_cnt[i] / 66; k = b_cnt[i] % 66;
      if (t >= NT)     bias_data[i] = '0;
      else if (k == 0) bias_data[i] = 16'(NIT);
      else if (k == 1) bias_data[i] = {6'd0, act[t], 2'd0, shift[t]};
      else begin
        logic [31:0] bv;
        bv = bias[t][i*32 + (k-2)/2];
        bias_data[i] = ((k % 2) == 0) ? bv[15:0] : bv[31:16];
      end
    end
  end

  function automatic logic [31:0] expect_word(int t, int r, int w);
    int h, og, px;
    logic [31:0] res;
    h = r / 4; og = r % 4; px = w / 8;
    for (int j = 0; j < 4; j++) begin
      int oc;
      longint s;
      oc = og*32 + (w % 8)*4 + j;
      s = bias[t][oc];
      for (int it = t*NIT; it < (t+1)*NIT; it++)
        for (int c = 0; c < 4; c++)
          for (int ic = 0; ic < 16; ic++)
            s += longint'($signed(fmb[it][h][c][px*16+ic])) *
                 longint'($signed(wtb[it][og][c][(oc%32)*16+ic]));
      res[8*j +: 8] = quant8(64'(s), shift[t], act[t]);
    end
    return res;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 8; i++)  if (fm_valid[i] && fm_ready[i]) fm_cnt[i] <= fm_cnt[i] + 1;
    for (int i = 0; i < 16; i++) if (wt_valid[i] && wt_ready[i]) wt_cnt[i] <= wt_cnt[i] + 1;
    for (int i = 0; i < 4; i++)  if (bias_valid[i] && bias_ready[i]) b_cnt[i] <= b_cnt[i] + 1;
    for (int r = 0; r < 8; r++)
      if (res_valid[r] && res_ready[r]) begin
        logic [31:0] e;
        e = expect_word(r_cnt[r] / 512, r, r_cnt[r] % 512);
        checks++;
        if (res_data[r] !== e) begin
          failures++;
          if (failures < 10) $display("MISMATCH chain %0d word %0d got %h exp %h", r, r_cnt[r], res_data[r], e);
        end
        r_cnt[r]++;
      end
    stalls += $countones(mac_stall);
  end

  always @(negedge clk) begin
    for (int i = 0; i < 8; i++)  fm_valid[i] = (fm_cnt[i] < NI*256) && (!rnd_mode || ($urandom % 4 != 0));
    for (int i = 0; i < 16; i++) wt_valid[i] = (wt_cnt[i] < NI*256) && (!rnd_mode || ($urandom % 4 != 0));
    for (int i = 0; i < 4; i++)  bias_valid[i] = (b_cnt[i] < NT*66) && (!rnd_mode || ($urandom % 2 != 0));
    for (int r = 0; r < 8; r++)  res_ready[r] = !rnd_mode || ($urandom % 4 != 0);
  end

  task automatic run(bit rm);
    int cyc;
    bit done;
    rnd_mode = rm;
    rst_n = 0;
    foreach (fm_cnt[i]) fm_cnt[i] = 0;
    foreach (wt_cnt[i]) wt_cnt[i] = 0;
    foreach (b_cnt[i])  b_cnt[i] = 0;
    foreach (r_cnt[i])  r_cnt[i] = 0;
    foreach (fmb[a, b, c, d]) fmb[a][b][c][d] = 8'($urandom);
    foreach (wtb[a, b, c, d]) wtb[a][b][c][d] = 8'($urandom);
    foreach (bias[a, b]) bias[a][b] = $signed(32'($urandom % 200000)) - 100000;
    for (int t = 0; t < NT; t++) begin
      shift[t] = 6'(10 + t);
      act[t]   = (t == 0) ? ACT_RELU : ACT_NONE;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    done = 0;
    while (!done && cyc < 20000) begin
      @(posedge clk);
      cyc++;
      done = 1;
      foreach (r_cnt[r]) if (r_cnt[r] < NT*512) done = 0;
    end
    checks++;
    if (!done) begin
      failures++;
      $display("run %0d did not finish", rm);
    end
    if (!rm) begin
      checks++;
      if (cyc > (2*NIT + 1)*256 + 512 + 40) begin
        failures++;
        $display("full-rate run took %0d cycles, expected <= %0d", cyc, (2*NIT+1)*256+512+40);
      end
      $display("full-rate run: %0d cycles for %0d iterations", cyc, NI);
    end
  endtask

  initial begin
    run(1);
    checks++;
    if (stalls == 0) begin failures++; $display("no cascade bubble seen"); end
    $display("cascade bubbles (core-cycles): %0d", stalls);
    run(0);
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
