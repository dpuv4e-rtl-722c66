// tb_scheduler: self-checking test of the scheduler.
//
// A random program of 60 instructions (LOAD/SAVE/CONV/MISC with random
// engine masks, WLOAD, SYNC) ending in END is placed in the DRAM model. Four
// engine models take an instruction when idle and then stay busy for a
// random time; a weight-loader model does the same. Checked: each engine
// receives exactly the instructions whose mask names it, in program order;
// all engines named by one instruction receive it in the same cycle; WLOAD
// starts only while every engine is idle and nothing is dispatched while it
// runs; `done` comes once, after END, with every engine idle; the retired
// count equals the program length.
module tb_scheduler;
  import dpu_pkg::*;

  localparam int NENG = 4, NP = 60;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done, req_valid, req_ready, rsp_valid, wl_start, wl_busy, wl_done;
  logic [DDR_AW-1:0] instr_base = 24'd40;
  ddr_req_t req;
  logic [DDR_W-1:0] rsp_data;
  logic [3:0] rsp_id;
  logic [NENG-1:0] eng_valid, eng_ready;
  instr_t eng_instr, prog [NP+1];
  xfer_t wl_cmd;
  logic [31:0] n_instr;
  int eng_left [NENG], wl_left, exp_idx [NENG], wl_idx;
  int checks = 0, failures = 0, n_done = 0, n_wl = 0;

  scheduler #(.NENG(NENG)) dut (.*);
  ddr_model #(.DEPTH(256)) dram (.clk, .req_valid, .req_ready, .req, .req_id(4'd0),
                                 .rsp_valid, .rsp_data, .rsp_id);

  always_comb for (int e = 0; e < NENG; e++) eng_ready[e] = (eng_left[e] == 0);
  assign wl_busy = (wl_left > 0);

  // next program index at or after i whose mask names engine e
  function automatic int next_for(int e, int i);
    while (i < NP && !(prog[i].op inside {OP_LOAD, OP_SAVE, OP_CONV, OP_MISC} && prog[i].engine_mask[e])) i++;
    return i;
  endfunction

  always @(posedge clk) if (rst_n) begin
    wl_done <= 1'b0;
    if (wl_left == 1) wl_done <= 1'b1;
    if (wl_left > 0) wl_left <= wl_left - 1;
    if (wl_start) begin
      checks++;
      if (!(&eng_ready) || wl_busy) begin failures++; $display("WLOAD started while busy"); end
      wl_idx = next_wl(wl_idx);
      checks++;
      if (wl_cmd !== xfer_t'(prog[wl_idx].arg[$bits(xfer_t)-1:0])) begin failures++; $display("wrong WLOAD"); end
      wl_idx++;
      wl_left <= 1 + $urandom % 20;
      n_wl++;
    end
    for (int e = 0; e < NENG; e++) begin
      if (eng_left[e] > 0) eng_left[e] <= eng_left[e] - 1;
      if (eng_valid[e] && eng_ready[e]) begin
        int k;
        k = next_for(e, exp_idx[e]);
        checks++;
        if (k >= NP || eng_instr !== prog[k]) begin failures++; if (failures < 6) $display("engine %0d got wrong instruction (exp #%0d)", e, k); end
        for (int f = 0; f < NENG; f++) begin
          checks++;
          if (eng_instr.engine_mask[f] && !(eng_valid[f] && eng_ready[f])) begin failures++; $display("engines not issued together"); end
        end
        checks++;
        if (wl_busy) begin failures++; $display("dispatch during WLOAD"); end
        exp_idx[e] = k + 1;
        eng_left[e] <= 1 + $urandom % 30;
      end
    end
    if (done) begin
      n_done++;
      checks++;
      if (!(&eng_ready)) begin failures++; $display("done while engines busy"); end
    end
  end

  function automatic int next_wl(int i);
    while (i < NP && prog[i].op != OP_WLOAD) i++;
    return i;
  endfunction

  initial begin
    int nw;
    nw = 0;
    for (int i = 0; i < NP; i++) begin
      int r;
      r = $urandom % 8;
      prog[i] = '0;
      prog[i].op = (r < 4) ? opcode_e'(r + 1) : (r < 6) ? OP_CONV : (r == 6) ? OP_WLOAD : OP_SYNC;
      prog[i].engine_mask = 8'(1 + $urandom % ((1 << NENG) - 1));
      for (int j = 0; j < ARG_W; j++) prog[i].arg[j] = 1'($urandom);
      if (prog[i].op == OP_WLOAD) nw++;
    end
    prog[NP] = '0; prog[NP].op = OP_END;
    for (int i = 0; i < 256; i++) dram.mem[i] = '0;
    for (int i = 0; i <= NP; i++) dram.mem[40 + i] = DDR_W'(prog[i]);
    foreach (eng_left[e]) begin eng_left[e] = 0; exp_idx[e] = 0; end
    wl_left = 0; wl_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int e = 0; e < NENG; e++) begin
      checks++;
      if (next_for(e, exp_idx[e]) != NP) begin failures++; $display("engine %0d missed instructions", e); end
    end
    checks++; if (n_done != 1) begin failures++; $display("done count %0d", n_done); end
    checks++; if (n_wl != nw) begin failures++; $display("WLOADs %0d of %0d", n_wl, nw); end
    checks++; if (n_instr != NP + 1) begin failures++; $display("retired %0d", n_instr); end
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
