// tb_store_unit: self-checking test of the SAVE unit.
//
// An FM buffer (the real fm_buffer, one-cycle read latency) is filled with
// random words; SAVEs of random lengths copy ranges of it into the DRAM
// model, which refuses requests at random. The DRAM contents are then
// compared word by word, words outside the range must be untouched, and a
// transfer of L words must take no more than L + refused cycles + a few.
module tb_store_unit;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done;
  xfer_t cmd;
  logic req_valid, req_ready, rsp_valid, fm_re, we = 0;
  ddr_req_t req;
  logic [DDR_W-1:0] rsp_data;
  logic [3:0] rsp_id;
  logic [15:0] fm_raddr, waddr = 0;
  logic [FMB_W-1:0] fm_rdata, wdata = 0;
  int checks = 0, failures = 0;

  store_unit dut (.*);
  fm_buffer #(.DEPTH(1024)) fmb (.clk, .we, .waddr, .wdata, .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata));
  ddr_model #(.DEPTH(2048)) dram (.clk, .req_valid, .req_ready, .req, .req_id(4'd0),
                                  .rsp_valid, .rsp_data, .rsp_id);

  task automatic run(int src, int dst, int len);
    int cyc, ref0;
    cmd = '0; cmd.ddr_addr = DDR_AW'(dst); cmd.buf_addr = 16'(src); cmd.len = 16'(len);
    ref0 = dram.n_refused;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    for (int i = -1; i <= len; i++) begin
      checks++;
      if (i < 0 || i == len) begin
        if (dram.mem[dst + i] !== '0) begin failures++; $display("word outside range written"); end
      end else if (dram.mem[dst + i] !== fmb.mem[src + i]) begin
        failures++; if (failures < 5) $display("word %0d wrong", i);
      end
    end
    checks++;
    if (cyc > len + (dram.n_refused - ref0) + 6) begin
      failures++; $display("SAVE of %0d words took %0d cycles", len, cyc);
    end
  endtask

  initial begin
    for (int i = 0; i < 2048; i++) dram.mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = 16'(a);
      for (int j = 0; j < FMB_W/32; j++) wdata[32*j +: 32] = $urandom;
    end
    @(negedge clk); we = 0;
    run(10, 100, 300);
    run(700, 600, 1);
    run(0, 1000, 0);
    run(400, 1200, 500);
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
