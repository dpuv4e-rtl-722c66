// tb_load_unit: self-checking test of the LOAD unit.
//
// Three LOADs of random lengths (including a zero-length one) copy DRAM
// words into an FM buffer modelled here. The DRAM model refuses requests at
// random. Every written FM word is checked against the DRAM contents; the
// unit must issue one request per cycle when accepted, so a transfer of L
// words must finish within L + LAT + refused cycles + a few.
module tb_load_unit;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done;
  xfer_t cmd;
  logic req_valid, req_ready, rsp_valid, fm_we;
  ddr_req_t req;
  logic [DDR_W-1:0] rsp_data;
  logic [3:0] rsp_id;
  logic [15:0] fm_waddr;
  logic [FMB_W-1:0] fm_wdata;
  logic [FMB_W-1:0] fm [1024];
  int checks = 0, failures = 0;

  load_unit dut (.*);
  ddr_model #(.DEPTH(2048)) dram (.clk, .req_valid, .req_ready, .req, .req_id(4'd0),
                                  .rsp_valid, .rsp_data, .rsp_id);

  always @(posedge clk) if (fm_we) fm[fm_waddr % 1024] <= fm_wdata;

  task automatic run(int src, int dst, int len);
    int cyc, ref0;
    cmd = '0; cmd.ddr_addr = DDR_AW'(src); cmd.buf_addr = 16'(dst); cmd.len = 16'(len);
    ref0 = dram.n_refused;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    for (int i = 0; i < len; i++) begin
      checks++;
      if (fm[dst + i] !== dram.mem[src + i]) begin failures++; if (failures < 5) $display("word %0d wrong", i); end
    end
    checks++;
    if (cyc > len + 6 + (dram.n_refused - ref0) + 4) begin
      failures++; $display("LOAD of %0d words took %0d cycles", len, cyc);
    end
  endtask

  initial begin
    for (int i = 0; i < 2048; i++)
      for (int j = 0; j < DDR_W/32; j++) dram.mem[i][32*j +: 32] = $urandom;
    foreach (fm[i]) fm[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(100, 0, 200);
    run(900, 300, 1);
    run(5, 500, 0);
    run(1500, 512, 400);
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
