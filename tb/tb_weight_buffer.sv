// tb_weight_buffer: self-checking test of the shared weight buffer.
//
// Writes random row pairs, then lets 4 engines request rows at random; a
// quarter of the time all requesters ask for the same row, which must be
// served by a single read (several rsp_valid bits in one cycle). Every
// response is compared with a reference array; every request must be granted
// within NENG cycles (round-robin fairness) and answered exactly one cycle
// after its grant.
module tb_weight_buffer;
  import dpu_pkg::*;

  localparam int NENG = 4, D = 128;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic we;
  logic [15:0] waddr;
  logic [2*WB_W-1:0] wdata;
  logic [NENG-1:0] req_valid, req_ready, rsp_valid;
  logic [15:0] req_addr [NENG];
  logic [WB_W-1:0] rsp_data;
  logic [WB_W-1:0] ref_mem [D];
  logic [NENG-1:0] granted;
  logic [15:0] gaddr [NENG];
  int wait_c [NENG];
  int checks = 0, failures = 0, merged = 0;

  weight_buffer #(.NENG(NENG), .DEPTH(D)) dut (.*);

  initial begin
    we = 0; waddr = 0; wdata = 0; req_valid = 0; granted = 0;
    foreach (req_addr[i]) begin req_addr[i] = 0; wait_c[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a += 2) begin
      @(negedge clk);
      for (int i = 0; i < 2*WB_W/32; i++) wdata[32*i +: 32] = $urandom;
      ref_mem[a] = wdata[WB_W-1:0]; ref_mem[a+1] = wdata[2*WB_W-1:WB_W];
      we = 1; waddr = 16'(a);
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      bit same;
      int sa;
      same = ($urandom % 4) == 0; sa = $urandom % D;
      for (int e = 0; e < NENG; e++)
        if (!req_valid[e] && ($urandom % 2)) begin
          req_valid[e] = 1;
          req_addr[e]  = 16'(same ? sa : $urandom % D);
        end
      @(posedge clk);
      // responses to last cycle's grants
      for (int e = 0; e < NENG; e++) begin
        checks++;
        if (rsp_valid[e] !== granted[e]) begin failures++; $display("rsp_valid wrong e%0d", e); end
        if (granted[e]) begin
          checks++;
          if (rsp_data !== ref_mem[gaddr[e]]) begin failures++; if (failures < 5) $display("data wrong e%0d", e); end
        end
      end
      if ($countones(rsp_valid) > 1) merged++;
      granted = req_valid & req_ready;
      for (int e = 0; e < NENG; e++) begin
        gaddr[e] = req_addr[e];
        if (req_valid[e] && !req_ready[e]) wait_c[e]++;
        else wait_c[e] = 0;
        checks++;
        if (wait_c[e] >= NENG) begin failures++; $display("engine %0d starved", e); end
      end
      #1;
      for (int e = 0; e < NENG; e++) if (granted[e]) req_valid[e] = 0;
    end
    checks++;
    if (merged == 0) begin failures++; $display("no merged read"); end
    $display("merged reads %0d", merged);
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
