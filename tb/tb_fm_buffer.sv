// tb_fm_buffer: self-checking test of the FM buffer.
//
// Random writes and reads on both ports at once, compared with a reference
// array kept here; the read data must appear exactly one cycle after the
// read request and hold while no read is issued.
module tb_fm_buffer;
  import dpu_pkg::*;

  localparam int D = 256;
  logic clk = 0;
  always #5 clk = !clk;

  logic we, re;
  logic [15:0] waddr, raddr;
  logic [FMB_W-1:0] wdata, rdata;
  logic [FMB_W-1:0] ref_mem [D];
  logic [FMB_W-1:0] exp_q;
  bit exp_v;
  int checks = 0, failures = 0;

  fm_buffer #(.DEPTH(D)) dut (.*);

  function automatic logic [FMB_W-1:0] rnd();
    logic [FMB_W-1:0] v;
    for (int i = 0; i < FMB_W/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; exp_v = 0;
    // fill
    for (int a = 0; a < D; a++) begin
      ref_mem[a] = rnd();
      @(negedge clk); we = 1; waddr = 16'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp_q) begin failures++; if (failures < 5) $display("read mismatch"); end
      end
      re = ($urandom % 3) != 0; raddr = 16'($urandom % D);
      we = ($urandom % 2) != 0; waddr = 16'($urandom % D); wdata = rnd();
      if (we && waddr == raddr) we = 0;     // no same-cycle read/write of one word
      exp_v = re;
      if (re) exp_q = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
    end
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
