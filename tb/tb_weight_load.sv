// tb_weight_load: self-checking test of the weight loader.
//
// A weight WLOAD of 100 DRAM words must write row pairs (even row addresses
// buf_addr + 2i) into the weight buffer port, and a bias WLOAD of 9 words
// must write bias buffer words buf_addr + i; both are compared with the DRAM
// contents, with random DRAM back-pressure, and each must finish within
// len + latency + refused cycles + a few.
module tb_weight_load;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = !clk;

  logic start = 0, busy, done;
  xfer_t cmd;
  logic req_valid, req_ready, rsp_valid, wb_we, bb_we;
  ddr_req_t req;
  logic [DDR_W-1:0] rsp_data;
  logic [3:0] rsp_id;
  logic [15:0] wb_waddr;
  logic [2*WB_W-1:0] wb_wdata;
  logic [8:0] bb_waddr;
  logic [FMB_W-1:0] bb_wdata;
  logic [WB_W-1:0] wrow [1024];
  logic [FMB_W-1:0] bword [512];
  int checks = 0, failures = 0, n_wb = 0, n_bb = 0;

  weight_load dut (.*);
  ddr_model #(.DEPTH(1024)) dram (.clk, .req_valid, .req_ready, .req, .req_id(4'd0),
                                  .rsp_valid, .rsp_data, .rsp_id);

  always @(posedge clk) begin
    if (wb_we) begin
      wrow[wb_waddr % 1024] <= wb_wdata[WB_W-1:0];
      wrow[(wb_waddr + 1) % 1024] <= wb_wdata[2*WB_W-1:WB_W];
      n_wb <= n_wb + 1;
      if (wb_waddr[0]) begin failures++; $display("odd weight row address"); end
    end
    if (bb_we) begin
      bword[bb_waddr] <= bb_wdata;
      n_bb <= n_bb + 1;
    end
  end

  task automatic run(int src, int dst, int len, bit to_bias);
    int cyc, ref0;
    cmd.ddr_addr = DDR_AW'(src); cmd.buf_addr = 16'(dst); cmd.len = 16'(len); cmd.to_bias = to_bias;
    ref0 = dram.n_refused;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    for (int i = 0; i < len; i++) begin
      checks++;
      if (to_bias) begin
        if (bword[dst + i] !== dram.mem[src + i]) begin failures++; if (failures < 5) $display("bias word %0d wrong", i); end
      end else if ({wrow[dst + 2*i + 1], wrow[dst + 2*i]} !== dram.mem[src + i]) begin
        failures++; if (failures < 5) $display("weight word %0d wrong %h %h", i, wrow[dst+2*i][31:0], dram.mem[src+i][31:0]);
      end
    end
    checks++;
    if (cyc > len + 6 + (dram.n_refused - ref0) + 4) begin failures++; $display("WLOAD took %0d cycles", cyc); end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++)
      for (int j = 0; j < DDR_W/32; j++) dram.mem[i][32*j +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(10, 200, 100, 0);
    run(500, 7, 9, 1);
    checks++;
    if (n_wb != 100 || n_bb != 9) begin failures++; $display("write counts %0d %0d", n_wb, n_bb); end
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
