// weight_buffer: the weight memory shared by all computing engines.
//
// Rows are WB_W = 256 bits: 16 halfwords, one for each of the 16 weight
// streams of a Conv PE (lane s = og*4 + c), so one row read feeds every
// stream one beat. The weight loader writes two rows at a time (one 512-bit
// DRAM word, even row address). Each engine has a read request port
// (valid/ready, row address); a response is returned one cycle after the
// grant on a common data bus with a per-engine valid bit.
//
// Sharing (paper Sec. V-A: the weight buffer "can handle data requests from
// multiple Convolution Engines"; shared weights give batch-level
// parallelism): a round-robin arbiter picks one requester per cycle, and every
// other engine requesting the same row in that cycle is served by the same
// read. Engines running the same instruction in step therefore share one read
// per row. The merge rule and the depth (32768 rows = 1 MiB) are this design's
// choices; the paper gives no size.
module weight_buffer
  import dpu_pkg::*;
#(
  parameter int unsigned NENG  = 8,
  parameter int unsigned DEPTH = 32768
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write port from the weight loader: two rows
  input  logic                 we,
  input  logic [15:0]          waddr,      // even row address
  input  logic [2*WB_W-1:0]    wdata,
  // read ports
  input  logic [NENG-1:0]      req_valid,
  output logic [NENG-1:0]      req_ready,
  input  logic [15:0]          req_addr [NENG],
  output logic [NENG-1:0]      rsp_valid,
  output logic [WB_W-1:0]      rsp_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WB_W-1:0] mem [DEPTH];
  logic [$clog2(NENG+1)-1:0] rr;       // engine with the highest priority
  logic [NENG-1:0] grant;
  logic [15:0]     gaddr;
  logic            any;

  always_comb begin
    logic found;
    int   w;
    found = 1'b0;
    w     = 0;
    for (int i = 0; i < NENG; i++) begin
      int e;
      e = (int'(rr) + i) % NENG;
      if (!found && req_valid[e]) begin
        found = 1'b1;
        w     = e;
      end
    end
    any   = found;
    gaddr = req_addr[w];
    for (int e = 0; e < NENG; e++)
      grant[e] = found && req_valid[e] && (req_addr[e] == gaddr);
  end

  assign req_ready = grant;

  always_ff @(posedge clk) begin
    if (we) begin
      mem[{waddr[AW-1:1], 1'b0}] <= wdata[WB_W-1:0];
      mem[{waddr[AW-1:1], 1'b1}] <= wdata[2*WB_W-1:WB_W];
    end
    if (any) rsp_data <= mem[gaddr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= '0;
      rr        <= '0;
    end else begin
      rsp_valid <= grant;
      if (any) rr <= (rr == ($clog2(NENG+1))'(NENG - 1)) ? '0 : rr + 1'b1;
    end
  end

endmodule
