// ddr_model: behavioural DRAM for the testbenches (not part of the design).
//
// DEPTH words of 512 bits. A request is accepted when `req_ready` is high,
// which the model drops at random (about one cycle in READY_GAP) to exercise
// back-pressure. A read returns its word with the request id exactly LAT
// cycles after acceptance, so reads come back in order; a write updates the
// array at acceptance. Counters report accepted reads, writes and refused
// cycles.
module ddr_model
  import dpu_pkg::*;
#(
  parameter int unsigned DEPTH     = 8192,
  parameter int unsigned LAT       = 6,
  parameter int unsigned READY_GAP = 4
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  ddr_req_t          req,
  input  logic [3:0]        req_id,
  output logic              rsp_valid,
  output logic [DDR_W-1:0]  rsp_data,
  output logic [3:0]        rsp_id
);

  logic [DDR_W-1:0] mem [DEPTH];
  logic             pv [LAT];
  logic [DDR_W-1:0] pd [LAT];
  logic [3:0]       pi [LAT];
  int n_rd = 0, n_wr = 0, n_refused = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 0; pd[i] = '0; pi[i] = '0; end
    req_ready = 1;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
  assign rsp_id    = pi[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; pi[i] <= pi[i-1]; end
    pv[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req.we) begin
        mem[req.addr % DEPTH] <= req.wdata;
        n_wr <= n_wr + 1;
      end else begin
        pv[0] <= 1'b1;
        pd[0] <= mem[req.addr % DEPTH];
        pi[0] <= req_id;
        n_rd <= n_rd + 1;
      end
    end
    if (req_valid && !req_ready) n_refused <= n_refused + 1;
  end

  always @(negedge clk) req_ready = ($urandom % READY_GAP) != 0;

endmodule
