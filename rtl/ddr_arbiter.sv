// ddr_arbiter: shares the one DRAM port among the DPU's requesters (the
// scheduler's instruction fetch, the weight loader and the engines).
//
// Round-robin: each cycle the first requester at or after the one after the
// last winner is forwarded, tagged with its index as the request id. The
// DRAM returns read data with the id, in request order, and the arbiter
// routes it back by that id. Writes are posted and return nothing. The
// paper's DRAM access goes through the Versal NoC and the vendor's memory
// controller; this port and the arbiter are this design's own.
module ddr_arbiter
  import dpu_pkg::*;
#(
  parameter int unsigned N  = 10,
  parameter int unsigned IW = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  ddr_req_t          in_req [N],
  output logic [N-1:0]      in_rsp_valid,
  output logic              out_valid,
  input  logic              out_ready,
  output ddr_req_t          out_req,
  output logic [IW-1:0]     out_id,
  input  logic              rsp_valid,
  input  logic [IW-1:0]     rsp_id
);

  logic [IW-1:0] last;
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int i = 1; i <= N; i++) begin
      int e;
      e = (int'(last) + i) % N;
      if (!any && in_valid[e]) begin
        any = 1'b1;
        win = IW'(e);
      end
    end
    out_valid = any;
    out_req   = in_req[win];
    out_id    = win;
    in_ready  = '0;
    in_ready[win] = any && out_ready;
    in_rsp_valid = '0;
    if (rsp_valid) in_rsp_valid[rsp_id] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (any && out_ready) last <= win;
  end

endmodule
