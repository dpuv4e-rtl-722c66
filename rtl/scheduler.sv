// scheduler: fetches the instruction stream from DRAM and dispatches it
// to the computing engines and the weight loader (paper Fig. 2; "All
// computing engines share one scheduler unit, implemented in PL").
//
// After `start` it reads one instruction per DRAM word from instr_base
// upwards (one fetch at a time) and acts on its opcode:
// * LOAD, SAVE, CONV, MISC go to every engine in engine_mask. The scheduler
//   waits until all of those engines are idle (eng_ready is an idle flag,
//   not a handshake) and hands the instruction to all of them in the same
//   cycle. Engines given the same CONV therefore run in lock step and read each
//   weight row together, which the weight buffer serves with one read: the
//   paper's shared weights for batch-level parallelism.
// * WLOAD waits until every engine is idle, then runs the weight loader to
//   completion (weights and biases must not change under a running CONV).
// * SYNC waits until every engine is idle; END does the same, then raises
//   `done` for one cycle and stops.
// The encoding and the one-fetch-at-a-time policy are this design's own;
// the paper says instructions are decoded and queued but not how.
module scheduler
  import dpu_pkg::*;
#(
  parameter int unsigned NENG = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DDR_AW-1:0] instr_base,
  output logic              busy,
  output logic              done,
  // DRAM port (instruction fetch)
  output logic              req_valid,
  input  logic              req_ready,
  output ddr_req_t          req,
  input  logic              rsp_valid,
  input  logic [DDR_W-1:0]  rsp_data,
  // engines
  output logic [NENG-1:0]   eng_valid,
  input  logic [NENG-1:0]   eng_ready,   // also: engine idle
  output instr_t            eng_instr,
  // weight loader
  output logic              wl_start,
  output xfer_t             wl_cmd,
  input  logic              wl_busy,
  input  logic              wl_done,
  // statistics
  output logic [31:0]       n_instr
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WAIT, S_DISP, S_WL} state_e;

  state_e            st;
  logic [DDR_AW-1:0] pc;
  instr_t            ir;
  logic [NENG-1:0]   sent;
  logic              all_idle;
  logic [NENG-1:0]   mask;

  assign mask      = ir.engine_mask[NENG-1:0];
  assign all_idle  = &eng_ready && !wl_busy;
  assign busy      = (st != S_IDLE);
  assign req_valid = (st == S_FETCH);
  assign req.we    = 1'b0;
  assign req.addr  = pc;
  assign req.wdata = '0;
  assign eng_instr = ir;
  assign wl_cmd    = xfer_t'(ir.arg[$bits(xfer_t)-1:0]);
  assign wl_start  = (st == S_DISP) && ir.op == OP_WLOAD && all_idle;

  logic is_eng;
  assign is_eng = ir.op inside {OP_LOAD, OP_SAVE, OP_CONV, OP_MISC};

  always_comb begin
    for (int e = 0; e < NENG; e++)
      eng_valid[e] = (st == S_DISP) && is_eng && mask[e] && !sent[e] && ((eng_ready | ~mask) == '1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; ir <= '0; sent <= '0; done <= 1'b0; n_instr <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          pc <= instr_base;
          st <= S_FETCH;
        end
        S_FETCH: if (req_ready) st <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          ir   <= instr_t'(rsp_data[INSTR_W-1:0]);
          sent <= '0;
          st   <= S_DISP;
        end
        S_DISP: begin
          if (is_eng) begin
            if ((sent | (eng_valid & eng_ready)) == mask) begin
              pc <= pc + 1'b1; n_instr <= n_instr + 32'd1; st <= S_FETCH;
            end
            sent <= sent | (eng_valid & eng_ready);
          end else if (ir.op == OP_WLOAD) begin
            if (all_idle) st <= S_WL;
          end else if (all_idle) begin
            pc <= pc + 1'b1;
            n_instr <= n_instr + 32'd1;
            if (ir.op == OP_END) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else st <= S_FETCH;
          end
        end
        S_WL: if (wl_done) begin
          pc <= pc + 1'b1; n_instr <= n_instr + 32'd1; st <= S_FETCH;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
