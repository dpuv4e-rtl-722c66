// conv_engine: one Convolution Engine of the DPU (paper Fig. 2): a Conv PE
// (the AIE part), its controller on the PL side, a private feature-map
// buffer and bias buffer, and the load, save and MISC units that work on that
// buffer.
//
// The engine takes one instruction at a time from the scheduler
// (instr_valid/instr_ready; ready means idle) and runs it to completion:
// * LOAD: DRAM -> FM buffer (load_unit), SAVE: FM buffer -> DRAM (store_unit),
// * CONV: one 8 x 16 x 128 output tile (conv_controller + conv_pe),
// * MISC: element-wise add or max pooling on the FM buffer (misc_unit).
// The FM buffer's read and write ports go to whichever unit runs. LOAD and
// SAVE share the engine's one DRAM port. The weight buffer is shared by all
// engines and sits outside (wreq/wrsp); the bias buffer is written by the
// weight loader, the same data for every engine.
//
// Running one instruction at a time (no overlap of load, compute and save
// inside an engine) is this design's simplification; the paper only says the
// engines are controlled by instructions decoded by the scheduler.
module conv_engine
  import dpu_pkg::*;
#(
  parameter int unsigned FMB_DEPTH = 16384,
  parameter int unsigned BB_DEPTH  = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // instructions
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  // DRAM port
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output ddr_req_t          ddr_req,
  input  logic              ddr_rsp_valid,
  input  logic [DDR_W-1:0]  ddr_rsp_data,
  // shared weight buffer
  output logic              wreq_valid,
  input  logic              wreq_ready,
  output logic [15:0]       wreq_addr,
  input  logic              wrsp_valid,
  input  logic [WB_W-1:0]   wrsp_data,
  // bias buffer write (from the weight loader)
  input  logic              bb_we,
  input  logic [8:0]        bb_waddr,
  input  logic [FMB_W-1:0]  bb_wdata,
  // observation
  output logic [31:0]       mac_stall,
  output logic              conv_active
);

  typedef enum logic [2:0] {U_NONE, U_LOAD, U_SAVE, U_CONV, U_MISC} unit_e;
  unit_e unit;

  logic start_ld, start_st, start_cv, start_mi;
  logic ld_busy, ld_done, st_busy, st_done, cv_busy, cv_done, mi_busy, mi_done;

  assign instr_ready = (unit == U_NONE);
  assign start_ld = instr_valid && instr_ready && instr.op == OP_LOAD;
  assign start_st = instr_valid && instr_ready && instr.op == OP_SAVE;
  assign start_cv = instr_valid && instr_ready && instr.op == OP_CONV;
  assign start_mi = instr_valid && instr_ready && instr.op == OP_MISC;
  assign conv_active = (unit == U_CONV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) unit <= U_NONE;
    else begin
      if (start_ld) unit <= U_LOAD;
      if (start_st) unit <= U_SAVE;
      if (start_cv) unit <= U_CONV;
      if (start_mi) unit <= U_MISC;
      if (ld_done || st_done || cv_done || mi_done) unit <= U_NONE;
    end
  end

  // ---------------------------------------------------------------- FM buffer
  logic             fm_we, fm_re;
  logic [15:0]      fm_waddr, fm_raddr;
  logic [FMB_W-1:0] fm_wdata, fm_rdata;

  fm_buffer #(.DEPTH(FMB_DEPTH)) u_fmb (
    .clk, .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata),
    .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata)
  );

  logic             ld_we, cv_we, mi_we, st_re, cv_re, mi_re;
  logic [15:0]      ld_wa, cv_wa, mi_wa, st_ra, cv_ra, mi_ra;
  logic [FMB_W-1:0] ld_wd, cv_wd, mi_wd;

  always_comb begin
    fm_we = 1'b0; fm_waddr = '0; fm_wdata = '0; fm_re = 1'b0; fm_raddr = '0;
    case (unit)
      U_LOAD: begin fm_we = ld_we; fm_waddr = ld_wa; fm_wdata = ld_wd; end
      U_SAVE: begin fm_re = st_re; fm_raddr = st_ra; end
      U_CONV: begin fm_we = cv_we; fm_waddr = cv_wa; fm_wdata = cv_wd;
                    fm_re = cv_re; fm_raddr = cv_ra; end
      U_MISC: begin fm_we = mi_we; fm_waddr = mi_wa; fm_wdata = mi_wd;
                    fm_re = mi_re; fm_raddr = mi_ra; end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- bias buffer
  logic             bb_re;
  logic [8:0]       bb_raddr;
  logic [FMB_W-1:0] bb_rdata;

  sdp_ram #(.WIDTH(FMB_W), .DEPTH(BB_DEPTH), .AW(9)) u_bb (
    .clk, .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata),
    .re(bb_re), .raddr(bb_raddr), .rdata(bb_rdata)
  );

  // ---------------------------------------------------------------- units
  logic     ld_rv, st_rv;
  ddr_req_t ld_rq, st_rq;

  load_unit u_ld (
    .clk, .rst_n, .start(start_ld), .cmd(xfer_t'(instr.arg[$bits(xfer_t)-1:0])), .busy(ld_busy), .done(ld_done),
    .req_valid(ld_rv), .req_ready(ddr_req_ready && unit == U_LOAD), .req(ld_rq),
    .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data),
    .fm_we(ld_we), .fm_waddr(ld_wa), .fm_wdata(ld_wd)
  );

  store_unit u_st (
    .clk, .rst_n, .start(start_st), .cmd(xfer_t'(instr.arg[$bits(xfer_t)-1:0])), .busy(st_busy), .done(st_done),
    .req_valid(st_rv), .req_ready(ddr_req_ready && unit == U_SAVE), .req(st_rq),
    .fm_re(st_re), .fm_raddr(st_ra), .fm_rdata(fm_rdata)
  );

  assign ddr_req_valid = (unit == U_LOAD) ? ld_rv : (unit == U_SAVE) ? st_rv : 1'b0;
  assign ddr_req       = (unit == U_SAVE) ? st_rq : ld_rq;

  misc_unit u_mi (
    .clk, .rst_n, .start(start_mi), .cmd(misc_t'(instr.arg[$bits(misc_t)-1:0])), .busy(mi_busy), .done(mi_done),
    .fm_re(mi_re), .fm_raddr(mi_ra), .fm_rdata(fm_rdata),
    .fm_we(mi_we), .fm_waddr(mi_wa), .fm_wdata(mi_wd)
  );

  // ---------------------------------------------------------------- Conv PE
  logic [7:0]        pfv, pfr, prv, prr;
  logic [FM_SW-1:0]  pfd [8], prd [8];
  logic [15:0]       pwv, pwr;
  logic [WT_SW-1:0]  pwd [16];
  logic [3:0]        pbv, pbr;
  logic [WT_SW-1:0]  pbd [4];

  conv_controller u_ctl (
    .clk, .rst_n, .start(start_cv), .cmd(conv_t'(instr.arg)), .busy(cv_busy), .done(cv_done),
    .fm_re(cv_re), .fm_raddr(cv_ra), .fm_rdata(fm_rdata),
    .fm_we(cv_we), .fm_waddr(cv_wa), .fm_wdata(cv_wd),
    .wreq_valid, .wreq_ready, .wreq_addr, .wrsp_valid, .wrsp_data,
    .bb_re, .bb_raddr, .bb_rdata,
    .pe_fm_valid(pfv), .pe_fm_ready(pfr), .pe_fm_data(pfd),
    .pe_wt_valid(pwv), .pe_wt_ready(pwr), .pe_wt_data(pwd),
    .pe_bias_valid(pbv), .pe_bias_ready(pbr), .pe_bias_data(pbd),
    .pe_res_valid(prv), .pe_res_ready(prr), .pe_res_data(prd)
  );

  conv_pe u_pe (
    .clk, .rst_n,
    .fm_valid(pfv), .fm_ready(pfr), .fm_data(pfd),
    .wt_valid(pwv), .wt_ready(pwr), .wt_data(pwd),
    .bias_valid(pbv), .bias_ready(pbr), .bias_data(pbd),
    .res_valid(prv), .res_ready(prr), .res_data(prd),
    .mac_stall
  );

  a_one_unit : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ld_busy, st_busy, cv_busy, mi_busy}));

endmodule
