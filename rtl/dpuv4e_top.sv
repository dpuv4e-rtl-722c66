// dpuv4e_top: the DPU with NENG convolution engines, one scheduler, the shared
// weight buffer, the weight loader, the optional low-channel convolution unit
// and a depth-wise convolution PE (paper Fig. 2).
//
// Data path: the host writes instructions, weights, biases and images to
// DRAM and pulses `start` with the instruction address. The scheduler fetches
// and dispatches; the weight loader fills the shared weight buffer and the
// bias buffers; each engine loads its image tiles into its own FM buffer,
// runs CONV tiles on its Conv PE (weights read from the shared buffer, so
// engines running the same instruction share each weight read), runs MISC
// work, and saves results back. `done` pulses when END retires.
//
// All DRAM traffic leaves through one request port with an id (0..NENG-1
// engines, NENG scheduler, NENG+1 weight loader); read data must come back
// in request order with its id. The DRAM, its controller and the NoC are
// outside this design. The low-channel unit and the DWC PE are brought out as
// stream ports: the paper gives their compute structure but not the PL logic
// that would move their data, so that movement is left to the system.
module dpuv4e_top
  import dpu_pkg::*;
#(
  parameter int unsigned NENG      = 8,
  parameter int unsigned FMB_DEPTH = 16384,
  parameter int unsigned WB_DEPTH  = 32768,
  parameter int unsigned BB_DEPTH  = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // host control
  input  logic              start,
  input  logic [DDR_AW-1:0] instr_base,
  output logic              busy,
  output logic              done,
  output logic [31:0]       n_instr,
  // DRAM port
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output ddr_req_t          ddr_req,
  output logic [3:0]        ddr_req_id,
  input  logic              ddr_rsp_valid,
  input  logic [DDR_W-1:0]  ddr_rsp_data,
  input  logic [3:0]        ddr_rsp_id,
  // observation
  output logic [31:0]       eng_mac_stall [NENG],
  output logic [NENG-1:0]   eng_conv_active,
  output logic [NENG-1:0]   wb_rsp_valid,
  // low-channel convolution unit
  input  logic [3:0]        lc_acc_n,
  input  logic [5:0]        lc_shift,
  input  act_e              lc_act,
  input  logic signed [31:0] lc_bias [32],
  input  logic              lc_w_valid,
  output logic              lc_w_ready,
  input  logic [255:0]      lc_w_data,
  input  logic              lc_w_restart,
  input  logic              lc_in_valid,
  output logic              lc_in_ready,
  input  logic [4*21*8-1:0] lc_in_data,
  output logic              lc_out_valid,
  input  logic              lc_out_ready,
  output logic [4*32*8-1:0] lc_out_data,
  // depth-wise convolution PE streams
  input  logic [DWC_PAIRS-1:0]  dwc_fm_valid,
  output logic [DWC_PAIRS-1:0]  dwc_fm_ready,
  input  logic [FM_SW-1:0]      dwc_fm_data [DWC_PAIRS],
  input  logic [DWC_CLUST-1:0]  dwc_wt_valid,
  output logic [DWC_CLUST-1:0]  dwc_wt_ready,
  input  logic [WT_SW-1:0]      dwc_wt_data [DWC_CLUST],
  input  logic [DWC_CLUST-1:0]  dwc_bias_valid,
  output logic [DWC_CLUST-1:0]  dwc_bias_ready,
  input  logic [WT_SW-1:0]      dwc_bias_data [DWC_CLUST],
  output logic [DWC_PAIRS-1:0]  dwc_res_valid,
  input  logic [DWC_PAIRS-1:0]  dwc_res_ready,
  output logic [FM_SW-1:0]      dwc_res_data [DWC_PAIRS],
  output logic [DWC_PAIRS-1:0]  dwc_mac_busy
);

  localparam int unsigned NREQ = NENG + 2;

  // ---------------------------------------------------------------- DRAM arbiter
  logic [NREQ-1:0] a_valid, a_ready, a_rsp;
  ddr_req_t        a_req [NREQ];

  ddr_arbiter #(.N(NREQ), .IW(4)) u_arb (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_req(a_req), .in_rsp_valid(a_rsp),
    .out_valid(ddr_req_valid), .out_ready(ddr_req_ready), .out_req(ddr_req), .out_id(ddr_req_id),
    .rsp_valid(ddr_rsp_valid), .rsp_id(ddr_rsp_id)
  );

  // ---------------------------------------------------------------- scheduler
  logic [NENG-1:0] e_valid, e_ready;
  instr_t          e_instr;
  logic            wl_start, wl_busy, wl_done;
  xfer_t           wl_cmd;

  scheduler #(.NENG(NENG)) u_sched (
    .clk, .rst_n, .start, .instr_base, .busy, .done,
    .req_valid(a_valid[NENG]), .req_ready(a_ready[NENG]), .req(a_req[NENG]),
    .rsp_valid(a_rsp[NENG]), .rsp_data(ddr_rsp_data),
    .eng_valid(e_valid), .eng_ready(e_ready), .eng_instr(e_instr),
    .wl_start, .wl_cmd, .wl_busy, .wl_done,
    .n_instr
  );

  // ---------------------------------------------------------------- weights
  logic              wb_we, bb_we;
  logic [15:0]       wb_waddr;
  logic [2*WB_W-1:0] wb_wdata;
  logic [8:0]        bb_waddr;
  logic [FMB_W-1:0]  bb_wdata;

  weight_load u_wl (
    .clk, .rst_n, .start(wl_start), .cmd(wl_cmd), .busy(wl_busy), .done(wl_done),
    .req_valid(a_valid[NENG+1]), .req_ready(a_ready[NENG+1]), .req(a_req[NENG+1]),
    .rsp_valid(a_rsp[NENG+1]), .rsp_data(ddr_rsp_data),
    .wb_we, .wb_waddr, .wb_wdata, .bb_we, .bb_waddr, .bb_wdata
  );

  logic [NENG-1:0] wq_valid, wq_ready;
  logic [15:0]     wq_addr [NENG];
  logic [WB_W-1:0] wr_data;

  weight_buffer #(.NENG(NENG), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .rst_n, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .req_valid(wq_valid), .req_ready(wq_ready), .req_addr(wq_addr),
    .rsp_valid(wb_rsp_valid), .rsp_data(wr_data)
  );

  // ---------------------------------------------------------------- engines
  for (genvar e = 0; e < NENG; e++) begin : g_eng
    conv_engine #(.FMB_DEPTH(FMB_DEPTH), .BB_DEPTH(BB_DEPTH)) u_eng (
      .clk, .rst_n,
      .instr_valid(e_valid[e]), .instr_ready(e_ready[e]), .instr(e_instr),
      .ddr_req_valid(a_valid[e]), .ddr_req_ready(a_ready[e]), .ddr_req(a_req[e]),
      .ddr_rsp_valid(a_rsp[e]), .ddr_rsp_data(ddr_rsp_data),
      .wreq_valid(wq_valid[e]), .wreq_ready(wq_ready[e]), .wreq_addr(wq_addr[e]),
      .wrsp_valid(wb_rsp_valid[e]), .wrsp_data(wr_data),
      .bb_we, .bb_waddr, .bb_wdata,
      .mac_stall(eng_mac_stall[e]), .conv_active(eng_conv_active[e])
    );
  end

  // ---------------------------------------------------------------- LowPE
  low_channel_conv u_lc (
    .clk, .rst_n,
    .acc_n(lc_acc_n), .shift(lc_shift), .act(lc_act), .bias(lc_bias),
    .w_valid(lc_w_valid), .w_ready(lc_w_ready), .w_data(lc_w_data), .w_restart(lc_w_restart),
    .in_valid(lc_in_valid), .in_ready(lc_in_ready), .in_data(lc_in_data),
    .out_valid(lc_out_valid), .out_ready(lc_out_ready), .out_data(lc_out_data)
  );

  // ---------------------------------------------------------------- DWC PE
  dwc_pe u_dwc (
    .clk, .rst_n,
    .fm_valid(dwc_fm_valid), .fm_ready(dwc_fm_ready), .fm_data(dwc_fm_data),
    .wt_valid(dwc_wt_valid), .wt_ready(dwc_wt_ready), .wt_data(dwc_wt_data),
    .bias_valid(dwc_bias_valid), .bias_ready(dwc_bias_ready), .bias_data(dwc_bias_data),
    .res_valid(dwc_res_valid), .res_ready(dwc_res_ready), .res_data(dwc_res_data),
    .mac_busy(dwc_mac_busy)
  );

endmodule
