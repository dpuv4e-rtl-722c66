// conv_pe: the convolution processing element (48 compute cores).
//
// 8 rows, each a chain of 4 MAC cores followed by an ACC core and an NL core
// (the paper's 8 x 6 AIE grid: the 4 middle columns are MAC cores, the outer
// columns ACC and NL). Along a chain the 4 MAC cores take 4 different 16-channel
// slices of the same pixels and add their results in the cascade, so a chain
// reduces 64 input channels. Row r = h*4 + og is the chain for image half h
// (output rows 4h..4h+3 of the 8-row tile) and output group og (output
// channels 32og..32og+31):
//   * FM stream (h, c) is multicast to the 4 chains of half h (extends OC to
//     4 x 32 = 128),
//   * weight stream (og, c) is multicast to the 2 chains of group og (extends
//     IH from 4 to 8),
//   * bias stream og is multicast to the 2 ACC cores of group og,
//   * each chain's NL core has its own 32-bit result stream.
// One graph-level iteration is therefore 8(IH) x 64(IC) x 128(OC) over 16
// columns. All of this is the paper's (Sec. IV-B, Fig. 3). Stream indices:
// fm[h*4+c], wt[og*4+c], bias[og], res[h*4+og].
//
// A multicast beat moves only when every receiver is ready (this design's
// choice: the paper only says that the streams are broadcast). Formats and
// timing of each stream are those of conv_mac_core, conv_acc_core and
// conv_nl_core.
module conv_pe
  import dpu_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [PE_IHG*CHAIN_LEN-1:0]   fm_valid,
  output logic [PE_IHG*CHAIN_LEN-1:0]   fm_ready,
  input  logic [FM_SW-1:0]              fm_data [PE_IHG*CHAIN_LEN],
  input  logic [PE_OCG*CHAIN_LEN-1:0]   wt_valid,
  output logic [PE_OCG*CHAIN_LEN-1:0]   wt_ready,
  input  logic [WT_SW-1:0]              wt_data [PE_OCG*CHAIN_LEN],
  input  logic [PE_OCG-1:0]             bias_valid,
  output logic [PE_OCG-1:0]             bias_ready,
  input  logic [WT_SW-1:0]              bias_data [PE_OCG],
  output logic [PE_CHAINS-1:0]          res_valid,
  input  logic [PE_CHAINS-1:0]          res_ready,
  output logic [FM_SW-1:0]              res_data [PE_CHAINS],
  output logic [PE_CHAINS*CHAIN_LEN-1:0] mac_stall
);

  // per-core stream handshakes
  logic fmv [PE_CHAINS][CHAIN_LEN], fmr [PE_CHAINS][CHAIN_LEN];
  logic wtv [PE_CHAINS][CHAIN_LEN], wtr [PE_CHAINS][CHAIN_LEN];
  logic bv  [PE_CHAINS], br [PE_CHAINS];

  // FM multicast: (h, c) -> chains h*4 + og, og = 0..3
  for (genvar h = 0; h < PE_IHG; h++) begin : g_fm_h
    for (genvar c = 0; c < CHAIN_LEN; c++) begin : g_fm_c
      logic all_r;
      always_comb begin
        all_r = 1'b1;
        for (int og = 0; og < PE_OCG; og++) all_r &= fmr[h*PE_OCG+og][c];
      end
      assign fm_ready[h*CHAIN_LEN+c] = all_r;
      for (genvar og = 0; og < PE_OCG; og++) begin : g_o
        assign fmv[h*PE_OCG+og][c] = fm_valid[h*CHAIN_LEN+c] && all_r;
      end
    end
  end

  // weight multicast: (og, c) -> chains h*4 + og, h = 0..1
  for (genvar og = 0; og < PE_OCG; og++) begin : g_wt_o
    for (genvar c = 0; c < CHAIN_LEN; c++) begin : g_wt_c
      logic all_r;
      assign all_r = wtr[og][c] && wtr[PE_OCG+og][c];
      assign wt_ready[og*CHAIN_LEN+c] = all_r;
      for (genvar h = 0; h < PE_IHG; h++) begin : g_h
        assign wtv[h*PE_OCG+og][c] = wt_valid[og*CHAIN_LEN+c] && all_r;
      end
    end
    // bias multicast: og -> ACC of chains og and 4+og
    logic b_all;
    assign b_all = br[og] && br[PE_OCG+og];
    assign bias_ready[og] = b_all;
    assign bv[og]         = bias_valid[og] && b_all;
    assign bv[PE_OCG+og]  = bias_valid[og] && b_all;
  end

  for (genvar r = 0; r < PE_CHAINS; r++) begin : g_chain
    localparam int H  = r / PE_OCG;
    localparam int OG = r % PE_OCG;
    logic     cv [CHAIN_LEN+1];
    logic     cr [CHAIN_LEN+1];
    cascade_t cd [CHAIN_LEN+1];
    assign cv[0] = 1'b0;
    assign cd[0] = '0;

    for (genvar c = 0; c < CHAIN_LEN; c++) begin : g_mac
      logic fr, wr, st;
      conv_mac_core #(.IS_HEAD(c == 0)) u_mac (
        .clk, .rst_n,
        .fm_valid (fmv[r][c]), .fm_ready (fr), .fm_data (fm_data[H*CHAIN_LEN+c]),
        .wt_valid (wtv[r][c]), .wt_ready (wr), .wt_data (wt_data[OG*CHAIN_LEN+c]),
        .cin_valid(cv[c]),   .cin_ready(cr[c]),   .cin_data(cd[c]),
        .cout_valid(cv[c+1]), .cout_ready(cr[c+1]), .cout_data(cd[c+1]),
        .stall    (st)
      );
      assign fmr[r][c] = fr;
      assign wtr[r][c] = wr;
      assign mac_stall[r*CHAIN_LEN+c] = st;
    end

    logic        tv, tb_, nd;
    logic [5:0]  tsh;
    act_e        tact;
    logic [8:0]  rw;
    logic [4*PSUM_W-1:0] rdat;
    logic        brd;

    conv_acc_core u_acc (
      .clk, .rst_n,
      .bias_valid(bv[r]), .bias_ready(brd), .bias_data(bias_data[OG]),
      .cin_valid (cv[CHAIN_LEN]), .cin_ready(cr[CHAIN_LEN]), .cin_data(cd[CHAIN_LEN]),
      .tile_valid(tv), .tile_bank(tb_), .tile_shift(tsh), .tile_act(tact),
      .nl_done(nd), .rd_word(rw), .rd_data(rdat)
    );
    assign br[r] = brd;

    conv_nl_core u_nl (
      .clk, .rst_n,
      .tile_valid(tv), .tile_shift(tsh), .tile_act(tact),
      .nl_done(nd), .rd_word(rw), .rd_data(rdat),
      .res_valid(res_valid[r]), .res_ready(res_ready[r]), .res_data(res_data[r])
    );
  end

endmodule
