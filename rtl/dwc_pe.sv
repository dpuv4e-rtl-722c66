// dwc_pe: the depth-wise convolution processing element (48 compute cores).
//
// 3 groups of 8 MAC-RACNL pairs (24 pairs, 48 cores), the paper's Fig. 6.
// Every two rows form a cluster; the 6 MAC cores of a cluster (2 rows x 3
// groups) share one weight stream and their 6 RACNL cores share one bias
// stream, so the PE has 4 weight ports and 4 bias ports (the paper's
// "B0-3/W0-3"). Each MAC core has its own feature-map stream (a different tile
// of the same channels) and each RACNL core its own result stream. Pair
// p = g*8 + r (group g, row r) belongs to cluster r/2.
//
// A shared weight or bias beat moves only when all 6 receivers are ready
// (this design's choice). The paper also says the DWC PE can run standard
// convolutions; how it maps them is not described, so this PE runs only
// depth-wise convolution.
module dwc_pe
  import dpu_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [DWC_PAIRS-1:0]  fm_valid,
  output logic [DWC_PAIRS-1:0]  fm_ready,
  input  logic [FM_SW-1:0]      fm_data [DWC_PAIRS],
  input  logic [DWC_CLUST-1:0]  wt_valid,
  output logic [DWC_CLUST-1:0]  wt_ready,
  input  logic [WT_SW-1:0]      wt_data [DWC_CLUST],
  input  logic [DWC_CLUST-1:0]  bias_valid,
  output logic [DWC_CLUST-1:0]  bias_ready,
  input  logic [WT_SW-1:0]      bias_data [DWC_CLUST],
  output logic [DWC_PAIRS-1:0]  res_valid,
  input  logic [DWC_PAIRS-1:0]  res_ready,
  output logic [FM_SW-1:0]      res_data [DWC_PAIRS],
  output logic [DWC_PAIRS-1:0]  mac_busy
);

  localparam int unsigned PER_CL = DWC_PAIRS / DWC_CLUST;   // 6

  logic [DWC_PAIRS-1:0] wr, br;

  for (genvar cl = 0; cl < DWC_CLUST; cl++) begin : g_cl
    logic w_all, b_all;
    always_comb begin
      w_all = 1'b1;
      b_all = 1'b1;
      for (int g = 0; g < DWC_GROUPS; g++)
        for (int rr = 0; rr < 2; rr++) begin
          w_all &= wr[g*DWC_ROWS + 2*cl + rr];
          b_all &= br[g*DWC_ROWS + 2*cl + rr];
        end
    end
    assign wt_ready[cl]   = w_all;
    assign bias_ready[cl] = b_all;
  end

  for (genvar p = 0; p < DWC_PAIRS; p++) begin : g_pair
    localparam int CL = (p % DWC_ROWS) / 2;
    logic         cv, cr;
    dwc_cascade_t cd;
    logic         wrdy, brdy;

    dwc_mac_core u_mac (
      .clk, .rst_n,
      .fm_valid (fm_valid[p]), .fm_ready(fm_ready[p]), .fm_data(fm_data[p]),
      .wt_valid (wt_valid[CL] && wt_ready[CL]), .wt_ready(wrdy), .wt_data(wt_data[CL]),
      .cout_valid(cv), .cout_ready(cr), .cout_data(cd),
      .busy     (mac_busy[p])
    );
    assign wr[p] = wrdy;

    dwc_racnl_core u_racnl (
      .clk, .rst_n,
      .bias_valid(bias_valid[CL] && bias_ready[CL]), .bias_ready(brdy), .bias_data(bias_data[CL]),
      .cin_valid (cv), .cin_ready(cr), .cin_data(cd),
      .res_valid (res_valid[p]), .res_ready(res_ready[p]), .res_data(res_data[p])
    );
    assign br[p] = brdy;
  end

  if (PER_CL != 6) begin : g_bad
    $error("DWC cluster size must be 6");
  end

endmodule
