// conv_controller: feeds one Conv PE for one CONV instruction and collects
// its results (the paper's image reader, weight reader, bias reader and image
// writer of the Convolution Engine, Fig. 2).
//
// A CONV instruction computes one output tile of 8 rows x 16 columns x 128
// output channels. Its reduction runs over N = K*K*in_cb graph iterations
// (kernel row kh, kernel column kw, input block cb of 64 channels, cb
// innermost); each iteration is one 64-channel slice of one kernel tap, which
// the PE reduces in 256 cycles.
//
// * Image reader: for image half h (output rows 4h..4h+3) it reads, per
//   iteration, the 64 FM buffer words of the 4 x 16 input pixels
//   y = (oy0+4h+ih)*S + kh - pad, x = (ox0+iw)*S + kw - pad (zero outside the
//   map) into a small FIFO. Each word (64 channels) gives 4 beats of 32 bits
//   to each of the 4 FM streams of that half (stream h*4+c carries channels
//   16c..16c+15). The two halves share the read port, which needs one read
//   every two cycles to keep all 8 streams at one beat per cycle.
// * Weight reader: row w_base + n*256 + k of the weight buffer holds beat k of
//   all 16 weight streams of iteration n (lane s feeds stream s).
// * Bias reader: one 66-halfword packet per output group per tile: the
//   accumulation count N, {act, shift}, then 32 biases taken from bias rows
//   b_base .. b_base+63, lane og (lane 0 for every group with bias_reuse,
//   the paper's channel reuse).
// * Image writer: gathers the 8 words of a pixel from each of the 4 result
//   streams of a half (32 channels each) into two FM words (output blocks
//   oc_blk and oc_blk+1) and writes them to
//   out_base + (oy*out_w + ox)*out_cb + blk, skipping pixels outside the map.
//
// Every FIFO pops when all streams it feeds have taken their beats, so every
// stream obeys valid/ready on its own. `done` pulses when the last output
// pixel has been written. The paper names these readers and the writer but does
// not describe them; the orders, layouts and FIFO depths here are this
// design's own.
module conv_controller
  import dpu_pkg::*;
#(
  parameter int unsigned FIFO_D = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  conv_t             cmd,
  output logic              busy,
  output logic              done,
  // FM buffer
  output logic              fm_re,
  output logic [15:0]       fm_raddr,
  input  logic [FMB_W-1:0]  fm_rdata,
  output logic              fm_we,
  output logic [15:0]       fm_waddr,
  output logic [FMB_W-1:0]  fm_wdata,
  // weight buffer read port
  output logic              wreq_valid,
  input  logic              wreq_ready,
  output logic [15:0]       wreq_addr,
  input  logic              wrsp_valid,
  input  logic [WB_W-1:0]   wrsp_data,
  // bias buffer (512-bit words of 8 rows)
  output logic              bb_re,
  output logic [8:0]        bb_raddr,
  input  logic [FMB_W-1:0]  bb_rdata,
  // PE streams
  output logic [7:0]        pe_fm_valid,
  input  logic [7:0]        pe_fm_ready,
  output logic [FM_SW-1:0]  pe_fm_data [8],
  output logic [15:0]       pe_wt_valid,
  input  logic [15:0]       pe_wt_ready,
  output logic [WT_SW-1:0]  pe_wt_data [16],
  output logic [3:0]        pe_bias_valid,
  input  logic [3:0]        pe_bias_ready,
  output logic [WT_SW-1:0]  pe_bias_data [4],
  input  logic [7:0]        pe_res_valid,
  output logic [7:0]        pe_res_ready,
  input  logic [FM_SW-1:0]  pe_res_data [8]
);

  localparam int unsigned PW = $clog2(FIFO_D);

  conv_t       c;
  logic [15:0] n_iter;

  // ------------------------------------------------------------ image reader
  logic [2:0]  f_kh [2], f_kw [2];
  logic [5:0]  f_cb [2];
  logic [5:0]  f_px [2];
  logic [1:0]  f_fin;                       // all words of the half fetched
  logic [FMB_W-1:0] ff [2][FIFO_D];
  logic [PW-1:0]    ff_wp [2], ff_rp [2];
  logic [PW:0]      ff_cnt [2];
  logic [1:0]       ff_infl;                // one read in flight per half
  logic [1:0]       q [2][4];
  logic [3:0]       q_done [2];
  logic             rd_h, rd_pad, rd_pend, pref;
  logic [1:0]       can_rd;
  logic             sel_h;
  logic [15:0]      addr_h [2];
  logic [1:0]       pad_h;

  always_comb begin
    for (int h = 0; h < 2; h++) begin
      int oy, ox, y, x;
      oy = int'(c.oy0) + 4*h + int'(f_px[h][5:4]);
      ox = int'(c.ox0) + int'(f_px[h][3:0]);
      y  = oy * int'(c.stride) + int'(f_kh[h]) - int'(c.pad);
      x  = ox * int'(c.stride) + int'(f_kw[h]) - int'(c.pad);
      pad_h[h]  = (y < 0) || (x < 0) || (y >= int'(c.in_h)) || (x >= int'(c.in_w));
      addr_h[h] = 16'(int'(c.in_base) + (y * int'(c.in_w) + x) * int'(c.in_cb) + int'(f_cb[h]));
      can_rd[h] = busy && !f_fin[h] && (int'(ff_cnt[h]) + int'(ff_infl[h]) < FIFO_D);
    end
    sel_h    = (can_rd[1] && (pref || !can_rd[0]));
    fm_re    = |can_rd && !pad_h[sel_h];
    fm_raddr = addr_h[sel_h];
  end

  logic [1:0] ff_pop;
  always_comb begin
    for (int h = 0; h < 2; h++) begin
      ff_pop[h] = (ff_cnt[h] != 0);
      for (int cc = 0; cc < 4; cc++) begin
        logic [2:0] i;
        i = 3'(h*4 + cc);
        pe_fm_valid[i] = (ff_cnt[h] != 0) && !q_done[h][cc];
        pe_fm_data[i]  = ff[h][ff_rp[h]][cc*128 + 32*int'(q[h][cc]) +: 32];
        if (!(q_done[h][cc] || (pe_fm_valid[i] && pe_fm_ready[i] && q[h][cc] == 2'd3)))
          ff_pop[h] = 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ weight reader
  logic [WB_W-1:0] wf [FIFO_D];
  logic [PW-1:0]   wf_wp, wf_rp;
  logic [PW:0]     wf_cnt;
  logic            w_infl;
  logic [23:0]     w_fetched;
  logic [15:0]     w_taken;
  logic            wf_pop;

  assign wreq_valid = busy && (w_fetched != 24'(n_iter) * 24'd256) &&
                      (int'(wf_cnt) + int'(w_infl) < FIFO_D - 1);
  assign wreq_addr  = c.w_base + w_fetched[15:0];

  always_comb begin
    wf_pop = (wf_cnt != 0);
    for (int s = 0; s < 16; s++) begin
      pe_wt_valid[s] = (wf_cnt != 0) && !w_taken[s];
      pe_wt_data[s]  = wf[wf_rp][16*s +: 16];
      if (!(w_taken[s] || (pe_wt_valid[s] && pe_wt_ready[s]))) wf_pop = 1'b0;
    end
  end

  // ------------------------------------------------------------ bias reader
  logic [6:0]  bi;          // halfword of the packet, 0..65
  logic [63:0] brow;
  logic        brow_v, b_pend;
  logic [2:0]  b_lane;
  logic [3:0]  b_taken;
  logic        b_adv;
  logic [11:0] b_row;

  assign b_row    = c.b_base + 12'(bi) - 12'd2;
  assign bb_re    = busy && (bi >= 7'd2) && (bi < 7'd66) && !brow_v && !b_pend;
  assign bb_raddr = b_row[11:3];

  always_comb begin
    b_adv = (bi < 7'd66);
    for (int og = 0; og < 4; og++) begin
      logic [15:0] hw;
      if (bi == 7'd0)      hw = n_iter;
      else if (bi == 7'd1) hw = {6'd0, c.act, 2'd0, c.shift};
      else                 hw = c.bias_reuse ? brow[15:0] : brow[16*og +: 16];
      pe_bias_data[og]  = hw;
      pe_bias_valid[og] = busy && (bi < 7'd66) && (bi < 7'd2 || brow_v) && !b_taken[og];
      if (!(b_taken[og] || (pe_bias_valid[og] && pe_bias_ready[og]))) b_adv = 1'b0;
    end
  end

  // ------------------------------------------------------------ image writer
  logic [2*FMB_W-1:0] g [2];
  logic [3:0]         ocnt [2][4];
  logic [2*FMB_W-1:0] wb [2];
  logic [1:0]         wb_v;
  logic               wb_blk [2];
  logic [6:0]         wpx [2];            // pixels handed to the write buffer
  logic [6:0]         wdone [2];          // pixels written (or skipped)
  logic [5:0]         wb_px [2];
  logic [1:0]         gfull;
  logic               wsel;
  logic               w_in;

  always_comb begin
    for (int h = 0; h < 2; h++) begin
      gfull[h] = 1'b1;
      for (int og = 0; og < 4; og++) begin
        pe_res_ready[h*4+og] = busy && (ocnt[h][og] != 4'd8);
        if (ocnt[h][og] != 4'd8) gfull[h] = 1'b0;
      end
    end
    wsel = !wb_v[0];
    begin
      int oy, ox;
      oy = int'(c.oy0) + 4*int'(wsel) + int'(wb_px[wsel][5:4]);
      ox = int'(c.ox0) + int'(wb_px[wsel][3:0]);
      w_in     = (oy < int'(c.out_h)) && (ox < int'(c.out_w));
      fm_waddr = 16'(int'(c.out_base) + (oy * int'(c.out_w) + ox) * int'(c.out_cb) +
                     int'(c.oc_blk) + int'(wb_blk[wsel]));
    end
    fm_we    = (|wb_v) && w_in;
    fm_wdata = wb[wsel][FMB_W*int'(wb_blk[wsel]) +: FMB_W];
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; c <= '0; n_iter <= '0;
      f_fin <= '0; ff_infl <= '0; rd_pend <= 1'b0; rd_h <= 1'b0; rd_pad <= 1'b0; pref <= 1'b0;
      wf_wp <= '0; wf_rp <= '0; wf_cnt <= '0; w_infl <= 1'b0; w_fetched <= '0; w_taken <= '0;
      bi <= '0; brow <= '0; brow_v <= 1'b0; b_pend <= 1'b0; b_lane <= '0; b_taken <= '0;
      wb_v <= '0;
      for (int h = 0; h < 2; h++) begin
        f_kh[h] <= '0; f_kw[h] <= '0; f_cb[h] <= '0; f_px[h] <= '0;
        ff_wp[h] <= '0; ff_rp[h] <= '0; ff_cnt[h] <= '0; q_done[h] <= '0;
        for (int cc = 0; cc < 4; cc++) q[h][cc] <= '0;
        for (int og = 0; og < 4; og++) ocnt[h][og] <= '0;
        g[h] <= '0; wb[h] <= '0; wb_blk[h] <= 1'b0; wpx[h] <= '0; wdone[h] <= '0; wb_px[h] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        c         <= cmd;
        n_iter    <= 16'(cmd.k) * 16'(cmd.k) * 16'(cmd.in_cb);
        f_fin     <= '0;
        w_fetched <= '0;
        bi        <= '0;
        brow_v    <= 1'b0;
        for (int h = 0; h < 2; h++) begin
          f_kh[h] <= '0; f_kw[h] <= '0; f_cb[h] <= '0; f_px[h] <= '0;
          wpx[h] <= '0; wdone[h] <= '0;
        end
      end else if (busy) begin
        // ---- image reader: issue
        if (|can_rd) begin
          int h;
          h = int'(sel_h);
          pref        <= !sel_h;
          rd_pend     <= 1'b1;
          rd_h        <= sel_h;
          rd_pad      <= pad_h[sel_h];
          ff_infl[h]  <= 1'b1;
          f_px[h]     <= f_px[h] + 6'd1;
          if (f_px[h] == 6'd63) begin
            if (f_cb[h] + 6'd1 == c.in_cb) begin
              f_cb[h] <= '0;
              if (f_kw[h] + 3'd1 == c.k) begin
                f_kw[h] <= '0;
                if (f_kh[h] + 3'd1 == c.k) f_fin[h] <= 1'b1;
                else f_kh[h] <= f_kh[h] + 3'd1;
              end else f_kw[h] <= f_kw[h] + 3'd1;
            end else f_cb[h] <= f_cb[h] + 6'd1;
          end
        end else begin
          rd_pend <= 1'b0;
        end
        // ---- image reader: data return and stream side
        for (int h = 0; h < 2; h++) begin
          logic push;
          push = rd_pend && (int'(rd_h) == h);
          if (push) begin
            ff[h][ff_wp[h]] <= rd_pad ? '0 : fm_rdata;
            ff_wp[h] <= ff_wp[h] + 1'b1;
          end
          if (push && !(|can_rd && int'(sel_h) == h)) ff_infl[h] <= 1'b0;
          ff_cnt[h] <= ff_cnt[h] + (PW+1)'(push) - (PW+1)'(ff_pop[h]);
          for (int cc = 0; cc < 4; cc++)
            if (pe_fm_valid[h*4+cc] && pe_fm_ready[h*4+cc]) q[h][cc] <= q[h][cc] + 2'd1;
          if (ff_pop[h]) begin
            q_done[h] <= '0;
            ff_rp[h]  <= ff_rp[h] + 1'b1;
          end else
            for (int cc = 0; cc < 4; cc++)
              if (pe_fm_valid[h*4+cc] && pe_fm_ready[h*4+cc] && q[h][cc] == 2'd3) q_done[h][cc] <= 1'b1;
        end
        // ---- weight reader
        if (wreq_valid && wreq_ready) begin
          w_fetched <= w_fetched + 24'd1;
          w_infl    <= 1'b1;
        end else if (wrsp_valid) begin
          w_infl    <= 1'b0;
        end
        if (wrsp_valid) begin
          wf[wf_wp] <= wrsp_data;
          wf_wp     <= wf_wp + 1'b1;
        end
        wf_cnt <= wf_cnt + (PW+1)'(wrsp_valid) - (PW+1)'(wf_pop);
        if (wf_pop) begin
          wf_rp   <= wf_rp + 1'b1;
          w_taken <= '0;
        end else
          for (int s = 0; s < 16; s++)
            if (pe_wt_valid[s] && pe_wt_ready[s]) w_taken[s] <= 1'b1;
        // ---- bias reader
        if (bb_re) begin
          b_pend <= 1'b1;
          b_lane <= b_row[2:0];
        end
        if (b_pend) begin
          b_pend <= 1'b0;
          brow   <= bb_rdata[64*int'(b_lane) +: 64];
          brow_v <= 1'b1;
        end
        if (b_adv) begin
          bi      <= bi + 7'd1;
          b_taken <= '0;
          brow_v  <= 1'b0;
        end else
          for (int og = 0; og < 4; og++)
            if (pe_bias_valid[og] && pe_bias_ready[og]) b_taken[og] <= 1'b1;
        // ---- image writer
        for (int h = 0; h < 2; h++) begin
          for (int og = 0; og < 4; og++)
            if (pe_res_valid[h*4+og] && pe_res_ready[h*4+og]) begin
              g[h][FMB_W*(og/2) + 8*(32*(og%2) + 4*int'(ocnt[h][og])) +: 32] <= pe_res_data[h*4+og];
              ocnt[h][og] <= ocnt[h][og] + 4'd1;
            end
          if (gfull[h] && !wb_v[h]) begin
            wb[h]     <= g[h];
            wb_v[h]   <= 1'b1;
            wb_blk[h] <= 1'b0;
            wb_px[h]  <= wpx[h][5:0];
            wpx[h]    <= wpx[h] + 7'd1;
            for (int og = 0; og < 4; og++) ocnt[h][og] <= '0;
          end
        end
        if (|wb_v) begin
          if (wb_blk[wsel]) begin
            wb_v[wsel]   <= 1'b0;
            wdone[wsel]  <= wdone[wsel] + 7'd1;
          end
          wb_blk[wsel] <= !wb_blk[wsel];
        end
        if (wdone[0] == 7'd64 && wdone[1] == 7'd64) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
