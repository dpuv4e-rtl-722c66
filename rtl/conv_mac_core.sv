// conv_mac_core: one MAC core of the convolution PE.
//
// Each cycle the core multiplies one input pixel (16 input channels, INT8) by a
// 16(IC) x 8(OC) INT8 weight block and adds the 8 results to the 8 x 48-bit
// partial sums arriving on the cascade input, then passes them on the cascade
// output. A core tile is 4(IH) x 16(IW) pixels by 32 output channels: the
// 16 x 32 weight tile is loaded once and reused over the 64 pixels, so one
// tile takes 256 MAC cycles, during which the next FM tile (1 KB over a 32-bit
// stream, 256 beats) and weight tile (512 B over a 16-bit stream, 256 beats)
// are loaded into the other half of the ping/pong buffers. With both streams
// saturated the core therefore computes every cycle (CTC = 1, paper Table I,
// BW_f = 32 bit, BW_w = 16 bit). These numbers are the paper's.
//
// Step order inside a tile (this design's choice; the paper only says that a
// core computes 4(IH) x 16(IC) x 32(OC) in 16 cycles before moving on):
// step s = {iw[3:0], ih[1:0], ocg[1:0]}, i.e. for each of the 16 columns, the
// 4 rows times 4 OC groups of 8. Pixel px = ih*16 + iw.
//
// Stream formats (this design's choice):
//   FM:  word k of a tile holds bytes 4k..4k+3 of the tile, byte px*16 + ic.
//   WT:  halfword k holds bytes 2k (low) and 2k+1, byte oc*16 + ic.
//   All streams and the cascade use valid/ready; a beat moves when both are 1.
// The cascade is the paper's bubble mechanism (Fig. 5): a core that is not
// ready back-pressures the cores upstream, and cores downstream wait on an
// empty cascade, so the chain stays in step without any global control.
// The head core of a chain (IS_HEAD) starts from zero instead of a cascade
// input. Output is registered: one cycle from accepted input to cascade out.
module conv_mac_core
  import dpu_pkg::*;
#(
  parameter bit IS_HEAD = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  // feature map stream
  input  logic                fm_valid,
  output logic                fm_ready,
  input  logic [FM_SW-1:0]    fm_data,
  // weight stream
  input  logic                wt_valid,
  output logic                wt_ready,
  input  logic [WT_SW-1:0]    wt_data,
  // cascade in (ignored by the head core)
  input  logic                cin_valid,
  output logic                cin_ready,
  input  cascade_t            cin_data,
  // cascade out
  output logic                cout_valid,
  input  logic                cout_ready,
  output cascade_t            cout_data,
  // status: a MAC step is waiting for the cascade (a pipeline bubble)
  output logic                stall
);

  localparam int unsigned FMB = CORE_PIX * MAC_IC;   // 1024 bytes
  localparam int unsigned WTB = MAC_IC * CORE_OC;    // 512 bytes

  logic [7:0] fm_mem [2][FMB];
  logic [7:0] wt_mem [2][WTB];

  logic [1:0] fm_full, wt_full;
  logic       fm_lb, wt_lb, cb;                      // load banks, compute bank
  logic [7:0] fm_cnt, wt_cnt;
  logic [7:0] step;

  assign fm_ready = !fm_full[fm_lb];
  assign wt_ready = !wt_full[wt_lb];

  // ---------------------------------------------------------- loading
  always_ff @(posedge clk) begin
    if (fm_valid && fm_ready)
      for (int b = 0; b < 4; b++) fm_mem[fm_lb][{fm_cnt, 2'(b)}] <= fm_data[8*b +: 8];
    if (wt_valid && wt_ready)
      for (int b = 0; b < 2; b++) wt_mem[wt_lb][{wt_cnt, 1'(b)}] <= wt_data[8*b +: 8];
  end

  // ---------------------------------------------------------- compute
  logic ready_tile, cin_ok, out_free, fire, last_step;
  assign ready_tile = fm_full[cb] && wt_full[cb];
  assign cin_ok     = IS_HEAD || cin_valid;
  assign out_free   = !cout_valid || cout_ready;
  assign fire       = ready_tile && cin_ok && out_free;
  assign cin_ready  = !IS_HEAD && ready_tile && out_free;
  assign last_step  = (step == 8'(CORE_STEPS - 1));
  assign stall      = ready_tile && !(cin_ok && out_free);

  logic [5:0] px;
  logic [1:0] ocg;
  assign px  = {step[3:2], step[7:4]};
  assign ocg = step[1:0];

  cascade_t mac_res;
  always_comb begin
    for (int o = 0; o < MAC_OC; o++) begin
      acc_t s;
      s = IS_HEAD ? '0 : cin_data[o];
      for (int i = 0; i < MAC_IC; i++)
        s += ACC_W'($signed(fm_mem[cb][{px, 4'(i)}])) *
             ACC_W'($signed(wt_mem[cb][{ocg, 3'(o), 4'(i)}]));
      mac_res[o] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fm_full    <= '0;
      wt_full    <= '0;
      fm_lb      <= 1'b0;
      wt_lb      <= 1'b0;
      cb         <= 1'b0;
      fm_cnt     <= '0;
      wt_cnt     <= '0;
      step       <= '0;
      cout_valid <= 1'b0;
      cout_data  <= '0;
    end else begin
      if (fm_valid && fm_ready) begin
        fm_cnt <= fm_cnt + 8'd1;
        if (fm_cnt == 8'(FM_WORDS - 1)) begin
          fm_full[fm_lb] <= 1'b1;
          fm_lb          <= !fm_lb;
        end
      end
      if (wt_valid && wt_ready) begin
        wt_cnt <= wt_cnt + 8'd1;
        if (wt_cnt == 8'(WT_WORDS - 1)) begin
          wt_full[wt_lb] <= 1'b1;
          wt_lb          <= !wt_lb;
        end
      end
      if (cout_valid && cout_ready) cout_valid <= 1'b0;
      if (fire) begin
        cout_valid <= 1'b1;
        cout_data  <= mac_res;
        step       <= step + 8'd1;
        if (last_step) begin
          fm_full[cb] <= 1'b0;
          wt_full[cb] <= 1'b0;
          cb          <= !cb;
        end
      end
    end
  end

  // A cascade beat must hold still until it is taken.
  a_cout_stable : assert property (@(posedge clk) disable iff (!rst_n)
    cout_valid && !cout_ready |=> cout_valid && $stable(cout_data));

endmodule
