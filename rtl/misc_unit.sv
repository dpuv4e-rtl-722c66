// misc_unit: the MISC engine work that runs on the PL fabric: element-wise
// addition of two feature maps (residual shortcuts), max and average pooling.
//
// Both work word by word on the FM buffer (one word = 64 INT8 channels of one
// pixel, address base + (y*w + x)*cb + block), through its read port (one
// cycle latency) and its write port.
// * ADD: out = sat8((a >>> sa) + (b >>> sb)) per channel, over h*w*cb words.
//   Two reads and one write per word.
// * MAXPOOL: out(oy, ox) = max over the k x k window at (oy*stride,
//   ox*stride) of the input, per channel; window taps outside the input are
//   ignored. k*k reads and one write per output word.
// * AVGPOOL: the same window walk, summing the taps per channel in 16 bits
//   (at most 49 x 128), then out = sat8((sum * avg_mul + 2^15) >>> 16), where
//   the instruction's avg_mul = round(65536 / taps) replaces a divider. A
//   global average pool is a window as large as the map (k <= 7).
// `done` pulses after the last write. The paper assigns element-wise addition
// and pooling to the MISC engine (Sec. IV) and gives no structure; the
// sequential datapath (one read per cycle), the operand shifts and the
// reciprocal multiply of the average are this design's choices.
module misc_unit
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  misc_t             cmd,
  output logic              busy,
  output logic              done,
  output logic              fm_re,
  output logic [15:0]       fm_raddr,
  input  logic [FMB_W-1:0]  fm_rdata,
  output logic              fm_we,
  output logic [15:0]       fm_waddr,
  output logic [FMB_W-1:0]  fm_wdata
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAIT, S_WR} state_e;

  state_e          st;
  misc_t           m;
  logic [7:0]      oy, ox;
  logic [5:0]      cb;
  logic [2:0]      kh, kw;       // ADD: kw = operand index
  logic            first;
  logic [FMB_W-1:0] acc;
  logic [63:0][15:0] sum;        // AVGPOOL window sums (signed)
  logic [FMB_W-1:0] avg;

  logic [7:0]  oh, ow;
  logic [15:0] rd_addr, wr_addr;
  logic        tap_in;
  logic        last_tap;

  always_comb begin
    int y, x;
    oh = (m.op == MISC_ADD) ? m.h : m.out_h;
    ow = (m.op == MISC_ADD) ? m.w : m.out_w;
    if (m.op == MISC_ADD) begin
      y = int'(oy); x = int'(ox);
    end else begin
      y = int'(oy) * int'(m.stride) + int'(kh);
      x = int'(ox) * int'(m.stride) + int'(kw);
    end
    tap_in  = (y < int'(m.h)) && (x < int'(m.w));
    rd_addr = 16'(int'((m.op == MISC_ADD && kw[0]) ? 32'(m.b_base) : 32'(m.a_base)) +
                  (y * int'(m.w) + x) * int'(m.cb) + int'(cb));
    wr_addr = 16'(int'(m.out_base) + (int'(oy) * int'(ow) + int'(ox)) * int'(m.cb) + int'(cb));
    last_tap = (m.op == MISC_ADD) ? kw[0] : (kh + 3'd1 == m.k && kw + 3'd1 == m.k);
  end

  assign busy     = (st != S_IDLE);
  assign fm_re    = (st == S_RD) && tap_in;
  assign fm_raddr = rd_addr;
  assign fm_we    = (st == S_WR);
  assign fm_waddr = wr_addr;
  assign fm_wdata = (m.op == MISC_AVGPOOL) ? avg : acc;

  always_comb begin
    for (int i = 0; i < 64; i++) begin
      logic signed [33:0] p;
      p = 34'($signed(sum[i])) * $signed({1'b0, m.avg_mul}) + 34'sd32768;
      avg[8*i +: 8] = sat8(64'(p >>> 16));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m <= '0; done <= 1'b0;
      oy <= '0; ox <= '0; cb <= '0; kh <= '0; kw <= '0; first <= 1'b1; acc <= '0;
      sum <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          m <= cmd; oy <= '0; ox <= '0; cb <= '0; kh <= '0; kw <= '0; first <= 1'b1;
          st <= S_RD;
        end
        S_RD: st <= tap_in ? S_WAIT : (last_tap ? S_WR : S_RD);
        S_WAIT: begin
          for (int i = 0; i < 64; i++) begin
            logic signed [7:0] v, a;
            v = fm_rdata[8*i +: 8];
            a = acc[8*i +: 8];
            if (m.op == MISC_ADD) begin
              if (!kw[0]) acc[8*i +: 8] <= v >>> m.sa;
              else        acc[8*i +: 8] <= sat8(64'(a) + 64'(v >>> m.sb));
            end else if (m.op == MISC_AVGPOOL) begin
              sum[i] <= (first ? 16'd0 : sum[i]) + 16'(v);
            end else begin
              if (first || v > a) acc[8*i +: 8] <= v;
            end
          end
          first <= 1'b0;
          st    <= last_tap ? S_WR : S_RD;
        end
        default: ;   // S_WR handled below
      endcase
      // advance the tap after a read (or a skipped tap)
      if ((st == S_RD && !tap_in) || st == S_WAIT) begin
        if (!last_tap) begin
          if (m.op == MISC_ADD) kw <= 3'd1;
          else if (kw + 3'd1 == m.k) begin kw <= '0; kh <= kh + 3'd1; end
          else kw <= kw + 3'd1;
        end
      end
      if (st == S_WR) begin
        kh <= '0; kw <= '0; first <= 1'b1;
        st <= S_RD;
        if (cb + 6'd1 == m.cb) begin
          cb <= '0;
          if (ox + 8'd1 == ow) begin
            ox <= '0;
            if (oy + 8'd1 == oh) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else oy <= oy + 8'd1;
          end else ox <= ox + 8'd1;
        end else cb <= cb + 6'd1;
      end
    end
  end

endmodule
