// low_channel_conv: the optional Low-Channel Convolution Unit on the PL side
// (paper Sec. IV-E), for the first layer of a CNN, whose few input channels
// would leave most of the Conv PE idle.
//
// The unit has the paper's parallelism of 4 (H) x 21 (IC) x 32 (OC) INT8
// multiply-accumulates per cycle. An input beat carries 4 output rows x 21
// input bytes; for ResNet50's 7x7, 3-channel first layer the 21 bytes are the
// 7 kernel columns x 3 channels of one kernel row, so ACC_N = 7 beats (the
// kernel rows) finish 4 output pixels x 32 output channels. Beat i of a group
// uses weight block i (21 x 32 INT8, loaded beforehand over the weight
// stream, one 32-channel row of 256 bits per 21-slot position, block by
// block). After the last beat of a group the 32-bit sums get the bias, the
// rounded right shift, optional ReLU and INT8 saturation, and leave as one
// 1024-bit beat (4 rows x 32 channels, row-major, channel in the low byte
// first). Throughput is one input beat per cycle as long as the result is
// taken. The paper gives only the parallelism and the purpose; the way IC
// and kernel taps are packed into the 21 lanes, the weight stream and the
// result format are this design's choices.
module low_channel_conv
  import dpu_pkg::*;
#(
  parameter int unsigned LH    = 4,
  parameter int unsigned LIC   = 21,
  parameter int unsigned LOC   = 32,
  parameter int unsigned NBLK  = 8      // weight blocks held (ACC_N <= NBLK)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration (held stable while the unit runs)
  input  logic [3:0]               acc_n,
  input  logic [5:0]               shift,
  input  act_e                     act,
  input  logic signed [31:0]       bias [LOC],
  // weight stream: one LOC x 8-bit row per beat, position p = blk*LIC + ic
  input  logic                     w_valid,
  output logic                     w_ready,
  input  logic [LOC*8-1:0]         w_data,
  input  logic                     w_restart,   // next weight beat is position 0
  // input stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LH*LIC*8-1:0]      in_data,
  // result stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LH*LOC*8-1:0]      out_data
);

  logic [7:0] wmem [NBLK][LIC][LOC];
  logic [$clog2(NBLK*LIC+1)-1:0] wpos;
  logic [3:0] beat;
  logic signed [31:0] acc [LH][LOC];
  logic signed [31:0] psum [LH][LOC];

  assign w_ready  = 1'b1;
  assign in_ready = !out_valid || out_ready;

  always_comb begin
    for (int h = 0; h < LH; h++)
      for (int o = 0; o < LOC; o++) begin
        logic signed [31:0] s;
        s = (beat == 4'd0) ? 32'sd0 : acc[h][o];
        for (int i = 0; i < LIC; i++)
          s += 32'($signed(in_data[8*(h*LIC + i) +: 8])) *
               32'($signed(wmem[int'(beat) % NBLK][i][o]));
        psum[h][o] = s;
      end
  end

  always_ff @(posedge clk) begin
    if (w_valid && w_ready)
      for (int o = 0; o < LOC; o++)
        wmem[int'(wpos) / LIC][int'(wpos) % LIC][o] <= w_data[8*o +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wpos <= '0; beat <= '0; out_valid <= 1'b0; out_data <= '0;
      for (int h = 0; h < LH; h++)
        for (int o = 0; o < LOC; o++) acc[h][o] <= '0;
    end else begin
      if (w_valid && w_ready) wpos <= w_restart ? '0 : wpos + 1'b1;
      else if (w_restart)     wpos <= '0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (beat + 4'd1 == acc_n) begin
          beat      <= '0;
          out_valid <= 1'b1;
          for (int h = 0; h < LH; h++)
            for (int o = 0; o < LOC; o++)
              out_data[8*(h*LOC + o) +: 8] <= quant8(64'(psum[h][o]) + 64'(bias[o]), shift, act);
        end else begin
          beat <= beat + 4'd1;
          for (int h = 0; h < LH; h++)
            for (int o = 0; o < LOC; o++) acc[h][o] <= psum[h][o];
        end
      end
    end
  end

endmodule
