// dpu_pkg: constants, types and the instruction format shared by the DPU.
//
// The compute sizes follow the paper: a Conv PE MAC core multiplies one pixel
// by a 16(IC) x 8(OC) INT8 weight block per cycle, a chain of 4 MAC cores covers
// 64 input channels, 8 chains cover 8(IH) x 128(OC); a MAC core tile is
// 4(IH) x 16(IW) pixels with 32 output channels. The DWC MAC core works on
// 16 channels with two 16-lane products per cycle and an iteration of
// 2(OH) x 8(OW). Stream widths are the AIE-side widths of the paper
// (feature map and result 32 bit, weight and bias 16 bit).
//
// The instruction encoding, the memory word widths and the DRAM port are this
// design's own choices: the paper says that instructions are fetched from DRAM
// and decoded, but not how they are encoded.
package dpu_pkg;

  // ---------------------------------------------------------------- Conv PE
  localparam int unsigned MAC_IC      = 16;   // input channels per MAC op
  localparam int unsigned MAC_OC      = 8;    // output channels per MAC op
  localparam int unsigned CORE_OC     = 32;   // OC of one MAC core (FMReuse 4 x 8)
  localparam int unsigned CORE_IH     = 4;    // IH of one MAC core tile
  localparam int unsigned CORE_IW     = 16;   // IW of one MAC core tile
  localparam int unsigned CORE_PIX    = CORE_IH * CORE_IW;       // 64 = WTReuse
  localparam int unsigned CORE_STEPS  = CORE_PIX * CORE_OC / MAC_OC; // 256 cycles
  localparam int unsigned CHAIN_LEN   = 4;    // MAC cores per cascade chain
  localparam int unsigned PE_IHG      = 2;    // chains sharing one weight port
  localparam int unsigned PE_OCG      = 4;    // chains sharing one FM port
  localparam int unsigned PE_CHAINS   = PE_IHG * PE_OCG;         // 8 rows
  localparam int unsigned PE_IC       = MAC_IC * CHAIN_LEN;      // 64
  localparam int unsigned PE_OC       = CORE_OC * PE_OCG;        // 128
  localparam int unsigned ACC_W       = 48;   // cascade lane width
  localparam int unsigned PSUM_W      = 32;   // PsumStack entry (4 B)
  localparam int unsigned FM_SW       = 32;   // FM / result stream width
  localparam int unsigned WT_SW       = 16;   // weight / bias stream width
  localparam int unsigned FM_WORDS    = CORE_PIX * MAC_IC * 8 / FM_SW;   // 256
  localparam int unsigned WT_WORDS    = MAC_IC * CORE_OC * 8 / WT_SW;    // 256
  localparam int unsigned BIAS_HDR    = 2;    // header halfwords of a bias packet
  localparam int unsigned BIAS_WORDS  = BIAS_HDR + CORE_OC * 2;          // 66
  localparam int unsigned NL_WORDS    = CORE_PIX * CORE_OC * 8 / FM_SW;  // 512

  typedef logic signed [ACC_W-1:0] acc_t;
  typedef acc_t [MAC_OC-1:0]       cascade_t;   // 384-bit cascade word

  // ---------------------------------------------------------------- DWC PE
  localparam int unsigned DWC_C       = 16;   // channels per DWC MAC core
  localparam int unsigned DWC_OH      = 2;    // iteration output rows
  localparam int unsigned DWC_OW      = 8;    // iteration output columns
  localparam int unsigned DWC_KMAX    = 7;
  localparam int unsigned DWC_SMAX    = 2;
  localparam int unsigned DWC_AW      = 24;   // DWC cascade lane width (16 x 24 = 384)
  localparam int unsigned DWC_GROUPS  = 3;
  localparam int unsigned DWC_ROWS    = 8;    // MAC-RACNL pairs per group
  localparam int unsigned DWC_CLUST   = 4;    // weight/bias ports (2 rows each)
  localparam int unsigned DWC_PAIRS   = DWC_GROUPS * DWC_ROWS;   // 24
  // Largest input tile: ((OH-1)*S+K) x ((OW-1)*S+K) = 9 x 21 pixels.
  localparam int unsigned DWC_MAXPIX  = ((DWC_OH-1)*DWC_SMAX+DWC_KMAX) *
                                        ((DWC_OW-1)*DWC_SMAX+DWC_KMAX);
  // Largest shuffled weight layout: K rows x 10 vector pairs (K=7, S=2 needs 8).
  localparam int unsigned DWC_MAXWV   = DWC_KMAX * 10 * 2;

  typedef logic signed [DWC_AW-1:0] dwc_acc_t;
  typedef dwc_acc_t [DWC_C-1:0]     dwc_cascade_t;

  // Number of (pair, accumulator) steps with a non-zero weight in one kernel
  // row (Fig. 7 schedule). Accumulator a covers input columns a*S .. a*S+K-1;
  // input columns are read two at a time.
  function automatic int unsigned dwc_row_steps(input int unsigned k, input int unsigned s);
    int unsigned n;
    n = 0;
    for (int unsigned a = 0; a < 2; a++)
      n += ((a*s + k - 1) / 2) - ((a*s) / 2) + 1;
    return n;
  endfunction

  // ---------------------------------------------------------------- memories
  localparam int unsigned FMB_W       = 512;  // FM buffer word: 64 channels of a pixel
  localparam int unsigned WB_W        = 256;  // weight buffer row: 16 x 16-bit lanes
  localparam int unsigned BB_W        = 64;   // bias buffer row: 4 x 16-bit lanes
  localparam int unsigned DDR_W       = 512;  // DRAM data word
  localparam int unsigned DDR_AW      = 24;   // DRAM word address

  // One DRAM request: a read returns one DDR_W word later, in order;
  // a write is posted.
  typedef struct packed {
    logic              we;
    logic [DDR_AW-1:0] addr;
    logic [DDR_W-1:0]  wdata;
  } ddr_req_t;

  // ---------------------------------------------------------------- ISA
  typedef enum logic [3:0] {
    OP_END   = 4'd0,   // stop fetching, raise done when all units are idle
    OP_LOAD  = 4'd1,   // DRAM -> FM buffer
    OP_SAVE  = 4'd2,   // FM buffer -> DRAM
    OP_CONV  = 4'd3,   // one output tile on the PE
    OP_MISC  = 4'd4,   // element-wise add / max pool on the FM buffer
    OP_WLOAD = 4'd5,   // DRAM -> weight memory / bias buffers
    OP_SYNC  = 4'd6    // wait until every unit is idle
  } opcode_e;

  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1
  } act_e;

  typedef enum logic [1:0] {
    MISC_ADD     = 2'd0,   // element-wise addition of two feature maps
    MISC_MAXPOOL = 2'd1,   // max pooling
    MISC_AVGPOOL = 2'd2    // average pooling (sum times a reciprocal)
  } misc_op_e;

  // Memory-transfer instruction (LOAD, SAVE, WLOAD).
  typedef struct packed {
    logic [DDR_AW-1:0] ddr_addr;    // DRAM word address
    logic [15:0]       buf_addr;    // FM buffer word / weight row / bias row
    logic [15:0]       len;         // DRAM words to move
    logic              to_bias;     // WLOAD only: target the bias buffers
  } xfer_t;

  // CONV instruction: one output tile.
  typedef struct packed {
    logic [15:0] in_base;     // FM buffer word of input pixel (0,0), block 0
    logic [15:0] out_base;    // FM buffer word of output pixel (0,0), block 0
    logic [7:0]  in_h, in_w;  // input size
    logic [7:0]  out_h, out_w;// output size
    logic [5:0]  in_cb;       // input channel blocks of 64
    logic [5:0]  out_cb;      // output channel blocks of 64 (layout stride)
    logic [5:0]  oc_blk;      // first output block written by this tile
    logic [2:0]  k;           // kernel size (1..7)
    logic [1:0]  stride;      // 1 or 2
    logic [2:0]  pad;
    logic [7:0]  oy0, ox0;    // tile origin in the output
    logic [15:0] w_base;      // weight buffer row of the first weight
    logic [11:0] b_base;      // bias buffer row of the first bias packet
    logic [5:0]  shift;       // quantisation right shift
    act_e        act;
    logic        bias_reuse;  // channel reuse: all bias ports read lane 0
  } conv_t;

  // MISC instruction.
  typedef struct packed {
    misc_op_e    op;
    logic [15:0] a_base, b_base, out_base;
    logic [7:0]  h, w;        // input size (ADD: both operands and output)
    logic [5:0]  cb;          // channel blocks of 64
    logic [2:0]  k;           // pool window
    logic [1:0]  stride;      // pool stride
    logic [7:0]  out_h, out_w;
    logic [3:0]  sa, sb;      // ADD: right shifts of the operands
    logic [15:0] avg_mul;     // AVGPOOL: round(65536 / window taps)
  } misc_t;

  localparam int unsigned ARG_W = $bits(conv_t);

  typedef struct packed {
    opcode_e          op;
    logic [7:0]       engine_mask;  // engines that execute LOAD/SAVE/CONV/MISC
    logic [ARG_W-1:0] arg;          // conv_t, misc_t or xfer_t, right-aligned
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // Saturate a wide signed value to INT8.
  function automatic logic signed [7:0] sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // Quantise: arithmetic right shift with round-half-up, optional ReLU, INT8.
  function automatic logic signed [7:0] quant8(input logic signed [63:0] v,
                                               input logic [5:0] sh, input act_e act);
    logic signed [63:0] r;
    r = (sh == 0) ? v : ((v + (64'sd1 <<< (sh - 1))) >>> sh);
    if (act == ACT_RELU && r < 0) r = 0;
    return sat8(r);
  endfunction

endpackage
