// fm_buffer: the feature-map memory of one computing engine.
//
// A simple dual-port RAM: one write port and one read port, both one word per
// cycle, read data one cycle after the address (a registered read, as a block
// or UltraRAM would give). A word is FMB_W = 512 bits, the 64 channels of one
// pixel; a feature map is stored pixel-major, channel block innermost:
// word = base + (y * width + x) * channel_blocks + block.
// The paper says each engine has its own feature-map buffer but gives neither
// its size nor its organisation: the word layout and the default depth
// (16384 words = 1 MiB per engine) are this design's choices.
module fm_buffer
  import dpu_pkg::*;
#(
  parameter int unsigned DEPTH = 16384
) (
  input  logic               clk,
  input  logic               we,
  input  logic [15:0]        waddr,
  input  logic [FMB_W-1:0]   wdata,
  input  logic               re,
  input  logic [15:0]        raddr,
  output logic [FMB_W-1:0]   rdata
);

  logic [FMB_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[$clog2(DEPTH)-1:0]] <= wdata;
    if (re) rdata <= mem[raddr[$clog2(DEPTH)-1:0]];
  end

endmodule
