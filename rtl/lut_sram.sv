// lut_sram -- one codebook lookup table of the Huffman encoder (Huff Code LUT or Huff Code
// Length LUT), written as a synchronous single-read, single-write memory.
//
// What it does: holds one word per distance symbol. The published design keeps the Huffman
// codebook in SRAM-based tables that are loaded once at boot time and only read while the
// compressor runs; this module is that table as a plain memory array, so that a synthesis flow
// can map it to an SRAM macro. The separate write port used for loading is this design's choice
// (the published design only says the codebook is scanned in at boot time).
//
// Interface: write port we/waddr/wdata; read port re/raddr/rdata.
// Timing: a read issued with re in cycle t shows on rdata in cycle t+1; rdata holds its value
// while re is low. A write in cycle t is visible to reads from cycle t+1. Contents are not reset.
module lut_sram #(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned WIDTH  = 16,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
