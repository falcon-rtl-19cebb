// sram_mem: the engine's on-chip SRAM, one read/write port.
//
// Holds the image pixels, the feature vectors of the final nodes, all weights,
// the outputs of every layer and the T-traces evicted from the T-buffers.
// The default size is the published 1500 KB, organised here as 768,000 words of
// 16 bits (word width and port count are this design's choice). It is written
// as a plain array so that it simulates and synthesises to a memory; a real chip
// would use a compiled SRAM macro in its place.
//
// Timing: a write (we=1) stores wdata at addr at the clock edge. A read
// (re=1, we=0) returns mem[addr] on rdata one cycle later; rdata holds its
// value until the next read.
module sram_mem #(
  parameter int unsigned WORDS = falcon_pkg::SRAM_WORDS,
  parameter int unsigned DW    = falcon_pkg::DW,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          re,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      if (32'(addr) < WORDS) mem[addr] <= wdata;
    end else if (re) begin
      rdata <= (32'(addr) < WORDS) ? mem[addr] : '0;
    end
  end
endmodule
