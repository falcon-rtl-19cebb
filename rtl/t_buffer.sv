// t_buffer: the temporary-trace buffer beside one neuron unit.
//
// When a layer has more inputs than fit in the input FIFO, a neuron's sum is
// built over several input blocks. Between blocks the partial sum (T-trace) of
// every scheduled neuron is parked here instead of in SRAM, one entry per
// neuron group, and loaded back into the NU when the next input block arrives.
// Default depth 4 (the published T-buffer depth); groups beyond the depth are
// evicted to SRAM by the controller. Interface: write port (we, waddr, wdata)
// at the clock edge; read port combinational (raddr -> rdata).
module t_buffer
  import falcon_pkg::*;
#(
  parameter int unsigned DEPTH = falcon_pkg::TBUF_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  acc_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output acc_t                     rdata
);
  acc_t mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
