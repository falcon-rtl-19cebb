// input_fifo: the input FIFO shared by all neuron units.
//
// Holds one block of up to DEPTH (=16) inputs of the layer being computed. All
// neurons of a layer share the same inputs, so the block is not consumed by
// reading it: after one group of 16 neurons has seen the whole block, rewind
// replays it for the next group (temporal reuse). flush empties the FIFO before
// the next block is loaded.
// Each entry is stored with the zero flag given by the zero checker. The read
// side skips flagged entries: rdata/rvalid always present the next non-zero
// input at or after the read pointer, so zero inputs never enter the NU chain.
// Timing: push writes at the clock edge; pop advances to the next non-zero
// entry at the clock edge; rewind (priority over pop) returns to entry 0.
module input_fifo #(
  parameter int unsigned DEPTH = falcon_pkg::FIFO_DEPTH,
  parameter int unsigned DW    = falcon_pkg::DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          push,
  input  logic [DW-1:0] wdata,
  input  logic          wzero,
  input  logic          rewind,
  input  logic          pop,
  output logic [DW-1:0] rdata,
  output logic          rvalid,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH) + 1;
  logic [DW-1:0]    mem [DEPTH];
  logic [DEPTH-1:0] zflag;
  logic [PW-1:0]    rp;
  logic [PW-1:0]    nxt;      // first non-zero entry at or after rp (count if none)

  always_comb begin
    nxt = count;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (PW'(i) >= rp && PW'(i) < count && !zflag[i]) nxt = PW'(i);
  end

  assign rvalid = (nxt < count);
  assign rdata  = mem[nxt[PW-2:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; rp <= '0; zflag <= '0;
    end else if (flush) begin
      count <= '0; rp <= '0; zflag <= '0;
    end else begin
      if (push && count < PW'(DEPTH)) begin
        zflag[count[PW-2:0]] <= wzero;
        count <= count + 1'b1;
      end
      if (rewind)                rp <= '0;
      else if (pop && rvalid)    rp <= nxt + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push && count < PW'(DEPTH)) mem[count[PW-2:0]] <= wdata;

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> rvalid || rewind);
endmodule
