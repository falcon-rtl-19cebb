// weight_fifo: the dedicated weight FIFO in front of one neuron unit.
//
// A plain synchronous FIFO (default depth 16, the published FIFO depth). The
// controller fills it with the weights of the neuron currently scheduled in
// its NU for the current block of inputs; the NU pops one weight for every
// input that reaches it. Interface: push/wdata, pop/rdata (first-word
// fall-through: rdata is the head whenever empty=0), clear empties it.
// Push when full and pop when empty are ignored and flagged by assertions.
module weight_fifo #(
  parameter int unsigned DEPTH = falcon_pkg::FIFO_DEPTH,
  parameter int unsigned DW    = falcon_pkg::DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [DW-1:0] wdata,
  input  logic          pop,
  output logic [DW-1:0] rdata,
  output logic          empty,
  output logic          full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign rdata = mem[rp];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_push) - ($clog2(DEPTH)+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !clear));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !clear));
endmodule
