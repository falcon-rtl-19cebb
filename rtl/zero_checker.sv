// zero_checker: the zero input checker used for data gating.
//
// Every input word read from SRAM into the input FIFO passes through it.
// It flags a word that is exactly zero (is_zero, combinational) and records the
// flag of input slot k of the current input block in zmask[k]. The controller
// reads zmask to skip the weight fetches of zero inputs for every neuron of the
// layer, and the input FIFO uses the flag to skip the input itself, so the
// NUs perform no multiply-accumulate for it. nz_count is the number of
// non-zero inputs in the block; gated_total counts every gated input since
// reset (an activity counter for observing the gating).
// clear starts a new block; in_valid with in_data appends slot `count`.
module zero_checker #(
  parameter int unsigned N  = falcon_pkg::N_NU,
  parameter int unsigned DW = falcon_pkg::DW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  logic [DW-1:0]       in_data,
  output logic                is_zero,
  output logic [N-1:0]        zmask,
  output logic [$clog2(N):0]  nz_count,
  output logic [31:0]         gated_total
);
  logic [$clog2(N):0] slot;

  assign is_zero = (in_data == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zmask <= '0; nz_count <= '0; slot <= '0; gated_total <= '0;
    end else if (clear) begin
      zmask <= '0; nz_count <= '0; slot <= '0;
    end else if (in_valid && slot < ($clog2(N)+1)'(N)) begin
      zmask[slot[$clog2(N)-1:0]] <= is_zero;
      slot <= slot + 1'b1;
      if (is_zero) gated_total <= gated_total + 1;
      else         nz_count    <= nz_count + 1'b1;
    end
  end
endmodule
