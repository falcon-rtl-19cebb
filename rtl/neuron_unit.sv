// neuron_unit: one neuron unit (NU), a multiply-accumulate stage of the NU chain.
//
// NUs are connected in series: every input that enters the chain at NU 0 is
// registered and handed on to the next NU one cycle later, so input k reaches
// NU j at cycle k+j. When a valid input arrives and the NU is active, it pops
// the next weight from its own weight FIFO and adds input*weight to its
// accumulator. Inactive NUs (no neuron scheduled because the layer has fewer
// neurons left than NUs) forward inputs but neither pop nor accumulate.
// Besides accumulation the accumulator can be cleared, loaded with a partial
// sum (T-trace) read back from the T-buffer or SRAM, or rotated: in rotate mode
// every NU takes the accumulator of its left neighbour (rot_in), which is how
// the activation unit streams the sums out of the chain and back in.
// Formats: x and w are Q8.8, the product is Q16.16, the accumulator is 32 bits
// and wraps (own choice). Priority: clear > load > rotate > MAC.
module neuron_unit
  import falcon_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  active,
  input  logic  clear,
  input  logic  load,
  input  acc_t  load_val,
  input  logic  rotate,
  input  acc_t  rot_in,
  input  data_t x_in,
  input  logic  x_vld_in,
  input  data_t w,
  input  logic  w_avail,
  output logic  w_pop,
  output data_t x_out,
  output logic  x_vld_out,
  output acc_t  acc
);
  acc_t prod;
  assign prod  = acc_t'(x_in) * acc_t'(w);
  assign w_pop = x_vld_in && active && !clear && !load && !rotate;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; x_out <= '0; x_vld_out <= 1'b0;
    end else begin
      x_out     <= x_in;
      x_vld_out <= x_vld_in;
      if (clear)       acc <= '0;
      else if (load)   acc <= load_val;
      else if (rotate) acc <= rot_in;
      else if (w_pop)  acc <= acc + prod;
    end
  end

  a_weight_ready: assert property (@(posedge clk) disable iff (!rst_n) w_pop |-> w_avail);
endmodule
