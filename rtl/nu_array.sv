// nu_array: the execution core of the engine - the chain of neuron units with
// their weight FIFOs and T-buffers, the input multiplexer and the activation
// unit with its LUT.
//
// Structure (follows the engine's block diagram): N NUs in series; NU j has a
// dedicated weight FIFO and a T-buffer. The chain input is a multiplexer that
// selects either the input FIFO (while multiply-accumulating) or the output of
// the AU (while activating). The AU sits at the right end of the chain.
//
// Operations, one per cycle, chosen by the controller:
//  * MAC: x_vld_in/x_in from the input FIFO enter NU 0 and ripple right; each
//    active NU multiplies with the head of its weight FIFO.
//  * weight load: wf_push_sel one-hot selects the FIFO that takes wf_data.
//  * clear / tb_restore (all NUs load entry tb_raddr of their T-buffer) /
//    load_one (NU load_idx loads load_val, used for traces read from SRAM).
//  * tb_save: every NU writes its accumulator into entry tb_waddr.
//  * rotate: the accumulators shift one NU to the right; NU N-1's sum passes
//    through the AU and re-enters NU 0 via the multiplexer. After N rotate
//    cycles NU j holds the activation of its own sum (Q8.8, sign-extended),
//    which is how the AU "streams in the data from the NUs in a cyclical
//    fashion and sends the output back to the NUs".
//  * sel_idx picks one accumulator onto sel_acc for write-back or eviction.
// chain_busy is high while an input is still travelling down the chain.
module nu_array
  import falcon_pkg::*;
#(
  parameter int unsigned N     = falcon_pkg::N_NU,
  parameter int unsigned FDEPTH = falcon_pkg::FIFO_DEPTH,
  parameter int unsigned TDEPTH = falcon_pkg::TBUF_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N-1:0]              active,
  // chain input from the input FIFO
  input  data_t                     x_in,
  input  logic                      x_vld_in,
  // weight FIFOs
  input  logic                      wf_clear,
  input  logic [N-1:0]              wf_push_sel,
  input  data_t                     wf_data,
  output logic [N-1:0]              wf_empty,
  // accumulator control
  input  logic                      clear,
  input  logic                      rotate,
  input  logic                      tb_save,
  input  logic [$clog2(TDEPTH)-1:0] tb_waddr,
  input  logic                      tb_restore,
  input  logic [$clog2(TDEPTH)-1:0] tb_raddr,
  input  logic                      load_one,
  input  logic [$clog2(N)-1:0]      load_idx,
  input  acc_t                      load_val,
  // read-out
  input  logic [$clog2(N)-1:0]      sel_idx,
  output acc_t                      sel_acc,
  output data_t                     au_out,
  output logic                      chain_busy
);
  acc_t  acc   [N];
  acc_t  tb_rd [N];
  data_t xs    [N+1];
  logic  xv    [N+1];
  data_t w     [N];
  logic  wpop  [N];
  logic [N-1:0] vld_vec;

  // input multiplexer at the head of the chain; during rotate no input enters
  assign xs[0] = x_in;
  assign xv[0] = x_vld_in && !rotate;

  activation_unit u_au (.x(acc[N-1]), .y(au_out));

  for (genvar j = 0; j < N; j++) begin : g_nu
    logic  wf_full;
    logic [$clog2(FDEPTH):0] wf_count;
    acc_t  rot_src, ld_val;
    logic  ld;

    assign rot_src = (j == 0) ? acc_t'(au_out) : acc[(j == 0) ? 0 : j-1];
    assign ld      = tb_restore || (load_one && load_idx == ($clog2(N))'(j));
    assign ld_val  = tb_restore ? tb_rd[j] : load_val;

    weight_fifo #(.DEPTH(FDEPTH), .DW(DW)) u_wf (
      .clk, .rst_n, .clear(wf_clear),
      .push(wf_push_sel[j]), .wdata(wf_data),
      .pop(wpop[j]), .rdata(w[j]), .empty(wf_empty[j]), .full(wf_full), .count(wf_count)
    );

    neuron_unit u_nu (
      .clk, .rst_n, .active(active[j]),
      .clear, .load(ld), .load_val(ld_val), .rotate, .rot_in(rot_src),
      .x_in(xs[j]), .x_vld_in(xv[j]), .w(w[j]), .w_avail(!wf_empty[j]), .w_pop(wpop[j]),
      .x_out(xs[j+1]), .x_vld_out(xv[j+1]), .acc(acc[j])
    );

    t_buffer #(.DEPTH(TDEPTH)) u_tb (
      .clk, .we(tb_save), .waddr(tb_waddr), .wdata(acc[j]),
      .raddr(tb_raddr), .rdata(tb_rd[j])
    );

    assign vld_vec[j] = xv[j+1];
  end

  assign sel_acc    = acc[sel_idx];
  assign chain_busy = |vld_vec || xv[0];
endmodule
