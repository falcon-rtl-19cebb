// neue_top: the Neuromorphic Engine (NeuE) running a FALCON classifier tree.
//
// FALCON splits an n-class image classifier into a tree of small neural
// networks: initial nodes sort an image into broad feature groups (colour or
// texture), and only the one final node that handles the chosen group is then
// evaluated. A divergence check falls back to a full baseline network when the
// initial node is undecided. This engine executes such trees: one SRAM, an
// input FIFO with a zero checker, a chain of N=16 neuron units (MAC) each with
// its own weight FIFO and T-buffer, one activation unit with a sigmoid LUT,
// and a control unit made of the control registers, the layer scheduler and
// the selective-path activation unit (SAU).
//
// Use: while idle, a host loads the SRAM (images, feature vectors, weights)
// through the host_* port and the tree description through cfg_*; a pulse on
// start classifies the image the descriptors point at, and done pulses with
// label / not_found / used_baseline / branch. While busy the engine owns the
// SRAM port and host accesses are ignored. host_rdata is valid one cycle after
// host_re. The st_* outputs are activity counters for the engine's gating and
// data-reuse mechanisms.
// Structure and sizes follow the published engine; port list, register map,
// number formats and the single SRAM port are this design's own choices.
module neue_top
  import falcon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host access to the SRAM (only while idle)
  input  logic        host_re,
  input  logic        host_we,
  input  addr_t       host_addr,
  input  data_t       host_wdata,
  output data_t       host_rdata,
  // control registers
  input  logic        cfg_we,
  input  logic [11:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  // classification
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [CLASS_W-1:0] label,
  output logic        not_found,
  output logic        used_baseline,
  output logic [BR_W-1:0] branch,
  // activity counters
  output logic [31:0] st_gated_inputs,
  output logic [31:0] st_wskip,
  output logic [31:0] st_tb_save,
  output logic [31:0] st_tb_restore,
  output logic [31:0] st_evict,
  output logic [31:0] st_mac
);
  localparam int unsigned N = N_NU;

  tree_cfg_t   tree;
  node_desc_t  [MAX_NODES-1:0]  nodes;
  layer_desc_t [MAX_LAYERS-1:0] layers;

  // SRAM and its port multiplexer
  logic  c_re, c_we, m_re, m_we;
  addr_t c_addr, m_addr;
  data_t c_wdata, m_wdata, m_rdata;
  logic  ctrl_busy;

  assign m_re    = ctrl_busy ? c_re    : (host_re && !busy);
  assign m_we    = ctrl_busy ? c_we    : (host_we && !busy);
  assign m_addr  = ctrl_busy ? c_addr  : host_addr;
  assign m_wdata = ctrl_busy ? c_wdata : host_wdata;
  assign host_rdata = m_rdata;

  sram_mem #(.WORDS(SRAM_WORDS), .DW(DW), .AW(AW)) u_sram (
    .clk, .re(m_re), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );

  control_regs u_regs (
    .clk, .rst_n, .cfg_we(cfg_we && !busy), .cfg_addr, .cfg_wdata, .cfg_rdata,
    .tree, .nodes, .layers
  );

  // SAU <-> layer scheduler
  logic     node_start, node_done, res_valid;
  node_id_t node_id;
  data_t    res_data;
  logic     sau_busy;

  sau u_sau (
    .clk, .rst_n, .start, .tree, .nodes,
    .node_start, .node_id, .node_done, .res_valid, .res_data,
    .busy(sau_busy), .done, .label, .not_found, .used_baseline, .branch
  );
  assign busy = sau_busy || ctrl_busy;

  // input FIFO, zero checker, NU array
  logic if_flush, if_push, if_rewind, if_pop, if_rvalid, zc_clear, zc_is_zero;
  data_t if_rdata;
  logic [$clog2(N):0] if_count, zc_nz;
  logic [N-1:0] zmask, active, wf_push_sel, wf_empty;
  logic wf_clear, nu_clear, rotate, tb_save, tb_restore, load_one, chain_busy;
  logic [$clog2(TBUF_DEPTH)-1:0] tb_addr;
  logic [$clog2(N)-1:0] load_idx, sel_idx;
  acc_t load_val, sel_acc;
  data_t au_out;

  zero_checker #(.N(N), .DW(DW)) u_zc (
    .clk, .rst_n, .clear(zc_clear), .in_valid(if_push), .in_data(m_rdata),
    .is_zero(zc_is_zero), .zmask, .nz_count(zc_nz), .gated_total(st_gated_inputs)
  );

  input_fifo #(.DEPTH(FIFO_DEPTH), .DW(DW)) u_ififo (
    .clk, .rst_n, .flush(if_flush), .push(if_push), .wdata(m_rdata), .wzero(zc_is_zero),
    .rewind(if_rewind), .pop(if_pop), .rdata(if_rdata), .rvalid(if_rvalid), .count(if_count)
  );

  nu_array #(.N(N), .FDEPTH(FIFO_DEPTH), .TDEPTH(TBUF_DEPTH)) u_nua (
    .clk, .rst_n, .active,
    .x_in(if_rdata), .x_vld_in(if_pop),
    .wf_clear, .wf_push_sel, .wf_data(m_rdata), .wf_empty,
    .clear(nu_clear), .rotate, .tb_save, .tb_waddr(tb_addr), .tb_restore, .tb_raddr(tb_addr),
    .load_one, .load_idx, .load_val, .sel_idx, .sel_acc, .au_out, .chain_busy
  );

  neue_ctrl #(.N(N), .TDEPTH(TBUF_DEPTH)) u_ctrl (
    .clk, .rst_n, .start(node_start), .node(nodes[node_id]), .layers,
    .trace_base(tree.trace_base), .busy(ctrl_busy), .done(node_done),
    .mem_re(c_re), .mem_we(c_we), .mem_addr(c_addr), .mem_wdata(c_wdata), .mem_rdata(m_rdata),
    .if_flush, .if_push, .if_rewind, .if_pop, .if_rvalid, .zc_clear, .zmask,
    .active, .wf_clear, .wf_push_sel, .nu_clear, .rotate, .tb_save, .tb_restore, .tb_addr,
    .load_one, .load_idx, .load_val, .sel_idx, .sel_acc, .chain_busy,
    .out_valid(res_valid), .out_data(res_data),
    .st_wskip, .st_tb_save, .st_tb_restore, .st_evict, .st_mac
  );
endmodule
