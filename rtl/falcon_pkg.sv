// falcon_pkg: widths, sizes and shared types of the NeuE neuromorphic engine
// that executes FALCON classifier trees.
//
// Values that follow the engine's published parameter table: 16 neuron units
// (NUs), one activation unit (AU), FIFO depth 16, T-buffer depth 4, 1500 KB of
// SRAM. Everything else here is this design's own choice: 16-bit signed Q8.8
// data and weights, 32-bit Q16.16 accumulators, 16-bit SRAM words (so the
// 1500 KB SRAM holds 768,000 words), and the sizes of the control-register
// tables (nodes, layers, tree children).
package falcon_pkg;

  // ---- engine sizes (published values) ----
  localparam int unsigned N_NU        = 16;   // NUs in the array = inputs per input-FIFO load
  localparam int unsigned FIFO_DEPTH  = 16;   // input and weight FIFO depth
  localparam int unsigned TBUF_DEPTH  = 4;    // T-buffer entries per NU
  localparam int unsigned SRAM_BYTES  = 1500 * 1024;

  // ---- number formats (own choice) ----
  localparam int unsigned DW     = 16;        // data / weight word, Q8.8 signed
  localparam int unsigned FRAC   = 8;         // fractional bits of a data word
  localparam int unsigned ACC_W  = 32;        // accumulator, Q16.16 signed
  localparam int unsigned SRAM_WORDS = SRAM_BYTES / (DW / 8);   // 768000
  localparam int unsigned AW     = $clog2(SRAM_WORDS);          // 20

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [AW-1:0]           addr_t;

  // ---- control-register tables (own choice) ----
  localparam int unsigned MAX_NODES   = 16;   // ANN nodes of the tree (incl. baseline)
  localparam int unsigned MAX_LAYERS  = 32;   // weight layers over all nodes
  localparam int unsigned MAX_ROOTS   = 2;    // initial nodes evaluated on every input
  localparam int unsigned MAX_BRANCH  = 8;    // output neurons over all initial nodes
  localparam int unsigned NODE_W  = $clog2(MAX_NODES);
  localparam int unsigned LAYER_W = $clog2(MAX_LAYERS);
  localparam int unsigned BR_W    = $clog2(MAX_BRANCH);
  localparam int unsigned CNT_W   = 16;       // neuron / input counts of one layer
  localparam int unsigned CLASS_W = 8;        // final class label

  typedef logic [NODE_W-1:0]  node_id_t;
  typedef logic [LAYER_W-1:0] layer_id_t;
  typedef logic [CNT_W-1:0]   cnt_t;

  // One fully connected layer: inputs read from in_base, weights W[o][i] stored
  // row-major at w_base + o*n_in + i, outputs written to out_base + o.
  typedef struct packed {
    addr_t in_base;
    cnt_t  n_in;
    cnt_t  n_out;
    addr_t w_base;
    addr_t out_base;
  } layer_desc_t;

  // One node (one ANN classifier of the tree).
  typedef struct packed {
    layer_id_t            first_layer;
    logic [LAYER_W:0]     num_layers;
    logic [CLASS_W-1:0]   class_base;   // label of this node's output neuron 0
  } node_desc_t;

  // Tree topology and divergence settings.
  typedef struct packed {
    logic [$clog2(MAX_ROOTS):0]        num_roots;
    logic [MAX_ROOTS-1:0][NODE_W-1:0]  root;
    logic [MAX_BRANCH-1:0][NODE_W-1:0] child;        // final node enabled by root output k
    node_id_t                          baseline;
    logic                              baseline_en;  // divergence module present
    data_t                             delta;        // divergence value, Q8.8
    addr_t                             trace_base;   // SRAM area for evicted T-traces
  } tree_cfg_t;

  // Saturate a Q16.16 value to Q8.8.
  function automatic data_t sat_q88(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> FRAC;
    if (s > 32767)       return 16'sh7fff;
    else if (s < -32768) return 16'sh8000;
    else                 return s[DW-1:0];
  endfunction

endpackage
