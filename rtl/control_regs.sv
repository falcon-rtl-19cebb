// control_regs: the control registers of the control unit.
//
// They describe the FALCON tree the engine runs: which nodes are the initial
// (root) nodes, which final node each root output neuron enables, the baseline
// node and whether the divergence module is in use, the divergence value delta,
// and for every node and layer its size and where its data lives in SRAM.
// The register set itself is described only as "topology of the FALCON tree,
// connections and size of ANNs"; the map below is this design's own:
//   0x000 num_roots      0x001 root[0]       0x002 root[1]
//   0x004 baseline       0x005 baseline_en   0x006 delta (Q8.8)
//   0x007 trace_base     0x010+k child[k]    (k < MAX_BRANCH)
//   0x100+8n+{0,1,2}     node n (n < 16): first_layer, num_layers, class_base
//   0x200+8l+{0..4}      layer l (l < 32): in_base, n_in, n_out, w_base, out_base
// Writes (cfg_we) take effect at the clock edge; cfg_rdata reads back any
// register combinationally (0 for unmapped addresses). All registers reset to 0.
module control_regs
  import falcon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [11:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  output tree_cfg_t   tree,
  output node_desc_t  [MAX_NODES-1:0]  nodes,
  output layer_desc_t [MAX_LAYERS-1:0] layers
);
  wire [3:0] nidx = cfg_addr[6:3];
  wire [4:0] lidx = cfg_addr[7:3];
  wire [2:0] fld  = cfg_addr[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tree <= '0; nodes <= '0; layers <= '0;
    end else if (cfg_we) begin
      unique casez (cfg_addr[11:8])
        4'h0: begin
          if (cfg_addr[7:4] == 4'h1) begin
            if (cfg_addr[3:0] < 4'(MAX_BRANCH)) tree.child[cfg_addr[BR_W-1:0]] <= cfg_wdata[NODE_W-1:0];
          end else if (cfg_addr[7:4] == 4'h0) begin
            case (cfg_addr[3:0])
              4'h0: tree.num_roots   <= cfg_wdata[$clog2(MAX_ROOTS):0];
              4'h1: tree.root[0]     <= cfg_wdata[NODE_W-1:0];
              4'h2: tree.root[1]     <= cfg_wdata[NODE_W-1:0];
              4'h4: tree.baseline    <= cfg_wdata[NODE_W-1:0];
              4'h5: tree.baseline_en <= cfg_wdata[0];
              4'h6: tree.delta       <= cfg_wdata[DW-1:0];
              4'h7: tree.trace_base  <= cfg_wdata[AW-1:0];
              default: ;
            endcase
          end
        end
        4'h1: if (cfg_addr[7] == 1'b0) begin
          case (fld)
            3'd0: nodes[nidx].first_layer <= cfg_wdata[LAYER_W-1:0];
            3'd1: nodes[nidx].num_layers  <= cfg_wdata[LAYER_W:0];
            3'd2: nodes[nidx].class_base  <= cfg_wdata[CLASS_W-1:0];
            default: ;
          endcase
        end
        4'h2: begin
          case (fld)
            3'd0: layers[lidx].in_base  <= cfg_wdata[AW-1:0];
            3'd1: layers[lidx].n_in     <= cfg_wdata[CNT_W-1:0];
            3'd2: layers[lidx].n_out    <= cfg_wdata[CNT_W-1:0];
            3'd3: layers[lidx].w_base   <= cfg_wdata[AW-1:0];
            3'd4: layers[lidx].out_base <= cfg_wdata[AW-1:0];
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    case (cfg_addr[11:8])
      4'h0: begin
        if (cfg_addr[7:4] == 4'h1) begin
          if (cfg_addr[3:0] < 4'(MAX_BRANCH)) cfg_rdata = 32'(tree.child[cfg_addr[BR_W-1:0]]);
        end else if (cfg_addr[7:4] == 4'h0) begin
          case (cfg_addr[3:0])
            4'h0: cfg_rdata = 32'(tree.num_roots);
            4'h1: cfg_rdata = 32'(tree.root[0]);
            4'h2: cfg_rdata = 32'(tree.root[1]);
            4'h4: cfg_rdata = 32'(tree.baseline);
            4'h5: cfg_rdata = 32'(tree.baseline_en);
            4'h6: cfg_rdata = 32'($unsigned(tree.delta));
            4'h7: cfg_rdata = 32'(tree.trace_base);
            default: ;
          endcase
        end
      end
      4'h1: if (cfg_addr[7] == 1'b0) begin
        case (fld)
          3'd0: cfg_rdata = 32'(nodes[nidx].first_layer);
          3'd1: cfg_rdata = 32'(nodes[nidx].num_layers);
          3'd2: cfg_rdata = 32'(nodes[nidx].class_base);
          default: ;
        endcase
      end
      4'h2: begin
        case (fld)
          3'd0: cfg_rdata = 32'(layers[lidx].in_base);
          3'd1: cfg_rdata = 32'(layers[lidx].n_in);
          3'd2: cfg_rdata = 32'(layers[lidx].n_out);
          3'd3: cfg_rdata = 32'(layers[lidx].w_base);
          3'd4: cfg_rdata = 32'(layers[lidx].out_base);
          default: ;
        endcase
      end
      default: ;
    endcase
  end
endmodule
