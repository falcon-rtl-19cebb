// sau: the selective-path activation unit (SAU) with the divergence module.
//
// It runs the FALCON tree for one input: it starts every initial (root) node
// on the layer scheduler in turn, watches the activations of each root's
// output layer as they are written back, and keeps the largest (o_max, with
// its global output index) and smallest (o_min) confidence over all root
// outputs. With two roots the outputs of root 1 are numbered after those of
// root 0, so the path is chosen by the strongest output neuron across both.
// Then (the testing procedure of the paper):
//   |o_max - o_min| <  delta : divergence. If the baseline node is present it
//                              is run and gives the label; otherwise the
//                              result is NOT FOUND and nothing else runs.
//   |o_max - o_min| >= delta : only the final node child[argmax] runs, the
//                              other paths stay idle.
// The label is the final (or baseline) node's class_base plus the index of its
// strongest output. Ties keep the lower index; the case diff == delta, which
// the paper leaves open, selects the final node (own choice).
// Interface: start -> done pulse with label, not_found, used_baseline and the
// branch taken; node_start/node_id drive the layer scheduler, node_done and
// res_valid/res_data come back from it.
module sau
  import falcon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  tree_cfg_t  tree,
  input  node_desc_t [MAX_NODES-1:0] nodes,
  // layer scheduler
  output logic       node_start,
  output node_id_t   node_id,
  input  logic       node_done,
  input  logic       res_valid,
  input  data_t      res_data,
  // result
  output logic       busy,
  output logic       done,
  output logic [CLASS_W-1:0] label,
  output logic       not_found,
  output logic       used_baseline,
  output logic [BR_W-1:0] branch
);
  typedef enum logic [2:0] {T_IDLE, T_ROOT, T_ROOT_WAIT, T_DECIDE, T_FINAL, T_FINAL_WAIT, T_DONE} tstate_t;
  tstate_t st;

  logic [$clog2(MAX_ROOTS):0] r;
  data_t  omax, omin;
  logic [7:0] idx, amax;        // output counter, index of the maximum
  logic   seen;
  data_t  diff;

  assign busy = (st != T_IDLE);
  assign diff = omax - omin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; r <= '0; omax <= '0; omin <= '0; idx <= '0; amax <= '0; seen <= 1'b0;
      node_start <= 1'b0; node_id <= '0; done <= 1'b0; label <= '0; not_found <= 1'b0;
      used_baseline <= 1'b0; branch <= '0;
    end else begin
      node_start <= 1'b0;
      done <= 1'b0;
      // gather the outputs of the node that is running
      if (res_valid && (st == T_ROOT_WAIT || st == T_FINAL_WAIT)) begin
        idx <= idx + 1'b1;
        if (!seen || res_data > omax) begin omax <= res_data; amax <= idx; end
        if (!seen || res_data < omin) omin <= res_data;
        seen <= 1'b1;
      end
      unique case (st)
        T_IDLE: if (start) begin
          r <= '0; idx <= '0; seen <= 1'b0; not_found <= 1'b0; used_baseline <= 1'b0;
          st <= T_ROOT;
        end
        T_ROOT: begin
          node_id <= tree.root[r[$clog2(MAX_ROOTS)-1:0]]; node_start <= 1'b1; st <= T_ROOT_WAIT;
        end
        T_ROOT_WAIT: if (node_done) begin
          if (r + 1'b1 < tree.num_roots) begin r <= r + 1'b1; st <= T_ROOT; end
          else st <= T_DECIDE;
        end
        T_DECIDE: begin
          idx <= '0; seen <= 1'b0;
          branch <= amax[BR_W-1:0];
          if (diff < tree.delta) begin
            if (tree.baseline_en) begin
              used_baseline <= 1'b1; node_id <= tree.baseline; st <= T_FINAL;
            end else begin
              not_found <= 1'b1; st <= T_DONE;
            end
          end else begin
            node_id <= tree.child[amax[BR_W-1:0]]; st <= T_FINAL;
          end
        end
        T_FINAL: begin node_start <= 1'b1; st <= T_FINAL_WAIT; end
        T_FINAL_WAIT: if (node_done) st <= T_DONE;
        T_DONE: begin
          label <= not_found ? '0 : nodes[node_id].class_base + amax;
          done <= 1'b1; st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  a_branch_range: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_DECIDE) |-> (amax < 8'(MAX_BRANCH)));
endmodule
