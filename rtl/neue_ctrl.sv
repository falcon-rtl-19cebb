// neue_ctrl: the layer scheduler of the control unit. It runs one node (one
// fully connected ANN of the FALCON tree) on the NU array.
//
// Mapping (follows the engine description): layers are computed one after the
// other, each reading its inputs from SRAM and writing its outputs back to
// SRAM. Within a layer the inputs are taken in blocks of N (=16), each loaded
// once into the input FIFO, and the neurons in groups of N, one neuron per NU.
//   for each input block c:                     (load input FIFO, zero check)
//     for each neuron group g:
//       c = 0 : clear the NU sums, else restore the group's T-trace
//               (T-buffer entry g if g < T-buffer depth, else from SRAM)
//       fill each NU's weight FIFO with W[g*N+j][c*N+k], skipping every k
//               whose input is zero (data gating: no read, no MAC)
//       replay the input FIFO through the NU chain and let it drain
//       last block: rotate the sums through the AU, write the activations
//                   to SRAM (and report them to the SAU if it is the node's
//                   last layer)
//       else      : park the sums as T-trace in the T-buffer, or evict them
//                   to SRAM (two 16-bit words each) for groups beyond its depth
// Own choices: everything is sequential (weight fetch, streaming, write-back
// do not overlap); the SRAM has a single port with one-cycle read latency;
// evicted traces go to trace_base + 2*(g*N+j) (+0 low half, +1 high half).
// Interface: start with a node descriptor -> busy -> done pulse. Activity
// counters (st_*) count skipped weight reads, T-buffer saves/restores,
// evictions, and multiply-accumulates.
module neue_ctrl
  import falcon_pkg::*;
#(
  parameter int unsigned N      = falcon_pkg::N_NU,
  parameter int unsigned TDEPTH = falcon_pkg::TBUF_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        start,
  input  node_desc_t  node,
  input  layer_desc_t [MAX_LAYERS-1:0] layers,
  input  addr_t       trace_base,
  output logic        busy,
  output logic        done,
  // SRAM port
  output logic        mem_re,
  output logic        mem_we,
  output addr_t       mem_addr,
  output data_t       mem_wdata,
  input  data_t       mem_rdata,
  // input FIFO and zero checker
  output logic        if_flush,
  output logic        if_push,
  output logic        if_rewind,
  output logic        if_pop,
  input  logic        if_rvalid,
  output logic        zc_clear,
  input  logic [N-1:0] zmask,
  // NU array
  output logic [N-1:0] active,
  output logic        wf_clear,
  output logic [N-1:0] wf_push_sel,
  output logic        nu_clear,
  output logic        rotate,
  output logic        tb_save,
  output logic        tb_restore,
  output logic [$clog2(TDEPTH)-1:0] tb_addr,
  output logic        load_one,
  output logic [$clog2(N)-1:0] load_idx,
  output acc_t        load_val,
  output logic [$clog2(N)-1:0] sel_idx,
  input  acc_t        sel_acc,
  input  logic        chain_busy,
  // results of the node's last layer, in neuron order
  output logic        out_valid,
  output data_t       out_data,
  // activity counters
  output logic [31:0] st_wskip,
  output logic [31:0] st_tb_save,
  output logic [31:0] st_tb_restore,
  output logic [31:0] st_evict,
  output logic [31:0] st_mac
);
  typedef enum logic [3:0] {
    S_IDLE, S_LAYER, S_IN_FLUSH, S_IN_LOAD, S_GRP, S_SPILL_RD, S_W_LOAD,
    S_STREAM, S_DRAIN, S_SPILL_WR, S_ROT, S_WB, S_NEXTG, S_DONE
  } state_t;

  state_t state;
  logic [LAYER_W:0] li;          // layer index within the node
  layer_desc_t L;
  cnt_t  in_off, o_base;         // c*N, g*N
  logic [15:0] gi;               // group index g
  logic [7:0] ik, wj, wk;        // loop counters
  logic  pend;                   // a read was issued last cycle
  logic [7:0] pend_tag;
  logic [15:0] lo_q;
  logic [7:0] cnt, n_act;        // inputs in this block, neurons in this group
  cnt_t  in_rem, out_rem;
  logic  last_layer, last_block, tb_hit;
  addr_t row_base;

  assign L          = layers[LAYER_W'(node.first_layer + LAYER_W'(li))];
  assign in_rem     = L.n_in - in_off;
  assign out_rem    = L.n_out - o_base;
  assign cnt        = (in_rem  > cnt_t'(N)) ? 8'(N) : in_rem[7:0];
  assign n_act      = (out_rem > cnt_t'(N)) ? 8'(N) : out_rem[7:0];
  assign last_layer = (li + 1'b1 == node.num_layers);
  assign last_block = (in_off + cnt_t'(N) >= L.n_in);
  assign tb_hit     = (gi < 16'(TDEPTH));
  assign row_base   = L.w_base + (addr_t'(o_base) + addr_t'(wj)) * addr_t'(L.n_in);
  assign busy       = (state != S_IDLE);
  assign tb_addr    = gi[$clog2(TDEPTH)-1:0];

  always_comb begin
    for (int j = 0; j < N; j++) active[j] = (8'(j) < n_act);
  end

  // ---------------- datapath strobes ----------------
  always_comb begin
    mem_re = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = '0;
    if_flush = 1'b0; if_push = 1'b0; if_rewind = 1'b0; if_pop = 1'b0; zc_clear = 1'b0;
    wf_clear = 1'b0; wf_push_sel = '0; nu_clear = 1'b0; rotate = 1'b0;
    tb_save = 1'b0; tb_restore = 1'b0; load_one = 1'b0; load_idx = '0; load_val = '0;
    sel_idx = '0; out_valid = 1'b0; out_data = '0;
    unique case (state)
      S_IN_FLUSH: begin if_flush = 1'b1; zc_clear = 1'b1; end
      S_IN_LOAD: begin
        if (ik < cnt) begin mem_re = 1'b1; mem_addr = L.in_base + addr_t'(in_off) + addr_t'(ik); end
        if_push = pend;
      end
      S_GRP: begin
        wf_clear = 1'b1;
        if (in_off == 0)  nu_clear   = 1'b1;
        else if (tb_hit)  tb_restore = 1'b1;
      end
      S_SPILL_RD: begin
        if (ik < 8'(2 * n_act)) begin
          mem_re = 1'b1; mem_addr = trace_base + addr_t'({o_base, 1'b0}) + addr_t'(ik);
        end
        if (pend && pend_tag[0]) begin
          load_one = 1'b1; load_idx = pend_tag[$clog2(N):1]; load_val = {mem_rdata, lo_q};
        end
      end
      S_W_LOAD: begin
        if (wj < n_act && !zmask[wk[$clog2(N)-1:0]]) begin
          mem_re = 1'b1; mem_addr = row_base + addr_t'(in_off) + addr_t'(wk);
        end
        if (pend) wf_push_sel[pend_tag[$clog2(N)-1:0]] = 1'b1;
        if (wj == n_act && !pend) if_rewind = 1'b1;
      end
      S_STREAM: if_pop = if_rvalid;
      S_DRAIN: if (!chain_busy && !last_block && tb_hit) tb_save = 1'b1;
      S_SPILL_WR: begin
        sel_idx = ik[$clog2(N):1];
        mem_we = 1'b1; mem_addr = trace_base + addr_t'({o_base, 1'b0}) + addr_t'(ik);
        mem_wdata = ik[0] ? sel_acc[31:16] : sel_acc[15:0];
      end
      S_ROT: rotate = 1'b1;
      S_WB: begin
        sel_idx = ik[$clog2(N)-1:0];
        mem_we = 1'b1; mem_addr = L.out_base + addr_t'(o_base) + addr_t'(ik);
        mem_wdata = sel_acc[15:0];
        out_valid = last_layer; out_data = sel_acc[15:0];
      end
      default: ;
    endcase
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; li <= '0; in_off <= '0; o_base <= '0; gi <= '0;
      ik <= '0; wj <= '0; wk <= '0; pend <= 1'b0; pend_tag <= '0; lo_q <= '0; done <= 1'b0;
      st_wskip <= '0; st_tb_save <= '0; st_tb_restore <= '0; st_evict <= '0; st_mac <= '0;
    end else begin
      done <= 1'b0;
      pend <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          li <= '0; state <= (node.num_layers == 0) ? S_DONE : S_LAYER;
        end
        S_LAYER: begin
          in_off <= '0; o_base <= '0; gi <= '0; state <= S_IN_FLUSH;
        end
        S_IN_FLUSH: begin ik <= '0; state <= S_IN_LOAD; end
        S_IN_LOAD: begin
          if (ik < cnt) begin ik <= ik + 1'b1; pend <= 1'b1; end
          else if (!pend) state <= S_GRP;
        end
        S_GRP: begin
          ik <= '0; wj <= '0; wk <= '0;
          if (in_off != 0 && tb_hit) st_tb_restore <= st_tb_restore + 1;
          state <= (in_off != 0 && !tb_hit) ? S_SPILL_RD : S_W_LOAD;
        end
        S_SPILL_RD: begin
          if (pend && !pend_tag[0]) lo_q <= mem_rdata;
          if (ik < 8'(2 * n_act)) begin ik <= ik + 1'b1; pend <= 1'b1; pend_tag <= ik; end
          else if (!pend) state <= S_W_LOAD;
        end
        S_W_LOAD: begin
          if (wj < n_act) begin
            if (!zmask[wk[$clog2(N)-1:0]]) begin pend <= 1'b1; pend_tag <= wj; end
            else st_wskip <= st_wskip + 1;
            if (wk + 1'b1 >= cnt) begin wk <= '0; wj <= wj + 1'b1; end
            else wk <= wk + 1'b1;
          end else if (!pend) state <= S_STREAM;
        end
        S_STREAM: begin
          if (if_rvalid) st_mac <= st_mac + 32'(n_act);
          else state <= S_DRAIN;
        end
        S_DRAIN: if (!chain_busy) begin
          ik <= '0;
          if (last_block) state <= S_ROT;
          else if (tb_hit) begin st_tb_save <= st_tb_save + 1; state <= S_NEXTG; end
          else begin st_evict <= st_evict + 1; state <= S_SPILL_WR; end
        end
        S_SPILL_WR: begin
          if (ik + 1'b1 >= 8'(2 * n_act)) state <= S_NEXTG;
          ik <= ik + 1'b1;
        end
        S_ROT: begin
          if (ik + 1'b1 >= 8'(N)) begin ik <= '0; state <= S_WB; end
          else ik <= ik + 1'b1;
        end
        S_WB: begin
          if (ik + 1'b1 >= n_act) state <= S_NEXTG;
          ik <= ik + 1'b1;
        end
        S_NEXTG: begin
          if (o_base + cnt_t'(N) < L.n_out) begin
            o_base <= o_base + cnt_t'(N); gi <= gi + 1'b1; state <= S_GRP;
          end else if (!last_block) begin
            in_off <= in_off + cnt_t'(N); o_base <= '0; gi <= '0; state <= S_IN_FLUSH;
          end else if (!last_layer) begin
            li <= li + 1'b1; state <= S_LAYER;
          end else state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(mem_re && mem_we));
endmodule
