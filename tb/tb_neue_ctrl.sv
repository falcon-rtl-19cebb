// tb_neue_ctrl: the layer scheduler driving the real datapath (SRAM, input
// FIFO, zero checker, NU array) through one three-layer node:
//   layer 0: 36 inputs (a third zero) -> 80 neurons  (3 input blocks, 5 groups:
//            4 groups in the T-buffers, 1 evicted to SRAM)
//   layer 1: 80 -> 20                                (5 blocks, 2 groups)
//   layer 2: 20 -> 3                                 (reported on out_valid)
// Checks every layer's outputs in SRAM against an integer model, the result
// stream, the skipped weight reads, T-buffer save/restore and eviction
// counts, the MAC count, and the total cycle count against a closed-form
// count of this schedule.
module tb_neue_ctrl;
  import falcon_pkg::*;
  localparam int N = 16;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0;
  node_desc_t node; layer_desc_t [MAX_LAYERS-1:0] layers; addr_t trace_base;
  logic busy, done;
  logic c_re, c_we, t_re = 0, t_we = 0; addr_t c_addr, t_addr = 0; data_t c_wdata, t_wdata = 0, m_rdata;
  logic if_flush, if_push, if_rewind, if_pop, if_rvalid, zc_clear, zc_is_zero;
  data_t if_rdata, au_out; logic [4:0] if_count, zc_nz; logic [31:0] gated;
  logic [N-1:0] zmask, active, wf_push_sel, wf_empty;
  logic wf_clear, nu_clear, rotate, tb_save, tb_restore, load_one, chain_busy;
  logic [1:0] tb_addr; logic [3:0] load_idx, sel_idx; acc_t load_val, sel_acc;
  logic out_valid; data_t out_data;
  logic [31:0] st_wskip, st_tb_save, st_tb_restore, st_evict, st_mac;

  sram_mem #(.WORDS(65536)) u_sram (.clk, .re(busy ? c_re : t_re), .we(busy ? c_we : t_we),
    .addr(busy ? c_addr[15:0] : t_addr[15:0]), .wdata(busy ? c_wdata : t_wdata), .rdata(m_rdata));
  zero_checker u_zc (.clk, .rst_n, .clear(zc_clear), .in_valid(if_push), .in_data(m_rdata),
    .is_zero(zc_is_zero), .zmask, .nz_count(zc_nz), .gated_total(gated));
  input_fifo u_if (.clk, .rst_n, .flush(if_flush), .push(if_push), .wdata(m_rdata), .wzero(zc_is_zero),
    .rewind(if_rewind), .pop(if_pop), .rdata(if_rdata), .rvalid(if_rvalid), .count(if_count));
  nu_array u_nua (.clk, .rst_n, .active, .x_in(if_rdata), .x_vld_in(if_pop), .wf_clear, .wf_push_sel,
    .wf_data(m_rdata), .wf_empty, .clear(nu_clear), .rotate, .tb_save, .tb_waddr(tb_addr), .tb_restore,
    .tb_raddr(tb_addr), .load_one, .load_idx, .load_val, .sel_idx, .sel_acc, .au_out, .chain_busy);
  neue_ctrl dut (.clk, .rst_n, .start, .node, .layers, .trace_base, .busy, .done,
    .mem_re(c_re), .mem_we(c_we), .mem_addr(c_addr), .mem_wdata(c_wdata), .mem_rdata(m_rdata),
    .if_flush, .if_push, .if_rewind, .if_pop, .if_rvalid, .zc_clear, .zmask,
    .active, .wf_clear, .wf_push_sel, .nu_clear, .rotate, .tb_save, .tb_restore, .tb_addr,
    .load_one, .load_idx, .load_val, .sel_idx, .sel_acc, .chain_busy, .out_valid, .out_data,
    .st_wskip, .st_tb_save, .st_tb_restore, .st_evict, .st_mac);

  int checks = 0, failures = 0;
  int mem [int];
  int e_skip = 0, e_save = 0, e_rest = 0, e_evict = 0, e_mac = 0, e_cycles = 0;
  int got_out [$];

  function automatic int ref_sig(int acc);
    longint ax; int r;
    ax = (acc < 0) ? -longint'(acc) : longint'(acc);
    if (ax < 65536)       r = 128 + int'(ax / 1024);
    else if (ax < 155648) r = 160 + int'(ax / 2048);
    else if (ax < 327680) r = 216 + int'(ax / 8192);
    else                  r = 256;
    if (r > 256) r = 256;
    return (acc < 0) ? 256 - r : r;
  endfunction

  task automatic check(string s, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", s, g, e); end
  endtask
  task automatic wr(int a, int d);
    @(negedge clk); t_we = 1; t_addr = addr_t'(a); t_wdata = data_t'(d); @(negedge clk); t_we = 0; mem[a] = d;
  endtask
  task automatic rd(int a, output int d);
    @(negedge clk); t_re = 1; t_addr = addr_t'(a); @(negedge clk); t_re = 0;
    d = int'(m_rdata);
  endtask

  // model of one layer, including the schedule's counters and cycle count
  function automatic void model_layer(int ib, int ni, int no, int wb, int ob);
    int nb = (ni + N - 1) / N, ng = (no + N - 1) / N;
    e_cycles += 1;                                        // layer set-up
    for (int c = 0; c < nb; c++) begin
      int cnt = (ni - c*N > N) ? N : ni - c*N, nz = 0;
      for (int k = 0; k < cnt; k++) if (mem[ib + c*N + k] != 0) nz++;
      e_cycles += 1 + cnt + 2;                            // flush, load, last beat
      for (int g = 0; g < ng; g++) begin
        int na = (no - g*N > N) ? N : no - g*N;
        e_cycles += 1;                                    // group set-up
        if (c > 0 && g >= 4) e_cycles += 2*na + 2;        // read evicted trace
        if (c > 0 && g < 4) e_rest++;
        e_cycles += na*cnt + 1;                           // weight fetch slots
        if (mem[ib + c*N + cnt - 1] != 0) e_cycles += 1;  // last fetch in flight
        e_skip += na * (cnt - nz);
        e_mac += na * nz;
        e_cycles += nz + 1 + N;                           // stream, drain
        if (c == nb - 1) e_cycles += N + na;              // activate, write back
        else if (g < 4) e_save++;
        else begin e_evict++; e_cycles += 2*na; end
        e_cycles += 1;                                    // next
      end
    end
    for (int o = 0; o < no; o++) begin
      int acc = 0;
      for (int i = 0; i < ni; i++) acc += mem[ib + i] * mem[wb + o*ni + i];
      mem[ob + o] = ref_sig(acc);
    end
  endfunction

  function automatic int sx(int v); return (v & 32'h8000) ? (v | 32'hffff0000) : (v & 32'hffff); endfunction

  always @(posedge clk) if (out_valid) got_out.push_back(int'(out_data));

  initial begin
    int cyc, d;
    int L [3][5] = '{'{100, 36, 80, 1000, 5000}, '{5000, 80, 20, 4000, 6000}, '{6000, 20, 3, 6000 + 100, 6500}};
    layers = '0;
    for (int l = 0; l < 3; l++) begin
      layers[l].in_base = addr_t'(L[l][0]); layers[l].n_in = cnt_t'(L[l][1]); layers[l].n_out = cnt_t'(L[l][2]);
      layers[l].w_base = addr_t'(L[l][3]); layers[l].out_base = addr_t'(L[l][4]);
    end
    node.first_layer = 0; node.num_layers = 3; node.class_base = 0; trace_base = 20000;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 36; i++) wr(100 + i, (i % 3 == 1) ? 0 : int'($urandom % 512) - 256);
    for (int l = 0; l < 3; l++) for (int i = 0; i < L[l][1] * L[l][2]; i++) wr(L[l][3] + i, int'($urandom % 96) - 48);
    for (int l = 0; l < 3; l++) model_layer(L[l][0], L[l][1], L[l][2], L[l][3], L[l][4]);
    e_cycles += 2;                                        // done state, registered done pulse
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int l = 0; l < 3; l++)
      for (int o = 0; o < L[l][2]; o++) begin rd(L[l][4] + o, d); check("layer out", sx(d), mem[L[l][4] + o]); end
    check("results reported", got_out.size(), 3);
    foreach (got_out[i]) check("result", got_out[i], mem[6500 + i]);
    check("weight reads skipped", int'(st_wskip), e_skip);
    check("T-buffer saves", int'(st_tb_save), e_save);
    check("T-buffer restores", int'(st_tb_restore), e_rest);
    check("evictions", int'(st_evict), e_evict);
    check("MACs", int'(st_mac), e_mac);
    check("cycles", cyc, e_cycles);
    $display("cycles=%0d expected=%0d", cyc, e_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
