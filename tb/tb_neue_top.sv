// tb_neue_top: end-to-end test of the engine at its full default size
// (16 NUs, FIFO depth 16, T-buffer depth 4, 768,000-word SRAM).
//
// The testbench loads a small FALCON tree through the host ports:
//   node 0  initial node Y1: 40 pixels -> 70 hidden -> 2 outputs
//           (3 input blocks, 5 neuron groups: groups 0-3 use the T-buffers,
//            group 4 is evicted to SRAM between blocks)
//   node 1  final node R : 8 features -> 2 classes (labels 0,1)
//   node 2  final node Y : 8 features -> 2 classes (labels 2,3)
//   node 3  baseline     : 40 pixels  -> 4 classes (labels 0..3)
//   node 4  second initial node X2: 40 pixels -> 2 outputs (two-root tree)
// For several random images (about a quarter of the pixels zero) it runs four
// tree settings: one root with delta=0 (the final node is always chosen), one
// root with delta above any possible difference and the baseline present
// (divergence -> baseline), the same without baseline (NOT FOUND), and two
// roots with a random delta. A reference model written here (plain integer
// sums and a closed-form piecewise-linear sigmoid) predicts every layer
// output, the path decision and the label. Checked: label, not_found,
// used_baseline, branch, the hidden-layer and final outputs read back from
// SRAM, and the count of skipped weight reads. Each mechanism (T-buffer reuse,
// eviction, data gating, path selection, divergence to baseline, NOT FOUND,
// two initial nodes) must occur at least once.
module tb_neue_top;
  import falcon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic host_re = 0, host_we = 0;
  addr_t host_addr = '0;
  data_t host_wdata = '0, host_rdata;
  logic cfg_we = 0; logic [11:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic start = 0, busy, done, not_found, used_baseline;
  logic [CLASS_W-1:0] label;
  logic [BR_W-1:0] branch;
  logic [31:0] st_gated_inputs, st_wskip, st_tb_save, st_tb_restore, st_evict, st_mac;

  neue_top dut (.*);

  int checks = 0, failures = 0;
  int n_path = 0, n_base = 0, n_nf = 0, n_two = 0;

  // ---------------- memory image kept by the testbench ----------------
  localparam int PIX = 700000, FEAT = 700100, W0 = 4096, W1 = W0 + 2800, W2 = W1 + 140,
                 W3 = W2 + 16, W4 = W3 + 16, W5 = W4 + 160,
                 H0 = 40000, O0 = 40100, O1 = 40110, O2 = 40120, O3 = 40130, O4 = 40140,
                 TRACE = 50000;
  int mem [int];

  task automatic wr(int a, int d);
    @(negedge clk); host_we = 1; host_addr = addr_t'(a); host_wdata = data_t'(d);
    @(negedge clk); host_we = 0;
    mem[a] = d;
  endtask

  task automatic rd(int a, output int d);
    @(negedge clk); host_re = 1; host_addr = addr_t'(a);
    @(negedge clk); host_re = 0; d = int'(host_rdata);
  endtask

  task automatic cfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 12'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // ---------------- reference model ----------------
  function automatic int sig(int acc);
    longint ax; int y;
    ax = (acc < 0) ? -longint'(acc) : longint'(acc);
    if (ax < 65536)       y = 128 + int'(ax / 1024);
    else if (ax < 155648) y = 160 + int'(ax / 2048);
    else if (ax < 327680) y = 216 + int'(ax / 8192);
    else                  y = 256;
    if (y > 256) y = 256;
    return (acc < 0) ? 256 - y : y;
  endfunction

  // layer: out[o] = sig(sum_i in[i]*w[o][i]); also counts expected weight skips
  int exp_skip;
  function automatic void layer(int in_b, int n_in, int n_out, int w_b, int out_b);
    for (int o = 0; o < n_out; o++) begin
      int acc = 0;
      for (int i = 0; i < n_in; i++) begin
        int x = mem[in_b + i];
        if (x == 0) exp_skip++;
        acc += x * mem[w_b + o * n_in + i];
      end
      mem[out_b + o] = sig(acc);
    end
  endfunction

  task automatic set_layer(int l, int in_b, int n_in, int n_out, int w_b, int out_b);
    cfg('h200 + 8*l + 0, in_b); cfg('h200 + 8*l + 1, n_in); cfg('h200 + 8*l + 2, n_out);
    cfg('h200 + 8*l + 3, w_b);  cfg('h200 + 8*l + 4, out_b);
  endtask
  task automatic set_node(int n, int first, int num, int cb);
    cfg('h100 + 8*n + 0, first); cfg('h100 + 8*n + 1, num); cfg('h100 + 8*n + 2, cb);
  endtask

  function automatic int sx(int v); return (v & 32'h8000) ? (v | 32'hffff0000) : (v & 32'hffff); endfunction
  function automatic int rnd(int lo, int hi); return lo + int'($urandom % (hi - lo + 1)); endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // one classification with reference prediction
  task automatic classify(int two_roots, int base_en, int delta);
    int omax, omin, amax, idx, node_out, node_nout, node_cb, e_label, e_nf, e_base, e_branch;
    int skip0, d, t0;
    cfg('h000, two_roots ? 2 : 1); cfg('h005, base_en); cfg('h006, delta);
    // reference
    exp_skip = 0;
    layer(PIX, 40, 70, W0, H0); layer(H0, 70, 2, W1, O0);
    if (two_roots) layer(PIX, 40, 2, W5, O4);
    omax = -1; omin = 1 << 20; amax = 0; idx = 0;
    for (int k = 0; k < (two_roots ? 4 : 2); k++) begin
      int v = (k < 2) ? mem[O0 + k] : mem[O4 + k - 2];
      if (v > omax) begin omax = v; amax = k; end
      if (v < omin) omin = v;
    end
    e_nf = 0; e_base = 0; e_branch = amax; node_out = -1;
    if (omax - omin < delta) begin
      if (base_en) begin e_base = 1; layer(PIX, 40, 4, W4, O3); node_out = O3; node_nout = 4; node_cb = 0; end
      else e_nf = 1;
    end else begin
      if (amax % 2 == 0) begin layer(FEAT, 8, 2, W2, O1); node_out = O1; node_cb = 0; end
      else               begin layer(FEAT, 8, 2, W3, O2); node_out = O2; node_cb = 2; end
      node_nout = 2;
    end
    e_label = 0;
    if (node_out >= 0) begin
      int bm = -1, bi = 0;
      for (int k = 0; k < node_nout; k++) if (mem[node_out + k] > bm) begin bm = mem[node_out + k]; bi = k; end
      e_label = node_cb + bi;
    end
    // run
    skip0 = int'(st_wskip);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    check("not_found", int'(not_found), e_nf);
    check("used_baseline", int'(used_baseline), e_base);
    if (!e_nf) check("label", int'(label), e_label);
    if (!e_base && !e_nf) check("branch", int'(branch), e_branch);
    check("weight reads skipped", int'(st_wskip) - skip0, exp_skip);
    for (int o = 0; o < 70; o++) begin rd(H0 + o, d); check("hidden", sx(d), mem[H0 + o]); end
    for (int o = 0; o < 2; o++) begin rd(O0 + o, d); check("root out", sx(d), mem[O0 + o]); end
    if (node_out >= 0)
      for (int o = 0; o < node_nout; o++) begin rd(node_out + o, d); check("final out", sx(d), mem[node_out + o]); end
    if (e_nf) n_nf++; else if (e_base) n_base++; else n_path++;
    if (two_roots) n_two++;
    $display("classify roots=%0d base_en=%0d delta=%0d: diff=%0d label=%0d nf=%0d base=%0d (%0d cycles)",
             two_roots ? 2 : 1, base_en, delta, omax - omin, label, not_found, used_baseline, t0);
  endtask

  initial begin
    int tbr0, ev0, g0;
    repeat (3) @(negedge clk); rst_n = 1;
    // weights
    for (int i = 0; i < 70 * 40; i++) wr(W0 + i, rnd(-64, 64));
    for (int i = 0; i < 2 * 70; i++)  wr(W1 + i, rnd(-24, 24));
    for (int i = 0; i < 16; i++)      wr(W2 + i, rnd(-128, 128));
    for (int i = 0; i < 16; i++)      wr(W3 + i, rnd(-128, 128));
    for (int i = 0; i < 160; i++)     wr(W4 + i, rnd(-64, 64));
    for (int i = 0; i < 80; i++)      wr(W5 + i, rnd(-64, 64));
    // tree description
    set_layer(0, PIX, 40, 70, W0, H0); set_layer(1, H0, 70, 2, W1, O0);
    set_layer(2, FEAT, 8, 2, W2, O1);  set_layer(3, FEAT, 8, 2, W3, O2);
    set_layer(4, PIX, 40, 4, W4, O3);  set_layer(5, PIX, 40, 2, W5, O4);
    set_node(0, 0, 2, 0); set_node(1, 2, 1, 0); set_node(2, 3, 1, 2); set_node(3, 4, 1, 0); set_node(4, 5, 1, 4);
    cfg('h001, 0); cfg('h002, 4); cfg('h004, 3); cfg('h007, TRACE);
    cfg('h010, 1); cfg('h011, 2); cfg('h012, 1); cfg('h013, 2);
    cfg_addr = 12'h204; #1; check("cfg readback", int'(cfg_rdata), H0);
    tbr0 = int'(st_tb_restore); ev0 = int'(st_evict); g0 = int'(st_gated_inputs);
    for (int img = 0; img < 3; img++) begin
      for (int i = 0; i < 40; i++) wr(PIX + i, ($urandom % 4 == 0) ? 0 : rnd(-256, 256));
      for (int i = 0; i < 8; i++)  wr(FEAT + i, ($urandom % 4 == 0) ? 0 : rnd(0, 256));
      classify(0, 1, 0);
      classify(0, 1, 300);
      classify(0, 0, 300);
      classify(1, 1, rnd(0, 96));
    end
    // mechanism coverage
    $display("coverage: path=%0d baseline=%0d not_found=%0d two_roots=%0d tb_restore=%0d evict=%0d gated=%0d wskip=%0d mac=%0d",
             n_path, n_base, n_nf, n_two, int'(st_tb_restore) - tbr0, int'(st_evict) - ev0,
             int'(st_gated_inputs) - g0, st_wskip, st_mac);
    checks++; if (n_path == 0) begin failures++; $display("FAIL: final-node path never taken"); end
    checks++; if (n_base == 0) begin failures++; $display("FAIL: divergence to baseline never happened"); end
    checks++; if (n_nf == 0)   begin failures++; $display("FAIL: NOT FOUND never happened"); end
    checks++; if (n_two == 0)  begin failures++; $display("FAIL: two-root tree never run"); end
    checks++; if (int'(st_tb_restore) == tbr0) begin failures++; $display("FAIL: T-buffer never reused"); end
    checks++; if (int'(st_evict) == ev0) begin failures++; $display("FAIL: T-trace never evicted"); end
    checks++; if (int'(st_gated_inputs) == g0) begin failures++; $display("FAIL: no input gated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
