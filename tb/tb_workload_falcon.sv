// tb_workload_falcon: the engine at its default size running FALCON trees
// shaped like the two published two-initial-node configurations, on
// full-size images:
//   Caltech-101 12-class: X1 colour node with 4 outputs (R, Y, W, B), X2
//     texture node with 2 outputs (G1, G3); image 75x50 RGB = 11,250 words
//   CIFAR-10 10-class   : Y1 colour node with 3 outputs (W, Br, R), Y2
//     texture node with 2 outputs (G2, G4); image 32x32 RGB = 3,072 words
// Every root output enables a final node with 2 classes (labels 2k, 2k+1);
// a baseline node covers all classes. The tree shapes and image sizes are
// the published ones; hidden-layer width (16), feature-vector length (16) and
// all weights are not published and are generated here with $urandom.
// About a quarter of the pixels are zero (dark), so data gating acts on
// realistic block counts.
//
// Each image is classified twice: with delta = 0 (the final node chosen by
// the strongest output across both initial nodes always runs) and with
// delta above any possible spread (divergence: the baseline runs). A plain
// integer reference model with the closed-form piecewise-linear sigmoid
// predicts every activation, the path and the label; the testbench checks
// label, branch, used_baseline, the count of skipped weight reads and the
// outputs read back from SRAM, and prints the cycles per classification.
module tb_workload_falcon;
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
  int n_path = 0, n_base = 0;

  localparam int HID = 16, NFEAT = 16;
  localparam int PIX = 0, WX1 = 12000;
  // SRAM layout (word addresses), set per configuration from the image size
  int NPIX, N1, NFIN, WX2, WBL, WX1B, WX2B, WBLB, WFIN;
  localparam int FEAT = 600000,                          // NFIN x 16 features
                 HX1 = 610000, HX2 = 610100, HBL = 610200,
                 OX1 = 610300, OX2 = 610310, OBL = 610320, OFIN = 610400,
                 TRACE = 700000;
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

  task automatic classify(int delta);
    int omax, omin, amax, node_out, node_nout, e_label, e_base, d, t0, skip0;
    cfg('h006, delta);
    exp_skip = 0;
    layer(PIX, NPIX, HID, WX1, HX1); layer(HX1, HID, N1, WX1B, OX1);
    layer(PIX, NPIX, HID, WX2, HX2); layer(HX2, HID, NFIN - N1, WX2B, OX2);
    omax = -1; omin = 1 << 20; amax = 0;
    for (int k = 0; k < NFIN; k++) begin
      int v = (k < N1) ? mem[OX1 + k] : mem[OX2 + k - N1];
      if (v > omax) begin omax = v; amax = k; end
      if (v < omin) omin = v;
    end
    e_base = (omax - omin < delta);
    if (e_base) begin
      layer(PIX, NPIX, HID, WBL, HBL); layer(HBL, HID, 2 * NFIN, WBLB, OBL);
      node_out = OBL; node_nout = 2 * NFIN;
    end else begin
      layer(FEAT + NFEAT * amax, NFEAT, 2, WFIN + 2 * NFEAT * amax, OFIN + 2 * amax);
      node_out = OFIN + 2 * amax; node_nout = 2;
    end
    begin
      int bm = -1, bi = 0;
      for (int k = 0; k < node_nout; k++) if (mem[node_out + k] > bm) begin bm = mem[node_out + k]; bi = k; end
      e_label = e_base ? bi : 2 * amax + bi;
    end
    skip0 = int'(st_wskip);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    check("not_found", int'(not_found), 0);
    check("used_baseline", int'(used_baseline), e_base);
    check("label", int'(label), e_label);
    if (!e_base) check("branch", int'(branch), amax);
    check("weight reads skipped", int'(st_wskip) - skip0, exp_skip);
    for (int o = 0; o < HID; o++) begin rd(HX1 + o, d); check("X1 hidden", sx(d), mem[HX1 + o]); end
    for (int o = 0; o < HID; o++) begin rd(HX2 + o, d); check("X2 hidden", sx(d), mem[HX2 + o]); end
    for (int o = 0; o < N1; o++) begin rd(OX1 + o, d); check("X1 out", sx(d), mem[OX1 + o]); end
    for (int o = 0; o < NFIN - N1; o++) begin rd(OX2 + o, d); check("X2 out", sx(d), mem[OX2 + o]); end
    for (int o = 0; o < node_nout; o++) begin rd(node_out + o, d); check("final out", sx(d), mem[node_out + o]); end
    if (e_base) n_base++; else n_path++;
    $display("  classify delta=%0d: spread=%0d label=%0d baseline=%0d (%0d cycles)",
             delta, omax - omin, label, used_baseline, t0);
  endtask

  task automatic run_config(string name, int npix, int n1, int n2);
    NPIX = npix; N1 = n1; NFIN = n1 + n2;
    WX2 = WX1 + NPIX * HID; WBL = WX2 + NPIX * HID; WX1B = WBL + NPIX * HID;
    WX2B = WX1B + N1 * HID; WBLB = WX2B + n2 * HID; WFIN = WBLB + 2 * NFIN * HID;
    $display("%s: %0d pixel words, %0d + %0d root outputs", name, NPIX, n1, n2);
    // weights: small first-layer weights keep sums over thousands of inputs
    // in the sigmoid's sloped range
    for (int i = 0; i < 3 * NPIX * HID; i++) wr(WX1 + i, rnd(-3, 3));
    for (int i = 0; i < (NFIN + 2 * NFIN) * HID; i++) wr(WX1B + i, rnd(-96, 96));
    for (int i = 0; i < NFIN * 2 * NFEAT; i++) wr(WFIN + i, rnd(-128, 128));
    // tree: nodes 0 and 1 initial, 2.. final nodes, 2+NFIN baseline
    set_layer(0, PIX, NPIX, HID, WX1, HX1); set_layer(1, HX1, HID, N1, WX1B, OX1);
    set_layer(2, PIX, NPIX, HID, WX2, HX2); set_layer(3, HX2, HID, n2, WX2B, OX2);
    for (int f = 0; f < NFIN; f++)
      set_layer(4 + f, FEAT + NFEAT * f, NFEAT, 2, WFIN + 2 * NFEAT * f, OFIN + 2 * f);
    set_layer(4 + NFIN, PIX, NPIX, HID, WBL, HBL); set_layer(5 + NFIN, HBL, HID, 2 * NFIN, WBLB, OBL);
    set_node(0, 0, 2, 0); set_node(1, 2, 2, 0);
    for (int f = 0; f < NFIN; f++) set_node(2 + f, 4 + f, 1, 2 * f);
    set_node(2 + NFIN, 4 + NFIN, 2, 0);
    cfg('h000, 2); cfg('h001, 0); cfg('h002, 1); cfg('h004, 2 + NFIN); cfg('h005, 1); cfg('h007, TRACE);
    for (int k = 0; k < NFIN; k++) cfg('h010 + k, 2 + k);
    for (int img = 0; img < 2; img++) begin
      for (int i = 0; i < NPIX; i++) wr(PIX + i, ($urandom % 4 == 0) ? 0 : rnd(1, 256));
      for (int i = 0; i < NFIN * NFEAT; i++) wr(FEAT + i, ($urandom % 4 == 0) ? 0 : rnd(0, 256));
      classify(0);
      classify(300);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run_config("Caltech-101 12-class", 75 * 50 * 3, 4, 2);
    run_config("CIFAR-10 10-class", 32 * 32 * 3, 3, 2);
    $display("coverage: path=%0d baseline=%0d gated=%0d wskip=%0d mac=%0d",
             n_path, n_base, st_gated_inputs, st_wskip, st_mac);
    checks++; if (n_path == 0) begin failures++; $display("FAIL: final-node path never taken"); end
    checks++; if (n_base == 0) begin failures++; $display("FAIL: baseline never run"); end
    checks++; if (st_gated_inputs == 0) begin failures++; $display("FAIL: no input gated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
