// tb_nu_array: the 16-NU chain with weight FIFOs, T-buffers and AU.
// Fills every weight FIFO, streams a block of inputs into NU 0 and checks each
// NU's sum against a model, that the chain drains exactly N cycles after the
// last input, that only active NUs accumulate, T-buffer save/restore,
// load_one, and that N rotate cycles leave sigmoid(sum_j) in NU j.
module tb_nu_array;
  timeunit 1ns; timeprecision 1ps;
  import falcon_pkg::*;
  localparam int N = 16;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  logic [N-1:0] active = '1, wf_push_sel = '0, wf_empty;
  data_t x_in = 0, wf_data = 0, au_out; logic x_vld_in = 0;
  logic wf_clear = 0, clear = 0, rotate = 0, tb_save = 0, tb_restore = 0, load_one = 0, chain_busy;
  logic [1:0] tb_waddr = 0, tb_raddr = 0; logic [3:0] load_idx = 0, sel_idx = 0;
  acc_t load_val = 0, sel_acc;
  int checks = 0, failures = 0;
  int exp_acc [N];
  int saved [4][N];

  nu_array dut (.*);

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

  task automatic read_all(string s);
    for (int j = 0; j < N; j++) begin sel_idx = 4'(j); #0.2 check(s, int'(sel_acc), exp_acc[j]); end
  endtask

  task automatic run_block(int n, logic [N-1:0] act);
    int x [16]; int w [N][16]; int lat;
    active = act;
    @(negedge clk); wf_clear = 1; @(negedge clk); wf_clear = 0;
    for (int j = 0; j < N; j++)
      for (int k = 0; k < n; k++) begin
        w[j][k] = int'($urandom % 256) - 128;
        wf_push_sel = '0; wf_push_sel[j] = 1'b1; wf_data = data_t'(w[j][k]); @(negedge clk);
      end
    wf_push_sel = '0;
    for (int k = 0; k < n; k++) begin
      x[k] = int'($urandom % 512) - 256;
      x_in = data_t'(x[k]); x_vld_in = 1; @(negedge clk);
      for (int j = 0; j < N; j++) if (act[j]) exp_acc[j] += x[k] * w[j][k];
    end
    x_vld_in = 0; lat = 0;
    while (chain_busy) begin @(negedge clk); lat++; end
    check("drain cycles", lat, N);
    for (int j = 0; j < N; j++) check("weights used", int'(wf_empty[j]), int'(act[j]));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (exp_acc[j]) exp_acc[j] = 0;
    run_block(16, '1); read_all("sum block 1");
    run_block(9, 16'h0fff); read_all("sum partial group");
    // park as T-trace entry 2, clear, restore
    tb_waddr = 2; tb_save = 1; @(negedge clk); tb_save = 0;
    foreach (exp_acc[j]) saved[2][j] = exp_acc[j];
    clear = 1; @(negedge clk); clear = 0;
    sel_idx = 5; #1 check("cleared", int'(sel_acc), 0);
    tb_raddr = 2; tb_restore = 1; @(negedge clk); tb_restore = 0;
    read_all("restored");
    load_idx = 7; load_val = 32'h00030000; load_one = 1; @(negedge clk); load_one = 0;
    exp_acc[7] = 32'h00030000; read_all("load_one");
    run_block(12, '1); read_all("sum after restore");
    // activation ring
    active = '1; rotate = 1; repeat (N) @(negedge clk); rotate = 0;
    for (int j = 0; j < N; j++) exp_acc[j] = ref_sig(exp_acc[j]);
    read_all("activated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
