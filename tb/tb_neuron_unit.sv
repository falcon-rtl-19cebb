// tb_neuron_unit: drives one NU with random inputs and a weight queue and
// checks the MAC result, the one-cycle forwarding of inputs down the chain,
// that an inactive NU neither pops nor accumulates, and clear/load/rotate.
module tb_neuron_unit;
  import falcon_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, active = 1, clear = 0, load = 0, rotate = 0, x_vld_in = 0, w_avail;
  acc_t load_val = 0, rot_in = 0, acc;
  data_t x_in = 0, w, x_out; logic x_vld_out, w_pop;
  int checks = 0, failures = 0;
  data_t wq [$];

  neuron_unit dut (.*);
  assign w_avail = (wq.size() > 0);
  assign w = w_avail ? wq[0] : '0;

  task automatic check(string s, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", s, g, e); end
  endtask

  initial begin
    int exp_acc;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      int n = 1 + int'($urandom % 16);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; exp_acc = 0;
      active = (r % 5 != 4);
      for (int k = 0; k < n; k++) wq.push_back(data_t'(int'($urandom % 512) - 256));
      for (int k = 0; k < n; k++) begin
        x_in = data_t'(int'($urandom % 1024) - 512); x_vld_in = 1;
        if (active) exp_acc += int'(x_in) * int'(wq[0]);
        #1 check("w_pop", int'(w_pop), int'(active));
        @(posedge clk); #1;
        if (active) void'(wq.pop_front());
        check("x forwarded", int'(x_out), int'(x_in)); check("vld forwarded", int'(x_vld_out), 1);
        @(negedge clk);
        x_vld_in = $urandom % 2 == 0 ? 0 : 0;
      end
      x_vld_in = 0; @(negedge clk);
      check("acc", int'(acc), exp_acc);
      check("vld idle", int'(x_vld_out), 0);
      wq.delete();
    end
    @(negedge clk); load = 1; load_val = 32'h12345678; @(negedge clk); load = 0;
    check("load", int'(acc), 32'h12345678);
    rotate = 1; rot_in = 32'h0000_00ab; @(negedge clk); rotate = 0;
    check("rotate", int'(acc), 32'hab);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
