// tb_weight_fifo: random push/pop traffic on a depth-16 weight FIFO against a
// queue model; checks head data, empty/full/count every cycle and clear.
module tb_weight_fifo;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, push = 0, pop = 0;
  logic [15:0] wdata = 0, rdata;
  logic empty, full; logic [4:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q [$];

  weight_fifo dut (.*);

  task automatic check(string w, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", w, g, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check("count", int'(count), q.size());
      check("empty", int'(empty), int'(q.size() == 0));
      check("full", int'(full), int'(q.size() == 16));
      if (q.size() > 0) check("head", int'(rdata), int'(q[0]));
      clear = (t % 700 == 699);
      push = !full && ($urandom % 3 != 0) && (t % 1000 < 500 || $urandom % 4 == 0);
      pop  = !empty && ($urandom % 3 != 0) && (t % 1000 >= 300 || $urandom % 4 == 0);
      wdata = 16'($urandom);
      @(posedge clk); #1;
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(wdata);
      end
      push = 0; pop = 0; clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
