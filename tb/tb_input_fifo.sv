// tb_input_fifo: loads blocks of inputs with zero flags into the input FIFO,
// then reads the block several times (rewind between passes) and checks that
// exactly the non-zero entries come out, in order, on every pass, and that
// flush empties it.
module tb_input_fifo;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, flush = 0, push = 0, wzero = 0, rewind = 0, pop = 0;
  logic [15:0] wdata = 0, rdata; logic rvalid; logic [4:0] count;
  int checks = 0, failures = 0;

  input_fifo dut (.*);

  task automatic check(string w, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", w, g, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      automatic int n = 1 + int'($urandom % 16);
      automatic logic [15:0] exp [$];
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      check("empty after flush", int'(rvalid), 0);
      for (int k = 0; k < n; k++) begin
        push = 1; wdata = ($urandom % 3 == 0) ? 16'h0 : 16'($urandom | 1); wzero = (wdata == 0);
        if (!wzero) exp.push_back(wdata);
        @(negedge clk);
      end
      push = 0;
      check("count", int'(count), n);
      for (int pass = 0; pass < 3; pass++) begin
        rewind = 1; @(negedge clk); rewind = 0;
        foreach (exp[i]) begin
          check("rvalid", int'(rvalid), 1);
          check("data", int'(rdata), int'(exp[i]));
          pop = 1; @(negedge clk); pop = 0;
        end
        check("end of block", int'(rvalid), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
