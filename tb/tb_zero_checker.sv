// tb_zero_checker: feeds blocks of up to 16 words with random zeros and checks
// is_zero, the zero mask, the non-zero count and the running gated total.
module tb_zero_checker;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, in_valid = 0; logic [15:0] in_data = 0;
  logic is_zero; logic [15:0] zmask; logic [4:0] nz_count; logic [31:0] gated_total;
  int checks = 0, failures = 0, total = 0;

  zero_checker dut (.*);

  task automatic check(string w, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", w, g, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      automatic int n = 1 + int'($urandom % 16);
      automatic int nz = 0;
      automatic logic [15:0] m = '0;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < n; k++) begin
        in_valid = 1; in_data = ($urandom % 3 == 0) ? 16'h0 : ($urandom % 2 == 0) ? 16'((1 + $urandom % 255) << 8) : 16'($urandom | 1);
        #1 check("is_zero", int'(is_zero), int'(in_data == 0));
        if (in_data == 0) begin m[k] = 1'b1; total++; end else nz++;
        @(negedge clk);
      end
      in_valid = 0; @(negedge clk);
      check("zmask", int'(zmask), int'(m));
      check("nz_count", int'(nz_count), nz);
      check("gated_total", int'(gated_total), total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
