// tb_t_buffer: random writes and reads of the 4-entry T-buffer against a model.
module tb_t_buffer;
  import falcon_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic we = 0; logic [1:0] waddr = 0, raddr = 0; acc_t wdata = 0, rdata;
  int checks = 0, failures = 0;
  int model [4];

  t_buffer dut (.*);

  initial begin
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); we = 1; waddr = 2'(i); wdata = acc_t'($urandom); model[i] = int'(wdata);
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = ($urandom % 2 == 1); waddr = 2'($urandom); wdata = acc_t'($urandom); raddr = 2'($urandom);
      #1; checks++;
      if (int'(rdata) != model[raddr]) begin failures++; $display("FAIL entry %0d", raddr); end
      @(posedge clk); if (we) model[waddr] = int'(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
