// tb_sram_mem: checks the SRAM at its full default size (768,000 words):
// writes random words at random addresses (including the first and last
// word), reads them back with the one-cycle read latency, and checks that
// rdata holds between reads and that a write does not disturb rdata.
module tb_sram_mem;
  import falcon_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic re = 0, we = 0; addr_t addr = '0; data_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  int model [int];
  int addrs [64];

  sram_mem dut (.clk, .re, .we, .addr, .wdata, .rdata);

  task automatic check(string w, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) addrs[i] = (i == 0) ? 0 : (i == 1) ? SRAM_WORDS - 1 : int'($urandom % SRAM_WORDS);
    foreach (addrs[i]) begin
      int d = int'($urandom & 16'hffff);
      @(negedge clk); we = 1; addr = addr_t'(addrs[i]); wdata = data_t'(d); model[addrs[i]] = d;
    end
    @(negedge clk); we = 0;
    foreach (addrs[i]) begin
      @(negedge clk); re = 1; addr = addr_t'(addrs[i]);
      @(negedge clk); re = 0;
      check("read", int'($unsigned(rdata)), model[addrs[i]]);
      @(negedge clk); check("hold", int'($unsigned(rdata)), model[addrs[i]]);
      we = 1; addr = addr_t'(addrs[0]); wdata = data_t'(model[addrs[0]]);
      @(negedge clk); we = 0; check("hold after write", int'($unsigned(rdata)), model[addrs[i]]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
