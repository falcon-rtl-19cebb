// tb_activation_unit: compares the AU with a closed-form model of the
// four-segment piecewise-linear sigmoid at the segment edges, at random
// points of every segment, at the extremes, and checks symmetry
// y(-x) = 1 - y(x) and monotonicity on a sweep.
module tb_activation_unit;
  import falcon_pkg::*;
  acc_t x; data_t y;
  int checks = 0, failures = 0;

  activation_unit dut (.x, .y);

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

  task automatic t(int v);
    x = acc_t'(v); #1; checks++;
    if (int'(y) != ref_sig(v)) begin failures++; $display("FAIL x=%0d y=%0d exp %0d", v, y, ref_sig(v)); end
  endtask

  initial begin
    int edges [10] = '{0, 1, 65535, 65536, 155647, 155648, 327679, 327680, 1000000, 32'h7fffffff};
    int prev;
    foreach (edges[i]) begin t(edges[i]); t(-edges[i]); end
    t(32'h80000000);
    for (int i = 0; i < 2000; i++) t(int'($urandom % 800000) - 400000);
    prev = -1;
    for (int v = -400000; v <= 400000; v += 997) begin
      x = acc_t'(v); #1; checks++;
      if (int'(y) < prev) begin failures++; $display("FAIL not monotonic at %0d", v); end
      prev = int'(y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
