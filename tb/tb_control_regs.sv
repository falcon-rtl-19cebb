// tb_control_regs: writes every tree, node and layer register with random
// values and checks both the decoded outputs and the read-back port; checks
// that unmapped addresses read 0 and that reset clears the registers.
module tb_control_regs;
  import falcon_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, cfg_we = 0; logic [11:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0, cfg_rdata;
  tree_cfg_t tree; node_desc_t [MAX_NODES-1:0] nodes; layer_desc_t [MAX_LAYERS-1:0] layers;
  int checks = 0, failures = 0;

  control_regs dut (.*);

  task automatic check(string w, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", w, g, e); end
  endtask
  task automatic w(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 12'(a); cfg_wdata = d; @(negedge clk); cfg_we = 0;
    cfg_addr = 12'(a); #1;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    w('h000, 2); check("num_roots", int'(tree.num_roots), 2); check("rb", int'(cfg_rdata), 2);
    w('h001, 5); check("root0", int'(tree.root[0]), 5);
    w('h002, 6); check("root1", int'(tree.root[1]), 6);
    w('h004, 7); check("baseline", int'(tree.baseline), 7); check("rb", int'(cfg_rdata), 7);
    w('h005, 1); check("baseline_en", int'(tree.baseline_en), 1);
    w('h006, 179); check("delta", int'(tree.delta), 179); check("rb", int'(cfg_rdata), 179);
    w('h007, 654321); check("trace_base", int'(tree.trace_base), 654321);
    for (int k = 0; k < MAX_BRANCH; k++) begin
      int v = int'($urandom % MAX_NODES);
      w('h010 + k, v); check("child", int'(tree.child[k]), v); check("rb", int'(cfg_rdata), v);
    end
    for (int n = 0; n < MAX_NODES; n++) begin
      int a = int'($urandom % MAX_LAYERS), b = 1 + int'($urandom % 4), c = int'($urandom % 200);
      w('h100 + 8*n, a); w('h100 + 8*n + 1, b); w('h100 + 8*n + 2, c); check("rb", int'(cfg_rdata), c);
      check("first", int'(nodes[n].first_layer), a);
      check("num", int'(nodes[n].num_layers), b);
      check("cb", int'(nodes[n].class_base), c);
    end
    for (int l = 0; l < MAX_LAYERS; l++) begin
      int v [5];
      for (int f = 0; f < 5; f++) begin
        v[f] = (f == 1 || f == 2) ? int'($urandom % 65536) : int'($urandom % SRAM_WORDS);
        w('h200 + 8*l + f, v[f]); check("rb", int'(cfg_rdata), v[f]);
      end
      check("in_base", int'(layers[l].in_base), v[0]); check("n_in", int'(layers[l].n_in), v[1]);
      check("n_out", int'(layers[l].n_out), v[2]); check("w_base", int'(layers[l].w_base), v[3]);
      check("out_base", int'(layers[l].out_base), v[4]);
    end
    cfg_addr = 12'h3ff; #1; check("unmapped", int'(cfg_rdata), 0);
    cfg_addr = 12'h00f; #1; check("unmapped", int'(cfg_rdata), 0);
    rst_n = 0; #1; rst_n = 1; cfg_addr = 12'h006; #1;
    check("reset delta", int'(cfg_rdata), 0); check("reset layer", int'(layers[3].n_in), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
