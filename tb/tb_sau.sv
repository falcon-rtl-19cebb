// tb_sau: the selective-path activation unit against a model of the tree
// test procedure. A stand-in layer scheduler answers each node start with
// that node's (random) output confidences and a done pulse. For random trees
// with one or two initial nodes, random delta and with/without the baseline
// it checks which nodes are started and in what order, the branch, label,
// not_found and used_baseline, and that nodes off the chosen path never run.
module tb_sau;
  import falcon_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0;
  tree_cfg_t tree; node_desc_t [MAX_NODES-1:0] nodes;
  logic node_start, node_done = 0, res_valid = 0; node_id_t node_id; data_t res_data = 0;
  logic busy, done, not_found, used_baseline; logic [CLASS_W-1:0] label; logic [BR_W-1:0] branch;
  int checks = 0, failures = 0;
  int outs [MAX_NODES][4];
  int nout [MAX_NODES];
  int started [$];
  int n_path = 0, n_base = 0, n_nf = 0;

  sau dut (.*);

  // stand-in scheduler
  always begin
    @(negedge clk);
    if (node_start) begin
      automatic int id = int'(node_id);
      started.push_back(id);
      repeat (3) @(posedge clk);
      for (int k = 0; k < nout[id]; k++) begin
        #1 res_valid = 1; res_data = data_t'(outs[id][k]); @(posedge clk); #1 res_valid = 0;
      end
      @(posedge clk); #1 node_done = 1; @(posedge clk); #1 node_done = 0;
    end
  end

  task automatic check(string s, int g, int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", s, g, e); end
  endtask

  initial begin
    tree = '0; nodes = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int two = t % 2, omax = -1, omin = 1000, amax = 0, k = 0, e_node, e_nf = 0, e_base = 0, e_label = 0;
      automatic int exp_started [$];
      tree.num_roots = two ? 2 : 1;
      tree.root[0] = 0; tree.root[1] = 1;
      for (int c = 0; c < 4; c++) tree.child[c] = node_id_t'(2 + c);
      tree.baseline = 6; tree.baseline_en = (t % 3 != 0);
      tree.delta = data_t'((t % 4 == 0) ? 0 : int'($urandom % 200));
      for (int n = 0; n < 7; n++) begin
        nout[n] = (n < 2) ? 2 : (n == 6 ? 4 : 2);
        nodes[n].class_base = 8'(10 * n);
        for (int o = 0; o < 4; o++) outs[n][o] = int'($urandom % 257);
      end
      exp_started.push_back(0); if (two) exp_started.push_back(1);
      for (int r = 0; r <= two; r++)
        for (int o = 0; o < 2; o++) begin
          if (outs[r][o] > omax) begin omax = outs[r][o]; amax = k; end
          if (outs[r][o] < omin) omin = outs[r][o];
          k++;
        end
      if (omax - omin < int'(tree.delta)) begin
        if (tree.baseline_en) begin e_base = 1; e_node = 6; end else begin e_nf = 1; e_node = -1; end
      end else e_node = 2 + amax;
      if (e_node >= 0) begin
        automatic int bm = -1, bi = 0;
        exp_started.push_back(e_node);
        for (int o = 0; o < nout[e_node]; o++) if (outs[e_node][o] > bm) begin bm = outs[e_node][o]; bi = o; end
        e_label = 10 * e_node + bi;
      end
      started.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check("not_found", int'(not_found), e_nf);
      check("used_baseline", int'(used_baseline), e_base);
      if (!e_nf) check("label", int'(label), e_label);
      if (!e_nf && !e_base) check("branch", int'(branch), amax);
      check("nodes run", started.size(), exp_started.size());
      foreach (exp_started[i]) if (i < started.size()) check("node order", started[i], exp_started[i]);
      if (e_nf) n_nf++; else if (e_base) n_base++; else n_path++;
    end
    checks++; if (n_nf == 0 || n_base == 0 || n_path == 0) begin failures++; $display("FAIL coverage"); end
    $display("paths=%0d baseline=%0d not_found=%0d", n_path, n_base, n_nf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
