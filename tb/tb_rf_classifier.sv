// tb_rf_classifier: checks the 100-tree, three-class Random Forest.
// Phase 1: right after reset the forest must answer the worst-case class.
// Phase 2: every tree is loaded with a random depth-4 tree; 300 random
// feature vectors are classified and compared with the majority vote of the
// reference trees. Phase 3: directed votes (50/50 tie, 34/33/33 split, one
// tree changed) check the vote counting and the tie rule (slower class wins).
`timescale 1ns/1ps
module tb_rf_classifier;
  import dfs_pkg::*;

  `include "tb_tree_model.svh"

  localparam int NT = 100;
  localparam int NC = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  tree_cfg_t cfg;
  feat_vec_t feat;
  logic [CLS_W-1:0] cls;
  int checks = 0, failures = 0;
  model_tree_t trees [NT];

  rf_classifier dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int ti, input model_tree_t t);
    for (int k = 0; k < N_INT + N_LEAF; k++) begin
      @(negedge clk);
      cfg.we   = 1'b1;
      cfg.tree = 8'(ti);
      cfg.node = 8'(k);
      cfg.fsel = (k < N_INT) ? feature_e'(t.fsel[k]) : F_TYPE;
      cfg.thr  = (k < N_INT) ? t.thr[k] : DATA_W'(t.leaf[k - N_INT]);
    end
    @(negedge clk);
    cfg.we = 1'b0;
    trees[ti] = t;
  endtask

  function automatic int unsigned ref_cls();
    int unsigned c[] = new[NT];
    for (int i = 0; i < NT; i++) c[i] = eval_tree(trees[i], feat);
    return vote(c, NC);
  endfunction

  task automatic check(input string what);
    #1;
    checks++;
    if (32'(cls) != ref_cls()) begin
      failures++;
      $display("%s: got %0d expected %0d", what, cls, ref_cls());
    end
  endtask

  initial begin
    cfg = '0;
    foreach (feat[i]) feat[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (cls != CLS_W'(NC - 1)) begin failures++; $display("reset class %0d", cls); end

    for (int i = 0; i < NT; i++) load(i, random_tree(NC));
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      foreach (feat[i]) feat[i] = (i == 0) ? DATA_W'($urandom_range(0, 4095)) : $urandom;
      check("random forest");
    end

    // 50 trees vote 0, 50 vote 1: tie goes to class 1
    for (int i = 0; i < NT; i++) load(i, const_tree(i < 50 ? 0 : 1));
    check("tie 50/50");
    checks++;
    if (cls != 1) begin failures++; $display("tie rule: got %0d", cls); end
    // 34 / 33 / 33
    for (int i = 0; i < NT; i++) load(i, const_tree(i < 34 ? 0 : (i < 67 ? 1 : 2)));
    check("34/33/33");
    checks++;
    if (cls != 0) begin failures++; $display("plurality: got %0d", cls); end
    // one tree moves from class 0 to 2: 33/33/34
    load(0, const_tree(2));
    check("33/33/34");
    checks++;
    if (cls != 2) begin failures++; $display("plurality after change: got %0d", cls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
