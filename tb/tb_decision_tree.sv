// tb_decision_tree: checks one programmable depth-4 tree.
// After reset every leaf must give the reset (worst-case) class. Then 20
// random trees are loaded node by node through the configuration port and
// each is evaluated on 100 random feature vectors (including vectors equal to
// a threshold, where the "<=" rule matters); the class must match the walk of
// the reference model in tb_tree_pkg.
`timescale 1ns/1ps
module tb_decision_tree;
  import dfs_pkg::*;

  `include "tb_tree_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_node = '0;
  feature_e cfg_fsel = F_TYPE;
  logic [DATA_W-1:0] cfg_thr = '0;
  feat_vec_t feat;
  logic [CLS_W-1:0] cls;
  int checks = 0, failures = 0;

  decision_tree dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input model_tree_t t);
    for (int k = 0; k < N_INT + N_LEAF; k++) begin
      @(negedge clk);
      cfg_we   = 1'b1;
      cfg_node = 8'(k);
      if (k < N_INT) begin
        cfg_fsel = feature_e'(t.fsel[k]);
        cfg_thr  = t.thr[k];
      end else begin
        cfg_fsel = F_TYPE;
        cfg_thr  = DATA_W'(t.leaf[k - N_INT]);
      end
    end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    model_tree_t t;
    foreach (feat[i]) feat[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 10; n++) begin
      foreach (feat[i]) feat[i] = $urandom;
      #1;
      checks++;
      if (cls != 2) begin failures++; $display("reset class %0d", cls); end
    end
    for (int tr = 0; tr < 20; tr++) begin
      t = random_tree(4);
      load(t);
      for (int n = 0; n < 100; n++) begin
        @(negedge clk);
        foreach (feat[i]) feat[i] = (i == 0) ? DATA_W'($urandom_range(0, 4095)) : $urandom;
        if (n % 4 == 0) feat[t.fsel[0]] = t.thr[0];  // exactly on the root threshold
        #1;
        checks++;
        if (32'(cls) != eval_tree(t, feat)) begin
          failures++;
          $display("tree %0d vec %0d: got %0d expected %0d", tr, n, cls, eval_tree(t, feat));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
