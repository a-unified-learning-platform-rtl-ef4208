// rf_classifier: Random Forest delay classifier.
//
// NUM_TREES programmable decision trees (decision_tree) see the same six
// features in parallel; each votes for one of NUM_CLASSES delay classes and
// the class with most votes wins. A tie goes to the slower (higher) class, so
// that an undecided forest errs towards a longer clock period. The paper's
// main forest sizes are 10 trees for two classes and 100 trees for three and
// four classes; the default here is its three-class configuration (100 trees,
// three classes) shown in its pipeline figure. The paper averages the trees'
// decisions; with one class per leaf that is the majority vote used here. Tree
// depth, the vote tie rule and the configuration port are this design's own.
//
// Interface: cfg writes one node of tree cfg.tree per clock (see dfs_pkg);
// feat -> cls is combinational (one pipeline stage together with the
// register in ml_stage).
module rf_classifier
  import dfs_pkg::*;
#(
  parameter int unsigned NUM_TREES   = 100,
  parameter int unsigned NUM_CLASSES = 3,
  parameter int unsigned TREE_DEPTH  = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tree_cfg_t        cfg,
  input  feat_vec_t        feat,
  output logic [CLS_W-1:0] cls
);

  localparam int unsigned VOTE_W = $clog2(NUM_TREES + 1);

  logic [CLS_W-1:0] tree_cls [NUM_TREES];

  for (genvar t = 0; t < NUM_TREES; t++) begin : g_tree
    decision_tree #(
      .TREE_DEPTH (TREE_DEPTH),
      .RESET_CLASS(NUM_CLASSES - 1)
    ) u_tree (
      .clk     (clk),
      .rst_n   (rst_n),
      .cfg_we  (cfg.we && (32'(cfg.tree) == t)),
      .cfg_node(cfg.node),
      .cfg_fsel(cfg.fsel),
      .cfg_thr (cfg.thr),
      .feat    (feat),
      .cls     (tree_cls[t])
    );
  end

  logic [VOTE_W-1:0] votes [NUM_CLASSES];

  always_comb begin
    for (int c = 0; c < NUM_CLASSES; c++) votes[c] = '0;
    for (int t = 0; t < NUM_TREES; t++) begin
      for (int c = 0; c < NUM_CLASSES; c++) begin
        if (32'(tree_cls[t]) == c) votes[c] = votes[c] + 1'b1;
      end
    end
  end

  // Arg-max with ties resolved towards the slower class (>=).
  always_comb begin
    logic [VOTE_W-1:0] best;
    best = votes[0];
    cls  = '0;
    for (int c = 1; c < NUM_CLASSES; c++) begin
      if (votes[c] >= best) begin
        best = votes[c];
        cls  = CLS_W'(c);
      end
    end
  end

  // Tree index is 8 bits wide; classes are CLS_W bits.
  initial begin
    assert (NUM_TREES >= 1 && NUM_TREES <= 256)
      else $error("rf_classifier: NUM_TREES must be 1..256");
    assert (NUM_CLASSES >= 2 && NUM_CLASSES <= MAX_CLASSES)
      else $error("rf_classifier: NUM_CLASSES must be 2..%0d", MAX_CLASSES);
  end

endmodule
