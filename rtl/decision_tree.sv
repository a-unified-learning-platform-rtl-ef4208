// decision_tree: one programmable binary decision tree of the Random Forest.
//
// The tree is complete and of fixed depth TREE_DEPTH, stored in heap order:
// internal node k (0 .. 2**TREE_DEPTH-2) has children 2k+1 (taken when the
// selected feature is <= the threshold, as in scikit-learn) and 2k+2. Each of
// the 2**TREE_DEPTH leaves holds a class. A trained tree shallower than
// TREE_DEPTH is loaded by giving the unused levels a threshold of all ones
// and copying the leaf class. All internal nodes compare in parallel and the
// path is resolved by a chain of multiplexers, so the class is a
// combinational function of the features.
//
// The paper generates fixed HDL from the trained model but gives neither the
// trained thresholds nor the tree depth; holding nodes in registers written
// through a configuration port, the fixed depth and unsigned comparison are
// this design's choices. After reset every leaf holds RESET_CLASS (the
// worst-case class), so an unprogrammed tree never asks for a short period.
//
// Interface: cfg_we/cfg_node/cfg_fsel/cfg_thr write one node per clock;
// feat -> cls is combinational.
module decision_tree
  import dfs_pkg::*;
#(
  parameter int unsigned TREE_DEPTH  = 4,
  parameter int unsigned RESET_CLASS = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [7:0]        cfg_node,
  input  feature_e          cfg_fsel,
  input  logic [DATA_W-1:0] cfg_thr,
  input  feat_vec_t         feat,
  output logic [CLS_W-1:0]  cls
);

  localparam int unsigned N_INT  = (1 << TREE_DEPTH) - 1;
  localparam int unsigned N_LEAF = 1 << TREE_DEPTH;

  feature_e          fsel [N_INT];
  logic [DATA_W-1:0] thr  [N_INT];
  logic [CLS_W-1:0]  leaf [N_LEAF];

  logic [7:0] leaf_addr;
  assign leaf_addr = cfg_node - 8'(N_INT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_INT; k++) begin
        fsel[k] <= F_TYPE;
        thr[k]  <= '1;
      end
      for (int k = 0; k < N_LEAF; k++) leaf[k] <= CLS_W'(RESET_CLASS);
    end else if (cfg_we) begin
      if (32'(cfg_node) < N_INT) begin
        fsel[cfg_node[TREE_DEPTH-1:0]] <= cfg_fsel;
        thr[cfg_node[TREE_DEPTH-1:0]]  <= cfg_thr;
      end else if (32'(cfg_node) < N_INT + N_LEAF) begin
        leaf[leaf_addr[TREE_DEPTH-1:0]] <= cfg_thr[CLS_W-1:0];
      end
    end
  end

  // Per-node decision: 1 = go right (feature above threshold).
  logic [N_INT-1:0] go_right;
  always_comb begin
    for (int k = 0; k < N_INT; k++) go_right[k] = feat[fsel[k]] > thr[k];
  end

  always_comb begin
    int unsigned idx;
    idx = 0;
    for (int l = 0; l < TREE_DEPTH; l++) idx = 2 * idx + 1 + 32'(go_right[idx]);
    cls = leaf[idx - N_INT];
  end

  // Node addresses are 8 bits wide and classes CLS_W bits.
  initial begin
    assert (TREE_DEPTH >= 1 && TREE_DEPTH <= 7)
      else $error("decision_tree: TREE_DEPTH must be 1..7");
    assert (RESET_CLASS < (1 << CLS_W))
      else $error("decision_tree: RESET_CLASS does not fit in CLS_W bits");
  end

endmodule
