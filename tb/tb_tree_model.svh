// tb_tree_model.svh: reference model of a depth-4 decision tree for the testbenches.
// A tree is kept as three arrays (feature select, threshold, leaf class) and
// evaluated by an explicit node-by-node walk, written independently of the
// RTL's multiplexer chain. Included inside a testbench module that imports
// dfs_pkg.
  localparam int D      = 4;
  localparam int N_INT  = (1 << D) - 1;
  localparam int N_LEAF = 1 << D;

  typedef struct {
    int unsigned       fsel [N_INT];
    logic [DATA_W-1:0] thr  [N_INT];
    int unsigned       leaf [N_LEAF];
  } model_tree_t;

  function automatic model_tree_t random_tree(input int nclasses);
    model_tree_t t;
    for (int k = 0; k < N_INT; k++) begin
      t.fsel[k] = $urandom_range(0, NUM_FEATURES - 1);
      t.thr[k]  = (t.fsel[k] == 0) ? DATA_W'($urandom_range(0, 4095)) : DATA_W'($urandom);
    end
    for (int k = 0; k < N_LEAF; k++) t.leaf[k] = $urandom_range(0, nclasses - 1);
    return t;
  endfunction

  function automatic model_tree_t const_tree(input int cls);
    model_tree_t t;
    for (int k = 0; k < N_INT; k++) begin
      t.fsel[k] = 0;
      t.thr[k]  = '1;
    end
    for (int k = 0; k < N_LEAF; k++) t.leaf[k] = cls;
    return t;
  endfunction

  function automatic int unsigned eval_tree(input model_tree_t t, input feat_vec_t f);
    int unsigned node = 0;
    while (node < N_INT) begin
      if (f[t.fsel[node]] <= t.thr[node]) node = 2 * node + 1;
      else                                node = 2 * node + 2;
    end
    return t.leaf[node - N_INT];
  endfunction

  // Majority vote, ties to the higher class.
  function automatic int unsigned vote(input int unsigned cls[], input int nclasses);
    int unsigned cnt [MAX_CLASSES];
    int unsigned best = 0, bc = 0;
    foreach (cnt[c]) cnt[c] = 0;
    foreach (cls[i]) cnt[cls[i]]++;
    for (int c = 0; c < nclasses; c++)
      if (cnt[c] >= best) begin best = cnt[c]; bc = c; end
    return bc;
  endfunction
