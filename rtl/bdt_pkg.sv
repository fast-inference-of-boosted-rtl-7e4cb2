// bdt_pkg: sizes and number formats shared by the BDT inference pipeline,
// and the constant model (features, thresholds, leaf scores) that is
// compiled into the trees.
//
// Sizes: the default configuration is the jet-tagging benchmark of the
// design: 100 estimators, one tree per class and estimator for 5 classes
// (500 trees), depth 4 (15 decision nodes and 16 leaves per tree),
// 16 input features, and 18-bit signed fixed point with 4 integer bits for
// features, thresholds and scores.
//
// Model: the thresholds and scores are constants that synthesis folds into
// the logic; nothing is fetched from memory. The trained benchmark model is
// not available, so model_feature/model_threshold/model_score generate a
// deterministic pseudo-random model from a 32-bit hash of
// (seed, tree, node). To put a trained model into the hardware, replace the
// bodies of these three functions with table look-ups of the trained values
// (feature index, threshold and leaf score in the same fixed-point format).
// Node n of a tree is numbered in heap order: the root is node 0, and node n
// has left child 2n+1 (taken when x[feature] <= threshold) and right child
// 2n+2. Leaves are numbered 0..2^DEPTH-1 from left to right.
package bdt_pkg;

  // Benchmark configuration.
  localparam int unsigned N_FEATURES   = 16;
  localparam int unsigned N_CLASSES    = 5;
  localparam int unsigned N_ESTIMATORS = 100;
  localparam int unsigned DEPTH        = 4;
  localparam int unsigned DATA_W       = 18;  // bits of features, thresholds, scores
  localparam int unsigned INT_W        = 4;   // integer bits (sign included)
  localparam int unsigned FRAC_W       = DATA_W - INT_W;

  // 32-bit integer hash (the finaliser of MurmurHash3).
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] h;
    h = v;
    h = h ^ (h >> 16);
    h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Hash of a model coordinate; kind separates features, thresholds, scores.
  function automatic logic [31:0] model_hash(input int unsigned seed,
                                             input int unsigned kind,
                                             input int unsigned tree,
                                             input int unsigned node);
    logic [31:0] h;
    h = mix32(32'(seed) ^ 32'h9e37_79b9);
    h = mix32(h ^ 32'(kind));
    h = mix32(h ^ 32'(tree));
    h = mix32(h ^ 32'(node));
    return h;
  endfunction

  // Index of the feature that decision node `node` of tree `tree` compares.
  function automatic int unsigned model_feature(input int unsigned seed,
                                                input int unsigned tree,
                                                input int unsigned node,
                                                input int unsigned n_features);
    return int'(model_hash(seed, 1, tree, node) % 32'(n_features));
  endfunction

  // Threshold of a decision node: uniform over the signed data_w-bit range,
  // returned sign-extended to 32 bits.
  function automatic logic signed [31:0] model_threshold(input int unsigned seed,
                                                         input int unsigned tree,
                                                         input int unsigned node,
                                                         input int unsigned data_w);
    logic [31:0] h;
    h = model_hash(seed, 2, tree, node);
    return $signed(h) >>> (32 - data_w);
  endfunction

  // Score of leaf `leaf`: uniform over a quarter of the signed data_w-bit
  // range (|score| < 2^(data_w-3)), returned sign-extended to 32 bits.
  function automatic logic signed [31:0] model_score(input int unsigned seed,
                                                     input int unsigned tree,
                                                     input int unsigned leaf,
                                                     input int unsigned data_w);
    logic [31:0] h;
    h = model_hash(seed, 3, tree, leaf);
    return $signed(h) >>> (34 - data_w);
  endfunction

  // Default-configuration constants of one tree, used as the parameter
  // defaults of the node, leaf table and tree modules.
  localparam int unsigned N_NODES  = 2 ** DEPTH - 1;
  localparam int unsigned N_LEAVES = 2 ** DEPTH;
  localparam int unsigned FEAT_W   = $clog2(N_FEATURES);

  function automatic logic [N_NODES-1:0][FEAT_W-1:0] tree_features(
      input int unsigned seed, input int unsigned tree);
    logic [N_NODES-1:0][FEAT_W-1:0] f;
    for (int unsigned n = 0; n < N_NODES; n++)
      f[n] = FEAT_W'(model_feature(seed, tree, n, N_FEATURES));
    return f;
  endfunction

  function automatic logic [N_NODES-1:0][DATA_W-1:0] tree_thresholds(
      input int unsigned seed, input int unsigned tree);
    logic [N_NODES-1:0][DATA_W-1:0] t;
    for (int unsigned n = 0; n < N_NODES; n++)
      t[n] = DATA_W'(model_threshold(seed, tree, n, DATA_W));
    return t;
  endfunction

  function automatic logic [N_LEAVES-1:0][DATA_W-1:0] tree_scores(
      input int unsigned seed, input int unsigned tree);
    logic [N_LEAVES-1:0][DATA_W-1:0] s;
    for (int unsigned l = 0; l < N_LEAVES; l++)
      s[l] = DATA_W'(model_score(seed, tree, l, DATA_W));
    return s;
  endfunction

endpackage
