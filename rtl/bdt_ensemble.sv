// bdt_ensemble: low-latency inference of a multiclass Boosted Decision Tree
// ensemble, fully on chip. This is the top level.
//
// The ensemble has N_ESTIMATORS boosting stages, each with one tree per
// class, so N_ESTIMATORS*N_CLASSES trees in all (tree t = e*N_CLASSES + c
// belongs to estimator e and class c). Every tree (bdt_tree) sees the same
// feature vector and is evaluated in parallel, with its thresholds and leaf
// scores built into the logic as constants. A class's score is the sum of
// the scores of its N_ESTIMATORS trees, formed by one pipelined balanced
// adder tree (bdt_adder_tree) per class. The whole pipeline accepts one
// feature vector per clock cycle and never stalls.
//
// The constants come from bdt_pkg: model_feature, model_threshold and
// model_score of seed MODEL_SEED. Replace those functions to build a
// trained model into the hardware.
//
// Following the design: parallel unrolled trees with constant thresholds,
// a sum per class by a balanced adder tree, an initiation interval of one
// cycle, and, at the default sizes (100 estimators, 5 classes, depth 4,
// 16 features, 18-bit data), 12 cycles of latency. The tree-to-class
// ordering, the full-precision sum (SUM_W bits), the valid bit and the
// synchronous reset are this implementation's choices. No bias or prior is
// added to the sums and no soft-max is applied: the outputs are the raw
// class scores.
//
// Interface: clk, rst (synchronous, active high), in_valid, x (N_FEATURES
// signed DATA_W-bit fixed-point words, 4 integer bits at 18 bits) in;
// out_valid, score (N_CLASSES signed SUM_W-bit sums, same radix point as
// the leaf scores) out.
// Timing: score and out_valid appear LATENCY = DEPTH + 1 +
// ceil(log2 N_ESTIMATORS) clock edges after the edge that samples x.
module bdt_ensemble #(
  parameter int unsigned N_FEATURES   = bdt_pkg::N_FEATURES,
  parameter int unsigned N_CLASSES    = bdt_pkg::N_CLASSES,
  parameter int unsigned N_ESTIMATORS = bdt_pkg::N_ESTIMATORS,
  parameter int unsigned DEPTH        = bdt_pkg::DEPTH,
  parameter int unsigned DATA_W       = bdt_pkg::DATA_W,
  parameter int unsigned MODEL_SEED   = 1,
  parameter int unsigned SUM_W        = DATA_W + ((N_ESTIMATORS > 1) ? $clog2(N_ESTIMATORS) : 0)
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              in_valid,
  input  logic [N_FEATURES-1:0][DATA_W-1:0] x,
  output logic                              out_valid,
  output logic [N_CLASSES-1:0][SUM_W-1:0]   score
);

  localparam int unsigned FEAT_W   = (N_FEATURES > 1) ? $clog2(N_FEATURES) : 1;
  localparam int unsigned N_NODES  = 2 ** DEPTH - 1;
  localparam int unsigned N_LEAVES = 2 ** DEPTH;
  localparam int unsigned N_TREES  = N_ESTIMATORS * N_CLASSES;

  // Constant tables of tree t, at this module's sizes.
  function automatic logic [N_NODES-1:0][FEAT_W-1:0] features_of(input int unsigned t);
    logic [N_NODES-1:0][FEAT_W-1:0] f;
    for (int unsigned n = 0; n < N_NODES; n++)
      f[n] = FEAT_W'(bdt_pkg::model_feature(MODEL_SEED, t, n, N_FEATURES));
    return f;
  endfunction

  function automatic logic [N_NODES-1:0][DATA_W-1:0] thresholds_of(input int unsigned t);
    logic [N_NODES-1:0][DATA_W-1:0] th;
    for (int unsigned n = 0; n < N_NODES; n++)
      th[n] = DATA_W'(bdt_pkg::model_threshold(MODEL_SEED, t, n, DATA_W));
    return th;
  endfunction

  function automatic logic [N_LEAVES-1:0][DATA_W-1:0] scores_of(input int unsigned t);
    logic [N_LEAVES-1:0][DATA_W-1:0] sc;
    for (int unsigned l = 0; l < N_LEAVES; l++)
      sc[l] = DATA_W'(bdt_pkg::model_score(MODEL_SEED, t, l, DATA_W));
    return sc;
  endfunction

  // Tree scores regrouped by class for the adder trees.
  logic [N_CLASSES-1:0][N_ESTIMATORS-1:0][DATA_W-1:0] tree_score;
  logic [N_TREES-1:0]                                 tree_valid;
  logic [N_CLASSES-1:0]                               class_valid;

  for (genvar e = 0; e < N_ESTIMATORS; e++) begin : g_est
    for (genvar c = 0; c < N_CLASSES; c++) begin : g_cls
      localparam int unsigned T = e * N_CLASSES + c;
      bdt_tree #(
        .N_FEATURES(N_FEATURES),
        .DEPTH     (DEPTH),
        .DATA_W    (DATA_W),
        .FEAT_W    (FEAT_W),
        .FEATURE   (features_of(T)),
        .THRESHOLD (thresholds_of(T)),
        .SCORE     (scores_of(T))
      ) u_tree (
        .clk      (clk),
        .rst      (rst),
        .in_valid (in_valid),
        .x        (x),
        .out_valid(tree_valid[T]),
        .score    (tree_score[c][e])
      );
    end
  end

  for (genvar c = 0; c < N_CLASSES; c++) begin : g_sum
    bdt_adder_tree #(
      .N_IN (N_ESTIMATORS),
      .IN_W (DATA_W),
      .OUT_W(SUM_W)
    ) u_adder (
      .clk      (clk),
      .rst      (rst),
      .in_valid (tree_valid[c]),
      .in       (tree_score[c]),
      .out_valid(class_valid[c]),
      .sum      (score[c])
    );
  end

  assign out_valid = class_valid[0];

  // All trees and all classes run in lock step.
  assert property (@(posedge clk) disable iff (rst)
                   (tree_valid == '0) || (tree_valid == '1))
    else $error("bdt_ensemble: trees out of step");
  assert property (@(posedge clk) disable iff (rst)
                   (class_valid == '0) || (class_valid == '1))
    else $error("bdt_ensemble: classes out of step");

endmodule
