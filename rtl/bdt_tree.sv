// bdt_tree: one decision tree, fully unrolled and pipelined.
//
// Every decision node of the tree is built as its own comparator
// (bdt_node), and all of them compare the same feature vector at the same
// time, so no node waits for its parent. The decision path is then formed
// by Boolean activations: a node is active when its parent is active and
// the parent's comparison went its way (true for the left child, negated
// for the right child). Exactly one leaf ends up active. The leaf
// activations, concatenated, address the tree's leaf score table
// (bdt_leaf_lut).
//
// Pipeline (DEPTH+1 register stages, initiation interval 1, no stalls):
//   stage 1        all 2^DEPTH-1 comparisons, and the two activations of
//                  level 1 (root true / root false);
//   stage s=2..D   the 2^s activations of level s, from the level s-1
//                  activations and the carried comparisons of level s-1;
//   stage D+1      the score of the active leaf.
// A valid bit travels alongside; only the valid bits are reset.
//
// Following the design: parallel comparisons against constants, AND of the
// decision or its negation down each path, a one-hot leaf vector that
// addresses a score table, and one clock cycle per level of depth. The
// placement of the registers inside that budget, the valid bit and the
// synchronous reset are this implementation's choices.
//
// Interface: clk, rst (synchronous, active high), in_valid, x (N_FEATURES
// signed DATA_W-bit words) in; out_valid, score (signed DATA_W bits) out.
// Timing: score and out_valid appear DEPTH+1 clock edges after the edge
// that samples x and in_valid. A new x may be presented every cycle.
// Parameters FEATURE, THRESHOLD (per node, heap order) and SCORE (per leaf,
// left to right) hold the trained model; their defaults are tree 0 of the
// default model in bdt_pkg.
module bdt_tree #(
  parameter int unsigned N_FEATURES = bdt_pkg::N_FEATURES,
  parameter int unsigned DEPTH      = bdt_pkg::DEPTH,
  parameter int unsigned DATA_W     = bdt_pkg::DATA_W,
  parameter int unsigned FEAT_W     = (N_FEATURES > 1) ? $clog2(N_FEATURES) : 1,
  parameter logic [2**DEPTH-2:0][FEAT_W-1:0] FEATURE   = bdt_pkg::tree_features(1, 0),
  parameter logic [2**DEPTH-2:0][DATA_W-1:0] THRESHOLD = bdt_pkg::tree_thresholds(1, 0),
  parameter logic [2**DEPTH-1:0][DATA_W-1:0] SCORE     = bdt_pkg::tree_scores(1, 0)
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              in_valid,
  input  logic [N_FEATURES-1:0][DATA_W-1:0] x,
  output logic                              out_valid,
  output logic [DATA_W-1:0]                 score
);

  localparam int unsigned N_NODES  = 2 ** DEPTH - 1;
  localparam int unsigned N_LEAVES = 2 ** DEPTH;

  // Comparisons of all nodes (combinational, then carried per stage).
  logic [N_NODES-1:0]  cmp;
  logic [N_NODES-1:0]  cmp_q [1:DEPTH];
  // Activations of level s live in act_q[s][2^s-1:0], leftmost node first.
  logic [N_LEAVES-1:0] act_q [1:DEPTH];
  logic [DEPTH:0]      valid_q;
  logic [DATA_W-1:0]   leaf_score;

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    bdt_node #(
      .N_FEATURES(N_FEATURES),
      .DATA_W    (DATA_W),
      .FEAT_W    (FEAT_W),
      .FEATURE   (FEATURE[n]),
      .THRESHOLD (THRESHOLD[n])
    ) u_node (
      .x  (x),
      .cmp(cmp[n])
    );
  end

  // Stage 1: register every comparison and the level-1 activations.
  always_ff @(posedge clk) begin
    cmp_q[1] <= cmp;
    act_q[1] <= N_LEAVES'({~cmp[0], cmp[0]});
  end

  // Stages 2..DEPTH: one level of activations per cycle.
  for (genvar s = 2; s <= DEPTH; s++) begin : g_stage
    logic [N_LEAVES-1:0] act_d;
    always_comb begin
      act_d = '0;
      for (int unsigned j = 0; j < 2 ** s; j++) begin
        // Parent j/2 at level s-1 has heap index 2^(s-1)-1 + j/2.
        if (j % 2 == 0)
          act_d[j] = act_q[s-1][j/2] &  cmp_q[s-1][2**(s-1) - 1 + j/2];
        else
          act_d[j] = act_q[s-1][j/2] & ~cmp_q[s-1][2**(s-1) - 1 + j/2];
      end
    end
    always_ff @(posedge clk) begin
      cmp_q[s] <= cmp_q[s-1];
      act_q[s] <= act_d;
    end
  end

  // Stage DEPTH+1: the active leaf addresses the score table.
  bdt_leaf_lut #(
    .N_LEAVES(N_LEAVES),
    .DATA_W  (DATA_W),
    .SCORE   (SCORE)
  ) u_lut (
    .leaf_act(act_q[DEPTH]),
    .score   (leaf_score)
  );

  always_ff @(posedge clk) score <= leaf_score;

  always_ff @(posedge clk) begin
    if (rst) valid_q <= '0;
    else     valid_q <= {valid_q[DEPTH-1:0], in_valid};
  end
  assign out_valid = valid_q[DEPTH];

  // Only one leaf can be active (checked when the leaf vector is valid).
  assert property (@(posedge clk) disable iff (rst)
                   valid_q[DEPTH-1] |-> $onehot(act_q[DEPTH]))
    else $error("bdt_tree: leaf activations %b are not one-hot", act_q[DEPTH]);

endmodule
