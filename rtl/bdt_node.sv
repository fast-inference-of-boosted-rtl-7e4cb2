// bdt_node: one decision node of an unrolled decision tree.
//
// The node selects the input feature x[FEATURE] and compares it with the
// constant THRESHOLD learned in training. Its output cmp is 1 when
// x[FEATURE] <= THRESHOLD, which sends the decision to the left child; the
// tree uses ~cmp for the right child. The comparison is signed
// (two's-complement fixed point; both operands have the same radix point,
// so the compare is a plain integer compare). Because the feature index and
// the threshold are parameters, synthesis reduces the node to a comparator
// against a constant on one feature.
//
// The "<=" with the left child taken when it is true follows the design's
// tree schematic. Signed numbers and the absence of a register here are
// choices of this implementation: the enclosing tree registers cmp.
//
// Interface: x (N_FEATURES signed DATA_W-bit words) in, cmp out.
// Timing: purely combinational. The defaults of FEATURE and THRESHOLD are
// those of the root of tree 0 in the default model of bdt_pkg.
module bdt_node #(
  parameter int unsigned N_FEATURES = bdt_pkg::N_FEATURES,
  parameter int unsigned DATA_W     = bdt_pkg::DATA_W,
  parameter int unsigned FEAT_W     = (N_FEATURES > 1) ? $clog2(N_FEATURES) : 1,
  parameter logic [FEAT_W-1:0] FEATURE   = FEAT_W'(bdt_pkg::model_feature(1, 0, 0, N_FEATURES)),
  parameter logic [DATA_W-1:0] THRESHOLD = DATA_W'(bdt_pkg::model_threshold(1, 0, 0, DATA_W))
) (
  input  logic [N_FEATURES-1:0][DATA_W-1:0] x,
  output logic                              cmp
);

  initial assert (32'(FEATURE) < N_FEATURES)
    else $error("bdt_node: FEATURE %0d out of range", FEATURE);

  always_comb cmp = $signed(x[FEATURE]) <= $signed(THRESHOLD);

endmodule
