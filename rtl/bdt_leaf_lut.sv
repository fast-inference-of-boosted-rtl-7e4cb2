// bdt_leaf_lut: the leaf score look-up table at the bottom of a decision
// tree.
//
// The tree delivers the concatenation of its leaf activations, leaf_act,
// in which exactly one bit is set: the leaf that the decision path reached.
// This block turns that one-hot vector into the leaf's index and uses the
// index to address a small constant table, SCORE, holding one score per
// leaf. The encoder ORs together the indices of all set bits, which is the
// index of the active leaf when the vector is one-hot (the enclosing tree
// asserts that it is).
//
// The one-hot leaf vector addressing a table of scores follows the design's
// schematic; the OR encoder and the left-to-right leaf numbering (leaf 0 is
// reached when every comparison on the path is true) are this
// implementation's choices.
//
// Interface: leaf_act (N_LEAVES bits) in; score (DATA_W bits) out.
// Timing: purely combinational. The default SCORE is leaf table 0 of the
// default model in bdt_pkg.
module bdt_leaf_lut #(
  parameter int unsigned N_LEAVES = 2 ** bdt_pkg::DEPTH,
  parameter int unsigned DATA_W   = bdt_pkg::DATA_W,
  parameter int unsigned IDX_W    = (N_LEAVES > 1) ? $clog2(N_LEAVES) : 1,
  parameter logic [N_LEAVES-1:0][DATA_W-1:0] SCORE = bdt_pkg::tree_scores(1, 0)
) (
  input  logic [N_LEAVES-1:0] leaf_act,
  output logic [DATA_W-1:0]   score
);

  logic [IDX_W-1:0] leaf_idx;

  always_comb begin
    leaf_idx = '0;
    for (int unsigned i = 0; i < N_LEAVES; i++) begin
      if (leaf_act[i]) leaf_idx = leaf_idx | IDX_W'(i);
    end
    score = SCORE[leaf_idx];
  end

endmodule
