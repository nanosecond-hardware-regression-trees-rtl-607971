// hte_lut -- output look-up of one HDL Tree Engine.
//
// Takes the one-hot vector of a tree's bins (the OHDP outputs) and returns the
// subscore stored for the bin that fired: the "active input array -> output
// array" step of the tree engine.  It is built as an AND-OR selector, each
// bin's constant gated by its hit bit and all of them ORed together, which is
// the simplest logic that does this for a one-hot input; with no bin firing
// the output is 0.
//
// Interface: onehot[b] is the hit of bin b.  The constant SCORES[b] is bin
// b's subscore (already divided by the number of trees), taken from the
// forest model in ddte_pkg (leaf_score) for tree TREE.
// Timing: `score` is registered on the rising clock edge, one tick after
// onehot.
//
// From the paper: the LUT's place and function and the clocked output.  Own
// choices: the AND-OR structure, the subscore width and the 0 for no hit.
module hte_lut
  import ddte_pkg::*;
#(
  parameter int unsigned NBIN    = NBIN_DEF,
  parameter int unsigned SCORE_W = SCORE_W_DEF,
  parameter int unsigned TREE    = 0,          // tree whose scores are held
  parameter int unsigned NTREE   = NTREE_DEF,  // divisor of the scores
  parameter int unsigned SEED    = SEED_DEF
) (
  input  logic               clk,
  input  logic [NBIN-1:0]    onehot,
  output logic [SCORE_W-1:0] score
);

  // subscore of every bin, from the forest model
  function automatic logic [NBIN-1:0][SCORE_W-1:0] make_scores();
    logic [NBIN-1:0][SCORE_W-1:0] t;
    for (int b = 0; b < int'(NBIN); b++)
      t[b] = SCORE_W'(leaf_score(SEED, TREE, b, NTREE, SCORE_W));
    return t;
  endfunction

  localparam logic [NBIN-1:0][SCORE_W-1:0] SCORES = make_scores();

  logic [SCORE_W-1:0] sel;

  always_comb begin
    sel = '0;
    for (int b = 0; b < int'(NBIN); b++)
      sel = sel | ({SCORE_W{onehot[b]}} & SCORES[b]);
  end

  always_ff @(posedge clk) score <= sel;

  initial begin
    assert (NBIN >= 1 && NBIN <= MAX_BIN)
      else $fatal(1, "hte_lut: NBIN must be 1..%0d", MAX_BIN);
  end

endmodule
