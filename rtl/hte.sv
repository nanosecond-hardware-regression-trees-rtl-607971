// hte -- HDL Tree Engine: one decision tree of the forest.
//
// The input vector x is tapped to NBIN One Hot Decision Paths, one per
// terminal bin, each holding that bin's own x_min/x_max.  All bins are tested
// in parallel on the same clock edge; the resulting one-hot vector goes to
// the look-up that returns the fired bin's subscore O_t.  There is no
// node-by-node traversal, so the time does not depend on the tree's depth.
//
// Interface: x as in ohdp; `score` is the tree's subscore, SCORE_W signed
// bits, already divided by NTREE.  The bins and scores of tree TREE are taken
// from the forest model in ddte_pkg (bin_box, leaf_score).
// Timing: two rising edges from x to score (OHDP register, LUT register);
// a new x can be applied every tick.
//
// From the paper: the bus tap, one OHDP per bin, the LUT and the two clocked
// steps.  Own choices: the stand-in forest model and equal bin counts.
module hte
  import ddte_pkg::*;
#(
  parameter int unsigned TREE    = 0,            // index of this tree
  parameter int unsigned NTREE   = NTREE_DEF,    // trees in the forest
  parameter int unsigned NVAR    = NVAR_DEF,
  parameter int unsigned NBIT    = NBIT_DEF,
  parameter int unsigned NBIN    = NBIN_DEF,     // terminal bins of this tree
  parameter int unsigned DEPTH   = DEPTH_DEF,    // maximum depth
  parameter int unsigned SCORE_W = SCORE_W_DEF,
  parameter int unsigned SEED    = SEED_DEF
) (
  input  logic                       clk,
  input  logic [NVAR-1:0][NBIT-1:0]  x,
  output logic [SCORE_W-1:0]         score
);

  logic [NBIN-1:0] onehot;

  // bus tap: the same x reaches every OHDP
  for (genvar b = 0; b < int'(NBIN); b++) begin : g_bin
    ohdp #(
      .NVAR  (NVAR),
      .NBIT  (NBIT),
      .NBIN  (NBIN),
      .DEPTH (DEPTH),
      .SEED  (SEED),
      .TREE  (TREE),
      .BIN   (b)
    ) u_ohdp (
      .clk (clk),
      .x   (x),
      .hit (onehot[b])
    );
  end

  hte_lut #(
    .NBIN    (NBIN),
    .SCORE_W (SCORE_W),
    .TREE    (TREE),
    .NTREE   (NTREE),
    .SEED    (SEED)
  ) u_lut (
    .clk    (clk),
    .onehot (onehot),
    .score  (score)
  );

  initial begin
    assert (NBIN <= (1 << DEPTH))
      else $fatal(1, "hte: %0d bins do not fit a tree of depth %0d", NBIN, DEPTH);
  end

endmodule
