// ddte -- Deep Decision Tree Engine ("HDL Tree Processor"), top level.
//
// Evaluates a boosted regression forest of NTREE decision trees on an input
// vector of NVAR signed NBIT-bit variables, one new vector every clock tick.
// The evaluation has two steps.  First every tree engine (hte) tests all of
// its terminal bins in parallel (one One Hot Decision Path per bin, each with
// its own x_min/x_max) and looks up the subscore of the bin that fired.
// Then the Tree Manager adds the NTREE subscores.  The subscores are stored
// pre-divided by NTREE, so the sum is the forest average.  Nothing is
// traversed, multiplied or stored in RAM: the forest lives in comparator
// constants and AND-OR look-ups.
//
// The default parameters are the paper's main configuration: 20 trees of
// maximum depth 10, 8 variables of 16 bits, about 2.9k bins (145 per tree)
// and the combinational adder, latency 2 ticks.  With SUM_MODE = SUM_PIPELINE
// the latency is 2 + ceil(log2 NTREE) ticks, e.g. 8 for 40 trees.
//
// Interface: x[v] is variable v (signed); score is the signed
// SCORE_W + ceil(log2 NTREE)-bit forest score.  No reset and no valid
// signal: score is the result for the x applied LATENCY rising edges
// earlier, and is meaningless for the first LATENCY ticks after start-up.
//
// From the paper: the HTE/OHDP/LUT/Tree Manager structure, both adders and
// the latencies.  Own choices: the cut values and scores, which come from a
// seeded stand-in model in ddte_pkg (the trained values are not published),
// signed inputs, equal bin counts per tree and the subscore width.
module ddte
  import ddte_pkg::*;
#(
  parameter int unsigned NTREE    = NTREE_DEF,
  parameter int unsigned NVAR     = NVAR_DEF,
  parameter int unsigned NBIT     = NBIT_DEF,
  parameter int unsigned NBIN     = NBIN_DEF,
  parameter int unsigned DEPTH    = DEPTH_DEF,
  parameter int unsigned SCORE_W  = SCORE_W_DEF,
  parameter sum_mode_e   SUM_MODE = SUM_COMB,
  parameter int unsigned SEED     = SEED_DEF,
  parameter int unsigned OUT_W    = sum_width(SCORE_W, NTREE)
) (
  input  logic                      clk,
  input  logic [NVAR-1:0][NBIT-1:0] x,
  output logic [OUT_W-1:0]          score
);

  // algorithm latency in ticks, for the user's alignment
  localparam int unsigned LATENCY = latency(SUM_MODE, NTREE);

  logic [NVAR-1:0][NBIT-1:0]     x_bus;
  logic [NTREE-1:0][SCORE_W-1:0] subscore;

  tree_manager #(
    .NTREE    (NTREE),
    .NVAR     (NVAR),
    .NBIT     (NBIT),
    .SCORE_W  (SCORE_W),
    .SUM_MODE (SUM_MODE),
    .OUT_W    (OUT_W)
  ) u_mgr (
    .clk      (clk),
    .x        (x),
    .x_bus    (x_bus),
    .subscore (subscore),
    .score    (score)
  );

  for (genvar t = 0; t < int'(NTREE); t++) begin : g_tree
    hte #(
      .TREE    (t),
      .NTREE   (NTREE),
      .NVAR    (NVAR),
      .NBIT    (NBIT),
      .NBIN    (NBIN),
      .DEPTH   (DEPTH),
      .SCORE_W (SCORE_W),
      .SEED    (SEED)
    ) u_hte (
      .clk   (clk),
      .x     (x_bus),
      .score (subscore[t])
    );
  end

endmodule
