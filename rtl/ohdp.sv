// ohdp -- One Hot Decision Path: the test for one terminal bin of one tree.
//
// A decision tree cuts the input space into terminal bins, each a
// hyper-rectangle.  Instead of walking the tree node by node, every bin gets
// its own OHDP that checks all variables at once: it sends 1 when
// x_min[v] < x[v] < x_max[v] holds for every variable v, else 0.  Because the
// bins of a tree do not overlap and cover the whole input range, exactly one
// OHDP of a tree fires for any input, so the outputs of a tree's OHDPs form a
// one-hot vector.  With 8 variables that is 8 x_min and 8 x_max comparisons.
//
// Interface: x carries NVAR signed NBIT-bit variables, x[v] being variable v.
// The bin's strict bounds (BOX) are those of bin BIN of tree TREE in the
// forest model of ddte_pkg (bin_box); only the low NBIT+1 bits of each bound
// are used, enough for the one-below-minimum and one-above-maximum values of
// an unbounded side (a synthesis tool drops those always-true compares).
// Timing: `hit` is registered on the rising clock edge, one tick after x.
//
// From the paper: the per-bin x_min/x_max test with strict inequalities and
// the clocked output.  Own choices: signed inputs, the bound width, no reset
// (the register is overwritten every tick).
module ohdp
  import ddte_pkg::*;
#(
  parameter int unsigned NVAR  = NVAR_DEF,
  parameter int unsigned NBIT  = NBIT_DEF,
  // which bin of which forest: the bounds come from the forest model
  parameter int unsigned NBIN  = NBIN_DEF,
  parameter int unsigned DEPTH = DEPTH_DEF,
  parameter int unsigned SEED  = SEED_DEF,
  parameter int unsigned TREE  = 0,
  parameter int unsigned BIN   = 0
) (
  input  logic                       clk,
  input  logic [NVAR-1:0][NBIT-1:0]  x,
  output logic                       hit
);

  // this bin's x_min / x_max for every variable
  localparam box_t BOX = bin_box(SEED, TREE, BIN, NVAR, NBIT, NBIN, DEPTH);

  logic in_box;

  always_comb begin
    in_box = 1'b1;
    for (int v = 0; v < int'(NVAR); v++) begin
      if (!(($signed({x[v][NBIT-1], x[v]}) > $signed(BOX[v].lo[NBIT:0])) &&
            ($signed({x[v][NBIT-1], x[v]}) < $signed(BOX[v].hi[NBIT:0]))))
        in_box = 1'b0;
    end
  end

  always_ff @(posedge clk) hit <= in_box;

  initial begin
    assert (NVAR >= 1 && NVAR <= MAX_VAR)
      else $fatal(1, "ohdp: NVAR must be 1..%0d", MAX_VAR);
  end

endmodule
