// sum_comb -- combinational sum engine of the Tree Manager.
//
// Adds the N tree subscores with a binary tree of adders and no clock: at
// every level neighbouring operands are added in pairs (0+1, 2+3, ...) and an
// odd operand left at the end of a level is carried to the next level
// unchanged, until one value remains.  For five subscores that is
// (O0+O1)+(O2+O3) and then +O4.  It is fast, but the whole tree has to settle
// within one clock period, so it only suits forests with few trees.
//
// Interface: subscore[i] is tree i's signed IN_W-bit subscore; `sum` is the
// signed OUT_W-bit total.  The operands are sign-extended to OUT_W bits, the
// default giving one guard bit per adder level, so the sum cannot overflow.
// Timing: purely combinational (no clock).
//
// From the paper: the pairwise adder tree and the carried odd operand.  Own
// choices: the operand width and the pairing order for the general case.
module sum_comb
  import ddte_pkg::*;
#(
  parameter int unsigned N     = NTREE_DEF,
  parameter int unsigned IN_W  = SCORE_W_DEF,
  parameter int unsigned OUT_W = sum_width(IN_W, N)
) (
  input  logic [N-1:0][IN_W-1:0] subscore,
  output logic [OUT_W-1:0]       sum
);

  localparam int unsigned LEV = (N > 1) ? $clog2(N) : 0;

  // operands of every level; level k holds ceil(N / 2**k) values
  logic signed [OUT_W-1:0] lvl [LEV+1][N];

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      lvl[0][i] = OUT_W'($signed(subscore[i]));
      for (int k = 1; k <= int'(LEV); k++) lvl[k][i] = '0;
    end
    for (int k = 0; k < int'(LEV); k++) begin
      for (int i = 0; i < int'(N); i++) begin
        if (2 * i + 1 < int'((N + (1 << k) - 1) >> k))
          lvl[k+1][i] = lvl[k][2*i] + lvl[k][2*i+1];
        else if (2 * i < int'((N + (1 << k) - 1) >> k))
          lvl[k+1][i] = lvl[k][2*i];
      end
    end
  end

  assign sum = lvl[LEV][0];

endmodule
