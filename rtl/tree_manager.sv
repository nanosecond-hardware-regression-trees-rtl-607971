// tree_manager -- HDL Tree Manager of the Deep Decision Tree Engine.
//
// Sits between the outside world and the tree engines.  Its bus tap hands the
// input vector x to every tree engine (x_bus), and its Sum block adds the
// subscores that come back, O = sum over t of O_t.  Because every subscore
// was divided by the number of trees when the model was written, this plain
// sum is the forest's average; no divider is needed.  The sum is done by one
// of the two adder engines, chosen with SUM_MODE: SUM_PIPELINE (registers
// before every adder level, ceil(log2 NTREE) ticks) or SUM_COMB (no clock,
// zero ticks, for small forests).
//
// Interface: x / x_bus are NVAR signed NBIT-bit variables; subscore[t] is
// tree t's signed SCORE_W-bit subscore; score is signed OUT_W bits.
// Timing: x_bus is wired straight from x; score follows subscore by
// 0 (SUM_COMB) or ceil(log2 NTREE) (SUM_PIPELINE) rising edges.  With
// SUM_COMB nothing here is clocked and clk is left unused.
//
// From the paper: bus tap plus Sum block, the two adder variants.  Own
// choice: the score width (one guard bit per adder level).
module tree_manager
  import ddte_pkg::*;
#(
  parameter int unsigned NTREE    = NTREE_DEF,
  parameter int unsigned NVAR     = NVAR_DEF,
  parameter int unsigned NBIT     = NBIT_DEF,
  parameter int unsigned SCORE_W  = SCORE_W_DEF,
  parameter sum_mode_e   SUM_MODE = SUM_COMB,
  parameter int unsigned OUT_W    = sum_width(SCORE_W, NTREE)
) (
  input  logic                          clk,
  input  logic [NVAR-1:0][NBIT-1:0]     x,
  output logic [NVAR-1:0][NBIT-1:0]     x_bus,
  input  logic [NTREE-1:0][SCORE_W-1:0] subscore,
  output logic [OUT_W-1:0]              score
);

  // bus tap
  assign x_bus = x;

  // Sum block
  if (SUM_MODE == SUM_PIPELINE) begin : g_pipeline
    sum_pipeline #(
      .N     (NTREE),
      .IN_W  (SCORE_W),
      .OUT_W (OUT_W)
    ) u_sum (
      .clk      (clk),
      .subscore (subscore),
      .sum      (score)
    );
  end else begin : g_comb
    sum_comb #(
      .N     (NTREE),
      .IN_W  (SCORE_W),
      .OUT_W (OUT_W)
    ) u_sum (
      .subscore (subscore),
      .sum      (score)
    );
  end

endmodule
