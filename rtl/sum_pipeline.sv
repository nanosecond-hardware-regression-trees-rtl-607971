// sum_pipeline -- pipelined sum engine of the Tree Manager.
//
// The same binary adder tree as sum_comb (pairs 0+1, 2+3, ... at every level,
// an odd operand carried to the next level), with a rank of flip-flops in
// front of every adder level.  Level k's operands, the odd carried one
// included, are captured on a rising edge and added during the following
// tick, so only one adder delay lies between registers.  The output of the
// last adder is not registered.  For N subscores there are ceil(log2 N)
// levels and as many ticks; for N = 5 the ranks sit at times T0, T1, T2 and
// the sum appears at T3.
//
// Interface: subscore[i] is tree i's signed IN_W-bit subscore; `sum` is the
// signed OUT_W-bit total (operands sign-extended to OUT_W bits, one guard
// bit per level by default).
// Timing: `sum` reflects the subscores that were present LEV = ceil(log2 N)
// rising edges earlier; a new set is taken every tick.  N = 1 has no level
// and passes the subscore straight through.
//
// From the paper: the register ranks before every adder level, the carried
// odd operand and the latency.  Own choices: operand width, no reset (the
// pipeline refills within LEV ticks).
module sum_pipeline
  import ddte_pkg::*;
#(
  parameter int unsigned N     = NTREE_DEF,
  parameter int unsigned IN_W  = SCORE_W_DEF,
  parameter int unsigned OUT_W = sum_width(IN_W, N)
) (
  input  logic                   clk,
  input  logic [N-1:0][IN_W-1:0] subscore,
  output logic [OUT_W-1:0]       sum
);

  localparam int unsigned LEV = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned NR  = (LEV > 0) ? LEV : 1;  // register ranks (min 1 for the declaration)

  // stage[k]: flip-flops in front of adder level k
  // nxt[k]  : output of adder level k
  logic signed [OUT_W-1:0] stage [NR][N];
  logic signed [OUT_W-1:0] nxt   [NR][N];

  always_comb begin
    for (int k = 0; k < int'(NR); k++) begin
      for (int i = 0; i < int'(N); i++) begin
        nxt[k][i] = '0;
        if (2 * i + 1 < int'((N + (1 << k) - 1) >> k))
          nxt[k][i] = stage[k][2*i] + stage[k][2*i+1];
        else if (2 * i < int'((N + (1 << k) - 1) >> k))
          nxt[k][i] = stage[k][2*i];
      end
    end
  end

  if (LEV == 0) begin : g_pass
    assign sum = OUT_W'($signed(subscore[0]));
  end else begin : g_pipe
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(N); i++)
        stage[0][i] <= OUT_W'($signed(subscore[i]));
      for (int k = 1; k < int'(LEV); k++)
        for (int i = 0; i < int'(N); i++)
          stage[k][i] <= nxt[k-1][i];
    end
    assign sum = nxt[LEV-1][0];
  end

endmodule
