// ddte_harness -- drives one ddte instance and checks it against the
// reference walk of ddte_ref_pkg.
//
// One new input vector is applied at every falling clock edge, back to back,
// and the score is compared LAT ticks later, LAT being the paper's latency
// formula (2 for the combinational adder, 2 + ceil(log2 NTREE) for the
// pipelined one), so a wrong latency fails every comparison.  The vectors
// cycle through four kinds: uniform random; a random point inside bin b of
// tree t, walking (t, b) over every bin of the forest; a point on the inner
// edge of such a bin (x = x_min + 1 or x_max - 1 on every variable); and a
// point just outside one bound (x = x_min or x_max on one variable), which
// the strict comparison must send to the neighbouring bin.  Counts of each
// kind and of the bins seen are returned for the caller's coverage checks.
module ddte_harness
  import ddte_pkg::*;
  import ddte_ref_pkg::*;
#(
  parameter int unsigned NTREE    = 4,
  parameter int unsigned NVAR     = 3,
  parameter int unsigned NBIT     = 16,
  parameter int unsigned NBIN     = 8,
  parameter int unsigned DEPTH    = 4,
  parameter int unsigned SCORE_W  = 16,
  parameter sum_mode_e   SUM_MODE = SUM_COMB,
  parameter int unsigned SEED     = 32'h1234,
  parameter int unsigned NVEC     = 4 * NTREE * NBIN + 64
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_inside,      // vectors placed inside a chosen bin
  output int   n_edge_in,     // vectors on the inner edge of a bin
  output int   n_edge_out,    // vectors on a bound, outside the chosen bin
  output int   bins_seen,     // distinct (tree, bin) pairs that fired
  output int   n_streamed     // comparisons made on back-to-back inputs
);

  localparam int unsigned OUT_W = sum_width(SCORE_W, NTREE);
  localparam int unsigned LAT   = (SUM_MODE == SUM_COMB) ? 2
                                : 2 + ((NTREE > 1) ? $clog2(NTREE) : 0);

  logic [NVAR-1:0][NBIT-1:0] x;
  logic [OUT_W-1:0]          score;

  ddte #(
    .NTREE    (NTREE),
    .NVAR     (NVAR),
    .NBIT     (NBIT),
    .NBIN     (NBIN),
    .DEPTH    (DEPTH),
    .SCORE_W  (SCORE_W),
    .SUM_MODE (SUM_MODE),
    .SEED     (SEED)
  ) dut (
    .clk   (clk),
    .x     (x),
    .score (score)
  );

  int   expected [NVEC];
  bit   seen [NTREE][NBIN];
  vec_t xv;
  box_t bx;
  int   walk, t, b, cb, v;
  bit   moved;

  initial begin
    done = 0; checks = 0; failures = 0; n_inside = 0; n_edge_in = 0;
    n_edge_out = 0; bins_seen = 0; n_streamed = 0; walk = 0;
    for (int i = 0; i < int'(NTREE); i++)
      for (int j = 0; j < int'(NBIN); j++) seen[i][j] = 0;
    x = '0;
    @(negedge clk);
    for (int i = 0; i < int'(NVEC + LAT); i++) begin
      if (i >= int'(LAT)) begin
        checks++;
        if (i > int'(LAT)) n_streamed++;
        if (int'($signed(score)) != expected[i - int'(LAT)]) begin
          failures++;
          if (failures <= 5)
            $display("ddte_harness T=%0d mode=%0d vec %0d: score %0d expected %0d",
                     NTREE, SUM_MODE, i - int'(LAT), $signed(score),
                     expected[i - int'(LAT)]);
        end
      end
      if (i < int'(NVEC)) begin
        for (int k = 0; k < int'(MAX_VAR); k++) xv[k] = 0;
        t = walk % int'(NTREE);
        b = (walk / int'(NTREE)) % int'(NBIN);
        cb = b;
        moved = 0;
        bx = bin_box(SEED, t, cb, NVAR, NBIT, NBIN, DEPTH);
        case (i % 4)
          0: for (int k = 0; k < int'(NVAR); k++) xv[k] = rand_val(NBIT);
          1: begin
            for (int k = 0; k < int'(NVAR); k++) xv[k] = rand_in(bx[k]);
            n_inside++;
            walk++;
          end
          2: begin
            for (int k = 0; k < int'(NVAR); k++)
              xv[k] = ($urandom_range(1, 0) != 0) ? bx[k].lo + 1 : bx[k].hi - 1;
            n_edge_in++;
          end
          default: begin
            for (int k = 0; k < int'(NVAR); k++) xv[k] = rand_in(bx[k]);
            // put one variable on a bound that lies inside the input range
            v = int'($urandom % NVAR);
            for (int k = 0; k < int'(NVAR); k++) begin
              if (bx[v].lo >= -(64'sd1 <<< (NBIT - 1)) || bx[v].hi <= (64'sd1 <<< (NBIT - 1)) - 1) break;
              v = (v + 1) % int'(NVAR);
            end
            if (bx[v].lo >= -(64'sd1 <<< (NBIT - 1))) begin
              xv[v] = bx[v].lo; n_edge_out++; moved = 1;
            end else if (bx[v].hi <= (64'sd1 <<< (NBIT - 1)) - 1) begin
              xv[v] = bx[v].hi; n_edge_out++; moved = 1;
            end
          end
        endcase
        for (int k = 0; k < int'(NVAR); k++) x[k] = xv[k][NBIT-1:0];
        expected[i] = forest_score(SEED, NTREE, NVAR, NBIT, NBIN, DEPTH, SCORE_W, xv);
        for (int tt = 0; tt < int'(NTREE); tt++) begin
          b = find_leaf(SEED, tt, NVAR, NBIT, NBIN, DEPTH, xv);
          if (!seen[tt][b]) begin
            seen[tt][b] = 1;
            bins_seen++;
          end
        end
        // the box of the RTL's model and the reference walk must agree:
        // inside and inner-edge points land in the chosen bin, points on a
        // bound land elsewhere
        if (i % 4 == 1 || i % 4 == 2 || moved) begin
          checks++;
          if ((find_leaf(SEED, t, NVAR, NBIT, NBIN, DEPTH, xv) == cb) != (i % 4 != 3)) begin
            failures++;
            $display("ddte_harness: vec %0d kind %0d misplaced against bin %0d of tree %0d",
                     i, i % 4, cb, t);
          end
        end
      end
      @(negedge clk);
    end
    done = 1;
  end

endmodule
