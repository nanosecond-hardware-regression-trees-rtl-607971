// tb_ddte_full -- the Deep Decision Tree Engine at its default size.
//
// The paper's main configuration as the RTL defaults give it: 20 trees of
// maximum depth 10, 145 bins each (2900 in all), 8 signed 16-bit variables
// and the combinational adder.  One input vector per tick, back to back,
// each score compared with the reference walk of ddte_ref_pkg exactly 2
// ticks later (the paper's latency for this configuration).  The vectors mix
// uniform random points with points inside, on the inner edge of, and just
// outside every one of the 2900 bins in turn; every bin must fire.
module tb_ddte_full;
  import ddte_pkg::*;
  import ddte_ref_pkg::*;

  localparam int unsigned NTREE    = NTREE_DEF;
  localparam int unsigned NVAR     = NVAR_DEF;
  localparam int unsigned NBIT     = NBIT_DEF;
  localparam int unsigned NBIN     = NBIN_DEF;
  localparam int unsigned DEPTH    = DEPTH_DEF;
  localparam int unsigned SCORE_W  = SCORE_W_DEF;
  localparam sum_mode_e   SUM_MODE = SUM_COMB;
  localparam int unsigned SEED     = SEED_DEF;
  localparam int unsigned NVEC     = 4 * NTREE * NBIN + 64;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic done;
  int checks, failures, n_inside, n_edge_in, n_edge_out, bins_seen, n_streamed;

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-30s : %0d", what, count);
    if (count <= 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  localparam int unsigned OUT_W = sum_width(SCORE_W, NTREE);
  localparam int unsigned LAT   = (SUM_MODE == SUM_COMB) ? 2
                                : 2 + ((NTREE > 1) ? $clog2(NTREE) : 0);

  logic [NVAR-1:0][NBIT-1:0] x;
  logic [OUT_W-1:0]          score;

  ddte dut (
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
    need("back-to-back inputs", n_streamed);
    need("input inside a chosen bin", n_inside);
    need("input on a bin's inner edge", n_edge_in);
    need("input on a bound, outside bin", n_edge_out);
    need("all 2900 bins fired", (bins_seen == int'(NTREE * NBIN)) ? bins_seen : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
