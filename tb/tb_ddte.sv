// tb_ddte -- end-to-end test of the Deep Decision Tree Engine.
//
// Runs four small forests side by side, each through ddte_harness:
//   A: 5 trees, pipelined adder, 3 variables -- the five-subscore adder of
//      the paper's pipeline drawing, with an odd operand carried through
//      every level; latency 2 + 3 = 5 ticks.
//   B: 4 trees, combinational adder, 8 variables; latency 2 ticks.
//   C: 40 trees of 43 bins, maximum depth 6, pipelined -- the paper's
//      benchmark shape; latency 2 + 6 = 8 ticks.
//   D: 3 trees on 2 variables of 35 bits, the widest input of the paper's
//      bit-width scan; pipelined, latency 2 + 2 = 4 ticks.
// Each mechanism must occur at least once or it counts as a failure:
// back-to-back inputs (one per tick), both adder variants, the carried odd
// operand, inputs inside / on the inner edge / just outside a bin, and every
// bin of every tree firing.
module tb_ddte;
  import ddte_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic done_a, done_b, done_c, done_d;
  int ck_a, fl_a, in_a, ei_a, eo_a, bs_a, st_a;
  int ck_b, fl_b, in_b, ei_b, eo_b, bs_b, st_b;
  int ck_c, fl_c, in_c, ei_c, eo_c, bs_c, st_c;
  int ck_d, fl_d, in_d, ei_d, eo_d, bs_d, st_d;

  ddte_harness #(.NTREE(5), .NVAR(3), .NBIT(16), .NBIN(12), .DEPTH(4),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'hA5A5))
    h_a (.clk(clk), .done(done_a), .checks(ck_a), .failures(fl_a), .n_inside(in_a),
         .n_edge_in(ei_a), .n_edge_out(eo_a), .bins_seen(bs_a), .n_streamed(st_a));

  ddte_harness #(.NTREE(4), .NVAR(8), .NBIT(16), .NBIN(20), .DEPTH(6),
                 .SCORE_W(16), .SUM_MODE(SUM_COMB), .SEED(32'h0B0B))
    h_b (.clk(clk), .done(done_b), .checks(ck_b), .failures(fl_b), .n_inside(in_b),
         .n_edge_in(ei_b), .n_edge_out(eo_b), .bins_seen(bs_b), .n_streamed(st_b));

  ddte_harness #(.NTREE(40), .NVAR(8), .NBIT(16), .NBIN(43), .DEPTH(6),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'hC0DE))
    h_c (.clk(clk), .done(done_c), .checks(ck_c), .failures(fl_c), .n_inside(in_c),
         .n_edge_in(ei_c), .n_edge_out(eo_c), .bins_seen(bs_c), .n_streamed(st_c));

  ddte_harness #(.NTREE(3), .NVAR(2), .NBIT(35), .NBIN(10), .DEPTH(4),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'hD00D))
    h_d (.clk(clk), .done(done_d), .checks(ck_d), .failures(fl_d), .n_inside(in_d),
         .n_edge_in(ei_d), .n_edge_out(eo_d), .bins_seen(bs_d), .n_streamed(st_d));

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-34s : %0d", what, count);
    if (count <= 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    wait (done_a && done_b && done_c && done_d);
    checks   += ck_a + ck_b + ck_c + ck_d;
    failures += fl_a + fl_b + fl_c + fl_d;
    need("back-to-back inputs, pipelined sum", st_a + st_c);
    need("back-to-back inputs, comb. sum", st_b);
    need("odd subscore carried (5 trees)", st_a);
    need("input inside a chosen bin", in_a + in_b + in_c);
    need("input on a bin's inner edge", ei_a + ei_b + ei_c);
    need("input on a bound, outside bin", eo_a + eo_b + eo_c);
    need("all bins fired, forest A", (bs_a == 5 * 12) ? bs_a : 0);
    need("all bins fired, forest B", (bs_b == 4 * 20) ? bs_b : 0);
    need("all bins fired, forest C", (bs_c == 40 * 43) ? bs_c : 0);
    need("35-bit inputs, all bins fired", (bs_d == 3 * 10) ? st_d : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
