// tb_ddte_workloads -- the forest sizes evaluated in the paper, end to end.
//
// Each forest runs through ddte_harness with back-to-back inputs and the
// score checked at the paper's latency:
//   (2)  10 trees, max depth 8, 140 bins/tree (1.4k), pipelined: 6 ticks
//   (4) 100 trees, max depth 12, pipelined: 9 ticks -- with 16 bins per
//        tree instead of the paper's 157 (15.7k in all), which keeps the
//        simulator build short; tree count, depth and adder are as published
//   muon p_T: 30 trees, max depth 7, 3 variables, pipelined: 7 ticks
//        (bins per tree not published; 128, a full depth-7 tree, is used)
// Configuration (1) (40 trees, depth 6) is run in tb_ddte and the default
// configuration (3) in tb_ddte_full.
module tb_ddte_workloads;
  import ddte_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic d2, d4, dm;
  int ck2, fl2, in2, ei2, eo2, bs2, st2;
  int ck4, fl4, in4, ei4, eo4, bs4, st4;
  int ckm, flm, inm, eim, eom, bsm, stm;

  ddte_harness #(.NTREE(10), .NVAR(8), .NBIT(16), .NBIN(140), .DEPTH(8),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'h0002))
    h2 (.clk(clk), .done(d2), .checks(ck2), .failures(fl2), .n_inside(in2),
        .n_edge_in(ei2), .n_edge_out(eo2), .bins_seen(bs2), .n_streamed(st2));

  ddte_harness #(.NTREE(100), .NVAR(8), .NBIT(16), .NBIN(16), .DEPTH(12),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'h0004))
    h4 (.clk(clk), .done(d4), .checks(ck4), .failures(fl4), .n_inside(in4),
        .n_edge_in(ei4), .n_edge_out(eo4), .bins_seen(bs4), .n_streamed(st4));

  ddte_harness #(.NTREE(30), .NVAR(3), .NBIT(16), .NBIN(128), .DEPTH(7),
                 .SCORE_W(16), .SUM_MODE(SUM_PIPELINE), .SEED(32'h3030))
    hm (.clk(clk), .done(dm), .checks(ckm), .failures(flm), .n_inside(inm),
        .n_edge_in(eim), .n_edge_out(eom), .bins_seen(bsm), .n_streamed(stm));

  task automatic need(string what, int count);
    checks++;
    $display("%-40s : %0d", what, count);
    if (count <= 0) begin
      failures++;
      $display("FAIL: '%s' never happened", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    wait (d2 && d4 && dm);
    checks   += ck2 + ck4 + ckm;
    failures += fl2 + fl4 + flm;
    need("config (2) back-to-back results", st2);
    need("config (2) all 1400 bins fired", (bs2 == 10 * 140) ? bs2 : 0);
    need("config (4) back-to-back results", st4);
    need("config (4) all 1600 bins fired", (bs4 == 100 * 16) ? bs4 : 0);
    need("muon all 3840 bins fired", (bsm == 30 * 128) ? bsm : 0);
    need("muon back-to-back results", stm);
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
