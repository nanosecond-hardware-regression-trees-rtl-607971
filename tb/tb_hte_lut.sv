// tb_hte_lut -- test of the tree engine's output look-up.
//
// A 10-bin look-up of 12-bit scores (tree 5 of a 7-tree model).  Each bin is
// fired on its own, in random order and back to back; the output must be the
// model's score for that bin one rising edge later.  No bin firing must
// give 0.  At least half of the bins must have distinct non-zero scores, so
// a wrong selection cannot go unnoticed.
module tb_hte_lut;
  import ddte_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NB = 10;
  localparam int SW = 12;
  localparam int unsigned TREE = 5, NTREE = 7, SEED = 32'h4242;

  logic [NB-1:0] onehot;
  logic [SW-1:0] score;

  hte_lut #(.NBIN(NB), .SCORE_W(SW), .TREE(TREE), .NTREE(NTREE), .SEED(SEED)) dut (
    .clk(clk), .onehot(onehot), .score(score));

  int checks = 0, failures = 0;
  int exp_q [$];
  int sel, e;

  function automatic int expect_score(int b);
    int v;
    if (b < 0) return 0;
    v = leaf_score(SEED, TREE, b, NTREE, SW);
    v = v & ((1 << SW) - 1);
    return (v >= (1 << (SW - 1))) ? v - (1 << SW) : v;
  endfunction

  initial begin
    int nz;
    nz = 0;
    for (int b = 0; b < NB; b++) if (expect_score(b) != 0) nz++;
    checks++;
    if (nz < NB / 2) begin failures++; $display("too few non-zero scores"); end
    onehot = '0;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      if (i > 0) begin
        e = exp_q.pop_front();
        checks++;
        if (int'($signed(score)) != e) begin
          failures++;
          $display("vec %0d: score %0d expected %0d", i - 1, $signed(score), e);
        end
      end
      sel = (i % 7 == 6) ? -1 : int'($urandom % NB);
      onehot = (sel < 0) ? '0 : (NB'(1) << sel);
      exp_q.push_back(expect_score(sel));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
