// tb_hte -- test of one HDL Tree Engine.
//
// Tree 3 of a 7-tree model with 4 variables of 12 bits, 30 bins and maximum
// depth 6.  Inputs are applied back to back, one per tick: random points and
// points inside each bin in turn.  The expected subscore is the leaf score of
// the bin reached by walking the tree node by node (ddte_ref_pkg); it must
// appear two rising edges after the input.  Every bin must be reached.
module tb_hte;
  import ddte_pkg::*;
  import ddte_ref_pkg::*;

  localparam int unsigned TREE = 3, NTREE = 7, NVAR = 4, NBIT = 12;
  localparam int unsigned NBIN = 30, DEPTH = 6, SW = 16, SEED = 32'h7777;
  localparam int LAT = 2;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic [NVAR-1:0][NBIT-1:0] x;
  logic [SW-1:0]             score;

  hte #(.TREE(TREE), .NTREE(NTREE), .NVAR(NVAR), .NBIT(NBIT), .NBIN(NBIN),
        .DEPTH(DEPTH), .SCORE_W(SW), .SEED(SEED))
    dut (.clk(clk), .x(x), .score(score));

  int checks = 0, failures = 0, nseen = 0;
  int expected [2000];
  bit seen [NBIN];
  vec_t xv;
  box_t bx;
  int leaf;

  initial begin
    for (int b = 0; b < int'(NBIN); b++) seen[b] = 0;
    x = '0;
    @(negedge clk);
    for (int i = 0; i < 2000 + LAT; i++) begin
      if (i >= LAT) begin
        checks++;
        if (int'($signed(score)) != expected[i - LAT]) begin
          failures++;
          if (failures < 6)
            $display("vec %0d: score %0d expected %0d", i - LAT, $signed(score), expected[i - LAT]);
        end
      end
      if (i < 2000) begin
        for (int k = 0; k < int'(MAX_VAR); k++) xv[k] = 0;
        if (i % 2 == 0) begin
          for (int k = 0; k < int'(NVAR); k++) xv[k] = rand_val(NBIT);
        end else begin
          bx = bin_box(SEED, TREE, (i / 2) % NBIN, NVAR, NBIT, NBIN, DEPTH);
          for (int k = 0; k < int'(NVAR); k++) xv[k] = rand_in(bx[k]);
        end
        for (int k = 0; k < int'(NVAR); k++) x[k] = xv[k][NBIT-1:0];
        leaf = find_leaf(SEED, TREE, NVAR, NBIT, NBIN, DEPTH, xv);
        if (!seen[leaf]) begin seen[leaf] = 1; nseen++; end
        expected[i] = leaf_score(SEED, TREE, leaf, NTREE, SW);
      end
      @(negedge clk);
    end
    checks++;
    if (nseen != int'(NBIN)) begin failures++; $display("only %0d bins reached", nseen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
