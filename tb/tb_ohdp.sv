// tb_ohdp -- test of one One Hot Decision Path.
//
// Two instances: a bin of a small 3-variable, 8-bit model and the default
// bin of the full-size model (8 variables, 16 bits).  Inputs are random, on each bound and one step inside it.  The
// expected hit is worked out here from the bounds; it must appear exactly one
// rising edge after the input.
module tb_ohdp;
  import ddte_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, hits = 0, misses = 0;

  // bin 5 of tree 1 of a small model: 3 variables of 8 bits, 12 bins, depth 4
  localparam box_t BOX_S = bin_box(32'h77, 1, 5, 3, 8, 12, 4);
  localparam box_t BOX_D = bin_box(SEED_DEF, 0, 0, NVAR_DEF, NBIT_DEF, NBIN_DEF, DEPTH_DEF);

  logic [2:0][7:0]                   xs;
  logic [NVAR_DEF-1:0][NBIT_DEF-1:0] xd;
  logic                              hit_s, hit_d;

  ohdp #(.NVAR(3), .NBIT(8), .NBIN(12), .DEPTH(4), .SEED(32'h77), .TREE(1), .BIN(5)) u_s (.clk(clk), .x(xs), .hit(hit_s));
  ohdp u_d (.clk(clk), .x(xd), .hit(hit_d));

  function automatic bit in_box_ref(box_t b, int n, longint v [8]);
    for (int k = 0; k < n; k++)
      if (!(v[k] > b[k].lo && v[k] < b[k].hi)) return 0;
    return 1;
  endfunction

  longint vs [8], vd [8];
  bit  exp_s, exp_d;

  function automatic longint pick(bound_t bd, int nbit);
    longint lo_in, hi_in, r;
    lo_in = -(64'sd1 <<< (nbit - 1));
    hi_in = (64'sd1 <<< (nbit - 1)) - 1;
    case ($urandom % 6)
      0: r = bd.lo;       1: r = bd.lo + 1;
      2: r = bd.hi;       3: r = bd.hi - 1;
      default: r = lo_in + longint'($urandom) % (hi_in - lo_in + 1);
    endcase
    if (r < lo_in) r = lo_in;
    if (r > hi_in) r = hi_in;
    return r;
  endfunction

  initial begin
    xs = '0; xd = '0;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      for (int k = 0; k < 8; k++) begin vs[k] = 0; vd[k] = 0; end
      for (int k = 0; k < 3; k++) vs[k] = pick(BOX_S[k], 8);
      for (int k = 0; k < int'(NVAR_DEF); k++) vd[k] = pick(BOX_D[k], NBIT_DEF);
      // every 8th vector: all variables strictly inside the default bin
      if (i % 8 == 7)
        for (int k = 0; k < int'(NVAR_DEF); k++)
          vd[k] = BOX_D[k].lo + 1 + longint'($urandom) % (BOX_D[k].hi - BOX_D[k].lo - 1);
      for (int k = 0; k < 3; k++) xs[k] = vs[k][7:0];
      for (int k = 0; k < int'(NVAR_DEF); k++) xd[k] = vd[k][NBIT_DEF-1:0];
      exp_s = in_box_ref(BOX_S, 3, vs);
      exp_d = in_box_ref(BOX_D, NVAR_DEF, vd);
      #1;
      // registered: the output must not follow x before the edge
      @(posedge clk); #1;
      checks += 2;
      if (hit_s !== exp_s) begin failures++; $display("small bin vec %0d: hit %0b exp %0b", i, hit_s, exp_s); end
      if (hit_d !== exp_d) begin failures++; $display("default bin vec %0d: hit %0b exp %0b", i, hit_d, exp_d); end
      hits += int'(exp_s) + int'(exp_d);
      misses += int'(!exp_s) + int'(!exp_d);
      @(negedge clk);
    end
    // latency: the output changes only on the clock edge
    for (int k = 0; k < 3; k++) xs[k] = 8'(BOX_S[k].lo + 1);   // inside
    @(posedge clk); #1;
    // put one variable on a bound that lies inside the 8-bit range
    for (int k = 2; k >= 0; k--) begin
      if (BOX_S[k].lo >= -128)   xs[k] = 8'(BOX_S[k].lo);
      else if (BOX_S[k].hi <= 127) xs[k] = 8'(BOX_S[k].hi);
    end
    #2;
    checks++;
    if (hit_s !== 1'b1) begin failures++; $display("hit changed before the clock edge"); end
    @(posedge clk); #1;
    checks++;
    if (hit_s !== 1'b0) begin failures++; $display("x on a bound must not hit"); end
    checks++;
    if (hits == 0 || misses == 0) begin failures++; $display("no hit or no miss exercised"); end
    $display("hits %0d misses %0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
