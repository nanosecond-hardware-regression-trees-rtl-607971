// tb_tree_manager -- test of the HDL Tree Manager.
//
// Two managers for 5 trees, one with the pipelined and one with the
// combinational sum.  The bus tap must hand x through unchanged; the score
// must be the integer sum of the subscores, 3 ticks later (ceil(log2 5)) for
// the pipelined manager and with no clock edge for the combinational one.
module tb_tree_manager;
  import ddte_pkg::*;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NV = 300;

  logic [7:0][15:0] x, xb_p, xb_c;
  logic [4:0][15:0] sub;
  logic [18:0]      sc_p, sc_c;

  tree_manager #(.NTREE(5), .SUM_MODE(SUM_PIPELINE)) u_p (
    .clk(clk), .x(x), .x_bus(xb_p), .subscore(sub), .score(sc_p));
  tree_manager #(.NTREE(5), .SUM_MODE(SUM_COMB)) u_c (
    .clk(clk), .x(x), .x_bus(xb_c), .subscore(sub), .score(sc_c));

  int checks = 0, failures = 0;
  int e [NV];

  initial begin
    x = '0; sub = '0;
    @(negedge clk);
    for (int i = 0; i < NV + 3; i++) begin
      if (i >= 3) begin
        checks++;
        if (int'($signed(sc_p)) != e[i - 3]) begin
          failures++;
          if (failures < 6) $display("pipeline vec %0d: %0d expected %0d", i - 3, $signed(sc_p), e[i - 3]);
        end
      end
      if (i < NV) begin
        e[i] = 0;
        for (int k = 0; k < 5; k++) begin
          sub[k] = 16'($urandom);
          e[i] += int'($signed(sub[k]));
        end
        for (int k = 0; k < 8; k++) x[k] = 16'($urandom);
        #1;
        checks += 3;
        if (int'($signed(sc_c)) != e[i]) begin
          failures++;
          if (failures < 6) $display("comb vec %0d: %0d expected %0d", i, $signed(sc_c), e[i]);
        end
        if (xb_p !== x) begin failures++; $display("bus tap (pipeline) differs"); end
        if (xb_c !== x) begin failures++; $display("bus tap (comb) differs"); end
      end
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
