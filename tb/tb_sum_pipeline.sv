// tb_sum_pipeline -- test of the pipelined sum engine.
//
// Four instances: N = 5 (the paper's drawing, ranks at T0..T2, latency 3),
// N = 40 (benchmark forest, latency 6), N = 2 (latency 1) and N = 1 (no
// adder, latency 0).  A new random set of subscores is applied every tick
// (extremes first); each sum must equal the integer sum of the set applied
// ceil(log2 N) rising edges earlier.
module tb_sum_pipeline;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NV = 400;

  logic [4:0][11:0]   in5;   logic [14:0] s5;
  logic [39:0][15:0]  in40;  logic [21:0] s40;
  logic [1:0][15:0]   in2;   logic [16:0] s2;
  logic [0:0][15:0]   in1;   logic [15:0] s1;

  sum_pipeline #(.N(5),  .IN_W(12)) u5  (.clk(clk), .subscore(in5),  .sum(s5));
  sum_pipeline #(.N(40), .IN_W(16)) u40 (.clk(clk), .subscore(in40), .sum(s40));
  sum_pipeline #(.N(2),  .IN_W(16)) u2  (.clk(clk), .subscore(in2),  .sum(s2));
  sum_pipeline #(.N(1),  .IN_W(16)) u1  (.clk(clk), .subscore(in1),  .sum(s1));

  int checks = 0, failures = 0;
  int e5 [NV], e40 [NV], e2 [NV], e1 [NV];

  task automatic cmp(string name, int got, int exp, int vec);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 8) $display("%s vec %0d: %0d expected %0d", name, vec, got, exp);
    end
  endtask

  initial begin
    in5 = '0; in40 = '0; in2 = '0; in1 = '0;
    @(negedge clk);
    for (int i = 0; i < NV + 6; i++) begin
      // N = 1 is combinational: compare before driving the next set
      if (i >= 3 && i - 3 < NV) cmp("N=5",  int'($signed(s5)),  e5[i - 3],  i - 3);
      if (i >= 6 && i - 6 < NV) cmp("N=40", int'($signed(s40)), e40[i - 6], i - 6);
      if (i >= 1 && i - 1 < NV) cmp("N=2",  int'($signed(s2)),  e2[i - 1],  i - 1);
      if (i < NV) begin
        e5[i] = 0; e40[i] = 0; e2[i] = 0;
        for (int k = 0; k < 5; k++) begin
          in5[k] = (i == 0) ? 12'h7ff : (i == 1) ? 12'h800 : 12'($urandom);
          e5[i] += int'($signed(in5[k]));
        end
        for (int k = 0; k < 40; k++) begin
          in40[k] = (i == 0) ? 16'h7fff : (i == 1) ? 16'h8000 : 16'($urandom);
          e40[i] += int'($signed(in40[k]));
        end
        for (int k = 0; k < 2; k++) begin
          in2[k] = 16'($urandom);
          e2[i] += int'($signed(in2[k]));
        end
        in1[0] = 16'($urandom);
        e1[i] = int'($signed(in1[0]));
        #1 cmp("N=1", int'($signed(s1)), e1[i], i);
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
