// tb_sum_comb -- test of the combinational sum engine.
//
// Two instances: 5 subscores of 8 bits (the five-input tree of the paper's
// drawing, with an odd operand carried to the last adder) and 20 subscores of
// 16 bits (the default forest).  Random values and the all-maximum /
// all-minimum extremes are applied; the sum must equal the integer sum
// without any clock edge in between.
module tb_sum_comb;

  logic [4:0][7:0]   in5;
  logic [19:0][15:0] in20;
  logic [10:0]       sum5;    // 8 + ceil(log2 5)
  logic [20:0]       sum20;   // 16 + ceil(log2 20)

  sum_comb #(.N(5),  .IN_W(8))  u5  (.subscore(in5),  .sum(sum5));
  sum_comb #(.N(20), .IN_W(16)) u20 (.subscore(in20), .sum(sum20));

  int checks = 0, failures = 0;
  int e5, e20;

  initial begin
    for (int i = 0; i < 3000; i++) begin
      e5 = 0; e20 = 0;
      for (int k = 0; k < 5; k++) begin
        in5[k] = (i == 0) ? 8'h7f : (i == 1) ? 8'h80 : 8'($urandom);
        e5 += int'($signed(in5[k]));
      end
      for (int k = 0; k < 20; k++) begin
        in20[k] = (i == 0) ? 16'h7fff : (i == 1) ? 16'h8000 : 16'($urandom);
        e20 += int'($signed(in20[k]));
      end
      #1;
      checks += 2;
      if (int'($signed(sum5)) != e5) begin
        failures++; $display("N=5 vec %0d: %0d expected %0d", i, $signed(sum5), e5);
      end
      if (int'($signed(sum20)) != e20) begin
        failures++; $display("N=20 vec %0d: %0d expected %0d", i, $signed(sum20), e20);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
