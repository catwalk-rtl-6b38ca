// tb_dendrite: the dendrite count must be min(popcount(x), K) for every input
// pattern (N=16, K=2, all 65536 patterns).
module tb_dendrite;
  int checks = 0, failures = 0, clipped = 0;
  logic [15:0] x;
  logic [1:0]  count;

  dendrite u_dut (.x, .count);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      int ones, exp;
      x = 16'(v);
      #1;
      ones = 0;
      for (int i = 0; i < 16; i++) ones += int'(x[i]);
      exp = (ones < 2) ? ones : 2;
      if (ones > 2) clipped++;
      checks++;
      if (int'(count) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h count=%0d exp=%0d", x, count, exp);
      end
    end
    $display("patterns with more than K ones: %0d", clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
