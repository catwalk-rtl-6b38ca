// tb_soma: drives random dendrite counts into the soma and compares with an
// integer model of the membrane potential: the potential grows by the count;
// when it reaches the threshold the soma fires in that cycle and the
// potential restarts at 0; reset restarts it too. Also checks the register
// value, which must equal (potential - threshold) mod 32.
module tb_soma;
  int checks = 0, failures = 0, fires = 0;
  logic clk = 0, rst;
  logic [1:0] count;
  logic [4:0] threshold;
  logic fire;
  logic [4:0] potential;
  int acc;
  logic [4:0] thr_loaded;  // threshold the register was last loaded with

  soma u_dut (.clk, .rst, .count, .threshold, .fire, .potential);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; count = 0; threshold = 5'd7;
    @(posedge clk); #1;
    acc = 0; thr_loaded = threshold;
    for (int t = 0; t < 5000; t++) begin
      logic exp_fire;
      rst   = ($urandom_range(99) < 2) || (t % 400 == 0);
      if (t % 400 == 0) threshold = 5'($urandom_range(31, 1));
      count = 2'($urandom_range(2));
      #1;
      exp_fire = !rst && (acc + int'(count) >= int'(threshold));
      checks += 2;
      if (fire !== exp_fire) begin
        failures++; if (failures < 10) $display("FAIL t=%0d fire=%0b exp=%0b acc=%0d", t, fire, exp_fire, acc);
      end
      if (int'(potential) != ((acc - int'(thr_loaded)) & 31)) begin
        failures++; if (failures < 10) $display("FAIL t=%0d potential=%0d acc=%0d thr=%0d", t, potential, acc, thr_loaded);
      end
      if (exp_fire) fires++;
      if (rst || exp_fire) begin acc = 0; thr_loaded = threshold; end else acc += int'(count);
      @(posedge clk); #1;
    end
    if (fires == 0) begin failures++; $display("FAIL no fire seen"); end
    $display("fires=%0d", fires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
