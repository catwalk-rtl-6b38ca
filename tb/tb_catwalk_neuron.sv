// tb_catwalk_neuron: random response-bit patterns (sparse and dense) into the
// neuron, compared cycle by cycle with an integer model: increment =
// min(popcount, 2), fire when the potential reaches the threshold (potential
// back to 0), output spike of 8 cycles starting one edge after an accepted
// fire, fires during a pulse ignored, reset every 40 cycles.
module tb_catwalk_neuron;
  int checks = 0, failures = 0, fires = 0, clipped = 0;
  logic clk = 0, rst;
  logic [15:0] x;
  logic [4:0] threshold;
  logic fire, spike_out;
  logic [4:0] potential;
  logic [4:0] thr_loaded;  // threshold the register was last loaded with
  int acc, left;

  catwalk_neuron u_dut (.clk, .rst, .x, .threshold, .fire, .spike_out, .potential);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; x = '0; threshold = 5'd10;
    @(posedge clk); #1;
    acc = 0; left = 0; thr_loaded = threshold;
    for (int t = 0; t < 8000; t++) begin
      int ones, inc;
      logic exp_fire;
      if (t % 40 == 0) threshold = 5'($urandom_range(31, 1));
      rst = (t % 40 == 0);
      for (int i = 0; i < 16; i++) x[i] = ($urandom_range(99) < ((t / 40) % 2 == 0 ? 5 : 25));
      #1;
      ones = $countones(x);
      inc = (ones < 2) ? ones : 2;
      if (ones > 2) clipped++;
      exp_fire = !rst && (acc + inc >= int'(threshold));
      checks += 3;
      if (fire !== exp_fire) begin
        failures++; if (failures < 10) $display("FAIL t=%0d fire=%0b exp=%0b", t, fire, exp_fire);
      end
      if (spike_out !== (left > 0)) begin
        failures++; if (failures < 10) $display("FAIL t=%0d spike_out=%0b left=%0d", t, spike_out, left);
      end
      if (int'(potential) != ((acc - int'(thr_loaded)) & 31)) begin
        failures++; if (failures < 10) $display("FAIL t=%0d potential=%0d acc=%0d", t, potential, acc);
      end
      if (exp_fire) fires++;
      if (rst || exp_fire) begin acc = 0; thr_loaded = threshold; end else acc += inc;
      if (rst) left = 0;
      else if (left > 0) left--;
      else if (exp_fire) left = 8;
      @(posedge clk); #1;
    end
    checks++;
    if (fires == 0 || clipped == 0) begin failures++; $display("FAIL fires=%0d clipped=%0d", fires, clipped); end
    $display("fires=%0d clipped_cycles=%0d", fires, clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
