// tb_axon: every accepted fire must give exactly 8 high cycles of spike_out,
// starting at the clock edge after the fire; fires during a pulse are
// ignored; reset ends a pulse. Random fire patterns, cycle-by-cycle model.
module tb_axon;
  int checks = 0, failures = 0, pulses = 0, ignored = 0;
  logic clk = 0, rst, fire, spike_out;
  int left;           // pulse cycles still to be sent by the model
  int high_run, max_run;

  axon u_dut (.clk, .rst, .fire, .spike_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; fire = 0;
    @(posedge clk); #1;
    left = 0; high_run = 0; max_run = 0;
    for (int t = 0; t < 5000; t++) begin
      rst  = (t > 100) && ($urandom_range(499) == 0);
      fire = ($urandom_range(99) < 8);
      #1;
      checks++;
      if (spike_out !== (left > 0)) begin
        failures++; if (failures < 10) $display("FAIL t=%0d spike_out=%0b left=%0d", t, spike_out, left);
      end
      if (spike_out) high_run++; else high_run = 0;
      if (high_run > max_run) max_run = high_run;
      if (rst) left = 0;
      else if (left > 0) begin
        left--;
        if (fire) ignored++;
      end else if (fire) begin
        left = 8;
        pulses++;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (max_run != 8) begin failures++; $display("FAIL longest pulse %0d cycles", max_run); end
    $display("pulses=%0d ignored_fires=%0d", pulses, ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
