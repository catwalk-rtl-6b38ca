// tb_catwalk_workloads: the three neuron sizes evaluated for Catwalk, 16, 32
// and 64 synapses with top-2 selection, each run on random sparse spike
// volleys (10 percent of inputs spiking) against the ramp-no-leak model with a
// top-2 capped increment. Each size must fire and must see at least one
// clipped cycle.
module tb_catwalk_workloads;
  logic clk = 0;
  int c16, f16, fi16, cl16, c32, f32, fi32, cl32, c64, f64, fi64, cl64;
  logic d16, d32, d64;
  int checks, failures;

  always #5 clk = ~clk;

  catwalk_volley_env #(.N(16)) e16 (.clk, .checks(c16), .failures(f16), .fires(fi16), .clipped(cl16), .done(d16));
  catwalk_volley_env #(.N(32)) e32 (.clk, .checks(c32), .failures(f32), .fires(fi32), .clipped(cl32), .done(d32));
  catwalk_volley_env #(.N(64)) e64 (.clk, .checks(c64), .failures(f64), .fires(fi64), .clipped(cl64), .done(d64));

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32 + c64, f16 + f32 + f64 + 1);
    $finish;
  end

  initial begin
    wait (d16 && d32 && d64);
    checks = c16 + c32 + c64 + 6;
    failures = f16 + f32 + f64;
    if (fi16 == 0 || fi32 == 0 || fi64 == 0) failures++;
    if (cl16 == 0 || cl32 == 0 || cl64 == 0) failures++;
    $display("N=16: checks=%0d fires=%0d clipped=%0d", c16, fi16, cl16);
    $display("N=32: checks=%0d fires=%0d clipped=%0d", c32, fi32, cl32);
    $display("N=64: checks=%0d fires=%0d clipped=%0d", c64, fi64, cl64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
