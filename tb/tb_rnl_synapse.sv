// tb_rnl_synapse: after a spike with weight w the synapse output must be high
// for exactly w cycles, starting in the spike cycle, so that its running sum
// t cycles after the spike is rho(w, t) = min(t + 1, w). All weights 0..7,
// with idle gaps between spikes, then random spikes checked cycle by cycle.
module tb_rnl_synapse;
  int checks = 0, failures = 0;
  logic clk = 0, rst, spike, resp;
  logic [2:0] weight;

  rnl_synapse u_dut (.clk, .rst, .spike, .weight, .resp);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_spike, w, sum;
    rst = 1; spike = 0; weight = 0;
    @(posedge clk); #1;
    rst = 0;
    // one spike per weight value, running sum checked against rho(w, t)
    for (w = 0; w < 8; w++) begin
      weight = 3'(w);
      spike = 1;
      sum = 0;
      for (int t = 0; t < 12; t++) begin
        int rho;
        #1;
        sum += int'(resp);
        rho = (t + 1 < w) ? t + 1 : w;
        checks++;
        if (sum != rho) begin
          failures++; $display("FAIL w=%0d t=%0d sum=%0d rho=%0d", w, t, sum, rho);
        end
        @(posedge clk); #1;
        spike = 0;
        weight = 3'($urandom);   // weight may change once the pulse has started
      end
    end
    // random spikes: output high iff within w cycles of the latest spike
    t_spike = -100; w = 0;
    for (int t = 0; t < 3000; t++) begin
      spike  = ($urandom_range(99) < 10);
      weight = 3'($urandom);
      #1;
      if (spike) begin t_spike = t; w = int'(weight); end
      checks++;
      if (resp !== (t - t_spike < w)) begin
        failures++; if (failures < 10) $display("FAIL rand t=%0d resp=%0b", t, resp);
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
