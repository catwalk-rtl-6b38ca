// tb_catwalk_top: end-to-end test of the synapses and Catwalk neuron at the
// default size (16 inputs, top-2, 3-bit weights, 5-bit potential, 8-cycle
// output spike).
//
// Each volley starts with a reset cycle, then gives every input either one
// spike at a random time 0..15 or no spike at all ("infinity"), with random
// weights and threshold. The model is written from the neuron's definition,
// not from the RTL: input i contributes 1 in every cycle t with
// t_i <= t < t_i + w_i; the increment is the number of contributing inputs,
// capped at 2 by the top-k selector; the neuron fires when the potential
// reaches the threshold and starts again from 0; the output is high for the
// 8 cycles after an accepted fire. fire, spike_out and the potential register
// are compared every cycle.
//
// The first volley is a fixed worked example (spikes at 0, 1, 4 and none,
// weights 4, 7, 3, 7, threshold 10) that must fire in cycle 5.
//
// Mechanism counters (each must occur at least once): clipped cycles (more
// than 2 active inputs, where top-k drops ones), fires, volleys that fire
// more than once, volleys that never fire, fires ignored during a pulse,
// pulses cut by reset, inputs without a spike, zero weights.
module tb_catwalk_top;
  localparam int N = 16, VOLLEYS = 400, WIN = 32;
  int checks = 0, failures = 0;
  int n_clip = 0, n_fire = 0, n_multi = 0, n_silent = 0, n_ignored = 0,
      n_cut = 0, n_inf = 0, n_w0 = 0, n_full_pulse = 0;
  logic clk = 0, rst;
  logic [N-1:0] spike_in;
  logic [2:0]   weight [N];
  logic [4:0]   threshold;
  logic fire, spike_out;
  logic [4:0] potential;
  logic [4:0] thr_loaded;  // threshold the register was last loaded with

  catwalk_top u_dut (.clk, .rst, .spike_in, .weight, .threshold, .fire, .spike_out, .potential);

  always #5 clk = ~clk;

  initial begin
    repeat (VOLLEYS * (WIN + 1) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL %s", msg);
  endtask

  initial begin
    int tspk [N];
    int acc, left, run, fires_here, first_fire;
    rst = 1; spike_in = '0; threshold = 5'd1;
    for (int i = 0; i < N; i++) weight[i] = '0;
    @(posedge clk); #1;
    acc = 0; left = 0; thr_loaded = threshold; run = 0;
    for (int v = 0; v < VOLLEYS; v++) begin
      int dens, spread, win;
      dens   = (v % 4 == 0) ? 90 : (v % 4 == 1) ? 40 : 15;  // % of inputs with a spike
      spread = (v % 4 == 0) ? 3 : 16;                       // spike times 0..spread-1
      win    = (v % 5 == 3) ? 18 : WIN;                     // short volleys cut pulses
      for (int i = 0; i < N; i++) begin
        tspk[i] = ($urandom_range(99) < dens) ? int'($urandom_range(spread - 1)) : -1;
        weight[i] = 3'($urandom);
        if (tspk[i] < 0) n_inf++;
        if (weight[i] == 0) n_w0++;
      end
      threshold = 5'($urandom_range(31, 2));
      if (v == 0) begin
        // Worked example: spikes at 0, 1, 4 and never, weights 4, 7, 3, 7.
        // The summed ramps reach 9 after cycle 4 and 11 after cycle 5, so
        // with threshold 10 the neuron must fire in cycle 5. At most two
        // ramps overlap, so the top-2 selector loses nothing here.
        for (int i = 0; i < N; i++) begin tspk[i] = -1; weight[i] = '0; end
        tspk[0] = 0; weight[0] = 3'd4;
        tspk[1] = 1; weight[1] = 3'd7;
        tspk[2] = 4; weight[2] = 3'd3;
        weight[3] = 3'd7;
        threshold = 5'd10;
      end
      first_fire = -100;
      fires_here = 0;
      for (int t = -1; t < win; t++) begin
        int ones, inc;
        logic exp_fire;
        rst = (t == -1);
        for (int i = 0; i < N; i++) spike_in[i] = (tspk[i] == t);
        #1;
        ones = 0;
        if (!rst)
          for (int i = 0; i < N; i++)
            if (tspk[i] >= 0 && tspk[i] <= t && t < tspk[i] + int'(weight[i])) ones++;
        inc = (ones < 2) ? ones : 2;
        if (ones > 2) n_clip++;
        exp_fire = !rst && (acc + inc >= int'(threshold));
        checks += 3;
        if (fire !== exp_fire) fail($sformatf("v=%0d t=%0d fire=%0b exp=%0b", v, t, fire, exp_fire));
        if (spike_out !== (left > 0)) fail($sformatf("v=%0d t=%0d spike_out=%0b left=%0d", v, t, spike_out, left));
        if (int'(potential) != ((acc - int'(thr_loaded)) & 31))
          fail($sformatf("v=%0d t=%0d potential=%0d acc=%0d thr=%0d", v, t, potential, acc, thr_loaded));
        if (spike_out) run++; else begin if (run == 8) n_full_pulse++; run = 0; end
        if (fire && first_fire < 0) first_fire = t;
        if (exp_fire) begin n_fire++; fires_here++; end
        if (rst || exp_fire) begin acc = 0; thr_loaded = threshold; end else acc += inc;
        if (rst) begin if (left > 0) n_cut++; left = 0; end
        else if (left > 0) begin left--; if (exp_fire) n_ignored++; end
        else if (exp_fire) left = 8;
        @(posedge clk); #1;
      end
      if (v == 0) begin
        checks++;
        if (first_fire != 5) fail($sformatf("worked example fired at %0d, expected 5", first_fire));
      end
      if (fires_here == 0) n_silent++;
      if (fires_here > 1) n_multi++;
    end
    $display("clipped_cycles=%0d fires=%0d multi_fire_volleys=%0d silent_volleys=%0d", n_clip, n_fire, n_multi, n_silent);
    $display("ignored_fires=%0d cut_pulses=%0d full_8_cycle_pulses=%0d no_spike_inputs=%0d zero_weights=%0d",
             n_ignored, n_cut, n_full_pulse, n_inf, n_w0);
    checks += 9;
    if (n_clip == 0)       fail("top-k clipping never happened");
    if (n_fire == 0)       fail("no fire");
    if (n_multi == 0)      fail("no volley fired twice");
    if (n_silent == 0)     fail("no silent volley");
    if (n_ignored == 0)    fail("no fire during a pulse");
    if (n_cut == 0)        fail("no pulse cut by reset");
    if (n_full_pulse == 0) fail("no complete 8-cycle pulse");
    if (n_inf == 0)        fail("no input without spike");
    if (n_w0 == 0)         fail("no zero weight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
