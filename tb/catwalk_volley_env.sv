// catwalk_volley_env: reusable volley test for one catwalk_top of fan-in N
// (top-2 selection). Applies VOLLEYS random spike volleys, each preceded by a
// reset cycle, and compares fire, spike_out and the potential register every
// cycle with an integer model of the ramp-no-leak neuron with a top-2 capped
// increment (see tb_catwalk_top for the model). Spike density follows the
// sparse regime of interest: DENS_PCT percent of the inputs spike in a volley.
// Raises `done` when finished and reports its counts on the outputs.
module catwalk_volley_env #(
  parameter int N        = 32,
  parameter int VOLLEYS  = 200,
  parameter int DENS_PCT = 10
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   fires,
  output int   clipped,
  output logic done
);
  localparam int WIN = 32;
  logic rst;
  logic [N-1:0] spike_in;
  logic [2:0]   weight [N];
  logic [4:0]   threshold;
  logic fire, spike_out;
  logic [4:0] potential;
  logic [4:0] thr_loaded;

  catwalk_top #(.N(N)) u_dut (.clk, .rst, .spike_in, .weight, .threshold, .fire, .spike_out, .potential);

  initial begin
    int tspk [N];
    int acc, left;
    checks = 0; failures = 0; fires = 0; clipped = 0; done = 1'b0;
    rst = 1; spike_in = '0; threshold = 5'd1;
    for (int i = 0; i < N; i++) weight[i] = '0;
    @(posedge clk); #1;
    acc = 0; left = 0; thr_loaded = threshold;
    for (int v = 0; v < VOLLEYS; v++) begin
      int spread;
      spread = (v % 3 == 0) ? 4 : 16;
      for (int i = 0; i < N; i++) begin
        tspk[i] = ($urandom_range(99) < DENS_PCT) ? int'($urandom_range(spread - 1)) : -1;
        weight[i] = 3'($urandom);
      end
      threshold = 5'($urandom_range(20, 2));
      for (int t = -1; t < WIN; t++) begin
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
        if (ones > 2) clipped++;
        exp_fire = !rst && (acc + inc >= int'(thr_loaded));
        checks += 3;
        if (fire !== exp_fire) begin
          failures++; if (failures < 5) $display("FAIL N=%0d v=%0d t=%0d fire=%0b", N, v, t, fire);
        end
        if (spike_out !== (left > 0)) begin
          failures++; if (failures < 5) $display("FAIL N=%0d v=%0d t=%0d spike_out=%0b", N, v, t, spike_out);
        end
        if (int'(potential) != ((acc - int'(thr_loaded)) & 31)) begin
          failures++; if (failures < 5) $display("FAIL N=%0d v=%0d t=%0d potential=%0d", N, v, t, potential);
        end
        if (exp_fire) fires++;
        if (rst || exp_fire) begin acc = 0; thr_loaded = threshold; end else acc += inc;
        if (rst) left = 0;
        else if (left > 0) left--;
        else if (exp_fire) left = 8;
        @(posedge clk); #1;
      end
    end
    done = 1'b1;
  end
endmodule
