// axon: turns a one-cycle fire event into an output spike pulse of
// PULSE_CYCLES cycles.
//
// A 3-bit counter (for the default 8-cycle pulse) plus a busy flag. On `fire`
// while idle, the flag is set on the next clock edge and `spike_out` stays high
// for PULSE_CYCLES cycles; the counter counts them off. A fire that arrives
// while a pulse is still being sent is ignored. `rst` (synchronous) ends any
// pulse.
//
// Timing: spike_out rises on the clock edge after the fire cycle.
//
// The counter width and the 8-cycle pulse follow the paper; the busy flag, the
// handling of a fire during a pulse and the one-cycle delay are this design's
// choices.
module axon #(
  parameter int unsigned PULSE_CYCLES = 8,
  parameter int unsigned CNT_BITS     = $clog2(PULSE_CYCLES)
) (
  input  logic clk,
  input  logic rst,
  input  logic fire,
  output logic spike_out
);
  logic [CNT_BITS-1:0] cnt;
  logic                busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (busy) begin
      if (cnt == CNT_BITS'(PULSE_CYCLES - 1)) begin
        busy <= 1'b0;
        cnt  <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end else if (fire) begin
      busy <= 1'b1;
      cnt  <= '0;
    end
  end

  assign spike_out = busy;
endmodule
