// timestamp_counter: event time base synchronised by the camera's slow pulse.
//
// The clock distribution system sends a synchronisation pulse every ten
// seconds (0.1 pulse per second) along the backplane. This counter counts
// clock cycles (nanoseconds at the 1 GHz clock) since the last pulse, and
// counts the pulses; the time stamp is {pulse count, cycles since pulse}.
// A pulse clears the cycle count and advances the pulse count, so all
// modules fed by the same pulse keep the same time. missed_o flags a
// period that ran past PERIOD cycles without a pulse (it stays set until
// the next pulse); the count then keeps running.
//
// Interface and timing: pps_i is sampled on the clock; the stamp of a
// pulse cycle reads {n+1, 0} on the next cycle.
//
// The paper gives the 0.1 pps synchronisation, that events are
// time-stamped, and an accuracy of about 2 ns. The 1 ns count, the field
// widths (34 bits hold 10^10 ns) and the missed-pulse flag are this
// design's choices.
module timestamp_counter #(
  parameter int unsigned NS_W   = 34,
  parameter int unsigned PPS_W  = 14,
  parameter longint unsigned PERIOD = 64'd10_000_000_000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pps_i,
  output logic [PPS_W+NS_W-1:0]   ts_o,
  output logic                    missed_o
);
  logic [NS_W-1:0]  ns;
  logic [PPS_W-1:0] npps;

  assign ts_o = {npps, ns};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ns       <= '0;
      npps     <= '0;
      missed_o <= 1'b0;
    end else if (pps_i) begin
      ns       <= '0;
      npps     <= npps + 1'b1;
      missed_o <= 1'b0;
    end else begin
      ns <= ns + 1'b1;
      if (64'(ns) >= PERIOD - 1) missed_o <= 1'b1;
    end
  end

endmodule
