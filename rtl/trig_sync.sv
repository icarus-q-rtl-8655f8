// trig_sync: the external dual D flip-flop that re-times the experiment triggers.
//
// The trigger source (a programmable TTL pulse generator) is not locked to the
// master oscillator, so its DAC and ADC trigger lines are first passed through
// a dual-channel D flip-flop clocked by the master oscillator. Every board then
// sees the trigger change at the same master-clock edge, and no board samples
// a changing input. Channel 0 is the DAC trigger (D1 -> ~Q1), channel 1 the ADC
// trigger (D2 -> ~Q2); the boards are fed from the inverted outputs, as in the
// published schematic, so a rising edge at D reaches the boards as a falling
// edge, the edge on which the firmware acts.
//
// Timing: q_n follows ~d one master-clock edge later. The clock edge (rising)
// and the absence of a clear input are this design's assumptions; the real
// part is a discrete logic chip and has no reset in the schematic.
module trig_sync #(
  parameter int unsigned N_CH = 2
) (
  input  logic            mclk,
  input  logic [N_CH-1:0] d,
  output logic [N_CH-1:0] q_n
);
  logic [N_CH-1:0] q;

  always_ff @(posedge mclk) q <= d;

  assign q_n = ~q;
endmodule
