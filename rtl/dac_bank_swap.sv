// dac_bank_swap: the feedback waveform switch in front of the DAC inputs.
//
// The sixteen DAC channels form two banks, channels 0-7 and 8-15. While swap is
// high, output i carries the stream of channel (i + N/2) mod N, so the two banks
// exchange waveforms within one clock; this lets a hardware trigger replace
// the pulses being played in the middle of a sequence (for instance a
// correction pulse after a readout). The exchange in both directions follows
// the published measurements; the single register stage is this design's
// choice.
//
// Timing: out_* are registered; a change of swap shows at the outputs one
// cycle later. Reset clears the outputs.
module dac_bank_swap #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         swap,
  input  logic [W-1:0] in_data  [N],
  input  logic [N-1:0] in_valid,
  output logic [W-1:0] out_data [N],
  output logic [N-1:0] out_valid
);
  localparam int unsigned HALF = N / 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) out_data[i] <= '0;
      out_valid <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        out_data[i]  <= swap ? in_data[(i + HALF) % N] : in_data[i];
        out_valid[i] <= swap ? in_valid[(i + HALF) % N] : in_valid[i];
      end
    end
  end

  initial assert (N % 2 == 0) else $error("N must be even");
endmodule
