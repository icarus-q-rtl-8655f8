// adc_capture: trigger gate in front of one ADC channel FIFO.
//
// The ADC digitises continuously, but its words are discarded until the ADC
// trigger arrives. The start pulse (broadcast to all eight channels on the same
// clock) opens the gate, and exactly CAP_WORDS valid words, 65,536 samples by
// default, are written into the channel FIFO. The channel then stays closed
// ("full") until rearm, which the transfer logic raises once the captured data
// has been moved out to memory. A trigger that arrives before re-arming is
// ignored and reported on `ignored`; a word the FIFO cannot accept during
// capture is lost, counted in the capture length, and reported on `overflow`.
//
// Timing: the first word stored is the first adc_valid word in the cycle after
// start. armed is high in the idle state. The capture length and the re-arm
// rule follow the published design; the handling of early triggers and of
// overflow is this design's choice.
module adc_capture #(
  parameter int unsigned W         = 128,
  parameter int unsigned CAP_WORDS = 8192,
  localparam int unsigned CW       = $clog2(CAP_WORDS + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         rearm,
  input  logic         adc_valid,
  input  logic [W-1:0] adc_data,
  output logic         fifo_valid,
  input  logic         fifo_ready,
  output logic [W-1:0] fifo_data,
  output logic         armed,
  output logic         capturing,
  output logic         full,
  output logic         ignored,
  output logic         overflow
);
  typedef enum logic [1:0] {S_ARMED, S_CAPTURE, S_FULL} state_t;
  state_t        state;
  logic [CW-1:0] taken;

  assign armed      = (state == S_ARMED);
  assign capturing  = (state == S_CAPTURE);
  assign full       = (state == S_FULL);
  assign fifo_valid = capturing & adc_valid;
  assign fifo_data  = adc_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_ARMED;
      taken    <= '0;
      ignored  <= 1'b0;
      overflow <= 1'b0;
    end else begin
      ignored  <= start & (state != S_ARMED);
      overflow <= fifo_valid & ~fifo_ready;
      unique case (state)
        S_ARMED: if (start) begin
          taken <= '0;
          state <= S_CAPTURE;
        end
        S_CAPTURE: if (adc_valid) begin
          taken <= taken + 1'b1;
          if (taken == CW'(CAP_WORDS - 1)) state <= S_FULL;
        end
        S_FULL: if (rearm) state <= S_ARMED;
        default: state <= S_ARMED;
      endcase
    end
  end
endmodule
