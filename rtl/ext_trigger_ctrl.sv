// ext_trigger_ctrl: trigger receiver ("external control logic") of the PL.
//
// Three hardware triggers enter the programmable logic: the DAC trigger and the
// ADC trigger, both delivered as falling edges from the external flip-flop, and
// the switching (feedback) trigger. Each passes a SYNC_STAGES-deep flop chain;
// a falling edge of the DAC or ADC trigger becomes a one-cycle start pulse that
// is broadcast to every channel of that kind, so all channels start on the same
// clock. While swap_en is set by software and the switching trigger is high,
// swap is asserted and the DAC banks 0-7 and 8-15 exchange waveforms.
//
// Timing: dac_start/adc_start pulse SYNC_STAGES+1 cycles after the falling edge
// reaches the pin; swap follows the switching trigger SYNC_STAGES+1 cycles late
// (registered output). Falling-edge triggering follows the published design;
// the extra on-chip synchroniser, the active-high level behaviour of the
// switching trigger and the reset values (trigger lines idle high, switching
// trigger idle low) are this design's choices.
module ext_trigger_ctrl #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic dac_trig_n,
  input  logic adc_trig_n,
  input  logic sw_trig,
  input  logic swap_en,
  output logic dac_start,
  output logic adc_start,
  output logic swap
);
  logic [SYNC_STAGES-1:0] dac_sync, adc_sync, sw_sync;
  logic dac_prev, adc_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_sync  <= '1;
      adc_sync  <= '1;
      sw_sync   <= '0;
      dac_prev  <= 1'b1;
      adc_prev  <= 1'b1;
      dac_start <= 1'b0;
      adc_start <= 1'b0;
      swap      <= 1'b0;
    end else begin
      dac_sync  <= {dac_sync[SYNC_STAGES-2:0], dac_trig_n};
      adc_sync  <= {adc_sync[SYNC_STAGES-2:0], adc_trig_n};
      sw_sync   <= {sw_sync[SYNC_STAGES-2:0], sw_trig};
      dac_prev  <= dac_sync[SYNC_STAGES-1];
      adc_prev  <= adc_sync[SYNC_STAGES-1];
      dac_start <= dac_prev & ~dac_sync[SYNC_STAGES-1];
      adc_start <= adc_prev & ~adc_sync[SYNC_STAGES-1];
      swap      <= swap_en & sw_sync[SYNC_STAGES-1];
    end
  end

  initial assert (SYNC_STAGES >= 2) else $error("SYNC_STAGES must be at least 2");
endmodule
