// dac_loopback: the "broadcast and loopback" playback logic of one DAC channel.
//
// After the waveform has been loaded into the channel FIFO, the channel waits.
// The start pulse, broadcast by the trigger receiver to all sixteen channels
// on the same clock, begins playback: the number of words held in the FIFO at
// that moment is latched, and exactly that many words are read, one per clock,
// and sent to the DAC. With loopback_en set, each word read is offered back to
// the FIFO input in the same cycle (lb_valid/lb_data), so when playback ends the
// FIFO again holds the whole waveform and the channel is re-armed without the
// host reloading it. Without loopback the FIFO is left empty.
//
// Timing: the first word appears on dac_data one cycle after start; dac_valid
// is high for exactly the latched number of cycles, and dac_data is zero
// (DAC mid-scale) otherwise. busy covers those cycles. A start while busy is
// ignored and reported on `ignored`. Triggered playback and loopback follow the
// published design; the length rule, zero output when idle and the ignore
// rule are this design's choices.
module dac_loopback #(
  parameter int unsigned W     = 256,
  parameter int unsigned CNT_W = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             loopback_en,
  // FIFO read side
  input  logic             fifo_valid,
  output logic             fifo_ready,
  input  logic [W-1:0]     fifo_data,
  input  logic [CNT_W-1:0] fifo_count,
  // loopback write into the FIFO
  output logic             lb_valid,
  output logic [W-1:0]     lb_data,
  // to the DAC
  output logic             dac_valid,
  output logic [W-1:0]     dac_data,
  output logic             busy,
  output logic             ignored
);
  logic [CNT_W-1:0] remaining;
  logic             pop;

  assign fifo_ready = busy;
  assign pop        = busy & fifo_valid;
  assign lb_valid   = pop & loopback_en;
  assign lb_data    = fifo_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      remaining <= '0;
      dac_valid <= 1'b0;
      dac_data  <= '0;
      ignored   <= 1'b0;
    end else begin
      ignored   <= start & busy;
      dac_valid <= pop;
      dac_data  <= pop ? fifo_data : '0;
      if (!busy) begin
        if (start && fifo_count != '0) begin
          busy      <= 1'b1;
          remaining <= fifo_count;
        end
      end else if (pop) begin
        remaining <= remaining - 1'b1;
        if (remaining == CNT_W'(1)) busy <= 1'b0;
      end
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) busy |-> fifo_valid);
endmodule
