// adc_arbiter_dma: moves captured ADC data from the channel FIFOs to PL DDR.
//
// After a capture the eight ADC FIFOs hold one record each. When the processor
// issues the transfer instruction (cmd_valid, with cmd_len words per channel),
// this block drains every FIFO into its own memory region: channel c, word k
// goes to DDR word c*REGION + k. One word is written per clock; the channel
// that supplies it is chosen round-robin among channels that still have words
// to send and have one ready, starting after the channel served last. When
// every channel has sent cmd_len words, done pulses for one cycle; the capture
// logic uses it to re-arm the ADC trigger.
//
// Interface: wr_req.valid/wr_ready handshake on the DDR write port; a FIFO word
// is taken (fifo_ready) in the same cycle its write is accepted. wr_req holds
// steady while wr_ready is low. The round-robin policy, address map and port
// protocol are this design's choices; the published design names the block and
// its function only.
module adc_arbiter_dma
  import icq_pkg::*;
#(
  parameter int unsigned N_CH   = 8,
  parameter int unsigned W      = 128,
  parameter int unsigned REGION = 8192,
  localparam int unsigned CW    = $clog2(REGION + 1),
  localparam int unsigned CHW   = $clog2(N_CH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [CW-1:0]     cmd_len,
  input  logic [N_CH-1:0]   fifo_valid,
  output logic [N_CH-1:0]   fifo_ready,
  input  logic [W-1:0]      fifo_data [N_CH],
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [W-1:0]      wr_data,
  output logic              busy,
  output logic              done
);
  logic [CW-1:0]   len;
  logic [CW-1:0]   sent [N_CH];
  logic [N_CH-1:0] req;
  logic [CHW-1:0]  last, grant, held_ch;
  logic            any, held;

  always_comb begin
    for (int i = 0; i < N_CH; i++) req[i] = busy && fifo_valid[i] && (sent[i] != len);
  end

  // round-robin: first requesting channel after `last`; a write that is
  // waiting for wr_ready keeps its channel
  always_comb begin
    any   = 1'b0;
    grant = '0;
    if (held) begin
      any   = 1'b1;
      grant = held_ch;
    end
    for (int k = 1; k <= N_CH; k++) begin
      logic [CHW-1:0] c;
      c = CHW'((int'(last) + k) % N_CH);
      if (!any && req[c]) begin
        any   = 1'b1;
        grant = c;
      end
    end
  end

  logic all_sent;
  always_comb begin
    all_sent = 1'b1;
    for (int i = 0; i < N_CH; i++) if (sent[i] != len) all_sent = 1'b0;
  end

  assign cmd_ready = !busy;
  assign wr_valid  = any;
  assign wr_addr   = ADDR_W'(grant) * ADDR_W'(REGION) + ADDR_W'(sent[grant]);
  assign wr_data   = fifo_data[grant];

  always_comb begin
    fifo_ready = '0;
    fifo_ready[grant] = any & wr_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      held <= 1'b0;
      held_ch <= '0;
      len  <= '0;
      last <= CHW'(N_CH - 1);
      for (int i = 0; i < N_CH; i++) sent[i] <= '0;
    end else begin
      done    <= 1'b0;
      held    <= any & ~wr_ready;
      held_ch <= grant;
      if (!busy) begin
        if (cmd_valid) begin
          busy <= 1'b1;
          len  <= (cmd_len > CW'(REGION)) ? CW'(REGION) : cmd_len;
          last <= CHW'(N_CH - 1);
          for (int i = 0; i < N_CH; i++) sent[i] <= '0;
        end
      end else begin
        if (any && wr_ready) begin
          sent[grant] <= sent[grant] + 1'b1;
          last        <= grant;
        end
        if (all_sent) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_addr)));
endmodule
