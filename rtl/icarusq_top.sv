// icarusq_top: a synchronised ICARUS-Q setup of N_BOARDS boards.
//
// Several boards are driven as one instrument. They share the master
// oscillator and one trigger source. The trigger source's DAC and ADC lines
// pass through a single dual D flip-flop (trig_sync) clocked by the master
// oscillator, and its inverted outputs fan out to every board. Each board
// therefore sees the trigger change at the same master-clock edge, and all
// boards start their DAC playback and ADC capture on the same clock. Each
// board (icarusq_board) has its own switching trigger, software settings,
// commands and PL DDR ports. All per-board ports are arrays indexed by board.
//
// Timing: a rising edge on trig_src_dac/trig_src_adc reaches every board as a
// falling edge one mclk edge later. Within a board, the start pulse follows
// SYNC_STAGES+1 clocks after that (see ext_trigger_ctrl). In this model all
// boards run on one fabric clock, clk, standing for PL clocks derived from the
// common master oscillator. The shared flip-flop and clock follow the
// published setup. The default of two boards is the pair that the published
// synchronisation measurement uses; the setup scales by raising N_BOARDS.
module icarusq_top
  import icq_pkg::*;
#(
  parameter int unsigned N_BOARDS    = 2,
  parameter int unsigned N_DAC_CH    = N_DAC,
  parameter int unsigned N_ADC_CH    = N_ADC,
  parameter int unsigned DAC_DEPTH   = DAC_WORDS,
  parameter int unsigned ADC_DEPTH   = ADC_WORDS,
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned MAX_OUT     = 8,
  localparam int unsigned DCW        = $clog2(DAC_DEPTH) + 1,
  localparam int unsigned ACW        = $clog2(ADC_DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mclk,
  // shared trigger source, into the flip-flop
  input  logic                trig_src_dac,                     // D1
  input  logic                trig_src_adc,                     // D2
  // per board
  input  logic [N_BOARDS-1:0] sw_trig,
  input  logic [N_BOARDS-1:0] cfg_loopback_en,
  input  logic [N_BOARDS-1:0] cfg_swap_en,
  input  logic [N_BOARDS-1:0] dac_cmd_valid,
  output logic [N_BOARDS-1:0] dac_cmd_ready,
  input  logic [N_DAC_CH-1:0] dac_cmd_mask [N_BOARDS],
  input  logic [DCW-1:0]      dac_cmd_len  [N_BOARDS],
  output logic [N_BOARDS-1:0] dac_load_busy,
  output logic [N_BOARDS-1:0] dac_load_done,
  output rd_req_t             ddr_rd_req       [N_BOARDS],
  input  logic [N_BOARDS-1:0] ddr_rd_req_ready,
  input  rd_rsp_t             ddr_rd_rsp       [N_BOARDS],
  output dac_word_t           dac_out_data  [N_BOARDS][N_DAC_CH],
  output logic [N_DAC_CH-1:0] dac_out_valid [N_BOARDS],
  input  adc_word_t           adc_in_data   [N_BOARDS][N_ADC_CH],
  input  logic [N_ADC_CH-1:0] adc_in_valid  [N_BOARDS],
  input  logic [N_BOARDS-1:0] adc_cmd_valid,
  output logic [N_BOARDS-1:0] adc_cmd_ready,
  input  logic [ACW-1:0]      adc_cmd_len   [N_BOARDS],
  output logic [N_BOARDS-1:0] adc_xfer_busy,
  output logic [N_BOARDS-1:0] adc_xfer_done,
  output wr_req_t             ddr_wr_req    [N_BOARDS],
  input  logic [N_BOARDS-1:0] ddr_wr_ready,
  output logic [N_DAC_CH-1:0] dac_playing   [N_BOARDS],
  output logic [N_ADC_CH-1:0] adc_armed     [N_BOARDS],
  output logic [N_BOARDS-1:0] swap_active,
  output logic [N_BOARDS-1:0] dac_trig_ignored,
  output logic [N_BOARDS-1:0] adc_trig_ignored,
  output logic [N_BOARDS-1:0] adc_overflow
);
  logic [1:0] trig_q_n;   // [0] = ~Q1 (DAC trigger), [1] = ~Q2 (ADC trigger)

  trig_sync #(.N_CH(2)) u_trig_sync (
    .mclk (mclk),
    .d    ({trig_src_adc, trig_src_dac}),
    .q_n  (trig_q_n)
  );

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_board
    icarusq_board #(
      .N_DAC_CH(N_DAC_CH), .N_ADC_CH(N_ADC_CH), .DAC_DEPTH(DAC_DEPTH),
      .ADC_DEPTH(ADC_DEPTH), .SYNC_STAGES(SYNC_STAGES), .MAX_OUT(MAX_OUT)
    ) u_board (
      .clk              (clk),
      .rst_n            (rst_n),
      .dac_trig_n       (trig_q_n[0]),
      .adc_trig_n       (trig_q_n[1]),
      .sw_trig          (sw_trig[b]),
      .cfg_loopback_en  (cfg_loopback_en[b]),
      .cfg_swap_en      (cfg_swap_en[b]),
      .dac_cmd_valid    (dac_cmd_valid[b]),
      .dac_cmd_ready    (dac_cmd_ready[b]),
      .dac_cmd_mask     (dac_cmd_mask[b]),
      .dac_cmd_len      (dac_cmd_len[b]),
      .dac_load_busy    (dac_load_busy[b]),
      .dac_load_done    (dac_load_done[b]),
      .ddr_rd_req       (ddr_rd_req[b]),
      .ddr_rd_req_ready (ddr_rd_req_ready[b]),
      .ddr_rd_rsp       (ddr_rd_rsp[b]),
      .dac_out_data     (dac_out_data[b]),
      .dac_out_valid    (dac_out_valid[b]),
      .adc_in_data      (adc_in_data[b]),
      .adc_in_valid     (adc_in_valid[b]),
      .adc_cmd_valid    (adc_cmd_valid[b]),
      .adc_cmd_ready    (adc_cmd_ready[b]),
      .adc_cmd_len      (adc_cmd_len[b]),
      .adc_xfer_busy    (adc_xfer_busy[b]),
      .adc_xfer_done    (adc_xfer_done[b]),
      .ddr_wr_req       (ddr_wr_req[b]),
      .ddr_wr_ready     (ddr_wr_ready[b]),
      .dac_playing      (dac_playing[b]),
      .adc_armed        (adc_armed[b]),
      .swap_active      (swap_active[b]),
      .dac_trig_ignored (dac_trig_ignored[b]),
      .adc_trig_ignored (adc_trig_ignored[b]),
      .adc_overflow     (adc_overflow[b])
    );
  end
endmodule
