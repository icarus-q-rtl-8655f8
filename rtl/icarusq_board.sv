// icarusq_board: programmable logic of one ICARUS-Q board.
//
// One board plays arbitrary waveforms on sixteen DAC channels and records eight
// ADC channels, each channel buffering 65,536 samples on chip, with every
// channel started by shared hardware triggers so that many boards run in step.
//
// DAC path: a load command copies waveforms from PL DDR into the per-channel
// FIFOs (dac_dma). A falling edge of the DAC trigger, already re-timed to the
// master clock by the external flip-flop, is received by ext_trigger_ctrl and
// starts all sixteen players (dac_loopback) on the same clock. With loopback
// enabled each played word is written back to its FIFO, so the next trigger
// replays the waveform without reloading. dac_bank_swap sits in front of the
// DAC inputs and, while swapping is enabled and the switching trigger is high,
// exchanges channels 0-7 with channels 8-15.
//
// ADC path: the converters stream continuously; a falling edge of the ADC
// trigger lets exactly 65,536 samples per channel into the ADC FIFOs
// (adc_capture). A transfer command then drains them into per-channel DDR
// regions (adc_arbiter_dma); when it completes, the capture gates re-arm.
//
// Everything runs on the PL clock clk. The RF converters, DDR memory,
// processor and clocking are outside this module: their streams and memory
// ports are the ports here. While a load is in progress DAC triggers are
// ignored, and a load command is held off while any channel is playing (this
// design's rule, so that the loader and the loopback never write one FIFO in
// the same cycle). The block structure follows the published design; the
// port protocols and these rules are this design's choices.
module icarusq_board
  import icq_pkg::*;
#(
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
  // triggers
  input  logic                dac_trig_n,        // ~Q1 of the external flip-flop
  input  logic                adc_trig_n,        // ~Q2 of the external flip-flop
  input  logic                sw_trig,           // switching (feedback) trigger
  // software configuration
  input  logic                cfg_loopback_en,
  input  logic                cfg_swap_en,
  // DAC load command
  input  logic                dac_cmd_valid,
  output logic                dac_cmd_ready,
  input  logic [N_DAC_CH-1:0] dac_cmd_mask,
  input  logic [DCW-1:0]      dac_cmd_len,
  output logic                dac_load_busy,
  output logic                dac_load_done,
  // PL DDR read port (waveforms)
  output rd_req_t             ddr_rd_req,
  input  logic                ddr_rd_req_ready,
  input  rd_rsp_t             ddr_rd_rsp,
  // to the RF DACs
  output dac_word_t           dac_out_data [N_DAC_CH],
  output logic [N_DAC_CH-1:0] dac_out_valid,
  // from the RF ADCs
  input  adc_word_t           adc_in_data [N_ADC_CH],
  input  logic [N_ADC_CH-1:0] adc_in_valid,
  // ADC transfer command
  input  logic                adc_cmd_valid,
  output logic                adc_cmd_ready,
  input  logic [ACW-1:0]      adc_cmd_len,
  output logic                adc_xfer_busy,
  output logic                adc_xfer_done,
  // PL DDR write port (captured data)
  output wr_req_t             ddr_wr_req,
  input  logic                ddr_wr_ready,
  // status
  output logic [N_DAC_CH-1:0] dac_playing,
  output logic [N_ADC_CH-1:0] adc_armed,
  output logic                swap_active,
  output logic                dac_trig_ignored,
  output logic                adc_trig_ignored,
  output logic                adc_overflow
);
  localparam int unsigned CHW = $clog2(N_DAC_CH);

  // ---------------------------------------------------------------- triggers
  logic dac_start_raw, dac_start, adc_start, swap;

  ext_trigger_ctrl #(.SYNC_STAGES(SYNC_STAGES)) u_ext_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .dac_trig_n (dac_trig_n),
    .adc_trig_n (adc_trig_n),
    .sw_trig    (sw_trig),
    .swap_en    (cfg_swap_en),
    .dac_start  (dac_start_raw),
    .adc_start  (adc_start),
    .swap       (swap)
  );
  assign swap_active = swap;

  // ---------------------------------------------------------------- DAC path
  logic [DCW-1:0]  dfifo_count [N_DAC_CH];
  logic            dma_wr_valid;
  logic [CHW-1:0]  dma_wr_chan;
  dac_word_t       dma_wr_data;
  logic            dma_cmd_ready;
  dac_word_t       play_data  [N_DAC_CH];
  logic [N_DAC_CH-1:0] play_valid, play_ignored;

  assign dac_start     = dac_start_raw & ~dac_load_busy;
  assign dac_cmd_ready = dma_cmd_ready & ~(|dac_playing);

  dac_dma #(
    .N_CH(N_DAC_CH), .W(DAC_W), .DEPTH(DAC_DEPTH), .MAX_OUT(MAX_OUT)
  ) u_dac_dma (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (dac_cmd_valid & ~(|dac_playing)),
    .cmd_ready    (dma_cmd_ready),
    .cmd_mask     (dac_cmd_mask),
    .cmd_len      (dac_cmd_len),
    .rd_req_valid (ddr_rd_req.valid),
    .rd_req_ready (ddr_rd_req_ready),
    .rd_req_addr  (ddr_rd_req.addr),
    .rd_rsp_valid (ddr_rd_rsp.valid),
    .rd_rsp_data  (ddr_rd_rsp.data),
    .fifo_count   (dfifo_count),
    .wr_valid     (dma_wr_valid),
    .wr_chan      (dma_wr_chan),
    .wr_data      (dma_wr_data),
    .busy         (dac_load_busy),
    .done         (dac_load_done)
  );

  for (genvar i = 0; i < N_DAC_CH; i++) begin : g_dac
    logic      f_s_valid, f_s_ready, f_m_valid, f_m_ready, lb_valid;
    dac_word_t f_s_data, f_m_data, lb_data;

    assign f_s_valid = lb_valid | (dma_wr_valid && dma_wr_chan == CHW'(i));
    assign f_s_data  = lb_valid ? lb_data : dma_wr_data;

    axis_fifo #(.W(DAC_W), .DEPTH(DAC_DEPTH)) u_fifo (
      .clk     (clk),
      .rst_n   (rst_n),
      .s_valid (f_s_valid),
      .s_ready (f_s_ready),
      .s_data  (f_s_data),
      .m_valid (f_m_valid),
      .m_ready (f_m_ready),
      .m_data  (f_m_data),
      .count   (dfifo_count[i])
    );

    dac_loopback #(.W(DAC_W), .CNT_W(DCW)) u_play (
      .clk         (clk),
      .rst_n       (rst_n),
      .start       (dac_start),
      .loopback_en (cfg_loopback_en),
      .fifo_valid  (f_m_valid),
      .fifo_ready  (f_m_ready),
      .fifo_data   (f_m_data),
      .fifo_count  (dfifo_count[i]),
      .lb_valid    (lb_valid),
      .lb_data     (lb_data),
      .dac_valid   (play_valid[i]),
      .dac_data    (play_data[i]),
      .busy        (dac_playing[i]),
      .ignored     (play_ignored[i])
    );

    a_no_lost_write: assert property (@(posedge clk) disable iff (!rst_n)
      f_s_valid |-> f_s_ready);
  end

  // a trigger that no channel acts on: during a load, or while playing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_trig_ignored <= 1'b0;
    else        dac_trig_ignored <= (dac_start_raw & dac_load_busy) | (|play_ignored);
  end

  dac_bank_swap #(.N(N_DAC_CH), .W(DAC_W)) u_swap (
    .clk       (clk),
    .rst_n     (rst_n),
    .swap      (swap),
    .in_data   (play_data),
    .in_valid  (play_valid),
    .out_data  (dac_out_data),
    .out_valid (dac_out_valid)
  );

  // ---------------------------------------------------------------- ADC path
  logic [N_ADC_CH-1:0] a_m_valid, a_m_ready, cap_ignored, cap_overflow;
  adc_word_t           a_m_data [N_ADC_CH];

  for (genvar i = 0; i < N_ADC_CH; i++) begin : g_adc
    logic      c_valid, c_ready;
    adc_word_t c_data;

    adc_capture #(.W(ADC_W), .CAP_WORDS(ADC_DEPTH)) u_cap (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (adc_start),
      .rearm      (adc_xfer_done),
      .adc_valid  (adc_in_valid[i]),
      .adc_data   (adc_in_data[i]),
      .fifo_valid (c_valid),
      .fifo_ready (c_ready),
      .fifo_data  (c_data),
      .armed      (adc_armed[i]),
      .capturing  (),
      .full       (),
      .ignored    (cap_ignored[i]),
      .overflow   (cap_overflow[i])
    );

    axis_fifo #(.W(ADC_W), .DEPTH(ADC_DEPTH)) u_fifo (
      .clk     (clk),
      .rst_n   (rst_n),
      .s_valid (c_valid),
      .s_ready (c_ready),
      .s_data  (c_data),
      .m_valid (a_m_valid[i]),
      .m_ready (a_m_ready[i]),
      .m_data  (a_m_data[i]),
      .count   ()
    );
  end

  assign adc_trig_ignored = |cap_ignored;
  assign adc_overflow     = |cap_overflow;

  adc_arbiter_dma #(.N_CH(N_ADC_CH), .W(ADC_W), .REGION(ADC_DEPTH)) u_adc_dma (
    .clk        (clk),
    .rst_n      (rst_n),
    .cmd_valid  (adc_cmd_valid),
    .cmd_ready  (adc_cmd_ready),
    .cmd_len    (adc_cmd_len),
    .fifo_valid (a_m_valid),
    .fifo_ready (a_m_ready),
    .fifo_data  (a_m_data),
    .wr_valid   (ddr_wr_req.valid),
    .wr_ready   (ddr_wr_ready),
    .wr_addr    (ddr_wr_req.addr),
    .wr_data    (ddr_wr_req.data),
    .busy       (adc_xfer_busy),
    .done       (adc_xfer_done)
  );
endmodule
