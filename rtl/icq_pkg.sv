// icq_pkg: constants and types shared by the ICARUS-Q programmable-logic blocks.
//
// The board carries sixteen DAC channels and eight active ADC channels; every
// channel buffers 65,536 samples in an on-chip FIFO. Those three numbers come
// from the published design. The 16-bit sample container (holding 14-bit DAC
// and 12-bit ADC codes) and the number of samples moved per fabric clock
// (16 for the DACs, 8 for the ADCs) are this design's own choices, matching the
// usual RF data converter stream widths.
//
// The memory-port structs describe the simple in-order request/response
// ports used here in place of full AXI4 towards the PL DDR memory: a read
// request is accepted on req_valid && req_ready and answered, in order, by a
// one-cycle rsp_valid pulse; a write is accepted on valid && ready.
package icq_pkg;
  localparam int unsigned N_DAC        = 16;
  localparam int unsigned N_ADC        = 8;
  localparam int unsigned FIFO_SAMPLES = 65536;
  localparam int unsigned SAMPLE_W     = 16;
  localparam int unsigned DAC_BITS     = 14;
  localparam int unsigned ADC_BITS     = 12;
  localparam int unsigned DAC_SPC      = 16;   // samples per DAC stream word
  localparam int unsigned ADC_SPC      = 8;    // samples per ADC stream word
  localparam int unsigned DAC_W        = DAC_SPC * SAMPLE_W;        // 256
  localparam int unsigned ADC_W        = ADC_SPC * SAMPLE_W;        // 128
  localparam int unsigned DAC_WORDS    = FIFO_SAMPLES / DAC_SPC;    // 4096
  localparam int unsigned ADC_WORDS    = FIFO_SAMPLES / ADC_SPC;    // 8192
  localparam int unsigned ADDR_W       = 32;   // word address into PL DDR

  typedef logic [DAC_W-1:0]  dac_word_t;
  typedef logic [ADC_W-1:0]  adc_word_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // DAC loader read port towards PL DDR.
  typedef struct packed {
    logic  valid;
    addr_t addr;
  } rd_req_t;

  typedef struct packed {
    logic      valid;
    dac_word_t data;
  } rd_rsp_t;

  // ADC transfer write port towards PL DDR.
  typedef struct packed {
    logic      valid;
    addr_t     addr;
    adc_word_t data;
  } wr_req_t;
endpackage
