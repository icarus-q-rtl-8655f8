// tb_icarusq_workloads: the qubit measurement sequences, at their own sizes, on
// one full-size board (all parameters at their defaults).
//
// Each sequence loads one waveform per DAC channel from a behavioural PL DDR
// memory (random back-pressure and latency), then repeats the measurement as
// an experiment averages it: the DAC and ADC trigger lines fall together, all
// sixteen channels play the whole waveform, all eight ADC channels record a
// full 65,536-sample window, the record is moved to memory and checked word by
// word, and the channels re-arm. Loopback replays the waveform for every
// repetition but the last, which runs with loopback off and so empties the
// FIFOs for the next sequence. Lengths are in 16-sample words at 6.144 GS/s:
//   * cavity readout: 10 us at 5.89824 GS/s = 58,982 samples -> 3,687 words;
//   * Rabi: 300 ns drive + 5 us readout = 32,563 samples -> 2,036 words,
//     three points of the sweep, each a fresh load of a waveform of that
//     length (the sample values are a test pattern, not pulse shapes);
//   * Ramsey with feedback: two pi/2 pulses 5 us apart plus a 5 us readout =
//     61,570 samples -> 3,849 words, with the switching trigger raised after
//     the first pulse so that the second half comes from the other bank.
// Every repetition checks the playback length and data on all channels; the
// Ramsey runs also check the 4-clock switching latency. The number of
// repetitions run is counted; a sequence that never ran counts as a failure.
module tb_icarusq_workloads;
  import icq_pkg::*;
  localparam int ND = N_DAC, NA = N_ADC, DW = DAC_WORDS, AWD = ADC_WORDS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trig_src_dac = 1'b0, trig_src_adc = 1'b0, sw_trig = 1'b0;
  logic cfg_loopback_en = 1'b1, cfg_swap_en = 1'b1;
  logic dac_cmd_valid = 1'b0, dac_cmd_ready;
  logic [ND-1:0] dac_cmd_mask = '0;
  logic [$clog2(DW):0] dac_cmd_len = '0;
  logic dac_load_busy, dac_load_done;
  rd_req_t ddr_rd_req;
  logic ddr_rd_req_ready = 1'b0;
  rd_rsp_t ddr_rd_rsp = '0;
  dac_word_t dac_out_data [ND];
  logic [ND-1:0] dac_out_valid;
  adc_word_t adc_in_data [NA];
  logic [NA-1:0] adc_in_valid = '0;
  logic adc_cmd_valid = 1'b0, adc_cmd_ready;
  logic [$clog2(AWD+1)-1:0] adc_cmd_len = '0;
  logic adc_xfer_busy, adc_xfer_done;
  wr_req_t ddr_wr_req;
  logic ddr_wr_ready = 1'b0;
  logic [ND-1:0] dac_playing;
  logic [NA-1:0] adc_armed;
  logic swap_active, dac_trig_ignored, adc_trig_ignored, adc_overflow;

  logic dac_trig_n, adc_trig_n;
  assign dac_trig_n = ~trig_src_dac;
  assign adc_trig_n = ~trig_src_adc;

  icarusq_board dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  always #1.3 clk = ~clk;          // 384 MHz PL clock (16 samples per clock = 6.144 GS/s)
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("cycle %0d: %s", cyc, msg);
  endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) fail($sformatf("%s = %0d, expected %0d", what, got, exp));
  endtask

  function automatic dac_word_t wave(input int a);
    dac_word_t w;
    for (int j = 0; j < DAC_SPC / 2; j++) w[j*32 +: 32] = 32'(a) * 32'h9e37_79b9 + 32'(j);
    return w;
  endfunction

  // ------------------------------------------------------------ DDR model
  int rd_addr_q[$];
  longint rd_due_q[$];
  adc_word_t wmem [int];
  always @(negedge clk) begin
    ddr_rd_req_ready = ($urandom % 4) != 0;
    ddr_wr_ready     = ($urandom % 4) != 0;
    ddr_rd_rsp.valid = 1'b0;
    if (rd_due_q.size() != 0 && rd_due_q[0] <= cyc) begin
      ddr_rd_rsp.valid = 1'b1;
      ddr_rd_rsp.data  = wave(rd_addr_q.pop_front());
      void'(rd_due_q.pop_front());
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (ddr_rd_req.valid && ddr_rd_req_ready) begin
      rd_addr_q.push_back(int'(ddr_rd_req.addr));
      rd_due_q.push_back(cyc + 1 + $urandom % 4);
    end
    if (ddr_wr_req.valid && ddr_wr_ready) begin
      if (wmem.exists(int'(ddr_wr_req.addr))) fail("ADC word written twice");
      wmem[int'(ddr_wr_req.addr)] = ddr_wr_req.data;
    end
  end

  // ------------------------------------------------------------ ADC streams
  int unsigned adc_cnt = 0;
  always @(negedge clk) begin
    adc_cnt++;
    adc_in_valid = '1;
    for (int c = 0; c < NA; c++) adc_in_data[c] = {32'(c), adc_cnt, ~adc_cnt, 32'hc0de_0000 | 32'(c)};
  end

  // ------------------------------------------------------------ DAC monitor
  int  k = 0;               // word index within the current playback
  int  run_len = 0, last_run = -1;
  bit  swap_prev = 0;
  int  swapped_words = 0;
  longint first_valid_cyc = -1;
  longint first_swapped_cyc = -1;
  always @(negedge clk) if (rst_n) begin
    if (dac_out_valid != '0) begin
      checks++;
      if (dac_out_valid != '1) fail($sformatf("channels not in step: valid=%h", dac_out_valid));
      if (k == 0) first_valid_cyc = cyc;
      for (int i = 0; i < ND; i++) begin
        int src;
        src = swap_prev ? (i + ND / 2) % ND : i;
        checks++;
        if (dac_out_data[i] !== wave(src * DW + k))
          fail($sformatf("DAC out %0d word %0d wrong (swap=%0b)", i, k, swap_prev));
      end
      if (swap_prev) begin
        swapped_words++;
        if (first_swapped_cyc < 0) first_swapped_cyc = cyc;
      end
      k++;
    end else begin
      if (k != 0) last_run = k;
      k = 0;
      for (int i = 0; i < ND; i++) begin
        checks++;
        if (dac_out_data[i] !== '0) fail("DAC output not zero while idle");
      end
    end
    swap_prev = swap_active;
  end

  int adc_ign_pulses = 0;
  int adc_offset = -1;
  always @(posedge clk) if (rst_n) begin
    if (dac_trig_ignored) fail("DAC trigger ignored");
    if (adc_trig_ignored) adc_ign_pulses++;
    if (adc_overflow) fail("ADC FIFO overflow");
  end

  task automatic load(input int len);
    @(negedge clk);
    dac_cmd_valid = 1'b1; dac_cmd_mask = '1; dac_cmd_len = ($clog2(DW)+1)'(len);
    do @(posedge clk); while (!dac_cmd_ready);
    #0.1 dac_cmd_valid = 1'b0;
    @(posedge dac_load_done);
  endtask

  // one repetition: DAC and ADC triggered together, playback, capture, transfer
  task automatic measure(input int len, input int swap_at);
    longint t_sw;
    int unsigned cnt_at_trig;
    last_run = -1;
    wmem.delete();
    @(negedge clk); trig_src_dac = 1'b1; trig_src_adc = 1'b1;
    cnt_at_trig = adc_cnt;
    if (swap_at >= 0) begin
      wait (k == swap_at);
      @(negedge clk); sw_trig = 1'b1; t_sw = cyc;
      first_swapped_cyc = -1;
      wait (first_swapped_cyc >= 0);
      check("switching trigger to swapped DAC words (clocks)", first_swapped_cyc - t_sw, 4);
    end
    wait (last_run >= 0);
    sw_trig = 1'b0;
    trig_src_dac = 1'b0; trig_src_adc = 1'b0;
    check("playback length (one word per clock)", last_run, len);
    wait (adc_armed == '0);
    @(negedge clk);
    adc_cmd_valid = 1'b1; adc_cmd_len = ($clog2(AWD+1))'(AWD);
    @(negedge clk); adc_cmd_valid = 1'b0;
    @(posedge adc_xfer_done);
    repeat (2) @(negedge clk);
    check("ADC channels re-armed", int'(adc_armed), int'({NA{1'b1}}));
    check("ADC words written", wmem.num(), NA * AWD);
    for (int c = 0; c < NA; c++) begin
      int first;
      adc_word_t w;
      w = wmem.exists(c * AWD) ? wmem[c * AWD] : '0;
      first = int'(w[95:64]);
      for (int j = 0; j < AWD; j++) begin
        adc_word_t e;
        e = {32'(c), 32'(first + j), ~32'(first + j), 32'hc0de_0000 | 32'(c)};
        checks++;
        if (!wmem.exists(c * AWD + j) || wmem[c * AWD + j] !== e)
          fail($sformatf("ADC ch%0d word %0d wrong", c, j));
      end
      // the record starts a fixed number of samples after the trigger line rises
      if (c == 0) begin
        if (adc_offset < 0) adc_offset = first - int'(cnt_at_trig);
        check("ADC record start after the trigger (words)", first - int'(cnt_at_trig), adc_offset);
      end
    end
  endtask

  task automatic sequence_run(input int len, input int reps, input int swap_at, inout int n);
    cfg_loopback_en = 1'b1;
    load(len);
    for (int r = 0; r < reps; r++) begin
      if (r == reps - 1) cfg_loopback_en = 1'b0;
      measure(len, swap_at);
      n++;
    end
    cfg_loopback_en = 1'b1;
  endtask

  initial begin
    int n_cavity = 0, n_rabi = 0, n_ramsey = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);

    sequence_run(3687, 2, -1, n_cavity);                 // cavity readout
    for (int p = 0; p < 3; p++) sequence_run(2036, 1, -1, n_rabi);   // Rabi points
    sequence_run(3849, 2, 6, n_ramsey);                  // Ramsey, switch after the first pulse

    check("ADC triggers ignored", adc_ign_pulses, 0);
    $display("ADC record starts %0d words after the trigger line rises", adc_offset);
    checks++;
    if (adc_offset < 1 || adc_offset > 8) fail("ADC record start not within 8 words of the trigger");
    $display("repetitions: cavity=%0d rabi=%0d ramsey_feedback=%0d", n_cavity, n_rabi, n_ramsey);
    checks += 3;
    if (n_cavity == 0) fail("cavity sequence never ran");
    if (n_rabi == 0) fail("Rabi sequence never ran");
    if (n_ramsey == 0) fail("Ramsey sequence never ran");
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
