// tb_icarusq_board: end-to-end test of one board at full size (all defaults:
// 16 DAC channels, 8 ADC channels, 65,536 samples per channel). The trigger
// inputs are driven as the flip-flop's inverted outputs would drive them:
// high when idle, low while the trigger is raised.
//
// A behavioural PL DDR memory (random request back-pressure, in-order read
// responses after 1-4 clocks, random write back-pressure) holds the waveform
// of channel c at words c*4096 .. c*4096+4095; word a is a fixed function of a.
// The test then:
//   1. loads every channel with a full 4096-word (65,536-sample) waveform;
//   2. pulls the DAC trigger input low: all sixteen outputs must
//      start on the same clock and play every word, in order, one per clock;
//   3. triggers again without reloading (loopback replay), with a second
//      trigger during playback, which must be ignored;
//   4. replays while the switching trigger is raised and lowered: outputs 0-7
//      and 8-15 must exchange waveforms SYNC_STAGES+2 clocks after the pin;
//   5. plays once with loopback off, after which a trigger plays nothing;
//   6. triggers during a (short) load: ignored; then plays the short waveform;
//   7. captures 65,536 samples on all eight ADC channels from a counting ADC
//      stream, checks an early second ADC trigger is ignored, transfers the
//      data to memory, checks every word and that the channels re-arm.
// Every mechanism is counted; one that never happened counts as a failure.
module tb_icarusq_board;
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
    repeat (400_000) @(posedge clk);
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

  // ------------------------------------------------------------ mechanism counts
  int n_load = 0, n_play = 0, n_replay = 0, n_ign_play = 0, n_ign_load = 0;
  int n_swap = 0, n_drained = 0, n_adc_cap = 0, n_adc_ign = 0, n_adc_xfer = 0, n_rearm = 0;
  int ign_pulses = 0, adc_ign_pulses = 0;
  always @(posedge clk) if (rst_n) begin
    if (dac_trig_ignored) ign_pulses++;
    if (adc_trig_ignored) adc_ign_pulses++;
    if (adc_overflow) fail("ADC FIFO overflow");
  end

  // ------------------------------------------------------------ tasks
  task automatic load(input int len);
    @(negedge clk);
    dac_cmd_valid = 1'b1; dac_cmd_mask = '1; dac_cmd_len = ($clog2(DW)+1)'(len);
    do @(posedge clk); while (!dac_cmd_ready);
    #0.1 dac_cmd_valid = 1'b0;
    @(posedge dac_load_done);
    n_load++;
  endtask

  task automatic dac_trigger();
    @(negedge clk); trig_src_dac = 1'b1;
    repeat (8) @(negedge clk);
    trig_src_dac = 1'b0;
  endtask

  // trigger and wait for a playback of len words to finish
  task automatic play(input int len, input bit retrigger, input bit do_swap);
    int ign0;
    longint t0, t_sw;
    ign0 = ign_pulses;
    last_run = -1;
    fork
      dac_trigger();
    join_none
    wait (k == 1);
    if (retrigger) begin
      wait (k == len / 2);
      dac_trigger();
    end
    if (do_swap) begin
      wait (k == len / 4);
      @(negedge clk); sw_trig = 1'b1; t_sw = cyc;
      first_swapped_cyc = -1;
      wait (swap_active); t0 = cyc;
      check("switching trigger to swap select (clocks)", t0 - t_sw, 3);
      wait (first_swapped_cyc >= 0);
      check("switching trigger to swapped DAC words (clocks)", first_swapped_cyc - t_sw, 4);
      wait (k == 3 * len / 4);
      @(negedge clk); sw_trig = 1'b0;
    end
    wait (last_run >= 0);
    check("playback length (one word per clock)", last_run, len);
    if (retrigger) begin
      check("trigger during playback ignored", ign_pulses - ign0, 1);
      if (ign_pulses - ign0 == 1) n_ign_play++;
    end
    n_play++;
  endtask

  initial begin
    int firsts [NA];
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);

    // 1. full load
    load(DW);
    // 2. first playback
    play(DW, 0, 0);
    // 3. loopback replay with an ignored trigger
    play(DW, 1, 0);
    n_replay++;
    // 4. replay with bank swap
    play(DW, 0, 1);
    n_replay++;
    check("swapped words", swapped_words, DW / 2);
    if (swapped_words > 0) n_swap++;
    // 5. loopback off: plays once, then the FIFOs are empty
    cfg_loopback_en = 1'b0;
    play(DW, 0, 0);
    last_run = -1;
    dac_trigger();
    repeat (50) @(negedge clk);
    check("no playback from drained FIFOs", last_run, -1);
    if (last_run == -1 && k == 0) n_drained++;
    cfg_loopback_en = 1'b1;
    // 6. trigger during a load
    begin
      int ign0;
      ign0 = ign_pulses;
      fork
        load(64);
        begin
          wait (dac_load_busy);
          repeat (20) @(negedge clk);
          dac_trigger();
        end
      join
      repeat (10) @(negedge clk);
      check("trigger during load ignored", ign_pulses - ign0, 1);
      check("no playback during load", last_run, -1);
      if (ign_pulses - ign0 == 1) n_ign_load++;
      play(64, 0, 0);
    end

    // 7. ADC capture, early trigger, transfer, re-arm
    check("ADC armed before trigger", int'(adc_armed), int'({NA{1'b1}}));
    @(negedge clk); trig_src_adc = 1'b1;
    repeat (8) @(negedge clk); trig_src_adc = 1'b0;
    wait (adc_armed == '0);
    repeat (AWD + 20) @(negedge clk);
    n_adc_cap++;
    @(negedge clk); trig_src_adc = 1'b1;
    repeat (8) @(negedge clk); trig_src_adc = 1'b0;
    repeat (10) @(negedge clk);
    check("early ADC trigger ignored", adc_ign_pulses, 1);
    if (adc_ign_pulses == 1) n_adc_ign++;
    @(negedge clk);
    adc_cmd_valid = 1'b1; adc_cmd_len = ($clog2(AWD+1))'(AWD);
    @(negedge clk); adc_cmd_valid = 1'b0;
    @(posedge adc_xfer_done);
    n_adc_xfer++;
    repeat (2) @(negedge clk);
    check("ADC channels re-armed", int'(adc_armed), int'({NA{1'b1}}));
    if (adc_armed == '1) n_rearm++;
    check("ADC words written", wmem.num(), NA * AWD);
    for (int c = 0; c < NA; c++) begin
      adc_word_t w;
      w = wmem.exists(c * AWD) ? wmem[c * AWD] : '0;
      firsts[c] = int'(w[95:64]);
      for (int j = 0; j < AWD; j++) begin
        adc_word_t e;
        e = {32'(c), 32'(firsts[c] + j), ~32'(firsts[c] + j), 32'hc0de_0000 | 32'(c)};
        checks++;
        if (!wmem.exists(c * AWD + j) || wmem[c * AWD + j] !== e)
          fail($sformatf("ADC ch%0d word %0d wrong", c, j));
      end
      check("ADC channels captured in step", firsts[c], firsts[0]);
    end

    $display("mechanisms: load=%0d play=%0d replay=%0d ignored_in_play=%0d ignored_in_load=%0d swap=%0d drained=%0d adc_capture=%0d adc_ignored=%0d adc_transfer=%0d rearm=%0d",
             n_load, n_play, n_replay, n_ign_play, n_ign_load, n_swap, n_drained, n_adc_cap, n_adc_ign, n_adc_xfer, n_rearm);
    begin
      int m [11];
      m = '{n_load, n_play, n_replay, n_ign_play, n_ign_load, n_swap, n_drained, n_adc_cap, n_adc_ign, n_adc_xfer, n_rearm};
      for (int i = 0; i < 11; i++) begin
        checks++;
        if (m[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
