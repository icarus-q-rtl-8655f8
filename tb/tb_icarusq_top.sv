// tb_icarusq_top: end-to-end test of the synchronised setup at full size (all
// defaults: two boards, each with 16 DAC channels, 8 ADC channels and 65,536
// samples per channel).
//
// Each board has its own behavioural PL DDR memory (random request
// back-pressure, in-order read responses after 1-4 clocks, random write
// back-pressure), so the boards' loads finish at different times. The waveform
// of board b, channel c sits at words c*4096 .. c*4096+4095 of that board's
// memory; word a is a fixed function of b and a. Both boards receive the same
// commands, and the trigger source drives the shared flip-flop. The test:
//   1. loads every channel of both boards with a full 4096-word waveform;
//   2. raises the DAC trigger: all 32 outputs must start on the same clock and
//      play every word, in order, one per clock;
//   3. triggers again without reloading (loopback replay), with a second
//      trigger during playback, which both boards must ignore;
//   4. replays while the switching trigger is raised and lowered: outputs 0-7
//      and 8-15 of each board exchange waveforms SYNC_STAGES+2 clocks after
//      the pin;
//   5. plays once with loopback off, after which a trigger plays nothing;
//   6. triggers during a (short) load: ignored; then plays the short waveform;
//   7. captures 65,536 samples on all sixteen ADC channels from counting ADC
//      streams, checks an early second ADC trigger is ignored, transfers the
//      data to each board's memory, checks every word, that both boards
//      captured from the same sample, and that the channels re-arm.
// On every clock the boards' DAC valids, swap selects and ADC arm states must
// agree. Every mechanism is counted per board; one that never happened on a
// board counts as a failure.
module tb_icarusq_top;
  import icq_pkg::*;
  localparam int NB = 2, ND = N_DAC, NA = N_ADC, DW = DAC_WORDS, AWD = ADC_WORDS;

  logic clk = 1'b0, mclk = 1'b0, rst_n = 1'b0;
  logic trig_src_dac = 1'b0, trig_src_adc = 1'b0;
  logic [NB-1:0] sw_trig = '0;
  logic [NB-1:0] cfg_loopback_en = '1, cfg_swap_en = '1;
  logic [NB-1:0] dac_cmd_valid = '0, dac_cmd_ready;
  logic [ND-1:0] dac_cmd_mask [NB];
  logic [$clog2(DW):0] dac_cmd_len [NB];
  logic [NB-1:0] dac_load_busy, dac_load_done;
  rd_req_t ddr_rd_req [NB];
  logic [NB-1:0] ddr_rd_req_ready = '0;
  rd_rsp_t ddr_rd_rsp [NB];
  dac_word_t dac_out_data [NB][ND];
  logic [ND-1:0] dac_out_valid [NB];
  adc_word_t adc_in_data [NB][NA];
  logic [NA-1:0] adc_in_valid [NB];
  logic [NB-1:0] adc_cmd_valid = '0, adc_cmd_ready;
  logic [$clog2(AWD+1)-1:0] adc_cmd_len [NB];
  logic [NB-1:0] adc_xfer_busy, adc_xfer_done;
  wr_req_t ddr_wr_req [NB];
  logic [NB-1:0] ddr_wr_ready = '0;
  logic [ND-1:0] dac_playing [NB];
  logic [NA-1:0] adc_armed [NB];
  logic [NB-1:0] swap_active, dac_trig_ignored, adc_trig_ignored, adc_overflow;

  icarusq_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  always #1.3 clk = ~clk;          // 384 MHz PL clock (16 samples per clock = 6.144 GS/s)
  initial begin #0.5; forever #1.3 mclk = ~mclk; end
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

  function automatic dac_word_t wave(input int b, input int a);
    dac_word_t w;
    for (int j = 0; j < DAC_SPC / 2; j++)
      w[j*32 +: 32] = 32'(a) * 32'h9e37_79b9 + 32'(j) + (32'(b) << 24);
    return w;
  endfunction

  function automatic adc_word_t adc_sample(input int b, input int c, input int unsigned n);
    return {32'(b) << 16 | 32'(c), 32'(n), ~32'(n), 32'hc0de_0000 | 32'(c)};
  endfunction

  // ------------------------------------------------------------ DDR models
  int rd_addr_q [NB][$];
  longint rd_due_q [NB][$];
  adc_word_t wmem [NB][int];
  always @(negedge clk) begin
    for (int b = 0; b < NB; b++) begin
      ddr_rd_req_ready[b] = ($urandom % 4) != 0;
      ddr_wr_ready[b]     = ($urandom % 4) != 0;
      ddr_rd_rsp[b].valid = 1'b0;
      if (rd_due_q[b].size() != 0 && rd_due_q[b][0] <= cyc) begin
        ddr_rd_rsp[b].valid = 1'b1;
        ddr_rd_rsp[b].data  = wave(b, rd_addr_q[b].pop_front());
        void'(rd_due_q[b].pop_front());
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      if (ddr_rd_req[b].valid && ddr_rd_req_ready[b]) begin
        rd_addr_q[b].push_back(int'(ddr_rd_req[b].addr));
        rd_due_q[b].push_back(cyc + 1 + $urandom % 4);
      end
      if (ddr_wr_req[b].valid && ddr_wr_ready[b]) begin
        if (wmem[b].exists(int'(ddr_wr_req[b].addr))) fail("ADC word written twice");
        wmem[b][int'(ddr_wr_req[b].addr)] = ddr_wr_req[b].data;
      end
    end
  end

  // ------------------------------------------------------------ ADC streams
  int unsigned adc_cnt = 0;
  always @(negedge clk) begin
    adc_cnt++;
    for (int b = 0; b < NB; b++) begin
      adc_in_valid[b] = '1;
      for (int c = 0; c < NA; c++) adc_in_data[b][c] = adc_sample(b, c, adc_cnt);
    end
  end

  // ------------------------------------------------------------ DAC monitor
  int  k [NB];               // word index within the current playback
  int  last_run [NB];
  bit  swap_prev [NB];
  int  swapped_words [NB];
  longint first_swapped_cyc = -1;
  int  n_instep = 0;          // playbacks that started on all boards together
  int  xfer_dones [NB];       // ADC transfers finished, per board
  initial for (int b = 0; b < NB; b++) begin
    k[b] = 0; last_run[b] = -1; swap_prev[b] = 0; swapped_words[b] = 0;
  end
  always @(negedge clk) if (rst_n) begin
    for (int b = 1; b < NB; b++) begin
      checks += 2;
      if (dac_out_valid[b] != dac_out_valid[0]) fail($sformatf("board %0d DAC not in step with board 0", b));
      if (swap_active[b] != swap_active[0]) fail($sformatf("board %0d swap not in step with board 0", b));
      // re-arming follows each board's own transfer, so compare only outside transfers
      if (adc_xfer_busy == '0 && xfer_dones[b] == xfer_dones[0]) begin
        checks++;
        if (adc_armed[b] != adc_armed[0]) fail($sformatf("board %0d ADC arm not in step with board 0", b));
      end
    end
    if (k[0] == 0 && dac_out_valid[0] == '1) begin
      bit all;
      all = 1'b1;
      for (int b = 1; b < NB; b++) if (dac_out_valid[b] != '1) all = 1'b0;
      if (all) n_instep++;
    end
    for (int b = 0; b < NB; b++) begin
      if (dac_out_valid[b] != '0) begin
        checks++;
        if (dac_out_valid[b] != '1) fail($sformatf("board %0d channels not in step: valid=%h", b, dac_out_valid[b]));
        for (int i = 0; i < ND; i++) begin
          int src;
          src = swap_prev[b] ? (i + ND / 2) % ND : i;
          checks++;
          if (dac_out_data[b][i] !== wave(b, src * DW + k[b]))
            fail($sformatf("board %0d DAC out %0d word %0d wrong (swap=%0b)", b, i, k[b], swap_prev[b]));
        end
        if (swap_prev[b]) begin
          swapped_words[b]++;
          if (b == 0 && first_swapped_cyc < 0) first_swapped_cyc = cyc;
        end
        k[b]++;
      end else begin
        if (k[b] != 0) last_run[b] = k[b];
        k[b] = 0;
        for (int i = 0; i < ND; i++) begin
          checks++;
          if (dac_out_data[b][i] !== '0) fail($sformatf("board %0d DAC output not zero while idle", b));
        end
      end
      swap_prev[b] = swap_active[b];
    end
  end

  // ------------------------------------------------------------ mechanism counts
  int n_load [NB], n_play [NB], n_replay [NB], n_ign_play [NB], n_ign_load [NB];
  int n_swap [NB], n_drained [NB], n_adc_cap [NB], n_adc_ign [NB], n_adc_xfer [NB], n_rearm [NB];
  int ign_pulses [NB], adc_ign_pulses [NB], load_dones [NB];
  initial for (int b = 0; b < NB; b++) begin
    n_load[b] = 0; n_play[b] = 0; n_replay[b] = 0; n_ign_play[b] = 0; n_ign_load[b] = 0;
    n_swap[b] = 0; n_drained[b] = 0; n_adc_cap[b] = 0; n_adc_ign[b] = 0; n_adc_xfer[b] = 0;
    n_rearm[b] = 0; ign_pulses[b] = 0; adc_ign_pulses[b] = 0; load_dones[b] = 0; xfer_dones[b] = 0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      if (dac_trig_ignored[b]) ign_pulses[b]++;
      if (adc_trig_ignored[b]) adc_ign_pulses[b]++;
      if (dac_load_done[b]) load_dones[b]++;
      if (adc_xfer_done[b]) xfer_dones[b]++;
      if (adc_overflow[b]) fail($sformatf("board %0d ADC FIFO overflow", b));
    end
  end

  function automatic bit all_reached(input int cnt [NB], input int target [NB]);
    for (int b = 0; b < NB; b++) if (cnt[b] < target[b]) return 1'b0;
    return 1'b1;
  endfunction

  // ------------------------------------------------------------ tasks
  // the same load command to every board; each accepts it when it is ready
  task automatic load(input int len);
    int target [NB];
    for (int b = 0; b < NB; b++) target[b] = load_dones[b] + 1;
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      dac_cmd_mask[b] = '1; dac_cmd_len[b] = ($clog2(DW)+1)'(len);
    end
    dac_cmd_valid = '1;
    while (dac_cmd_valid != '0) begin
      logic [NB-1:0] acc;
      @(posedge clk);
      acc = dac_cmd_valid & dac_cmd_ready;
      #0.1 dac_cmd_valid = dac_cmd_valid & ~acc;
    end
    while (!all_reached(load_dones, target)) @(negedge clk);
    for (int b = 0; b < NB; b++) n_load[b]++;
  endtask

  task automatic dac_trigger();
    @(negedge clk); trig_src_dac = 1'b1;
    repeat (8) @(negedge clk);
    trig_src_dac = 1'b0;
  endtask

  task automatic adc_trigger();
    @(negedge clk); trig_src_adc = 1'b1;
    repeat (8) @(negedge clk);
    trig_src_adc = 1'b0;
  endtask

  function automatic bit all_run_known();
    for (int b = 0; b < NB; b++) if (last_run[b] < 0) return 1'b0;
    return 1'b1;
  endfunction

  // trigger and wait for a playback of len words to finish on every board
  task automatic play(input int len, input bit retrigger, input bit do_swap);
    int ign0 [NB];
    int instep0;
    longint t0, t_sw;
    ign0 = ign_pulses;
    instep0 = n_instep;
    for (int b = 0; b < NB; b++) last_run[b] = -1;
    fork
      dac_trigger();
    join_none
    wait (k[0] == 1);
    check("playbacks started on all boards together", n_instep - instep0, 1);
    if (retrigger) begin
      wait (k[0] == len / 2);
      dac_trigger();
    end
    if (do_swap) begin
      wait (k[0] == len / 4);
      @(negedge clk); sw_trig = '1; t_sw = cyc;
      first_swapped_cyc = -1;
      wait (swap_active[0]); t0 = cyc;
      check("switching trigger to swap select (clocks)", t0 - t_sw, 3);
      wait (first_swapped_cyc >= 0);
      check("switching trigger to swapped DAC words (clocks)", first_swapped_cyc - t_sw, 4);
      wait (k[0] == 3 * len / 4);
      @(negedge clk); sw_trig = '0;
    end
    while (!all_run_known()) @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      check($sformatf("board %0d playback length (one word per clock)", b), last_run[b], len);
      if (retrigger) begin
        check($sformatf("board %0d trigger during playback ignored", b), ign_pulses[b] - ign0[b], 1);
        if (ign_pulses[b] - ign0[b] == 1) n_ign_play[b]++;
      end
      n_play[b]++;
    end
  endtask

  initial begin
    int firsts [NB][NA];
    for (int b = 0; b < NB; b++) begin
      dac_cmd_mask[b] = '0; dac_cmd_len[b] = '0; adc_cmd_len[b] = '0;
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);

    // 1. full load
    load(DW);
    // 2. first playback
    play(DW, 0, 0);
    // 3. loopback replay with an ignored trigger
    play(DW, 1, 0);
    for (int b = 0; b < NB; b++) n_replay[b]++;
    // 4. replay with bank swap
    play(DW, 0, 1);
    for (int b = 0; b < NB; b++) begin
      n_replay[b]++;
      check($sformatf("board %0d swapped words", b), swapped_words[b], DW / 2);
      if (swapped_words[b] > 0) n_swap[b]++;
    end
    // 5. loopback off: plays once, then the FIFOs are empty
    cfg_loopback_en = '0;
    play(DW, 0, 0);
    for (int b = 0; b < NB; b++) last_run[b] = -1;
    dac_trigger();
    repeat (50) @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      check($sformatf("board %0d no playback from drained FIFOs", b), last_run[b], -1);
      if (last_run[b] == -1 && k[b] == 0) n_drained[b]++;
    end
    cfg_loopback_en = '1;
    // 6. trigger during a load
    begin
      int ign0 [NB];
      ign0 = ign_pulses;
      fork
        load(64);
        begin
          wait (dac_load_busy == '1);
          repeat (20) @(negedge clk);
          dac_trigger();
        end
      join
      repeat (10) @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        check($sformatf("board %0d trigger during load ignored", b), ign_pulses[b] - ign0[b], 1);
        check($sformatf("board %0d no playback during load", b), last_run[b], -1);
        if (ign_pulses[b] - ign0[b] == 1) n_ign_load[b]++;
      end
      play(64, 0, 0);
    end

    // 7. ADC capture, early trigger, transfer, re-arm
    begin
      int target [NB];
      for (int b = 0; b < NB; b++)
        check($sformatf("board %0d ADC armed before trigger", b), int'(adc_armed[b]), int'({NA{1'b1}}));
      adc_trigger();
      wait (adc_armed[0] == '0);
      repeat (AWD + 20) @(negedge clk);
      for (int b = 0; b < NB; b++) n_adc_cap[b]++;
      adc_trigger();
      repeat (10) @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        check($sformatf("board %0d early ADC trigger ignored", b), adc_ign_pulses[b], 1);
        if (adc_ign_pulses[b] == 1) n_adc_ign[b]++;
        target[b] = xfer_dones[b] + 1;
        adc_cmd_len[b] = ($clog2(AWD+1))'(AWD);
      end
      @(negedge clk); adc_cmd_valid = '1;
      @(negedge clk); adc_cmd_valid = '0;
      while (!all_reached(xfer_dones, target)) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        n_adc_xfer[b]++;
        check($sformatf("board %0d ADC channels re-armed", b), int'(adc_armed[b]), int'({NA{1'b1}}));
        if (adc_armed[b] == '1) n_rearm[b]++;
        check($sformatf("board %0d ADC words written", b), wmem[b].num(), NA * AWD);
        for (int c = 0; c < NA; c++) begin
          adc_word_t w;
          w = wmem[b].exists(c * AWD) ? wmem[b][c * AWD] : '0;
          firsts[b][c] = int'(w[95:64]);
          for (int j = 0; j < AWD; j++) begin
            checks++;
            if (!wmem[b].exists(c * AWD + j) ||
                wmem[b][c * AWD + j] !== adc_sample(b, c, 32'(firsts[b][c] + j)))
              fail($sformatf("board %0d ADC ch%0d word %0d wrong", b, c, j));
          end
          check("ADC channels of all boards captured in step", firsts[b][c], firsts[0][0]);
        end
      end
    end

    for (int b = 0; b < NB; b++) begin
      int m [11];
      $display("board %0d mechanisms: load=%0d play=%0d replay=%0d ignored_in_play=%0d ignored_in_load=%0d swap=%0d drained=%0d adc_capture=%0d adc_ignored=%0d adc_transfer=%0d rearm=%0d",
               b, n_load[b], n_play[b], n_replay[b], n_ign_play[b], n_ign_load[b], n_swap[b],
               n_drained[b], n_adc_cap[b], n_adc_ign[b], n_adc_xfer[b], n_rearm[b]);
      m = '{n_load[b], n_play[b], n_replay[b], n_ign_play[b], n_ign_load[b], n_swap[b],
            n_drained[b], n_adc_cap[b], n_adc_ign[b], n_adc_xfer[b], n_rearm[b]};
      for (int i = 0; i < 11; i++) begin
        checks++;
        if (m[i] == 0) fail($sformatf("board %0d mechanism %0d never happened", b, i));
      end
    end
    $display("playbacks started on all boards together: %0d", n_instep);
    check("playbacks started on all boards together", n_instep, 5);
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
