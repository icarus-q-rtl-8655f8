// tb_dac_loopback: checks one DAC channel's player together with its FIFO.
// A waveform of L words is written into the FIFO; a start pulse must give
// exactly L consecutive valid words on the DAC side, the first one two clocks
// after the start pulse, in order, and zero output otherwise. With loopback
// the FIFO must hold the waveform again afterwards and a second start must
// replay it; a start during playback must be flagged as ignored; without
// loopback the FIFO must be empty after playback.
module tb_dac_loopback;
  localparam int W = 16, DEPTH = 16, CW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, loopback_en = 1'b1;
  logic s_valid, s_ready, m_valid, m_ready, lb_valid, dac_valid, busy, ignored;
  logic [W-1:0] s_data, m_data, lb_data, dac_data;
  logic [CW-1:0] count;
  logic tb_valid = 1'b0;
  logic [W-1:0] tb_data = '0;
  int checks = 0, failures = 0, cyc = 0;

  assign s_valid = lb_valid | tb_valid;
  assign s_data  = lb_valid ? lb_data : tb_data;

  axis_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data, .count);

  dac_loopback #(.W(W), .CNT_W(CW)) dut (
    .clk, .rst_n, .start, .loopback_en,
    .fifo_valid(m_valid), .fifo_ready(m_ready), .fifo_data(m_data), .fifo_count(count),
    .lb_valid, .lb_data, .dac_valid, .dac_data, .busy, .ignored);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("cycle %0d: %s = %0d, expected %0d", cyc, what, got, exp);
    end
  endtask

  function automatic logic [W-1:0] wave(input int k, input int seed);
    return W'(k * 37 + seed * 1000 + 5);
  endfunction

  task automatic load(input int len, input int seed);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      tb_valid = 1'b1;
      tb_data  = wave(k, seed);
    end
    @(negedge clk);
    tb_valid = 1'b0;
  endtask

  // pulse start, then watch the DAC side; optionally pulse start again mid-way
  task automatic play(input int len, input int seed, input bit restart_mid);
    int got = 0, ign = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    // one edge after start: busy, output not yet valid
    check("dac_valid one clock after start", int'(dac_valid), 0);
    for (int c = 0; c < len + 4; c++) begin
      if (restart_mid && c == len / 2) start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      if (ignored) ign++;
      if (c < len) begin
        check("dac_valid during playback", int'(dac_valid), 1);
        check("dac_data", int'(dac_data), int'(wave(c, seed)));
      end else begin
        check("dac_valid after playback", int'(dac_valid), 0);
        check("dac_data idle", int'(dac_data), 0);
      end
    end
    if (restart_mid) check("start during playback flagged", ign, 1);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // idle: start with an empty FIFO gives nothing
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (3) @(negedge clk);
    check("no output from empty FIFO", int'(dac_valid), 0);

    load(11, 1);
    check("count after load", int'(count), 11);
    play(11, 1, 1'b0);
    check("count after loopback playback", int'(count), 11);
    play(11, 1, 1'b1);                        // replay, and a start while playing
    check("count after replay", int'(count), 11);

    // full FIFO with loopback
    loopback_en = 1'b0;
    play(11, 1, 1'b0);
    check("count after playback without loopback", int'(count), 0);
    loopback_en = 1'b1;
    load(DEPTH, 2);
    play(DEPTH, 2, 1'b0);
    check("count after full-FIFO loopback", int'(count), DEPTH);
    play(DEPTH, 2, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
