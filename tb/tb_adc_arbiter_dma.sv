// tb_adc_arbiter_dma: checks the ADC transfer logic.
// Four channel FIFOs, modelled as queues, hold captured records of different
// lengths, filled at random times; the memory accepts writes with random
// back-pressure. After the command every word of channel c must be written
// once to address c*REGION + k with its data, write requests must hold while
// not accepted, grants must rotate round-robin while all channels have data,
// and done must pulse once when cmd_len words per channel are written.
module tb_adc_arbiter_dma;
  import icq_pkg::*;
  localparam int N_CH = 4, W = 16, REGION = 8, CW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready;
  logic [CW-1:0] cmd_len = '0;
  logic [N_CH-1:0] fifo_valid, fifo_ready;
  logic [W-1:0] fifo_data [N_CH];
  logic wr_valid, wr_ready, busy, done;
  logic [ADDR_W-1:0] wr_addr;
  logic [W-1:0] wr_data;
  int checks = 0, failures = 0, cyc = 0;

  adc_arbiter_dma #(.N_CH(N_CH), .W(W), .REGION(REGION)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("cycle %0d: %s", cyc, msg);
  endtask

  logic [W-1:0] q [N_CH][$];
  logic [W-1:0] mem [N_CH*REGION];
  bit written [N_CH*REGION];
  int ndone = 0, last_grant = -1, rr_checks = 0;
  bit prev_stall = 0;
  logic [ADDR_W-1:0] prev_addr;

  // FIFO and memory views, refreshed between clock edges
  always @(negedge clk) begin
    #1;
    for (int i = 0; i < N_CH; i++) begin
      fifo_valid[i] = q[i].size() != 0;
      fifo_data[i]  = fifo_valid[i] ? q[i][0] : '0;
    end
    wr_ready = ($urandom % 3) != 0;
  end

  always @(posedge clk) begin
    if (!rst_n) prev_stall = 0;
    if (done) ndone++;
    if (prev_stall) begin
      checks++;
      if (!wr_valid || wr_addr != prev_addr) fail("write request changed while stalled");
    end
    prev_stall = rst_n && wr_valid && !wr_ready;
    prev_addr  = wr_addr;
    if (rst_n && wr_valid && wr_ready) begin
      int g, n;
      g = -1; n = 0;
      for (int i = 0; i < N_CH; i++) if (fifo_ready[i]) begin g = i; n++; end
      checks++;
      if (n != 1) fail("not exactly one FIFO read per write");
      else begin
        checks++;
        if (wr_data !== q[g][0]) fail("write data is not the FIFO head");
        checks++;
        if (wr_addr / REGION != g) fail("write address outside the channel region");
        if (written[wr_addr]) fail("address written twice");
        written[wr_addr] = 1;
        mem[wr_addr] = wr_data;
        // round-robin when every channel has data
        if (fifo_valid == '1 && last_grant >= 0) begin
          checks++; rr_checks++;
          if (g != (last_grant + 1) % N_CH) fail("grant is not round-robin");
        end
        last_grant = g;
        void'(q[g].pop_front());
      end
    end else if (rst_n) begin
      checks++;
      if (fifo_ready != '0) fail("FIFO read without an accepted write");
    end
  end

  initial begin
    int len = REGION;
    for (int i = 0; i < N_CH*REGION; i++) begin written[i] = 0; mem[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // channels 0..3 pre-filled; data = channel*100 + k
    for (int c = 0; c < N_CH; c++) for (int k = 0; k < len; k++) q[c].push_back(W'(c * 100 + k));
    @(negedge clk); cmd_valid = 1'b1; cmd_len = CW'(len);
    @(negedge clk); cmd_valid = 1'b0;
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++; if (ndone != 1) fail($sformatf("done pulsed %0d times", ndone));
    for (int c = 0; c < N_CH; c++) for (int k = 0; k < len; k++) begin
      checks++;
      if (!written[c*REGION+k] || mem[c*REGION+k] !== W'(c * 100 + k)) fail($sformatf("ch%0d word %0d", c, k));
    end
    checks++; if (rr_checks == 0) fail("round-robin never exercised");
    // second transfer: data arrives late and unevenly, shorter length
    for (int i = 0; i < N_CH*REGION; i++) written[i] = 0;
    ndone = 0;
    len = 5;
    @(negedge clk); cmd_valid = 1'b1; cmd_len = CW'(len);
    @(negedge clk); cmd_valid = 1'b0;
    for (int k = 0; k < len; k++) for (int c = 0; c < N_CH; c++) begin
      repeat ($urandom % 3) @(negedge clk);
      q[c].push_back(W'(c * 100 + 50 + k));
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++; if (ndone != 1) fail($sformatf("done pulsed %0d times (second)", ndone));
    for (int c = 0; c < N_CH; c++) for (int k = 0; k < len; k++) begin
      checks++;
      if (!written[c*REGION+k] || mem[c*REGION+k] !== W'(c * 100 + 50 + k)) fail($sformatf("second: ch%0d word %0d", c, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
