// tb_dac_dma: checks the waveform loader.
// A behavioural memory answers read requests in order after a random delay of
// 1 to 4 clocks and accepts requests with random back-pressure; word a of the
// memory holds a known function of a. Four FIFOs of DEPTH words are modelled
// as queues that a consumer may drain. Each command must write exactly len
// words into every selected channel, read from that channel's region in
// order, nothing into other channels, never overfill a FIFO (one channel
// starts nearly full and is drained slowly), keep at most MAX_OUT reads in
// flight, and pulse done once at the end.
module tb_dac_dma;
  import icq_pkg::*;
  localparam int N_CH = 4, W = 64, DEPTH = 16, MAX_OUT = 4, CW = 5, CHW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready;
  logic [N_CH-1:0] cmd_mask = '0;
  logic [CW-1:0] cmd_len = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr;
  logic [W-1:0] rd_rsp_data, wr_data;
  logic [CW-1:0] fifo_count [N_CH];
  logic wr_valid, busy, done;
  logic [CHW-1:0] wr_chan;
  int checks = 0, failures = 0, cyc = 0;

  dac_dma #(.N_CH(N_CH), .W(W), .DEPTH(DEPTH), .MAX_OUT(MAX_OUT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] mem_word(input logic [ADDR_W-1:0] a);
    return {a ^ 32'h5a5a_0000, ~a};
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("cycle %0d: %s", cyc, msg);
  endtask

  // memory model: in-order responses after a random delay
  logic [ADDR_W-1:0] pend_addr[$];
  int               pend_due[$];
  always @(negedge clk) rd_req_ready = ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (rst_n && rd_req_valid && rd_req_ready) begin
      pend_addr.push_back(rd_req_addr);
      pend_due.push_back(cyc + 1 + $urandom % 4);
    end
  end
  always @(negedge clk) begin
    rd_rsp_valid = 1'b0;
    if (pend_due.size() != 0 && pend_due[0] <= cyc) begin
      rd_rsp_valid = 1'b1;
      rd_rsp_data  = mem_word(pend_addr[0]);
      void'(pend_addr.pop_front());
      void'(pend_due.pop_front());
    end
  end

  // FIFO models
  logic [W-1:0] fifo [N_CH][$];
  bit drain [N_CH];
  int inflight = 0;
  always @(negedge clk) begin
    #1;
    for (int i = 0; i < N_CH; i++) fifo_count[i] = CW'(fifo[i].size());
  end
  always @(posedge clk) begin
    if (!rst_n) begin end
    else begin
    if (wr_valid) fifo[wr_chan].push_back(wr_data);
    for (int i = 0; i < N_CH; i++)
      if (drain[i] && fifo[i].size() != 0 && ($urandom % 3 == 0)) void'(fifo[i].pop_front());
    inflight = inflight + int'(rd_req_valid && rd_req_ready) - int'(rd_rsp_valid);
    checks++;
    if (inflight > MAX_OUT) fail("too many reads in flight");
    for (int i = 0; i < N_CH; i++) if (fifo[i].size() > DEPTH) fail("FIFO overfilled");
    end
  end

  task automatic run_cmd(input logic [N_CH-1:0] mask, input int len);
    int ndone = 0;
    int prior [N_CH];
    for (int i = 0; i < N_CH; i++) prior[i] = fifo[i].size();
    @(negedge clk);
    cmd_valid = 1'b1; cmd_mask = mask; cmd_len = CW'(len);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (busy) begin
      @(negedge clk);
      if (done) ndone++;
    end
    @(negedge clk);
    if (done) ndone++;
    checks++;
    if (ndone != 1) fail($sformatf("done pulsed %0d times", ndone));
    for (int c = 0; c < N_CH; c++) begin
      if (!drain[c]) begin
        int exp_n = prior[c] + (mask[c] ? len : 0);
        checks++;
        if (fifo[c].size() != exp_n) fail($sformatf("ch%0d holds %0d words, expected %0d", c, fifo[c].size(), exp_n));
        for (int k = 0; k < len && mask[c] && k + prior[c] < fifo[c].size(); k++) begin
          checks++;
          if (fifo[c][prior[c] + k] !== mem_word(ADDR_W'(c * DEPTH + k)))
            fail($sformatf("ch%0d word %0d wrong", c, k));
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N_CH; i++) drain[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_cmd(4'b1111, DEPTH);                 // full load of all channels
    for (int i = 0; i < N_CH; i++) fifo[i].delete();
    run_cmd(4'b0101, 7);                     // subset, short
    for (int i = 0; i < N_CH; i++) fifo[i].delete();
    // channel 1 nearly full and drained slowly: loader must wait for room
    for (int k = 0; k < DEPTH - 2; k++) fifo[1].push_back('0);
    drain[1] = 1;
    run_cmd(4'b0010, DEPTH);
    drain[1] = 0;
    checks++;
    if (fifo[1].size() == 0) fail("channel 1 received nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
