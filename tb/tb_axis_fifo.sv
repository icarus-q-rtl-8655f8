// tb_axis_fifo: checks the channel FIFO against a queue model.
// Random writes and reads, including bursts that fill the FIFO completely and
// cycles that read and write a full FIFO at once (the loopback case). Every
// word read, s_ready, m_valid and count are compared with the model.
module tb_axis_fifo;
  localparam int W = 16, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic s_valid = 1'b0, s_ready, m_valid, m_ready = 1'b0;
  logic [W-1:0] s_data = '0, m_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  int full_rw = 0;

  axis_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s = %0d, expected %0d", $time, what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      int phase;   // 0: fill-biased, 1: drain-biased, 2: balanced
      phase = (i / 200) % 3;
      @(negedge clk);
      s_valid = (phase == 0) ? ($urandom % 4 != 0) : (phase == 1) ? ($urandom % 4 == 0) : $urandom % 2;
      m_ready = (phase == 1) ? ($urandom % 4 != 0) : (phase == 0) ? ($urandom % 4 == 0) : $urandom % 2;
      s_data  = W'($urandom);
      #1;
      check("count", int'(count), model.size());
      check("m_valid", int'(m_valid), int'(model.size() != 0));
      check("s_ready", int'(s_ready), int'(model.size() < DEPTH || (m_ready && model.size() != 0)));
      if (model.size() != 0) check("m_data", int'(m_data), int'(model[0]));
      @(posedge clk);
      if (model.size() == DEPTH && s_valid && m_ready) full_rw++;
      if (m_valid && m_ready) void'(model.pop_front());
      if (s_valid && s_ready) model.push_back(s_data);
    end
    check("read and write of a full FIFO seen", int'(full_rw > 0), 1);
    $display("full-FIFO read+write cycles: %0d", full_rw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
