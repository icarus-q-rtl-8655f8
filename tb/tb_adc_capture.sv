// tb_adc_capture: checks the ADC trigger gate.
// The converter streams a counter with random gaps. Before the trigger no word
// may reach the FIFO. After the start pulse exactly CAP_WORDS words must be
// written, and they must be the first CAP_WORDS valid words after the start.
// A trigger before re-arming must be ignored and flagged; after rearm the
// channel must capture again. FIFO back-pressure during capture must raise
// overflow.
module tb_adc_capture;
  localparam int W = 16, CAP = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, rearm = 1'b0, adc_valid = 1'b0, fifo_ready = 1'b1;
  logic [W-1:0] adc_data = '0, fifo_data;
  logic fifo_valid, armed, capturing, full, ignored, overflow;
  int checks = 0, failures = 0;
  logic [W-1:0] got[$];
  int n_ign = 0, n_ovf = 0;

  adc_capture #(.W(W), .CAP_WORDS(CAP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (fifo_valid && fifo_ready) got.push_back(fifo_data);
      if (ignored) n_ign++;
      if (overflow) n_ovf++;
    end
  end

  // converter: counter, valid about 3 cycles in 4
  always @(negedge clk) begin
    adc_valid = ($urandom % 4) != 0;
    if (adc_valid) adc_data = adc_data + 1'b1;
  end

  task automatic check(input string what, input int got_v, input int exp);
    checks++;
    if (got_v != exp) begin
      failures++;
      $display("%t %s = %0d, expected %0d", $time, what, got_v, exp);
    end
  endtask

  task automatic trigger_and_check();
    logic [W-1:0] first;
    bit seen = 0;
    got.delete();
    @(negedge clk); #1;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    check("capturing after start", int'(capturing), 1);
    // the first stored word is the first valid word after the start edge
    while (!full) begin
      @(negedge clk); #1;
      if (adc_valid && !seen) begin first = adc_data; seen = 1; end
      @(posedge clk); #1;
    end
    check("words captured", got.size(), CAP);
    for (int k = 0; k < got.size(); k++) check("captured word", int'(got[k]), int'(first) + k);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);
    check("nothing stored before trigger", got.size(), 0);
    check("armed", int'(armed), 1);
    trigger_and_check();
    repeat (10) @(posedge clk);
    check("no words after capture", got.size(), CAP);
    // early trigger: ignored
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (3) @(negedge clk);
    check("early trigger flagged", n_ign, 1);
    check("still full", int'(full), 1);
    @(negedge clk); rearm = 1'b1; @(negedge clk); rearm = 1'b0;
    check("re-armed", int'(armed), 1);
    trigger_and_check();
    // overflow
    @(negedge clk); rearm = 1'b1; @(negedge clk); rearm = 1'b0;
    fifo_ready = 1'b0;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (30) @(negedge clk);
    check("overflow flagged", int'(n_ovf > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
