// tb_ext_trigger_ctrl: checks the trigger receiver.
// Falling edges on the DAC and ADC trigger lines must give exactly one start
// pulse each, SYNC_STAGES+1 clocks after the edge; rising edges give none.
// The swap output must follow the switching trigger SYNC_STAGES+1 clocks late,
// and only while swap_en is set.
module tb_ext_trigger_ctrl;
  localparam int S = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic dac_trig_n = 1'b1, adc_trig_n = 1'b1, sw_trig = 1'b0, swap_en = 1'b0;
  logic dac_start, adc_start, swap;
  int checks = 0, failures = 0;
  int cyc = 0;

  ext_trigger_ctrl #(.SYNC_STAGES(S)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("cycle %0d: %s = %b, expected %b", cyc, what, got, exp);
    end
  endtask

  // record the output history after each edge, compare with a reference
  // computed from the input history
  logic dac_hist[$], adc_hist[$], sw_hist[$], en_hist[$];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      if (($urandom % 7) == 0) dac_trig_n = ~dac_trig_n;
      if (($urandom % 5) == 0) adc_trig_n = ~adc_trig_n;
      if (($urandom % 9) == 0) sw_trig    = ~sw_trig;
      if (($urandom % 40) == 0) swap_en   = ~swap_en;
      dac_hist.push_back(dac_trig_n);
      adc_hist.push_back(adc_trig_n);
      sw_hist.push_back(sw_trig);
      en_hist.push_back(swap_en);
      @(posedge clk); #1;
      // inputs applied before edge n are sampled at edge n; output after edge n
      // reflects input at edge n-S (start: falling between edges n-S-1 and n-S)
      if (dac_hist.size() > S + 1) begin
        int n;
        n = dac_hist.size() - 1;
        check("dac_start", dac_start, dac_hist[n-S-1] & ~dac_hist[n-S]);
        check("adc_start", adc_start, adc_hist[n-S-1] & ~adc_hist[n-S]);
        check("swap", swap, sw_hist[n-S] & en_hist[n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
