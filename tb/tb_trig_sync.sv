// tb_trig_sync: checks the external trigger flip-flop.
// Random levels are applied to D1/D2 before each master-clock edge; after the
// edge ~Q1/~Q2 must equal the inverse of the values applied, and must not
// change between edges.
module tb_trig_sync;
  logic       mclk = 1'b0;
  logic [1:0] d, q_n, expect_q_n;
  int checks = 0, failures = 0;

  trig_sync #(.N_CH(2)) dut (.mclk(mclk), .d(d), .q_n(q_n));

  always #4 mclk = ~mclk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 2'b00;
    @(posedge mclk);
    for (int i = 0; i < 200; i++) begin
      @(negedge mclk);
      d = 2'($urandom);
      expect_q_n = ~d;
      @(posedge mclk);
      #1;
      checks++;
      if (q_n !== expect_q_n) begin
        failures++;
        $display("edge %0d: q_n=%b expected %b", i, q_n, expect_q_n);
      end
      // change D mid-cycle: output must hold until the next edge
      d = ~d;
      #1;
      checks++;
      if (q_n !== expect_q_n) begin
        failures++;
        $display("edge %0d: q_n changed between edges", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
