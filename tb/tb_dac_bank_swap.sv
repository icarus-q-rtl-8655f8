// tb_dac_bank_swap: checks the bank exchange in front of the DACs.
// Random words and valids on all sixteen inputs and a random swap select;
// one clock later output i must carry input i (no swap) or input (i+8) mod 16
// (swap), with its valid bit.
module tb_dac_bank_swap;
  localparam int N = 16, W = 32;
  logic clk = 1'b0, rst_n = 1'b0, swap = 1'b0;
  logic [W-1:0] in_data [N], out_data [N];
  logic [N-1:0] in_valid, out_valid;
  logic [W-1:0] exp_data [N];
  logic [N-1:0] exp_valid;
  int checks = 0, failures = 0, nswap = 0;

  dac_bank_swap #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) in_data[i] = '0;
    in_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      swap = $urandom % 2;
      if (swap) nswap++;
      for (int i = 0; i < N; i++) in_data[i] = W'($urandom);
      in_valid = N'($urandom);
      for (int i = 0; i < N; i++) begin
        int src;
        src = swap ? (i + N / 2) % N : i;
        exp_data[i]  = in_data[src];
        exp_valid[i] = in_valid[src];
      end
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_data[i] !== exp_data[i] || out_valid[i] !== exp_valid[i]) begin
          failures++;
          $display("t=%0d out[%0d]=%h/%b expected %h/%b (swap=%b)", t, i,
                   out_data[i], out_valid[i], exp_data[i], exp_valid[i], swap);
        end
      end
    end
    checks++;
    if (nswap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
