// axis_fifo: per-channel sample FIFO ("AXI Stream FIFO") with valid/ready ports.
//
// Every DAC and ADC channel buffers one whole waveform, 65,536 samples, on chip
// so that all channels can start together on a trigger. The FIFO stores DEPTH
// words of W bits (default 4096 words of sixteen 16-bit samples). It is
// first-word-fall-through: m_data shows the oldest word whenever m_valid is
// high, and a word leaves on m_valid && m_ready. A word enters on
// s_valid && s_ready. When full, s_ready is still high in a cycle in which a
// word is being read, so a loopback path can write back each word it reads
// and recirculate a completely full FIFO. The depth follows the published
// design; the word width, the first-word-fall-through behaviour and the
// read-while-full rule are this design's choices. count holds the number of
// stored words. DEPTH must be a power of two.
module axis_fifo #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  assign m_valid = (count != '0);
  assign pop     = m_valid & m_ready;
  assign s_ready = (count != (AW+1)'(DEPTH)) | pop;
  assign push    = s_valid & s_ready;
  assign m_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("DEPTH must be a power of two");
  a_count: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
