// dac_dma: loader that moves DAC waveforms from PL DDR into the channel FIFOs.
//
// The host first writes each channel's waveform into the PL DDR memory; a
// command then copies it into the on-chip FIFOs ("AXI DMA blocks" in the
// published block diagram). A command names a set of channels (cmd_mask) and a
// length in words (cmd_len, at most DEPTH). Channels are served in ascending
// order; channel c is read from DDR words c*DEPTH .. c*DEPTH+cmd_len-1. Up to
// MAX_OUT reads are in flight, and a read is only issued while the target FIFO
// has room for it and for every read still outstanding, so the responses can
// always be written without back-pressure. The next channel starts when all
// responses of the current one have arrived.
//
// Interface: cmd_valid/cmd_ready handshake; rd_req.valid/rd_req_ready for read
// requests; rd_rsp.valid carries data in request order (any latency); each
// response is written to FIFO wr_chan with a one-cycle wr_valid (same cycle).
// busy is high from the accepted command until the last word is written; done
// pulses for one cycle at the end. The per-channel address map, the port
// protocol and MAX_OUT are this design's choices; the published design names
// the block and its function only.
module dac_dma
  import icq_pkg::*;
#(
  parameter int unsigned N_CH    = 16,
  parameter int unsigned W       = 256,
  parameter int unsigned DEPTH   = 4096,
  parameter int unsigned MAX_OUT = 8,
  localparam int unsigned CW     = $clog2(DEPTH) + 1,
  localparam int unsigned CHW    = $clog2(N_CH),
  localparam int unsigned OW     = $clog2(MAX_OUT) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [N_CH-1:0] cmd_mask,
  input  logic [CW-1:0]   cmd_len,
  output logic            rd_req_valid,
  input  logic            rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic            rd_rsp_valid,
  input  logic [W-1:0]    rd_rsp_data,
  input  logic [CW-1:0]   fifo_count [N_CH],
  output logic            wr_valid,
  output logic [CHW-1:0]  wr_chan,
  output logic [W-1:0]    wr_data,
  output logic            busy,
  output logic            done
);
  typedef enum logic [1:0] {S_IDLE, S_PICK, S_READ, S_DRAIN} state_t;
  state_t state;

  logic [N_CH-1:0] pending;
  logic [CW-1:0]   len, issued;
  logic [OW-1:0]   outstanding;
  logic [CHW-1:0]  chan;
  logic [CW-1:0]   room;
  logic            issue;

  // lowest pending channel
  logic [CHW-1:0] next_chan;
  always_comb begin
    next_chan = '0;
    for (int i = N_CH - 1; i >= 0; i--)
      if (pending[i]) next_chan = CHW'(i);
  end

  assign room         = CW'(DEPTH) - fifo_count[chan];
  assign rd_req_valid = (state == S_READ) && (issued != len) && (outstanding != OW'(MAX_OUT))
                        && (CW'(outstanding) < room);
  assign rd_req_addr  = ADDR_W'(chan) * ADDR_W'(DEPTH) + ADDR_W'(issued);
  assign issue        = rd_req_valid & rd_req_ready;
  assign cmd_ready    = (state == S_IDLE);
  assign busy         = (state != S_IDLE);
  assign wr_valid     = rd_rsp_valid;
  assign wr_chan      = chan;
  assign wr_data      = rd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pending     <= '0;
      len         <= '0;
      issued      <= '0;
      outstanding <= '0;
      chan        <= '0;
      done        <= 1'b0;
    end else begin
      done        <= 1'b0;
      outstanding <= outstanding + OW'(issue) - OW'(rd_rsp_valid);
      if (issue) issued <= issued + 1'b1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          pending <= cmd_mask;
          len     <= (cmd_len > CW'(DEPTH)) ? CW'(DEPTH) : cmd_len;
          state   <= S_PICK;
        end
        S_PICK: begin
          if (pending == '0 || len == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            chan             <= next_chan;
            pending[next_chan] <= 1'b0;
            issued           <= '0;
            state            <= S_READ;
          end
        end
        S_READ: if (issued + CW'(issue) == len) state <= S_DRAIN;
        S_DRAIN: if (outstanding == OW'(rd_rsp_valid)) state <= S_PICK;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid |-> (outstanding != '0));
endmodule
