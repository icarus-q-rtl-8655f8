# ICARUS-Q board logic: triggered waveform playback and capture for superconducting qubits

ICARUS-Q controls superconducting qubits without analog IQ mixers. Each board
is built around an RFSoC device. Its DACs synthesise the microwave pulses
directly, using an alias of the DAC output in a higher Nyquist zone. Its ADCs
sample the readout signal directly, also in a higher zone. So the digital side
of a board only has to do three things:

* hold one complete waveform per DAC channel on chip, and start all channels
  on the same clock when a hardware trigger arrives;
* record a fixed-length window from every ADC channel when a second trigger
  arrives, and move the record to memory for the host;
* let a third, "switching" trigger replace the waveforms being played while
  they play (a feedback path for mid-circuit corrections).

Several boards run in step because they share one master oscillator, and
because their triggers are re-timed to that oscillator by one external D
flip-flop before they fan out. Every board then sees a trigger change at the
same clock edge.

This repository gives SystemVerilog for that logic: sixteen DAC channels and
eight ADC channels per board, each with a 65,536-sample buffer, and the
trigger path including the external flip-flop shared by two boards. It follows the published ICARUS-Q
description (Park et al., "ICARUS-Q: Integrated Control and Readout Unit for
Scalable Quantum Processors"). That publication describes the blocks and what
they do, but not their insides. Every internal mechanism below (handshakes,
address maps, arbitration, lengths, reset behaviour) is therefore this
design's own choice, and is marked as such.

## Structure

```
 trigger source ──D1,D2──▶ trig_sync (external dual D flip-flop, master clock)
                              │ ~Q1 (DAC trigger), ~Q2 (ADC trigger)
                              ├──────────────▶ board 1 (same as below)
 switching trigger ───────────┤                 board 0:
                              ▼
                       ext_trigger_ctrl ── dac_start ─┐   adc_start ─┐   swap ─┐
                                                      │              │         │
 PL DDR ──read──▶ dac_dma ──▶ 16 × [axis_fifo ◀─loop─ dac_loopback] ─▶ dac_bank_swap ──▶ RF DACs
                                                                     │
 RF ADCs ──▶ 8 × [adc_capture ──▶ axis_fifo] ──▶ adc_arbiter_dma ──write──▶ PL DDR
                      ▲                                 │
                      └──────────── rearm (done) ───────┘
```

| file | role |
|---|---|
| `rtl/icq_pkg.sv` | channel counts, buffer size, sample and word widths, memory-port structs |
| `rtl/trig_sync.sv` | external dual D flip-flop; outputs are the inverted ~Q pins |
| `rtl/ext_trigger_ctrl.sv` | trigger receiver: falling-edge start pulses, swap select |
| `rtl/axis_fifo.sv` | per-channel sample FIFO (first-word-fall-through, valid/ready) |
| `rtl/dac_loopback.sv` | per-DAC player: plays the FIFO on a start pulse and writes each word back |
| `rtl/dac_bank_swap.sv` | exchanges DAC channels 0-7 with 8-15 while swap is high |
| `rtl/dac_dma.sv` | loads waveforms from DDR into the DAC FIFOs |
| `rtl/adc_capture.sv` | per-ADC trigger gate: lets exactly one record into the FIFO, then waits for re-arm |
| `rtl/adc_arbiter_dma.sv` | drains the ADC FIFOs round-robin into per-channel DDR regions |
| `rtl/icarusq_board.sv` | one board: everything except the flip-flop, wired together |
| `rtl/icarusq_top.sv` | the synchronised setup: one flip-flop feeding `N_BOARDS` (default 2) boards |

## Sizes and rates

| quantity | value | origin |
|---|---|---|
| DAC channels | 16 | published |
| active ADC channels | 8 (the device has 16; half are left unused to save block RAM) | published |
| buffer per channel | 65,536 samples | published |
| DAC / ADC code width | 14 / 12 bits, each held in a 16-bit sample | published width; container chosen here |
| DAC samples per clock | 16 (one 256-bit word), so 4,096 words per FIFO | chosen here |
| ADC samples per word | 8 (one 128-bit word), so 8,192 words per FIFO | chosen here |
| buffer memory per board | 16 × 4096 × 256 + 8 × 8192 × 128 = 25,165,824 bits | follows from the above |

With a 384 MHz fabric clock, 16 samples per clock gives the 6.144 GS/s maximum
DAC rate used on the board. A full buffer then lasts 65,536 / 6.144 GS/s =
10.7 µs. At the ADC rate of 1.96608 GS/s a full record lasts 33.3 µs. All
logic runs on one fabric clock. The ADC stream enters with its own valid bit,
so the converter's rate and any clock crossing stay inside the data converter,
which is outside this design.

## Triggers and how boards stay in step

The trigger source is a programmable pulse generator that is not locked to the
master oscillator. Its DAC and ADC trigger lines therefore pass through
`trig_sync`, a dual D flip-flop clocked by the oscillator, before they fan out
to every board. The boards take the inverted outputs (~Q1, ~Q2). A trigger
event is a **falling edge** at the board: a rising edge on the flip-flop's D
input becomes a falling edge at ~Q one oscillator edge later.

In the fabric, `ext_trigger_ctrl` passes each trigger through a two-flop
synchroniser (`SYNC_STAGES`, default 2). It then turns a falling edge into a
one-cycle start pulse. That single pulse goes to all sixteen DAC players, or to
all eight ADC gates. This is what "broadcast" means here, and it is why all
channels of a board start on the same clock. The start pulse comes
`SYNC_STAGES + 1` clocks after the edge reaches the fabric.

The on-chip synchroniser is an addition of this design. The published system
relies on the external flip-flop alone for the DAC and ADC triggers. The
switching trigger, however, does not pass the flip-flop, so it needs a
synchroniser of its own. For uniform latency, all three triggers are treated
the same way.

## The DAC path: load, broadcast, loopback

**Load.** The host writes each channel's waveform into PL DDR: channel `c`
occupies words `c × 4096 … c × 4096 + 4095`. It then issues a load command
(`dac_cmd_mask`, `dac_cmd_len` in 256-bit words). `dac_dma` serves the selected
channels in ascending order. It keeps up to `MAX_OUT` (default 8) reads in
flight, and issues a read only while the target FIFO has room for that read
and for every read still outstanding. Responses may arrive after any latency,
but in order. They are written straight into the FIFO without back-pressure.
`dac_load_done` pulses once when the last word is written.

**Broadcast playback.** On the start pulse, each `dac_loopback` latches the
number of words in its FIFO and reads exactly that many, one per clock. It
sends them to the DAC: the first word reaches the player output two clocks
after the start pulse, and `dac_bank_swap` adds one register. Between
playbacks the DAC input is driven with zero (mid-scale). A trigger that
arrives during a playback is ignored and reported on `dac_trig_ignored`. So is
a trigger that arrives during a load.

**Loopback.** With `cfg_loopback_en` set, every word read from a FIFO is
written back into the same FIFO in the same clock. After a playback the FIFO
again holds the whole waveform, so the next trigger replays it without any
involvement of the host or DDR. This is what keeps the re-arm time between
repetitions of an experiment short. The FIFO accepts a write in the same
cycle as a read even when it is full, so a completely full 65,536-sample
buffer can be recirculated. Without loopback, the FIFO is empty after one
playback, and a further trigger plays nothing.

A load command is held off (`dac_cmd_ready` low) while any channel is playing.
DAC triggers are ignored while a load runs. Between them, these two rules
ensure that the loader and the loopback never write one FIFO in the same
clock.

## Feedback: exchanging the DAC banks

The sixteen channels form two banks: channels 0-7 and 8-15. While
`cfg_swap_en` is set and the switching trigger is high, output `i` carries the
stream of channel `(i + 8) mod 16`. The two banks thus exchange waveforms in
both directions. Both banks keep playing in step underneath; only the routing
to the converters changes. The exchange therefore takes effect mid-waveform
and on a clock boundary. The intended use is to store the "normal" pulse in
one bank and the alternative (for example a correction pulse, or a pulse from
a second version of the sequence) in the other. A trigger produced by the
readout then chooses between them while the sequence runs.

The switching trigger is handled as a level: the banks stay exchanged while
it is high, and return when it falls. Polarity and level behaviour are this
design's choice. From the switching-trigger pin to the first exchanged word at
the DAC inputs takes `SYNC_STAGES + 2` clocks: 4 clocks, or 10.4 ns at
384 MHz. The published system measures about 20 ± 5 ns from trigger to
switched analog output, and that figure includes the converter's own latency.

## The ADC path: triggered capture, transfer, re-arm

The ADCs digitise all the time. `adc_capture` throws their words away until
the ADC start pulse arrives. From the first valid word after the start, it
lets exactly 8,192 words (65,536 samples) per channel into the channel FIFO.
All eight channels open on the same clock, so their records are aligned
sample for sample.

A channel that has captured stays closed ("full"). An ADC trigger that
arrives before it is re-armed is ignored and reported on `adc_trig_ignored`. A
word that the FIFO cannot take during capture is lost and reported on
`adc_overflow`. That cannot happen when the FIFO was drained before the
trigger, since it is exactly one record deep.

The host then issues the transfer command (`adc_cmd_len` words per channel).
`adc_arbiter_dma` writes one word per clock into DDR, to word
`c × 8192 + k` for channel `c`. It picks the channel round-robin among those
that still have words to send, starting after the channel served last. A
write that waits for `ddr_wr_ready` keeps its channel and address. When every
channel has sent its words, `adc_xfer_done` pulses and all capture gates
re-arm. Re-arming only after the transfer completes follows the published
design. The transfer can also be issued before the capture ends: it then
drains the FIFOs as they fill.

## Board and system interfaces

`icarusq_board` is one board. `icarusq_top` wraps one `trig_sync` and
`N_BOARDS` boards. It has the board's ports with one element per board:
single-bit ports become `[N_BOARDS-1:0]` vectors, the rest become unpacked
arrays indexed by board (for example `dac_out_data[N_BOARDS][16]`). Only the
clocks, the reset and the two trigger-source lines are shared. All boards
run on one fabric clock here. It stands for the clocks that the real boards
derive from the common oscillator.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | fabric clock; asynchronous active-low reset |
| `mclk` | in | (top only) master oscillator, clocks the external flip-flop only |
| `trig_src_dac`, `trig_src_adc` | in | (top only) trigger-source lines into the flip-flop (D1, D2); a rising edge here is a trigger |
| `dac_trig_n`, `adc_trig_n` | in | (board only) the flip-flop's ~Q1 and ~Q2; a falling edge is a trigger |
| `sw_trig` | in | switching trigger, active high, level |
| `cfg_loopback_en`, `cfg_swap_en` | in | software settings |
| `dac_cmd_*`, `dac_load_busy`, `dac_load_done` | | load command (valid/ready, channel mask, length in words) |
| `ddr_rd_req` (`rd_req_t`), `ddr_rd_req_ready`, `ddr_rd_rsp` (`rd_rsp_t`) | | DDR read port; responses in request order, any latency |
| `dac_out_data[16]`, `dac_out_valid` | out | 256-bit words (16 samples) to the RF DACs |
| `adc_in_data[8]`, `adc_in_valid` | in | 128-bit words (8 samples) from the RF ADCs |
| `adc_cmd_*`, `adc_xfer_busy`, `adc_xfer_done` | | transfer command |
| `ddr_wr_req` (`wr_req_t`), `ddr_wr_ready` | | DDR write port |
| `dac_playing`, `adc_armed`, `swap_active`, `dac_trig_ignored`, `adc_trig_ignored`, `adc_overflow` | out | status |

The memory ports are simple in-order request/response ports, not AXI4. Each
module's opening comment states its own timing.

## What is not here

Several parts of the system do not belong to the logic. They appear only as
ports of `icarusq_top` and `icarusq_board`, or as models inside the end-to-end testbench:

* the RF DAC and ADC tiles with their multi-tile synchronisation and the
  board's clock distribution (vendor hard blocks and PLLs);
* the processing system and its embedded Linux, Ethernet and the microSD card;
* the DDR4 memory (the testbench has a behavioural one);
* the baluns and connectors, the trigger generator and the master oscillator;
* the low-noise DC current source (an analog circuit set by a
  microcontroller-programmed DAC);
* the host and cloud software.

The system's own interfaces (AXI4 to DDR, AXI-Stream to the data converters,
the processor's register access) are replaced here by the plain ports
described above. The memory widths equal one stream word, so a real
integration would add width converters in front of the ports.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
          rtl/icq_pkg.sv tb/tb_icarusq_top.sv --top-module tb_icarusq_top
./obj_dir/Vtb_icarusq_top
```

Replace `tb_icarusq_top` by any other testbench name. The simulator has two
states, so every testbench works after reset only.

`tb_icarusq_board` runs one board at full size, with all parameters at
their defaults. It takes about 200,000 clocks and a few seconds:

1. load all sixteen channels with 65,536 samples from a DDR model that has
   random latency and back-pressure;
2. play; check that all channels start on the same clock and play every
   word, one per clock;
3. replay through loopback, with an extra trigger during playback that must
   be ignored;
4. replay while the switching trigger goes high and low; check the exchanged
   words and the 3-clock and 4-clock switching latencies;
5. play without loopback; check that a further trigger plays nothing;
6. trigger during a load (ignored), then play the short waveform;
7. capture all eight ADC channels from counting streams; check that an early
   ADC trigger is ignored; transfer; compare every word in memory; check
   that the channels re-arm.

The testbench counts each of these mechanisms and fails if one never happened.

`tb_icarusq_top` runs the same sequence on the two-board setup at its
defaults, through the shared flip-flop. Each board has its own memory model
with its own random latency, so the two loads finish at different times. On
every clock the test also requires both boards' DAC valids and swap selects
to agree. It checks that all 32 DAC outputs start each playback on the same
clock, and that both boards' ADC records begin at the same sample. Each
mechanism is counted per board.

`tb_icarusq_workloads` runs the qubit measurement sequences on one board at
their own lengths (in 16-sample words at 6.144 GS/s): a cavity readout of
10 µs (3,687 words), three points of a Rabi sweep (300 ns drive plus 5 µs
readout, 2,036 words) and a Ramsey sequence with feedback (two π/2 pulses
5 µs apart plus 5 µs readout, 3,849 words), with the switching trigger raised
after the first pulse. Each repetition triggers DAC and ADC together, checks
the whole playback, and moves and checks a full ADC record. Loopback supplies
the repeats; the last repetition runs without it to empty the FIFOs for the
next sequence. It takes about 925,000 clocks.

The unit testbenches run the blocks at small sizes against independent models
(queues, reference formulas). For example, `tb_axis_fifo` checks read and
write on a full FIFO, `tb_adc_arbiter_dma` checks the round-robin order and
that a stalled write stays stable, and `tb_dac_dma` checks that a FIFO is
never overfilled while another agent drains it.

## Changing it

* The number of boards is `N_BOARDS` of `icarusq_top`.
* Channel counts and buffer depth are parameters of `icarusq_top` and
  `icarusq_board` (`N_DAC_CH`, `N_ADC_CH`, `DAC_DEPTH`, `ADC_DEPTH`). The depths must be
  powers of two. The bank swap needs an even channel count.
* Samples per word and the sample width live in `icq_pkg`. The memory-port
  structs follow them.
* `SYNC_STAGES` sets the trigger synchroniser depth, and with it every
  trigger-to-action latency. `MAX_OUT` sets how many DDR reads the loader
  keeps in flight; raise it if the memory latency is long.
* The FIFO reads its array asynchronously (first word fall-through). A block
  RAM mapping would add an output register stage to `axis_fifo`. The player
  would then have to prefetch one word.
