# TMIF: moving asynchronous photon events into a synchronous PCM telemetry stream

A sounding-rocket telemetry system is built around a PCM encoder that samples
every input at fixed slots of a repeating frame. A photon-counting detector
does the opposite: it produces a 32-bit event whenever a photon arrives, at
random times, on a clock of its own. The telemetry interface (TMIF) described
here sits between the two. It accepts each event with the detector's
handshake, holds it in a dual-clock FIFO, and hands exactly one event (or an
all-zero word when there is none) to the encoder each time the encoder's
parallel deck strobes it. The encoder gives only a strobe, not a clock, so the
read side runs on a fast local clock that watches for the strobe's rising
edge.

The RTL follows the TMIF flown on the OGRESS soft X-ray rocket (two
identical units, one per GEM detector) as published by McCoy et al., "A
primer for telemetry interfacing in accordance with NASA standards using low
cost FPGAs". Where that description is silent the choices made here are
listed in [What is taken from the published design](#what-is-taken-from-the-published-design-and-what-is-not).

## Signals and clocks

| Signal | Dir. | Width | Clock | Meaning |
|---|---|---|---|---|
| `clk_c` | in | 1 | | detector clock C, 2.5 MHz |
| `clk_cp` | in | 1 | | fast clock C', 100 MHz, strobe search and FIFO read |
| `rst_n` | in | 1 | async | active-low reset |
| `det_clk` | out | 1 | | C forwarded to the detector electronics |
| `det_r` | in | 1 | C | handshake R: high for one C cycle per new event |
| `det_data` | in | 32 | C | event `{x[11:0], y[11:0], pulse_height[7:0]}`, changes with R |
| `enc_q` | in | 1 | none | strobe Q from the encoder, 3 bit periods long |
| `enc_data` | out | 32 | C' | output register latched by the encoder during Q |
| `heartbeat` | out | 1 | C' | 60 Hz square wave |
| `fifo_full` | out | 1 | C | status: the FIFO is full, new events are being lost |
| `dup_masked` | out | 1 | C' | status: one cycle when a strobe found the FIFO empty |
| `data_mask` | out | 32 | C' | status: all ones after a read, zero after an empty strobe |

On the flight unit both clocks come from a PLL fed by a 25 MHz oscillator;
the PLL is outside `tmif_top`, which takes C and C' as inputs. The detector's
converter runs on C, so R and the data bus are synchronous to C. Q is
asynchronous to both clocks. With the flight encoder at 8 Mb/s, Q lasts
375 ns and repeats at 50 kHz (twelve times per 120-word minor frame); each
32-bit event fills two adjacent 16-bit words of the frame.

## Data path

```
            C domain                         |              C' domain
                                             |
 det_r --[negedge flop]-- wr_req --+         |
                                   v         |
 det_data ------------------> tmif_async_fifo (32 x 4096) ---> rd_data --+
                                   fifo_full |  rd_empty  ^              |
                                             |     |      | rd_en        v
 enc_q ------------------------------------> tmif_strobe_detect --> tmif_read_ctrl --> enc_data
                                             |          q_edge          (register + zero mask)
```

**Write side.** The write request is R delayed by half a cycle of C: a flop
on the falling edge of C. The FIFO samples it on the next rising edge, one
full cycle after the edge that launched R, when the converter's data bus (which
lags R by about 10 ns on the real hardware) has long settled. Every R writes
exactly one word. If the FIFO is full the word is dropped.

**FIFO.** `tmif_async_fifo` is a conventional dual-clock FIFO: binary pointers
one bit wider than the address, converted to gray code and passed through two
flops into the other domain. Empty is decided and registered on C', full on
C. Both flags are conservative: after a write, empty stays high for two or
three C' cycles before the word can be read. Reads are in "legacy" mode: the
word appears on `rd_data` at the clock edge that accepts the read request.
The flight unit used the FPGA vendor's FIFO core with the same geometry
(32 bits x 4,096 words) and ports; this module replaces it.

**Strobe detection.** `tmif_strobe_detect` synchronizes Q into C' with two
flops, keeps the previous sample in a third, and registers
`q_edge = q_sync & ~q_prev`: one C' cycle per rising edge of Q, 20 to 30 ns
after it.

**Read control and output register.** `tmif_read_ctrl` decides, on every
`q_edge`, between two cases:

* FIFO not empty: `rd_en` is raised for that one cycle; the word arrives on
  the next cycle and is loaded into `enc_data` on the one after, together with
  an all-ones `data_mask`.
* FIFO empty: nothing is read; `enc_data` and `data_mask` are cleared to zero
  on the next cycle.

## Why the zero mask, and what happens when a strobe meets a write

The encoder latches the TMIF output at every strobe, whether or not a new
event has arrived. Without the mask, a strobe with nothing in the FIFO would
leave the last event on the bus and the encoder would send it again: the
ground would see a duplicate photon. With the mask it sees `00000000`, which
the analysis software reads as "no event". The price is that a genuine event
whose 32 bits are all zero (x = y = 0 and zero pulse height) cannot be told
apart from an empty strobe; the published scheme has the same property.

The delicate case is a strobe that arrives at the moment an event is being
written. The published unit had a fault exactly here, found in laboratory
tests: the output was not masked when a read request coincided with a write
request. In this RTL the decision is taken only from the FIFO's registered,
read-domain empty flag. A word written within the last two or three C' cycles
is not yet visible there, so the strobe is treated as empty and masked; the
word is intact in the FIFO and goes out at the next strobe. No event is
duplicated and none is lost; at worst one event is delayed by one strobe
period (20 us at 50 kHz). The end-to-end testbench places ten strobes 20 ns
before a write edge to exercise this.

Timing at the encoder: `enc_data` is final 3 to 5 C' cycles (30-50 ns) after
the rising edge of Q, against a 375 ns strobe. The encoder model in the tests
latches on the falling edge of Q, and also checks that nothing changes after
the first 100 ns. When the encoder latches within Q is not documented; a
latch earlier than about 50 ns after the rising edge would need a different
arrangement (for example reading one strobe ahead).

## Rates and capacity

Let S_R be the average photon rate and S_Q the strobe rate. At most one
event leaves per strobe, so:

* S_R <= S_Q on average: nothing is lost provided bursts above S_Q fit in the
  FIFO. 4,096 words absorb a burst of 4,096 events beyond what the strobes
  remove; at 50 kHz they drain in 82 ms.
* S_R > S_Q sustained: the FIFO fills and events are lost however deep it is.
  `fifo_full` shows when this happens.

The write side accepts one event per C cycle (2.5 MHz), the read side one per
strobe. Two C' cycles of read latency are negligible against a 20 us strobe
period.

## Heartbeat

`tmif_heartbeat` divides C' by 2 x 833,333 to give a 60.0 Hz square wave,
which the ground display shows as a flashing lamp when the unit is alive.
Only the rate is from the flight description; how it reaches the telemetry is
not, so it is simply a top-level output.

## What is taken from the published design, and what is not

Taken from it: the block structure (FIFO between a C write side and a C'
read side, strobe-edge detection on a fast clock); the write request as R
delayed by half a C cycle; reading only on a strobe edge with the FIFO not
empty; the output register; the 32-bit zero mask on an empty strobe; the
geometry 32 x 4,096; the clock rates 2.5 MHz and 100 MHz; the 12/12/8-bit
event fields; the roughly 60 Hz heartbeat.

Choices of this design:

* The FIFO itself (gray-pointer FIFO in place of the vendor core), its legacy
  read mode, and dropping writes when full. The `fifo_full`, `dup_masked`
  and `data_mask` status outputs are additions.
* How a strobe during a write is handled (see above). The published fix is
  described only as an extra condition on the read request.
* The order of the fields in the event word, `{x, y, pulse_height}`.
* The two-flop synchronizers, the reset scheme (one asynchronous reset,
  released separately in each clock domain by `tmif_reset_sync`), and all
  reset values (output 0, mask all ones, heartbeat low).
* The heartbeat's clock (C'), duty cycle and exact division.
* The PLL, the board oscillator, the 3.3 V / 5 V level translators, the
  detector electronics and the encoder are outside this RTL.
* The encoder's counter deck counts the detector handshakes R directly; how
  R reaches it (through the TMIF board or not) is not described, and `tmif_top`
  does not forward R.

## Files

| File | Contents |
|---|---|
| `rtl/tmif_pkg.sv` | widths, FIFO depth, clock rates, `photon_event_t` |
| `rtl/tmif_top.sv` | one TMIF unit |
| `rtl/tmif_async_fifo.sv` | dual-clock FIFO |
| `rtl/tmif_strobe_detect.sv` | strobe rising-edge detector on C' |
| `rtl/tmif_read_ctrl.sv` | read request, output register, zero mask |
| `rtl/tmif_heartbeat.sv` | 60 Hz heartbeat |
| `rtl/tmif_sync2.sv`, `rtl/tmif_reset_sync.sv` | synchronizers |
| `tb/tb_tmif_top.sv` | end-to-end test at full size |
| `tb/tb_tmif_*.sv` | one self-checking testbench per block |
| `tb/tb_detector_sim.sv` | model of the laboratory detector simulator (event counter, R) |
| `tb/tb_strobe_gen.sv` | model of the laboratory strobe generator (Q for 3 bit periods) |
| `tb/tb_pcm_encoder.sv` | frame model of the PCM encoder: two strobes, 120 x 16-bit minor frames, randomized output |
| `tb/tb_ogress_pcm_chain.sv` | flight configuration: two units, encoder model, ground decommutation |
| `tb/tb_rs232_p2s.sv` | model of the laboratory RS-232 readout (byte FIFO, baud divider, UART with parity) |
| `tb/tb_lab_rs232_chain.sv` | laboratory chain: detector simulator, TMIF, strobe generator, RS-232 |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5, from the top of the tree:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/tmif_pkg.sv tb/tb_tmif_top.sv --top-module tb_tmif_top
./obj_dir/Vtb_tmif_top
```

Replace `tb_tmif_top` with `tb_tmif_async_fifo`, `tb_tmif_strobe_detect`,
`tb_tmif_read_ctrl` or `tb_tmif_heartbeat` for the block tests. Lint the RTL
with `verilator --lint-only -Wall -Irtl -y rtl rtl/tmif_pkg.sv rtl/tmif_top.sv`.

What the tests establish:

* `tb_tmif_top` (default parameters, 17 ms of simulated time, a few seconds
  of run time): events at 50 kHz with strobes at 62.5 kHz and at 50 kHz are
  all delivered once and in order, and idle strobes read zero; ten strobes
  placed 20 ns before a write are masked and the event follows on the next
  strobe; a burst of 5,000 events with no strobes keeps exactly 4,096 and
  drops the rest, which then drain in order under 1 MHz strobes; the
  heartbeat half period is 8.333 ms. The test fails if any of these
  mechanisms never occurs.
* `tb_ogress_pcm_chain` runs the flight arrangement: two units, each read
  twelve times per minor frame by its own strobe, the two strobes offset by
  five words. The encoder model places each event in two adjacent 16-bit
  words every ten words, adds a subframe counter and a 32-bit sync pattern,
  and randomizes the stream with the 15-stage scrambler used on the range
  (out = in ^ s[13] ^ s[14]). A ground model derandomizes, locks and
  decommutates. Detector 1 (41.7 kHz, counting x/y/pulse height) leaves
  spare strobes that arrive as zero words; detector 2 (55.6 kHz, above the
  50 kHz strobe rate, sending a walking one: 1, 2, 4, ... so that a lost or
  repeated word stands out) builds a backlog of about a hundred events that
  drains once the detectors stop.
  Every event arrives once, in order. The word map, the latch instant and
  the sync pattern of the real encoder are not public; those of the model
  are assumptions.
* `tb_lab_rs232_chain` replaces the encoder with the laboratory readout: a
  strobe generator at 62.5 kHz and a transmitter that sends each non-zero
  word as four bytes (start, 8 data bits, even parity, stop) at 115,200 baud;
  a UART receiver checks every bit and word.
* The block testbenches check the FIFO against a queue under random traffic
  and at full/empty (at depth 16), the strobe detector against random
  asynchronous pulses (one edge, one cycle, 2-4 cycles latency), the read
  control against a FIFO model cycle by cycle, and the heartbeat's exact
  period (scaled to 10 cycles).

Not verified: behaviour on the real PCM encoder, clock-domain crossing under
real metastability (two-state simulation cannot show it), and anything about
timing closure on an FPGA.
