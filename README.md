# A 50 MHz, 16-bit arbitrary waveform generator for trapped-ion control

Ions held in a segmented trap are moved, split apart and merged by changing
the voltages on many electrodes together. Laser and microwave pulses that
drive the qubits are shaped with the same kind of signal. The generator
described here produces such voltages. Each board drives three 16-bit DACs
with a new value on every cycle of a 50 MHz clock, which is 20 ns per sample.
One master board and two slave boards give nine channels, which run in lock
step from one USB link and one TTL trigger. An experiment preloads the
waveforms. It then chooses among them in real time using three TTL branch
lines, so it can react to measurement results without a new upload.

This RTL is the FPGA logic of one board. It was written from a published
description of an instrument built around a Xilinx Spartan-3E. Several
things follow that description:
- the channel count and sample width;
- the clock rate and the memory size (360 kbit on chip);
- the four waveform kinds;
- the eight branches and the 40 ns branch-select latency;
- the steps that wait for a trigger;
- the master/slave arrangement.

That description does not give the inner workings, so the following are
this design's own:
- the record format in memory;
- the fixed-point format;
- the host byte protocol;
- the board-to-board signal set;
- the pipeline, which sets the start latency.

The places where the behaviour differs from the published numbers are
listed under "Departures" below.

## Waveforms as records

Each channel has 7680 words of 16 bits (3 × 7680 × 16 bit = 360 kbit per
board). A waveform is a list of records in this memory. A 16-bit header word
starts every record:

| header bits | meaning |
|---|---|
| [15:14] | kind: 0 raw samples, 1 hold, 2 quadratic, 3 cubic |
| [13] | `step_end`: after this record, pause until the next trigger |
| [12] | `branch_end`: after this record, the branch is over |
| [11:0] | zero |

| kind | words | layout (one 16-bit word each, most significant first) |
|---|---|---|
| raw samples | 2 + N | header, N, s0 … s(N−1) |
| hold | 3 | header, D, v0 |
| quadratic | 9 | header, D, v0, d1 (3 words), d2 (3 words) |
| cubic | 12 | header, D, v0, d1, d2, d3 (3 words each) |

D is the segment length in clock cycles, and v0 is its first output code.
N = 0 and D = 0 are both read as 1. Codes are two's complement, with 0 at
mid-scale, meaning 0 V on a ±10 V output.

### Polynomials by forward differences

A quadratic or cubic segment is not stored as polynomial coefficients. It is
stored as its first value and its first three *forward differences*. Each is
a signed 48-bit number in 16.32 fixed point: 16 integer bits, which are the
DAC code, and 32 fraction bits. On every clock the engine does

    v  += d1;   d1 += d2;   d2 += d3;

and outputs the integer part of `v`, truncated. This needs three 48-bit
adders and no multiplier. The output is bit-exact: it matches the closed-form
cubic for as many cycles as the 16-bit duration allows, and the testbenches
check every code against the closed form.

To turn a cubic p(k) = a + b·k + c·k² + e·k³ (k in cycles) into the stored
values:

    v0 = a
    d1 = p(1) − p(0) = b + c + e
    d2 = Δ²p(0)      = 2c + 6e
    d3 = Δ³p        = 6e

All four are scaled by 2^32. A quadratic stores d1 and d2 only, and a hold
stores none. Overflow wraps, so the host must keep the curve within range.
Truncation means a curve that should sit exactly on an integer can show one
code lower. Round v0 up by half an LSB if that matters.

## From trigger to DAC

    wave_ram ─► wave_fetch ─► seg_loader ─► poly_engine ─► dac
       ▲           ▲ start address
       │      branch_table ◄── branch lines
     host writes

- **wave_fetch** reads the memory one word per clock into a 16-word FIFO.
  A trigger restarts it at the branch's start address, and it wraps from the
  last word to word 0.
- **seg_loader** collects the words of one record into a segment descriptor.
  A raw-sample record becomes one single-cycle segment per sample.
- **poly_engine** plays one segment after another. When the current segment
  ends and the next one is ready, the next one starts on the following
  clock, so there is no gap.

### States and triggers

A channel is in one of four states:
- *idle*: no branch is running;
- *armed*: it has been triggered and is waiting for its first record;
- *running*;
- *paused*: a step has ended and it is waiting for a trigger.

A trigger does different things depending on the state:
- **Idle:** the trigger starts the branch that the branch lines select on
  that cycle.
- **Paused:** the trigger continues with the next step of the same branch.
  The branch lines are ignored.
- **Armed or running:** the trigger is ignored, and `trig_ignored` pulses.

A branch can hold any number of steps. Each step can hold any number of
records of any kind, so kinds can be mixed within one waveform. When the
branch ends, the output keeps its last code.

### Latency and the no-gap rule

Counted from the synchronised trigger pulse, the first sample appears n + 3
cycles later, where n is the number of words in the branch's first record.
That is 15 cycles for a cubic record and 6 for a hold. Counted from the TTL
pin, add the two synchroniser cycles: 17 cycles for a cubic record. The 12
cycles of a cubic record are spent reading its 12 words. The other 3 are
pipeline:
- the RAM read, issued on the trigger cycle at the address the branch table
  gives;
- the loader's segment register;
- the engine's output register.

The first words pass straight through the empty FIFO.

After the start, memory is read continuously. A record is read while the
record before it plays. Playback therefore has no gaps as long as **every
segment lasts at least as many cycles as the next record has words**:
- 12 cycles before a cubic record;
- 9 before a quadratic record;
- 3 before a hold;
- raw samples always keep up.

If a segment is shorter than that, the engine keeps its last code for the
missing cycles and pulses `underrun`. It then carries on with the next
segment, intact. Nothing is lost, but the waveform is stretched.

## Board, host link and the slaves

`awg_fpga` is one board: three channels plus the shared front end.

- **USB input** (`usb_fifo_rx`, master only). This reads the FT245RL-style
  parallel FIFO. When RXF# goes low, it pulls RD# low for 3 cycles (60 ns),
  captures the byte, and then keeps RD# high for 4 cycles (80 ns). RXF# passes
  through a two-flop synchroniser. Throughput is at most one byte per 8
  cycles. That is far faster than USB full speed, so the USB chip, not this
  logic, limits the upload rate.
- **Host protocol** (`host_cmd_decoder`). Every command begins with a byte
  `{board[7:6], channel[5:4], opcode[3:0]}`:
  - `0x1` write memory: `addr_hi addr_lo n_hi n_lo`, then n words, high byte
    first, written to consecutive addresses;
  - `0x2` write branch table: `index addr_hi addr_lo`, which sets where a
    branch starts.

  Unknown opcodes are skipped. Every board decodes the whole stream and keeps
  the writes that carry its own board number: the master is 0 and the slaves
  are 1 and 2.
- **TTL inputs** (`ttl_sync`, master only). Two flip-flops per line. The
  trigger's rising edge becomes a one-cycle pulse, and the branch number and
  the pulse both reach the channels two cycles (40 ns) after the pin changes.
  A branch's start address is only looked up when its trigger arrives, so
  preloaded branches can be switched at that rate.
- **Board-to-board link** (`link_t`, 13 bits). The master drives the link
  straight from registers: the received host byte with its strobe, the
  trigger pulse and the branch number. The master's own channels use the same
  registers, and a slave uses `link_in` in their place. All nine channels
  therefore see a trigger on the same clock edge, provided the clock reaches
  every board with a small enough skew. A slave passes `link_in` on to its
  `link_out`.

The DAC clock output, the LVDS output buffers and the clock source are FPGA
I/O primitives and board parts, so they are not in the RTL. `dac[c]` is the
registered code for channel c.

## Sizes

| parameter | default | origin |
|---|---|---|
| channels per board | 3 | published instrument |
| sample and memory word | 16 bit | published (DAC resolution) |
| words per channel | 7680 | published total of 360 kbit, divided over 3 channels |
| branches | 8 (3 lines) | published |
| clock | 50 MHz (not a parameter) | published |
| accumulator | 48 bit, 16.32 | this design |
| segment length | 16 bit (max 65535 cycles, 1.3 ms) | this design |
| boards addressable | 4 (2-bit board number) | this design; 3 used |

What fits in one channel:
- 640 cubic segments;
- 853 quadratic segments;
- 2560 holds;
- 7678 raw samples in a single record.

Longer hold times or slower curves need more than one segment per curve.

## Departures from the published instrument

- **Start latency.** The published figure is 12 cycles (240 ns) before a
  cubic waveform begins, and that delay is described as the time needed to
  read the first data from memory. This design takes 15 cycles from the
  internal trigger pulse and 17 from the pin. Twelve are the record read, and
  the rest are the synchroniser and the registers listed above. Latency of the branch *selection* (40 ns)
  matches.
- **Number of polynomials.** 614 cubic polynomials per channel are quoted.
  Here a cubic record is 12 words, so 640 fit. The published storage format is
  not known, so only the "at least 614" claim is matched.
- **Continuous playback.** The published instrument reads memory continuously
  with no slowdown. This design does the same only under the no-gap rule
  above. For shorter segments it holds the output instead.
- **Trigger semantics** are this design's own choice:
  - a trigger during a running step is ignored;
  - a trigger in a pause resumes the same branch, whatever the branch lines
    show.
- **Number format.** The code format for the DAC (two's complement here) and
  the coefficient format (forward differences here) are not published.
- **Host path.** Only uploads from the host are implemented. No data is read
  back.

## Testbenches

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it exercises |
|---|---|
| `tb_usb_fifo_rx` | RD# pulse widths and byte capture against a FT245RL-style model with random gaps |
| `tb_host_cmd_decoder` | random command streams against a reference decoder |
| `tb_ttl_sync` | 2-cycle latency of the trigger pulse and branch lines; one pulse per edge |
| `tb_wave_ram`, `tb_branch_table` | read and write against a reference array |
| `tb_wave_fetch` | word order, back-pressure, restart, address wrap |
| `tb_seg_loader` | all four record kinds, random back-pressure |
| `tb_poly_engine` | every output code against the closed-form polynomial; steps, pauses, underruns, ignored triggers |
| `tb_awg_channel` | random branches of mixed kinds; 15-cycle start latency; steps; the no-gap rule |
| `tb_awg_fpga` | master and two slaves at reduced memory depth; uploads through the USB model; all modes, steps, branch switches, underruns and ignored triggers counted |
| `tb_awg_fpga_full` | master at full size: an 8 µs ion-transport waveform, 400 cycles as 33 cubic segments; 17-cycle latency from the TTL pin; no underrun |
| `tb_workload_pulses` | full-size channel: 20 µs rectangular pulse; Gaussian with 45 µs FWHM over 180 µs as 100 cubic segments; sin² ramp over 100 µs as 5000 raw samples; each code exact and within 2 codes of the ideal curve |
| `tb_workload_branching` | full-size channel: static, separation (55 µs) and recombination branches loaded once, then 16 separations and recombinations chosen by the branch lines |

`tb/tb_awg_pkg.sv` holds the record builders. `rand_seg` makes a random
segment and `poly_at` gives its closed-form value in 128-bit arithmetic.
`tb/ft245rl_model.sv` models the USB FIFO chip.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/awg_pkg.sv tb/tb_awg_pkg.sv tb/tb_awg_channel.sv \
        --top-module tb_awg_channel -o sim
    obj_dir/sim

Uninitialised state should not matter: everything that is read is reset, and
the testbenches pass when the rest starts at random values
(`+verilator+rand+reset+2`). Each testbench runs in well under a minute. The
full-size ones take longest, at about 20 s each.

## Changing the design

- **Memory depth.** `DEPTH` on `awg_fpga` and `awg_channel`. Addresses wrap
  at `DEPTH − 1`, and the host protocol carries 16-bit addresses.
- **Number format.** `FRAC_W` and `DUR_W` in `awg_pkg`. The record layout
  assumes each polynomial term is three 16-bit words, so changing `FRAC_W`
  also means changing `seg_loader`.
- **Latency.** To shorten the start latency, shorten the path from the
  branch table to the engine. The loader must see all words of a record
  before the engine can start it, so a 12-word cubic record needs at least
  12 cycles unless the memory is made wider.
