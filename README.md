# Four-channel tapped-delay-line TDC with temperature compensation

This is a time-to-digital converter (TDC) that measures the interval between
a start edge and a stop edge. It combines a 100 MHz coarse counter with a
fine interpolator made from a chain of buffer cells. The fine interpolator is
a 189-cell delay line sampled by the clock. The chip was designed for
neutron time-of-flight measurement at a spallation source, in a 180 nm CMOS
process.

A buffer cell's delay is not constant. Across process, supply and
temperature it ranges from about 54 ps to 114 ps. A delay line calibrated
once would therefore report fine times that drift by nanoseconds as the chip
warms up. The chip fixes this by recalibrating itself. Its PLL makes two
pulses whose spacing depends only on the clock period, not on temperature.
These pulses go through the delay lines, and the count of cells they
traverse is used to rebuild the line. The line's *effective length* L is
set to the number of cells that span one clock period at the current
temperature. Fine times are then scaled by that L. After recalibration, a
fixed interval measures the same at any cell delay. In simulation a
1992.35 ns interval reads 1992.35 ns with 62, 73 and 103 ps cells.
Without recalibration the error is about 2.8 ns.

The SystemVerilog in `rtl/` is a register-transfer implementation of that
architecture. Two parts are analogue or cell-level and are given as
behavioural models: the buffer chain and the PLL. The block structure, line
length, clock, channel count and calibration principle come from the chip's
published description. Many details were not published: encoder method,
calibration arithmetic, sequencing, host interface and all widths. Those are
this implementation's own, and the section "What is taken from the chip
description and what is not" lists them.

## Measuring an interval

Each channel has two identical delay lines: line 0 for start and line 1 for
stop. A rising edge entering a line travels down the chain. Cell *i*
switches (i+1)·τ after the edge arrived, where τ is the cell delay. On every
rising clock edge all 189 cell outputs (taps) are registered. The taps then
hold a thermometer code, and the number of ones, *n*, tells how long ago the
edge entered: between n·τ and (n+1)·τ before the clock edge.

So a hit's time is `T = C·Tclk − n·τ`, where C is the value of the coarse
counter at the sampling edge. For an interval:

```
interval = (C_stop − C_start)·Tclk − (n_stop − n_start)·τ
```

The hardware never knows τ directly. It knows L, the number of cells per
clock period, so τ = Tclk / L. The fine time of a hit is computed as

```
f(n) = round(n · 256 / L)            (units of Tclk/256 = 39.0625 ps)
interval = (C_stop − C_start)·256 + f(n_start) − f(n_stop)
```

This uses a reciprocal, `f(n) = (n·recip + 128) >> 8` with
`recip = round(65536 / L)`. `line_reconstruction` computes the reciprocal
once per calibration, so the per-hit path needs only a multiplier. The
interval is a signed 32-bit number of 39.0625 ps units. The coarse
difference is taken modulo 2^22 periods, a 41.9 ms range. Both lines, and
therefore both hits, have the same encoder latency, so the latency cancels.

For this to work, the line must be at least one clock period long at the
fastest cell delay. Otherwise an edge that entered early in a period would
already have left the line when it is sampled. 189 cells × 53.742 ps =
10.16 ns meets that. At the slowest corner (113.863 ps) only the first
≈ 88 cells are used.

A new hit is recognised when tap 0 is 1 in the current sample and was 0 in
the previous one. The start and stop inputs are therefore *levels*. Each
must stay high for at least two clock periods. It must then stay low long
enough for the line to empty (189·τ, at most 21.5 ns) before the next rising
edge on the same input.

## Calibration and reconstruction of the line

The calibration interval is t0 = Tclk/2 = 5 ns. `signal_generator` raises
*cal_start* on a rising clock edge. It re-registers the same signal on the
falling edge to raise *cal_stop* half a period later. Because the PLL
output has an exact 50 % duty cycle, t0 does not depend on temperature. The
routing from the generator to the two lines adds the same delay to both
pulses.

During calibration the select module feeds cal_start into line 0 and
cal_stop into line 1. Both pulses are sampled by the same clock edge,
(Tclk − r) and (Tclk/2 − r) after they were launched, where r is the routing
delay. The difference of the two tap counts is therefore

```
d = n0 − n1 ≈ (Tclk/2) / τ              →   L = round(2 · mean(d))
```

and r cancels. Four pulse pairs are averaged. `computation_module` then
compares the new L with the length recorded now:

- **Different:** it asks `line_reconstruction` to record the new length,
  which then recomputes the reciprocal in 19 cycles.
- **Equal:** nothing changes. The status register reports per channel
  whether the length changed.
- **Error:** a calibration with a missing sample, or a result outside
  [32, 189], sets the channel's error flag and keeps the old length.

Two further rules:

- During calibration the encoders count all 189 taps, not just the recorded
  length. This is what lets the chip find a length *longer* than the
  present one after it has cooled down.
- During measurement the encoders count only the first L taps. This is the
  "reconstructed" line.

Examples:

| cell delay τ | cells per 10 ns | d (sim) | recorded L |
|---|---|---|---|
| 53.742 ps | 186.1 | 93 | 186 |
| 62 ps | 161.3 | – | 162 |
| 72.259 ps | 138.4 | 69 | 138 |
| 73 ps | 137.0 | – | 136 |
| 103 ps | 97.1 | – | 98 |
| 113.863 ps | 87.8 | 44 | 88 |

L can be off by one cell because d is an integer. Without clock jitter
every pulse pair gives the same d, so averaging cannot dither it away. One
cell of error in L shifts a fine time by at most 1/L of a period (≈ 0.7 %),
which stays below one LSB for the fine part.

`control_module` sequences a calibration after reset and whenever the host
writes 1 to bit 0 of register 0. A command that arrives while a calibration
runs is ignored. The sequence, with the select module blocking the
measurement inputs throughout, is:

1. Wait 6 cycles for the lines and encoders to empty.
2. Fire the signal generator 4 times. Each firing gives a 40 ns pulse and a
   40 ns gap, 8 cycles in all.
3. Commit.
4. Wait for every channel's reconstruction to finish.

A calibration takes about 70 clock cycles (0.7 µs).

## Blocks

```
ref_clk, ext_rst_n ──► clock_module ──► clk, rst_n (all blocks)
host bus ◄──► comm_module ──► cal_req ──► control_module ──► cal_mode / cal_clear / cal_commit, coarse
                   ▲                            │ gen_fire
                   │ results, L, status         ▼
                   │                      signal_generator ──► cal_start, cal_stop (to all channels)
      ┌────────────┴─────── tdc_channel × 4 ─────────────────────────────────────────┐
      │ meas_start/stop ─► select_module ─► delay_chain 0 ─► thermo_encoder 0 ─┐      │
      │ cal_start/stop  ─►               ─► delay_chain 1 ─► thermo_encoder 1 ─┼─► computation_module
      │                                    line_reconstruction (L, 1/L) ◄──────┘      │
      └──────────────────────────────────────────────────────────────────────────────┘
```

| module | function | kind |
|---|---|---|
| `tdc_pkg` | shared constants and the result record | package |
| `delay_chain` | 189 buffer cells, delay τ each; every cell output is a tap | behavioural model |
| `thermo_encoder` | tap registers (two rows), hit detection, ones count over the first L taps | RTL |
| `select_module` | calibration pulses or measurement inputs into the two lines; channel enable | RTL |
| `signal_generator` | calibration pulse pair, t0 = Tclk/2 | RTL |
| `line_reconstruction` | recorded effective length L and round(2^16/L) (restoring divider) | RTL |
| `computation_module` | calibration decision; start/stop pairing and interval arithmetic | RTL |
| `tdc_channel` | one channel: the six blocks above | RTL |
| `control_module` | coarse counter and calibration sequencer | RTL |
| `comm_module` | register bus, per-channel holding registers, round-robin arbiter, 16-entry result FIFO | RTL |
| `clock_module` | PLL (multiply by 1, 50 % duty) and reset synchroniser | behavioural model |
| `tdc_top` | the chip: clock, control, signal generator, communication, four channels | RTL |

## Interface and timing of `tdc_top`

| port | width | meaning |
|---|---|---|
| `ref_clk`, `ext_rst_n` | 1, 1 | 100 MHz reference and active-low reset pin |
| `meas_start`, `meas_stop` | 4, 4 | per-channel start and stop (levels, see above) |
| `wr_en`, `addr`, `wdata`, `rdata` | 1, 4, 16, 16 | register bus, synchronous to the internal clock, combinational read |
| `out_valid`, `out_ready`, `out_data` | 1, 1, 34 | result stream; `out_data` = {channel[1:0], interval[31:0]} |
| `locked` | 1 | PLL lock |

Register map:

| addr | name | contents |
|---|---|---|
| 0x0 | CTRL | write bit 0 = 1: calibrate; bits 7:4: channel enables (reset 0xF) |
| 0x1 | STATUS | bit 0 calibrating; 7:4 calibration error; 11:8 length changed at last calibration; 15:12 results lost (saturating) |
| 0x2 | CALCNT | completed calibrations (8 bits) |
| 0x4–0x7 | LEN0–3 | recorded effective length of channel 0–3 |
| 0x8 | LEVEL | result FIFO fill level |

Latency: the taps are sampled at clock edge E. The encoder result appears
after E+2. The interval is registered at E+3. It enters the channel's
holding register at E+4, and reaches the FIFO one or more cycles later,
depending on arbitration. Each channel can hold one result that the FIFO
has not yet taken. A further result from that channel is dropped and
counted in STATUS[15:12].

## What is taken from the chip description and what is not

Taken from the description:

- The block structure: clock module, communication, control, signal
  generator, select module, two delay lines with a computation module, and
  a delay-line reconstruction module.
- Four channels.
- Buffer-cell delay lines of 189 cells.
- Taps sampled by a 100 MHz clock into a thermometer code, then coded to
  binary.
- Calibration by two PLL-derived pulses with a temperature-independent
  spacing.
- Comparing the measured value with the standard one.
- Recording the resulting line length and scaling results by it.
- The cell delays 53.742, 72.259 and 113.863 ps.
- The reported resolutions: 62 ps at 0 °C, 73 ps at 25 °C, 103 ps at 85 °C.

This implementation's own choices, with the reasons:

- **t0 = Tclk/2 from the falling clock edge.** The description gives no
  value for t0.
- **L = round(2·mean(n0 − n1)) over four pairs.** The description gives no
  rule. For 72.259 ps cells this yields 138. The description quotes 136 for
  the typical corner, which may include routing or a different rounding.
- **The "reconstruction" is a mask on the counted taps plus the scale
  factor 1/L.** How the silicon switches the line length is not described.
- **Sampling.** The delay-line figure draws STOP on the registers' clock
  pins. The text says the taps are sampled by the 100 MHz clock. The text
  is followed: both start and stop are timed against the clock, with a
  coarse counter. A coarse counter is not described either, but the
  ≈ 2 µs intervals used to test the chip need one.
- **Table labels.** The table of cell delays labels the fastest row "ss"
  and the slowest "ff", while the text calls the 189-cell case "ff". Only
  the delays are used here.
- **Encoder details:** a second register row against metastability, ones
  counting instead of transition search, and the hit rule.
- **Widths:** 22-bit coarse counter, covering a 40 ms frame of a 25 Hz
  source; fine unit Tclk/256; minimum accepted length 32.
- **When calibration runs:** after reset and on command.
- **The entire host interface** (register bus and result FIFO).
- **The PLL model:** multiply by 1.
- **A channel enable.**

Not modelled: the pad ring, pin assignment, power and analogue effects
such as cell-to-cell delay mismatch and clock jitter. Every cell of the
model has the same delay.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_delay_chain` | tap count = floor(elapsed/τ) at random instants, for three τ, rising and falling edges |
| `tb_thermo_encoder` | ones count with the length mask and with bubbles; exactly one hit per edge; two-cycle latency |
| `tb_select_module` | all 64 input combinations |
| `tb_signal_generator` | t0 = 5.000 ns, 40 ns pulses, 8 busy cycles, a request while busy ignored |
| `tb_line_reconstruction` | reciprocal = round(65536/L) for 40 lengths; 19 busy cycles |
| `tb_computation_module` | calibration decisions (update, keep, three error cases); 60 intervals against an integer reference, including coarse-counter wrap |
| `tb_control_module` | the calibration sequence after reset and after three commands; waits for reconstruction; coarse counting |
| `tb_comm_module` | register map; random multi-channel traffic with back-pressure; FIFO full and lost-result counting |
| `tb_clock_module` | lock after 8 reference edges; 10 ns period with 5 ns high from a 30 % duty reference; reset release |
| `tb_tdc_channel` | one channel with real delay lines: lengths for τ = 113.863 → 53.742 → 72.259 ps; 75 random intervals within 1.5τ + 100 ps |
| `tb_tdc_top` | whole chip at full size (details below) |
| `tb_fixed_interval` | whole chip, 200 measurements of 1992.35 ns at each of 62, 73 and 103 ps (details below) |

`tb_tdc_top` runs the chip at its default size. It covers:

- calibration after reset;
- measurements on all four channels;
- the error growing to ≈ 2.8 ns after τ changes;
- recalibration restoring < 110 ps worst-case error at 53.742, 72.259 and
  113.863 ps;
- a recalibration that keeps the length;
- a disabled channel;
- a full FIFO and dropped results.

It counts each of these mechanisms and fails if one never happened.

`tb_fixed_interval` prints histograms in 50 ps bins. Results from one
simulation run:

| τ | mean | rms | recorded L |
|---|---|---|---|
| 73 ps | 1992.35 ns | 47 ps | 136 |
| 62 ps | 1992.35 ns | 32 ps | 162 |
| 103 ps | 1992.35 ns | 53 ps | 98 |

The spread is pure quantisation. The model has no jitter or cell mismatch,
so it is narrower than a silicon measurement would show.

## Simulating

All files carry a `timescale`. `delay_chain` uses 1 fs precision so that
cell delays such as 72.259 ps are not rounded. The testbenches set τ by a
hierarchical assignment to the `tau_ps` variable of each `delay_chain`
instance. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/tdc_pkg.sv tb/tb_tdc_top.sv \
          -y rtl --top-module tb_tdc_top -Mdir obj_top
./obj_top/Vtb_tdc_top
```

Verilator prints ZERODLY warnings for the delays whose length is a variable
(the cell delay, the PLL half period, random test offsets). None of them is
zero at run time. `-Wno-fatal` keeps those warnings from stopping the build.

Replace `tb_tdc_top` with any other testbench name. The full-chip test
simulates 84 µs in about 10 s. `tb_fixed_interval` simulates 470 µs in
about 35 s.

## Notes for synthesis

`delay_chain` and `clock_module` are not synthesizable. In silicon they are a
placed chain of buffer cells and a PLL macro. Everything else is
synthesizable RTL: flip-flops with asynchronous active-low reset, the
`signal_generator`'s falling-edge flop, and a FIFO memory without reset.

The encoder counts the ones of 189 taps in one cycle. A 100 MHz 180 nm
implementation may need that adder tree pipelined. Extra pipeline stages
would not change the results, because they delay start and stop equally.
The fine-time multiplier is 8 × 17 bits per line.

Parameters with their defaults are in `tdc_pkg`. `N_TAPS` and `TAU_PS` are
also parameters of `tdc_top` and `tdc_channel`.
