# Time-over-threshold in one FPGA TDC channel

A leading-edge discriminator marks the arrival time of a detector pulse with
its rising edge and the pulse's charge with its width (time over threshold,
TOT). The width is what corrects the discriminator's time walk. The usual way
to measure it is to spend two TDC channels on every signal: one for the
rising edge, and one for the inverted signal, whose rising edge is the
original trailing edge. This design measures both edges in a **single
carry-chain TDC channel**, so the width costs no second delay line, no
second encoder and no second FIFO.

The trick lies in the FPGA carry chain itself. Every bit of a Xilinx
Virtex-5 CARRY4 cell has a carry multiplexer (MUXCY) and an XOR gate. With
every multiplexer select tied to 1 the chain is a pure delay line, and the
XOR of each bit computes `1 ^ carry_in`, which is the inverted carry:

| Hit edge | carry outputs `CO` | XOR outputs `O` |
|----------|--------------------|-----------------|
| rising   | go 0 -> 1, bottom to top | go 1 -> 0 |
| falling  | go 1 -> 0 | go 0 -> 1, bottom to top |

Taps taken from `CO` therefore show a rising edge, and taps taken from `O`
show a falling edge, as the *same* kind of thermometer code: ones filling the
line from the bottom. Because the two codes look alike, one encoder can serve
both edges. All it has to be told is which code to encode, and when.

## Data path

```
          +-- CARRY4 x N_CARRY4 (tdc_delay_line, carry4) ---------------+
 hit ---->| CO0,CO3 of each cell -> lead_taps  [2N]                     |
          | O2      of each cell -> trail_taps [N]                       |
          +---------------------------------------------------------------+
                 |                         |
          L registers (every clk)   T registers (every clk)   tdc_tap_register
                 |  lead_code[0]           |  trail_code[0]
                 |      -> LD              |      -> TD                 hit_detect x2
                 +----------+  +-----------+
                            |  |
             code mux (LD: leading, TD: trailing)               tdc_edge_control
             detect mux -> DFF -> latch -> DFF -> wr_en
                            |
                  thermometer encoder (binary search)           tdc_encoder
                            |  fine           coarse            coarse_counter
                            v                  v
                {edge flag, coarse, fine} -> dual-clock FIFO    async_fifo
```

`tot_tdc_channel` wires one such channel together; `tot_tdc_top` places
`N_CH` = 2 channels on one 250 MHz clock, as on the original evaluation
board.

### The two tap sets

The leading line takes two taps per CARRY4, `CO0` and `CO3`. The first stage
of each cell is slower than the other three, because of the multiplexer at
the cell's entry. So `CO0` and `CO3` split a cell into two roughly equal
bins, where four taps would give four unequal ones. The trailing line takes
only `O2`, one tap per cell, because the two middle XOR outputs cannot split
a cell evenly. Hence the trailing bin is about twice the leading one: about
39 ps against 78 ps with the model delays, close to the 38 ps and 78 ps
measured on the original device.

With the default 52 cells the lines have 104 leading and 52 trailing taps.
At 78 ps per cell the line is 4056 ps long. That is just over one 4 ns clock
period plus the first tap's delay, so every edge is caught within one clock
of entering the line. The original hardware used 105 and 51 bins per clock
period. The chain length itself was not published; 52 is derived from those
bin counts.

### Edge detection and the shared encoder

`hit_detect` is the edge detect unit: a NOT gate, a flip-flop and an AND
gate, `out = in & ~in_previous`. Its output is a one-clock pulse when its
input rises. One copy (LD) watches the sampled first leading tap. It fires in
the clock cycle in which a rising Hit edge first shows in the sampled code.
The other copy (TD) watches the sampled first trailing tap and fires for a
falling edge. Because the detectors look at sampled taps, their pulses are
fully synchronous. They also mark exactly the cycle whose code contains the
new edge.

The pulses then do three jobs (`tdc_edge_control`):

* they steer the code multiplexer. The trailing code, half as wide, is
  zero-extended and is still a valid thermometer code;
* through a second multiplexer and one flip-flop they become `latch`. This
  stores the encoder result and the coarse count;
* through a second flip-flop they become `wr_en`, the FIFO write.

Timing, for an edge first seen in the taps sampled at clock edge *k*:

| clock cycle | event |
|-------------|-------|
| k   | LD or TD high; code multiplexer selects the code; encoder input register loads it at edge k+1 (only on a detect pulse) |
| k+1 | `latch` high; binary search on the registered code; `fine` and `coarse` stored at edge k+2 |
| k+2 | `wr_en` high; record written to the FIFO at edge k+3 |

Each stage holds one edge for one cycle, so the pipeline could take an edge
every clock.

The encoder (`tdc_encoder`) takes a code only when a detect pulse says a
real edge is in it, and finds the 0-1 border by dichotomizing search. The
code is zero-padded to 128 bits. Starting from 0, for b = 6 down to 0 it tests
bit `result + 2^b - 1` and adds `2^b` if that bit is set. Seven probes replace
a 104-input population count. The search is exact only for a true
thermometer code, which is why the input rule below matters.

### Input rule and dead time

A code is a clean thermometer code only if the line held a single level
before the edge entered it. So Hit must stay high, and low, for at least one
clock period each. Two leading edges are thus at least two clocks (8 ns at
250 MHz) apart, and that is the channel's dead time. The encoder adds none.
The published text also quotes "about 10 ns" in its summary. This
implementation follows the two-clock figure.

The model's line is 56 ps longer than a clock period. So in simulation a
level has to last slightly longer than one clock (the testbenches use
>= 4.1 ns) before the whole line is guaranteed clean. On hardware the margin
depends on the real chain length.

If LD and TD ever fire in the same cycle, the leading edge wins. This breaks
the input rule, and an assertion in `tdc_edge_control` reports it.

## Output records and how to use them

Each FIFO word is 32 bits at the default sizes (`tdc_pkg::tdc_word_t`):

| bits  | field | meaning |
|-------|-------|---------|
| 31    | `edge_type` | 0 leading, 1 trailing |
| 30:7  | `coarse` | free-running clock count, latched two clocks after the edge was sampled |
| 6:0   | `fine`  | number of taps the edge had passed at the sampling clock edge |

An edge's time, up to one constant offset common to all records, is

    t = coarse * T_clk - d(fine)

Here `d(n)` is the delay to the n-th tap. Both lines are non-uniform, the
leading one by construction, so `d` must come from a calibration. On
hardware that is a code-density test, which the design does not perform. The
testbenches use the model's known tap delays and take the centre of each
bin. The pulse width is `t_trailing - t_leading` of consecutive records of
one channel. The offset cancels, and the coarse counter may wrap (24 bits,
67 ms at 250 MHz) as long as the subtraction is done modulo 2^24. The
subtraction is left to whatever reads the FIFO; the channel only delivers the
two time stamps.

The FIFO (`async_fifo`) is a 512-word Gray-pointer dual-clock FIFO. Its
write clock is the system clock. It drops writes when full and then sets a
sticky `overflow` flag. Read data
appears on `rd_data` after the `rd_clk` edge at which `rd_en` is high and
`empty` is low.

## What follows the published design and what does not

Taken from the published design:

* the CARRY4 chain with `CO0`/`CO3` leading taps and `O2` trailing taps;
* sampling of all taps every clock;
* the NOT/DFF/AND detect units on the first tap of each line;
* the two 2:1 multiplexers;
* the one- and two-clock delays to the latch and the FIFO write;
* one binary-search encoder shared by both edges;
* a binary coarse counter latched by `latch`;
* a single FIFO holding both edge types, marked by flag bits;
* two channels on a 250 MHz clock.

Choices made here, where the source is silent:

* chain length (52 cells), coarse width (24 bits), fine width (7 bits),
  FIFO depth (512), record layout and flag polarity;
* the encoder's pipeline register and search order;
* zero-extension of the trailing code;
* leading-edge priority;
* synchronous resets on the control path. The tap registers are
  deliberately not reset: the idle trailing taps read 1, and a reset to 0
  would look like a falling edge when it is released;
* the FIFO's internals and its overflow flag;
* one coarse counter per channel, as drawn for a single channel, rather
  than one shared counter.

## Implementation notes

* `carry4` is a **simulation model** of the vendor primitive. It has
  transport delays on continuous assignments: 30/16/16/16 ps per carry stage
  and 10 ps per XOR, chosen so that a cell takes the measured 78 ps. For the
  FPGA, replace it with the vendor's CARRY4 and keep the chain in one column
  with placement constraints (not included). Everything else is
  synthesizable. A synthesis run that keeps the model instead of the
  primitive ignores the delays. Each tap then collapses into a wire from
  `hit`, so such a netlist does not measure anything.
* The model has no jitter, no metastability and no clock skew across the
  sampling registers. Simulated widths are therefore better than on silicon.
  The 23 ns test gives an RMS error of about 26 ps, which is pure
  quantisation; the hardware measured about 37 ps. The non-linearity that
  dominated the hardware's bin widths is not modelled beyond the uneven first
  stage.
* Verilator flags unused carry-chain outputs (`CO1`, `CO2`, `O0`, `O1`,
  `O3`, the last `CO3`). They are unused by design.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The reference tap delays live in
`tb/tdc_ref_pkg.sv`, written independently of the model. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tot_tdc_top_tb \
    -y rtl -y tb +libext+.sv -Irtl rtl/tdc_pkg.sv tb/tdc_ref_pkg.sv tb/tot_tdc_top_tb.sv
./obj_dir/Vtot_tdc_top_tb
```

Replace `tot_tdc_top_tb` with any other testbench name to run that one.

| testbench | what it checks |
|-----------|----------------|
| `carry4_tb` | stage-by-stage delays of CO and O, both edges, DI path |
| `tdc_delay_line_tb` | tap words against reference delays, both edges, 8 cells |
| `tdc_tap_register_tb` | one-clock sampling |
| `hit_detect_tb` | one-cycle pulse on every 0->1 of a random stream |
| `tdc_edge_control_tb` | code selection, latch/wr_en delays, flag alignment |
| `tdc_encoder_tb` | every code length 0..104, latch and hold |
| `coarse_counter_tb` | count, latch, wrap |
| `async_fifo_tb` | order and content across unrelated clocks, full, overflow, drain |
| `tot_tdc_channel_tb` | one channel, default size: every record and every rebuilt width |
| `tot_tdc_top_tb` | both channels at default parameters, see below |
| `tot_tdc_code_density_tb` | code-density (DNL) histogram of 4000 random-phase pulses, default parameters |

In `tot_tdc_top_tb`, channel 0 gets random pulses, fixed 23 ns pulses and
bursts at the minimum two-clock spacing, while channel 1 gets 23 ns pulses at
random phases. Every record is checked bit for bit against a prediction made
from the reference delays. Every rebuilt width must lie within 70 ps of the
truth (half a leading bin plus half a trailing bin). The test fails if any
mechanism (leading record, trailing record, minimum-spacing pair, 23 ns
width) never occurred. It runs at full size in well under a minute.

`tot_tdc_code_density_tb` repeats the statistical evaluation used for such
TDCs. It sends edges at random phases and histograms the fine codes. Each
bin count must match its width within five standard deviations. With the
model delays, 103 leading and 52 trailing bins are used in a clock period;
the original hardware showed 105 and 51. The leading bins alternate between
30 ps and 48 ps because of the slow first stage of each cell. That gives a
DNL of up to about 0.8 LSB at the default delays.
