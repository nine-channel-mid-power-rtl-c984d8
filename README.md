# A memory-played pulse pattern generator for nine bipolar outputs

Reconfigurable optical circuits built from electro-optic switches need many
channels of fast, synchronised pulse patterns, each able to swing both
positive and negative. This design produces them by the simplest possible
means: the whole pattern for every channel is written into an on-chip memory,
and a counter reads the memory out one word per clock period. Every bit of a
word belongs to one channel, so all channels change on the same clock edge
and stay in step by construction; their patterns are fully independent.

Each bipolar output is made from two unipolar logic channels, one carrying the
positive pulses and one the negative pulses. Outside the FPGA each pair is
attenuated, subtracted by a 180-degree RF combiner and amplified to about
±10 V into 50 Ω. So nine outputs need 2 × 9 = 18 logic channels, and the
memory is 18 bits wide.

The RTL here covers the FPGA part: the clock multiplier with adjustable
delay, the address counter, the pattern memory with its output registers, and
the small amount of glue between them. The analog stages are described below
only so that the channel mapping makes sense.

## Signal flow

```
 ext_clk ──► PLL (x8, delay pr) ──► mem_clk ─┬──────────────┬──────────────┐
                                             ▼              ▼              ▼
                          run ──► sync ──► counter ──addr─► memory ──► output regs ──► int_ch[17:0]
                                           (wraps at       (28000 x 18)
                                            seq_last)         ▲
                                wr_clk, wr_en, wr_addr, wr_data (pattern loading)
```

Outside the FPGA, for every output k:

```
 int_ch[2k]   ─► attenuator ─► (+)
                                   180° combiner ─► amplifier ─► bipolar output k
 int_ch[2k+1] ─► attenuator ─► (−)
```

| File | Role |
|---|---|
| `rtl/pulse_gen_pkg.sv` | Sizes (9 outputs, 18 channels, 28000 words, ×8 clock), channel mapping, a helper giving the sign of an output |
| `rtl/pll_model.sv` | Behavioural model of the FPGA PLL: multiplies the clock and delays it |
| `rtl/addr_counter.sv` | Count-up address counter with a programmable wrap point |
| `rtl/pattern_mem.sv` | Pattern memory, synchronous read, output registers, load port |
| `rtl/pulse_gen_top.sv` | The generator: the above plus reset/run synchronisers |

## Time resolution and the clock

The memory clock sets everything. Pulse edges can only fall on memory-clock
edges, so the clock period is the step in which pulse width and position can
be adjusted. The device the design targets cannot clock its memory above
640 MHz, giving a step of 1.5625 ns (about 1.6 ns). With an 80 MHz external
reference, the PLL multiplies by `MULT = 8`; eight words then make one
reference period, and a pattern whose pulses repeat every reference period
gives the highest useful repetition rate, 80 MHz. Slower references work the
same way: with 10 MHz in, the memory runs at 80 MHz.

The delay setting `pr` moves the memory clock, and with it every output edge,
relative to the reference in steps of 1/8 of the memory-clock period
(195 ps at 640 MHz). Seven bits reach 127 steps, just under two reference
periods at ×8, so any alignment within a reference period can be chosen. This
is how the outputs are lined up with, for example, a pulsed laser that
supplies the reference.

The PLL exists only as a behavioural model (`pll_model`), because in the
FPGA it is a fixed hard block configured by the vendor's tools. The model
measures the reference period, reports lock after four consecutive periods
agree within 1 %, and from then on emits a burst of eight output periods
after every reference edge, each burst starting `pr` steps after its edge.
The bursts join seamlessly, so the output is a steady clock of exactly
8 × the reference frequency. Changing `pr` while running can shorten one
output period; the testbenches reset the PLL when they change it. Jitter is
not modelled. To build the design for an FPGA, replace `pll_model` by the
vendor's PLL with the same ports.

## Sequence timing

The counter starts at word 0 and moves one word per memory-clock cycle while
`run` is high. After word `seq_last` it returns to word 0 with no gap, so a
sequence of `seq_last + 1` words repeats for as long as the clock runs; at
640 MHz that is a repeat time of `(seq_last + 1) × 1.5625 ns`. When `run`
goes low the counter goes back to 0 and the channels go to 0.

Latency, counted in memory-clock rising edges after `run` is seen high:

| Edge | What happens |
|---|---|
| 1, 2 | `run` passes the two-flop synchroniser |
| 3 | counter presents word 0; memory samples its address |
| 4 | output registers load word 0: `int_ch` shows word 0 |

After that one word appears per edge. `seq_wrap` is high while the counter is
at the last word, two edges before that word reaches `int_ch`.

`rst_n` and `run` may be asynchronous to the memory clock; both are
synchronised inside, and the logic is held in reset while the PLL is not
locked.

## Memory organisation and loading

The memory has `DEPTH = 28000` words of `2 × N_OUT = 18` bits (504,000 bits,
which fits the FPGA's block RAM). Bit `2k` of a word is the positive input of
output k, bit `2k+1` its negative input. A set positive bit with a clear
negative bit gives a positive pulse during that period, the reverse a
negative pulse, and both clear (or both set, which the combiner cancels)
gives 0 V. `pulse_gen_pkg::bipolar_level` computes this sign from a word.

At 640 MHz the full memory holds a 43.75 µs sequence; at an 80 MHz memory
clock (10 MHz reference) it holds 350 µs.

Two ways fill the memory:

* the write port (`wr_clk`, `wr_en`, `wr_addr`, `wr_data`), one word per
  `wr_clk` edge, on its own clock. It stands for the link through which a
  host computer loads the pattern. Load it while the pattern is stopped:
  writing a word that is being read gives no guaranteed result for that one
  read.
* the `INIT_FILE` parameter, a `$readmemh` file with one hex word per line,
  which gives the contents at power-up, as a configuration memory would.

The read side is a synchronous read followed by a second register at the
memory output; that output register is what makes every channel switch on
the same clock edge, regardless of routing inside the memory.

## Example patterns

Two patterns from the original measurements are used in the testbenches,
both at 640 MHz.

*Pulse-width sweep*, 16 words (25 ns): output k (k = 0..6) has a positive
pulse in words 0 … k+1 and a negative pulse in words 8 … k+9. Pulse widths
run from 2 to 8 words, 3.125 ns to 12.5 ns, in 1.5625 ns steps, and the
negative pulse always starts 12.5 ns after the positive one. The file
`tb/pattern_width_sweep.hex` holds exactly these 16 words.

*Synchronisation test*, 88 words (137.5 ns): the time is divided into eleven
12.5 ns slots of 8 words, each with a 6.25 ns (4-word) pulse at its start.
In slots 0 and 1 every output pulses positive; in slot 2 + k only output k
pulses negative. The outputs share the positive pulses and have their own
negative pulse, which shows both synchronisation and independence.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N_OUT` | 9 | bipolar outputs (memory width 2 × N_OUT) |
| `DEPTH` | 28000 | memory words |
| `MULT` | 8 | memory clock / reference clock |
| `PHASE_DIV` | 8 | delay steps per memory-clock period |
| `PR_W` | 7 | width of the delay setting |
| `INIT_FILE` | "" | power-up memory contents |

With 36 outputs (`N_OUT = 36`) the same structure drives 72 channels; the
memory is then 72 bits wide, and the depth must shrink to what the FPGA's
block RAM can hold.

## Simulation

All files use `timescale 1ns/1fs` so the 0.78125 ns half period of a
640 MHz clock is exact. The testbenches need Verilator 5 with timing
support. From the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --sched-zero-delay -Irtl -Itb -y rtl -y tb \
    rtl/pulse_gen_pkg.sv tb/tb_pulse_gen_top.sv --top-module tb_pulse_gen_top
./obj_dir/Vtb_pulse_gen_top
```

`--sched-zero-delay` tells Verilator that the PLL model's computed delays
may be zero (a delay setting of 0); without it Verilator stops on a warning
unless `-Wno-fatal` is given. Testbenches that read `tb/pattern_width_sweep.hex`
must be run from the directory holding `tb/`. Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after
a fixed time if something hangs.

| Testbench | What it checks |
|---|---|
| `tb_addr_counter` | every address and wrap flag against a reference count, with random run, reset and wrap point; the wrap period |
| `tb_pattern_mem` | random writes and reads through both clocks; two-edge read latency; zero output when not reading; power-up contents from the hex file |
| `tb_pll_model` | lock, ×8 frequency, 50 % duty, delay of the first edge for settings 0 to 127 at 80 MHz and 10 MHz, phase held, reset |
| `tb_pulse_gen_top` | the whole generator at default size: loading, the synchronisation and sweep patterns word by word and as bipolar levels, start latency, repeat times of 137.5 ns and 25 ns, wrap period, edge phase for three delay settings, stop and restart |
| `tb_workload_pulse_width` | the sweep pattern loaded at power-up, with each output's positive and negative pulse timed in ns |
| `tb_full_depth` | all 28000 words loaded and played once at an 80 MHz memory clock; the sequence repeats after 350 µs |

## How far this follows the original design

Taken from the original: the chain reference clock → PLL → count-up
counter → block memory → output registers → 18 logic channels; nine outputs
built from pairs of channels; the 640 MHz memory clock from an 80 MHz
reference and its 1.6 ns step; a delay adjustable over at least one reference
period; a memory loaded from a host or from configuration memory at
start-up; the 350 µs longest sequence at an 80 MHz clock.

Choices made here, where the original says nothing:

* which channel of a pair is positive (even bit) and which negative (odd bit);
* the wrap point `seq_last` as a run-time input (the original fixes the
  sequence length when the FPGA is configured), and the `run` input;
* reset, synchronisers, holding the logic in reset until lock, and zero on
  the channels when stopped;
* the write port's form and clock;
* the delay step (1/8 of the memory period), its 7-bit range, and the lock
  rule of the PLL model.

Points where the RTL departs from, or has to interpret, the original:

* The memory size is given both as "28 kbit for 18 channels" and as a
  350 µs sequence at 80 MHz. The two do not agree (28 kbit is only about
  1,600 words of 18 bits); the design follows the 350 µs figure, 28000
  words.
* The 350 µs figure holds only when the memory is clocked at 80 MHz. At the
  640 MHz needed for the 1.6 ns step, the same memory lasts 43.75 µs.
* The shortest pulse here is two memory periods, 3.125 ns. The 3.5 ns
  measured on the hardware includes the analog stages' rise and fall times,
  which the RTL does not model.
* The analog stages (attenuators, combiner, amplifier, the amplifier's
  bandwidth limit), the host software and the configuration memory are not
  part of the RTL.
