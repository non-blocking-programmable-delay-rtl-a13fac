# A non-blocking programmable delay line built from FPGA LUT chains

A delay line that waits on a clock is *blocking*: while it counts out the
delay of one pulse it cannot take the next, so its dead time equals the delay
itself. This design has no clock in the signal path. The delay comes from the
propagation delay of chains of FPGA look-up tables (LUTs) used as buffers, and
a pulse is delayed simply by travelling through them. Any number of pulses can
be in the line at once, so the dead time is set only by how wide the pulses
become, not by the delay.

The line is 24 stages in series. Each stage either adds the delay of its own
LUT chain or passes the pulse straight through, chosen by one bit of a 24-bit
control word. The stage delays are of very different sizes: ten small stages of
1 to 5 LUTs in pairs, then stages growing by about 1.6x each, up to 1729 LUTs.
A given total delay is therefore a sum of selected stage delays, and with
2^24 control words there are very many sums to choose from. The published
device covers about 23 ns to 1635 ns. Its 10 ps resolution comes from choosing
words off-chip, using stage delays measured on the real chip.

This RTL describes that line. The LUT chains are behavioural delay models; the
multiplexers, pulse shrinking gates and control register are ordinary logic.

## Signal path

```
sig_in -> [input PSC, 15 LUTs] -> stage 0 -> stage 1 -> ... -> stage 23 -> sig_out

stage n:        +--> [PSC, 4 LUTs]* --> [STAGE_LUTS[n] LUTs] --+
           a ---+                                              MUX --> y
                +----------------- zero-delay path ------------+
                                                      sel = ctrl_word[n]
                * stages 19..23 only
```

| stage | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| LUTs | 1 | 1 | 2 | 2 | 3 | 3 | 4 | 4 | 5 | 5 | 6 | 10 |

| stage | 12 | 13 | 14 | 15 | 16 | 17 | 18 | 19* | 20* | 21* | 22* | 23* |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| LUTs | 15 | 25 | 39 | 63 | 101 | 161 | 258 | 412 | 660 | 1056 | 1689 | 1729 |

(* = a pulse shrinking circuit sits in front of the chain.)

The counts of stages 0..9 and 23 are the published ones. For stages 10..22
only the growth factor of about 1.6 is published, so this design uses
round(6 * 1.6^k) for k = 0..12. That follows on from the 5, 5 of stage 9 and
gives 6254 LUTs in all: 1688.6 ns at 270 ps per LUT. This fits the 6272 logic
elements of the small Cyclone IV device the line was built in. With these counts
every whole number of LUTs from 0 to 6254 can be formed: each stage is at most
one more than the sum of all smaller stages. A greedy choice from the largest
stage down therefore reaches any delay to within one LUT.

The stage multiplexer uses `sel = 1` for the delay branch. Both branches are
always live. An unselected chain still carries every pulse that reaches its
stage; only the multiplexer ignores it.

## Pulse widening, pulse shrinking and dead time

This is the part of the design that needs the most care.

A real LUT does not pass rising and falling edges with exactly the same delay.
Over a long chain the difference adds up, and pulses get wider. The measured
widening is about 25 ps per LUT, so 1729 LUTs add about 43 ns. Two pulses whose
gap is shorter than that merge into one at the output. That sets the line's dead
time.

The model, `lut_delay`, reproduces this. A rising edge is delayed by
`N_LUT * LUT_PS` and a falling edge by `N_LUT * (LUT_PS + SPREAD_PS)`. So a
pulse grows by 25 ps per LUT and the low gap after it shrinks by the same
amount. Edges cannot overtake one another in a real chain. When the rising edge
of the next pulse would reach the end no later than the falling edge before it,
the gap has closed: both edges are dropped and the two pulses leave as one.
Which edge lags is a modelling choice; only the widening is published.

A pulse shrinking circuit (PSC) resets the width. It ANDs the pulse with an
inverted copy of itself delayed by a short LUT chain:

```
y = a & ~delay(a, N_LUT)
```

The output rises with the input and falls either with the input or when the
delayed copy arrives, whichever comes first. So it is never longer than
`N_LUT * LUT_PS`: 4050 ps for the 15-LUT input PSC and 1080 ps for the 4-LUT
stage PSCs. Shorter pulses pass unchanged. The PSC also needs time to recover.
A pulse that starts while the delayed copy of the previous pulse is still high
only begins once that copy has fallen. `tb_pulse_shrink` checks this case.

The two kinds of PSC sit in different places:

* The input PSC sits in the common path, ahead of stage 0. Every pulse passes
  it, whatever the control word, so all pulses enter the line with the same
  width at most.
* The stage PSCs sit inside the delay branch of the five largest stages. They
  act only when their stage is selected. They stop the widening built up in the
  earlier stages from reaching the longest chains.

After the last selected PSC, the widening of the chains that follow still adds
up. A square wave with half period h keeps its pulses while the low gap, 2h
minus the pulse width, is larger than 25 ps times the LUTs between two PSCs.
Stage 23 alone (1729 LUTs after a 1080 ps PSC) needs h above about
(1080 + 1729 x 25) / 2 = 22.2 ns. This is the longest PSC-free stretch, so it
sets the dead time of the whole line. `tb_ddl_deadtime` measures the dead time
as it was measured on the device: it raises the rate of a square wave until
fewer than 95 % of the pulses come out. It finds 22.18 ns at most, against the
published figure of at most 22.5 ns. For words that use none of the last five
stages, the dead time grows with the delay, from 1.7 ns at 27 ns to 10.9 ns at
191 ns. Once a PSC stage is used, the dead time is set by the chains after the
last selected PSC, whatever comes before it. With all stages on it is 21.71 ns,
2 % below stage 23 alone. The gaps are then nearly closed when the pulses
reach stage 23's PSC, and the PSC passes narrower pulses. Without PSCs in front
of the long stages, the full line would need h above about 80 ns.

Below about 1 ns (words using only the short stages) the input PSC's own
recovery decides which pulses pass, and the count does not rise steadily with
the period, so no dead time is quoted there. The published minimum of 4 ns
was set by the counter and output level shifter used to measure it.

For wide input pulses the model's output pulse is 4.05 ns wide with every
stage off and 44.3 ns through stage 23. The published device measured 4.9 ns
to 42.5 ns.

## Control word and loading

`ctrl_shift_reg` is a 24-bit serial-in, parallel-out register. An external
microcontroller drives it:

* With `cfg_shift_en` high, each rising edge of `cfg_clk` shifts `cfg_sdi` into
  bit 0.
* A word is sent MSB (stage 23) first and is in place after 24 clocks.
* `cfg_sdo` is the MSB, for read-back.
* `cfg_rst_n` clears the word asynchronously, which puts every stage on the
  zero-delay path.

The register drives the multiplexers directly, with no holding latch, as in the
published design. The protocol, bit order and reset are this design's own
choices.

Two consequences matter in use:

1. **During a load the delay passes through up to 24 intermediate values.**
   A pulse that passes during a load gets one of those delays. Load words while
   no pulses arrive.
2. **Turning a stage on releases whatever its chain still holds.** An
   unselected chain keeps propagating pulses for up to its full length (467 ns
   for stage 23). If the word changes before the chain is empty, a pulse that
   entered the stage earlier comes out as a spurious output pulse. After
   changing the word, wait until the whole line has drained (about 1.85 us with
   the default sizes) before trusting the output. The end-to-end testbench
   waits this long between tests.

## Choosing a control word

The chip does not turn a requested delay into a control word; that is done
off-chip from measured stage delays, and a microcontroller keeps the chosen
words in FLASH and shifts the right one in. The procedure:

1. Measure each stage delay on the finished device (multiplexers and PSCs
   included), giving tau_0 ... tau_23.
2. Compute the delay of every one of the 2^24 combinations as the sum of its
   selected tau_n, and sort the 16.8 million values.
3. Walk the sorted list once, keeping a word whenever its delay is 10 +- 5 ps
   above the last word kept.

This only works because the stage delays are irregular. With every LUT exactly
270 ps, all sums are multiples of 270 ps and no finer step exists. Real short
stages vary widely (350 +- 250 ps per LUT), and the many combinations of the
small stages then fill in between the multiples.

`ddl_top` takes a per-stage LUT delay vector, `STAGE_LUT_PS_P` (default 270 ps
everywhere), so a measured chip can be modelled. `tb_ddl_granularity` builds
the line with an example vector: the short stages between 188 and 512 ps per
LUT, and 270 ps from stage 14 on. It then runs the whole procedure above in
the testbench, over all 2^24 combinations. Between 23 ns and 1635 ns total
delay it keeps 161,246 words, every step within 10 +- 5 ps. That total adds
the device's fixed 18.8 ns zero delay, which the model lacks. The published
device used about 160,000 words over the same range. The testbench then loads
runs of consecutive words into the line, at four places in the range. It checks
that each measured delay equals the computed one and that neighbours differ by
5 to 15 ps. It needs about 300 MB and a few seconds.

## Timing model and what it leaves out

All delays are in picoseconds (`timeunit 1ps`). The model includes:

* LUT-chain delay: by default 270 ps per LUT for rising edges and 295 ps for
  falling edges; the per-stage value can be set with `STAGE_LUT_PS_P`.
* PSC chain delays, with the same per-LUT values.

It leaves out:

* The delays of the multiplexers and PSC gates. In hardware each is one LUT and
  is the same whether or not the stage is selected.
* FPGA I/O buffers, the input comparator and the output level shifter. On the
  board these add up to a fixed zero delay of 18.808 ns. Add it to the model's
  figures to compare with measurements.
* Timing jitter. Measured as 4.726 ps + 0.098 ps per ns of delay.
* Temperature drift. Measured as about 0.2 ps/K per LUT.
* Variation between the LUTs of one stage. Each stage has one average
  per-LUT delay.

On an FPGA the LUT chains must be kept from being optimised away: mark the
buffers to be kept and constrain their placement. A logic synthesis tool reads
`lut_delay` as a plain wire.

## Departures from the published design

* **Position of the input PSC.** The published block diagram draws the first
  PSC inside the delay branch of stage 0. The text says the zero-delay path goes
  through the input PSC gate and that this PSC standardises all input pulses.
  This design follows the text and puts it ahead of stage 0.
* **LUT counts of stages 10..22.** These are this design's own values (see
  above).
* **Control register interface.** The serial protocol, bit order, select
  polarity and reset are this design's own choices.
* **Optional extras not built.** The published text mentions two optional
  extras: an extra PSC at the output, and temperature compensation of the
  control word using stored per-stage coefficients. Neither is built.
* **Board parts.** The microcontroller, FLASH, USB-serial bridge, comparator,
  threshold DAC and level shifter are not part of the RTL. The top's `cfg_*`
  ports stand for the microcontroller link, and `sig_in` / `sig_out` for the
  comparator and the output buffer.

## Files

| file | contents |
|---|---|
| `rtl/ddl_pkg.sv` | sizes, LUT table, `ctrl_word_t`, nominal-delay function |
| `rtl/lut_delay.sv` | behavioural LUT-chain delay (with widening and gap closing) |
| `rtl/pulse_shrink.sv` | pulse shrinking circuit |
| `rtl/delay_stage.sv` | LUT chain, optional PSC, 2:1 multiplexer |
| `rtl/ctrl_shift_reg.sv` | 24-bit control register |
| `rtl/ddl_top.sv` | the whole line |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_ddl_granularity.sv` | control-word selection over all 2^24 words, checked on the line |
| `tb/tb_ddl_deadtime.sv` | dead time for 12 control words, measured with square waves |

`tb_ddl_top` runs the whole line at its default sizes and checks every output
edge against a reference it computes itself. The reference treats a waveform as
a list of edge times and applies the same delay and AND-NOT rules. The tests
are:

* the zero-delay path;
* each stage on its own;
* a train of ten pulses that are all inside the line at once;
* two pulses that merge;
* all stages on;
* 40 random words with random pulse trains;
* 20 target delays spaced evenly on a log scale from 23 ns to 1635 ns, each
  reached to within one LUT.

It also counts each of these mechanisms and fails if any of them never
happened.

## Simulating

With Verilator 5 (timing support is needed for the delay models):

```
verilator --binary --timing -Wno-fatal -y rtl rtl/ddl_pkg.sv tb/tb_ddl_top.sv \
          --top-module tb_ddl_top -o sim
./obj_dir/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M`. The full-size run
takes well under a second once built, because only edges are simulated.
`ddl_top` takes the LUT table, per-LUT delay, widening and PSC sizes as
parameters.
