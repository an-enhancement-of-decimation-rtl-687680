# Pipelined, pruned CIC decimator with modified carry-lookahead adders

An oversampled audio ADC uses a sigma-delta modulator that runs far above the
Nyquist rate: here 6.144 MHz for a 48 kHz output. Its output has few bits per
sample, and most of its quantization noise lies above the audio band. The
decimator has two jobs. It removes that noise before it can alias back into
the band, and it trades the high sample rate for a longer word at a lower
rate. The first and largest rate change is done by a cascaded
integrator-comb (CIC) filter. A CIC filter has no multipliers and no
coefficient storage: it is built only from adders, subtractors and registers.

This RTL implements that CIC stage. It has five integrator/comb stages and
decimates by 16, from 6.144 MHz to 384 kHz. Three measures make it fast:

* **Pruning.** Low-order bits are dropped as the signal moves through the
  integrators (25, 22, 20, 18 and 16 bits), so later adders are shorter.
* **Full pipelining.** There is a register after every integrator, after the
  down sampler and after every comb. No register-to-register path goes
  through more than one adder.
* **Modified carry-lookahead adders (MCLA)** in the integrators. Each 4-bit
  group computes its carries in two logic levels. Only the group carries
  ripple from group to group.

## The decimation chain and what is here

```
 sigma-delta   6.144 MHz    CIC filter     384 kHz   half-band  192 kHz   droop      96 kHz   half-band   48 kHz
 modulator   ------------>  N=5, R=16   ----------->  filter 1  -------->  correction ------->  filter 2  -------->
 (not here)    5-bit         (this RTL)    16-bit     (not here)           (not here)           (not here)
```

The three filters after the CIC filter each decimate by 2:

* the first half-band filter: pass band 32 kHz, stop band 170 kHz;
* a droop-correction low-pass filter, whose pass band is shaped as the inverse
  of the CIC response (pass band 32 kHz, stop band 70 kHz);
* the second half-band filter: pass band 21.77 kHz, stop band 26.53 kHz.

Only their band edges are known. No coefficients, tap counts or word lengths
are available for them, so they are not part of this RTL. `cic_out` and
`out_valid` form the interface where the first half-band filter would connect.
The modulator is outside the RTL too. `cic_in` takes its multi-bit output,
one two's-complement code per sample.

## How the filter works

The filter computes

    H(z) = ( (1 - z^-RM) / (1 - z^-1) )^N ,   N = 5, M = 1, R = 16

This is N running sums (integrators) at the input rate. A down sampler then
keeps one sample in R. N first differences (combs, 1 - z^-M) follow at the
output rate. The impulse response is a 16-sample boxcar convolved with itself
five times. Its DC gain is (RM)^N = 2^20, and its response has nulls at
multiples of 384 kHz, which are the frequencies that alias onto DC.

### Word lengths, wrap-around and pruning

This is the least obvious part of the design.

**Wrap-around is harmless.** The integrators are never cleared and never
saturate, so they overflow all the time. That does no harm. All arithmetic
is two's complement modulo 2^width. The combs then subtract values that
wrapped the same way. The final result is exact if the output word can hold
the true output. For the first stage this needs B_in + N*log2(RM) bits. With
a 5-bit input that is 5 + 20 = 25 bits, the width of integrator 1.

**Pruning.** All stages are aligned at their most significant bit, which has
weight 2^24. Each later stage discards low-order bits of the value it takes
in, so integrators 2 to 5 keep bits 24..3, 24..5, 24..7 and 24..9. The bits
are discarded by truncation, which rounds toward minus infinity. Integrator 5
and the five combs are 16 bits wide. The output is bits 24..9 of the
full-precision result, so a constant input x settles to about
2^20 / 2^9 * x = 2048 x. With the input range of -16..+15, the output nearly
fills 16 bits.

**The cost of pruning.** The widths 25/22/20/18/16 are taken as given. They
drop bits early, and the error is amplified by every integrator that
follows. The measured error against an untruncated filter is about 75 output
LSB rms, with peaks of a few hundred LSB. That is far more than the ½ LSB of
rounding the 16-bit output alone. In-band, a half-scale tone from a
second-order 5-bit modulator comes out with an SNR of about 64 dB over
0–24 kHz. Truncation also biases the output by a few tens of LSB, so the most
negative input held constant (-16, whose ideal output is -32768) can wrap to a
large positive value. Inputs of -15..+15 are safe. If you need more accuracy,
widen `INT_W[1..4]` and the comb width. The integrator and comb modules take
any widths.

### Pipelining and timing

The design uses one clock. Integrators advance on every cycle in which
`in_valid` is high. The comb section advances only when the down sampler
raises its enable `dec_en`, once every 16 accepted samples. So the comb
section runs 16 times slower without a second clock.

* Each integrator's accumulator is also its pipeline register, so integrator
  k lags integrator k-1 by one sample. This pipelining needs no extra
  registers.
* The down sampler has a modulo-16 sample counter. It keeps a sample when
  the count is N-1 = 4. Because of the four-cycle lag through the
  integrators, the value it keeps is the sum that ends exactly at the last
  sample of a block of 16 input samples.
* The down-sampler register and the five comb output registers are clocked by
  `dec_en`. An output therefore appears six output periods after the block it
  belongs to.

With one input per clock, `out_valid` rises 85 cycles (N + N*R) after the
clock edge that takes the last sample of a block. After that it pulses once
every 16 cycles. Output k after reset (k = 0, 1, ...) covers the input block
that ends at sample 16(k-6)+15. The first six outputs are zero while the
pipeline fills. If `in_valid` has gaps, everything stretches with them. The
filter counts samples, not cycles.

## The modified carry-lookahead adder

`mcla_adder` splits a word into 4-bit groups. In each bit, a partial full
adder (`mcla_pfa`) forms propagate p = a xor b and generate g = a and b, and
takes its carry from the group's lookahead logic (`mcla_cll`):

    c1 = g0 + p0 c0
    c2 = g1 + p1 g0 + p1 p0 c0
    c3 = g2 + p2 g1 + p2 p1 g0 + p2 p1 p0 c0
    c4 = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0 + p3 p2 p1 p0 c0
    PG = p3 p2 p1 p0,   GG = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0

A full group passes GG + PG·c0 (equal to c4) to the next group. A 25-bit
adder has seven groups and the carry ripples through them group by group, not
bit by bit. When the width is not a multiple of 4 (25, 22 and 18 bits), the
top group is only partly used. Its missing bits get p = g = 0, and the
carry-out is read above the last real bit. The integrators tie the carry-in
to 0. The combs use a plain `-`, which leaves the subtractor to synthesis.

## Files and interface

| file | contents |
|---|---|
| `rtl/cic_pkg.sv` | N, M, R, input width, integrator widths; full-precision width function |
| `rtl/cic_decimator.sv` | top: integrators, down sampler, combs, `out_valid` |
| `rtl/cic_integrator.sv` | one pruned integrator stage with its MCLA |
| `rtl/cic_downsampler.sv` | sample counter, `dec_en`, down-sampler register |
| `rtl/cic_comb.sv` | one comb stage (M-deep delay, subtract, output register) |
| `rtl/mcla_adder.sv`, `mcla_cll.sv`, `mcla_pfa.sv` | the MCLA and its parts |

`cic_decimator` ports:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; 6.144 MHz gives the nominal rates |
| `rst_n` | in | 1 | asynchronous reset, active low; clears every register |
| `in_valid` | in | 1 | `cic_in` carries a sample in this cycle (tie high for one sample per clock) |
| `cic_in` | in | 5 | modulator output, two's complement |
| `out_valid` | out | 1 | one-cycle pulse: `cic_out` has just taken a new value |
| `cic_out` | out | 16 | filter output; it holds until the next pulse |

The parameters are `N`, `M`, `R`, `B_IN` and the array `INT_W[N]`. Their
defaults come from `cic_pkg`. Elaboration fails unless
`INT_W[0] = B_IN + N*log2(R*M)` and the widths never grow. If you change `N`,
you must also give an `INT_W` of that length. The comb and output width is
`INT_W[N-1]`.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=... failures=...` and has a cycle watchdog.

* `tb_mcla_pfa` and `tb_mcla_cll` are exhaustive. The carries are compared
  with a bit-by-bit ripple computation.
* `tb_mcla_adder` covers all 8-bit operand pairs with both carry-ins. It
  checks 25/22/18/16 bits with random operands and carry-chain corner cases.
* `tb_cic_integrator`, `tb_cic_downsampler` and `tb_cic_comb` use random
  data and random enables against small integer reference models. They check
  the truncation alignment, sign extension, wrap-around, hold when disabled,
  the keep-phase and the number of kept samples.
* `tb_cic_decimator` runs the whole filter at its default parameters against
  a sample-by-sample integer model. Every output word must match bit for bit.
  It also checks:
  * the pipeline-fill outputs and the 85-cycle latency;
  * one output per 16 samples when the input has gaps;
  * the DC level 2048·x for x = ±15;
  * the sine error against the untruncated filter.

  It counts how often integrators wrapped, how often non-zero bits were
  truncated, how many input gaps occurred and how many outputs came out, and
  it fails if any of these never happened.
* `tb_cic_sdm_snr` drives the filter from `tb/sigma_delta_model.sv`, a
  behavioural second-order 5-bit modulator used as a stimulus only. The input
  is a coherent 3 kHz tone at half scale. It checks the output rate and the
  tone level after the CIC droop (within 0.5 dB). It takes a 1024-point DFT
  of the output and requires an SNR of at least 40 dB over 0–24 kHz. It
  prints about 64.5 dB.

To run one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/cic_pkg.sv rtl/mcla_pfa.sv rtl/mcla_cll.sv rtl/mcla_adder.sv \
      rtl/cic_integrator.sv rtl/cic_downsampler.sv rtl/cic_comb.sv \
      rtl/cic_decimator.sv tb/tb_cic_decimator.sv --top-module tb_cic_decimator
    ./obj_dir/Vtb_cic_decimator

For `tb_cic_sdm_snr`, add `tb/sigma_delta_model.sv`. Each testbench finishes
in well under a second.

## Choices not fixed by the source design

* **Input width of 5 bits.** The 25-bit first stage fixes only
  B_in + 20 = 25. One common way of writing the MSB bound,
  N·log2R + B_in − 1 = 25, suggests 6 bits. But a 6-bit full-scale input
  needs 26 bits, so 5 bits were used.
* **Clocking.** There is one clock plus an `in_valid` sample enable. The comb
  section runs on the down sampler's enable, not on a divided clock. The keep
  phase (count N−1) is chosen so that outputs line up with blocks of 16
  input samples.
* **Reset.** The reset is asynchronous and active low. There is no start-up
  flush.
* **Truncation point.** Truncation is plain floor truncation, applied at
  each stage's input.
* **Comb subtractors.** The MCLA is used in the integrators only. The comb
  subtractors are generic.
* **The printed widths.** Integrator widths and the 16-bit combs are used as
  given, even though they produce the truncation error described above.
* **Not covered.** Timing and power figures, such as the achievable clock
  rate of the pipelined filter and of the MCLA, are properties of a
  technology mapping. The simulations here do not check them.
