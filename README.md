# Pipelined, truncated five-stage CIC decimator with carry look-ahead adders

An oversampling sigma-delta ADC gives a few bits per sample at a very high
rate. Here that is a 3rd-order modulator with a 5-bit output word. Before
the samples are useful, the out-of-band quantisation noise must be removed
and the rate must come down to the Nyquist rate. Most of that rate reduction
goes to a cascaded integrator-comb (CIC) filter, which needs no multipliers
and stores no coefficients: all of its taps are one. A chain of half-band
and droop-correction FIR filters then brings the rate down the rest of the
way.

This RTL implements the CIC stage of such a receiver chain as a hardware
block. Its main parameters are:

| quantity | value |
|---|---|
| filter order N | 5 |
| differential delay M | 1 |
| decimation factor R | 16 |
| input word | 5 bits, two's complement, one per clock |
| output word | 16 bits, one per 16 clocks, with a valid strobe |
| transfer function | H(z) = ((1 - z^-16) / (1 - z^-1))^5 = (1 + z^-1 + ... + z^-15)^5 |
| DC gain | 16^5 = 2^20 before truncation, 2^11 at the 16-bit output |

Three ideas shape the design:

1. **Truncation.** The register widths shrink from stage to stage:
   25 → 22 → 20 → 18 → 16 bits in the integrators and 16 bits in the combs.
   The bits removed at each step are least significant bits.
2. **Pipelining without extra registers in the integrators.** Each
   integrator's own accumulator register sits between its adder and the
   next stage, so the integrator chain is already a pipeline. The
   down-sampler and each comb get an output register.
3. **A carry look-ahead adder** built from 4-bit groups is used for every
   addition and subtraction.

## Block diagram

```
cic_in[4:0]
   │
 ┌─▼────────┐  25b  ┌────┐ 25b ┌────┐ 22b ┌────┐ 20b ┌────┐ 18b ┌────┐ 16b
 │ adjuster ├──────►│ I1 ├─/8─►│ I2 ├─/4─►│ I3 ├─/4─►│ I4 ├─/4─►│ I5 ├────┐
 └──────────┘       └────┘     └────┘     └────┘     └────┘     └────┘    │
   register +        25 bit     22 bit     20 bit     18 bit     16 bit   │
   sign extension    (each Ik:  acc <= acc + in, one clock)               │
                                                                          ▼
             ┌────┐   ┌────┐   ┌────┐   ┌────┐   ┌────┐   ┌───────────────┐
 cic_out ◄───┤ C5 │◄──┤ C4 │◄──┤ C3 │◄──┤ C2 │◄──┤ C1 │◄──┤ counter, ↓16, │
 (16 bit)    └────┘   └────┘   └────┘   └────┘   └────┘   │ output reg.   │
              each Ck: y = x - x[n-1], output register     └───────────────┘
```

`/8` and `/4` mark LSB removal: 3 bits are dropped ahead of I2 and 2 bits
ahead of each of I3, I4 and I5. The most significant bit stays at the same
position, bit 24, throughout. That position comes from Hogenauer's bound:
B_max = N·log2(R) + B_in − 1 = 5·4 + 5 − 1 = 24. Integrator 5 and the combs
are 16 bits wide, so no bits are dropped between the integrators and the
combs. In all, the output has lost 9 LSBs relative to full precision.

## How the arithmetic stays correct

The integrators are not protected against overflow, and they do not need to
be. Each one runs modulo 2^W and wraps often; a DC input makes integrator 1
wrap on a regular schedule. The filter still gives the right answer because
a CIC filter's output is bounded, at most (RM)^N times the input. The result
is therefore the same whether the intermediate sums are taken in full
precision or modulo 2^25. The five combs undo the wraps, provided every
stage uses two's complement wrap-around arithmetic and keeps the common MSB.
The adders in this design have no saturation or overflow detection for this
reason.

Removing LSBs is allowed, but it adds noise. Each cut is a rounding error
of up to one step, and that error passes through every stage behind the cut.
A cut ahead of integrator 2 is amplified by four more integrators and five
combs. The sum of the squared impulse response behind it is about 1.3·10^8.
Summing step²/12 times that energy over all four cuts predicts the following
noise at the 16-bit output:

| cut | bits removed | rms noise at the output (LSB) |
|---|---|---|
| ahead of I2 | 3 | 51.6 |
| ahead of I3 | 5 | 23.3 |
| ahead of I4 | 7 | 13.4 |
| ahead of I5 (and the combs) | 9 | 9.7 |
| total | | 59 |

The simulations measure 50 to 67 LSB rms against a full-precision reference
filter. For a sine at half of full scale, driven through a 3rd-order
sigma-delta model, the full-precision CIC output has a SINAD of 101 dB. The
truncated output has 44.7 dB. This is the most important thing to know
before using the block. The widths are the ones the filter was published
with, but they do not reach the 98 dB dynamic range claimed for it. Almost
all of the shortfall comes from dropping 3 bits ahead of integrator 2. A
Hogenauer-style pruning for a 16-bit output would keep all 25 bits there and
cut only in the later stages. The widths are constants in `cic_pkg`, so you
can change them. If you do, the clock-accurate model in `tb_cic_filter` and
its error limits must be changed with them.

Floor truncation also leaves a small, input-dependent bias for a constant
input. A DC input of +15 settles at 30685 instead of 30720, and −15 settles
at −30668 instead of −30720. Because of this offset, a long run at the most
negative input, −16, can wrap the 16-bit output. Keep the input inside
−15 … +15 for any length of time.

## The carry look-ahead adder

`cla_adder` adds two WIDTH-bit words and a carry in. It is built from
4-bit groups:

* `pfa`, one per bit, computes p = a ⊕ b, g = a·b and s = p ⊕ c. It does not
  make a carry of its own.
* `cll4`, one per group, computes all four carries of the group from the
  p's, g's and the group carry in c0, in two levels of logic:
  c1 = g0 + p0c0, c2 = g1 + p1g0 + p1p0c0, and so on up to c4. It also
  forms the group propagate PG = p3p2p1p0 and the group generate
  GG = g3 + p3g2 + p3p2g1 + p3p2p1g0.
* The groups are chained: c4 of one group is c0 of the next. Carries are
  therefore looked ahead inside a group and ripple from group to group.

An immediate assertion checks on every evaluation that c4 = GG + PG·c0.

The default WIDTH = 8 is the two-group adder this design is built around.
The filter uses widths of 25, 22, 20, 18 and 16 bits. Where the width is not
a multiple of four, the top group is zero-padded. The integrators use
cin = 0. The combs subtract as a + ~b + 1, with cin = 1.

## Timing and interfaces

All logic runs on one clock, `clk`, at the modulator's sample rate. Reset is
`rst_n`: asynchronous and active low. It clears every register, including
the decimation counter.

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | sample clock; one input word per rising edge |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `cic_in` | in | 5 | modulator word, two's complement |
| `cic_out` | out | 16 | filtered, decimated word, held between strobes |
| `cic_out_valid` | out | 1 | high for one clock when `cic_out` is new |

* An input taken on edge p is registered by the adjuster on edge p. It is in
  integrator k after edge p + k, and in the down-sampler register after
  edge p + 6 at the earliest. It reaches `cic_out` after edge p + 11.
* The down-sampler takes the integrator output on every 16th edge, counted
  from reset release. The first valid output therefore follows edge 21, and
  later outputs come exactly 16 clocks apart. A concurrent assertion in
  `cic_filter` checks this spacing.
* The comb section works at the decimated rate. It runs on the same clock,
  and a valid strobe travels with the data: each comb loads its delay
  register and its output register only when its input word is new. This
  gives the combs a sixteenth of the integrators' rate without a second
  clock domain.

## Files

| file | contents |
|---|---|
| `rtl/cic_pkg.sv` | N, R, M, word widths, per-stage register widths |
| `rtl/pfa.sv` | one-bit slice: sum, propagate, generate |
| `rtl/cll4.sv` | 4-bit look-ahead carry logic with PG/GG |
| `rtl/cla_adder.sv` | WIDTH-bit adder from 4-bit look-ahead groups |
| `rtl/cic_adjuster.sv` | input register and sign extension to 25 bits |
| `rtl/cic_integrator.sv` | LSB removal + accumulator stage |
| `rtl/cic_downsampler.sv` | modulo-16 counter, sampling register, valid strobe |
| `rtl/cic_comb.sv` | x[n] − x[n−M] at the decimated rate, output register |
| `rtl/cic_filter.sv` | the complete filter (top) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the two below |
| `tb/tb_cic_filter.sv` | end-to-end test at full size |
| `tb/tb_cic_snr.sv` | sine through a sigma-delta model; SINAD and truncation noise |
| `tb/sdm3_model.sv` | behavioural 3rd-order, 5-bit sigma-delta modulator (testbench only) |

## Verification

Every testbench compares the design against values it works out on its own.
Each one ends by printing `TB_RESULT checks=N failures=M`.

* `tb_pfa` and `tb_cll4` check every input combination of the slice and of
  the look-ahead logic. The reference for `cll4` is a bit-by-bit ripple of
  the carries.
* `tb_cla_adder` checks the 8-bit adder on all 2^17 combinations of a, b and
  cin. It checks a 25-bit adder on 20,000 random operand pairs and on carries
  that run the full length.
* `tb_cic_integrator`, `tb_cic_downsampler`, `tb_cic_comb` and
  `tb_cic_adjuster` each check one stage against an integer model. The
  integrator test forces wrap-arounds. The comb test also checks M = 2 and
  checks that nothing moves between strobes.
* `tb_cic_filter` runs the full-size filter through several phases: random
  input, DC at both polarities, a quantised sine, and a reset in mid-run. It
  checks four things:
  * the output on every clock, bit for bit, against a clock-accurate integer
    model of the truncated datapath;
  * every output word against the ideal filter (the 76-tap convolution):
    at most 300 LSB apart, and at most 80 LSB rms;
  * the latency and the 16-clock spacing of the outputs;
  * that wrap-around, non-zero truncated bits, full-scale input, decimated
    outputs and a reset in operation each happened at least once.
* `tb_cic_snr` measures amplitude, SINAD and truncation noise, as described
  above.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  --top-module tb_cic_filter rtl/cic_pkg.sv tb/tb_cic_filter.sv
./obj_dir/Vtb_cic_filter
```

Replace `tb_cic_filter` with any other testbench name. Every test finishes
in well under a second.

## What follows the published filter and what is this design's own

Taken from the published design:

* N = 5, M = 1, R = 16 and the 5-bit input.
* The 25-bit first stage from Hogenauer's bound.
* The integrator widths 25/22/20/18/16 with LSB removal after each
  integrator.
* The 16-bit combs with a register after each one.
* The counter-driven down-sampler with its output register.
* The absence of extra pipeline registers in the integrators.
* The carry look-ahead equations and the chaining of 4-bit groups.

Choices made here, where the published description is silent:

* The "adjuster" ahead of the first integrator is only named in the
  published design. Here it registers the input and sign-extends it, which
  makes the input two's complement.
* The bit-level gates of the adder slice are p = a ⊕ b and g = a·b.
* Every clock edge is an input sample, with no input valid.
* The reset is asynchronous and active low.
* The sampling phase of the down-sampler, and the valid strobe that
  replaces a separate slow clock for the combs.
* The combs use the look-ahead adder as a subtractor. The published text
  mentions the adder only for the integrators.
* Truncation rounds towards minus infinity (plain bit dropping), not to the
  nearest value.
* Widths that are not a multiple of 4 are zero-padded to whole groups.

Not implemented:

* The sigma-delta modulator. It is the analog front end; the model in `tb/`
  is only a stand-in.
* The first half-band filter, the droop-correction filter and the second
  half-band filter. Each would decimate by a further 2, giving an overall
  factor of 128. Only their band edges are known, not their coefficients or
  structure.
* The "order-update and time-update" adaptation mentioned with the
  architecture. No hardware for it is described; the filter is a fixed CIC.

Not checked:

* The published clock rate (332.93 MHz on a Virtex FPGA), core area and
  power. These belong to the implementation flow and cannot be reproduced
  from RTL.
