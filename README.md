# A fully parallel 512-point IFFT core for OFDM radar range estimation

In an OFDM radar the transmitted symbols are known, so the receiver can divide
every received subcarrier value by the value it sent. What remains is the
channel: for a point target, a phase that advances linearly across the
subcarriers (set by the round-trip delay) and slowly across the symbols (set by
the Doppler shift). An inverse FFT of that ratio turns the phase slope into a
peak, the *periodogram*, whose position is the target's range. This inverse FFT
is by far the most arithmetic-heavy step of the receiver, and it is tolerant of
small arithmetic errors, which makes it the natural place to use cheaper,
approximate adders and multipliers.

This repository holds synthesizable SystemVerilog for that IFFT core. It is
fully parallel: it contains N/2 radix-2 butterflies, so a whole stage of the
transform is computed in one clock cycle and an N-point IFFT takes log2(N)
cycles. The default size is N = 512, one frame of 32 subcarriers by 16 OFDM
symbols, which the core transforms in 9 cycles (90 ns at 100 MHz; one frame
lasts 16 x 1.3 us = 20.8 us). All arithmetic sits in two small units, a 16-bit
signed adder and a 16 x 16 signed multiplier, so that approximate versions of
them can be dropped in without touching anything else. The units provided here
are the accurate ones: a carry-lookahead adder (CLA) and a Booth-encoded
Wallace multiplier (BEWM), chosen because ripple-carry chains do not meet a
100 MHz clock.

The architecture (block split, signal names, the butterfly's four multipliers
and six adders, the counter-driven reshuffle, the twiddle ROM, the log2(N)
cycle timing, 16-bit signed arithmetic and N = 512) follows the published
description of the design this RTL reproduces. The wiring pattern of the
reshuffle network, the number format, the scaling, the saturation, the exact
cycle alignment of start and done, and the insides of the adder and multiplier
are choices made here; each is stated where it applies below and in the
opening comment of its file.

## Block structure

```
            start, clk, rst                           done
                 |                                     ^
          +--------------+  stage (counter)            |
          |  ifft_ctrl   |-----------+-----------------+
          +--------------+           |
                 | en                v
 x_in[N] --> +-----------------------------+  xa[N/2], xb[N/2]   +----------------------+
             |         reshuffle           |------------------->| N/2 x radix2_butterfly|
 y_out[N] <--|  (routing for next stage)   |<-------------------|  Ya = Xa + W*Xb       |
             +-----------------------------+  ya[N/2], yb[N/2]   |  Yb = Xa - W*Xb       |
                        | tf_sel[N/2]          (registered)      +----------------------+
                        v                                                ^ w[N/2]
                +----------------+                                       |
                |  twiddle_rom   |---------------------------------------+
                +----------------+
```

| File | Block | Role |
|---|---|---|
| `rtl/ellora_ifft.sv` | top | wires the blocks below; N/2 butterfly instances |
| `rtl/ifft_ctrl.sv` | basic controls | enable, stage counter, `done = (counter == log2 N)` |
| `rtl/reshuffle.sv` | reshuffle for next stage | input/feedback routing, twiddle selection, output ordering |
| `rtl/twiddle_rom.sv` | twiddle factors | cos/sin table with one read port per butterfly |
| `rtl/radix2_butterfly.sv` | radix-2 butterfly | 4 multipliers + 6 adders, Ya/Yb flip-flops |
| `rtl/cla_adder.sv` | accurate adder | 16-bit signed two-level carry-lookahead adder |
| `rtl/bewm_multiplier.sv` | accurate multiplier | radix-4 Booth, Wallace (3:2) reduction, CLA final add |
| `rtl/ellora_pkg.sv` | package | `cplx_t`, widths, index functions, saturation |

The only state in the datapath is the Ya/Yb register pair of each butterfly:
N x 32 = 16,384 flip-flops at N = 512. There is no input buffer and no output
buffer. In the first stage the butterflies read the core input directly; in
every later stage they read their own previous outputs through the reshuffle
network; when the last stage is done, the reshuffle network presents those same
registers, reordered, as `y_out`.

## How a transform runs

The control block has a `busy` flag and a stage counter.

* A `start` pulse while idle raises `en` in that same cycle, with `stage = 0`.
  The reshuffle network then feeds the butterflies from `x_in`, and stage 0 is
  written into the Ya/Yb registers at the next rising edge. `x_in` therefore
  only has to be valid during the start cycle.
* In the following cycles `stage` is 1, 2, ..., log2(N) - 1 and the
  butterflies read the previous stage's Ya/Yb.
* After log2(N) rising edges (counting the one that ends the start cycle) the
  counter holds log2(N), `busy` is low and `done` is high. The Ya/Yb
  registers are no longer enabled, so `done` and `y_out` stay valid until the
  next `start`.
* A `start` while busy is ignored. A new `start` may be given in the same cycle
  in which `done` is first seen; `done` falls after that edge.
* `rst` is synchronous and active high; it clears the registers and the
  counter, so `done` is low after reset.

```
 clk      _|‾|_|‾|_|‾|_|‾|_ ... _|‾|_|‾|_|‾|_
 start    __|‾‾‾|_______________________________
 stage       0   1   2   ...  8
 en       __|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|___________
 done     ____________________________|‾‾‾‾‾‾‾   (9 edges after the start edge, N = 512)
```

## The reshuffle network

This is the part of the design that is easiest to get wrong, so it is spelled
out here. The core computes an in-place radix-2 decimation-in-time transform
over a *working vector* of N positions. The input enters in bit-reversed order
(position p holds `x_in[bitrev(p)]`) and the result leaves in natural order.

In stage s (s = 0 .. log2(N) - 1) butterfly j, j = 0 .. N/2 - 1, combines

```
ia = (j >> s) * 2^(s+1) + (j mod 2^s)        first input  (Xa)
ib = ia + 2^s                                second input (Xb)
k  = (j mod 2^s) << (log2(N) - 1 - s)        twiddle index, W = exp(+i*2*pi*k/N)
```

and writes Ya back to position ia and Yb to position ib. Because each
butterfly keeps its own outputs in its own registers, "position p after stage
s" is really "Ya or Yb of some butterfly". With the butterfly outputs viewed as
one vector `{Yb[N/2-1:0], Ya[N/2-1:0]}`, position p after stage s is found at

```
h = 2^s, blk = p >> (s+1), off = p mod 2^(s+1)
off <  h :  Ya[blk*h + off]
off >= h :  Yb[blk*h + off - h]
```

So every butterfly input in every stage comes from a fixed place: from
`x_in[bitrev(2j)]` / `x_in[bitrev(2j+1)]` in stage 0 and from one specific Ya or
Yb in each later stage. The network is therefore nothing but one log2(N)-way
multiplexer per butterfly input, selected by the stage counter, plus fixed
wiring for `y_out` (position p after the last stage: `Ya[p]` for p < N/2,
`Yb[p - N/2]` above). All indices are elaboration-time constants computed by
the functions in `ellora_pkg`. The twiddle index multiplexer works the same way
and drives the ROM address of each butterfly.

Example, N = 8, stage 1 (h = 2): butterflies 0..3 combine positions (0,2),
(1,3), (4,6), (5,7) with twiddle indices 0, 2, 0, 2; position 2 after stage 0
is Ya[1] and position 3 is Yb[1].

## Butterfly arithmetic and number format

Samples are complex, 16-bit signed real and 16-bit signed imaginary parts
(`cplx_t`). Twiddles are 16-bit signed Q1.14 values (16384 = 1.0), so that
+1, -1, +i and -i are exact.

The butterfly computes `Ya = Xa + W*Xb`, `Yb = Xa - W*Xb` with exactly four
multipliers and six adders:

```
m_rr = Xb.re*W.re   m_ii = Xb.im*W.im   m_ri = Xb.re*W.im   m_ir = Xb.im*W.re     (4 multipliers)
P.re = (m_rr>>>15) - (m_ii>>>15)        P.im = (m_ri>>>15) + (m_ir>>>15)        (adders 1, 2)
Ya   = (Xa>>>1) + P                      Yb  = (Xa>>>1) - P                      (adders 3..6)
```

Subtraction is done inside the adder as `a + ~b + 1`. Every adder produces a
17-bit result that is saturated to 16 bits.

**Scaling.** The products are shifted by 15 rather than 14 and Xa is halved,
so each stage computes (Xa +/- W*Xb) / 2. Over log2(N) stages this is exactly
the 1/N of the inverse DFT, so

```
y_out[n] ~= (1/N) * sum_k x_in[k] * exp(+i*2*pi*k*n/N)
```

with an error of a few LSBs (each stage floors twice; the tests allow 2 LSB
per stage and observe less). Halving in every stage means no stage can grow
beyond its inputs' magnitude: the complex magnitude of Ya and Yb never exceeds
the largest input magnitude. Saturation is therefore only reachable when inputs
use both parts near full scale (complex magnitude above 32767) and a later
stage rotates such a value onto an axis. Keeping the complex magnitude of the
input below 2^15 avoids it completely. The radar test frame uses an amplitude
of 16000.

The twiddle table holds W_N^-k with W_N = exp(-i*2*pi/N), i.e.
`cos(2*pi*k/N) + i*sin(2*pi*k/N)`, for k = 0 .. N/2 - 1, each part rounded to
the nearest Q1.14 value. The table is computed at elaboration time with
`$cos`/`$sin`, so it follows N with no data file.

## Arithmetic units and approximate variants

`cla_adder` is a parameterised signed carry-lookahead adder (default 16 bits,
4-bit groups). Each group forms its carries in flattened lookahead form from
the group carry-in; a second lookahead level forms every group carry-in
directly from the group generate/propagate terms and `cin`. The top result bit
is the signed extension `a[W-1] ^ b[W-1] ^ carry_out`, so `sum = a + b + cin`
exactly.

`bewm_multiplier` is a 16 x 16 signed multiplier: radix-4 Booth recoding of
`b` gives 8 digits in {-2..2}; each partial product is `|d|*a`, one's
complemented when d is negative, with the missing +1 collected in a ninth
correction row. The nine rows are reduced by layers of 3:2 carry-save adders
(9 -> 6 -> 4 -> 3 -> 2) and summed by a 32-bit `cla_adder`.

To evaluate an approximate design point, replace the instances in
`radix2_butterfly.sv` (`u_mul_*`, `u_add_*`, `u_sub_*`) by the approximate
circuit with the same ports: a 16-bit signed adder with 17-bit result and
carry-in (or a separate subtractor), and a 16 x 16 signed multiplier with
32-bit product. The approximate circuits themselves (for example the EvoApprox
`add16se_*` adders and `mul16s_*` multipliers) are not part of this
repository. The bit-exact reference model in `tb/ellora_ref_pkg.sv` models the
accurate units; for an approximate unit, change the model's `bfly` function
accordingly, or compare against the floating-point reference instead.

## Size

At N = 512 the core holds 256 butterflies: 1,024 16 x 16 multipliers, 1,536
16-bit adders, 16,384 flip-flops, 512 nine-way input multiplexers of 32 bits,
and a 256-entry twiddle table read through 256 ports. Only 9 distinct twiddle
indices occur per butterfly, so synthesis can reduce each ROM port to a small
constant multiplexer. The parameters are `N` (power of two, at least 4) on
`ellora_ifft`, `reshuffle` and `twiddle_rom`, and `DATA_W` and `TW_FRAC` in
`ellora_pkg`.

## Where this RTL departs from, or goes beyond, the published design

* Only the accurate CLA/BEWM arithmetic is provided. The approximate adder and
  multiplier pairs that are the point of the original study come from an
  external library and are not included; the results of that study (area,
  power, range accuracy per pair) cannot be reproduced with this code alone.
* The published description does not say how overflow is handled. The
  per-stage halving, Q1.14 twiddles and saturation here are this design's
  choices.
* The routing pattern of the reshuffle network, the bit-reversed input order
  and the cycle alignment of `start`/`done` are not specified there. The
  standard in-place radix-2 DIT pattern is used.
* The twiddle base is stated there as W_N = exp(-i*2*pi/N) for the IFFT. An
  inverse transform needs exp(+i*2*pi*k/N), which is what the table holds
  (W_N raised to -k).
* The rest of the radar processing chain (4-QAM modulation, Zadoff-Chu
  precoding, the channel, the element-wise division before the IFFT, and the
  power and peak search after it) is not implemented in hardware. The
  full-size testbench builds the divided frame directly.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_cla_adder` | 16- and 32-bit instances, corner and random operands, both carry-ins, subtraction by `a + ~b + 1` |
| `tb_bewm_multiplier` | corner operands (every Booth digit pattern), 20,000 random pairs against `a*b` |
| `tb_radix2_butterfly` | known values (W = 1, W = i), random and full-scale inputs against the bit-exact model, saturation, hold with `en` low, reset |
| `tb_twiddle_rom` | every entry within half an LSB of cos/sin, exact points at k = 0, N/8, N/4, 3N/8 |
| `tb_reshuffle` | N = 16, tagged inputs, routing of every stage and the output order, rebuilt with the textbook DIT loop |
| `tb_ifft_ctrl` | counter sequence, `done` after exactly log2(N) edges, hold, ignored start, reset |
| `tb_ellora_ifft` | the whole core at N = 64: 10 transforms, bit-exact and within 2 LSB/stage of a floating-point IDFT, latency, back-to-back starts, ignored start, hold, a deliberately saturating input, reset mid-transform; each mechanism is counted and must occur |
| `tb_ellora_ifft_full` | the core at its default N = 512 on a radar frame (below) |

`tb/ellora_ref_pkg.sv` holds the reference models: a bit-exact butterfly, the
whole fixed-point transform written as the textbook triple loop, and a
floating-point inverse DFT.

**Radar frame.** `tb_ellora_ifft_full` builds the divided frame of a
32-subcarrier, 16-symbol OFDM radar (960 kHz subcarrier spacing, 1.3 us symbol
duration, 30 GHz carrier) for one target at 50 m and 20 m/s, laid out symbol
after symbol, with noise at every SNR from -5 dB to 10 dB (four frames per
point, 64 in all). For each frame it checks the latency of 9 cycles, all 512
outputs bit for bit and against the floating-point IDFT, and that the
periodogram peak falls in the same bin as the floating-point one. With this
layout the peak lands at bin 160 at every SNR, i.e. range cell 10 of
c / (2 x 32 x 960 kHz) = 4.88 m, or 48.8 m. The core runs here at its full
default size, N = 512.

Running a testbench with Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ellora_pkg.sv tb/ellora_ref_pkg.sv tb/tb_ellora_ifft.sv --top-module tb_ellora_ifft
./obj_dir/Vtb_ellora_ifft
```

The other testbenches are built the same way (`tb_<block>.sv`, top module
`tb_<block>`). The full-size core takes a few minutes to compile; it simulates
in well under a second.
