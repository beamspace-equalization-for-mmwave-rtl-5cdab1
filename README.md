# CSPADE: a sparsity-adaptive beamspace equalizer for mmWave massive MIMO

An all-digital mmWave massive-MIMO base station has to recover the symbols of U
users from the B antenna signals. After the usual linear (LMMSE) preprocessing,
the per-symbol work is a matrix-vector product

    s_hat = W y        (W: U x B complex, y: B complex)

performed for every received vector. At mmWave frequencies each user arrives over
only a few paths, so after a spatial DFT across the antenna array (the
*beamspace*), both the receive vector `y` and the beamspace LMMSE matrix `W` are
approximately sparse: most entries are close to zero. Complex sparsity-adaptive
equalization (CSPADE) exploits this at run time. A complex product `W[u][b] * y[b]`
is skipped whenever **both** operands are small, and a skipped multiplier does not
toggle, which saves its dynamic power. "Small" is judged with the cheap norm
max(|Re x|, |Im x|): two absolute values, two comparisons with a threshold and an
AND. There are two thresholds, `tau_w` for matrix entries and `tau_y` for
receive-vector entries, and they trade power against accuracy.

This repository holds synthesizable SystemVerilog for the fully unrolled,
adder-tree based CSPADE equalizer (AT-CSPADE). The design follows the architecture
published in *"Beamspace Equalization for mmWave Massive MIMO: Algorithms and VLSI
Implementations"* (S. H. Mirfarshbafan, C. Studer), with B = 64 antennas (beams) and
U = 8 users. It computes one complete matrix-vector product per clock cycle. The
sections below mark where this RTL follows that publication and where it makes
its own choices.

## Block structure

```
                x_re[b], x_im[b]  (b = 0..B-1, 12 bit each; a row of W or the vector y)
                   |
   tau_y, tau_w    |            lw (load weight)        sp (save power)
        |          |                 |                        |
  +-----v----------v--+              |                        |
  | thr_cmp  x B      |  c[b]: "x_b is small"                 |
  | (one per beam)    |-----------+  |                        |
  +-------------------+           |  |                        |
                                  v  v                        v
  +--------------------------------------------------------------------+
  | cspade_dotp  x U   (DOTP u computes s_hat[u])                      |
  |   dotp_ctrl : lw -> lw_u (high in the u-th cycle of an LW burst)   |
  |   cspade_cm x B : stores W[u][b] and c_w; multiplies by y[b]       |
  |                   or mutes itself when sp & c_w & c[b]             |
  |   adder_tree    : pipelined sum of the B products                  |
  |   output stage  : 12 -> 8 fractional bits, saturate to 13 bits     |
  +--------------------------------------------------------------------+
                                  |
                    s_re[u], s_im[u] (13 bit),  s_valid
```

| File | Module | What it is |
|---|---|---|
| `rtl/cspade_pkg.sv` | package | word widths, fixed-point formats, CM latency |
| `rtl/thr_cmp.sv` | `thr_cmp` | threshold unit of one beam (combinational) |
| `rtl/dotp_ctrl.sv` | `dotp_ctrl` | per-DOTP load sequencer |
| `rtl/cspade_cm.sv` | `cspade_cm` | mute-capable complex multiplier (CSPADE-CM) |
| `rtl/adder_tree.sv` | `adder_tree` | pipelined complex adder tree |
| `rtl/cspade_dotp.sv` | `cspade_dotp` | one dot-product unit |
| `rtl/at_cspade.sv` | `at_cspade` | top level: B threshold units and U DOTPs |

The threshold units are shared. The comparison for beam `b` is done once, and its
bit `c[b]` goes to the multiplier of beam `b` in all U dot-product units. This
avoids U-fold redundant comparators.

## Number formats

All complex signals have separate real and imaginary words of the width given.

| Signal | Bits | Fractional bits | Range |
|---|---|---|---|
| beamspace receive vector `y` | 9 | 1 | -128 .. 127.5 |
| beamspace LMMSE matrix `W` | 12 | 11 | -1 .. 1 - 2^-11 |
| equalizer output `s_hat` | 13 | 8 | -16 .. 16 - 2^-8 |
| input ports `x_re`, `x_im` | 12 | carries `W` as is, `y` sign-extended | |
| thresholds `tau_w`, `tau_y` | 12, unsigned | in LSBs of `W` and of `y` | |
| complex product inside a CM | 22 | 12 | exact |
| adder-tree sum (B = 64) | 28 | 12 | exact |

The formats of `y`, `W` and `s_hat` are the published ones. They were chosen by
fixed-point simulation: beamspace signals need more bits than antenna-domain
signals, because sparsity widens their dynamic range. The internal widths are
this design's choice. Products and sums are kept exact, and precision is lost in
one place only: at the output. There the sum drops 4 fractional bits by
truncation (rounding toward minus infinity) and saturates to 13 bits. The
publication gives the output format but not the rounding or overflow rule.

Because `W` and `y` share the same ports, the port is as wide as `W` (12 bits).
While `lw` is low, the CM stores only the low 9 bits of the port as `y`. A
receive value must therefore already fit in 9 bits, sign-extended to 12.

## The mute-capable multiplier (`cspade_cm`)

Most of the silicon, and all of the power saving, is in this block. One instance
sits at every (user, beam) position: 512 of them at the default size.

Registers:

* `w_re`, `w_im` (12 b) and the weight's smallness bit `c_w`. They are written
  only while the DOTP's own load strobe `lw_u` is high.
* `y_re`, `y_im` (9 b). They are written when `UA & !lw`.
* `o_re`, `o_im` (22 b), the output registers after the four real multipliers
  and the two adders. They are written when `UA1`.
* `UA1`, `UA2`: the unit-active flag delayed by one and by two cycles.

The unit-active flag is combinational in the input cycle:

    UA = !(sp & c & c_w)

Here `c` is the smallness bit of the input arriving in this cycle, from the shared
threshold unit. The product is skipped only when save-power is enabled, the
stored weight is small and the current input is small. With `sp` low the CM is
an ordinary pipelined complex multiplier.

A product computed in cycle t+1 from an input registered at the end of cycle t
works out like this:

| cycle | `y` registers | multipliers/adders | output registers | output mux |
|---|---|---|---|---|
| t | capture input if `UA` | - | - | - |
| t+1 | hold | compute `y*w` (idle if muted) | capture if `UA1` | - |
| t+2 | - | - | hold | `UA2 ? o : 0` |

When a product is skipped, three things follow:

* The `y` registers keep their old value, so the multipliers and adders see
  unchanged operands and do not toggle.
* The output registers also keep their value.
* Two cycles later the output multiplexers, which come *after* the output
  registers, replace the stale value by 0 + j0.

Because the multiplexers sit behind the registers, the output registers are
inside the mute-capable part of the CM as well. This is the main difference from
the real-valued SPADE multiplier of the same publication: there, each of the four
real multipliers is muted separately and needs its own multiplexer in front of
the adders. Here a whole complex product is either computed or skipped, so one
pair of `y` registers and two multiplexers suffice. The publication attributes
about 92 % of the CSPADE-CM area to its mute-capable part, and about 83 % of the
whole equalizer.

In RTL, "muting" is a register enable. A synthesis flow with clock gating turns
these enables into gated clocks. The power saving itself can only be seen in a
gate-level power simulation. What the testbenches do check is that a muted cycle
leaves the `y` registers unchanged and that the result equals the sum of the
products that were not skipped.

## Loading a matrix and streaming vectors

Timing of the top level `at_cspade`:

* **Load.** Hold `lw` high for exactly U cycles. In the k-th of them (k = 0..U-1),
  drive row k of `W` on `x_re[0..B-1]`, `x_im[0..B-1]`. The threshold units
  compare against `tau_w` while `lw` is high. Each CM stores its weight and the
  comparison result `c_w`. Each DOTP has its own `dotp_ctrl`, a counter of
  LW-high cycles that is cleared while `lw` is low. It lets DOTP k store only
  the k-th row. An immediate assertion in `at_cspade` reports an LW burst whose
  length is not U.
* **Equalize.** With `lw` low, every cycle's `x` is a receive vector `y`. There
  is no input handshake: every cycle with `lw` low is a vector. The thresholds
  and `sp` may change in any cycle; they apply to the vector of that cycle.
* **Results.** The output for the vector of cycle t is on `s_re[u]`, `s_im[u]` in
  cycle t + LAT, with LAT = 2 + clog2(B) + 1 = 9 for B = 64. That is two cycles in
  the CM, one per adder-tree level, and one output register. `s_valid` is high
  exactly for outputs that belong to a cycle with `lw` low.
* **Rate.** One U x B product per cycle. At the 1 GHz clock reported for the
  published 22 nm layout, with 16-QAM (4 bits per symbol), that is
  U * 4 * 1 GHz = 32 Gb/s.

While `lw` is high, the outputs of later cycles carry meaningless values, and
`s_valid` is low for them. A new matrix can be loaded between any two vectors; the
vectors already in flight finish with the old matrix. That works because the old
weights have already been multiplied by the time the new ones are stored.

Reset (`rst_n`, synchronous, active low) clears every register, including the
weights. The publication does not describe reset.

## Choosing thresholds

The thresholds are unsigned integers in units of the LSB of the value they are
compared with:

* `tau_w` in units of 2^-11, the LSB of `W`;
* `tau_y` in units of 2^-1, the LSB of `y`.

An entry counts as small when both |Re| and |Im| are *strictly* below the
threshold. `tau = 0` makes nothing small, so muting never happens. The
publication picks threshold pairs offline, by Monte-Carlo simulation of the
error rate. Its operating points reach a multiplier activity rate of about 21 %
with line-of-sight channels and 45 % with non-line-of-sight channels, at almost
no error-rate loss. The activity rate is the fraction of complex products that
are still computed. Those numbers depend on realistic channel data and cannot
be reproduced here.

## What follows the publication and what is this design's own

Follows the publication:

* the fully unrolled structure: U DOTPs of B CMs plus an adder tree, one
  product per cycle;
* the shared per-beam threshold units, with the `lw`-selected threshold, the
  abs units, the two comparators and the AND;
* the CSPADE-CM register set and enables (`w` on LW, `y` on `UA & !LW`, output
  registers on `UA1`, multiplexers on `UA2` after the output registers);
* the signs of the complex multiply;
* the number formats of `y`, `W` and `s_hat`;
* loading W row by row with LW high for U cycles;
* B = 64, U = 8.

This design's own choices, where the publication is silent:

* the inside of the DOTP controller (a cleared counter);
* the strict `<` in the comparison;
* threshold width and units;
* one register per adder-tree level;
* exact internal arithmetic;
* truncation and saturation at the output;
* storing the low 9 bits of the port as `y`;
* the `s_valid` output and the latency it implies;
* synchronous zero reset;
* the LW-burst assertion.

Not included:

* the spatial FFT that produces `y`;
* channel estimation and the computation of `W` (the published equalizer also
  excludes them);
* the RF front end and ADCs;
* the alternative architectures discussed alongside CSPADE: the real-valued
  SPADE multiplier, the entry-wise OMP and antenna-domain LMMSE equalizers, and
  the sequential MAC-based CSPADE.

## Size

Yosys coarse synthesis of the default configuration (B = 64, U = 8) gives
about 45,800 flip-flop bits. It also reports 28,224 memory bits: that is how it
represents the adder-tree pipeline arrays. On the arithmetic side there are
1,024 multiply blocks, which are the 4 real multipliers of each of the 512 CMs,
expressed as multiply-accumulate cells. The published layout (22 nm FDSOI)
occupies 0.5 mm^2 and runs at 1 GHz. No timing or area closure has been done on
this RTL.

## Simulation

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`.

| Testbench | Covers |
|---|---|
| `tb/tb_thr_cmp.sv` | corner cases (threshold equality, -2048) and random inputs against an integer model |
| `tb/tb_dotp_ctrl.sv` | U = 8 controllers; full, short, long and random LW bursts |
| `tb/tb_cspade_cm.sv` | random loads and inputs with random `c`/`sp`; product, 2-cycle latency, muting to zero and the freeze of the `y` registers |
| `tb/tb_adder_tree.sv` | 64-input and 5-input trees; exact sums at the right latency, extremes |
| `tb/tb_cspade_dotp.sv` | one DOTP at B = 8, U = 4; row selection, muting, saturation both ways, 6-cycle latency |
| `tb/tb_at_cspade.sv` | the default 64 x 8 equalizer end to end; see below |
| `tb/tb_workload_64x8.sv`, `tb/tb_workload_64x16.sv` | synthetic line-of-sight and non-line-of-sight uplinks; see below |

`tb_at_cspade` runs at the default parameters. It loads sparse random matrices
and streams back-to-back vectors with save-power on, off and switching every
vector. It reloads W with new thresholds in the middle of the stream and then
forces saturation. Every output and `s_valid` is compared bit-exactly, 9 cycles
after its input, with an integer model:

    s[u] = sat13( floor( sum_b act(u,b) * W[u][b] * y[b] / 16 ) )
    act(u,b) = !( sp & ||W[u][b]|| < tau_w & ||y[b]|| < tau_y )

The testbench also counts how often each mechanism happened, and fails if one
never did: weight loads, muted products, both-small products with save-power
off, products kept because only one operand was small, saturation, back-to-back
outputs and SP switches.

The workload testbenches (`tb/workload_runner.sv` does the work) build the
channels and data in floating point:

* a 64-element half-wavelength array, users spread over a 120 degree sector, one
  path per user (line of sight) or four Rayleigh paths (non-line of sight);
* the unitary DFT, the LMMSE matrix by Gauss-Jordan inversion, a 6-bit
  quantizer, 16-QAM at 20 dB SNR;
* W scaled and quantized to the 12-bit format.

The equalizer's outputs are checked bit-exactly. The testbenches print the
symbol error rate with save-power on and off and the resulting multiplier
activity rate. The thresholds are set per channel: `tau_w` is 5 % of the
largest |Re| or |Im| of the quantized W, and `tau_y` is 0.35 times the rms of
the quantized y entries. The testbenches fail if save-power adds more than 5
percentage points of symbol errors, or if the error rate without save-power is
above 10 %. The
U = 16 size is simulated by building the equalizer with `U = 16`. These channels
are a simple geometric model, not the ray-tracing-based channels of the
publication, so their activity rates are indicative only.

Running a testbench with Verilator, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj_tb_at_cspade \
    rtl/cspade_pkg.sv rtl/*.sv tb/tb_at_cspade.sv --top-module tb_at_cspade
./obj_tb_at_cspade/Vtb_at_cspade
```

For the workload testbenches, also add `tb/workload_runner.sv` to the file list.
Building the full-size design takes about a minute, and the workload testbenches
take several minutes. The simulations themselves run in well under a second.
Since the simulator is two-state, every register the design reads is reset, and
the testbenches start from a reset.

## Changing the design

* `B` and `U` are parameters of `at_cspade`. `cspade_dotp` and `dotp_ctrl`
  follow from them, and the latency becomes 2 + clog2(B) + 1.
* The word widths live in `cspade_pkg`. The product and sum widths are derived
  from them; the output shift is `(YF + WF) - SF`.
* To make the design a plain (antenna-domain or beamspace) LMMSE equalizer
  without muting, tie `sp` low.
