# Scalable video coding with compressed sensing: encoder and decoder RTL

This design codes a group of video frames into a base layer and several enhancement
layers. A decoder can stop after any layer and still get a usable picture; each
further layer adds resolution or detail. The layers are not coded coefficient by
coefficient. Instead, the wavelet coefficients of each enhancement layer are cut into
vectors, most small coefficients are zeroed, and each vector is replaced by a few
random ±1 projections of itself (compressed-sensing "measurements"). The number of
projections depends on how many coefficients survived. The decoder rebuilds each
vector from its projections with an iterative solver, then runs the inverse wavelet
transform.

The encoder needs only additions, subtractions, comparisons and a counter: there are no
multipliers outside the wavelet filters. That is the point of the scheme. The decoder
does the heavy lifting in the solver.

All RTL is SystemVerilog 1800-2017 and synthesizable. It is written for serial, one
operation per clock throughput, so it is small but slow.

## Data flow

```
 pixels ──► dwt3d (forward) ──► subband_scan ──► base layer ─────────► quantizer ─► SYM_BL
                                      │
                                      └─► vectors of N ─► l0_threshold ─► cs_measure ─► quantizer ─► SYM_HDR / SYM_MEAS
                                                         (T, count K)   (index_finder,
                                                                         bernoulli_codebook)
  ───────────── symbol stream (entropy coding goes here; not built) ─────────────
 SYM_* ─► cs_decoder: BL ─► GOF buffer
                      HDR+MEAS ─► eamp ─► sub-band formation (subband_scan) ─► GOF buffer
                      ─► dwt3d (inverse) ─► rounded, clipped pixels
```

`svc_codec_top` holds one `cs_encoder` and one `cs_decoder`. Its `enc_sym_*` output and
`dec_sym_*` input are valid/ready symbol streams. Connecting them directly is a
lossless channel, and this is how the end-to-end testbench uses it.

## Module list

| Module | What it is |
|---|---|
| `svc_pkg` | Coefficient type, the K→j→M table, the symbol struct, and the ±1 codebook hash |
| `dwt97_line` | One line of the CDF 9/7 lifting DWT, forward or inverse, in place |
| `haar_lift` | Integer Haar lifting of a frame pair (combinational) |
| `dwt3d` | 3-level 3-D DWT engine around a GOF-sized word buffer |
| `subband_scan` | Address generator for the layer order and the vector cutting |
| `l0_threshold` | Hard threshold T and non-zero count K |
| `index_finder` | K → codebook index j and measurement count M |
| `bernoulli_codebook` | Sign of entry (row, column) of the matrix Φj |
| `cs_measure` | y = Φj·s using additions and subtractions only |
| `quantizer` | Rounding, saturating uniform quantiser |
| `eamp` | Reconstruction of s from (y, j, K): AMP first, then hard thresholding |
| `cs_encoder`, `cs_decoder` | The two halves |
| `svc_codec_top` | Both halves side by side |

Every file starts with a comment giving its interface, its timing, and which parts
follow the original scheme and which are choices of this implementation.

## Numbers

Coefficients are 32-bit signed fixed point with 8 fractional bits (`svc_pkg::FRAC`). A
pixel enters as `pixel << 8`.

The default parameters are those of the main configuration:
- frames of 1920×1080;
- a group of frames (GOF) of 8;
- 3 levels of 3-D DWT;
- vectors of N = 2160 coefficients;
- a 16-entry measurement table with at most M = 2000 measurements;
- 400 solver iterations.

## The 3-D wavelet transform (`dwt3d`)

Each level does two things:
- a 2-D CDF 9/7 DWT of every frame slot, rows first and then columns;
- a temporal Haar step between pairs of slots.

The Haar step puts the temporal low (L) frame of each pair in the lower half of the
slots and the high (H) frame in the upper half. Only the L frames, and only their LL
quadrant, are decomposed at the next level. After three levels with a GOF of 8:
- slot 0 holds one L frame whose 240×135 LL quadrant is the **base layer**;
- every other quadrant belongs to an enhancement layer. Level 3 gives the first and
  smallest enhancement layer (EL1), and level 1 gives EL3.

The 9/7 filter uses the four lifting steps and a scaling step, with Q14 constants:
- α = −1.586134 (−25987)
- β = −0.052980 (−868)
- γ = 0.882911 (14466)
- δ = 0.443507 (7266)
- K = 1.149604 (18835)

Edges use symmetric extension. Each product is rounded, so the forward and inverse
transforms are close to, but not exactly, each other's inverse. On 8-bit video the
round trip returns pixels within 6/256 of a level.

Haar is integer lifting: H = b − a, L = a + (H >>> 1). It is exactly invertible.

The engine is serial. Per level, it copies each row of the current region into
`dwt97_line`, filters it, and copies it back; then it does the same for each column.
Then it walks every pixel position through the temporal step. A line of length L costs
about 5L clocks. A full-HD GOF therefore takes roughly 2×10^8 clocks per direction. A
parallel datapath would be needed for real-time rates; the scheme itself does not fix
one.

## Layers and input vectors (`subband_scan`)

The output order is:
1. the base layer;
2. then, for level 3, then 2, then 1, every high-frequency sub-band of that level:
   - the three spatial high-pass quadrants (HL, LH, HH) of each temporal L slot;
   - all four quadrants of each temporal H slot.

A level-l sub-band is (W>>l)×(H>>l). It is read column by column, so N/(H>>l) adjacent
columns make one input vector of N coefficients. For full HD this is 4, 8 and 16
columns at levels 1, 2 and 3.

A sub-band width that is not a multiple of that column count is a configuration error
and stops elaboration. The decoder uses the same module to put reconstructed vectors
back in place.

## Adaptive measurement (`l0_threshold`, `index_finder`, `bernoulli_codebook`, `cs_measure`)

Each input vector is hard-thresholded. Coefficients with |c| < T become 0, and K counts
the survivors. T comes in on the `thr` port in coefficient format (T = 1 is `256`).

K picks a codebook index j and a measurement count M:

| j | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| K ≤ | 0 | 10 | 20 | 50 | 100 | 150 | 200 | 250 | 300 | 350 | 400 | 450 | 500 | 550 | 600 | ∞ |
| M | 0 | 50 | 130 | 240 | 370 | 470 | 650 | 780 | 920 | 1080 | 1220 | 1400 | 1550 | 1700 | 1850 | 2000 |

A vector with K = 0 is sent as a header only.

Φj is an M×N matrix of ±1 entries. The original scheme stores a set of random Bernoulli
matrices in a shared codebook. That would be about 31 Mbit of ROM. Here each sign is
computed instead: `bern_neg(j, r, c)` is a fixed multiply and xor-shift hash of the
index, row and column. The encoder and decoder evaluate the same function, so they agree
on every matrix.

`cs_measure` stores the K non-zero (column, value) pairs of a vector. For each row r it
then adds or subtracts each value according to the sign of Φj(r, column). Zeros
contribute nothing and are skipped. A vector therefore costs N clocks to collect and
M·(K+1) clocks to measure, instead of M·N.

## Reconstruction (`eamp`)

This is the hard part of the design. The solver recovers N coefficients from M ≪ N
measurements. It uses two facts: the vector is sparse, and the encoder told it the exact
K.

The state is the estimate s (N words) and the residual z (M words). It starts at s = 0
and z = y. Every iteration first back-projects:

    γ = s + μ · Φjᵀ z

What happens next depends on the phase.

**AMP phase** (iterations below ITER/4, the first 100 of 400):
- δ is the M-th largest |γ|;
- s = soft(γ, δ), that is sign(γ)·max(|γ|−δ, 0);
- z = y − Φj s + z · #{|γ| > δ} / M. The last term is the Onsager correction.
- μ = 1/M, because the ±1 columns have squared norm M.

**Hard-thresholding (IHT) phase** (the rest):
- s = γ with everything except the K largest |γ| set to zero;
- z = y − Φj s;
- μ = 1/(√M + √N)², a bound on ‖Φj‖² that keeps the gradient step from diverging.

Switching to the known K is what makes the reconstruction exact on the support. The
early AMP iterations find a good support quickly.

Hardware schedule per iteration, one multiply-accumulate or compare per clock:

| Step | Clocks | Work |
|---|---|---|
| BP | M·N | γ[c] = s[c] + μ·Σr ±z[r] |
| SEL | 32·N | radix select: the target-th largest \|γ\| (target = M or K), one bit per pass from the MSB |
| CGT | N | count \|γ\| > δ (Onsager factor) |
| SHR | N | soft threshold, or keep K with ties broken by lowest column first |
| RES | M·N | z[r] = y[r] − Σc ±s[c] (+ Onsager term in AMP) |

One iteration takes 2MN + 34N + 1 clocks; the testbench checks this count exactly. With
full-size numbers (M up to 2000, N = 2160, 400 iterations) that is about 3.5×10^9 clocks
per vector. So `eamp` is the reference datapath to widen. The independent row and column
loops parallelise directly with more lanes from `bernoulli_codebook` (parameter
`LANES`).

The two step sizes come from 16-entry reciprocal tables with 24 fractional bits. The
tables are computed at elaboration from the M table.

`iht_phase` is high during the IHT iterations.

## Quantisation and the symbol stream

Base-layer coefficients and measurements are quantised by `quantizer`:
q = round(x / 2^QSHIFT), halves rounding up, saturated to QBITS = 16 signed bits. The
decoder dequantises with q << QSHIFT. QSHIFT defaults to 8, one integer unit.

Symbols are `svc_pkg::sym_t`, 54 bits:

| Field | Bits | Meaning |
|---|---|---|
| `kind` | 2 | `SYM_BL` base-layer value, `SYM_HDR` vector header, `SYM_MEAS` measurement |
| `j` | 4 | codebook index (header) |
| `k` | 16 | l0-norm K (header) |
| `data` | 32 | quantised value (BL, MEAS) |

One GOF is sent as:
1. all base-layer symbols;
2. then, for each vector in layer order, a header followed by M measurements.

Symbols move on valid/ready and are held until accepted; assertions check this. A
decoder that sees a kind it does not expect raises a sticky `dec_proto_err`.

## Receiving fewer layers

The decoder's `layers` input (`dec_layers` on the top) gives the number of enhancement
layers the incoming stream holds. It is sampled at `start`. A vector at DWT level l
belongs to layer EL(LEVELS + 1 − l). Vectors of layers that were not received take no
symbols and are written as zeros before the inverse DWT. A stream cut after the base
layer, or after any enhancement layer, therefore still decodes to full-size frames with
less detail. A channel or rate adapter cuts the stream at the first header of the first
dropped layer; the layers come in order, so the cut is a single point in the stream.
Decoding at a reduced output resolution, for example displaying only the LL part, is
not built.

## What is not here

- **Entropy coding.** The original scheme entropy-codes the symbols with Golomb-Rice and
  adjusted binary codes, a context model, and run-length coding of zero runs. It does
  not give enough of that coder to build it. The symbol stream is the interface where
  it would sit.
- **Codebook ROM.** It is replaced by the hash described above.
- **Rate control.** T is an input. How T is chosen per sequence or target rate is left
  to the user; typical values are 1 and 1.6.
- **Run-time frame size.** Frame size, GOF, levels and N are elaboration parameters. CIF
  or 512×512 video needs a rebuild with matching W, H and a vector length N that tiles
  every level, since the scan refuses a non-tiling N.

## Departures worth knowing

- The solver's step sizes, the use of 1/M for the Onsager "n", and tie-breaking in the
  K-largest selection are choices of this design. The scheme's algorithm states none
  of them.
- The forward/inverse 9/7 pair is fixed point and not bit-exact. The reconstruction
  error floor is a few 1/256 of a grey level.
- Fixed-point widths (32-bit coefficients, 8 fractional bits, 16-bit quantised values)
  are choices of this design.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each compares the block
against a bit-accurate model in `tb/svc_ref_pkg.sv`, checks cycle counts where they are
defined, and ends with a `TB_RESULT checks=… failures=…` line. With plain Verilator 5,
from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl --top-module tb_svc_codec_top \
        rtl/svc_pkg.sv tb/svc_ref_pkg.sv $(ls rtl/*.sv | grep -v svc_pkg) tb/tb_svc_codec_top.sv
    ./obj_dir/Vtb_svc_codec_top

Testbenches override parameters to stay short. The `MDIV` parameter divides both the
K bounds and the M values of the table, so short vectors see the same table shape. It
must be 1 in a real build.

The largest configuration simulated end to end is in `tb_svc_codec_top`:
- 64×32 frames, GOF 8, 3 levels;
- N = 32, MDIV = 80, 20 iterations;
- two thresholds (T = 1 and T = 1.6);
- a channel with random stalls;
- a third GOF in which the channel drops EL2 and EL3.

It exercises base-layer symbols, zero vectors, compressed vectors, nine different
codebook indices and every AMP-to-IHT switch. On smooth synthetic video it decodes to
about 36 dB PSNR against the source frames with all layers, and 28.5 dB with the base
layer and EL1 only.

A full-HD GOF at the default parameters was not simulated. It takes roughly 2×10^8
clocks for each DWT, and about 3.5×10^9 clocks per vector in the solver.
