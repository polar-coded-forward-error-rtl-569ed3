# Polar-coded error correction for 2-bit/cell NAND flash

This RTL implements an error-correction module for MLC NAND flash. It
protects one page with an (N, K) polar code, by default (8192, 7168):
4096 cells of two bits each, code rate 7/8. It follows the architecture in
H. Song et al., "Polar-Coded Forward Error Correction for MLC NAND Flash
Memory". The main idea is a **pre-check**. As a flash block wears out, its
raw bit error probability grows. For each read, the controller compares an
estimate of that probability with thresholds and picks one of three
successive-cancellation (SC) decoders:

| decoder | channel information | page reads | cost |
|---|---|---|---|
| binary-input | 1 hard bit per code bit, as a 2-bit LLR in {-1, 0, +1} | 3 | lowest: processing elements (PEs) are a few gates, no adders |
| quantized-soft | cell position among 9 reference voltages, mapped to a 6-bit LLR by table | 9 | min-sum SC |
| pure-soft | LLR from the exact cell voltage, supplied from outside | none here | min-sum SC, 8-bit LLRs |

A fresh device uses the cheap binary-input decoder, which needs the fewest
reads. A worn device falls back to soft information.

The most unusual part is the **binary-input decoder**. Every LLR in it is
one of -1, 0 or +1, so the two SC update functions shrink to small truth
tables:

* The f-function (called the Type II PE here) is the product of its two
  inputs. It needs one XOR for the sign, one AND that gives zero, and a
  multiplexer.
* The g-function (the Type I PE) is a saturating ±X + Y over three values.
  It is an 18-row truth table.

## Blocks

```
 write:  wr_bit ──► polar_encoder ──► gray_mapper ──► prog_level (one cell per transfer)

 read:   rd_start ─► precheck ─ mode ─┐
                                      ▼
         sense_* ◄──────────────► preprocessor ──► sc_decoder (BINARY=1, W=2) ─┐
                                  (page reads,  └─► sc_decoder (BINARY=0, W=6) ─┼─► rd_bit
                                   hard buffer,                                 │
         ps_llr_* ──────────────────────────────► sc_decoder (BINARY=0, W=8) ─┘
```

| file | role |
|---|---|
| `rtl/polar_pkg.sv` | mode and reference-voltage enums, `bitrev`, `ctz` helpers |
| `rtl/pe_type1_bin.sv`, `rtl/pe_type2_bin.sv` | 2-bit binary PEs (g and f) |
| `rtl/pe_type1_soft.sv`, `rtl/pe_type2_soft.sv` | W-bit min-sum PEs (g and f) |
| `rtl/sc_decoder.sv` | sequential SC decoder; `BINARY` selects the PE pair |
| `rtl/polar_encoder.sv` | serial-in encoder, x = u·G_N |
| `rtl/gray_mapper.sv` | bit pair to program level |
| `rtl/preprocessor.sv` | read sequencing, hard-result buffer, LLR formation |
| `rtl/precheck.sv` | decoder selection |
| `rtl/polar_fec_top.sv` | the whole module |

The NAND array and its sense amplifiers are not part of the RTL. Neither
is the analog front end that the pure-soft decoder would need. The top
brings out their signals as ports.

## Code and bit ordering

The generator matrix is G_N = B_N·F^⊗n, with F = [1 0; 1 1] and B_N the
bit-reversal permutation. With this G_N, code bit x_i is (u·F^⊗n) at index
bitrev(i).

* **Encoder.** It fills an N-bit register with u in N clocks. At a frozen
  position it inserts 0 and holds `in_ready` low. It then runs one
  butterfly stage per clock for log2 N clocks. Finally it reads the
  register out at bit-reversed addresses.
* **Decoder.** It writes the LLR of code bit i to address bitrev(i) of its
  channel stage. After that it runs plain natural-order SC.

The frozen set is a port, `frozen[N-1:0]`, with 1 meaning frozen. Bit k
stands for u_{k+1}. The encoder and all three decoders share it, and it
must not change during a frame. No construction is built in. The
testbenches use polarization-weight ordering,
W(i) = Σ_j i_j·2^(j/4), and freeze the N−K positions of smallest weight.

Codeword bits 2c and 2c+1 go to cell c as its MSB and LSB.

## Cells, references and LLRs

The four threshold-voltage states S0 < S1 < S2 < S3 carry Gray-coded
(MSB, LSB) = 00, 10, 11, 01. Neighbouring states differ in one bit, so a
cell that drifts to the next state costs one bit error.

The LSB changes only at the middle boundary V1. The MSB changes at the
outer boundaries V0 and V2. There are nine references, and the
`ref_e` encoding is: V1=0, V0=1, V2=2, q1..q6=3..8. Their voltages are set
in the flash; this module sends only the index. In voltage order they are:

```
 q1  V0  q2      q3  V1  q4      q5  V2  q6
 └─ MSB ─┘       └─ LSB ─┘       └─ MSB ─┘
```

**Page read.** A read is a `sense_req`/`sense_ack` handshake. It returns
one bit per cell in `sense_bits`: 1 means the cell voltage is above
reference `sense_ref`. The preprocessor keeps one CELLS-bit word per
reference, then streams one cell per clock to the chosen decoder.

**Binary-input mode** reads V1, V0 and V2:

* LSB = above V1.
* MSB = LSB XOR (above V2 if LSB is 1, otherwise above V0). This single
  XOR turns the hard results into Gray-decoded bits.
* Hard bit b becomes the 2-bit LLR {b, 1}: 01 (+1) for 0 and 11 (−1) for 1.

**Quantized-soft mode** reads all nine references:

* The LSB region is the number of references among q3, V1, q4 that the
  cell exceeds (0..3).
* The MSB region is the number among q1, V0, q2, q5, V2, q6 (0..6).
* The two tables `lut_lsb[4]` and `lut_msb[7]` map a region to an LLR.

Software fills the tables, because the right values change as the cells
wear. For a region [a, b), the value is
ln( Σ_{states with bit 0} P(a ≤ v < b) / Σ_{states with bit 1} P(a ≤ v < b) ).
Under a Gaussian cell model each term is Q((a−μ)/σ) − Q((b−μ)/σ). The
testbench scales by 2 and saturates to ±31. MSB regions 0 and 6 both mean
"certainly 0", so normally they hold the same value.

**Sign convention.** Throughout this design a positive LLR means bit 0,
and the decision is û = 0 when the LLR is ≥ 0. The source text writes its
LLR definitions with bit 1 in the numerator but decides 0 for a
non-negative LLR. These RTL tables therefore hold the negated values of
those formulas.

## The binary PEs

The operands are X and Y, coded as 11 = −1, 00 = 0, 01 = +1. Code 10 never
occurs.

* **Type I (g):** Z = X + Y when u = 0, and Z = −X + Y when u = 1. Results
  of ±2 saturate to ±1. `pe_type1_bin` is exactly this truth table, written
  as a case statement. The source also prints sum-of-products equations for
  it, but they do not match the table. For example, with u = 0, X = 00 and
  Y = 01 they give Z_M = 1. The table is what is implemented.
* **Type II (f):** Z = X·Y. So Z_L = X_L & Y_L, and
  Z_M = Z_L ? X_M ^ Y_M : 0.

## SC decoder organisation

`sc_decoder` is a fully sequential SC decoder: one PE operation per clock.
The source leaves the decoder architecture to earlier work. This is the
simplest schedule that uses its PEs.

* `alpha[2N]` holds W-bit LLRs. Stage s (2^s values) sits at addresses
  2^s … 2^(s+1)−1. The channel is stage n = log2 N.
* `beta_l[N]` and `beta_r[N]` hold the partial sums of left and right
  nodes, with the same addressing.
* For bit i > 0, let k = ctz(i). The decoder computes stage k with g from
  stage k+1 and `beta_l` at stage k. It then computes stages k−1 … 0 with
  f. For i = 0 it applies f at every stage.
* Stage 0 gives the decision. A frozen bit is forced to 0. Each
  information bit leaves on `out_valid`/`out_bit` as soon as it is decided.
* After a right leaf, partial sums combine upward, one pair per clock:
  β = (β_l ⊕ β_r, β_r). They combine for as long as the node just
  finished is itself a right child.

Clock count per frame, with n = log2 N:

| phase | clocks | N = 8192 |
|---|---|---|
| load (one cell per clock) | N/2 | 4 096 |
| f and g (N/2·n of each) | n·N | 106 496 |
| decisions | N | 8 192 |
| partial sums | (n−1)·N/2 | 49 152 |
| **total** | | **167 936** |

`done` pulses in the clock after the last operation. The decoder testbenches
check this total exactly. Memory is 2N·W + 2N bits per decoder: 40 Kbit for
the binary decoder at N = 8192. All three decoders are instantiated, as in
the block diagram, but only the selected one runs. A generic (technology-free)
Yosys synthesis of the whole top at the defaults gives about 70 k cells,
8.4 k flip-flop bits (mostly the encoder's N-bit register) and 377 Kbit of
memory arrays.

## Pre-check

`precheck` latches a mode when `rd_start` arrives:

* `pe_est < th_q`: binary-input;
* otherwise `pe_est < th_p`: quantized-soft;
* otherwise: pure-soft.

`pe_est` is an unsigned estimate of the raw error probability. The source
does not say how to obtain it. It falls as the ratio of state spacing to
spread falls, that is, as the device wears. Here it is an input to be
supplied by firmware.

## Top-level interface (`polar_fec_top`)

| signals | meaning |
|---|---|
| `wr_valid`/`wr_ready`/`wr_bit` | K information bits per frame |
| `prog_valid`/`prog_ready`/`prog_level` | program levels, cell 0 first |
| `rd_start`, `pe_est`, `th_q`, `th_p`, `rd_mode` | start a read; pre-check inputs; chosen mode |
| `lut_lsb[4]`, `lut_msb[7]` | quantized-soft tables (QW bits) |
| `sense_req`/`sense_ref`/`sense_ack`/`sense_bits[N/2]` | page reads |
| `ps_valid`/`ps_ready`/`ps_llr_msb`/`ps_llr_lsb` | pure-soft LLRs, one cell per clock (PSW bits) |
| `rd_valid`/`rd_bit`/`rd_done`/`rd_busy` | decoded information bits, end of frame, read busy |

| parameter | default | meaning |
|---|---|---|
| `N` | 8192 | code length (power of two) |
| `QW` | 6 | quantized-soft LLR width |
| `PSW` | 8 | pure-soft LLR width |
| `PW` | 16 | width of `pe_est` and the thresholds |

The reset is asynchronous and active low. After reset the encoder waits
for information bits. Each decoder waits for channel LLRs.

## What follows the source and what is this design's own

These parts follow the source:

* the three-decoder pre-check organisation;
* the Gray mapping;
* the references V0/V1/V2 and q1..q6;
* the XOR hard detection;
* the 2-bit binary PEs (truth table and f structure);
* min-sum SC;
* G_N = B_N F^⊗n;
* N = 8192 and the 7/8 code rate used in the evaluation.

These are this design's own choices:

* the sequential single-PE decoder and its memory layout;
* the serial encoder;
* every handshake and port;
* LLR widths 6 and 8 (the source evaluates the soft decoders in floating
  point);
* saturation in the soft PEs;
* the frozen set as an input;
* two pre-check thresholds and `pe_est` as an input;
* the cell bit order (bit 2c is the MSB).

Known departures and gaps:

* **Binary-input reads.** The source reads V1 and then *either* V0 *or* V2
  for each cell. That is two sensing operations. With page-wide reads, this
  design reads both V0 and V2 and chooses per cell afterwards: three reads.
* **Six-sensing variant.** The source also evaluates a quantized-soft
  variant with six sensing operations without saying which references it
  uses. It is not supported; the read sequences are fixed at 3 and 9.
* **Pure-soft LLRs.** The LLR formula for the pure-soft decoder needs the
  exact analog cell voltage. Its LLRs therefore enter on ports.
* **Offline steps.** The choice of soft references (q1..q6) and the table
  values are offline computations. They are not in the RTL.
* **No fallback.** If a decoder fails, nothing retries with a stronger
  decoder; the pre-check flow has no such path.

## Verification

Each testbench checks its block and prints `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_pe_type1_bin`, `tb_pe_type2_bin` | exhaustive, against ±X+Y with saturation and against X·Y |
| `tb_pe_soft` | all operand pairs and random ones, both soft PEs |
| `tb_gray_mapper` | level order; neighbours differ in one bit |
| `tb_precheck` | threshold edges, registered on load, held otherwise |
| `tb_polar_encoder` | N=64: each cell against u·G_N computed from the matrix definition; N+log2 N clocks to first cell; back-pressure |
| `tb_sc_decoder_bin`, `tb_sc_decoder_soft` | N=256: every decoded bit against an independent SC model; exact clock count; error-free frames return the data |
| `tb_preprocessor` | 16 cells, random voltages: read order and count per mode; binary and table LLRs per cell; no reads in pure-soft mode |
| `tb_polar_fec_top` | N=1024, six frames through a Gaussian page model, two per mode (see below) |
| `tb_polar_fec_top_full` | the same at the default N=8192, one frame per mode (under two minutes in Verilator, build included) |

The shared reference models are in `tb/polar_ref_pkg.sv`. The page model
is `tb/nand_mlc_model.sv`. It draws each cell voltage from a Gaussian with:

* means 0, 3.25, 4.55 and 6.5 V;
* standard deviations 2σ, σ, σ and 1.4σ.

It places V0..V2 at the density crossings and q1..q6 at ±0.4σ around them.

In `tb_polar_fec_top` and `tb_polar_fec_top_full`, the decoded bits of
every frame must match a reference SC decoder. That decoder is fed LLRs
that the testbench computes itself from the cell voltages. The test also
requires each of these at least once:

* a read in each mode;
* a programming stall;
* a delayed sense acknowledge;
* a frame with raw bit errors that decodes to the original data.

Each block has also been run against a copy with one deliberate bug, and
its testbench failed every time.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/polar_pkg.sv tb/polar_ref_pkg.sv tb/tb_polar_fec_top.sv \
    --top-module tb_polar_fec_top -o sim
./obj_dir/sim
```

To run another testbench, replace the last file and the top-module name.
`-GN=…` changes the size of `tb_polar_fec_top`, `tb_sc_decoder_bin` and
`tb_sc_decoder_soft`. `tb_polar_fec_top` also takes `-GK=…`. For example,
`-GK=512` runs a rate-1/2 (1024, 512) code through all three decoders.

How far to trust it:

* The binary PEs, the Gray mapping, the encoder and the decoders are
  checked bit-exactly against independent models.
* The decoders are checked at N=256 and N=1024, and end to end at N=8192.
* Error-rate performance (frame error rate against raw error rate) has not
  been measured on this RTL. The end-to-end tests show correction of a
  handful of raw errors per frame at rate 7/8, not error-rate curves.
