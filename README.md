# MX+ Tensor Core datapath

Microscaling (MX) formats store a tensor in blocks of 32 low-precision
elements that share one power-of-two scale (an 8-bit E8M0 exponent). The
scale is chosen from the element with the largest magnitude, the *block max*
(BM), so that the BM lands on the top exponent of the element type. In the
4-bit format (MXFP4, E2M1 elements) that leaves the BM with a single mantissa
bit, and the BM is usually the outlier that matters most in LLM activations.

MX+ observes that the BM never needs its exponent field: after scaling, its
exponent is always the maximum of the element type (`e_max`). The field is
reused as extra mantissa, so the BM is stored as E0M3 / E0M5 / E0M7 (read as
E2M3 / E2M5 / E4M7) inside the same 4, 6 or 8 bits, and one byte per block
records where the BM sits. Every element keeps the same width, so memory
layout and alignment do not change.

This repository holds synthesizable SystemVerilog for the hardware side of
that idea: a GPU-style Tensor Core whose dot product engines (DPEs) take MX+
operands directly. The core dot-product pipeline is left untouched; a small
amount of logic next to it lifts each BM and its partner out of the dot
product, multiplies them at full BM precision and adds the result back before
the FP32 conversion.

## 1. The MX+ encoding

| MX+ type | ordinary element | BM element | BM value               | `e_max` |
|----------|------------------|------------|------------------------|---------|
| MXFP4+   | E2M1, bias 1     | S + 3 bits | ±2^2 · 1.mmm           | 2       |
| MXFP6+   | E2M3, bias 1     | S + 5 bits | ±2^2 · 1.mmmmm         | 2       |
| MXFP8+   | E4M3, bias 7     | S + 7 bits | ±2^8 · 1.mmmmmmm       | 8       |

Every value is further multiplied by the block scale `2^(X - 127)`.

Per-block metadata, one byte (`bmidx_t` in `mxp_pkg`):

```
  7   5 4       0
 +-----+---------+
 |delta|  index  |   index: position of the BM (0..31)
 +-----+---------+   delta: reserved in MX+; the MX++ scale gap (below)
```

Example (MXFP4, scale 2^1): the value -9.84 is encoded as `1 11 0`, which is
-1.0·2^2·2 = -8. In MXFP4+ the BM is `1 010`: -1.010b·2^2·2 = -10.

Two extensions of the MX rules are honoured in hardware:

* **All-zero block.** When a block's BM is so small that its scale would
  clamp, MX+ flushes the whole block to zero and marks it with a biased
  shared exponent of 0. With the BM flag set, a scale of 0 makes the block
  contribute exactly zero.
* **MX++.** The three reserved bits can hold `delta`, how much smaller the
  scale of the non-BM elements is than the BM's scale. The E8M0 exponent fed
  to the core is then the non-BM scale, and every product that involves a BM
  is shifted left by that BM's `delta`.

## 2. How a DPE handles the BM

This is the part of the design that is easiest to get wrong.

### Slices and lanes

A DPE has 16 four-bit lanes for A and 16 for B. Per cycle it takes one
*slice* of a block pair:

| format     | elements per slice | slices per block pair | element `e` of a block                       |
|------------|--------------------|-----------------------|----------------------------------------------|
| FP4        | 16                 | 2                     | lane `e[3:0]` in slice `e[4]`                |
| FP6, FP8   | 8                  | 4                     | lanes `2·e[2:0]` (low nibble) and `+1` (high nibble) in slice `e[4:3]` |

FP6 elements sit in the low six bits of the 8-bit lane pair, so FP6 runs at
the FP8 rate.

### BM Detector (`bm_detector`)

From the two index bytes and the slice number, the detector produces a
one-hot `bm_a` / `bm_b` over the 16 lanes (two adjacent lanes for 8-bit
types). It also reports whether each BM is in the current slice
(`a_hit`, `b_hit`), whether the two indices are equal (`idx_eq`), and the
MX++ deltas. With the BM flag low, all of its outputs are zero and the DPE is
a plain MX engine.

### Forward and Swap Unit (`fsu`, 16 per DPE)

One FSU per lane. When its lane holds A's BM, the FSU:

* replaces the A nibble going to the multiplier with zero. That product then
  drops out of the dot product, and the B nibble does not need to be zeroed;
* drives the BM (`A_BM`) and its partner (`B_NBM`) toward the BM Compute Unit.

B's BM is handled the same way (`B_BM`, `A_NBM`). Even-numbered FSUs share
one 4-bit-per-signal datapath and odd-numbered FSUs share another. For 8-bit
types, an element's two nibbles therefore arrive on the two datapaths at the
same time. The conceptual tri-state bus is built as AND gating in each FSU,
followed by an OR over the FSUs of one parity. Only one FSU per parity drives
in any cycle.

### BM Compute Unit (`bcu`)

```
out = (A_BM · B_NBM) << delta_A  +  (B_BM · A_NBM) << delta_B
```

Each term is a significand product followed by a left shift by the sum of the
operands' exponents; a BM's exponent is its fixed `e_max`. When both BMs are
at the same index, they share one lane. The BCU's swap multiplexers then
route `B_BM` into the first product and force the second product to zero.
That lane contributes `A_BM · B_BM << (delta_A + delta_B)` exactly once. The
BCU output is added to the adder-tree output of the same slice.

Because A's BM and B's BM are usually in different slices, each slice
typically carries at most one of the two terms. Nothing stalls: the BCU is
purely combinational and registered alongside the adder tree.

## 3. Arithmetic inside the DPE

All three element types are decoded onto one fixed-point grid whose LSB is
2^-9 (the smallest E4M3 subnormal step). A decoded element is a sign, an 8-bit
significand and a 4-bit shift (`elem_t`). Products have their LSB at 2^-18,
and the block-pair sum fits a 56-bit signed accumulator, MX++ shifts
included. The sum is exact; rounding happens only twice:

1. `fx_to_fp32` normalizes the block-pair sum, scales it by
   `2^(X_A + X_B - 254)` and rounds it to FP32 (nearest-even).
2. `fp32_add` adds it to C, or to the running sum for the second FP4 block
   pair (nearest-even).

FP32 subnormal results are flushed to zero and overflow gives infinity. An
E8M0 scale of 0xFF (NaN in the MX specification) yields a NaN result.

DPE pipeline (one slice per cycle, no stalls):

| stage | work                                                                                    |
|-------|-----------------------------------------------------------------------------------------|
| 1     | detector, FSUs, vector multiplier, 4-level adder tree, BCU; register `tree + bcu`       |
| 2     | accumulate the 2 or 4 slices of a block pair; register the block sum and its scales     |
| 3     | FP32 conversion and accumulation; register `d` on the last block of an output            |

`d_valid` rises 3 cycles after the slice marked `out_last` is accepted.

## 4. The Tensor Core (`tensor_core`, top)

* 32 DPEs arranged as 4 octets × 2 threadgroups × 4 DPEs. DPE *d* serves
  warp thread *d*, and threadgroups are formed from consecutive threads.
* One MMA computes `D(16×8) = A(16×K) · B(K×8) + C` in FP32. K is 64 for FP4
  and 32 for FP6/FP8. In both cases a row of A and a column of B are
  256 bits, given as 64 nibbles.
* Thread *d* owns D rows `d/4` and `d/4 + 8`, columns `2(d%4)` and
  `2(d%4)+1`. The DPE computes these four outputs one after another, each
  over 4 slices. An MMA therefore occupies the array for exactly **16 cycles**.
  In FP4 that is eight MXFP4 block pairs per DPE at one pair every two cycles.

Schedule of the 16 feed cycles `t` (slot `s = t/4`, slice `q = t%4`):

| item           | FP4                         | FP6 / FP8                 |
|----------------|-----------------------------|---------------------------|
| output         | row `d/4 + 8·s[1]`, col `2(d%4) + s[0]` | same          |
| lanes          | nibbles `16q .. 16q+15`     | same                      |
| block / phase  | block `q[1]`, phase `q[0]`  | block 0, phase `q`        |

Interface and timing:

* `start` is taken when `ready` is high. `ready` is high when idle and in the
  last feed cycle, so MMAs can be issued back to back every 16 cycles.
* On `start`, the tile inputs are captured into the A, B and C buffers:
  `a_mat`, `b_mat`, `c_mat`, `a_exp`, `b_exp`, `a_bmidx`, `b_bmidx`, `fmt`
  and `bm_en`. `a_exp` and `a_bmidx` give one byte per row and block;
  `b_exp` and `b_bmidx` give one per column and block. For 8-bit types only
  block 0 is used.
* `done` pulses 21 cycles after the accepted `start`: 16 feed cycles, 3 in
  the DPE and 2 for write-back. The full D tile is then on `d_mat`, and it
  holds until the next `done`.
* `bm_en` is the instruction's BM flag. With it low, the core computes plain
  MX and ignores the index bytes.
* `bm_a_active`, `bm_b_active` and `bm_swap_active` show MX+ activity in any
  DPE during the current cycle.

Reset is asynchronous and active-low on the control and pipeline registers.
The operand buffers have no reset, since they are read only after a capture.

## 5. Files

| file                  | contents                                                                 |
|-----------------------|--------------------------------------------------------------------------|
| `rtl/mxp_pkg.sv`      | format enum, element/BM decoders, bus and index types, sizes             |
| `rtl/bm_detector.sv`  | BM Detector                                                              |
| `rtl/fsu.sv`          | Forward and Swap Unit                                                    |
| `rtl/bcu.sv`          | BM Compute Unit                                                          |
| `rtl/fx_to_fp32.sv`   | normalize and convert a scaled block-pair sum to FP32                    |
| `rtl/fp32_add.sv`     | FP32 adder for the accumulation onto C                                   |
| `rtl/dpe.sv`          | one DPE: 16 FSUs, detector, vector multiplier, adder tree, BCU, pipeline |
| `rtl/tensor_core.sv`  | 32 DPEs, operand buffers, sequencer, write-back                          |
| `tb/mxp_ref_pkg.sv`   | reference arithmetic in `real`: format decoders, IEEE FP32 rounding     |
| `tb/tb_*.sv`          | one self-checking testbench per module                                    |

## 6. Verification

Every testbench is self-checking. Each compares against values computed
independently in double precision from the format definitions, and ends by
printing `TB_RESULT checks=N failures=M`.

* `tb_bm_detector`: exhaustive over format, slice, both indices and the flag.
* `tb_fsu`: exhaustive over all inputs.
* `tb_bcu`: random operands in all three formats, with A-only, B-only, both
  and equal-index cases, and random MX++ deltas.
* `tb_fx_to_fp32`, `tb_fp32_add`: random values plus directed ties, carries,
  cancellation, infinities, NaN, overflow and underflow.
* `tb_dpe`: 600 outputs streamed through one DPE, mixing FP4, FP6 and FP8,
  MX and MX+, MX++ deltas, swaps and zero blocks. It checks each result to
  1 ulp and its 3-cycle latency.
* `tb_tensor_core`: full-size core, no parameter overrides. It runs 24 MMAs,
  mostly back to back, and checks all 128 D elements to 1 ulp, the 16-cycle
  issue rate and the 21-cycle start-to-done latency. It also counts that
  every mechanism occurred.

* `tb_mxfp4p_workload`: LLM-style tiles on the full-size core. Activations
  are roughly normal, and about half of their 32-element blocks contain a
  large outlier. The testbench quantizes them, together with normal weights,
  to MXFP4 and to MXFP4+ using the conversion rules of section 1, and runs
  both versions through the core. It checks every D element against the
  quantized reference. It also checks that MXFP4+ gives a lower mean squared
  error than MXFP4 against the unquantized product; the error typically
  drops by more than half.

The 1-ulp tolerance covers the reference's own double-to-FP32 rounding
(double rounding when summing two FP32 values). The simulator has two states,
so all state that is read is reset or written first.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert \
    rtl/mxp_pkg.sv tb/mxp_ref_pkg.sv rtl/fp32_add.sv rtl/fx_to_fp32.sv \
    rtl/fsu.sv rtl/bm_detector.sv rtl/bcu.sv rtl/dpe.sv rtl/tensor_core.sv \
    tb/tb_tensor_core.sv --top-module tb_tensor_core -o sim
./obj_dir/sim
```

Replace the last file and the top module with any other `tb_*` file to run
that testbench. The full-size testbench runs in well under a second.

## 7. What follows the source design, and what does not

Taken from the MX+ proposal:

* the encoding: BM with its exponent field repurposed, the index byte with
  3 reserved bits, the zero-block scale and the MX++ delta;
* 32 DPEs per Tensor Core, threadgroups of four and octets of two;
* one FP4 m16n8k64 MMA every 16 cycles, an MXFP4 block pair per DPE every
  2 cycles, and MXFP6/8 block pairs every 4;
* per DPE: 16 FSUs, one BM Detector and one BM Compute Unit;
* FSUs that zero the BM's multiplier input and forward the BM and its
  partner, with even and odd FSUs sharing two datapaths for 8-bit types;
* the BCU formula, its swap for equal indices and the MX++ shifts;
* the BCU result joining the adder-tree output before FP32 conversion.

Choices made here, where the source is silent:

* the slice-to-lane mapping and the nibble order of 8-bit elements;
* FP6 packed in the low six bits of an 8-bit lane pair, and K = 32 for
  FP6/FP8 MMAs;
* the exact fixed-point datapath: the baseline DPE's multiplier widths,
  adder tree and pipeline depth are not specified, so the simplest exact
  datapath was built;
* FP32 rounding, flush-to-zero, and accumulation once per block pair;
* AND-OR gating instead of tri-state buffers on the FSU datapaths;
* the `equal indices` term shifted by `delta_A + delta_B`;
* thread-to-octet grouping, whole-tile operand ports, the start/ready
  handshake, the done pulse and the 21-cycle latency;
* E4M3 NaN codes decoded as ordinary numbers.

The source has one inconsistency. Its area table lists one BM Detector and
one BM Compute Unit for each of the 32 DPEs, while one sentence can be read
as one of each per 32 DPEs. This design follows the table, which also
matches the per-DPE block diagram.

Not included:

* the GPU register file and instruction issue. The extended MMA
  instruction's BM flag and index registers appear as the `bm_en` and
  `*_bmidx` ports;
* conversion of high-precision tensors to MX+, which the proposal performs
  in software;
* the software-only path, which splits the BM into two FP4 halves and issues
  an extra sparse MMA;
* the systolic-array variant, which is mentioned only as an alternative.

The vector multiplier is written with full fixed-point multipliers per lane,
for clarity and exactness. A production DPE would use narrower
significand multipliers and an exponent-aligning adder tree. That changes the
area but not the results, which are exact up to the two FP32 roundings.
