# XtraMAC: one multiply-accumulate unit for many number formats

## The idea

LLM inference on an FPGA mixes number formats. Weights may be INT4, FP4 or FP8. Activations
and accumulators may be BF16. An INT8 path may accumulate into INT32. The usual designs either
build one MAC per format and multiplex between them, which wastes area, or convert everything
to a wide common format first, which wastes DSP slices and cycles.

This design starts from one observation: every one of these products is an unsigned integer
product of two mantissas (or magnitudes), plus a sign XOR and an exponent add done on the side.
So a single hard 27x18 multiplier (a DSP48E2 slice) can do the multiply for every format. Small
operands are packed side by side on the multiplier ports, far enough apart that their cross
products cannot overlap. One multiply then gives 2 or 4 independent lane products. Only the
cheap parts around the multiplier depend on the format:

- a decoder in front that unpacks and packs the operands;
- a shift-and-mask after it that pulls the lanes apart;
- separate integer and floating-point adder banks.

The format is an input to every operation, so it can change every clock cycle. Latency stays
fixed at 4 cycles and one operation starts per cycle, whatever the format.

## Operation

`P = A x B + C` on up to 4 lanes. `dtype` selects one of five combinations:

| dtype | A x B + C -> P | lanes | A (32 bit) | B (16 bit) | lane stride on the DSP |
|---|---|---|---|---|---|
| 0 | BF16 x BF16 + BF16 -> BF16 | 2 | 2 x BF16 | 1 x BF16 (shared) | 17 |
| 1 | INT4 x BF16 + BF16 -> BF16 | 2 | 2 x INT4 in [7:0] | 1 x BF16 (shared) | 13 |
| 2 | FP4 (E2M1) x BF16 + BF16 -> BF16 | 2 | 2 x E2M1 in [7:0] | 1 x BF16 (shared) | 11 |
| 3 | FP8 (E4M3) x FP8 + BF16 -> BF16 | 4 | 2 x E4M3 in [15:0] | 2 x E4M3 | 9 |
| 4 | INT8 x INT8 + INT32 -> INT32 | 2 | 2 x INT8 in [15:0] | 1 x INT8 in [7:0] | 17 |

- Value i of A sits at `A[i*W +: W]`, with W = 16, 4, 4, 8 or 8 bits.
- FP8 forms the 2x2 outer product. Lane `k = 2*i + j` is `a_i * b_j`.
- C and P are 64 bits. BF16 lane k is at `[16k +: 16]` and INT32 lane k at `[32k +: 32]`.
  Unused lanes of P are zero.
- The stride is the lane product width plus one guard bit. On the 27-bit port, A values sit
  `PB*stride` apart, where PB is the number of B values. On the 18-bit port, B values sit
  `stride` apart. Lane k then appears at bit `k*stride` of the 45-bit product.

Number handling:

- Subnormal inputs are read as zero. Results below the smallest normal are flushed to zero.
- NaN in, `inf x 0` and `inf - inf` all give the quiet NaN `0x7FC0`. Infinities keep their
  sign, and overflow gives a signed infinity.
- E4M3 with an all-ones exponent is NaN. E2M1 has no special values.
- The floating-point result is the exact `A*B + C`, rounded once to nearest-even in BF16.
- INT32 accumulation saturates.

## Pipeline (`xtramac`)

| stage | module | work |
|---|---|---|
| 1 | `xm_stage1` (+ one `xm_map` per format) | decode, special-value flags, pack the DSP ports, select by dtype |
| 2 | `xm_dsp_mul`, `xm_stage2` | 27x18 multiply; cut out lanes, add exponents, XOR signs, normalise |
| 3 | `xm_stage3` (`xm_int_adder` x2, `xm_fp_adder` x4) | both adder banks run every cycle |
| 4 | `xm_stage4` | special-value override, pick the integer or FP word by dtype |

- `dtype`, C, the flags and a valid bit travel alongside the data in matched delay slices
  (`xm_delay`), so operations of different formats can follow each other every cycle.
- The parameters `EXTRA_S1` to `EXTRA_S4` add registers to a stage. The latency becomes
  `4 + sum(EXTRA_Sn)` and one operation still starts per cycle.
- `DT_EN` is a 5-bit mask that leaves unused formats out of the hardware.

## GEMV engine (`xtramac_gemv`, `gemv_pe`, `xm_act_buf`)

The engine computes `y = W x` for INT4 or FP4 weights and a BF16 activation vector.

- There are `M_PE = 30` processing elements, one per memory channel, for 1920 MACs in all.
- Each PE is a chain of `N_MAC = 64` MACs. A 512-bit weight word carries 8 bits per MAC: the
  two 4-bit weights of two output rows (a "row group") at column `block*64 + k`.
- MAC k reads activation `block*64 + k` from its own bank of the on-chip activation buffer.
  Index i is stored in bank `i mod 64`.
- MAC k gets its operands `4k+1` cycles after the word is registered. This is exactly when
  MAC k-1's result reaches its C input, so partial sums run down the chain with no extra adders.
- MAC 0 adds zero on a row group's first column block (`w_first`). Otherwise it adds the
  partial sum kept in an on-chip memory of `ROWGRP_DEPTH = 512` row groups. The chain's output
  is written back there.
- On `w_last`, the two BF16 row results appear on `y_data`, `4*64+2` cycles after the word.
- The datatype comes with each word, so tiles of different formats can follow each other.
- Stream rule: do not send the same row group again within `4*N_MAC+2` cycles. An assertion
  checks this. Interleaving at least that many row groups keeps the chain busy every cycle.
- `K_MAX = 4096` bounds the vector length.

## Departures and limits

- Floating-point outputs are BF16 only. FP16, FP32, E5M2 and INT4 x INT4 are not built.
- Memory channels, their controllers and any bus wrapper are not included. The weight and
  activation streams are plain ports of the top.
- The weight word layout, partial-sum memory, valid bits and INT32 saturation are this
  design's own choices.
- Which lane goes to which DSP port position is this design's reading of the packing rule.
  The lane counts match the published ones (2 for every combination here, 4 for FP8 x FP8).
- Every enabled format has its own decoder, and the integer and FP adder banks are always
  separate. A narrower build can share more: for example, FP4 can be widened into the BF16
  decoder. Such per-configuration sharing is not done here. `DT_EN` only removes whole
  formats.
- The result word is 64 bits. This fits 4 BF16 lanes, which FP8 x FP8 + BF16 produces.
  Nothing is narrowed to FP8 on output.
- `EXTRA_Sn` registers are added at the end of stage n, not inside its logic. Retiming is
  left to the synthesis tool.

## Simulating

Each block has a self-checking testbench in `tb/`. Each testbench compares against a separate
behavioural reference (`tb/xm_ref_pkg.sv`) and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/xm_pkg.sv tb/xm_ref_pkg.sv tb/tb_xtramac.sv --top-module tb_xtramac
./obj_dir/Vtb_xtramac
```

- Replace `tb_xtramac` with any other `tb_*` module.
- `tb_xtramac_gemv` runs a reduced engine (3 PEs of 4 MACs) end to end. It counts zero
  starts, partial-sum feedback, datatype switches and idle cycles.
- There is no simulation of the full 1920-MAC engine. The Verilator model of 64 chained MACs
  alone is hundreds of megabytes of C++, far too slow to build. The full-size top is
  checked only by lint and by elaboration in a synthesis tool.
