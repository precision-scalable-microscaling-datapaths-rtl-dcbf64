# Precision-scalable MX tensor core with a hybrid reduction tree

This is synthesizable SystemVerilog for a small NPU that computes matrix products in the
OCP Microscaling (MX) formats. It supports MXINT8, MXFP8 (E5M2, E4M3), MXFP6 (E3M2, E2M3)
and MXFP4 (E2M1), for both inference and training on one datapath. An MX block is a group of
narrow elements that share one 8-bit power-of-two scale (E8M0, bias 127). A dot product of two
MX blocks is then a sum of narrow element products, scaled once by 2^(XA+XB-254).

The central problem is adding those products. Converting every narrow FP product to a wide
integer costs wide adders. Accumulating in full FP32 costs a normalizer per addition. This
design takes a middle path, the *hybrid reduction tree*:

1. **L1 / L2: integer-like addition inside one cycle.** The four products of a MAC are aligned
   to the largest of their exponents and added as fixed-point numbers in a short field.
2. **Accumulation: floating-point across cycles.** The product sum is added to a stored partial
   result that has an 8-bit exponent and a mantissa of only `MANT_W` = 16 bits, not FP32's 23.
   The sum is then normalized once.
3. **A MUX in front of the accumulation adder.** It places the product sum to the left or to
   the right of the stored result, depending on which is larger. The adder therefore stays about
   `PSUM_W + MANT_W + 1` bits wide, instead of the sum of both widths plus the exponent range.

64 such MACs form an 8x8 output-stationary array. A SIMD quantizer turns the 64 results of a
tile back into one MX block. Data streamers feed the array from a 32-bank scratchpad, and they
switch off memory channels that the current precision does not need.

## Block diagram

```
           CSR port (32 bit)                     streamer CSR port
                |                                        |
   +------------v-------------------------+   +-----------v---------------------+
   | mx_tensor_core                        |   | csr_manager (36 regs): base,    |
   |  csr_manager: CSR0 fmt, CSR1 K tiles, |   | bounds, strides of 4 streamers  |
   |  CSR2 M/N tiles, launch/busy          |   +---------------+-----------------+
   |  mx_fsm --> mx_spatial_array (8x8     |                   |
   |             mx_mac) --> mx_quant_unit |   stream_reader A (4 ch) / B (4 ch) /
   +----^-----------^----------^-------+---+   E (1 ch), stream_writer C (9 ch),
        |A 256b     |B 256b    |E 64b  |C 576b   each with an agu
   +----+-----------+----------+-------v--------------------------------------+
   |   spm_xbar: 26 masters (18 streamer channels + 8 external) x 32 banks,     |
   |   round-robin per bank (spm_bank_arb)                                       |
   +-----------------------------------+----------------------------------------+
                                        |
                       spm: 32 banks x 512 x 64 bit = 128 KiB
```

The external channels (`ext_req` / `ext_rsp`) are where a DMA engine would load operands and
fetch results. The control processor drives both CSR ports. Neither is part of this RTL.

## The MAC and its reduction tree

### Modes and lanes (`mx_mul_l1`)

Each MAC takes a 32-bit word of A and of B per cycle and produces four signed 10-bit
significands with 6-bit exponents:

| format | products per cycle | how                                                           | cycles per 8x8x8 tile |
|--------|-------------------|----------------------------------------------------------------|-----------------------|
| INT8   | 1                  | 4 nibble sub-products (signed high, unsigned low nibble), exponents 8/4/4/0 | 8 |
| FP8    | 4                  | 4 products of 4-bit significands                               | 2 |
| FP6    | 4                  | same; the elements are 6 bits, 24 bits per word                | 2 |
| FP4    | 8                  | 8 products; an L1 adder adds pairs after shifting the larger-exponent product left | 1 |

The element exponent fields are added without bias. A zero field counts as exponent 1, so
subnormals come out right. Per format, a constant `mode_offset` (INT8 12, E5M2 34, E4M3 20,
E3M2 10, E2M3 8, E2M1 4) later turns these raw exponents into true powers of two. The three
product sets are computed in parallel, and the mode picks one set with an AND-OR selection.

### L2 adder (`mx_l2_adder`)

The largest of the four exponents, `emax`, is found first. Each significand is placed at the top
of an `ALIGN_W = MANT_W+3` bit field and shifted right, arithmetically, by `emax - exp`. The four
fields are added into a `PSUM_W = MANT_W+5` bit product sum. Bits shifted out at the bottom are
lost, which is the only approximation inside a cycle. At `MANT_W = 16` the widths are 19 and 21
bits. At 23 they are 26 and 28 bits, the numbers of the FP32 variant.

### Early accumulation with the extension MUX (`mx_accumulator`)

The product sum's MSB has weight 2^eps, with

    eps = emax - mode_offset + 11 + (XA - 127) + (XB - 127)

`mx_mac` computes eps. The stored partial result is `{sign, exponent e (bias 127), MANT_W
mantissa bits}`. Let `delta = (e - 127) - eps`. The accumulator builds one
`ACC_W = PSUM_W + MANT_W + 1` bit adder (+2 guard bits) and places the two operands in it:

* **delta >= 0 (left extension).** The stored result is larger. The product sum sits in the
  low `PSUM_W` bits; the MSB of the stored significand lands at bit `PSUM_W-1+delta`. If
  `delta > MANT_W+1`, the product sum cannot reach the kept mantissa bits. The stored result is
  then passed through unchanged (bypass).
* **delta < 0 (right extension).** The product sum is larger. It moves to the top of the adder,
  and the stored significand is shifted right under it. Its bits that fall below bit 0 are
  dropped.

The stored significand goes through a single left shifter over an extended field, which covers
both cases. The sum is made positive, a leading-one detector finds its MSB, and a barrel shifter
normalizes it. Then `MANT_W` bits are kept, by truncation. Exponents of 255 and above saturate to
the largest finite value; exponents of 0 and below flush to zero. `clear` makes the stored
result count as zero, which starts a new output tile.

The two worked examples of the reduction-tree figure run in the accumulator testbench at
`MANT_W = 23`, and both give the printed sums. Their product sum is
`0011_0100_0000_1000_0100_0111_0000` and their partial result has exponent 120:

| eps | MUX setting     | result                    |
|-----|-----------------|---------------------------|
| -20 | left extension  | `{0, 120, 23'h109000}`    |
| 4   | right extension | `{0, 129, 23'h506963}`    |

### Why 16 mantissa bits

The stored mantissa only has to be precise enough that its rounding error stays below the
error of quantizing the final result back to an MX format. In the error study behind this
design, that break-even point lies at 13 bits for MXFP8 E4M3 on 64x64 matrices, and the other
formats and sizes studied stay in the same region. `MANT_W = 16` leaves margin. It shrinks the accumulation adder from 52 to 38 bits (+1 for the
sign). `MANT_W` is a parameter of every datapath module, so the FP32-like variant is
`MANT_W = 23`.

## The tensor core

### Control registers (`csr_manager`, `mx_tensor_core`)

| address | content                                                              |
|---------|----------------------------------------------------------------------|
| 0       | `[2:0]` input format, `[6:4]` output format (0 INT8, 1 E5M2, 2 E4M3, 3 E3M2, 4 E2M3, 5 E2M1) |
| 1       | K tiles (accumulation depth in 8-element tiles)                      |
| 2       | `[15:0]` M tiles, `[31:16]` N tiles                                  |
| 3       | write: launch (ignored while busy); read: busy                       |

### Sequencing (`mx_fsm`)

The FSM steps through output tiles (m, n) in row-major order. For each one it reads K tiles of
`beats_per_tile` beats (8/2/2/1). A beat is consumed only when the A, B and exponent streams
all have data. It is also held back while the quantizer still holds the previous tile that the
writer has not taken; that is a *stall*. The first beat of an output tile asserts `mac_clear`.
The exponent word of a k tile is consumed on its last beat. After the last beat of an output
tile, the quantizer captures the 64 results one cycle later.

With all streams ready, the core takes one beat per cycle. An M x N x K tile job takes
`M*N*K*beats_per_tile` cycles plus a few cycles of latency.

### Operand layout

* **A beat (256 bits).** Row r's word is `a[8r +: 8]` (INT8, one element per cycle),
  `a[24r +: 24]` (FP6, four elements) or `a[32r +: 32]` (FP8, four elements; FP4, eight).
  Within a word, element i is at `[w*i +: w]`.
* **B beat.** The same layout, with column c in place of row r.
* **Exponent word (64 bits).** One per (m, n, k) tile: XA in `[7:0]`, XB in `[15:8]`. So one
  shared exponent covers an 8x8 block of each operand.

### Quantization (`mx_quant_unit`, `mx_quant_lane`)

A comparator tree finds the largest exponent among the 64 results. The shared exponent is that
exponent minus the largest element exponent of the output format: INT8 0, E5M2 15, E4M3 8,
E3M2 4, E2M3 2, E2M1 2, clamped to 0..254. Each of the 64 lanes then re-expresses its value
relative to the shared exponent:

* FP formats keep the top mantissa bits. Values below the normal range use a right-shifted
  significand, and values above it saturate. E4M3 never produces its NaN code.
* INT8 places the significand on a 2^-6 grid and saturates at +-127.

The output is one 576-bit beat: element i in `[8i +: 8]` (narrow formats in the low bits of the
slot), the shared exponent in `[519:512]`, and zeros above.

## Memory side

* **SPM (`spm`).** 32 single-port banks of 512 x 64 bits. A read returns data one cycle after
  the grant. Byte address bits `[7:3]` select the bank and `[16:8]` the row, so consecutive
  64-bit words rotate over the banks.
* **Crossbar (`spm_xbar`, `spm_bank_arb`).** Every one of the 26 channels can reach every bank.
  Each bank has a round-robin arbiter, and a grant is given in the request cycle. `conflicts`
  counts requests that lost arbitration.
* **Streamers (`stream_reader`, `stream_writer`, `agu`).** Each port has an address generator
  with four nested loops: `addr = base + sum(count_l * stride_l)`. Its channels fetch the words
  of a beat, with at most as many requests in flight as the FIFO has room for. A beat is
  released only when all active channels have it.
* **Dynamic channel gating.** The A and B ports use 1/4/3/4 of their four 64-bit channels for
  INT8/FP8/FP6/FP4, set by the input format in CSR0. The inactive channels make no memory
  requests and output zeros. That saves bank bandwidth and reduces conflicts at low precision.
* **Port C.** It writes the 576-bit result beat through nine channels.
* **Streamer registers.** The streamer CSR block has 36 registers. Port p (A, B, E, C = 0..3)
  uses register `9p` for its base, `9p+1+l` for the bound of loop l, and `9p+5+l` for its
  stride. A write to address 36 starts all four ports.

## Where this design departs from the paper it implements

* Truncation everywhere (L2 alignment, normalization, quantization), where the MX
  specification rounds to nearest even. Inf and NaN inputs are treated as ordinary numbers.
* The multipliers are plain 4x4-bit products chosen per mode. The MAC this design builds on
  composes them from 2-bit multiply units shared across modes.
* Each MAC is single-cycle (multiply, L1, L2 and accumulate between two registers). The
  original was pipelined and timed at up to 1.8 GHz.
* One shared exponent per 8x8 tile of A and B (64-element MX groups), as in the MAC design
  this core builds on, not the 32-element blocks of the MX specification; 8-bit output slots.
* The register maps, the stream handshakes, the interleaving, the arbitration and the FIFO
  depths are this design's own, because the source does not specify them.
* The control processor, instruction cache, peripherals, DMA engine and external memory are
  not included. The DMA side appears as eight 64-bit SPM channels at the top, which together
  give the 512-bit width.

## Verification

Each block has a self-checking testbench in `tb/` that compares it against a real-valued model
(`tb/mx_tb_pkg.sv`):

* MAC accuracy is checked against the exact dot product, with a bound that follows from the
  truncations above.
* `tb_mx_npu_top` runs complete GeMMs through the streamers, crossbar and SPM in all six formats.
  It counts each mechanism: bank conflicts, core stalls, mode switches, left and right MUX
  settings, and gated channels that stayed silent.
* `tb_mx_tensor_core` checks the one-beat-per-cycle rate.
* `tb_mx_gemm64` runs 64x64x64 GeMMs through the whole NPU in MXFP8 E4M3 and MXINT8. The
  array is busy with MAC work in 92.2% (E4M3, 1024 beats) and 99.0% (INT8, 4096 beats) of
  the cycles. The missing cycles are streamer start-up and the drain of the last tile.
* Whole network layers (ResNet-18, ViT) are much larger than the 128 KiB scratchpad. They would
  run as a sequence of such scratchpad-sized GeMMs, loaded by a DMA engine, which is not part of
  this RTL.

To simulate one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/mx_pkg.sv tb/mx_tb_pkg.sv \
    tb/tb_mx_npu_top.sv --top-module tb_mx_npu_top -Mdir obj -o sim && obj/sim
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>`.

Limits that are known:

* The L2 truncation error grows with the spread of exponents within one MAC. It is largest for
  E5M2.
* The crossbar's round robin is fair per bank, but not across banks.
