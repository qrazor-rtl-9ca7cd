# QRazor compute tile: 4-bit LLM arithmetic by significant data razoring

Large language models are expensive to run mostly because of how much data
they move: weights, activations and the key/value (KV) cache. QRazor reduces
all three to 4 bits per value in two steps, without rotating or rescaling the
data distribution:

1. **Quantize** FP16 tensors to wide integers with one static scale per tensor
   (per output channel for weights). Activations become INT16, and weights and
   KV entries become INT8. At these widths the model loses almost no
   accuracy, outliers included.
2. **Razor** each group of G integers down to 4 bits. Take the highest bit
   position that any member of the group uses. Keep each member's sign and the
   three magnitude bits starting at that position. Round on the next bit.
   Record once per group how many low bits were cut.

A razored value is therefore `(-1)^s * m * 2^f`: a 3-bit magnitude `m`, a
sign `s`, and a 4-bit flag `f` shared by the group. Two such values can be
multiplied exactly with a 4x4-bit multiplier followed by one left shift by
`f_a + f_b`. No step ever rebuilds the wide integers. This "decompression-free"
multiply-accumulate is the hardware core of the design.

This repository gives synthesizable SystemVerilog for that datapath:

* the FP16 quantizer;
* the razoring (SDR) encoder;
* the decompression-free MAC;
* the dequantizer (De-QR) that turns cached values back into FP16;
* the converter that turns integer GEMM results back into FP16;
* a complete 8x8 compute tile that ties them together with memories for the
  compressed operands.

## 1. Number formats

| Data | Base precision | Stored form |
|---|---|---|
| activations, queries | INT16 sign-magnitude (15-bit magnitude) | 4-bit code + 4-bit flag per group |
| weights | INT8 sign-magnitude (7-bit magnitude) | 4-bit code + 4-bit flag per group |
| keys, values | INT8 sign-magnitude | 4-bit code + 4-bit flag per group |

A code (`qrazor_pkg::sdr_code_t`) is `{sign, mag[2:0]}`. The flag counts the
low bits that were cut. With a 15-bit magnitude it ranges from 0 to 12, and
with a 7-bit magnitude from 0 to 4. With G = 16, a group costs 16 x 4 + 4 = 68
bits, or 4.25 bits per value (4.125 with G = 32).

Sign-magnitude, rather than two's complement, is what makes razoring simple.
Leading zeros of the magnitude are redundant for positive and negative numbers
alike. `tc_to_sm` converts INT8 weights, mapping -128 to -127.

## 2. Razoring a group (`sdr_razor_point`, `sdr_round`, `sdr_encoder`)

The encoder processes one group per clock. Everything up to its output
register is combinational.

**Razoring point.** All G magnitudes are ORed bit by bit. The leading one of
the OR word at bit position `p` is the largest bit any member uses. Exactly
the G-input OR tree and a priority encoder are needed; no comparison or
maximum search. The flag is `max(p - 2, 0)`: the three kept bits are
`p, p-1, p-2`, and everything below is cut.

**Rounding.** Each member keeps `mag >> flag`. It is rounded up when the first
cut bit, `mag[flag-1]`, is 1. One exception: when the three kept bits are
already `111`, a round-up would carry out of the 3-bit field into the sign
position. Those members are floored instead. This is the *overflow
protection*; only the members concerned lose half an LSB, and the rest of the
group rounds normally.

Worked example (G = 4, INT16 activations, magnitudes in binary):

```
member  sign  magnitude (15 bits)     kept  first cut bit  code
0       0     000001111101100         111   1 -> protected 0111
1       0     000000010110100         001   0              0001
2       1     000000011101110         001   1 -> 010       1010
3       0     000000100011100         010   0              0010
OR            000001111111110   p = 9, flag = 7
```

`sdr_encoder` registers the G codes and the flag one clock after `in_valid`.
It also reports, per element, whether a round-up or the overflow protection
was applied. Both events are visible to testbenches and monitors.

## 3. Decompression-free MAC (`qrazor_mac`)

```
w_code ─┐ sign off ─► 0mmm ─┐
        │                   ├─► 4x4 multiplier ─► 8-bit product ─► << (w_flag + a_flag) ─► ± ─► acc
a_code ─┘ sign off ─► 0mmm ─┘                                                               ▲
                      sign_w XOR sign_a ────────────────────────────────────────────────────┘
```

The sign bits are removed from both codes first, leaving two 4-bit operands
whose top bit is 0. A 4x4 unsigned multiplier forms the product, which is at
most 7 x 7 = 49. One barrel shifter moves the product by the sum of the two
group flags. The shifted value is added to or subtracted from the accumulator,
depending on whether the signs differ. The shift range is 0 to 16: 4 for an
INT8 operand plus 12 for an INT16 operand. An assertion flags anything larger.
The accumulator is 40 bits wide and signed. That is enough for 16384 products
of up to 22 bits each.

Because `(m_w 2^f_w)(m_a 2^f_a) = (m_w m_a) 2^(f_w+f_a)`, the sum equals a MAC
on the fully decompressed INT8 x INT16 operands. For example, weight code
`1110` (flag 2) and activation code `1101` (flag 8) give 6 x 5 = 30, shifted
by 10, which is 30720. Decompressing first gives 24 x 1280, also 30720.

Timing: one MAC per clock while `en` is high, with the result in `acc` after
the clock edge. `clr` together with `en` starts a new sum with the current
product; `clr` alone zeroes the sum.

## 4. Quantizer, De-QR and result conversion (`fp16_quantizer`, `sdr_dequant`, `acc_dequant`)

`fp16_quantizer #(BW)` computes `round(x * scale)` for FP16 `x` and a static
FP16 `scale`. With absolute-max scaling the scale is `(2^(BW-1)-1)/|Xmax|`,
computed at calibration time. The two 11-bit significands are multiplied
exactly and the product is shifted onto the integer grid. Rounding is half
away from zero. Results beyond `2^(BW-1)-1` saturate and raise `sat`. NaN
gives 0, and subnormal inputs are handled.

`sdr_dequant` computes `(-1)^s * (m << f) * scale` for the inverse factor
`|Xmax|/(2^(BW-1)-1)`. It multiplies the 3-bit magnitude by the scale's
significand exactly, then rounds to FP16 (nearest even, subnormals kept,
overflow to infinity). It is used for the V operand, which feeds the FP16
softmax-times-V product.

`acc_dequant` converts a signed accumulator back to FP16:
`y = acc * scale`, with one rounding. Here `scale` is the product of the two
operands' inverse factors, for example
`(|Wmax|/127) * (|Xmax|/32767)` for a projection. No group-level work is left
at this point, because the MAC has already applied every flag shift. This
converter is where the integer results of a projection or of Q * K^T re-enter
FP16: in the next layer's quantizer, or in softmax. The 40-bit magnitude is
multiplied exactly by the 11-bit significand. Rounding works as in
`sdr_dequant`.

## 5. The compute tile (`qrazor_top`)

```
 INT8 weights ─► tc_to_sm ─► sdr_encoder(BW=8) ─► weight memory   (8 banks, one per column) ─┐
 FP16 act/Q   ─► fp16_quantizer(16) ─► sdr_encoder(BW=16) ─► activation buffer (8 banks, rows) ├─► 8x8 qrazor_pe_array ─► acc[8][8]
 FP16 K/V     ─► fp16_quantizer(8)  ─► sdr_encoder(BW=8)  ─► KV cache (8 banks, tokens) ──────┘        ▲
                                                               └─ read port 1 ─► sdr_dequant ─► dq_data (FP16)
                                                  qrazor_gemm_ctrl ────────────────────────────────────┘
                                                          acc row ─► 8 x acc_dequant ─► oq_data (FP16)
```

* **Memories** (`sdr_group_mem`). One word holds one group: G codes plus the
  flag. There is one write port and two registered read ports, with data one
  clock after the request. Each bank holds 1024 groups, which is 16384
  elements. That is enough for the longest reduction in the LLaMA-2/3 and
  Mistral-7B layers (K = 14336).
* **Array** (`qrazor_pe_array`). 8 x 8 MACs, output-stationary. In each clock,
  element `k` of every activation row is broadcast along its row together with
  its group flag. The same element of every weight or key column is broadcast
  down its column.
* **Sequencer** (`qrazor_gemm_ctrl`). On `start` it reads group 0 from all
  banks and then walks `k = 0..G-1` for G clocks. In the last of those clocks
  it already requests the next group, so the array works every clock. `done`
  is high `n_groups * G` clocks after the edge that takes `start`, and the
  first MAC clears the accumulators.
* **Modes.** `mode = 0` multiplies the activation rows by the weight columns,
  as in a projection layer. `mode = 1` takes the columns from the KV cache,
  giving Q * K^T for 8 queries against 8 cached keys. The query is razored
  like any activation, so this product is also a 4-bit operation.
* **Load ports.** Each of `w_*`, `a_*` and `kv_*` accepts one group per clock,
  addressed by bank (column, row or token) and group index. The group lands in
  memory two clocks later.
* **De-QR port.** `dq_req` with a token and a group returns G FP16 values on
  `dq_data` two clocks later, with `dq_valid` high.
* **Result readout.** `oq_req` with a row index and a combined scale returns
  that accumulator row as COLS FP16 values on `oq_data` one clock later,
  with `oq_valid` high.
* **Monitors.** `mon_sat`, `mon_ovf` and `mon_up` count the saturated,
  overflow-protected and rounded-up elements seen in the previous clock.
* **Keys in prefill.** Keys always pass through the KV cache before Q * K^T,
  including in the prefill phase, where the source method feeds freshly
  razored keys straight to the product. The values are the same; the only
  cost is the two-clock write path.

The tile holds no model. A layer is processed by loading 8 weight columns and
8 activation rows, running, and reading out `acc` (raw, or as FP16 through
the readout port). This repeats for each 8x8 output tile. The FP16 parts of a transformer layer stay outside it: normalization,
softmax, the S * V product, the activation function and the residual adds.
So does the off-chip storage of weights and of the full KV cache.

## 6. What follows the source method and what is this design's own

Taken from the method's description:

* the two-stage quantize-then-razor scheme;
* INT16 activations and INT8 weights and KV;
* the bitwise-OR razoring point;
* the flag as a count of truncated LSBs (4 bits);
* rounding on the first cut bit, with flooring when the kept bits are all
  ones;
* the sign-magnitude format;
* the MAC built from a 4x4 multiplier, one barrel shifter and an accumulator;
* group sizes 16 and 32 (16 is the default here);
* quantizing the query so that Q * K^T is a 4-bit operation;
* dequantizing V before the FP16 S * V product.

Choices of this design:

* the 40-bit accumulator;
* the reading of "16-bit barrel shifter" as a shift range of 0 to 16;
* the product sign as the XOR of the operand signs, after clearing the sign
  bits;
* round half away from zero in the quantizer, with saturation;
* FP16 rounding in both dequantizers;
* one combined scale for converting a result back to FP16, applied after the
  whole sum;
* an element that rounds to zero keeps its sign bit;
* everything about the tile: the 8x8 size, broadcast dataflow, banking,
  memory depth, sequencer, handshakes and latencies.

Not built:

* the 8-bit-activation variant (W4A8), which needs wider codes;
* the FP16 operators;
* any memory hierarchy beyond the tile.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it compares against |
|---|---|
| `tb_tc_to_sm` | all 256 INT8 values, random INT16, the two worked conversions above |
| `tb_sdr_razor_point` | group maximum vs powers of two; the example group (flag 7) |
| `tb_sdr_round` | integer division and remainder; the four example rows; the two MAC-example codes |
| `tb_fp16_quantizer` | double-precision `round(x*scale)`, 40000 random cases, INT16 and INT8 |
| `tb_sdr_encoder` | integer razoring model, groups every clock, one-clock latency |
| `tb_qrazor_mac` | MAC on decompressed integers, random `en`/`clr`, the 30720 example |
| `tb_sdr_dequant` | exact product within half an ULP, ties to even |
| `tb_acc_dequant` | exact product within half an ULP, ties to even; subnormal, normal and overflowing results all occur |
| `tb_sdr_group_mem` | shadow array, both read ports, read latency and hold |
| `tb_qrazor_pe_array` | A * B^T on decompressed integers |
| `tb_qrazor_gemm_ctrl` | the exact clock schedule and `n*G` latency |
| `tb_qrazor_top` | end to end at the default size, below |

`tb_qrazor_top` runs the tile with all parameters at their defaults. It loads
weights, activations and keys through the on-tile quantize-and-razor paths.
It runs projection and Q * K^T GEMMs of 1, 3, 5 and 1024 groups (K up to
16384) and checks every accumulator against a reference. The reference
quantizes in double precision, razors with integer arithmetic and sums the
decompressed products. The testbench also checks the `n*G` latency and reads
cached groups back through De-QR. After a run it reads every accumulator row
back as FP16 and compares it with the exact scaled sum. It counts quantizer saturation, round-ups,
overflow protection, untruncated groups, negative products, both modes,
De-QR reads and FP16 readouts, and fails if any of them never occurs. The whole run takes under
a second in Verilator.

`tb_llama2_7b_g16` and `tb_llama2_7b_g32` take the tile through the GEMM
shapes of one LLaMA-2-7B layer, at group sizes 16 and 32. Each shape runs as
one 8x8 output tile:

* projections with K = 4096;
* the FFN down projection with K = 11008;
* one attention head's Q * K^T with K = 128;
* that head's scores read back as FP16, scaled by 1/sqrt(128), the input
  softmax would take;
* the De-QR of that head's cached values.

The wrapper module `qrazor_llama_harness` holds the checks.

Simulate a testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/qrazor_pkg.sv tb/tb_qrazor_top.sv \
          --top-module tb_qrazor_top
./obj_dir/Vtb_qrazor_top
```

The package must come first; the other modules are found through `-Irtl`.
The two LLaMA-2-7B testbenches also need `-Itb` for their harness.
The RTL has no `x`-dependence: every state element is reset or written before
it is read.

## 8. Changing it

* `G` (group size), `ROWS`, `COLS`, `DEPTH` and `ACC_W` are parameters of
  `qrazor_top`. A power-of-two `G` keeps the element index simple.
* The base precisions are the `BW` parameters of the quantizers and encoders
  inside `qrazor_top`. A new precision needs the MAC's `MAX_SHIFT` to cover the
  sum of the two largest flags, which is `BW_a - 4 + BW_b - 4`.
* More salient bits (for example 8-bit activation codes) means changing
  `CODE_W` in `qrazor_pkg`. It also means giving the MAC asymmetric operand
  widths, which this RTL does not do.
