# Unicorn-CIM: a floating-point compute-in-memory macro with One4N exponent ECC

Floating-point (FP16) compute-in-memory (CIM) macros keep DNN weights in SRAM and
compute dot products next to the cells. SRAM suffers soft bit flips, more so at low
supply voltage, and an FP network reacts very unevenly to them: a flipped mantissa bit
barely matters, a flipped exponent or sign bit can wreck accuracy. The Unicorn-CIM
paper ("Unicorn-CIM: Uncovering the Vulnerability and Improving the Resilience of
High-Precision Compute-in-Memory", Li, Liang and Cao) therefore protects only the
exponents and signs, and makes that cheap in two ways:

* **One exponent per block (One4N).** Offline fine-tuning forces the N weights that a
  column holds in N consecutive input-channel rows to share one exponent. The array stores
  that exponent once per block and column, not N times.
* **Row-wide Hamming code.** The shared exponents and all sign bits of a block are
  protected together by long Hamming SEC-DED codewords (104 payload bits, 8 check bits)
  rather than by a code per weight.

For the 256 x 256-bit array with N = 8 this is 512 check bits and 2,560 exponent cells,
against 20,480 check bits for per-weight Hamming on sign and exponent. This repository
is a SystemVerilog model of that macro: the ECC circuit, the five-step exponent path
that uses the shared exponent, the mantissa and sign datapath, and a small accelerator
around several macros. It is written from the paper's description. Where the paper is
silent, the choices are this design's own and are marked below.

## 1. What one macro computes

A macro holds a 256 x 16 matrix of FP16 weights `w(i,c)`: row `i` is an input channel
and column `c` an output channel. Each SRAM row holds 16 weights, 256 bits in all. Given
an FP16 input vector `x(0..255)`, one operation produces 16 FP16 results:

    y(c) = sum over i of x(i) * w(i,c)

The input `x(i)` is reused by all 16 weights of row `i`. Under One4N, the weight is
`w(i,c) = (-1)^S(i,c) * 2^(W_E(b,c) - 15) * 1.M(i,c)`, with `b = i / N`. Sign `S` and
mantissa `M` are stored for every weight. The exponent `W_E` is stored once per block
`b` and column `c`. FP16 here means 1 sign, 5 exponent and 10 mantissa bits, bias 15.
An exponent field of 0 is read as zero. Subnormals, infinities and NaNs get no special
treatment, which is this design's choice.

## 2. Where the bits live

| Array | Contents | Size at the defaults |
|---|---|---|
| ESA (exponent summation array) | per block: 16 shared exponents and 8 x 16 sign bits, as 2 ECC rows of {8 check bits, 104 payload bits} | 32 blocks x 2 rows x 112 bits |
| MCA (mantissa computing array) | per row: 16 mantissas of 10 bits | 256 rows x 160 bits |

One block's payload is `5*16 + N*16` bits: 208 for N = 8. It is laid out like this
(a choice of this design; the paper only says it is split into two rows):

    payload[5c+4 : 5c]        shared exponent of column c        (c = 0..15)
    payload[80 + 16n + c]     sign of block row n, column c      (n = 0..N-1)
    ECC row k of block b      payload[104k+103 : 104k], stored at ESA address 2b+k
                              as {code[7:0], payload slice}

For another N the same rule gives `ceil((80 + 16N)/104)` ECC rows per block. `esa_subarray`,
`unicorn_cim_macro` and the top compute this from `N`.

The mantissas are not protected. The paper's fault-injection results show that DNN
accuracy tolerates mantissa flips up to a bit error rate of about 1e-3.

## 3. The ECC row code

The check bits are computed **offline**, when the weight image is prepared, and written
together with the payload. On chip the ECC circuit (`one4n_ecc_decoder`) sits between the
ESA cells and the exponent adders. Every read of an ECC row passes through it.

Bit placement (this design's choice; any SEC-DED Hamming arrangement with a 7-bit position
field fits the paper):

* The codeword positions run from 0 to 111. Position 0 is the overall parity bit P7.
  Positions 1, 2, 4, ..., 64 hold P0..P6. The 104 payload bits fill the remaining
  positions in order: payload bit 0 at position 3, bit 1 at 5, bit 2 at 6, bit 3 at 7,
  bit 4 at 9, and so on.
* `P_k` (k = 0..6) is the XOR of the payload bits whose position has bit k set.
  Equivalently, `{P6..P0}` is the XOR of the positions of all set payload bits.
* `P7` is the XOR of the payload and of P6..P0. The whole 112-bit codeword then has
  even parity.

The decoder recomputes the check bits from the stored payload (the "check_sum") and XORs
them with the stored code to form the syndrome `R[7:0]`. `R[6:0]` is the position
syndrome. `R[7]` is the parity of all 112 stored bits. The decoder takes the encoder's
recomputed P7 and corrects it by the parity of `R[6:0]`, because the encoder forms P7 over
the freshly computed P6..P0, not over the stored ones. Then, as in the paper:

| R | Meaning | Action |
|---|---|---|
| 0 | no error | none |
| R[7] = 1 | one error at position R[6:0] | bit flipped (position 0 means P7 itself), `err_single` |
| R[7] = 0, R[6:0] != 0 | two (or an even number of) errors | `err_multi`, data passed on uncorrected |
| R[7] = 1, R[6:0] > 111 | impossible for one error | `err_multi` (this design's choice) |

Corrected data is used for the operation but not written back to the array. The macro
reports, per operation, how many ECC rows were corrected and whether any row was
uncorrectable.

To build an ESA row in software, compute `p = XOR of pos(j) over all set payload bits j`,
where `pos(j)` is the j-th integer from 3 upward that is not a power of two. Then
`code = {parity(payload) ^ parity(p), p}` and the stored row is `{code, payload}`. The
function `ref_encode` in `tb/tb_ref_pkg.sv` does exactly this.

## 4. The exponent path: why a shared exponent saves adders

An FP dot product needs the largest product exponent `E_max`. Every product's mantissa
is then shifted right by its distance from `E_max` before the products are added. With a
shared exponent, the largest product exponent within a block is simply the largest input
exponent of that block plus `W_E(b,c)`. `exponent_processing_unit` implements the paper's
five steps for all 16 columns at once:

1. `X_max(b)`: largest input exponent among the N inputs of block b. The ESA's adders
   form `X_E,i + W_E(b,c)` for every row in parallel.
2. `S(b,c) = X_max(b) + W_E(b,c)`: one adder per block and column, instead of a
   comparison over N sums.
3. `E_max(c) = max over b of S(b,c)`.
4. `E_diff(i,c) = E_max(c) - (X_E,i + W_E(b,c))`.
5. The input significand `1.X_M,i` (11 bits) is shifted right by `E_diff`.

Exponent sums carry bias 30 (two biased exponents). The aligned significand keeps
11 bits. Bits shifted past the LSB are lost, and a shift of 11 or more gives 0. This
follows the paper's order (align the input, then multiply), but the width is this
design's choice. Inputs with exponent field 0, and block columns whose shared exponent
is 0, count as zero. They are left out of steps 1 to 3.

## 5. Mantissa, sign and result

* **MCA** (`mca_subarray`): multiplies each aligned input significand by `1.W_M(i,c)`.
  The hidden bit is 0 if the block's shared exponent is 0. The result is a 22-bit
  product with 20 fraction bits.
* **Sign processing unit** (`sign_processing_unit`): the XOR array,
  `S(i,c) xor sign(x_i)`. The weight signs have already passed the ECC circuit.
* **Adder tree** (`adder_tree`): one per column. It adds the 256 signed products at full
  width (31 bits), so the column sum is exact given the aligned operands.
* **Product management** (`product_management`): the column sum `s` stands for
  `s * 2^(E_max - 30 - 20)`. With the leading one of `|s|` at bit L, the FP16 result
  has exponent field `E_max - 15 + L - 20` and the 10 bits below the leading one,
  **truncated**. The paper names truncation as the kind of final processing used. Field
  values of 31 or more saturate to infinity (`overflow`). Values of 0 or less flush to a
  signed zero (`underflow`). A zero sum gives +0.

Because of the alignment truncation, the result can be below the exact real dot product
by up to about `256 * 2^-9` units of `2^(E_max-30)`, plus the final truncation. The
end-to-end test checks against real arithmetic within this bound.

## 6. Macro timing

`unicorn_cim_macro` has four pipeline stages, placed by this design (the paper gives no
timing):

| Cycle after `start` | Registered |
|---|---|
| 1 | input vector, ECC-corrected exponents and signs, exponent sums, ECC flags |
| 2 | `E_max`, aligned significands, product signs |
| 3 | column sums |
| 4 | FP16 results, `overflow`/`underflow` per column, `ecc_corrected`, `ecc_uncorrectable`; `valid` high |

The input `x` is sampled only in the `start` cycle. A new operation may start every
cycle. Weight writes (`esa_we`, `mca_we`) are single-cycle and must not overlap an
operation in flight. An assertion checks this.

## 7. The accelerator around the macros

`unicorn_cim_top` puts `NUM_MACROS` (default 4) macros behind a weight buffer, an input
buffer, an output buffer and a controller. The paper shows such a grid of macros and
these buffers but gives no count or wiring. Here all macros receive the same input
vector and hold different output channels, giving 64 results per operation.

Protocol on the memory side (the off-chip DRAM is not part of the design):

1. Queue weight rows with `wb_push`. Set `wb_macro`, and set `wb_target = TGT_ESA` with
   a pre-encoded 112-bit ESA row at `wb_addr` 0..63, or `TGT_MCA` with a 160-bit
   mantissa row at `wb_addr` 0..255. `wb_data` is LSB-aligned. Do not push while
   `wb_full`.
2. Write the 256 inputs with `in_we`/`in_addr`/`in_data`.
3. Pulse `start`. The controller (`cim_controller`) first writes all queued rows, one per
   cycle, then starts all macros together. Four cycles later the results are valid and
   are loaded into the output buffer; `done` pulses in the next cycle. With nothing
   queued, `done` comes five cycles after `start`, and each queued row adds one cycle.
   A start that arrives while rows are queued waits for them.
4. Read results at `out_addr = macro*16 + column`. `st_ecc_corrected` (sum over the
   macros), `st_ecc_uncorrectable`, `st_overflow` and `st_underflow` describe the same
   operation.

The weight buffer drains as fast as rows can be pushed, so it only fills up while an
operation is running.

## 8. What is outside the RTL

* **Exponent-alignment fine-tuning.** The paper fine-tunes a pre-trained FP16 model so
  that each block of N weights shares the exponent at a chosen rank (the 2nd or 3rd
  largest works best). It rescales the weights into that exponent's range and then
  trains only mantissas. This produces the weight image; it is a training procedure,
  not hardware.
* **Fault injection and accuracy studies**, the voltage/BER data, and the paper's area
  and power figures (8.98 % logic overhead against the exponent processing unit) are
  results, not design content. They are not reproduced here.
* **DRAM** and the SRAM bit cells themselves: the arrays are modelled as register arrays
  with parallel read.

## 9. Departures and choices, collected

Taken from the paper: FP16 split 1/5/10; 256 x 256-bit array, 16 weights per row; N = 8;
208 protected bits per block in two rows of 8 check bits; 512 check bits and 2,560
exponent cells per array; syndrome rules; ECC between the ESA cells and the exponent
adders; the five exponent steps; aligning the input mantissa before multiplication; the
XOR sign unit; adder tree and product management; truncation.

This design's own: FP16 bias 15 and zero handling; Hamming bit positions; payload layout
and ESA addressing; reporting an out-of-range single-error syndrome as uncorrectable;
no write-back of corrected rows; 11-bit aligned significand; full-width adder tree;
overflow to infinity and underflow to zero; the 4-stage pipeline; the buffers, the
controller protocol, `NUM_MACROS = 4`, `WB_DEPTH = 16`, and the sharing of one input
vector by all macros.

All sizes run at the paper's values. Nothing has been scaled down.

Workloads: the paper evaluates ResNet18, YOLOv5, nnUNet and TinyViT. Each has millions
of weights; by common knowledge, not from the paper, ResNet18 has about 11.7 M.
The four macros hold 16,384 weights, so each network runs layer tile by layer tile,
reloading weights through the weight buffer.

## 10. Simulating

Every testbench in `tb/` checks itself, prints `TB_RESULT checks=<n> failures=<n>` and
stops. A watchdog ends a hung run. Reference models are in `tb/tb_ref_pkg.sv`. They are
written independently of the RTL: the Hamming code is computed as the XOR of bit positions,
and `E_max` as a flat maximum over all rows. Build and run one testbench, for example the
end-to-end test at full size:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/unicorn_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_unicorn_cim_top.sv \
        --top-module tb_unicorn_cim_top
    ./obj_dir/Vtb_unicorn_cim_top

At full size the top takes a few minutes to build and seconds to run. Add
`-Wall` and `--lint-only` for a lint of the RTL alone.

| Testbench | What it checks |
|---|---|
| `tb_one4n_ecc_encoder` | check bits of all one-hot and random payloads |
| `tb_one4n_ecc_decoder` | clean rows, all 112 single-bit errors with their syndromes, random double errors |
| `tb_esa_subarray` | full array write and readback of exponents, signs and sums; corrected single errors (payload and check bit); flagged double error |
| `tb_exponent_processing_unit` | `E_max` and every aligned significand, including zero inputs, zero blocks and complete shift-outs |
| `tb_sign_processing_unit`, `tb_mca_subarray`, `tb_adder_tree`, `tb_product_management` | the datapath pieces against direct arithmetic; overflow, underflow and truncation cases |
| `tb_unicorn_cim_macro` | one macro end to end, bit-exact: 4-cycle latency, back-to-back operations, ECC correction with unchanged results, double-error flag, overflow, underflow |
| `tb_input_buffer`, `tb_weight_buffer`, `tb_output_buffer`, `tb_cim_controller` | storage, FIFO order and flags, write-before-compute ordering and cycle counts |
| `tb_unicorn_cim_top` | the whole accelerator at default size: five operations with results compared bit-exactly and, for the plain ones, against real arithmetic. It counts every mechanism (start waiting for queued writes, ECC correction, ECC detection, overflow, underflow, zero inputs, zero blocks, shifted-out mantissas, negative results) and fails if one never occurs. |

## 11. Files

`rtl/unicorn_pkg.sv` (types and sizes), `one4n_ecc_encoder`, `one4n_ecc_decoder`,
`esa_subarray`, `exponent_processing_unit`, `sign_processing_unit`, `mca_subarray`,
`adder_tree`, `product_management`, `unicorn_cim_macro`, `input_buffer`, `weight_buffer`,
`output_buffer`, `cim_controller`, `unicorn_cim_top`. Each file opens with a description
of its function, interface and timing.
