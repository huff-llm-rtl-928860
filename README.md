# A systolic array that keeps its LLM weights Huffman-compressed

Large language model weights in FP16 carry less information than their
16 bits: the exponent in particular takes only a few values often. Huffman
coding the weights would shrink them by 15–30 %, but a Huffman code has
variable length, and a systolic array needs exactly one weight per column
in every clock cycle. This RTL implements the remedy described in
"Huff-LLM: End-to-End Lossless Compression for Efficient LLM Inference"
(Yubeaton et al.):

* every FP16 weight is split into four fields, **{1,5,5,5}**: the sign bit,
  the 5-bit exponent, the 5 high and the 5 low mantissa bits;
* the sign is stored raw; each 5-bit field is Huffman coded with its own
  codebook of only 32 symbols, small enough to be matched in one cycle by a
  32-entry content-addressable memory (CAM);
* the weights stay compressed in the on-chip weight buffer and are
  decompressed by one **HD** (Huffman decompressor) per array column, placed
  between the weight buffer and the first PE row. Each HD produces one
  16-bit weight per cycle, so the array runs exactly as on uncompressed
  weights, only with less weight storage and traffic.

The RTL is a complete 128 × 128 output-stationary FP16 systolic array with
its 16 KB compressed weight buffer, 8 KB activation buffer and 4 KB
accumulator buffer, the row of 128 HDs, and a tile controller. It is
synthesizable SystemVerilog (IEEE 1800-2017) with self-checking
testbenches. The off-chip memory and the software that builds codebooks
and compresses weights are outside it; the testbenches model both.

## 1. Compressed weight format

A weight `w[15:0]` is split as

| field | bits | stored in bank | coding |
|---|---|---|---|
| sign | `w[15]` | 3 (`SPLIT_SIGN`) | raw, one bit per weight |
| exponent | `w[14:10]` | 0 (`SPLIT_EXP`) | Huffman, codebook 0 |
| mantissa MSBs | `w[9:5]` | 1 (`SPLIT_MHI`) | Huffman, codebook 1 |
| mantissa LSBs | `w[4:0]` | 2 (`SPLIT_MLO`) | Huffman, codebook 2 |

Each bank holds one bit stream: the codes of the column's weights in the
order the column consumes them, concatenated and packed into 32-bit words,
**first stream bit in bit 0** of the first word. A codebook entry
(`hd_pkg::cam_entry_t`) holds a valid bit, the code (first bit in `code[0]`,
up to 16 bits), its length `len` and the 5-bit symbol it stands for. The
codebook must be prefix-free and its longest code must not exceed the
decoder's `LMAX` (12 by default, the longest code the paper found
necessary). The codebook for each split is written into the HDs of all
columns at once through the `cam_*` port, so one weight matrix uses three
codebooks.

Building the codebooks and encoding the streams is done once, offline. The
testbenches contain a small encoder (`tb/tb_pkg.sv`): `gen_codebook` draws a
random complete prefix code (a random binary tree with 32 leaves and depth
at most `LMAX`), `append_code` and `pack_words` build the bank words.

## 2. The single-cycle Huffman decoder

`huffman_decoder` is the heart of the design; `bit_window` is its codeword
register.

**Match.** The decoder looks at the next `LMAX` bits of its stream, the
*window*. All 32 CAM entries compare their `len` code bits with the first
`len` window bits at once; with a prefix-free code exactly one entry hits.
That entry gives the symbol and its length `L`, and the start pointer `S`
of the stream moves by `L`. Decode and pointer update both happen in the
same cycle, so the decoder consumes one code per cycle whatever its length.
The symbol is registered, which makes the decoder one extra pipeline stage:
a symbol appears on `sym_q` the cycle after the `advance` that consumed it.
A window that matches nothing raises `miss`.

**Codeword register.** The paper's basic decoder keeps 32 bits and reads
`L` bits from the buffer each cycle; it also points out that a 64-bit
register lets the buffer be read only when fewer than 32 unread bits are
left. This design builds that second variant as a ring of two 32-bit halves
with a 6-bit start pointer:

```
 ring = { half1 , half0 }          window[i] = ring[(S + i) mod 64]
          S moves up by L each cycle; when it leaves a half, that half is
          free and is refilled with the next word of the bank
```

*Why it never stalls.* A half freed at the end of cycle *t* is requested
from the bank in cycle *t* (`rd_en`), returns in *t+1* and is written at the
end of *t+1*. In *t+1* the pointer sits at most `LMAX-1` bits into the other
half, so the window (`LMAX` bits) ends at most `2·LMAX-2 ≤ 30` bits into it
and cannot touch the freed half; from *t+2* on the freed half holds its new
word. This holds for any `LMAX ≤ 16` with a bank of one-cycle read latency.
An assertion (`a_window_loaded`) checks that the window only ever covers
loaded halves.

*Start.* `start` clears the ring and sets the bank address to `base_addr`;
the two halves are fetched in the next two cycles and `ready` is high
from the fourth cycle after `start` on. Once `ready`,
the decoder reads one bank word every time 32 stream bits have been used.
Reads run ahead of the data by up to two words, so a stream needs up to two
words of readable (even if meaningless) space after its end.

## 3. The HD of a column

`hd_unit` is three `huffman_decoder`s (exponent, mantissa MSBs, mantissa
LSBs) and a fourth `bit_window` one bit wide that serves the raw sign
stream. All four advance together, only when all four are ready, and the
outputs are concatenated to `{sign, exponent, mantissa MSBs, mantissa LSBs}`.
The paper only says that the sign is passed through; keeping the sign bits
as a fourth, small bank read a word at a time is this design's choice.

## 4. Array, schedule and cycle count

`systolic_array` is a `ROWS × COLS` grid of `pe`s. Weights enter at the top
(from the HDs) and move one row down per cycle; activations enter at the
left (from the activation buffer) and move one column right per cycle. A PE
multiplies whatever weight and activation arrive together and adds the
product into its accumulator, so after a tile PE(*i*,*j*) holds

    out[i][j] = Σ_{t=0}^{T-1} a[i][t] · w[t][j]        (output stationary)

`array_controller` runs one tile of length `T` (1..32):

1. **Start.** Start all HDs on their streams at `op_base`, rewind the
   activation buffer, clear all accumulators.
2. **Fill.** Wait until every HD is ready.
3. **Compute.** A pulse of `T` ones enters a one-bit delay line. Tap *k*
   advances the HD of column *k* and reads activation row *k*. Column *j* and
   row *i* therefore start *j* and *i* cycles late: the diagonal wavefront a
   systolic array needs, produced by delaying the enables rather than the
   data. PE(*i*,*j*) receives `a[i][t]` and `w[t][j]` in the same cycle (an
   assertion in `pe` checks this); cycles without operands are bubbles.
   Compute lasts `T+ROWS+COLS-1` cycles, until the last PE has its last pair.
4. **Drain.** For `ROWS` cycles every column shifts its accumulators one row
   down; the bottom row enters the accumulator buffer. Rows leave bottom
   first: row `ROWS-1`, then `ROWS-2`, …, row 0. While the accumulator
   buffer is full the drain holds (`stall_cycles` counts these cycles).
5. **Done.** `op_done` pulses for one cycle.

Compute and drain together take `2·ROWS + COLS + T − 1` cycles without
stalls: the paper's per-fold count `2R + C + T − 2` plus one cycle for the HD
output register. `op_cycles` reports the whole operation, which adds 6
cycles for the start cycle, HD priming, the switch into compute and the done
cycle: `op_cycles = 2·ROWS + COLS + T + 5 + stall_cycles`. For the default
128 × 128 array and `T = 32` that is 421 cycles.

Larger matrices are run as a sequence of tiles ("folds") by the host;
accumulation across tiles of the reduction dimension is left to the host
(each tile clears the accumulators).

## 5. Arithmetic

The PE multiplies FP16 by FP16 (`fp16_mul`). Two 11-bit significands give
at most 22 bits and the exponent stays in range, so the product is formed
**exactly** in FP32, with no rounding. The accumulator is FP32 and
`fp32_add` rounds to nearest even, handling subnormals, infinity and NaN
(quiet NaN `0x7FC00000`). The paper specifies FP16 weights and activations
and does not give the accumulator format; FP32 accumulation is this design's
choice, and it also sets the width of the accumulator buffer.

## 6. Buffers and sizes

| parameter (top) | default | meaning | size at default |
|---|---|---|---|
| `ROWS`, `COLS` | 128, 128 | PE array | 16 384 PEs (paper) |
| `LMAX` | 12 | longest code the decoders accept | paper's value |
| `BANK_WORDS` | 10 | 32-bit words per coded bank | |
| `SIGN_WORDS` | 2 | words of the sign bank (64 weights) | 3·10+2 words · 4 B · 128 = 16 KB (paper) |
| `ACT_DEPTH` | 32 | activations per row | 128 · 32 · 2 B = 8 KB (paper) |
| `ACC_ROWS` | 8 | result rows in the accumulator buffer | 8 · 128 · 4 B = 4 KB (paper) |
| `ADDR_BITS`, `T_BITS` | 4, 6 | bank address and tile length widths | |

The paper gives the three buffer sizes and says that each column's weight
buffer is split into three equal banks, one per coded field. How those
bytes are organised is this design's: 10 words per coded bank and 2 for
signs, per-row activation streams with their own read pointers, and the
accumulator buffer as a FIFO of result rows that back-pressures the drain.
With `T = 32`, a coded bank of 320 bits holds a tile as long as the field
averages at most 10 bits per weight. For Llama-3-8B the paper measures 2.6,
5.0 and 2.0 bits of entropy for the three fields, well within that. A tile
whose codes are unusually long must be issued with a smaller `T`.

## 7. Interface of `huffllm_top`

| port group | use |
|---|---|
| `cam_we, cam_split, cam_idx, cam_wdata` | write codebook entry `cam_idx` of split `cam_split` into every column's HD |
| `wb_we, wb_col, wb_bank, wb_addr, wb_wdata` | write one 32-bit word of a column's bank |
| `ab_we, ab_row, ab_addr, ab_wdata` | write activation `a[ab_row][ab_addr]` |
| `op_start, op_len, op_base` | run a tile of `T = op_len` from bank address `op_base` |
| `op_busy, op_done, op_cycles, stall_cycles, hd_miss` | status |
| `res_pop, res_valid, res_row` | read result rows (FP32, bottom row first) |

A tile is run by writing the three codebooks, the compressed streams of
every column, and the activations; then pulsing `op_start` and popping
`ROWS` result rows. Codebooks and buffer contents stay in place across
tiles; `op_base` lets several short tiles share the banks. Reset is
asynchronous and active low.

## 8. Where this departs from the paper, and what is not here

* **Dataflow.** Only the output-stationary array of the paper's figures
  is built. The paper also evaluates, and reports most of its numbers for,
  a weight-stationary array, but does not describe its weight-loading and
  partial-sum paths.
* **Codeword register.** The 64-bit, word-refilled register the paper
  mentions as the practical option is built, not the 32-bit register that
  reads `L` bits per cycle.
* **Longest code.** The paper's format figure allows codes of 2–14 bits,
  while its synthesized decoder uses `L_max = 12`. The default here is 12;
  `LMAX` can be raised up to 16.
* **Choices of this design where the paper is silent:** the FP32
  accumulator, sign-bit storage, bank word size and depths, how the
  codebooks are loaded (shared by all columns), how the results are drained,
  the controller, and reset.
* **Not built:** the Simba/NVDLA-like vector accelerator, the paper's second
  host for the same HD; the BF16 variant (a 1-4-4-7 split for which only
  compression ratios are given); the off-chip DRAM; the offline compressor.

## 9. Simulating

Every testbench in `tb/` is self-checking, stops itself with a watchdog and
prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hd_pkg.sv tb/tb_pkg.sv \
    rtl/*.sv tb/tb_huffllm_top.sv --top-module tb_huffllm_top
./obj_dir/Vtb_huffllm_top
```

(list `rtl/hd_pkg.sv` first, before the files that import it). The
testbenches use two-state simulation and `$urandom` only.

| testbench | what it establishes |
|---|---|
| `tb_huffman_decoder` | random prefix codes (longest code 6–12 bits, and a flat 5-bit code), biased random streams, with and without gaps in `advance`: every symbol, no misses, one symbol per advanced cycle, priming within 4 cycles |
| `tb_hd_unit` | three codebooks plus raw sign: random FP16 weights come back bit-exact, one per cycle |
| `tb_pe` | accumulation against a double-precision reference rounded to FP32 (normals, subnormals, zeros, bubbles), forwarding, clear, drain, hold, inf/NaN |
| `tb_systolic_array` | 4 × 3 array, `T` = 1..40, skewed feeding by the testbench, drained rows with random holds |
| `tb_weight_buffer`, `tb_activation_buffer`, `tb_accumulator_buffer` | storage and port behaviour against models |
| `tb_array_controller` | enable skew per row and column cycle by cycle, phase lengths, stalls, cycle count |
| `tb_huffllm_top` | end to end at 4 × 3 with a 2-row accumulator buffer: ten tiles with new random codebooks and weights, results bit-exact against an FP32 reference, cycle counts; counts that refills, skew bubbles, drain stalls and a nonzero stream base all occurred |
| `tb_huffllm_tile32` | one complete `T = 32` tile on a 32 × 32 array with every other parameter at its default (full 10+10+10+2-word banks, `LMAX` = 12, 8-row accumulator buffer): all 1024 results bit-exact and the cycle count 2R+C+T+5 |

Every testbench finishes within a few seconds once built.

**Largest size simulated.** No simulation of the full 128 × 128 array was
run. The largest end-to-end run is 32 × 32 with `T = 32`
(`tb_huffllm_tile32`); `tb_huffllm_top` runs at 4 × 3. The PE count makes
the full-size design expensive for a simulator. Verilator needs about
3.4 GB just to lint the 64 × 64 array and 11.8 GB (five minutes) to lint
the 128 × 128 array. Its simulation front end went past 12 GB at 128 × 128, and a 64 × 64 simulation build did not finish within 30 minutes
on the machine used. To simulate at full size, set `R = C = 128` in
`tb_huffllm_tile32` (`huffllm_top` defaults to 128 × 128). That needs a
machine with much more memory.
