# PLENA: an accelerator core for long-context LLM inference

Long-context, agentic LLM inference runs out of HBM capacity long before it runs out of
compute. The KV cache grows with every token, so the batch that fits in memory is small.
With a small batch, the GEMMs of the feed-forward layers become "fat": M (the batch, or the
tokens of one request) is tiny while K and N are thousands wide. Attention is similar. Its
head dimension is small (128), and grouped-query attention multiplies one key head by
several query heads.

A square systolic array of, say, 64×64 is mostly idle on such shapes. This core
rebuilds the array as a **flattened systolic array**. It is short in the batch direction
(`BLEN` rows) and very wide in the reduction direction (`MLEN` = `BLEN` × number of
sub-arrays).

It has three supporting ideas:

* **Microscaling (MX) storage.** Everything in HBM and in the matrix memory is MXINT4:
  4-bit two's-complement integers with one shared power-of-two scale (E8M0) per block of
  16 elements. That is 4.5 bits per value.
* **Asymmetric precision.** Activations stay in FP16 on chip. Weights and K/V are
  quantized.
* **An ISA for FlashAttention.** Separate matrix, vector, scalar and HBM instructions let
  a compiler write the tiled, online-softmax attention loop directly. HBM loads run in
  the background while the other units compute.

This repository holds synthesizable SystemVerilog for the core. It covers the array, its
memories, the vector and scalar units, the HBM engines, and an in-order decoder with
hazard checks. It also has self-checking testbenches for every block and for the whole
core.

## Block diagram in words

```
 host ──instr──► instruction_buffer ──► decoder ──┬──► scalar_unit (x0..x31, f0..f31)
                                                  ├──► vector_unit ──► elementwise / reduction / hadamard
                                                  ├──► matrix_unit ──► flattened_systolic_array
                                                  │        ▲   │            (fsa_subarray × MLEN/BLEN,
                                                  │        │   │             mx_pe, result_adder_tree)
                                                  │   matrix_sram  vector_sram (2 ports, FP16)
                                                  └──► hbm_controller ──► HBM port (external)
                                                         (mx_quantizer / mx_dequantizer)
```

The top module is `plena_top`. Its ports are:

* a 32-bit instruction push port (`instr_valid`/`instr_ready`/`instr_data`). It stands for
  the host link, which is not part of this design.
* an HBM port of one beat per transfer: `MLEN × 4` bits, i.e. one MX row. HBM is not part
  of this design either; the testbenches model it.
* `halted`, and twelve 32-bit event counters `stat_*`.

Default parameters:

| parameter | default | meaning |
|---|---|---|
| `BLEN` | 32 | rows of the array = batch tile, side of one square sub-array |
| `MLEN` (= VLEN) | 2048 | width of the array, of a Matrix SRAM tile and of a Vector SRAM row |
| `HLEN` | 128 | head dimension; head mode splits the array into MLEN/HLEN = 16 heads |
| `ELEM_W` / `SCALE_W` / `MX_BLOCK` | 4 / 8 / 16 | MXINT4 elements, E8M0 scale, block size |
| `ACC_W` / `ACC_LSB_EXP` | 48 / −24 | PE accumulator: 48-bit integer, LSB = 2^−24 |
| `VS_DEPTH` | 1024 | Vector SRAM rows (4 MiB of FP16) |
| `IB_DEPTH` | 64 | instruction buffer entries |
| `HAD_N` | 16 | size of the online Hadamard rotation |
| Matrix SRAM `TILES` | 2 | MLEN×MLEN tiles, so one can be loaded while the other is used |

`BLEN`, `MLEN` and `HLEN` come from the source architecture; the defaults follow the
configuration that is presented as the main one. The accumulator format, memory depths,
tile count and Hadamard size are this design's choices.

## The flattened systolic array

### Sub-arrays and the processing element

`flattened_systolic_array` places `NSUB = MLEN/BLEN` square `BLEN×BLEN` arrays
(`fsa_subarray`) side by side. Every cycle the array takes two MLEN-wide operand vectors.
Slice `q` (elements `q*BLEN … q*BLEN+BLEN−1`) of each vector goes to sub-array `q`: the X
slice from the left and the W slice from the top.

A sub-array is output-stationary. PE (i, j) accumulates `X[i][k]·W[k][j]` over the k
values it sees. Operands march right and down one PE per cycle, so rows and columns
enter with the usual diagonal skew. `fsa_subarray` adds that skew internally. A value
presented at cycle t has reached every PE by cycle `t + 2(BLEN−1) + 1`.

Each `mx_pe` multiplies two 4-bit integers, adds their two 8-bit scale exponents, and
shifts the product onto a fixed-point grid. The grid LSB is `2^ACC_LSB_EXP`. The shifted
product goes into a 48-bit accumulator. Shifts past the top are clamped and shifts below
the LSB truncate. This is exact for the testbenches' data. Extremely large or small
scales lose precision, which is the cost of an integer accumulator.

### Reduction across sub-arrays, and head mode

Each sub-array holds partial sums over only its BLEN-long slice of K, so a complete
result needs the sum over all sub-arrays. `result_adder_tree` adds the NSUB
accumulators with a binary adder tree.

* **Normal mode.** One sum per output. A single (BLEN, MLEN) × (MLEN, BLEN) tile product
  gives BLEN×BLEN results.
* **Head mode (`M_HTMM`).** The tree stops at groups of `HLEN/BLEN` sub-arrays. That gives
  `MLEN/HLEN` independent results, one per attention head. This is how Q·Kᵀ for many
  heads, or for the query heads of one GQA group, runs at once on a short array.

The adder tree is shared by the BLEN columns of one output row. The matrix unit steps
through the BLEN rows, one per cycle. This time-multiplexing is a design choice that
keeps the tree at BLEN×NSUB adders instead of BLEN²×NSUB.

### Matrix unit: fill, stream, sum

`matrix_unit` runs two kinds of command.

**Stream (`M_MM`, `M_TMM`, `M_HTMM`).**

1. *Fill.* Read BLEN X rows (FP16) from the Vector SRAM. Quantize each row to MXINT4 on
   the way in (`mx_quantizer`). In the same cycles, read BLEN W vectors from the Matrix
   SRAM:
   * columns for `M_MM`: W is stored K-major and transposed on read;
   * rows for `M_TMM`/`M_HTMM`: W is stored N-major, as K is in Q·Kᵀ.
2. *Stream.* Replay the buffers over BLEN cycles. In cycle k, sub-array q gets
   `X[i][q·BLEN+k]` and `W[q·BLEN+k][j]`.

X and W are double-buffered, so the next fill overlaps the current stream. Back-to-back
tile products keep the array busy every cycle. The testbench checks this: 5 tiles take
exactly 20 stream cycles at BLEN = 4. Successive streams accumulate into the same PE
registers; a hidden size of 8192 is four streams.

**Sum (`M_SUM`).**

1. Wait for the array to drain (3·BLEN cycles, a conservative bound).
2. Read the adder tree row by row.
3. Convert each integer to FP16.
4. Place the row in the accumulate buffer (BLEN rows × MLEN) at column `col_blk·BLEN`.
   In head mode, MLEN/HLEN blocks go side by side.
5. Clear the accumulators.

With the flush bit set, the BLEN buffer rows are written to the Vector SRAM. So an output
row of N = MLEN columns is built from MLEN/BLEN tile products plus M_SUMs, then written
back once.

### Undoing the K/V rotation on the W path

K and V vectors are rotated by a normalised 16-point Hadamard matrix before they are
quantized into the KV cache (`V_HAD` then `H_STORE_V`). The rotation spreads an outlier
over its block, so 4-bit quantization loses less. Before such a row is used as a W
operand, the rotation must be undone. `inverse_hadamard_mx` sits between the Matrix
SRAM and the W buffer, and `M_TMM`/`M_HTMM` with `imm[0] = 1` enable it. Weights bypass
it.

Because the transform size equals the MX block size, a block has a single scale. The
butterflies therefore work on 4-bit integers only:

1. Four add/subtract stages give an unnormalised result of at most ±112.
2. The 1/4 normalisation is folded into the scale (scale − 2).
3. The result is re-quantized to 4 bits: the smallest shift k with 7·2^k ≥ max|y| is
   chosen, and the scale grows by k.

This last rounding is the only loss. A row that was exactly representable before
rotation comes back exactly.

## Memories

### Transposable Matrix SRAM

`M_MM` needs W columns and `M_TMM` needs W rows, both MLEN elements per cycle, without
storing W twice. `matrix_sram` splits a tile into MLEN one-element-wide banks. It stores
element (r, c) in bank `(c − r) mod MLEN` at address r.

* A **row** read uses the same address in every bank.
* A **column** read uses bank b at address `(c − b) mod MLEN`. Every bank is still hit
  exactly once.

The output is rotated back into order. Scales are stored separately, one per 16
elements of a row, banked by row. A column read therefore returns, for every element,
the scale of the row it came from.

The memory has two tiles, with one write port (from HBM) and one read port (to the
array). Read data arrive one cycle after the request.

### Vector SRAM

`vector_sram` has `VS_DEPTH` rows of MLEN FP16 values and two identical read/write ports.
Read data arrive one cycle after the grant. The top shares the ports with fixed
priority:

* **Port A:** the vector unit first (src1 read and result write), otherwise the HBM
  controller.
* **Port B:** the vector unit's src2 read first, otherwise the matrix unit (X fills and
  M_SUM flushes).

Correctness does not depend on the order of grants. The decoder never lets two units
touch overlapping rows in a conflicting way (see below).

## MX conversion and the HBM engines

* `mx_quantizer` finds the largest magnitude m of each 16-element block. It picks the
  smallest power of two `2^X` with `7·2^X ≥ m`, then rounds each element to
  `round(v/2^X)`, clipped to ±7.
* `mx_dequantizer` computes `element·2^(scale−127)` exactly in FP16 where it is
  representable.

`hbm_controller` contains the matrix read engine (`H_LOAD_M`) and the vector read/write
engine (`H_LOAD_V`, `H_STORE_V`). They share one HBM port and run one at a time, in the
background. In HBM, elements and scales live in separate regions so both stay aligned:
row i of a transfer has its element beat at `elem_base + i·stride` and its scale beat at
`scale_base + i·stride`.

* **Loads** issue read requests back to back, without waiting for data. HBM latency is
  hidden behind the request stream. At zero back-pressure an 8-row `H_LOAD_M` finishes
  in at most 2·8 + 5 cycles.
* **`H_LOAD_M`** writes MX rows unchanged into the Matrix SRAM.
* **`H_LOAD_V`** dequantizes them into the Vector SRAM.
* **`H_STORE_V`** reads a Vector SRAM row, quantizes it, and writes the element beat and
  then the scale beat. This is how new K/V vectors are appended to the cache, after a
  `V_HAD` rotation if desired.

The beat format, the stride rule and the valid/ready protocol are this design's.

## Vector and scalar units

`vector_unit` runs one instruction at a time on whole rows. Its sub-blocks are:

* `elementwise_unit`: add, sub, mul, max, eˣ, 1/x, per lane;
* `reduction_unit`: sum or max over the row, as an adder/comparator tree;
* `hadamard_transform`: a fast Walsh–Hadamard transform on blocks of 16, scaled by
  1/√16.

The `_VF` forms broadcast an FP register to every lane. Reductions write an FP register
of `scalar_unit`. With immediate grants, an element-wise instruction takes 5 cycles and a
reduction takes 4.

`scalar_unit` has 32 integer registers (addresses and loop counters) and 32 FP16
registers (running max, running sum and scale factors of the online softmax). Scalar
instructions complete in the cycle they issue.

FP16 arithmetic (`plena_pkg`) rounds to nearest, ties away from zero, and flushes
subnormals to zero. eˣ is `2^(x·log2 e)`: a 64-entry 2^(k/64) table, computed in SystemVerilog, plus linear
interpolation.
These are design choices.

## Instruction set and the decoder

### Instruction format

Every instruction is 32 bits:
`[31:26] opcode | [25:21] rd | [20:16] rs1 | [15:11] rs2 | [10:0] imm`.

| class | opcodes | operands |
|---|---|---|
| matrix | `M_MM 01`, `M_TMM 02`, `M_HTMM 03` | X rows from `x[rd]`, Matrix SRAM index `x[rs1]` (tile·MLEN + row/column); `imm[0]` of `M_TMM`/`M_HTMM` enables the inverse Hadamard transform |
| | `M_SUM 04` | destination row `x[rd]`, column block `imm[9:0]`, flush `imm[10]` |
| vector | `V_ADD/SUB/MUL/MAX_VV 08–0B`, `V_ADD/SUB/MUL_VF 0C–0E`, `V_EXP_V 0F`, `V_RECI_V 10`, `V_HAD 13` | dst `x[rd]`, src1 `x[rs1]`, src2 `x[rs2]` or scalar `f[rs2]` |
| | `V_RED_SUM 11`, `V_RED_MAX 12` | result to `f[rd]` |
| scalar int | `S_ADD/SUB/MUL/DIV 18–1B`, `S_ADDI 1C` (imm signed 11 bit), `S_LUI 1D` | |
| scalar FP | `S_FADD/FSUB/FMUL/FDIV/FEXP/FRECI/FSQRT/FMAX 20–27`, `S_FLI 28` | |
| HBM | `H_LOAD_M 30`, `H_LOAD_V 31`, `H_STORE_V 32` | SRAM row `x[rd]`, element offset `x[rs1]`, scale offset `x[rs2]` |
| control | `C_SET_ADDR/SCALE/STRIDE 38–3A`, `C_SET_MLOAD/VLOAD/VWRITE 3B–3D`, `C_FENCE 3E`, `C_HALT 3F` | value from `x[rs1]` |

The source architecture defines the instruction classes and their unit prefixes. The
opcodes, field positions and operand roles are this design's.

### Decoder

`decoder` issues in order, at most one instruction per cycle. Once issued, units run
concurrently: an `H_LOAD_M` prefetch, a tile stream and a string of vector and scalar
instructions can all be in flight together.

Hazards are checked on **ranges of SRAM rows**, not on registers. An instruction waits
if any of these holds:

* it reads Vector SRAM rows that a running unit has yet to write: an H_LOAD_V, an M_SUM
  flush, or the vector unit's destination row;
* it writes rows that a running unit still reads: an X fill or an H_STORE_V;
* a matrix command reads the Matrix SRAM tile that `H_LOAD_M` is filling;
* `H_LOAD_M` targets the tile the matrix unit is reading;
* it touches an FP register that a reduction is still to write.

Otherwise it waits only for its unit to be free. `C_FENCE` waits for every unit to be
idle. `C_HALT` does the same and then stops issuing.

The counters split stall cycles into hazard, busy and fence stalls. They also count
matrix mode switches (M_MM ↔ M_TMM ↔ M_HTMM) and the work done by each unit.

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each compares against
references computed independently in `real` arithmetic (`tb/fp_ref_pkg.sv`), has a
watchdog, and ends with `TB_RESULT checks=N failures=M`. Where a latency is defined, it
is checked:

* the sub-array skew;
* the vector unit's 5/4 cycles;
* back-to-back tile streaming;
* HBM load throughput.

`tb_plena_top` runs a 47-instruction program on a BLEN = 4, MLEN = 32, HLEN = 16 core,
against an HBM model with random back-pressure and latency. The program performs:

* MX loads;
* an `M_MM` over two column blocks, with a prefetch of the second tile in parallel;
* `M_TMM` and `M_HTMM` on that tile;
* an `M_TMM` through the inverse Hadamard transform, on rows stored rotated;
* a softmax on the vector/scalar units;
* an `H_STORE_V`.

The testbench checks:

* products bit-exactly after FP16 rounding;
* the softmax to 2%;
* the stored MX row to half a quantization step.

It also requires each mechanism to occur: hazard stalls, busy stalls, fences,
instruction-buffer back-pressure, three mode switches, five streams in 20 cycles, five
M_SUMs, and exact HBM beat counts.

`tb_flash_attention` runs one attention tile of a decode step on the same small core.
Four queries attend to 32 cached tokens, following the FlashAttention tile loop:

1. `M_TMM` + `M_SUM` build S = Q·Kᵀ block by block.
2. Per row, `V_RED_MAX`, `V_SUB_VF`, `V_EXP_V`, `V_RED_SUM`, `S_FRECI` and `V_MUL_VF`
   form P = softmax(S).
3. `M_MM` + `M_SUM` form O = P·V, reading V columns transposed from the Matrix SRAM.
4. O is stored back to HBM in MX format.

The checks are:

* S bit-exactly;
* P within 2%;
* O against P quantized to MXINT4 times V, within one FP16 rounding step;
* the stored rows to half a quantization step.

To simulate, compile the package first, then the other modules, the testbench package and
one testbench, for example:

```
verilator --binary --assert --timing --top-module tb_plena_top \
  rtl/plena_pkg.sv $(ls rtl/*.sv | grep -v plena_pkg) tb/fp_ref_pkg.sv tb/tb_plena_top.sv
./obj_dir/Vtb_plena_top
```

**Simulated sizes.** The largest whole-core size simulated is BLEN = 4, MLEN = 32,
HLEN = 16. At the defaults the array has 32 × 2048 = 65,536 PEs, and a cycle-based
simulation of the full core is not practical. The block testbenches use similar
reduced sizes: sub-array BLEN = 4; array MLEN = 16; Matrix SRAM MLEN = 16;
HBM engine MLEN = 32. The full-size RTL compiles and lints at the defaults.

## Where this design departs from, or goes beyond, the source architecture

* **Inverse Hadamard transform: details are this design's.** The transform size (16,
  equal to the MX block), the re-quantization after the transform, and the restriction
  to row reads are choices made here. V used through `M_MM` column reads is therefore
  not de-rotated.
* **The instruction set is smaller than the source's.** The source counts 6 matrix,
  13 vector, 17 scalar, 3 HBM and 8 control instructions, but names few of them. This
  design has 4, 12, 15, 3 and 8. Separate GEMV forms are missing: a GEMV is run as a GEMM
  with one useful X row. So are whichever vector and scalar operations the source has
  beyond those listed above.
* **The host link and HBM are outside the core.** They appear as the instruction push
  port and the HBM port.
* **Design choices where the architecture gives no detail:**
  * the instruction encoding and operand roles;
  * the accumulator format, the integer-to-FP16 conversion and the drain wait;
  * quantizing X when it fills the X buffer;
  * the number of Matrix SRAM tiles, and the port arbitration;
  * the HBM beat layout and protocol;
  * the FP16 rounding rules and the eˣ method;
  * the 16-point Hadamard size.
* **Head mode** is read as grouping the result adder tree by HLEN/BLEN sub-arrays.

## Memory capacity of the evaluated models

The HBM port addresses 2³² beats of 1 KiB (4 TiB), so addressing never limits a model.
At 4.5 bits per value the sizes are:

| model | weights | KV cache per token |
|---|---|---|
| Llama-3.1-8B | 4.5 GB | 36 KiB |
| Llama-3.3-70B | 39.7 GB | 90 KiB |

On chip, a 32-token batch of Llama-3.3-70B needs 4 + 14 Vector SRAM rows per token for
the hidden and FFN activations. That is 576 of the 1024 rows. Head dimension 128 equals
HLEN. Models whose sizes are not multiples of 2048 (hidden 2880, 5120) or 128 (head
dimension 64) must be zero-padded.
