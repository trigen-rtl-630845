# TriGen NPU in SystemVerilog

TriGen is an NPU for running large language models on a device, end to end and
with no floating-point unit. It keeps activations and weights in narrow integer
formats: MXINT8 activations (8-bit integers sharing one exponent per 32-element
block) and 4-bit unsigned weights. A 32x32 integer MAC array does the matrix
products. Everything after the products, including bias, rescaling,
normalisation, softmax and SiLU, runs in one post-processing pipeline on a
32-bit intermediate format, FI32 (an 8-bit exponent plus a 24-bit integer
fraction). Every nonlinear function is evaluated by one small lookup-table unit.
That unit can be fused into the matrix product, so `exp(QK^T + mask)` or
`SiLU(XW^T)` leaves the array finished in one instruction.

This repository holds synthesizable RTL for one NPU: its instruction
dispatcher, four DLA cores (the matrix engines), the tensor manipulation unit,
the DMA controller, the 1 MiB banked on-chip buffer and the multi-NPU
synchronisation unit. It also has a self-checking testbench for each block and
an end-to-end testbench. The end-to-end testbench runs the full-size NPU through
a softmax, an RMS normalisation, a fused SiLU projection and a transpose.

## Block structure

```
 instructions ──► trigen_npu_ctrl ──┬──► trigen_dla_core x4 ──┐
 (from a RISC-V     splits, dispatches├──► trigen_tmu          ├──► trigen_global_buffer
  command processor)                 ├──► trigen_dmac ◄──────┬─┘     (8 banks, 6 ports, 1 MiB)
                                     └──► trigen_sync_unit   └──► system bus / DRAM
 DLA core:  WBUF (32x32 IN1 tile) ─► trigen_mpa (32 x trigen_mac_1d + trigen_acc)
            IN0 stream ─────────────┘       │ FI32 rows
                                            ▼
            trigen_ppa: ADD(bias/PSUM) ─► RESCALE(CWQ) ─► trigen_lut ─► format(FI32 / MX8 / INT8 / UINT8)
```

| file | block |
|---|---|
| `rtl/trigen_pkg.sv` | types, instruction format, FI32 arithmetic helpers |
| `rtl/trigen_mac_1d.sv` | one array: 32 multipliers, adder tree, exponent adder |
| `rtl/trigen_acc.sv` | 64 FI32 partial-sum registers of one array |
| `rtl/trigen_mpa.sv` | 32 arrays + ACCs: one IN0 row against a stationary 32x32 IN1 tile per cycle |
| `rtl/trigen_lut.sv` | nonlinear functions with a 16-entry and a 256-entry table |
| `rtl/trigen_ppa.sv` | post-processing pipeline, 32 lanes |
| `rtl/trigen_dla_core.sv` | sequencer of one DLA core |
| `rtl/trigen_global_buffer.sv` | banked on-chip memory with round-robin arbitration |
| `rtl/trigen_tmu.sv` | transpose and strided copy (split / concatenate) |
| `rtl/trigen_dmac.sv` | DRAM to on-chip memory and back |
| `rtl/trigen_sync_unit.sv` | Sync-ID register, broadcast and compare |
| `rtl/trigen_npu_ctrl.sv` | instruction dispatch, 64-row command split, FENCE / SYNC |
| `rtl/trigen_npu.sv` | top: one NPU |

## Number formats and the memory word

**Memory word.** The on-chip buffer has 32768 words of 264 bits: 256 data bits
plus an 8-bit exponent in bits 263:256. The 256 data bits make the 1 MiB. One
word holds one 32-element vector of bytes with its shared exponent:
- MXINT8: signed bytes q, element value q·2^(E-127).
- INT8 or UINT8: the same, with E = 127.
- UINT4 weights: one value 0..15 per byte.

A word can also hold eight FI32 values, each in a 32-bit lane with the value in
bits 32l+31 : 32l; the word's exponent field is then unused.

**FI32.** Bits 31:24 hold EXP and bits 23:0 hold the signed FRAC. The value is
FRAC·2^-22·2^(EXP-127). Results are kept normalised, with |FRAC| in
[2^22, 2^23), so every value has 23 significant bits and a sign. Zero is all
zeros. Adding two FI32 values aligns both to the larger exponent, keeping 16
guard bits, then renormalises and truncates (`fi32_add`). Multiplying is a
product of the fractions plus a sum of the exponents (`fi32_mul`).

**Tensor layout.** A matrix is stored row-major, one 32-element block per word:
- a rows×K byte matrix takes rows·(K/32) words;
- an FI32 matrix takes 4 words per 32-element block.

MEAN and MEAN_SQUARE produce one FI32 value per row, packed 8 rows per word. A
per-row result of that shape can be read straight back as a 32-wide FI32
tensor: N rows become N/32 rows of one block. It is also the layout in which
RESCALE reads its per-row scale.

## The matrix engine: TMATMUL

`TMATMUL` computes OUT = IN0 · IN1^T. Here IN0 is rows×K (activations) and IN1
is N×K (weights stored by output channel), so both operands are read along
rows. One command covers at most 64 IN0 rows, because each array has 64 ACC
registers. The dispatcher cuts a longer instruction into 64-row commands and
hands them to idle cores, offsetting each command's addresses to its rows.
Within a command the core works through these steps:

```
for each 32-column output block n:
    read bias[n], CWQ[n]                            (if enabled, 4 words each)
    for each K block k:
        load the 32 IN1 words of rows 32n..32n+31, block k, into WBUF   (32 reads)
        stream the command's IN0 rows, block k, one per cycle into the MPA
        (k = 0 overwrites the ACC, later k accumulate)
    for each row r:
        read PSUM[r][n] (if enabled), push the 32 FI32 sums of row r through the PPA,
        write the formatted result
```

Inside the MPA each array j multiplies the broadcast IN0 block by its own WBUF
row, element by element. It adds the 32 products in a tree and adds the two
shared exponents (E_in0 + E_w - 127). The ACC turns the integer dot product
into FI32 and adds it to register r. The IN0 stream runs at one row per cycle
while the memory grants it, which the core and MPA testbenches check. The WBUF
is loaded before the IN0 stream, not alongside it, so a K block costs about
32 + rows cycles.

## The post-processing pipeline (PPA)

The PPA handles one row of 32 FI32 values per cycle, with a one-cycle register
stage. It has four stages:

1. **ADD.** Adds the bias (per column) and/or the PSUM (per element). The same
   adder serves the elementwise `ADD`.
2. **RESCALE.** Multiplies by the channel-wise scale CWQ (per column, which
   dequantizes 4-bit weights), by a per-row scale (`RESCALE`), or by a second
   tensor (`MUL`; MEAN_SQUARE uses it to square).
3. **LUT.** Applies the function selected by the flags (below).
4. **Format.** Produces one of:
   - FI32: four words per row block.
   - MX8: the shared exponent is the row block's largest element exponent
     minus 6, so the largest magnitude fits in 7 bits. Elements are rounded
     half up and saturated.
   - INT8 / UINT8: rounded to nearest, zero point added, saturated.

The pipeline also forms the FI32 sum of the 32 processed values. MEAN and
MEAN_SQUARE add these sums over the K blocks of a row. They return the row sum
of x or x²: the division by the row length is left to the program, which can
fold it into the next instruction's constants.

**Masking with PSUM.** In attention, masked scores are given a PSUM equal to the
most negative FI32 value (EXP = 255, FRAC = -2^23), and unmasked ones a PSUM of
0. The fused exponential then returns exactly 0 at masked positions. No
separate multiply pass is needed.

## The lookup-table unit

This is the least obvious part of the design. One unit evaluates 1/x, sqrt(x),
1/sqrt(x), e^x and SiLU(x) on FI32 inputs. The function is picked by four flags
(`inv`, `sqr`, `ex`, `rlu`; `inv`+`sqr` is the inverse square root). Every
function uses the same two tables and the same datapath. Only the
preprocessing, which maps x to a table position and an output exponent,
depends on the function.

**Preprocessing.** Write x = 2^e·m with 1 ≤ m < 2. The table position `pos` is
a 20-bit fraction in [0, 1); `oe` is the output exponent.

| function | pos | oe |
|---|---|---|
| 1/x | m - 1 | -e |
| sqrt(x) | (e odd ? 1/2 : 0) + (m-1)/2 | floor(e/2) |
| 1/sqrt(x) | (e even ? 1/2 : 0) + (m-1)/2 | -ceil(e/2) |
| e^x | frac(t), with t = x·log2(e) | floor(t) (0 below 2^-160, saturated above 2^160) |
| SiLU, e ≤ K | (x + 8)/16 (x in [-8, 8)) | 0 |
| SiLU, e > K, x > 0 | (4m + 8)/16 | e - K |
| SiLU, e > K, x < 0 | result 0 | |

The SiLU rows use K = 2. Above 2^K, SiLU(x) is approximated as
2^(e-K)·SiLU(2^K·m), which uses the near-linearity of SiLU for large x. For the
square-root family, odd exponents fold into the half-table over m/2, so a single
table spans [1/sqrt 2, sqrt 2).

**Tables.** The value table LUT_v has 16 signed 24-bit entries and the error
table LUT_e has 256. The top 4 bits of pos index LUT_v and the top 8 bits index
LUT_e. The remaining bits interpolate linearly between an entry and the next;
past the last entry, the slope of the previous segment is continued. The result
is

    y = ( LUT_v_interp · 2^4 + LUT_e_interp ) · 2^(tbl_exp + oe - 26)

normalised into FI32. The tables are data, not logic. A `LUTLOAD` instruction
copies them from 34 memory words into every core. Each word holds eight
entries, entry 8w+l in bits 32l+23 : 32l; entries 0..15 are LUT_v and 16..271
are LUT_e. A `tbl_exp` scales the whole table. For a function g(pos) on [0,1)
(the function after preprocessing, for example 1/(1+pos) for the reciprocal),
the contents are:

    LUT_v[i] = round( g(i/16)  · 2^(22 - tbl_exp) )
    LUT_e[j] = round( g(j/256) · 2^(26 - tbl_exp) ) - 16 · LUT_v_interp(j/256)

So LUT_e holds what linear interpolation of LUT_v misses, at 16 times finer
resolution. Other functions can share a preprocessing path by loading other
contents. For example, ReLU tables loaded for the SiLU path give ReLU exactly,
because ReLU is linear on each side of 0 and 0 falls on a table entry.

`tb/tb_util_pkg.sv` (`make_tables`) computes exactly these words for all five
functions. It uses tbl_exp = 0 for 1/x, 1/sqrt(x) and e^x, 1 for
sqrt(x) and 3 for SiLU. The unit testbench checks every function over the
paper's input ranges: [1/1024, 4096] for 1/x and 1/sqrt(x), and [-8, 64] for
e^x and SiLU. Every result must be within a relative error of 2e-5. SiLU above 8 is compared
against the K = 2 decomposition, which is itself about 5e-4 from the true SiLU
there.

## Instructions

The top takes one `instr_t` (see `trigen_pkg.sv`) per valid/ready handshake. The
instructions are the following (addresses are word addresses):

| op | operands | effect |
|---|---|---|
| `TMATMUL` | in0, in1, out; rows, kblk, nblk; aux (bias), aux2 (CWQ), psum; `bias_en`, `cwq_en`, `psum_en`, `lut_en` + flags; in0_t, in1_t, out_t, zp | OUT = format(LUT((IN0·IN1^T + bias + PSUM)·CWQ)) |
| `MEAN_SQUARE`, `MEAN` | in0, out; rows, kblk | per-row sum of x² or x, packed FI32 |
| `LUT` | in0, out; rows, kblk; flags | elementwise function |
| `RESCALE` | in0, aux (per-row FI32 scales), out | row r multiplied by scale r |
| `MUL`, `ADD` | in0, in1, out | elementwise |
| `LUTLOAD` | in0, tbl_exp | load tables into every core |
| `DMA_RD`, `DMA_WR` | out (on-chip), dram_addr, len | copy len words |
| `TMU_TRANSPOSE` | in0, out, rows (multiple of 32), kblk | byte matrix transpose, 32x32 tiles |
| `TMU_COPY` | in0, out, rows, kblk, sstride, dstride | strided copy (split / concatenate) |
| `FENCE` | | wait until every unit is idle |
| `SYNC` | sync_id | wait for idle, then for the other NPUs |

A DLA instruction is accepted once the previous DLA instruction has finished.
DMA and TMU instructions run alongside DLA work. A program orders them with
`FENCE` where it needs to.

Example: RMS normalisation of X (rows×K, MXINT8). Here T_ISQR stands for the
memory address of the inverse-square-root table data.

    MEAN_SQUARE in0=X out=SQ rows=R kblk=K/32            ; sum of x^2 per row
    LUTLOAD     in0=T_ISQR tbl_exp=0                       ; 1/sqrt tables
    LUT         in0=SQ out=IS rows=R/32 kblk=1 flags=INV|SQR
    RESCALE     in0=X aux=IS out=XN out_t=MX8              ; x / sqrt(sum x^2)

Softmax of masked scores is `TMATMUL` with `psum_en` and the fused `EXP` flag,
then `MEAN` (row sums), `LUT INV` and `RESCALE`. `tb/tb_npu.sv` runs both of
these programs.

## Memory system, DMA, TMU and synchronisation

- **Global buffer.** Eight banks interleaved on the low address bits, with six
  ports: four DLA cores, the TMU and the DMAC. Each bank serves one request per
  cycle and picks a winner round-robin, so a port waits at most five cycles.
  Read data returns one cycle after the grant. Every master holds its request
  until it is granted and counts the data returning.
- **DMAC.** Copies len consecutive words between a 32-bit system bus and the
  buffer. It keeps up to 8 reads in flight, so bus latency is hidden. The bus
  interface is req/we/addr/wdata with gnt, and in-order rvalid/rdata.
- **TMU.**
  - A transpose reads a 32x32 byte tile (32 words) and writes its 32 columns
    as 32 words. Each written word takes the exponent of the tile's first
    source word, so the result is exact only for integer data. Transposing MX
    data is lossy by nature; for this reason the paper folds the transpose of V
    into the computation instead.
  - A copy moves rows×kblk words with independent source and destination row
    strides.
- **Synchronisation.** On `SYNC` the NPU writes its Sync-ID into its Sync
  register and broadcasts it. It then waits until the last ID broadcast by
  each other NPU is at least its own. With one NPU it passes straight through.

## Where this design departs from the paper, and what it leaves out

**Taken from the paper:**
- the block structure and the 32x32 array;
- the 64 ACC registers and 64-row commands;
- one IN0 row per cycle against a stationary IN1 tile;
- FI32 fields and exponent 127 for integer data;
- the PPA stage order and its output formats;
- the two-table LUT with 16 and 256 entries, and the ISQR and SiLU
  decompositions;
- PSUM masking with the minimum FI32 value;
- the listed instructions, and Sync-ID broadcast and compare.

**This design's own choices:**
- the instruction encoding and tensor layout;
- the FI32 scale and rounding, and the MX8 alignment rule;
- the LUT position widths, interpolation of both tables and the exponential's
  preprocessing;
- the bank structure and arbitration;
- everything in the DMAC and the TMU's tiling;
- FENCE, the dispatch policy and the Sync-ID compare rule.

The paper describes LUT_v once as having "16-bit entries" and tabulates it as
having 16 entries. This design follows the table (16 entries of 24 bits).

**Not implemented:**
- INT16 activations. The datapath is 8-bit: MXINT8, INT8, UINT8, and UINT4 held
  one per byte.
- Packed 4-bit weight storage.
- Skipping matrix products whose outputs would all be masked.
- Loading the next IN1 tile while the current one is used.
- The RISC-V command processor and DRAM. Instructions enter through the top's
  port, and the DRAM sits behind the DMAC's bus port.

Each instruction field bounds a size:
- `kblk` has 8 bits, so K is at most 8160 elements. Longer K splits over
  instructions that accumulate through PSUM.
- `nblk` has 8 bits, so an output is at most 8160 columns.
- `rows` has 16 bits.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Shared test code:
- `tb_util_pkg.sv`: FI32 conversion, reference functions and the table
  generator;
- `tb_sram_model.sv`: a single-port memory with random grant stalls;
- `tb_dram_model.sv`: a bus memory with random grants and a 6-cycle read
  latency.

To build and run one testbench, for example the whole NPU at full size:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/trigen_pkg.sv tb/tb_util_pkg.sv tb/tb_npu.sv --top-module tb_npu
    ./obj_dir/Vtb_npu

Any other testbench builds the same way with its name in place of `tb_npu`.
Building `tb_npu` takes about two minutes; it runs in a few seconds.

| testbench | what it checks |
|---|---|
| `tb_mac_1d`, `tb_acc`, `tb_mpa` | dot products, exponents, accumulation against real arithmetic; 64 rows in 64 cycles |
| `tb_lut` | all five functions over their ranges, table loading |
| `tb_ppa` | bias, PSUM, CWQ, LUT, FI32/MX8/INT8/UINT8 formatting, row sums |
| `tb_dla_core` | every DLA instruction on random data, with memory stalls; IN0 stream rate |
| `tb_global_buffer` | data integrity under random six-port traffic, fairness bound, conflict-free parallelism |
| `tb_dmac`, `tb_tmu` | copies, transposes and bounds under stalls; DMA throughput |
| `tb_sync_unit`, `tb_npu_ctrl` | synchronisation rules; command split, offsets, dispatch rate, FENCE/SYNC |
| `tb_npu` | a 256x64 program on the full-size NPU (about 19,600 cycles), results checked in DRAM; it also counts that multi-core dispatch, bank conflicts, TMU/DLA overlap, fused LUTs, masking, MX8 output, table reloads, transpose, copy, FENCE, SYNC and bus stalls all occurred |
| `tb_npu_rmsnorm_ffn` | workload at a 3072 hidden size: RMS normalisation of a 96 x 3072 tile, then gate (fused SiLU) and up projections with K = 3072 and their product, about 178,000 cycles |
| `tb_npu_attention` | one causally masked attention head, 128 tokens x head dimension 128: masked exp(QK^T/sqrt(d)) through PSUM, softmax, and P times V with V^T as the stored operand (MX8 on both sides) |

Verilator has two-state simulation with random initial values. Every register
that is read has a reset, and the testbenches initialise the memories they
read.
