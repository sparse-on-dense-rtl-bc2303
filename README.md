# Sparse-on-Dense: sparse neural networks on a dense systolic array

Accelerators built for sparse neural networks match the indices of non-zero
weights and inputs inside every processing element. That takes index
comparators, FIFOs and large per-PE buffers, and those can make a sparse PE
several times larger than a plain multiply-accumulate cell. Sparse-on-Dense
goes the other way. The compute fabric is an ordinary TPU-style
weight-stationary systolic array of small dense PEs, and it multiplies the
zeros too. Sparsity is used only where it saves memory and data movement:
weights and inputs stay in the on-chip global buffer in compressed sparse
column (CSC) form. A small decompression unit on each operand path rebuilds
dense vectors just before the array. Dense operands (unpruned or
structured-sparse layers) bypass the decompression units, so one machine runs
dense, sparse-weight/dense-input and sparse/sparse layers.

This repository is synthesizable SystemVerilog for that architecture in its
main configuration:

- a 64 x 64 PE array (4096 PEs);
- 16-bit weights and inputs, 8-bit non-zero indices and 8-bit CSC pointers;
- a 2 MB global buffer.

Every block has a self-checking testbench, and a full-size testbench runs one
complete operation at these defaults.

## Block structure

```
                    +--------------------+        w_in (one dense vector / cycle,
            rd0 --> | weight operand path|------- shifted down the columns)
  +--------+        |  decomp. unit | bypass         |
  | global |        +--------------------+           v
  | buffer |                                  +--------------+
  |  2 MB  |        +--------------------+    |  64 x 64     |   y (64 x 32 bit,
  |        | rd1 -->| input operand path |--->|  PE array    |-->  one vector / cycle)
  |        |        |  decomp. unit | bypass x_in (skewed) |       |
  |        |        +--------------------+    +--------------+       v
  |        | <------- write-back ----------------------------- accumulator
  +--------+                 controller (sequences one pass)
      ^ host write / host read ports
```

| Block | Module | What it does |
|---|---|---|
| PE | `sod_pe` | MAC cell: `psum_out = psum_in + x_in * w`. It passes the input right and the psum down. The weight is double-buffered. |
| PE array | `sod_pe_array` | 64 x 64 PEs, plus input skew, output de-skew and a valid pipeline. |
| Accumulator | `sod_accumulator` | Adds each array output vector to the stored result for that output row, then serves write-back. |
| Global buffer | `sod_global_buffer` | 16384 x 1024-bit words (2 MB). Two read ports and one write port. |
| Decompression unit | `sod_decomp_unit` | Expands a CSC block into dense vectors. Built from the six parts below. |
| - pointer buffer | `sod_pointer_buffer` | Holds the column pointers of one block. |
| - subtractor | `sod_ptr_subtractor` | Gives the non-zero count of a column from two neighbouring pointers. |
| - non-zero buffer | `sod_nz_buffer` | Queue of (index, value) entries, filled a whole word at a time. |
| - element selection | `sod_element_select` | Takes the entries of the current column from the front of the queue. |
| - dense mapping | `sod_dense_mapping` | Scatters each value to the position its index names. |
| - dense format buffer | `sod_dense_format_buffer` | Builds the dense vector and hands the finished vector to the array. |
| Operand path | `sod_operand_path` | One decompression unit plus the dense bypass and the two multiplexers that choose between them. |
| Controller | `sod_controller` | Runs one pass: load weights, commit, stream inputs, write back. |
| Top | `sod_top` | Everything above, with host ports and a command port. |
| Shared types | `sod_pkg` | Sizes, the non-zero entry struct, the command struct and the state enums. |

## Data in the global buffer

A global-buffer word is 1024 bits, exactly one dense vector of 64 x 16-bit
values. Element `p` sits in bits `[16p +: 16]`. A dense operand of `n`
vectors is `n` consecutive words.

A compressed operand is a **CSC block**. Its column `j` is one dense vector
of 64 elements, and the block has up to 127 columns:

- **Pointer word** (address `base`): 128 pointers of 8 bits, pointer `j` in
  bits `[8j +: 8]`. Column `j` holds `ptr[j+1] - ptr[j]` non-zeros.
- **Non-zero words** (addresses `base+1`, `base+2`, ...): entries of 24 bits,
  `{value[15:0], index[7:0]}`. Each word holds L = floor(1024 / 24) = 42
  entries, in bits `[24e +: 24]`. The 16 top bits are unused. The index is
  the position of the value inside its 64-element vector. Entries follow
  column order with no padding between columns. So one word may carry the
  ends and starts of several columns, and one column may stretch over
  several words. Only the last word is padded.

Pointers are 8 bits wide and wrap around at 256. This is safe because the
hardware only ever uses differences of neighbouring pointers, taken modulo
256, and a column holds at most 64 non-zeros. The whole block can therefore
hold up to 127 x 64 non-zeros, and the first pointer need not be zero.

Storage cost: a 64 x 64 tile at density d takes `1 + ceil(4096 d / 42)`
words in CSC form and 64 words dense. CSC is smaller for d below about
0.64.

## How the decompression unit works

The unit runs five steps, pipelined so that a new column can finish every
cycle:

1. **Pointer fetch.** `start` reads the pointer word into the pointer buffer.
2. **Count and fetch.** The subtractor forms the current column's non-zero
   count from `ptr[col]` and `ptr[col+1]`. Meanwhile non-zero words stream
   into the non-zero buffer, a queue of 3 x 42 = 126 entries. A word is
   requested whenever the queue is sure to have room for it: current count,
   plus one word in flight, plus the new word, must be at most 126. Reads
   may run past the end of the block; the extra entries are thrown away at
   the next `start`.
3. **Element selection.** `rem` is the number of the column's non-zeros
   still missing. The selector takes `k = min(rem, entries held, 42)`
   entries from the front of the queue.
4. **Dense mapping.** Each taken entry writes its value at position `index`
   of the vector being built. That is 64 x 42 index comparators; positions
   not hit keep their value. The vector starts as all zeros.
5. **Output.** When `k == rem` the column is complete. The vector goes to
   the PE array with `vec_valid` high for one cycle, the builder clears, and
   the next column starts. An empty column completes in one cycle as an
   all-zero vector.

Timing. The first vector leaves 5 cycles after `start`. After that the unit
delivers one vector per cycle as long as the fetch keeps up. The fetch moves
42 entries per cycle, so the unit runs at full rate while columns average up
to 42 non-zeros (density up to about 0.65 for 64-element vectors). Above
that it is bandwidth-bound at about 42 / (64 d) vectors per cycle. Dense
operands should then use the bypass, which delivers one vector per cycle
from the second cycle after `start`. A column with more than 42 non-zeros
takes more than one cycle, because at most 42 entries are taken per cycle.
The PE array never applies back-pressure: a cycle without a vector becomes a
bubble.

## Systolic array and the matrix convention

The array is weight-stationary:

- **Weights.** Weight vectors enter at the top, one per `w_shift`, and shift
  down through a shadow register in each PE. After 64 shifts the vector sent
  first sits in the bottom row. `w_commit` copies all shadow weights into the
  active weights in one cycle.
- **Inputs.** `x_in[r]` enters row r delayed by r cycles (skew) and moves
  right one PE per cycle.
- **Psums.** Psums start at zero at the top and move down one PE per cycle.
  Column c's result is delayed 63 - c cycles (de-skew), so all 64 results of
  one input vector leave together.

The latency from an input vector to its output vector is
N_ROWS + N_COLS - 1 = 127 cycles. The array takes a new input vector every
cycle.

The top wires the operand paths so that the arithmetic reads naturally.
Let the weight matrix M be stored column by column: the m-th weight vector
is column m of M. Let an input vector x be one input column. Weight vector m
ends up in PE row 63 - m, and the top connects input element m to that same
row. Every input vector therefore produces

    y[c] = sum over m of M[c][m] * x[m]         (y = M x)

with y[c] coming out of PE column c. Arithmetic is signed two's complement:
16 x 16-bit products, and 32-bit psums that wrap on overflow.

## Passes, tiling and the accumulator

One **pass** multiplies one 64 x 64 weight tile by `n_vec` input vectors
(1..128 dense, 1..127 compressed). The controller steps through these
states:

1. `LOAD_W`: the weight path delivers 64 vectors, which are shifted in.
2. `COMMIT`: the weights become active; the input path and the accumulator
   start.
3. `STREAM`: input vectors flow through the array, with bubbles wherever
   the decompression unit is behind. The state ends once the accumulator has
   received `n_vec` outputs.
4. `WB_RD` / `WB_WR`: write-back (optional).
5. `DONE`.

The accumulator row for the t-th input vector is either overwritten
(`acc_first = 1`) or added to (`acc_first = 0`). A product with a longer
reduction dimension, K = 64k, is therefore k passes over the same input
columns: the first pass overwrites, the others accumulate, and the last sets
`wb_en`. Write-back stores row t as two words at `out_base + 2t` and
`out_base + 2t + 1`. Word h holds `y[32h .. 32h+31]` as 32-bit lanes, lane i
in bits `[32i +: 32]`. Wider outputs (more than 64 output rows) are separate
weight tiles with separate accumulations. Splitting a layer into tiles and
lowering convolutions to matrix products (im2col) are left to the host.

Passes run one after another. The next weight tile is loaded only after the
previous pass has drained, so each pass costs roughly 64 (or the sparse
weight time) + 5 + `n_vec` + 127 cycles, plus 3 cycles per row of
write-back. The full-size testbench measures 260 cycles for a pass with
40 %-dense CSC weights, 70 %-dense CSC inputs and 32 vectors, and 327 cycles
for a pass with dense inputs and write-back.

## Programming interface (`sod_top`)

| Port | Meaning |
|---|---|
| `host_wr_en/addr/data` | Write one global-buffer word. Only while `busy` is low. |
| `host_rd_en/addr`, `host_rd_data` | Read one word; the data comes one cycle later. Only while `busy` is low. |
| `cmd_valid`, `cmd` (`sod_cmd_t`) | Start a pass while `busy` is low. |
| `busy`, `done` | A pass is running; `done` is high for one cycle at its end. |

The fields of `sod_cmd_t`:

- `w_base`, `w_sparse`: where the weight tile is, and whether it is CSC.
- `i_base`, `i_sparse`: the same for the input vectors.
- `n_vec`: the number of input vectors.
- `acc_first`, `wb_en`, `out_base`: accumulation and write-back, as above.

All four format combinations are allowed.

Parameters of `sod_top`:

- `N_EL`: array side and vector length, default 64. The word width follows
  as 16 x `N_EL`.
- `GB_D`: global-buffer words, default 16384.
- `ACC_D`: accumulator rows, default 128.

The testbenches use `N_EL = 8` (128-bit words, 5 entries per word, blocks of
up to 15 columns) to keep runs short.

## What comes from the architecture description and what is this design's own

These parts follow the published architecture:

- the TPU-style weight-stationary array of simple MAC PEs;
- a decompression unit per operand, placed between the global buffer and the
  array, made of pointer buffer, subtractor, non-zero buffer, element
  selection, dense mapping and dense format buffer, and working in the five
  steps above;
- the bypass of the decompression unit for dense data;
- the accumulator that adds array outputs to the previous outputs;
- the 4096-PE array, the 2 MB buffer, and the 16-bit data, 8-bit index and
  8-bit pointer widths.

These are this design's own choices, because the description leaves them
open:

- the square 64 x 64 shape of the array;
- the 1024-bit buffer word and hence 42 entries per non-zero word;
- the block layout in the buffer and the 24-bit entry layout;
- modulo-256 pointers;
- the queue depth and fetch rule of the non-zero buffer;
- at most 42 entries selected per cycle;
- double-buffered weights;
- skew/de-skew registers and bubbles in place of stalls;
- 32-bit psums;
- the accumulator depth and organisation;
- the controller, its command format and strictly serial passes;
- a plain register array for the global buffer, with two read ports and one
  write port (a chip would build it from SRAM macros);
- the host ports, which stand in for the DRAM side;
- the matrix convention of the top;
- asynchronous active-low reset everywhere except the memory arrays, which
  are not reset.

Known departures and limits:

- Entries with an index of 64 or more are ignored. Duplicate indices in one
  column keep the last value.
- A compressed block holds at most 127 columns, because its pointers fill
  one word.
- The optional power gating of idle sub-arrays mentioned for the
  architecture is not modelled.
- There is no DRAM interface.
- Area and power figures are not reproduced. Nothing here has been
  synthesised to a standard-cell library.

## Verification

Each module has a testbench `tb/tb_<module>.sv`. Each one compares against
values computed in the testbench itself and prints one
`TB_RESULT checks=N failures=M` line. The main ones:

- `tb_sod_decomp_unit`: 121 random CSC blocks with densities from 0 to
  100 %. Empty columns, columns longer than a word, shared words and wrapped
  pointers all occur. It also checks the 5-cycle first-vector latency and
  the one-vector-per-cycle rate.
- `tb_sod_pe_array`: a 6 x 5 array with random bubbles. Checks the values
  and the exact 10-cycle latency.
- `tb_sod_top`: 26 jobs at `N_EL = 8` over all four format combinations,
  with K up to 3 tiles accumulated. It counts that each mechanism happened:
  both paths in both modes, bubbles, multi-word columns, shared words, empty
  columns, pointer wrap, accumulation and write-back.
- `tb_sod_workloads`: a 16 x 16 instance (10 entries per word, so the
  full-rate limit of 62.5 % is close to the default's 65.6 %) runs the
  density cases: dense x dense, sweeps from 10 % to 100 % with CSC weights
  and dense or CSC inputs, and the densities of pruned AlexNet, VGG-16 and
  BERT layers. Each case checks every result and bounds the cycles of every
  pass from both sides. Below about 30 % a pass runs at full rate. In the
  sparse/sparse sweep, a pass without write-back takes 81 cycles at full
  rate and 122 at 100 % density. In that case the dense bypass is the
  better choice.
- `tb_sod_top_full`: one complete two-tile operation at the default size.
  Building it takes about 3 minutes.

Running a testbench with Verilator 5, for example:

```
verilator --binary --timing --assert --top-module tb_sod_top \
    rtl/sod_pkg.sv tb/tb_sod_util.sv \
    $(ls rtl/*.sv | grep -v sod_pkg) tb/tb_sod_top.sv
./obj_dir/Vtb_sod_top
```

The package `sod_pkg.sv` must come first and be given only once. With
`-Wall` Verilator lists some unused package constants and command fields,
and reports the reset as both synchronous and asynchronous. The second
comes from the assertions' `disable iff (!rst_n)`, which is not logic.
Building the full-size testbench takes about three minutes. `tb_sod_util.sv`
holds the CSC packing functions used by the testbenches:

- `pack_csc` builds the pointer word and the non-zero words exactly as
  described above.
- `pack_dense` builds one dense word.
