# PRINS — a resistive CAM that computes where the data is stored

PRINS turns a large storage array into a massively parallel SIMD processor. Every row of a
resistive content-addressable memory (RCAM) holds one data element, and every row is also a
processing unit. Nothing is moved to a CPU to be processed. A controller broadcasts a *key*
and a *mask* to all rows at once and issues a small set of associative primitives:

| primitive     | effect on every row at once                                                      |
|---------------|----------------------------------------------------------------------------------|
| `compare`     | tag = 1 in every row whose masked columns equal the key                          |
| `write`       | in every tagged row, the masked columns take the value of the key                |
| `read`        | the masked columns of the top-most tagged row are loaded into the key            |
| `first_match` | keep only the top-most tag in the whole device                                   |
| `if_match`    | 1 if any row is tagged (a branch condition for the controller)                   |
| tag shift     | every tag moves to the next row; this daisy chain crosses modules and devices    |
| tag count     | a reduction (adder) tree counts the tagged rows                                  |

Arithmetic runs one bit at a time across the columns, but on all rows in parallel. Its cost
depends on the word width, not on how many elements are stored. This RTL builds one device of
the architecture:
- nine RCAM modules of 256 rows × 256 bit columns, chained one after another;
- a microcoded controller with a data buffer;
- a storage-management block for ordinary row reads and writes;
- a memory-mapped host interface.

## 1. How arithmetic is done with compare and write

A function of a few bits is computed by walking its truth table. For each table entry the
controller issues two instructions:
1. compare the input columns against the entry's input values;
2. write the entry's output values into the output columns of the matching rows.

Every row sees every entry, so after the last entry each row has its own result. For a
one-bit full adder with inputs (carry, b_i, a_i) and outputs (carry, s_i), that is eight
compare/write pairs per bit. An m-bit vector addition S = A + B therefore costs 8·m pairs,
whatever the number of rows.

**Entry order matters.** A write can change a column that a later compare of the same bit
reads, because the carry is both an input and an output. A row changed by one entry must
not match a later entry. The kernels order the entries so this cannot happen:

* S = A + B, entries (c, b, a): `000, 001, 010, 100, 101, 110, 111, 011`. Entry 100 turns
  a row into 000 (carry cleared), so 000 is issued before 100. Entry 011 turns a row into 111,
  so 111 is issued before 011. Every other entry leaves the carry as it was.
* ACC += X in place (the accumulator is both input and output): only the four entries that
  change a row are issued, in the order `011, 010, 100, 101`. Above the width of X, the carry
  is pushed on with `10 → 01` first and then `11 → 10`.
* Multiplication P = A·B is shift-and-add. For each bit j of B, P[j..] += A is done only in
  rows where B_j = 1. B_j is an extra column in every compare of the accumulate step (m²
  full-adder bits, O(m²) cycles).
* Reduction: the tag counter counts the tagged rows. A multi-bit sum over rows is built one
  bit at a time: compare bit j = 1, count, and add `count << j` in the controller.

## 2. Block structure

```
 host bus ──► prins_host_if ──► prins_controller ──key, mask, cmd──► rcam_module 0 ─► 1 ─► … ─► 8
                 │  ▲               ▲      ▲                            │ any, read data,  │
                 │  └ status, buf   │      └──── if_match, read data ◄──┘ tag counts       │
                 ▼                  │            count (2nd reduction tree: prins_top)      │
          prins_storage_mgmt ──row read/write (refused while busy)──► every module's row port
 cascade_tag_in / cascade_fm_in ─► module 0 … module 8 ─► cascade_tag_out / cascade_fm_out
```

| file | role |
|------|------|
| `rtl/prins_pkg.sv` | row width, array commands, microcode format, key/mask update codes |
| `rtl/rcam_crossbar.sv` | the cell array of one module: masked match lines, masked write into the tagged rows, masked read of a selected row, addressed row port |
| `rtl/rcam_tag_logic.sv` | one tag latch per row, loaded from the match line or from the previous row; first_match ripple; if_match |
| `rtl/prins_reduction_tree.sv` | pipelined binary adder tree, a register after every adder |
| `rtl/rcam_module.sv` | crossbar + tag logic + tag counter |
| `rtl/prins_key_mask.sv` | key and mask registers shared by all modules |
| `rtl/prins_controller.sv` | microcode sequencer, register file, data buffer, status |
| `rtl/prins_storage_mgmt.sv` | logical row address → (module, row); busy interlock |
| `rtl/prins_host_if.sv` | memory-mapped registers |
| `rtl/prins_top.sv` | one device |

### Tags and the daisy chain

A tag shift moves each row's tag to the next row. Row 0 of module m takes the last tag of
module m−1, and module 0 takes `cascade_tag_in`. The same chain carries the *first_match
ripple*: `fm_out` of a module is 1 if that module or an earlier one holds a tag. `first_match`
then clears every tag below the top-most one in the whole device, and a second device chained
through `cascade_fm_in` also sees tags from the first device. The device's `read` takes the
masked row from the module that holds the top-most tag. `if_match` is the OR of all modules.
Both are combinational within the cycle that uses them.

### Tag counter

Each module sums its 256 tag bits in an 8-level pipelined adder tree. A 4-level tree in the
top adds the nine module counts. A `COUNT` therefore returns its result 12 clock cycles after
it is issued (log2 of rows per module, plus log2 of modules rounded up). The controller waits
for it and then adds it, shifted, to a register.

## 3. The controller and its microcode

The controller holds the program memory (4096 words), four 64-bit registers r0..r3 and a
256-word data buffer for results. The key/mask registers are set a field at a time. Each
instruction takes one clock, except `COUNT`, which waits for the tree. When a kernel starts,
r0 holds the host's data-start parameter.

| op | meaning |
|----|---------|
| `NOP`, `HALT` | nothing / end of kernel, status *done* |
| `MCLR` | mask ← 0 |
| `SETK lo,len,imm` / `SETKR lo,len,rs` | key[lo+:len] ← imm / r[rs]; those columns enabled in the mask |
| `COMP`, `WRITE`, `FIRST`, `SHIFT` | the array primitives |
| `READ` | key ← masked columns of the top-most tagged row |
| `GETK rd,lo,len` | r[rd] ← key[lo+:len] (moves read data into a register) |
| `COUNT rd,lo` | r[rd] += tag count << lo |
| `LDI`, `ADDI` | register load / add immediate |
| `BNE rd,imm,tgt` | branch if r[rd] ≠ imm (loops) |
| `BM tgt` / `BNM tgt` | branch on if_match / on no match |
| `STB rd,rs,imm` | buffer[r[rd]+imm] ← r[rs] |
| `JMP tgt` | jump |

An instruction word is 102 bits: op 5, rd 2, rs 2, lo 8, len 7, tgt 12, imm 64. An undefined
opcode stops the kernel and sets the *exception* status bit. One truth-table step (clear the
mask, set three or four one-bit fields, compare, clear, set, write) takes nine or ten instructions.
The testbenches build kernels with `tb/prins_asm_pkg.sv`, a small assembler written as a
package with helpers for vector add, accumulate, multiply, truth-table lookup and histogram.

## 4. Host interface

The bus is word-addressed and 64 bits wide. Read data comes back one cycle after `re`,
together with `rvalid`.

| address | register |
|---------|----------|
| 0x0000 | CTRL (write): bit 0 start the kernel, bit 1 write a row, bit 2 read a row |
| 0x0001 | STATUS: bit 0 busy, 1 done, 2 exception, 3 last row access accepted, 4 last row access refused |
| 0x0002 | KERNEL_ID (kept for the host's use) |
| 0x0003 | KERNEL_START: program address of the kernel |
| 0x0004 | DATA_START: handed to the kernel in r0 |
| 0x0005 | RUN_CYCLES: length of the last kernel in clocks |
| 0x0006 | ROW_ADDR: logical row (module·256 + row) |
| 0x0008–0x000B | ROW_DATA: the 256-bit row as four 64-bit words, low word first |
| 0x000C | PROG_LO: low 64 bits of the next instruction |
| 0x4000 + a | PROG: the write stores {data, PROG_LO} as instruction a |
| 0x8000 + a | BUF: data buffer word a (read) |

The row-access status bits are valid two clocks after the CTRL write. While a kernel runs,
row accesses are refused and the STATUS register shows it. Reading STATUS never disturbs a
running kernel.

## 5. Timing and reset

There is a single clock. Reset is synchronous and active low, and it clears all control
state. The crossbar contents are not reset: they are the stored data. Compare and write each
take one clock here. The resistive array itself would need a precharge phase for compare and
two voltage phases for write. The RTL sets no frequency; the architecture was evaluated at
500 MHz.

## 6. Where this RTL departs from, or adds to, the architecture description

* **Analog parts are logic here.** The memristor pair of each cell, the match-line precharge
  and the sense amplifier are reduced to "row matches if every unmasked column equals the
  key". The two-phase write is one clock edge.
* **Sizes.**
  * Row width 256 follows the column numbering of the worked example. The BFS row layout
    needs 154 of those columns.
  * Nine modules follow the system drawing.
  * 256 rows per module is this design's choice. The architecture is meant to scale to
    billions of rows across modules and chips, and the cascade ports are the hook for that.
* **Key and mask.** One key/mask pair in the controller is broadcast to all modules.
* **Controller.** The microcode format, the registers and the branch instructions are this
  design's own. So are the `SHIFT` and `COUNT` instructions and the way the host registers
  are encoded.
* **Storage management** only translates addresses and refuses access while a kernel runs.
  Logical block mapping and wear leveling are named for this block but not specified, and are
  not built.
* **Shift direction.** The daisy chain shifts only towards higher row numbers.
* **Reduction of multi-bit values.** This is done bit by bit through the tag counter, as in
  §1. The controller's "normalisation" of reduction results is this shift-and-add.
* **BFS.** The kernel keeps the row layout of the architecture's BFS example (vertex,
  successor, visited, visited_from, predecessor, distance). Unvisited rows start with
  distance 255 and are never compared as a level, because the level loop only looks for
  levels up to the last one found.

## 7. Verification

Every RTL module has a self-checking testbench in `tb/`. Each one:
- compares against a reference model written in the testbench;
- ends with a `TB_RESULT checks=… failures=…` line;
- has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_rcam_crossbar` | random masked compare / write / read / row port against an array model |
| `tb_rcam_tag_logic` | compare, first_match with and without earlier tags, shift, if_match |
| `tb_prins_reduction_tree` | sums of random inputs; latency log2(N) cycles |
| `tb_prins_key_mask` | field set, mask clear, read-load against a model |
| `tb_rcam_module` | module as a whole, count latency 4 at 16 rows, chain in/out |
| `tb_prins_controller` | controller + one 16-row module: vector add with its compare/write counts, histogram, branches, read, exception |
| `tb_prins_storage_mgmt` | translation, range check, busy refusal |
| `tb_prins_host_if` | register map, program download, status, row window |
| `tb_prins_top` | end to end at 3 modules × 16 rows |
| `tb_prins_top_full` | end to end at the default size (9 × 256 rows) |

The two end-to-end testbenches share `tb/prins_e2e_test.sv`, which drives only the host bus.
It runs these kernels, each checked against a reference:
1. 8-bit vector add in every row;
2. a 256-bin histogram of 32-bit samples;
3. a dot product of 2-element 4-bit vectors with a broadcast vector, and the squared
   Euclidean distance of the same vectors to a centroid;
4. SpMV with one nonzero per row: broadcast of B by column-index compare, associative
   multiply, per-row reduction with the tag counter;
5. level-by-level BFS using first_match, read and if_match branches;
6. a tag shifted across every module boundary and out of the cascade port;
7. a row write refused during a kernel, and an undefined-instruction exception.

It counts every mechanism and fails if any of them never happened. At the default size the
kernels take:

| kernel | size | clock cycles |
|--------|------|--------------|
| vector add | 8-bit, 2304 rows | 582 |
| histogram | 256 bins, 2304 samples | 5122 |
| dot product | 2 × 4-bit per row | 2143 |
| squared Euclidean distance | 2 × 4-bit per row | 817 |
| SpMV | 16 × 16, 96 nonzeros | 3076 |
| BFS | 64 vertices, 192 edges | 4915 |

Sizes of the evaluated workloads are far beyond one device: 1M to 100M vectors, matrices with
1.2M to 29M nonzeros, and graphs with 79M to 1.9G edges, with one element or edge per row.
They would need from hundreds to hundreds of thousands of chained devices. They are represented here by the small
instances above. The Euclidean-distance kernel uses the plain truth-table method for the
squared difference. For a 4-bit element x and a broadcast centroid value h, there are 16
entries: compare x = v, then write (v − h)² into a result field. The results are then summed
with the associative accumulate.

### Running a testbench with Verilator

The packages go first. Then the modules the testbench needs, the assembler package for the
controller and top tests, and the testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/prins_pkg.sv tb/prins_asm_pkg.sv \
    rtl/prins_key_mask.sv rtl/prins_reduction_tree.sv rtl/rcam_crossbar.sv \
    rtl/rcam_tag_logic.sv rtl/rcam_module.sv rtl/prins_controller.sv \
    rtl/prins_storage_mgmt.sv rtl/prins_host_if.sv rtl/prins_top.sv \
    tb/prins_e2e_test.sv tb/tb_prins_top_full.sv \
    --top-module tb_prins_top_full -Mdir obj -o sim
obj/sim
```

The full-size run builds in under a minute and simulates in about 35 seconds. For the
small end-to-end test, use `tb_prins_top`. For a single block, list only its module files
and its testbench.
