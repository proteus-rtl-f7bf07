# Proteus: dynamic bit-precision control for Processing-using-DRAM

Processing-using-DRAM (PuD) computes inside DRAM subarrays. It copies rows (AAP, RowClone) and takes the majority of three rows (AP, triple-row activation). Data is laid out vertically, so a row holds one bit of many elements. The cost of an operation grows with the number of bits per element. Most programs declare 32- or 64-bit types, yet store values that fit in far fewer bits.

Proteus adds control logic next to the memory controller to exploit this:

- It watches the data the host writes to DRAM and keeps the largest value of every PuD object.
- From those maxima it predicts how many bits each operation really needs.
- It picks the cheapest in-DRAM program (a *uProgram*) for that precision and runs it.

With the one-bit-per-subarray (OBPS) layout, bit *i* of every element lives in subarray *i*. Operations on the bits can then run in many subarrays at once (SALP-MASA). Carries move between neighbouring subarrays with LISA row-buffer moves (RBM).

This RTL covers the digital control path. The DRAM arrays, memory controller and host are outside it. A behavioural DRAM bank model in `tb/pud_bank_model.sv` stands in for them in simulation.

## Data path into DRAM: the Data Transposition Unit

`data_transposition_unit` sits between the last-level cache and the memory controller. It holds each evicted line for one lookup in the `object_tracker`:

- **Not part of a registered object:** the line leaves on the write-back port unchanged.
- **Part of a registered object:** the line goes to the `transposition_engine`. If dynamic precision is on, it also goes to the `dbp_engine`.

Objects are registered with their base address, size, declared bit-precision and first DRAM row.

- **Object tracker.** An associative table with 512 entries, derived from an 8 kB table of 128-bit lines. Each entry holds an object's address range and the largest value seen in it. Base and end addresses are flops, so every lookup can compare all entries. The other fields sit in memory arrays read by entry index. A new registration takes, in order:
  1. the entry with the same base address;
  2. else the first free entry;
  3. else a round-robin victim.

  A host read-back clears an object's maximum.
- **Dynamic Bit-Precision Engine.** A four-state FSM (IDLE, LOAD, SCAN, UPDATE) around one n-bit comparator. It steps through the line one element per cycle, unsigned. It writes a new maximum to the tracker only if the line held a larger value.
- **Transposition engine.** Elements are stored in W-bit containers, where W is the declared precision rounded up to a power of two. The W lines that hold 512 consecutive elements are collected in one of two 4 kB buffers. The full buffer is then drained as W vertical writes; write *b* carries bit *b* of those 512 elements to subarray *b*. Each vertical row is built in W cycles, one buffered line per cycle, while the other buffer fills.
  - **Limitation:** the W lines of one chunk must arrive back to back. A line of another PuD object in between corrupts the chunk.

## Control path: from a bbop instruction to DRAM commands

`proteus_control_unit` takes a bbop: operation, destination, two sources, element count, declared bit-precision and a dynamic-precision enable. It contains these parts:

- **`uprog_select_unit`** sequences each bbop:
  1. reads the maxima of src1, src2 and dst from the tracker, one per cycle;
  2. runs the `bit_precision_calculator`;
  3. writes the predicted output maximum into dst's entry, so a chain of vector operations keeps narrow precisions;
  4. looks up the best uProgram and dispatches it.
- **`bit_precision_calculator`** applies per-operation rules, using *bits(v)* = the number of bits of *v*, at least 1. The precision is clamped to the declared precision. With dynamic precision off, the declared precision is used and nothing is written back.

  | Operation | Predicted output maximum | Precision |
  |---|---|---|
  | ADD | a + b | bits(a + b) |
  | MUL | a · b | bits(a · b) |
  | SUB | max(a, b) | bits(max(a, b)) + 1, a sign bit |
  | Others | see the module header | see the module header |

  Example: maxima 3 and 6 give an addition at 4 bits with maximum 9; multiplying 9 by 2 gives 5 bits and maximum 18.
- **`cost_model_logic`** holds 16 lookup tables (one per operation) of 64 rows (one per precision). Each entry is the 8-bit index of the cheapest uProgram, loaded by the host. The query `{bp-1, op}` returns the 12-bit global index `{op, index}` three cycles later.
- **`uprog_scratchpad`** holds 16 uPrograms of 128 B (2 kB). It is direct-mapped on the operation field. A hit answers in one cycle. A miss reads the uProgram from uProgram Memory (a reserved DRAM region at `MEM_BASE + 128*gidx`) as two line reads.
- **`uprog_buffer`** holds the running uProgram: 32 words of 32 bits.
- **`aap_dispatcher`** executes the words. A word is AAP, AP, RBM, LOOP, ENDLOOP or DONE, with symbolic row operands: a fixed B/C-group row, or src1/src2/dst plus an offset. Its target names the subarrays:

  | Target | Subarrays |
  |---|---|
  | ALL | 0..bp-1 at once |
  | LOOP | *i*, the loop index |
  | FIRST | 0 |
  | LAST | bp-1 |

  The same uProgram therefore runs at any precision: only the mask and the loop bound change.
- **Reductions (REDSUM)** are dispatched once per tree level, ceil(log2(size)) levels. After each level the `fetch_unit` reads the carry-out row: the dst row in subarray bp. If any bit is 1, the precision grows by one bit.

The uProgram word format and the two uPrograms used in the tests are this design's own; the paper's library of 50 uPrograms is not given at command level:

- `proteus_tb_pkg::add_prog()`, a bit-serial ripple-carry add costing 2·bp+11 AAP/AP and bp−1 RBM;
- `copy_prog()`.

## Top level

`proteus_top` connects the two units. The ports for everything outside the design are plain signals or structs:

| Port group | Connects to |
|---|---|
| `cmd_*` | PuD commands to the memory controller |
| `vw_*` | vertical writes |
| `fc_*` | carry reads |
| `upm_*` | uProgram Memory reads |
| `wb_*` | ordinary write-backs |
| `lut_ld_*` | cost-table loading |

It also has counters for commands, bbops, overflows and scratchpad hits and misses. The package `proteus_pkg` holds the shared types and constants:

- 512-bit lines;
- 64 subarrays;
- 1024 rows;
- 128 chunks of 512 columns per row, i.e. a 65,536-column row.

## How far to trust it

- Every module has a self-checking testbench in `tb/tb_<module>.sv` that compares against an independent model and prints `TB_RESULT checks=… failures=…`. The exceptions are `uprog_select_unit` and `proteus_control_unit`, which only the end-to-end test exercises.
- `tb_proteus_top` runs at the default parameters, against the bank model. It checks:
  - transposition;
  - the maxima found by the engine;
  - an addition at the predicted precision, every sum bit included;
  - the command counts;
  - that bp subarrays run at once;
  - a chained addition whose precision comes from a predicted maximum;
  - an addition with dynamic precision off;
  - a reduction with one overflow;
  - clearing a maximum.

  It fails if any of these mechanisms did not occur.
- Known departures from the paper and open points:
  - Values are treated as unsigned, so narrow negative values are not detected. The red-black redundant representation (RBR) and floating-point exponent/mantissa tracking are not built.
  - The worked example for precision is unsigned, while the paper elsewhere counts a sign bit. The calculator follows the worked example and adds a sign bit only for SUB.
  - The test reduction uses a copy uProgram, not a real reduction tree, so it exercises the carry check and the precision increase, not the arithmetic.
  - Interleaved evictions of different objects within one chunk are not handled (see above).

## Simulating

With plain verilator, for example the end-to-end test:

```
verilator --binary --timing -Irtl -Itb rtl/proteus_pkg.sv tb/proteus_tb_pkg.sv rtl/*.sv \
  tb/pud_bank_model.sv tb/tb_proteus_top.sv --top-module tb_proteus_top
./obj_dir/Vtb_proteus_top
```

The block tests build the same way with their own module and the RTL files they use.
