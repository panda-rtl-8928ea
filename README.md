# PANDA: a processing-in-MRAM chip for de Bruijn graph DNA assembly, in SystemVerilog

De novo genome assembly with a de Bruijn graph spends most of its time on three jobs:
- counting k-mers in a hash table;
- building the graph from that table;
- finding an Euler path through the graph.

Nearly all the arithmetic in these jobs is bulk comparison of 2-bit-per-base strings and small additions. PANDA does both inside the memory. It is an SOT-MRAM chip whose sub-arrays can open up to three rows at once. A reconfigurable sense amplifier on every bit-line can then return one of these in a single memory cycle:
- the stored bit;
- a 2- or 3-input AND, OR or majority of the open rows, or their inverse;
- XOR/XNOR of two rows;
- the full-adder Sum and Carry of three rows, together.

One row of 256 bits is compared or added in every selected sub-array at the same time. A chip has 4096 sub-arrays.

This RTL models that chip at the level of its digital behaviour:
- the sub-array with its sense amplifiers, write driver and command decoder;
- the bank with its global decoder, row buffer and digital processing units (DPUs);
- the chip controller that turns host instructions into sub-array cycles;
- the I/O buffer.

The magnetic cell and the analog sense path are not modelled electrically. Each is replaced by the digital result it produces.

## Organisation

```
panda_chip                      BANK_R x BANK_C banks (16 x 16)
 ├─ io_buffer                   FIFO of {instruction, data, mask}, depth 4
 ├─ panda_ctrl                  reset init of reserved rows, instruction sequencer
 └─ bank  (x256)
     ├─ global_decoder          bank hit / broadcast, mat enables, read-mat select
     ├─ csub  (x16, 4 x 4 mats) 1024 x 256 computational sub-array
     │   ├─ csub_ctrl           micro-op -> word-line enables, SA enables (Table I)
     │   ├─ reconfig_sa         three sub-SAs per bit-line, Add-box
     │   └─ write_driver        Din-Intra / Din-Inter / SA_out1 / SA_out2 select
     ├─ row_buffer              one mat's SA row, read data and copy source
     └─ dpu  (x8)               per-sub-array AND reduction for comparisons
```

The default parameters give the chip size evaluated for PANDA:
- sub-arrays of 1024 rows x 256 columns;
- 4 x 4 mats per bank;
- 16 x 16 banks.

That is 1 Gbit of cells.

`panda_pkg` holds the shared types:
- the four sense-amplifier enables;
- the logic operations;
- the micro-operation broadcast to sub-arrays;
- the host instruction;
- the positions of the reserved rows.

## How a sub-array computes

### Sensing several rows as a threshold

Opening *n* rows in the same column puts *n* cells in parallel on the bit-line. The sense current then depends only on how many of them are in the high-resistance ('1') state.

The RTL represents that current as a thermometer code per column:

| Signal | Meaning |
|---|---|
| `ge1` | at least one open cell is '1' |
| `ge2` | at least two are '1' |
| `ge3` | all three are '1' |

Each of the three sub-amplifiers compares this level with its own reference:

| Sub-SA | Reference | Function | Enable |
|---|---|---|---|
| SA-I | R_OR3 | OR3 | `C_OR3` |
| SA-II | R_MAJ | MAJ | `C_MAJ` |
| SA-III | R_AND3 | AND3 | `C_AND3` |
| SA-III | R_M | plain read of a single row | `C_M` |

A sub-SA whose enable is low outputs 0. The latch's complementary node supplies NAND3, NOR3 and MIN.

### Full adder in one cycle

With `C_AND3`, `C_MAJ` and `C_OR3` all high, the Add-box selects the result with the Carry (MAJ):

```
Carry = MAJ(A, B, C)
Sum   = Carry ? AND3(A, B, C) : OR3(A, B, C)      (= A xor B xor C)
```

Sum leaves on `SA_out1` and Carry on `SA_out2`. Both are latched at the same clock edge.

### Two-input functions and constant rows

Two-input functions are three-input functions whose third row is a constant:

| Function | Sensed as | Third row |
|---|---|---|
| AND2, NAND2 | AND3 / NAND3 | ONE |
| OR2, NOR2 | OR3 / NOR3 | ZERO |
| XOR2 | XOR3 | ZERO |
| XNOR2 | XOR3 | ONE |

XNOR2 is what a k-mer comparison needs: a column reads '1' where the two rows hold the same bit.

### Reserved rows

The last eight rows of every sub-array are the compute region:

| Row | Contents |
|---|---|
| `ROWS-8` | ZERO |
| `ROWS-7` | ONE |
| `ROWS-6`, `ROWS-5` | the two carry rows |
| `ROWS-4` .. `ROWS-1` | free |

The controller writes the ZERO, ONE and carry rows in every sub-array during the four cycles after reset. `init_done` rises when it has finished.

Software must not overwrite these rows. Nothing in the hardware protects them.

The rest of the sub-array follows the layout used by the hash-table algorithm, but only by convention:
- 4 temp rows;
- 980 k-mer rows;
- 32 value rows.

### Writes

A write takes one cycle and writes one row. The source is one of four:
- the bank's row buffer (Din-Intra);
- the chip input (Din-Inter);
- the sub-array's own `SA_out1` or `SA_out2`.

A per-column select writes part of a row.

## Instructions and their timing

The host sends one instruction, a `COLS`-bit data word and a `COLS`-bit mask through a valid/ready port. The I/O buffer holds up to four of them.

An instruction selects where it runs:
- one bank, or all banks (`all_banks`);
- a 16-bit mat mask inside the selected bank(s).

Every selected sub-array then executes the same cycles.

Cycles below are counted from the handshake edge to the first cycle in which `resp_valid` is high:

| Instruction | Effect | Sub-array cycles | Cycles to response |
|---|---|---|---|
| `I_WRITE` | row `dst` <- data, columns in `mask` | 1 | 3 |
| `I_READ` | returns row `src1` of the lowest selected mat of `bank` | 2 | 4 |
| `I_LOGIC` | `dst` <- any sub-array function of `src1`, `src2`, `src3` | 2 | 4 |
| `I_MEM_INSERT` | copies `size` rows from `src1..` to `dst..` | 2 per row | 2n + 2 |
| `I_CMP` | XNOR of `size` row pairs, AND over rows and masked columns | n + 1 | n + 3 |
| `I_ADD` | `dst` <- `src1` + operand, `size`-bit vertical words | 1 + 3n | 3n + 3 |

`I_MEM_INSERT`, `I_CMP` and `I_ADD` are the three assembly primitives.

More on the individual instructions:
- **`I_MEM_INSERT`** reads each source row into the row buffer, then writes it through Din-Intra.
- **`I_CMP`** issues one XNOR2 sense per row pair. The result is one match bit per sub-array, in `resp_match`, indexed by bank × 16 + mat.
- **`I_ADD`** has three choices for its second operand:
  - a second word (`BM_ROWS`);
  - +1 (`BM_PLUS1`: ONE row for bit 0, ZERO row above);
  - -1 (`BM_MINUS1`: ONE row for every bit).

### Vertical addition

A number is stored one bit per row: bit *i* of every column's word is in row `base + i`. All 256 columns are therefore added at once.

For each bit the controller runs three cycles:
1. Sense `LOP_ADD` on rows (`src1+i`, operand bit *i*, carry row). This latches Sum and Carry.
2. Write Sum to `dst+i`.
3. Write Carry to the other carry row.

The two carry rows alternate. The carry being read and the carry being written are therefore never the same row.

Before bit 0, one extra cycle clears the first carry row from the chip input. `dst` may equal `src1`, because bit *i* is written only after it has been read.

### Comparison and the DPU

Every DPU serves two sub-arrays. For each sub-array it keeps a column-wise running AND of the XNOR rows:
- reset at the first row of an instruction;
- accumulated whenever that sub-array has latched a fresh result.

An AND over the columns whose `mask` bit is set then reduces it to one bit.

A k-mer of length *k* uses the low 2*k* columns. The mask makes the unused columns of the row don't-care.

### Response

At the end of an instruction the controller registers the response:
- `resp_op`;
- `resp_match`, valid for compares;
- `resp_rdata`, the row buffer of the addressed bank, valid for reads.

`resp_valid` is high for one cycle. The next instruction is taken from the I/O buffer in the following cycle.

## Using it for assembly

**Hash table (k-mer counting).**
1. Write the k-mer, 2 bits per base, into a temp row.
2. `I_CMP` it against each stored k-mer row, with a mask of 2k columns.
3. On a match, `I_ADD ... BM_PLUS1` on the value word.
4. On a miss, `I_MEM_INSERT` the temp row into the next free k-mer row, then set its value with +1.

**Start vertex of the Euler path.**
1. Add the adjacency bits into out-degree words with `I_ADD`.
2. Form in-degree + 1 with `BM_PLUS1`.
3. Compare the two with `I_CMP`, broadcast to every sub-array that holds part of the graph.

**Edge removal (Fleury).** `I_ADD ... BM_MINUS1` on the out-degree word.

The end-to-end testbench runs both flows on a small example:
- a hash table on the read `CGTGCGTGCTT` with k = 5: six distinct k-mers, `CGTGC` counted twice;
- the start-vertex search on a six-vertex graph whose only start vertex is v3.

## Where this model departs from the paper or fills gaps

- **Cell and sense path.**
  - The SHE-MTJ cell, its bipolar write and the StrongARM latch are not modelled electrically.
  - The array is a register array without reset.
  - The sense level is a digital count.
  - Opening the same row twice counts its cell once.
- **Sense-amplifier clocking.** The result is registered. This gives one cycle of latency and makes sense and write-back separate cycles, so Sum and Carry of one bit take three cycles in all. In the paper they are computed "in a single memory cycle", which this model keeps for the sense step alone.
- **Reserved rows.**
  - The paper gives only the counts: two constant rows and two carry rows.
  - Their position at the end of the compute region is chosen here.
  - Alternating the two carry rows is also chosen here.
- **Instruction format and timing.** These are defined here:
  - the operation codes;
  - the `size` field (1..63, 0 meaning 1);
  - the bank/mat addressing with broadcast;
  - the +1/-1 add modes;
  - every cycle count.

  The paper names `PANDA_Mem_insert`, `PANDA_Cmp` and `PANDA_Add` and their operands, but no encoding or latency.
- **Interconnect and handshake.**
  - The H-tree routing is reduced to a direct broadcast of the micro-operation.
  - The host link is a plain valid/ready port, with no memory-bus or PCIe protocol.
  - The I/O buffer depth is 4.
- **DPU.**
  - The paper says only that DPUs are shared between sub-arrays and hold an AND unit for comparisons.
  - One DPU per two sub-arrays is chosen here.
  - The column mask is chosen here.
- **Row buffer.** The row buffer is the path for reads and for copies between rows. Copies go from a mat to itself or to other mats of the same bank. There is no copy between banks.
- **Host and storage** are outside the chip. In simulation the testbenches play the host.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; each has a watchdog.

With plain verilator, compile the package first, then the other RTL files, then one testbench:

```
verilator --binary --timing --assert --top-module tb_panda_chip \
    rtl/panda_pkg.sv $(ls rtl/*.sv | grep -v panda_pkg) tb/tb_panda_chip.sv
./obj_dir/Vtb_panda_chip
```

| Testbench | What it covers |
|---|---|
| `tb_reconfig_sa` | every Table I enable combination on random bit-line levels, one-cycle latency |
| `tb_write_driver` | source select and column masking |
| `tb_csub_ctrl` | decoder against Table I, constant-row insertion |
| `tb_csub` | random micro-operations against a row-level model of a 32 x 16 array |
| `tb_dpu` | accumulation, clear, masking |
| `tb_global_decoder` | bank hit, broadcast, mat enables, read-mat select |
| `tb_row_buffer` | load and hold |
| `tb_io_buffer` | random push/pop order, full and empty |
| `tb_bank` | a 2 x 2 bank of 32 x 8 sub-arrays: per-mat writes, reads through the row buffer, copies between mats, compares |
| `tb_panda_chip` | whole chip at 2 banks x 2 mats of 64 x 32 (see below) |
| `tb_panda_chip_full` | the chip at its default size (see below) |

`tb_panda_chip` runs:
- the hash-table and start-vertex flows;
- random instructions over every function, with a reference model of every sub-array;
- a burst that fills the I/O buffer.

It checks every latency. It fails if any mechanism never occurred:
- initialisation;
- buffer full;
- each instruction;
- a match and a mismatch;
- a carry;
- use of a constant row;
- a broadcast;
- +1 and -1.

`tb_panda_chip_full` runs the chip at its default size, 4096 sub-arrays:
- reads and writes at both ends of the chip;
- a broadcast compare over all 4096 sub-arrays, one of them differing in one base;
- a 32-bit vertical addition;
- a row copy.

Every sub-array in it is a 1024 x 256 array, so building it takes much longer and needs several GB of memory.

## Capacity against the evaluated data set

The evaluated data set has 519,771 distinct 25-mers from 60,952 reads.

**Space needed.** Each k-mer needs one row of 50 of the 256 columns. That is 531 sub-arrays of 980 k-mer rows each.

**Space built.** The default chip has 4096 sub-arrays, or 4.0 million k-mer rows.

**Other k.** At k = 22, 27 and 32 a k-mer takes 44, 54 and 64 bits, which is still one row.

**Parallelism.** The parallelism degree P_d of 1 to 8 means the same operation runs in up to eight sub-arrays at once. With a bank broadcast and a 16-bit mat mask, a single instruction can select any such set.
