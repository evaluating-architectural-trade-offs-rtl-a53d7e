# DISCO-CGRA: a two-column VLIW array around a wide scratchpad

DISCO-CGRA is a small coarse-grained reconfigurable array (CGRA) for edge signal processing
and matrix kernels: FFTs, short-time Fourier transforms and the matrix products of a small
transformer. Its main idea is to keep data on chip and to move it in very wide pieces. A
32 KiB scratchpad (SPM) is organised as 64 lines of 4096 bits. Each line can be copied into one
of three equally wide *very wide registers* (VWRs) in a single cycle. Four processing elements
(PEs) then work on the VWR contents, 32 bits at a time. Three specialised units do the work
that is not arithmetic:

- a load-store unit (LSU) moves lines;
- a multiplexer-control unit (MXCU) decides which word each PE sees;
- a loop-control unit (LCU) runs the loop nest.

Each kind of work has its own unit, so the PEs spend none of their instructions on addresses or
loops.

The array has two such *columns*. They are independent and share the scratchpad. A host
processor fills the scratchpad over an ordinary 32-bit bus. It stores kernels in a 10 KiB
global instruction memory and starts them through a few configuration registers.

This repository holds synthesizable SystemVerilog for the array: the columns, the scratchpad,
the instruction memories and the dispatch controller. It also holds a self-checking testbench
for every block and one for the whole array at full size. The host processor and the system bus
are outside it.

## 1. One column: seven instructions per cycle

```
              global IMEM --(dispatch)--> 7 local IMEMs
                                               | row at PC (160 bits)
        +--------+--------+--------+--------+--+----+--------+--------+
        |  PE0   |  PE1   |  PE2   |  PE3   |  LSU  |  MXCU  |  LCU   |
        +---+----+---+----+---+----+---+----+---+---+---+----+---+----+
            |  ring of output registers  |      |       |        |
        [mux0]   [mux1]   [mux2]   [mux3]       |     index    branch/exit -> PC
            |        |        |        |        |
        +---+--------+--------+--------+---+    |
        | VWR A  | 1024 | 1024 | 1024 | 1024 | <-+-> SPM line port (4096 bits)
        | VWR B  |  slice per PE, 32 words   |  ^
        | VWR C  |                           |  shuffle unit (A,B -> line)
        +----------------------------------+
        SRF (8 x 32 bit), read by all, bulk-loaded from an SPM line
```

A column is a VLIW machine without a pipeline. Its program counter (`disco_pc`) addresses seven
private instruction memories (`local_imem`), one for each element. In the same cycle, each
element executes the instruction it finds at that address. A 160-bit *row* holds the seven
instructions:

| bits      | element | width |
|-----------|---------|-------|
| [23:0]    | PE0     | 24    |
| [47:24]   | PE1     | 24    |
| [71:48]   | PE2     | 24    |
| [95:72]   | PE3     | 24    |
| [115:96]  | LSU     | 20    |
| [135:116] | MXCU    | 20    |
| [159:136] | LCU     | 24    |

Fetching and executing a row takes one clock cycle. Every register write, VWR write, SPM write
and PC update happens at the clock edge that ends the row. A kernel's run time in cycles
is therefore exactly the number of rows it executes. The testbenches check this cycle count.

Each element has its own small register set:

- **PE** (`pe`): two registers, R0 and R1, plus an output register `out`. `out` holds the last
  result, and the two neighbours can read it in the next cycle.
- **LSU** (`lsu`): four line pointers.
- **MXCU** (`mxcu`): four scalar registers and the VWR word index.
- **LCU** (`lcu`): four loop registers.

The scalar register file (`srf`) connects them all. Every unit can read all eight entries. The
LSU loads the whole file from the first eight words of an SPM line, which is how a kernel
receives its parameters. After that, the PEs and the MXCU can write single entries.

## 2. How data reaches a PE

This part needs the most care when you write a kernel.

* **Lines.** An SPM line and a VWR have the same width: 4096 bits = 128 words of 32 bits. The LSU
  instruction `LDV` copies line `R[rs]` into VWR A, B or C. `STV` copies a VWR back to line
  `R[rs]`. Both instructions then add the signed immediate to `R[rs]` (post-increment), so walking
  through consecutive lines takes no extra instruction.
* **Slices.** PE *p* owns words `32p .. 32p+31` of every VWR (a 1024-bit slice). It never sees
  another PE's slice. Data that all PEs need must either be present in every slice or be passed
  from PE to PE around the neighbour ring (below).
* **Index.** The MXCU holds one 5-bit index for the whole column. Each PE's multiplexer
  (`vwr_mux`) presents word `idx` of the PE's slice of VWR A, B and C. The PE can use any of these
  words as an operand, and it can write its result back to that word of any VWR.
* **Index timing.** The index is a register. An MXCU instruction that changes it (`SETIDX`,
  `ADDIDX`, `IDXR`) affects the *next* row. In a row holding `MAC R0, R1, VA` and `ADDIDX 1`, the
  MAC uses the old index and the following row sees the new one. The MAC row of the GEMM
  kernel's inner loop relies on this.
* **Neighbours.** Operand `LEFT` of PE *p* is the output register of PE *p-1*, and `RIGHT` is the
  output register of PE *p+1*. Both wrap around: the four PEs form a ring. Because `out` is a
  register, the value read is the one the neighbour produced in the previous row.
* **Shuffle.** `SHUF` writes one of five fixed permutations of VWR A and B into a VWR in one
  cycle (`shuffle_unit`). In the table, N = 128 and h = 64:

  | mode   | result                                        | use in a radix-2 FFT |
  |--------|-----------------------------------------------|----------------------|
  | EVEN   | y[i] = {A,B}[2i]   (B is words N..2N-1)       | decimation split     |
  | ODD    | y[i] = {A,B}[2i+1]                            | decimation split     |
  | ILV_LO | y[2i] = A[i], y[2i+1] = B[i], i < h           | recombine            |
  | ILV_HI | y[2i] = A[h+i], y[2i+1] = B[h+i]              | recombine            |
  | BITREV | y[i] = A[bitrev7(i)]                          | input reordering     |

The SPM has one 4096-bit port for each column, plus a 32-bit bus port. Wide reads are
combinational, and all writes land at the clock edge. The host can therefore fill one half of
the scratchpad while a kernel works on the other half (double buffering). It does not have to
stop the array to do so.

## 3. Instruction set

All encodings are packed structs in `rtl/disco_pkg.sv`. Every field below is listed from the
most significant bit down.

**PE** `{op[4:0], dst[2:0], srca[3:0], srcb[3:0], imm[7:0]}`

| op | meaning | op | meaning |
|----|---------|----|---------|
| NOP | nothing (no register changes) | SLL/SRL/SRA | shift a by b[4:0] |
| ADD, SUB, AND, OR, XOR | dst = a op b | MOV | dst = a |
| MUL | dst = a*b (low 32 bits) | ADD16, SUB16, MUL16 | two independent 16-bit lanes |
| MAC | dst = dst + a*b | MAC16 | per lane: dst = dst + a*b (mod 2^16) |

- Sources: R0, R1, VWRA, VWRB, VWRC (the word at the index), SRF (entry `imm[2:0]`), LEFT,
  RIGHT, ZERO, IMM (sign-extended `imm`), OWN (own output register).
- Destinations: NONE, R0, R1, VWRA/B/C (word at the index), SRF (entry `imm[2:0]`).
- A MAC reads the destination's current value as its accumulator.

**LSU** `{op[3:0], vwr[1:0], rd[1:0], rs[1:0], imm[9:0]}`

| op | meaning |
|----|---------|
| LDV | VWR[vwr] = SPM[R[rs]]; R[rs] += imm |
| STV | SPM[R[rs]] = VWR[vwr]; R[rs] += imm |
| LDSRF | SRF = first 8 words of SPM[R[rs]]; R[rs] += imm |
| SHUF | VWR[vwr] = shuffle(A, B), mode imm[2:0] |
| SETR / ADDI / ADD | R[rd] = imm / R[rs]+imm / R[rd]+R[rs] |
| RSRF | R[rd] = SRF[imm[2:0]] |

**MXCU** `{op[3:0], rd[1:0], rs[1:0], imm[11:0]}`: SETIDX, ADDIDX and IDXR (idx = R[rs]) change
the index. SETR, ADDI, ADD and RSRF work on its registers. WSRF writes SRF[imm[2:0]] = R[rs].

**LCU** `{op[3:0], rd[1:0], rs[1:0], tgt[5:0], imm[9:0]}`:

- `DBNZ rd, tgt`: decrement R[rd], then branch if the result is not zero.
- `BNE`, `BEQ`, `BLT` (signed): compare R[rd] with R[rs].
- `JMP`: branch always.
- `EXIT`: end the kernel.
- `SETR`, `ADDI` and `RSRF` load its registers.

A taken branch replaces PC+1 by `tgt` at the end of the row, so branches have no delay slot.
`EXIT` stops the column and raises its `done` flag.

When several elements write the same SRF entry in one cycle, the bulk load wins, then the lowest
requester (PE0, PE1, PE2, PE3, MXCU). When an LSU line write and a PE word write hit the same VWR
in one cycle, the line write wins.

## 4. Getting a kernel onto the array

The top level, `disco_cgra`, has two 32-bit OBI slave ports and one interrupt:

* `spm_obi_*` addresses the scratchpad. Word *w* of line *l* is at byte address
  `(l*128 + w)*4`. Byte enables are honoured. The port grants every request at once, and
  `rvalid` follows one cycle later.
* `cfg_obi_*` addresses the global instruction memory and the kernel registers:

| byte address | register | access |
|--------------|----------|--------|
| 0x0000-0x27FF | global IMEM, 2560 words; row *r* is words 5r..5r+4, word 0 = row bits [31:0] | R/W |
| 0x4000 | KROW: first row of the kernel | R/W |
| 0x4004 | KNROWS: number of rows, 1..64 | R/W |
| 0x4008 | COLMASK: bit *c* selects column *c* | R/W |
| 0x400C | CMD: bit0 = load, bit1 = run | W |
| 0x4010 | STATUS: bit0 loading, bit1 running, bit2 done, bits 3-4 column busy | R |
| 0x4014 | CYCLES: length of the last run, i.e. rows executed by the slowest column plus one | R |

A **load** command makes the IMEM controller (`imem_ctrl`) copy the kernel into the local IMEMs
of every column in the mask:

- It reads rows KROW .. KROW+KNROWS-1 of the global IMEM, one 32-bit word per cycle.
- It writes each 160-bit row to the columns as soon as the row's fifth word arrives.
- A kernel of N rows takes 5N+1 cycles.
- During that time, bus accesses to the global IMEM wait: `gnt` stays low.

The global IMEM (`global_imem`) is a single-port SRAM-style array. This is why dispatch takes
several cycles instead of being a single wide copy.

A **run** command starts the masked columns and waits until every one of them has executed
EXIT. At that point it sets STATUS.done and `irq` and latches CYCLES. The two columns can hold
different kernels: load each kernel with its own mask, then start both with one run. A command
with both bits set loads first and then runs.

A typical host sequence:

1. Write the kernel rows into the global IMEM once.
2. Write the input tiles and a parameter line into the SPM.
3. Write KROW, KNROWS, COLMASK, then CMD=3.
4. Wait for `irq`.
5. Read the results from the SPM, refill the other buffer, and write CMD=2 for the next tile.

## 5. Worked example: the GEMM loop nest

The GEMM kernel used by the testbenches is `gemm_program` in `tb/disco_asm_pkg.sv`: 44 rows, or
60 in its SIMD form. It computes C += A x B on blocks of up to 32 x 32 x 32 on one column, with
one row of C per PE. The host tiles larger products into such blocks and splits a block's rows
between the two columns.

The data layout follows from the slicing:

* **A, row-wise.** Line *a* holds rows 4a..4a+3 of A, one row per PE slice.
* **C, row-wise.** Line *a* holds rows 4a..4a+3 of C, with C[4a+p][j] in word *j* of slice *p*.
* **B, column-wise.** B is transposed: line *b* holds columns 4b..4b+3 of B, one column per
  slice.

All four PEs need the same element of B, but column *s* of a B line lies only in PE *s*'s slice.
The kernel therefore shares it through the neighbour ring, in five rows per K step:

1. PE *s* copies the B word at the index into R1.
2. The next three PEs in turn copy their LEFT neighbour's output into R1.
3. All four PEs execute `MAC R0, R1, VA` while the MXCU advances the index and the LCU counts.

The four columns of a B line are unrolled in the program, because the PE that reads B changes
with the column.

The kernel reads its parameters from an SPM line:

| SRF entry | contents |
|-----------|----------|
| [0] | first line of A |
| [1] | first line of B |
| [2] | nbl: number of B lines |
| [3] | first line of C |
| [4] | K (32) |
| [5] | nal: number of A lines |

```
set-up    LSU: parameter line -> SRF; pointers to A and C     LCU: R2 = nal
L3 head   LSU: LDV A <- SPM[R1], R1 += 1; LDV C <- SPM[R3]    MXCU: j = 0
          LSU: R2 = first B line                              LCU: R1 = nbl
L2 head   LSU: LDV B <- SPM[R2], R2 += 1
  for s in 0..3 (unrolled):
          PEs: R0 = 0        MXCU: idx = 0                    LCU: R0 = K
  L1      PE s: R1 = VB[idx]
          PE s+1: R1 = LEFT
          PE s+2: R1 = LEFT
          PE s+3: R1 = LEFT
          PEs: MAC R0, R1, VA   MXCU: idx += 1                LCU: DBNZ R0 -> L1
          MXCU: idx = j
          PEs: VC[idx] = VC[idx] + R0                         MXCU: j += 1
L2 tail   LCU: DBNZ R1 -> L2 head
          LSU: STV C -> SPM[R3], R3 += 1
L3 tail   LCU: DBNZ R2 -> L3 head
          LCU: EXIT
```

No PE instruction is spent on addresses or loop control: the LSU, MXCU and LCU work in the same
rows.

- Run time: `4 + nal*(3 + nbl*(2 + 4*(5K+3)) + 2) + 1` cycles.
- A full 32 x 32 x 32 block (nal = nbl = 8) takes 41901 cycles on one column. Split over both
  columns, it takes 20953 cycles.
- The SIMD form packs two 16-bit elements per word (K = 64). It adds four rows per column to
  fold the two lane sums, and accumulates into the low half of each C word.

The scratchpad map matches the original mapping:

| lines | contents |
|-------|----------|
| 0 | parameters |
| 1-24 | B |
| 25-32 | A, buffer 0 |
| 33-40 | C, buffer 0 |
| 41-48 | A, buffer 1 |
| 49-56 | C, buffer 1 |

The host refills one buffer while the columns compute on the other.

## 6. Sizes

| quantity | default | where set |
|----------|---------|-----------|
| columns | 2 | `N_COLS` |
| PEs per column | 4 | `N_PE` |
| VWRs per column, width | 3 x 4096 bits | `N_VWR`, `VWR_W` |
| PE slice | 1024 bits = 32 words | derived |
| SPM | 64 lines x 4096 bits = 32 KiB | `SPM_LINES` |
| global IMEM | 2560 x 32 bits = 10 KiB = 512 rows | `GIMEM_WORDS` |
| local IMEM | 64 rows per element | `LIMEM_DEPTH` |
| SRF | 8 x 32 bits | `SRF_DEPTH` |
| row | 160 bits (4x24 + 20 + 20 + 24) | instruction widths |

The SPM and the global IMEM together hold 42 KiB, the SRAM budget of the original design. In this
RTL both are plain arrays; a real implementation would replace them with SRAM macros.

## 7. What is and is not from the original design

The published description gives these parts of the design:

- the column organisation: four PEs, LSU, MXCU and LCU, with seven instructions per cycle;
- the VWR width and its slicing into one quarter per PE;
- the 4096-bit single-cycle SPM transfer, the shuffle unit's purpose, and the SRF loaded from
  the SPM;
- MAC and two-lane 16-bit SIMD in the PEs;
- the 10 KiB global IMEM dispatched to local IMEMs in several cycles;
- two independent columns sharing the SPM, double buffering, and a synchronised completion of
  both columns;
- the GEMM loop nest.

The following are this implementation's own choices:

* **Encodings and instruction sets.** Every encoding and every instruction set, including the
  PE operand list and the 16-bit truncation of SIMD products.
* **Register files.** The register counts of the LSU, MXCU and LCU, and the SRF depth of 8.
* **Local IMEM depth.** 64 rows.
* **Shuffle patterns.** The exact set of five patterns.
* **No pipeline.** The column has no pipeline, so the index register's one-row delay is the
  only timing subtlety. The original design was reported at 200 MHz in 16 nm; this RTL was not
  timed.
* **Sharing B without a broadcast wire.** The original text says that an element of B is
  *broadcast* to the PEs in every cycle. Its inner-loop drawing instead reads B on one PE and
  passes it on as `R1 = Left`. This RTL follows the drawing and has no broadcast wire, so the K
  loop takes five rows per element instead of one. The kernel's throughput is therefore well
  below what a one-cycle broadcast would give.
* **Host interface.** The register map, the load/run protocol, the wait on global-IMEM bus
  accesses during dispatch, and the use of OBI for both bus ports.
* **Memories.** The SPM and both IMEM levels are modelled as arrays with the timing stated in
  each file's header. They are not SRAM macros.

Not included:

- the host CPU and its bus, interconnect and DMA, which the array only connects to;
- complete FFT/STFT programs. The shuffle unit and the neighbour ring are tested with a kernel
  that exercises each pattern, but no full 256-point FFT is run, so the published FFT cycle count
  is not reproduced.

## 8. Files

| file | contents |
|------|----------|
| `rtl/disco_pkg.sv` | constants, instruction structs, OBI structs, register map |
| `rtl/pe.sv`, `vwr.sv`, `vwr_mux.sv`, `shuffle_unit.sv`, `srf.sv` | column datapath |
| `rtl/lsu.sv`, `mxcu.sv`, `lcu.sv`, `disco_pc.sv`, `local_imem.sv` | column control |
| `rtl/disco_column.sv` | one column |
| `rtl/spm.sv` | shared scratchpad with two wide ports and a bus port |
| `rtl/global_imem.sv`, `imem_ctrl.sv` | global IMEM, dispatch, configuration registers |
| `rtl/disco_cgra.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/disco_asm_pkg.sv` | row builders and the GEMM / shuffle kernels used by the testbenches |

## 9. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each one also has a
watchdog that ends the run with a failure if the design hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/disco_pkg.sv tb/disco_asm_pkg.sv tb/tb_disco_cgra.sv --top-module tb_disco_cgra
./obj_dir/Vtb_disco_cgra
```

Replace `tb_disco_cgra` with any other `tb_<module>`. The `-I` paths let Verilator find the
modules that a file uses.

`tb_disco_cgra` runs the whole array at its default sizes (about 20 s) and takes it through
three runs:

1. **Run 1.** One full 32 x 32 x 32 block in 32-bit arithmetic, with the scratchpad map above.
   Each column computes 16 rows of C, and the two columns run together. During the dispatch,
   a global-IMEM write from the host has to wait. While the columns compute, the host fills
   buffer 1 with the next block.
2. **Run 2.** That next block in 16-bit SIMD arithmetic. The columns run one after the other,
   so that each column's start is checked separately.
3. **Run 3.** The shuffle / neighbour kernel.

The testbench checks every result word and every run time. It counts each mechanism and fails
if one never happened:

- dispatch and bus wait;
- line load, line store and SRF load;
- MAC and SIMD MAC;
- shuffle and neighbour read;
- loop branch and exit;
- both columns busy at once;
- bus traffic during a run.

The module testbenches compare against reference models written inside the testbench.
`tb_disco_column` also chains two products, as a two-matrix-multiplication workload does: the
second GEMM reads the first one's result lines directly as its A operand. Where a
latency is defined, they check it: the one-cycle SRAM read, the 5N+1 dispatch and the kernel
cycle counts.

To change a size, edit the constant in `disco_pkg` or override the module parameters. The
packages derive every width from the constants.
