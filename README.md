# DRIM: bulk bit-wise X(N)OR inside DRAM sub-arrays

DRAM already reads a whole 256-bit row into its sense amplifiers in one step. Processing-in-DRAM
uses that row as a 256-lane SIMD word. Older schemes compute AND/OR by activating three rows at
once (majority). That makes XOR and XNOR expensive: several majority steps, and control rows
that must be initialised first. DRIM adds a few gates to every sense amplifier. With them, an
XNOR (and on the complementary bit-line an XOR) of two rows takes one activation of those two
rows. Addition follows from it: the sum is two XORs, the carry is one majority.

This repository is a cycle-level, synthesizable SystemVerilog model of such a chip. It has
8 banks, each made of mats of 512x256 computational sub-arrays. Every sub-array executes the
DRIM instructions on its own 256 bit-lines, and all sub-arrays run in lock-step. Charge
sharing, the analog part, is replaced by exact digital arithmetic on the number of connected
cells (explained below). Everything else is modelled explicitly as logic: row decoders,
controllers, buffers and the instruction flow.

## 1. The sense amplifier that computes

When C cells are connected to one bit-line and n of them hold '1', the bit-line settles near
`Vi = n/C * Vdd`. DRIM reads that voltage with three inverters whose switching points differ:

| inverter  | trips at  | output for C = 2: n = 0, 1, 2 | meaning         |
|-----------|-----------|-------------------------------|-----------------|
| normal    | Vdd/2     | 1, undefined, 0               | ordinary SA     |
| low-Vs    | Vdd/4     | 1, 0, 0                       | NOR2 of the two |
| high-Vs   | 3Vdd/4    | 1, 1, 0                       | NAND2 of the two|

An inverter outputs 1 while Vi is below its trip point. The add-on circuit inverts the low-Vs
output (giving OR2) and ANDs it with the high-Vs output (NAND2). The result is XOR2, driven onto
BLbar; the ordinary cross-coupled latch then puts XNOR2 on BL. Three enables choose the mode.
No other combination is used:

| operation                          | EnM | Enx | EnC |
|------------------------------------|-----|-----|-----|
| read, write, copy, NOT, majority   | 1   | 1   | 0   |
| dual-row activation (X(N)OR)       | 0   | 1   | 1   |

In regular mode one connected cell is simply read. With three cells the normal inverter's Vdd/2
point yields MAJ3; this is triple-row activation.

`rtl/recon_sa.sv` implements this exactly. Per bit-line it receives n and C (each 0..3) and
evaluates `2n > C`, `4n > C` and `4n > 3C` in place of the three inverters. The sensed row is
latched on the `sense` strobe and drives BL/BLbar until precharge. While it drives, every open
cell takes the driven value. The source rows of an X(N)OR are therefore overwritten with the
result, which matches the charge curves of a real sub-array.

## 2. One sub-array

| rows (address)   | what                              | decoder                      |
|------------------|-----------------------------------|------------------------------|
| 0 .. 499         | data rows                         | regular RD, up to 2 held open |
| 500 .. 507       | computation rows x1 .. x8         | MRD (4-to-12, latching)      |
| 508, 509         | dcc1 (BL side), dcc2 (BLbar side) of DCC row A | MRD           |
| 510, 511         | dcc3 (BL side), dcc4 (BLbar side) of DCC row B | MRD           |

A dual-contact cell (DCC) has one capacitor and two access transistors: one to BL, one to
BLbar. Writing through dcc2 while the amplifier holds value v stores NOT v. Reading the same
cell through dcc1 then returns NOT v. This gives NOT, and it turns the BLbar-side XOR of a dual-row
activation into a stored row. In `rtl/cell_array.sv`, a cell opened from the BLbar side counts
with its complement in n.

The modified row decoder (`rtl/mrd.sv`) holds every word-line it has raised until Rst, so one
activation can raise two or three computation rows, one per clock. The regular decoder
(`rtl/row_dec.sv`) holds at most two data rows. An in-array copy needs both: the source stays
raised while the destination is raised. Any further row is refused and flagged on `err`.

### The AAP instruction and its timing

All work is done by ACTIVATE-ACTIVATE-PRECHARGE (AAP) instructions, in four types:

| type | operands               | effect                                         |
|------|------------------------|------------------------------------------------|
| 1    | src, des               | des := src (RowClone copy)                     |
| 2    | src, des1, des2        | des1 := des2 := src                            |
| 3    | src1, src2, des        | des := src1 XNOR src2 (dual-row activation); src1 and src2 are overwritten too |
| 4    | src1, src2, src3, des  | des := MAJ3 (triple-row activation); sources overwritten too |

A destination reached through dcc2 or dcc4 stores the BLbar value. That is the XOR for type 3,
the complement for the other types.

`rtl/sub_ctrl.sv` runs an AAP as the following phases, one state per phase:

```
raise sources (1 per cycle) | charge share T_CSS | sense T_SAS | raise destinations | write-back T_WR | precharge T_PRE
      enables all low  ------^                    ^-- value latched on the first sense cycle
```

An AAP of type t therefore takes `n_src(t) + T_CSS + T_SAS + n_dst(t) + T_WR + T_PRE` cycles.
With the defaults (2, 3, 2, 2) that is 11 cycles for type 1 and 12, 12 and 13 for types 2, 3
and 4. Only the order of the phases comes from the sub-array's documented behaviour. An AAP
there takes about 90 ns, but no clock is stated, so the four cycle counts are parameters of this
model (at roughly 8 ns per cycle an 11-cycle copy lands near 90 ns). In a dual-row activation,
EnC is dropped on the last sense cycle, after the result is latched. This follows the order of
the edges in the published waveform.

Host access to a sub-array uses ACT (open one row through the regular sense path), RD/WR of a
64-bit column word, and PRE.

## 3. Functions as AAP sequences

The instruction set is AAP only. Functions are sequences that a compiler or host emits (`Di`,
`Dj`, `Dk` are data rows, `Dr` the result row):

| function | sequence |
|----------|----------|
| copy     | AAP1(Di, Dr) |
| NOT      | AAP1(Di, dcc2); AAP1(dcc1, Dr) |
| MAJ3     | AAP1(Di, x1); AAP1(Dj, x2); AAP1(Dk, x3); AAP4(x1, x2, x3, Dr) |
| XNOR2    | AAP1(Di, x1); AAP1(Dj, x2); AAP3(x1, x2, Dr) |
| XOR2     | AAP1(Di, x1); AAP1(Dj, x2); AAP3(x1, x2, dcc2); AAP1(dcc1, Dr) |
| add      | AAP2(Di, x1, x2); AAP2(Dj, x3, x4); AAP2(Dk, x5, x6); AAP3(x2, x4, dcc2); AAP3(x6, dcc1, dcc4); AAP1(dcc3, Sum); AAP4(x1, x3, x5, Cout) |
| subtract | as add up to AAP1(dcc3, Diff); then AAP1(x1, dcc2); AAP4(dcc1, x3, x5, Bout) |

How the full adder works: the first type-3 step leaves `Di XOR Dj` in DCC row A. The second
reads that cell through dcc1 together with x6 (= Dk) and writes `Di XOR Dj XOR Dk` into DCC
row B through dcc4. dcc3 reads the sum back out. The carry uses the untouched copies x1, x3 and
x5.

**This differs from the published sequence.** There the carry step is AAP(x1, x2, x3, Cout).
Here x1 and x2 are both copies of Di, so the majority would just return Di. By the time of that
step, x2 also holds an XNOR result. The stated operation is `Cout = MAJ3(Di, Dj, Dk)`, and this
design follows it with x1, x3, x5.

Subtraction is only said to be possible with the dcc rows; no sequence is given. The one above
is a full subtractor, `Di - Dj - Dk` with `Dk` the borrow in. The difference is the same
three-way XOR as the sum. The borrow out is `MAJ3(NOT Di, Dj, Dk)`: x1 (= Di) is written
into DCC row A through dcc2, and dcc1 then serves as the first majority input.

## 4. The chip: banks, mats, rounds

```
drim_chip
 ├─ drim_ctrl                    instruction port + host access port
 ├─ grd (bank enables)   grb (chip I/O buffer)
 └─ drim_bank x N_BANK (8)
     ├─ grd, grb                 bank global row decoder / buffer
     └─ drim_mat x N_MAT (4)
         ├─ grd, grb             mat global row decoder / buffer
         └─ compute_subarray x N_SUB (8)
             ├─ sub_ctrl  row_dec  mrd
             └─ cell_array  recon_sa
```

A vector of `size` rows is laid out chunk by chunk: row chunk k lives in sub-array
`k mod N_ALL` at data row `base + k div N_ALL`. Here N_ALL = N_BANK·N_MAT·N_SUB = 256 by
default, and sub-arrays are numbered bank-major, then mat, then sub-array. An
`AAP(..., size)` instruction runs as `ceil(size / N_ALL)` rounds. In round r, every sub-array
holding chunk `r·N_ALL + g < size` runs the same AAP, with r added to each data-row operand.
The mats' and banks' global row decoders turn the broadcast mask into enables. A round ends
when no sub-array is busy, so an instruction takes `rounds × (AAP cycles + 2)` cycles.

**Multi-round instructions and computation rows.** Computation rows are not offset between
rounds, so each round overwrites x1..dcc4 again. An instruction whose operands are all data
rows (a copy) may span many rounds. A function that passes intermediate values through
computation rows (NOT, X(N)OR, MAJ3, add) must be issued slice by slice: the whole sequence
for chunks 0..N_ALL-1, then the whole sequence again with data rows +1 and so on, each
instruction with `size <= N_ALL`. The testbenches do exactly this. The controller does not
check it.

An instruction whose data-row operands would pass row 499 is refused, and `err` is set (sticky
until reset).

## 5. Ports of the top (`drim_chip`)

| port | dir | type | meaning |
|------|-----|------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (controllers only; cells keep their data) |
| `instr_valid`, `instr_ready` | in/out | 1 | instruction handshake; an instruction is taken on a cycle with both high |
| `instr` | in | `aap_instr_t` | `kind` (1..4), `src1..3`, `des1..2` (9-bit sub-array row addresses), `size` (rows) |
| `mem_valid`, `mem_ready` | in/out | 1 | host access handshake |
| `mem_req` | in | `mem_req_t` | `write`, `bank`, `sub` (index within the bank), `row`, `col` (64-bit word 0..3), `wdata` |
| `rsp_valid`, `rsp_data` | out | 1, 64 | one pulse per host access; read data, or a write acknowledge |
| `err` | out | 1 | refused instruction (sticky) or a sub-array decoder error |
| `aap_rounds` | out | 32 | number of lock-step AAP rounds issued |

The controller serves one request at a time. An instruction wins over a host access. A read
word passes through three registers (mat GRB, bank GRB, chip I/O buffer). The types and
constants live in `rtl/drim_pkg.sv`; `crow(k)` gives the address of computation row k
(`CR_X1`..`CR_DCC4`).

## 6. What is modelled, and where this design chose for itself

Taken from the DRIM design:
- the 512-row sub-array: 500 data rows, 8 x-rows, dual-contact rows on dcc1..dcc4, 256 bit-lines;
- the three thresholds Vdd/4, Vdd/2 and 3Vdd/4, the inverter truth table and the OR/AND
  add-on that gives XOR on BLbar and XNOR on BL;
- the enable table;
- the four AAP types;
- the function sequences (except the carry-step correction above);
- eight banks;
- the hierarchy chip / bank / mat / sub-array with global row decoders and buffers;
- a 4-to-12 latching MRD cleared by Rst.

Chosen here:
- Charge sharing: Vi = n/C exactly, with at most 3 cells, and a BLbar-side cell counted
  inverted. There is no process variation, noise or margin.
- The row address map and the pairing of dcc1/dcc2 and dcc3/dcc4 on one cell each.
- Two open data rows in the regular decoder.
- All cycle counts.
- The 64-bit column word.
- N_MAT = 4 and N_SUB = 8. Only the bank count and the sub-array size are known, so the
  default chip holds 256 sub-arrays, about 4.1 MB of data rows.
- Vector chunking across sub-arrays, the broadcast mask, and the host access port. The real
  part would sit on a memory bus or PCIe link, which is not specified.
- Refusing out-of-range instructions.

Not modelled:
- the analog cell and bit-line behaviour beyond the n/C abstraction;
- ECC;
- the host, its compiler and its virtual-to-physical address translation;
- the per-bank and per-mat control logic. Its behaviour is not described, so it is folded
  into the chip controller's broadcast.

Capacity against the evaluated workloads: bulk NOT, XNOR2 and add on 16, 32 and 64 MB vectors
need 2 to 5 vectors of 2048 to 8192 rows per sub-array at this chip size, against 500 data
rows. They do not fit the default configuration. They run unchanged on a chip with more mats
or sub-arrays (raise `N_MAT`/`N_SUB`), or in several passes.

## 7. Simulating

Every testbench in `tb/` checks itself and prints `TB_RESULT checks=N failures=M`. They are:
- one bench per module;
- `drim_chip_tb`: 2 banks x 2 mats x 2 sub-arrays, 12-row vectors through copy, NOT, XNOR2,
  XOR2, MAJ3, add and subtract, with exact latency checks and coverage of every mechanism;
- `drim_workload_tb`: 2 banks x 1 mat x 2 sub-arrays, the same functions on 400-row vectors,
  so the five vectors of the add and subtract fill data rows 0..499 of every sub-array;
- `drim_chip_full_tb`: default size, one XNOR2 over all 256 sub-arrays; about 4 minutes to
  build and one minute to run.

```
verilator --binary --timing --assert -Irtl -Itb rtl/drim_pkg.sv tb/drim_chip_tb.sv \
          --top-module drim_chip_tb -o sim
./obj_dir/sim
```

Replace the testbench name to run another. Uninitialised DRAM cells start random in a
two-state simulator. The benches only read rows they have written.
