# CIDAN: threshold-logic processing elements beside DRAM banks

CIDAN computes bulk bitwise functions on whole DRAM rows without moving the
data to a CPU and without the multi-row charge sharing that in-DRAM schemes such
as Ambit or ReDRAM rely on. One row is opened in each of up to three banks of a
four-bank group, using the DDR four-activation window (tFAW). A row-wide array
of small processing elements then computes on the sense-amplifier contents and
writes the result row into the third bank. The source rows are never disturbed,
so no row copies are needed.

Each processing element is built around a *threshold logic gate* (an
artificial neuron). The gate is a clocked comparator that outputs 1 when a
weighted sum of its enabled inputs reaches a threshold. Control signals switch
single weights on and off every cycle. This one gate therefore gives
AND/OR/NAND/NOR/NOT/copy in one cycle, XOR/XNOR in two, and a full-adder bit in
two.

This repository holds synthesizable SystemVerilog for the digital part of that
scheme, a behavioural model of the DRAM banks for simulation, and
self-checking testbenches.

## Structure

```
            bbop instruction
                  |
            +-----v------+   ACT / WR / PREA   +-------------------------+
            | cidan_ctrl |-------------------->| 8 DRAM banks (external) |
            +-----+------+                     |  rows latched in BLSA   |
    14-bit control|  write-back strobe         +---+----------------^----+
                  v                                | 4 x N per group|
      per group of 4 banks (2 groups):             v                | bit-lines
            +-------------------+  TLPEA-OP  +-------------+        |
            | tlpea: N x tlpe   |----------->| coldec_wdrv |--------+
            +-------------------+            +------+------+
                                                    | K-bit memory data bus
```

| module | role |
|---|---|
| `cidan_pkg` | control-word struct, function codes, instruction and command types, `fn_ctrl()` (the per-cycle control word of every function) |
| `tlg` | threshold gate `[-2,1,1,1,1,1; T]`, edge-triggered |
| `tlpe` | processing element: 4 inverting XORs, one `tlg`, carry latches L1/L2 |
| `tlpea` | N processing elements sharing one control word |
| `coldec_wdrv` | column read/write for the data bus; full-row write-back of the array output |
| `cidan_ctrl` | instruction decoder and DRAM command sequencer with timing checks |
| `cidan_top` | controller + two groups of (array, column decoder/write driver) |

Defaults are for the configuration the design targets: 8 banks of
16384 rows x 8192 bits (1024 columns x 8 bits), two four-bank groups, and
DDR3-1600 timing (tCK = 1.25 ns).

## The threshold gate (`tlg`)

A threshold function is `f = 1 iff sum(w_i x_i) >= T`. In the transistor
circuit, two pull-down networks race against each other under a sense
amplifier: LIN holds the positive-weight branches and RIN the rest. An SR
latch keeps the winner until the next clock edge. Every branch has its own
enable transistor, so the function can change from cycle to cycle.

The RTL replaces the race with counting:

```
LIN = number of enabled positive inputs that are 1          (weights +1)
RIN = 2 * (negative input enabled and 1) + number of enabled threshold branches
d   = LIN >= RIN ;   y <= d on the rising edge (when ce = 1)
```

With two threshold branches, T is 0, 1 or 2; the design uses only 1 and 2. A
tie counts as 1, so the gate computes `sum >= T` exactly. The analog circuit
has no defined tie. Any real implementation must size its branches so that
"equal" falls on the 1 side, for example with a half-unit offset on RIN.

## The processing element (`tlpe`) and its control word

```
 bank bits I1..I4 --XOR(C0..C3)--> four +1 inputs ─┐
 L1 ------------------------------> +1 input ───────┤   tlg
 O1 (own output) -----------------> -2 input ───────┤ T = 1 or 2 ──> O1 ──> write driver
                                                    ┘               └──> L2 ──> L1
```

The 14-bit control word (`tlpe_ctrl_t`) is, from MSB to LSB:

| bits | field | meaning |
|---|---|---|
| 13:10 | `inv` | C0..C3, invert input Ik |
| 9:6 | `en_in` | enable the +1 branch of Ik |
| 5 | `en_neg` | enable the -2 branch (fed by O1) |
| 4 | `en_fb` | enable the +1 branch fed by L1 |
| 3:2 | `en_t` | threshold branches, T = en_t[0] + en_t[1] |
| 1 | `le_l1` | L1 <= L2 |
| 0 | `le_l2` | L2 <= the value the gate captures on this edge |

The function table (first operand on input m, second on input n):

| function | cycle 1 | cycle 2 |
|---|---|---|
| COPY | Im, T=1 | – |
| NOT | ~Im, T=1 | – |
| AND / OR | Im + In, T=2 / T=1 | – |
| NAND / NOR | ~Im + ~In, T=1 / T=2 | – |
| XOR | Im + In, T=2 (OP1 = AND) | Im + In - 2·OP1, T=1 |
| XNOR | Im + ~In, T=2 (OP1 = Im & ~In) | Im + ~In - 2·OP1, T=1 |
| ADD | Im + In + L1, T=2 → C[i+1], L2 captures it | Im + In + L1 - 2·C[i+1], T=1 → S[i]; L1 <= L2 |
| ADD0 | as ADD with the L1 branch off (carry-in 0) | same |

**Adder timing.** The adder is the hardest part to follow. The carry stays
inside each element between instructions. Bits are added one row at a time:
row i of the source banks holds bit i of N independent numbers, a vertical
(bit-sliced) layout. In cycle 1 the gate computes the carry-out, and L2
captures it on the same edge. In cycle 2 the gate computes the sum using that
carry through its -2 input. The carry-in it still needs comes from L1, which
on that same edge takes L2's value, so L1 is ready for the next bit. An n-bit
add is one `ADD0` followed by n-1 `ADD` instructions on successive rows. A
group's L1 is only touched by adds in that group, so adds in the other group
may be interleaved.

L1 and L2 are drawn as latches in the original circuit. Here they are
enabled flip-flops on the same edge as the gate. This gives the cycle
behaviour of the schedule described above; real latches would need a
two-phase timing scheme.

**Clock enable.** The gate captures a new value on every clock edge. The
array's clock enable (`ce`) is high only during the evaluation cycles, which
models a gated array clock. Without it, the result would be re-evaluated and
lost, because the -2 feedback would change it, before the write-back cycle.

## Command sequencing (`cidan_ctrl`)

Instruction: `bbop dest, src1, src2, func`, where each address is
`{bank[2:0], row[13:0]}`. All three banks must be distinct and in the same
four-bank group, which is `bank[2]`. An instruction that breaks this is
rejected with a one-cycle `err` and no commands. The instruction port is
valid/ready, and ready is high only when the controller is idle.

Sequence and default timing, in DRAM cycles from acceptance, for a
two-operand function:

| cycle | command | rule |
|---|---|---|
| 1 | ACT src1 | tRP after the previous PREA |
| 7 | ACT src2 | tRRD = 6 (7.5 ns) |
| 13 | ACT dest | tRRD |
| 19 (,20) | evaluation cycle(s), `pe_ce` = 1 | tRCD = 12 (15 ns) after the last operand ACT |
| 25 | WR dest (array output → write drivers) | tRCD after the dest ACT |
| 41 | PREA, `done` | tRAS = 28 (35 ns) after the dest ACT; tWR = 12 after WR |

The operands are ready tRRD + tRCD = 22.5 ns after the first ACT. The second
evaluation cycle of XOR/XNOR/ADD is hidden by the dest row's tRCD, so every
two-operand function takes 41 cycles. COPY and NOT skip the src2 ACT and take
35. With tRP = 10, back-to-back instructions start every 51 (45) cycles. A
window of four ACTs per tFAW = 24 cycles is also enforced. It never binds at
these timings, because an instruction makes at most three ACTs and the next
one waits for tRAS and tRP; a testbench with shortened timings exercises it.

At 51 cycles (63.75 ns) per 8192-bit result row, one controller produces
about 8192 / 63.75 ns ≈ 128 Gbit/s of results. The controller runs one
instruction at a time, so the two groups do not overlap.

## Interfaces of the top (`cidan_top`)

* `instr_valid`, `instr_ready`, `instr` (`bbop_t`), `done`, `err`, `busy`
* `dram_req` (`dram_req_t`: command, bank, row), one command per cycle, to
  the banks
* `bank_row[group][bank]`: the N-bit open row of each bank, from the
  sense amplifiers
* `bank_we[group][bank]`, `bank_wmask[group]`, `bank_wdata[group]`: the
  write drivers; a masked write into the open row
* `col_wr_en`, `col_bank`, `col_addr`, `col_wdata`, `col_rdata`: K-bit
  column access for ordinary memory traffic. The conventional memory
  controller that uses it also sends its own ACT/PRE commands to the banks; it
  is not part of this RTL and must keep off the banks while `busy` is high.

## How far this follows the original design

Taken from the published description:
* the gate's form `[-2,1,1,1,1,1; T]` and T in {1, 2};
* the element's XOR inverters, L1/L2 and the feedback paths;
* the 4 + 8 + 2 = 14 control signals;
* one array of N = row-width elements per four banks, and the full-row
  write-back;
* the command sequences, one-cycle functions, adder schedule and timing
  values tRRD, tFAW, tRAS and (derived) tRCD and tRP.

Choices of this design:
* the control-word bit order and the split of the 8 enables;
* tie = 1 in the gate;
* same-edge L2 capture and flip-flop latches;
* the array clock enable;
* the XOR/XNOR second-cycle weights (see below);
* `ADD0` for a zero carry-in;
* write-back to the destination bank o (one source table writes "bank n"
  for two-operand functions, which contradicts its own ACT of bank o);
* valid/ready, rejection of illegal bank combinations, tWR = 15 ns, K = 8,
  and the group being `bank[2]`.
* the controller sits in the same top as the arrays. In the original system it
  sits on the host side, and its 14 control bits travel on extra lines of the
  memory bus. The logic is the same; only the placement of the bus boundary
  differs.

**XOR/XNOR.** The published function table's XOR and XNOR rows do not give
XOR and XNOR when worked out. For example, its second XOR cycle,
`-2·OP1 + ~I1 + I2 >= 2`, yields `~I1 & I2`. This design uses instead the
standard construction that the adder's sum step also uses:
`x + y - 2·(x & y) >= 1`.

Not modelled: DRAM refresh, the conventional memory controller, the host CPU's
instruction-set extension, and the DRAM banks themselves (a behavioural model
is in `tb/dram_bank_model.sv`). Energy, area and analog robustness of the
threshold gate are outside what RTL can show.

## Workloads

The evaluation workloads are bulk NOT/AND/OR/XOR on 1-4 Mbit vectors, the AES
MixColumns/AddRoundKey stages, graph matching index (AND and OR of two
adjacency rows), and Myers' bit-vector DNA matching. They all reduce to
row-wide instructions of the kinds above, issued row after row. A 4 Mbit
(or 4 MB) operand is 512 (4096) rows of 8192 bits, well within a
16384-row bank. A Facebook-size graph (4,039 vertices) puts one vertex in
one row, and its dense adjacency matrix is 2 MB of the chip's 128 MB. For the
DBLP and Amazon graphs (about 320,000 vertices) a vertex's adjacency row spans
about 39 DRAM rows. Comparing two vertices fits, but the dense matrix
(about 12.6 GB) does not, hence the graph partitioning the original study
applies. The summations of matching index, the rest of AES and the control
flow of the DNA algorithm run on the host. One caveat for the DNA algorithm:
it adds whole bit vectors, with the carry running along the vector. The adder
here carries per bit-line from one row to the next, so those operands would
have to be stored transposed.

## Simulation

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<n>`. Build one with plain Verilator, e.g.

```
verilator --binary --timing --assert rtl/cidan_pkg.sv rtl/tlg.sv rtl/tlpe.sv \
          rtl/tlpea.sv rtl/coldec_wdrv.sv rtl/cidan_ctrl.sv rtl/cidan_top.sv \
          tb/dram_bank_model.sv tb/cidan_top_tb.sv --top-module cidan_top_tb
./obj_dir/Vcidan_top_tb
```

| testbench | what it checks |
|---|---|
| `tlg_tb` | all 2^14 input/enable combinations against the threshold definition; hold with `ce` low |
| `tlpe_tb` | every function on random input positions; 16-bit bit-serial adds through L1 |
| `tlpea_tb` | row-wide functions against bitwise operators (N = 256); vertical 8-bit add of 256 numbers |
| `coldec_wdrv_tb` | column read data, column-write mask/data, full-row write-back |
| `cidan_ctrl_tb` | exact command sequence and cycle counts for all functions (41/35 cycles); the control words; rejection; an independent timing monitor (`tb/ctrl_timing_mon.sv`); tFAW stalls with shortened timing |
| `cidan_top_tb` | end-to-end with the bank model at N = 512. The instruction stream covers every function, both groups, a 5-bit carry chain across instructions with another group interleaved, backpressure, rejection and column traffic. The whole memory is compared with a reference, and each mechanism must occur. |
| `cidan_matching_index_tb` | the graph workload through the whole chip (N = 512): a random 512-vertex adjacency matrix, AND and OR of the rows of random vertex pairs, one-counts compared with an edge-list reference; then an 8-row bulk XOR issued row by row |

The bank model delivers inverted data until tRCD after an ACT, so a controller
that reads or writes early fails the end-to-end comparison.

**Sizes.** The top at its default size (two arrays of 8192 elements) passes
Verilator lint and slang elaboration. Its Verilator simulation model, however,
did not finish compiling in C++ within 20 minutes, so no end-to-end run at
N = 8192 is included. The end-to-end test runs at N = 512. The same test with
`localparam N = 2048` has also been run and passes; its model compiles in
about two minutes. Compile time grows faster than N, so N = 2048 is the
largest size simulated. Nothing in the RTL
depends on N beyond replication of identical elements, and the controller and
timing are identical at every N.
