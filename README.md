# A Givens-rotation QR processing element with a reconfigurable dot-product datapath

QR factorisation with Givens rotations is usually done one element at a
time: each 2x2 rotation zeroes one entry below the diagonal, so an n x n
matrix needs n(n-1)/2 rotation steps, each one a square root, a division and
a handful of multiply-adds. The Generalized Givens Rotation (GGR) used here
zeroes a whole column below the diagonal in one step. It does so by turning
the rotation coefficients into partial sums of squares and into dot
products. That exposes long multiply-accumulate chains. A small
reconfigurable tree of multipliers and adders executes them one operation per
clock.

This repository holds synthesizable SystemVerilog for one processing element
(PE) built around that idea. The PE contains:

* a double-precision arithmetic unit whose core is a Reconfigurable Data Path
  (RDP) of four multipliers and three adders;
* a divider and a square-root unit;
* a register file;
* a local memory;
* three programmable instruction streams that move data and issue the
  arithmetic.

The PE factorises a matrix held in an external global memory and writes R
back to it.

The architecture follows "Efficient Realization of Givens Rotation through
Algorithm-Architecture Co-design for Acceleration of QR Factorization"
(Merchant et al.). That paper names the PE's blocks and the RDP's
configurations. Everything it leaves open is this design's own choice, and
the choices are listed below: latencies, instruction encodings, widths,
memory sizes, the hazard logic and the memory protocol.

## 1. The column step

Take the trailing m x m block whose first column is x = (x_0 .. x_{m-1}) and
whose other columns are y_j. One GGR step replaces it with a block whose
first column is (P_0, 0, .., 0). It works from the bottom up:

    q_{m-1} = x_{m-1}^2,   q_i = x_i^2 + q_{i+1}       (partial squared norms)
    P_i     = sqrt(q_i),   rP_i = 1 / P_i
    s_{i,j} = sum_{t>i} x_t * y_{t,j}                 (partial dot products)

The new rows are:

    row 0     : (x_0*y_{0,j} + s_{0,j}) * rP_0                 diagonal = P_0
    row r     : k_r * s_{r-1,j} - l_r * y_{r-1,j}    1 <= r <= m-2
                k_r = x_{r-1} * rP_{r-1} * rP_r,  l_r = P_r * rP_{r-1}
    row m-1   : c * y_{m-1,j} - s * y_{m-2,j}
                c = x_{m-2} * rP_{m-2},  s = x_{m-1} * rP_{m-2}

Each row r >= 1 is a two-term difference of products, which is the RDP's
DET2. Two such rows fit the RDP at once (DET2X2). The partial norms and
partial sums are two-, three- or four-term dot products (DOT2..DOT4). Per
column, only m square roots and m divisions are needed. The result satisfies
R'R = A'A. The diagonal comes out positive except for its last entry, whose
sign the last rotation leaves free. Applying the step to trailing blocks of
size n, n-1, .., 2 yields R.

## 2. Processing element

```
            prog_* (host)                      gm_* (global memory)
                 |                                     |
   +-------------+-------------------------------------+-------------+
   |  Load-Store CFU                                                  |
   |    global stream: instr_mem + ls_seq   GM  <->  LM port A        |
   |    local  stream: instr_mem + ls_seq   LM port B <-> register file|
   |    local_mem (2 ports)                                           |
   +-------------------------------------------+----------------------+
                                               | ls_rf_* (1 read, 1 write)
   +-------------------------------------------+----------------------+
   |  Floating Point Sequencer                                        |
   |    instr_mem -> decode/scoreboard -> reg_file (9R / 5W)          |
   |    fpau:  rdp (DOT1..DOT4, DET2, DET2X2)   fp64_div   fp64_sqrt   |
   +------------------------------------------------------------------+
            sync_barrier joins the three streams at SYNC
```

The three streams each run their own program from address 0 after `start`.
They meet at SYNC instructions. A barrier opens when every stream that has
not halted is waiting at one. A typical step works like this:

1. The global stream brings the matrix into the local memory (LM).
2. The local stream loads a column and the trailing columns into registers.
3. The FPS computes the step.
4. The local stream writes the new values back to LM.
5. At the end, the global stream stores R to global memory.

`done` rises once all three streams have executed HALT and every
outstanding result has been written.

Default sizes:

| parameter | default | meaning |
|---|---|---|
| `LM_DEPTH` | 16384 | local memory words (a 120 x 120 matrix is 14400) |
| `RF_DEPTH` | 256 | FP64 registers (fixed by `ggr_pkg::REG_AW = 8`) |
| `FPS_IMEM_DEPTH` | 4096 | FPS instructions |
| `GLS_IMEM_DEPTH` | 256 | global Load-Store instructions |
| `LLS_IMEM_DEPTH` | 1024 | local Load-Store instructions |

## 3. Reconfigurable Data Path (`rdp`)

The RDP has four multipliers. Their products feed two add/subtract units,
whose results feed one final adder. There is one pipeline register after
each level, so a result appears 3 clocks after its operands. A new operation
can start every clock.

| configuration | result |
|---|---|
| DOT1 | y0 = a0 b0 |
| DOT2 | y0 = a0 b0 + a1 b1 |
| DOT3 | y0 = (a0 b0 + a1 b1) + a2 b2 |
| DOT4 | y0 = (a0 b0 + a1 b1) + (a2 b2 + a3 b3) |
| DET2 | y0 = a0 b0 - a1 b1 |
| DET2X2 | y0 = a0 b0 - a1 b1, y1 = a2 b2 - a3 b3 |

Unused levels are bypassed by multiplexers rather than fed zeros. As a
result, each configuration returns exactly the correctly rounded value of
its expression in the order shown.

The configuration sits in a register. It may only be changed while the
pipeline is empty, and an assertion enforces this. The sequencer therefore
drains the RDP before it switches configuration. That is the price of a
mode change, and it is why a good program groups operations of one kind
together.

## 4. Floating Point Sequencer (`fps`)

The FPS issues at most one instruction per clock, in program order. Its
instruction is 84 bits wide: `{op[3:0], dst0[7:0], dst1[7:0], src[7:0][7:0]}`.
For RDP operations the operands are a_k = R[src[2k]] and b_k = R[src[2k+1]].

| op | code | action |
|---|---|---|
| NOP | 0 | nothing |
| DOT1..DOT4 | 1..4 | R[dst0] = dot product of 1..4 pairs |
| DET2 | 5 | R[dst0] = a0 b0 - a1 b1 |
| DET2X2 | 6 | R[dst0] = a0 b0 - a1 b1, R[dst1] = a2 b2 - a3 b3 |
| FDIV | 7 | R[dst0] = R[src0] / R[src1] |
| FSQRT | 8 | R[dst0] = sqrt(R[src0]) |
| CFG | 9 | load RDP configuration `src0[2:0]` (0 DOT1 .. 5 DET2X2) |
| SYNC | 10 | wait until all own results are written, then at the barrier |
| HALT | 11 | stop |

Hazards are handled by a scoreboard, which keeps one "pending" bit per
register:

* Issuing an operation sets the pending bit of its destination.
* The write-back clears it.
* An instruction stalls while any register it reads or writes is pending.
* FDIV and FSQRT also stall while their unit is busy.
* An RDP instruction whose configuration differs from the loaded one first
  waits for the RDP to drain. It then spends one clock reconfiguring and
  issues on a following clock. Explicit CFG instructions are therefore
  optional.

Write-back needs no arbitration. The two RDP results, the divider, the
square root and the Load-Store CFU each have their own register-file write
port. The register file has 9 read ports: 8 for RDP operands and 1 for the
Load-Store CFU.

Latencies, counted from the clock on which the instruction issues:

* RDP: 3 clocks.
* FDIV and FSQRT: 56 clocks, one result bit per clock, not pipelined.

Independent DOT4s therefore run at one per clock. The FPS testbench checks
that 64 of them finish in 68 clocks.

## 5. Load-Store CFU (`ls_cfu`, `ls_seq`)

Both Load-Store streams use the same 99-bit instruction:
`{op[2:0], len[15:0], addr_a[31:0], addr_b[15:0], stride_a[15:0], stride_b[15:0]}`.
Side A is global memory for the global stream and LM for the local stream.
Side B is LM for the global stream and the register file for the local
stream.

| op | action |
|---|---|
| LOAD | B[addr_b+off_b+i] = A[addr_a+off_a+i], i < len |
| STORE | A[addr_a+off_a+i] = B[addr_b+off_b+i], i < len |
| LOOP | start a loop of `len` passes (0 counts as 1). Each pass adds stride_a/stride_b to off_a/off_b |
| END_LOOP | end of the loop body (one loop level) |
| SYNC, HALT, NOP | as in the FPS |

Each stream moves at most one word per clock. The local stream never waits.
The global stream waits for the memory's grant.

Global memory port: a request (`gm_req`, `gm_we`, `gm_addr`, `gm_wdata`) is
accepted in a clock where `gm_gnt` is high. Read data must return on
`gm_rvalid`/`gm_rdata` exactly one clock after the granted read. The global
stream does not report itself at a barrier until its last read has
returned. An assertion flags read data that nobody asked for.

## 6. Floating-point arithmetic

All units are IEEE-754 double precision. They round to nearest, ties to
even. Subnormal inputs and results are flushed to zero. Infinities and NaNs
are produced for overflow, division by zero and square roots of negative
numbers, but they are not otherwise treated specially. The adder and
multiplier are combinational, and the RDP registers their outputs. The
divider and square root are radix-2 restoring designs. These are the
simplest units that give the required function. The paper uses a
floating-point unit from elsewhere and does not describe its internals.

## 7. Programming and observing the PE

1. Hold `start` low.
2. Write the three programs with `prog_we`, `prog_sel` (0 FPS, 1 global
   Load-Store, 2 local Load-Store), `prog_addr` and `prog_data`. The
   instruction goes in the low bits of `prog_data`.
3. Pulse `start`. `busy` stays high until `done`.

`stats` (type `ggr_pkg::pe_stats_t`) counts the following, all cleared by
`start`:

* cycles;
* RDP operations;
* dual DET2s;
* divisions;
* square roots;
* hazard stall cycles;
* RDP reconfigurations;
* barriers;
* clocks the global memory withheld its grant.

## 8. Where this design departs from the paper, and what it leaves out

* **Sizes, latencies and encodings are this design's choice.** The paper
  gives none of them: register count, memory depths, instruction formats,
  pipeline depths, the divider/root latency and the memory protocol.
* **SYNC and HALT are additions.** The paper does not say how the three
  instruction streams are kept in step. SYNC/HALT and the barrier are this
  design's answer.
* **LOOP has one level.** The paper shows LOOP/LOAD/STORE/END_LOOP programs
  but not their fields.
* **Only the PE is built.** The paper places the PE as a custom function
  unit in the tiles of the REDEFINE coarse-grained array and evaluates 2x2
  to 4x4 tile arrays. That array, its routers, arbiter, compute elements and
  network are described elsewhere and are not part of this RTL. The global
  memory is also outside the PE. The testbenches use a behavioural model of
  it (`tb/gm_model.sv`) that withholds grants at random.
* **Programs are not provided as firmware.** The end-to-end testbench
  generates unrolled programs for each matrix. Its register allocation
  keeps a whole column step in registers, which limits it to about 8 x 8.
  Larger matrices, up to the 120 x 120 that fits in LM, need programs that
  stream the step through the registers and loop or re-load the FPS
  program. Such programs are not provided, and no size above 8 x 8 has been
  simulated.

## 9. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each
one has a watchdog. For example, with Verilator 5, from the repository root:

```
verilator --binary --timing --assert --top-module tb_pe -y rtl -y tb +libext+.sv \
    rtl/ggr_pkg.sv tb/tb_fp_util.sv tb/tb_pe.sv
./obj_dir/Vtb_pe
```

| testbench | what it checks |
|---|---|
| `tb_rdp` | every configuration against reference double arithmetic, bit-exact; 3-clock latency with one operation per clock; cancellation |
| `tb_fp64_div`, `tb_fp64_sqrt` | random operands and special cases, bit-exact; 56-clock latency |
| `tb_fpau` | issue and write-back of all units; register tags; latencies |
| `tb_reg_file`, `tb_local_mem`, `tb_instr_mem` | random reads and writes on all ports against a model |
| `tb_ls_seq` | LOAD/STORE/LOOP address sequences, SYNC, HALT, a randomly stalling transfer handshake |
| `tb_ls_cfu` | both streams against a random-stall global memory |
| `tb_fps` | a 400-instruction random program full of dependences, bit-exact against a sequential model; stalls, reconfigurations, barriers; one-per-clock issue |
| `tb_pe` | full QR of random 4 x 4 and 8 x 8 matrices at default parameters |

For `tb_pe`, R is bit-exact against a shadow model and satisfies R'R = A'A.
The testbench requires that every mechanism occurred: all RDP
configurations, DET2X2, FDIV, FSQRT, hazard stalls, reconfigurations,
barriers and global-memory waits.

For reference, the 4 x 4 factorisation takes 763 clocks (55 RDP operations,
24 reconfigurations). The 8 x 8 takes 4177 clocks. These numbers are
dominated by the 56-clock divider and square root, which are not pipelined
and sit on the critical path of every column step.
