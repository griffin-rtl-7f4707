# Griffin: a hybrid sparse GEMM core in SystemVerilog

Pruned neural networks have many zero weights. Their ReLU activations are often zero too. A
dense multiply–accumulate array spends a cycle on every one of these zero products. Griffin
is an INT8 matrix-multiply core that avoids much of that waste. When a multiplier's operand is
zero, it "borrows" a non-zero operand pair from a nearby position and computes that product
instead. The nearby position can be:

- a later K-step (time),
- the next multiplier lane, or
- the neighbouring processing element (PE).

The same hardware runs in four configurations:

- **dense**;
- **conf.B**: weights sparse, zero weights removed ahead of time;
- **conf.A**: activations sparse, zero activations skipped on the fly;
- **conf.AB**: both operands sparse.

A model therefore runs in whichever configuration matches its sparsity, without a separate
accelerator for each case.

This repository holds a register-transfer description of that core and self-checking
testbenches. The architecture follows the paper *Griffin: Rethinking Sparse Optimization for
Deep Learning Architectures*. This RTL is an independent implementation: where the paper gives
only the behaviour, the circuit here is one simple way to get that behaviour. Section 8
lists those choices.

## 1. The array and its numbers

The core computes one output tile `C[M0][N0] += A[M0][K] · B[K][N0]`. It is output-stationary:
each of the `M0 × N0` PEs owns one element of C and keeps it in a 32-bit accumulator. A PE has
`K0` INT8 multipliers ("lanes") and an adder tree. In dense operation, every cycle each PE
multiplies a K0-long slice of its A row with the matching slice of its B column. One such
slice is a **K-step**.

| quantity | value | origin |
|---|---|---|
| K0, N0, M0 | 16, 16, 4 (1024 MACs) | paper |
| A SRAM | 512 kB: 4 banks (one per PE row) × 8192 K-steps × 16 B | paper (size); banking is own |
| B SRAM | 128 rows × 16 columns × 16 lanes of INT8 (32 kB of values) + metadata | paper (size); metadata layout is own |
| ABUF depth | 9 K-steps | paper |
| BBUF depth | 3 rows | paper |
| AMUX / BMUX fan-in | 9 / 5 | paper |
| accumulator | 32 bit | own |
| clock | 800 MHz target (not checked here, no timing library) | paper |

## 2. Borrowing, in six directions

Think of A as indexed by (time step t, lane k, PE row m) and B as (t, k, PE column n). A zero
operand at one position can be replaced by a non-zero one at a position that is larger by a
small amount in one of these directions:

- **da1 / db1** — later K-steps of the same lane (look-ahead in time);
- **da2 / db2** — the next lane of the same K-step;
- **da3** — the next PE row (A is shared along a row);
- **db3** — the next PE column (B is shared along a column).

A product taken from another lane, row or column still belongs to its own output element. A
product taken from the next column belongs to the PE on the right. So each PE has a second
("extra") adder tree that sums such products and hands the sum to that neighbour. A product
taken from the next row goes to the PE below in the same way. In time the borrowing is free:
the product is simply computed early.

The configurations are the paper's chosen design points:

| mode | borrowing | what it needs in hardware |
|---|---|---|
| dense | none | one K-step per cycle |
| conf.B = Sparse.B(8,0,1) | db1 = 8, db3 = 1 | B is compressed offline; AMUX index comes from B metadata; only BBUF row 0 is used |
| conf.A = Sparse.A(2,1,1) | da1 = 2, da2 = 1, da3 = 1 | one arbiter per PE row; BMUX fan-in 5; extra adder tree feeds the next row |
| conf.AB = Sparse.AB(2,0,0,2,0,1) | da1 = 2 on top of a B compressed with db1 = 2, db3 = 1 | per-PE control unit combining B metadata with the A zero mask |

All four run with **shuffle** on. Sparse values tend to cluster in some lanes, which limits
borrowing along time. The shuffle spreads them by rotating each group of four consecutive
lanes by `t mod 4` at K-step t. A and B are rotated alike, so every dot product is unchanged.

## 3. How data is laid out

**A.** A SRAM bank m holds row m of A, one K-step (16 INT8) per word. Each bank is made of
16 interleaved sub-banks, with word t in sub-bank `t mod 16`. Because of this, any 9
consecutive K-steps can be read in one cycle, which fills the 9-entry ABUF window.

**B.** One B SRAM word holds one B row for all 16 columns: 16 × 16 entries of 13 bits plus a
4-bit header. An entry (`bent_t` in `griffin_pkg`) is

```
  [12:5] val   signed INT8 value
  [4:1]  aoff  K-step offset of the A operand (relative to this row's A position)
  [0]    col   0 = product for this column, 1 = product for the next column (db3)
```

The word layout is `{header[3:0], entry[N0-1][K0-1], ..., entry[0][0]}`, with entry (n,k) at
bit `(n*K0+k)*13`.

- In dense and conf.A mode B is stored raw. Row t is K-step t, only `val` is used, and the
  hardware shuffles it.
- In conf.B and conf.AB, B is stored **compressed**. Compression is done in software before
  loading, because weights are known in advance. Section 4 describes it.

The B SRAM has 4 interleaved sub-banks and returns a 3-row window each cycle.

Both SRAMs are addressed by the low bits of a 16-bit pointer, so they wrap around. A host can
therefore refill rows that have been consumed while a tile is still running. No testbench here
exercises that.

## 4. Compressed B and the advance header

The compressor walks the shuffled B matrix. Its position T is the first K-step that still has
unplaced non-zeros. For each slot (n, k) of the next compressed row it picks the first
non-zero not yet placed among:

```
  for d = 0 .. db1:             (K-step T+d)
     own column n, lane k
     next column n+1, lane k    (col = 1)
```

It stores that value with `aoff = d`. When the row is full, the compressor advances T past
every K-step whose non-zeros have all been placed, at most db1+1 steps. It writes that
advance into the row's 4-bit header. The header is what lets the hardware keep the A window
aligned with B:

- **conf.B** (db1 = 8): each cycle the core consumes one compressed row. A PE lane multiplies
  `ABUF[aoff][k]` with the entry's value. The A window then moves forward by the row's header.
- **conf.AB** (db1 = 2): BBUF holds 3 compressed rows. Row j starts `off[j]` K-steps after
  ABUF slot 0, where `off = 0, hdr0, hdr0+hdr1`. The A operand of entry (j, k) is therefore
  ABUF slot `off[j] + aoff`.

The behavioural compressor is the `compress` task in `tb/griffin_tb_body.svh`.

## 5. One cycle in each mode

**Dense** — every lane computes `ABUF[0][k] · BBUF[0][k]`, and both windows move one step.

**conf.B** — lane k of PE(m,n) computes `ABUF_m[aoff][k] · val` for BBUF entry (0, n, k).
The product goes to the own adder tree when `col = 0`. When `col = 1` it goes to the extra
tree, whose sum is added by PE(m, n+1).

**conf.A** — B is raw and A zeros are skipped at run time. Each PE row has one
`row_arbiter`, shared by all PEs of the row because they see the same A. For each lane k it
takes the first non-zero, not-yet-used A entry in this order:

```
  1. (t,   k)   own         3. (t+2, k)   da1 = 2    5. (t+2, k+1)  da1 + da2
  2. (t+1, k)   da1 = 1     4. (t+1, k+1) da2 = 1
  then, if none:  (t+1, k), (t+2, k) of the next PE row      (da3 = 1)
```

The lanes decide in order 0..15. A lane never takes an entry that an earlier lane has already
taken this cycle. The BMUX picks the B value that matches the chosen A entry. Products taken
from the next row go to the extra tree and are added by the PE below. A row's borrow never
takes an entry that the next row uses for itself in the same cycle, or has used before.

**conf.AB** — each PE has a `pe_ctrl` control unit. This is where the hardware does the most
work, in five steps:

1. **Filter by B.** For every BBUF entry (j, k) it finds the A slot `off[j]+aoff` and looks
   up that slot's zero mask. Only entries where both A and B are non-zero are effectual.
2. **Keep per-lane lists.** Each lane keeps one used bit per BBUF row.
3. **Pick with a priority encoder.** Each lane picks the first effectual, unused entry,
   nearest BBUF row first.
4. **Drive the datapath.** The choice sets the AMUX index, the BMUX index and the adder tree.
5. **Report finished rows.** The unit flags every BBUF row with no work left.

Products are summed as in conf.B, including db3 through the extra tree.

## 6. Keeping the array in step: windows, retirement and stalls

All PEs share one A window and one B window position. In conf.A and conf.AB a PE cannot retire
a K-step or BBUF row until every PE has finished it. The controller (`griffin_ctrl`) ANDs the
per-PE "row finished" flags. It then retires the **leading** finished rows:

- 0 to 3 per cycle;
- in conf.AB, A moves by the sum of the retired rows' headers.

Used bits shift along with the window. Retiring several rows at once (a multi-step advance) is
how conf.A reaches more than one K-step per cycle.

A cycle that retires nothing would be a synchronisation stall. This implementation counts such
cycles, but they cannot actually occur. The head row always has top priority in every lane, so
it is always finished at the end of its cycle. The cost of synchronisation shows up instead as
advances of 1 where a single PE would have managed more.

The controller is a four-state FSM:

| state | what happens |
|---|---|
| IDLE | on `start`: clear the accumulators and used bits |
| PRIME | one cycle for the synchronous SRAM read |
| RUN | windows advance every cycle until the tile is consumed |
| FIN | `done` is high for one cycle |

`cycles` reports the number of RUN cycles.

## 7. Modules

| file | role |
|---|---|
| `rtl/griffin_pkg.sv` | modes, sizes, B entry and lane-select structs |
| `rtl/shuffler.sv` | 4-lane local rotation (combinational) |
| `rtl/win_sram.sv` | banked SRAM returning a window of consecutive words; synchronous read, one cycle latency |
| `rtl/abuf.sv` | A window of one PE row: shuffle, end-of-tile mask, zero mask, the 9-input AMUX view (conf.A: own / next lane / next row) |
| `rtl/bbuf.sv` | B window of one PE column: shuffle of raw rows, end mask, the 5-input BMUX view |
| `rtl/row_arbiter.sv` | conf.A operand selection of one PE row |
| `rtl/pe_ctrl.sv` | conf.AB control unit of one PE |
| `rtl/pe.sv` | 16 MUX-fed multipliers, own and extra adder trees, accumulator |
| `rtl/griffin_ctrl.sv` | FSM, window pointers, retirement, row offsets, cycle counter |
| `rtl/griffin_top.sv` | the core: SRAMs, buffers, 4 arbiters, 64 control units, 64 PEs |

The datapath from the SRAM window registers to the accumulators is a single clock cycle:
select, multiply, both trees and accumulate. The paper does not describe a pipeline. A real
800 MHz implementation would add pipeline stages that this RTL does not have.

**Using the top.**

1. Reset.
2. Write A: `a_we[m]`, `a_waddr` = K-step, `a_wdata` = 16 bytes.
3. Write B: `b_we`, `b_waddr` = row, `b_wdata` = header + entries.
4. Pulse `start` with `mode`, `shuffle_en`, `k1` (K-steps) and `b_rows` (compressed rows)
   set. Keep them stable until `done`.
5. When `done` pulses, `c_out` holds the tile. The next `start` clears it.

For raw B the host writes row t = K-step t, unshuffled. For compressed B the host applies the
shuffle itself before compressing. Tiling over M, N and K, and adding partial sums across
K-chunks, is left to the host.

## 8. What follows the paper and what does not

Taken from the paper:

- the array size and the buffer depths and MUX fan-ins;
- the four configurations with their borrowing distances;
- the extra adder tree;
- one arbiter per row in conf.A;
- the control-unit steps of conf.AB;
- offline B compression with metadata;
- local 4-lane rotation shuffle;
- the SRAM sizes;
- output-stationary dataflow.

This design's own choices:

- **Direction of borrowing.** A lane borrows from index + 1 (the next lane, row or column),
  following the paper's definition of a replacement as `(x1+Δ1, x2+Δ2, x3+Δ3)`. The paper's
  drawings show the mirror case, borrowing from the previous row. Only the wiring differs.
- **Shuffle amount.** The paper's relocation formula, as printed, leaves an element where it
  is. This design rotates each group of four lanes by the K-step index mod 4.
- **Metadata width.** The paper asks for 4 bits of metadata per B element in conf.B. Here the
  A offset uses those 4 bits (0..8). The db3 column needs one more bit, so the entry carries
  5 bits of metadata. A per-row 4-bit advance header tells the hardware how far A moves.
- **Candidate order** of the conf.A arbiter and priority order of the conf.AB control unit.
  The paper fixes the candidate sets and fan-ins but not the order.
- **Banking.** SRAM sub-bank interleaving provides the window bandwidth. Stalls from SRAM
  bank conflicts or buffer fullness, which the paper's simulator models, do not arise in this
  design.
- **Timing details.** Single-cycle datapath, start/done handshake, 32-bit accumulators.
- **Window copies.** The neighbour row's ABUF entries are wired into the AMUX rather than
  copied into a second buffer.

Not built:

- the DRAM interface;
- the software compressor (only as a testbench model);
- power, area and frequency. These are physical results and cannot be reproduced from RTL.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each compares against a reference written
independently in the testbench, has a watchdog, and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_shuffler` | rotation rule for every lane; dot products are unchanged |
| `tb_win_sram` | random windows with concurrent writes; one-cycle read latency |
| `tb_abuf`, `tb_bbuf` | shuffle, end-of-tile mask, zero masks, every MUX view input, per mode |
| `tb_pe` | MUX selection, both adder trees, accumulator clear/enable, signed products |
| `tb_pe_ctrl` | selections, MUX indices, tree bit and finished flags over 800 cycles of random inputs, with rows retired as the controller does |
| `tb_row_arbiter` | two chained rows against a reference of the candidate order, including next-row borrowing |
| `tb_griffin_ctrl` | window pointers, offsets, retire counts, stall flag, done pulse and cycle count for all modes; fixed rates (dense k1 cycles, conf.B one row per cycle, conf.A 2 or 3 K-steps per cycle when flags allow) |
| `tb_griffin_top` | reduced core (2×4 PEs of 8 lanes), all modes, random sparsity, C compared with a golden GEMM |
| `tb_griffin_full` | the core at full default size |

The last two share `tb/griffin_tb_body.svh`. Both check every C element and the cycle count
of each mode:

- dense: exactly k1 cycles;
- conf.B: exactly one cycle per compressed row;
- conf.A and conf.AB: within the one-to-three-per-cycle bounds.

They also count how often each mechanism happened: each mode, db1, db3 with the extra tree,
da1, da2, da3, conf.AB look-ahead, multi-step advance and a non-zero shuffle rotation. A
mechanism that never happens counts as a failure. The stall counter is reported but not
required, for the reason given in section 6.

`tb_griffin_full` runs one K = 2048 tile in each mode. It then runs one tile at each
benchmark's weight/activation zero ratios from the paper: AlexNet, GoogleNet, ResNet50,
InceptionV3 and MobileNetV2 in conf.AB, and BERT in conf.B. Results on random data:

| tile (zero B / zero A) | cycles for 128 K-steps | speedup over dense |
|---|---|---|
| conf.B 81% / – | 49 | 2.6× |
| conf.A – / 45% | 90 | 1.4× |
| conf.AB 81% / 45% | 51 | 2.5× |
| conf.AB 89% / 53% (AlexNet) | 37 | 3.5× |
| conf.AB 82% / 37% … 79% / 46% (GoogleNet, ResNet50, InceptionV3) | 52–53 | 2.4–2.5× |
| conf.B 82% / – (BERT) | 44 | 2.9× |

The paper reports 3.5× for conf.B, 1.94× for conf.A and 3.9× for conf.AB over whole networks.
Uniform random zeros on a single tile are a harsher case than real pruned layers, so the
numbers here are lower.

To run a testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/griffin_pkg.sv \
          $(ls rtl/*.sv | grep -v griffin_pkg) tb/tb_griffin_full.sv \
          --top-module tb_griffin_full -Mdir obj -o sim && obj/sim
```

The full-size build takes about two minutes, and the simulation takes a few seconds.
