# CogSys neurosymbolic accelerator in SystemVerilog

Neurosymbolic reasoning models mix two kinds of work. Neural work is
ordinary GEMM and convolution layers. Symbolic work is vector-symbolic
algebra on long hypervectors (d around 1000). The most expensive symbolic
primitive is the circular convolution

    C[j] = sum_k A[k] * B[(j - k) mod d]

and its mirror, the circular correlation `C[j] = sum_k A[k] * B[(k - j) mod d]`.
A GEMM engine can only compute this after the host expands B into a d x d
matrix of its rotations, which costs d times more memory traffic. CogSys
avoids that expansion. Each processing element (the *nsPE*) can run in
either of two modes:

- as a weight-stationary systolic MAC, for neural layers;
- as a cell of a *bubble-streaming* pipeline, which rotates B through the
  array at half the speed of the partial sums. Circular convolution then
  reads each operand vector only once.

This RTL implements the accelerator described in the CogSys paper (Wan et
al., "CogSys: Efficient and Scalable Neurosymbolic Cognition System via
Algorithm-Hardware Co-Design"). Its default configuration is the paper's
main one:

- 16 cells of 32 x 32 nsPEs, 16,384 INT8 MACs in all;
- a 512-lane SIMD unit;
- a shared 256 kB SRAM A and a distributed 4 MB SRAM B, both double-buffered;
- a result SRAM C per cell;
- an in-order command scheduler and a DMA memory controller.

Where the paper is silent, this design makes its own choices. The last
sections list them.

## Block structure

```
 host commands ──► workload_scheduler ──┬─► compute_array (16 × ns_cell + bs_sequencer)
                                        │        ▲ SRAM A (shared, 1 read port, 32 lanes)
                                        │        ▲ SRAM B slice per cell (32 lanes)
                                        │        ▼ tagged result rows
                                        ├─► simd_unit (512 lanes) ◄─► SRAM C slice per cell
                                        │        └─► requantized rows back into SRAM B
                                        ├─► mem_ctrl ◄─► DRAM bus (ports)
                                        └─► bank swaps of SRAM A / B / C
 mapping query ──► st_map_select (spatial vs temporal estimate)
```

| file | contents |
|---|---|
| `rtl/cogsys_pkg.sv` | widths, PE modes, command structs and opcodes |
| `rtl/ns_pe.sv` | one nsPE |
| `rtl/ns_cell.sv` | a ROWS x COLS cell with column-top muxes, GEMM skew and deskew |
| `rtl/bs_sequencer.sv` | the per-cell controller: phases, SRAM addresses, output tags |
| `rtl/compute_array.sv` | 16 cells, their sequencers, chain links, SRAM A arbiter |
| `rtl/dbuf_sram.sv` | two-bank double-buffered SRAM (used for A, B and C) |
| `rtl/simd_unit.sv` | result drain and accumulation; vector and reduction commands |
| `rtl/workload_scheduler.sv` | command queue and in-order dispatcher |
| `rtl/mem_ctrl.sv` | DMA between DRAM and the idle banks |
| `rtl/st_map_select.sv` | latency and bandwidth formulas for spatial/temporal mapping |
| `rtl/cogsys_top.sv` | the accelerator |

All registers use one clock (800 MHz in the chip) and an asynchronous
active-low reset. Memory arrays are not reset.

## The nsPE

Each PE has four registers:

| register | role |
|---|---|
| `a` (stationary) | one element of A, or one GEMM weight |
| `pass` (passing) | the "bubble": holds a streamed B value for one cycle |
| `b` (streaming) | the operand multiplied this cycle |
| `acc` (partial sum) | the running sum |

Two links run down each column:

- `top_in_a` carries the stationary value during loading and the partial
  sum during compute.
- `top_in_b` carries B.

A third link, `left_in`, runs along the rows and carries GEMM activations.

| mode | a | pass | b | acc |
|---|---|---|---|---|
| HOLD | keep | keep | keep | keep |
| LOAD | `top_in_a` | `top_in_b` | `pass` | keep |
| GEMM | keep | keep | `left_in` | `a*b + top_in_a` |
| CONV | keep | `top_in_b` | `pass` | `a*b + top_in_a` |

In LOAD mode a PE passes its own `a` downwards, so a column loads like a
shift register. In the other modes it passes `acc` downwards. The
B pipeline keeps shifting during LOAD, so the first B values can enter
before loading ends. HOLD is this design's addition: it freezes a cell
while its chain waits for SRAM A.

## Bubble streaming: how a column computes a circular convolution

Take one column of M PEs with A[k] held in PE k, counting from the top.
The two streams move at different speeds:

- **B** enters at the top, one element per cycle. It passes through two
  registers per PE (`pass`, then `b`), so it moves down one PE every two
  cycles.
- **Partial sums** move down one PE per cycle.

Follow one partial sum as it travels down. At each PE it meets a B element
one position *earlier* in the stream than at the PE above. So the sum that
leaves the bottom is `sum_k A[k] * S[m - k]` for some stream position m.
Stream element S[m] = B[(m - offset) mod d] therefore gives exactly the
circular convolution. Reversing the stream order,
S[m] = B[(offset - m) mod d], gives the correlation. Nothing in the
datapath changes between the two; only the read order of SRAM B does.

For one pass, `bs_sequencer` steps a counter t:

| t | phase |
|---|---|
| 0 … M-1 | **Load.** SRAM A rows are read last element first, so after M cycles PE k holds A[k]. |
| M-2 … 2M+d-4 | **Stream.** M+d-1 B elements enter, wrapped circularly. They start two cycles before loading ends, so that the first element reaches PE 0's `b` as its `a` settles. |
| 3M-1 … 3M+d-2 | **Drain.** Output j leaves the bottom of the column at t = 3M-1+j. |

A pass therefore takes **T = 3M + d − 1 cycles**, which is the paper's
latency figure. For d = M this is 4d − 1. Outputs are registered once
more before they reach SRAM C, so `busy` lasts T + 1 cycles. The
testbenches check this count exactly.

Exact stream orders, for fold f (see below):

- convolution: `S[m] = B[(m − (M−1) − f·M) mod d]`
- correlation: `S[m] = B[(M − 1 − m + f·M) mod d]`

Every column of a cell runs its own convolution on its own lane of SRAM A
and SRAM B. A 32-column cell thus computes 32 independent convolutions at
once (the paper's column-wise parallelism).

### Temporal folding (d > M)

When d exceeds the column length, the sequencer runs ceil(d/M) passes
(folds). Fold f loads A[f·M … f·M+M−1] and zeros past d, then streams
B starting at the matching offset. Results of folds after the first are
tagged `acc`. The SIMD unit's drain path then adds them into the SRAM C
row instead of overwriting it. Total time: ceil(d/M) × (3M + d − 1).

### Scale-up chains

A cell command names a head cell and a chain length. The cells
head … head+chain−1 then behave as one column of M = 32·chain PEs:

- Every cell after the head takes its column tops from the cell above
  (`chain_in`).
- Only the head reads SRAM A. In CONV/CORR only the head reads SRAM B;
  in GEMM every cell reads its own slice (see GEMM mode).
- The tail tags the outputs, which go to the tail's SRAM C slice.

All sequencers of a chain step the same counter. Followers take their
advance enable from the cell above, so a stall of the head freezes the
whole chain. All 16 cells chained give M = 512. Sixteen single-cell
commands give 16 independent arrays. Mixed partitions give the paper's
scale-up/scale-out combinations: for example, one 4-cell GEMM chain
next to twelve single cells running convolutions.

## GEMM mode

GEMM is a standard weight-stationary systolic pass:

1. A tile of M × 32 weights is loaded from SRAM A rows
   `a_base … a_base+M−1`, like the A operand above.
2. Input vector v is read from SRAM B. Its 32 lanes feed the 32 rows of a
   cell, through an input skew of r cycles on row r. In a chain, each cell
   p reads its own SRAM B slice at t = M + 32·p + v. So a 512-element input
   vector is spread across the 16 slices.
3. Column c of the result is delayed by 31−c cycles (output deskew), so a
   whole output row arrives together. It is tagged at t = 2M + 32 + v.

A pass over n vectors takes 2M + 32 + n cycles. Because the SRAM B lanes
serve as columns in CONV mode and as rows in GEMM mode, a cell must be
square: `ns_cell` stops elaboration if ROWS ≠ COLS.

## Shared SRAM A and stalls

SRAM A has one read port of 32 INT8 lanes, shared by all cells. Each
chain's head requests the port for the whole of its load phase. A
fixed-priority arbiter grants it:

- the lowest cell index wins;
- the grant is kept until the request drops.

A head that is not granted holds its chain in HOLD mode and raises
`sram_a_stall`.

When many cells start together, the loads are therefore serialized. Each
waits up to M cycles per earlier head. The streaming phase of one cell
overlaps the loading of the next. The paper does not give the port count
or the arbitration policy.

## Memories

| memory | organisation (default) | compute side | DMA side |
|---|---|---|---|
| SRAM A | 2 banks × 4096 rows × 32 B = 256 kB, shared | array reads | loads from DRAM |
| SRAM B | 16 slices × 2 banks × 4096 rows × 32 B = 4 MB | array reads; SIMD writes requantized rows | loads from DRAM |
| SRAM C | 16 slices × 2 banks × 1024 rows × 32 × 32 bit = 4 MB | result drain and SIMD read/write | stores to DRAM |

Each memory is a `dbuf_sram`: two banks, each with one read port and one
write port. The compute side always sees the active bank and the DMA side
the other one. A `CMD_SWAP` pulse exchanges them. This is how the next
operands load, and the last results unload, while the array computes. Reads
return data one cycle after they are issued.

The sizes of SRAM A and B are the paper's. The paper gives no size for the
result memory. The 4 MB chosen here holds one d = 1024 result per column
per bank. The paper's 4.5 MB on-chip total matches A + B alone, so this
C is an addition of this design.

## SIMD unit

The SIMD unit has 512 lanes: lane L sits under column L mod 32 of cell
L / 32. It has two jobs.

**Result drain.** This is always active while no vector command runs. A
tagged result row is registered, then written to the cell's SRAM C slice.
If its tag asks for accumulation, the old row is read in the same cycle
and the sum is written. This accumulation implements temporal folding and
`acc` commands. A vector command has priority over the drain: results that
arrive while one runs are lost. The host must therefore separate the two
with `CMD_WAIT`.

**Vector commands.** These process `rows` consecutive SRAM C rows across
all 512 lanes. Each row takes 2 cycles (unary commands) or 3 cycles
(binary commands: read s0, read s1, execute).

| op | effect per lane |
|---|---|
| ADD, SUB, MUL, MAX | `C[dst+i] = C[s0+i] op C[s1+i]` |
| SIGN, RELU | `C[dst+i] = f(C[s0+i])` |
| SCALE | `C[dst+i] = (C[s0+i] · imm) >>> shift` |
| REQ8 | `B[dst+i] = sat8(C[s0+i] >>> shift)` into the cell's SRAM B slice (compute-side bank) |
| RSUM | `red_value = Σ` over all lanes and rows |
| RMAX | `red_value = max`; `red_index = row·512 + lane` of the first maximum |

REQ8 closes the loop. Results of one operation become the INT8 operand of
the next without a trip to DRAM.

The paper also lists division, exp/log/tanh, normalization and softmax
circuits. Those are not built here, because their number formats and
approximations are not given.

## Commands and scheduling

The paper computes the schedule offline: the host decides which cells run
which kernel, and in what order. The chip therefore only needs an in-order
dispatcher. `workload_scheduler` queues 16 commands (valid/ready) and
issues the head command as soon as the units it needs are free:

| kind | fields | issues when |
|---|---|---|
| `CMD_CELL` | op (CONV/CORR/GEMM), head, chain, len (d or vector count), a_base, b_base, c_base, acc | every cell of the chain is idle |
| `CMD_SIMD` | op, s0, s1, dst, rows, imm, shift | SIMD idle |
| `CMD_DMA` | to_dram, mem (A/B/C), slice, dram_addr, sram_addr, rows | DMA idle |
| `CMD_SWAP` | swap_a, swap_b mask, swap_c mask | at once |
| `CMD_WAIT` | cell mask, simd, dma | retires when all named units are idle |

A command waits only for its own units. Work on different cells, the SIMD
unit and DMA transfers therefore overlaps: a symbolic kernel can run on
some cells while a neural layer runs on others and the DMA prefetches.
Data dependencies are the host's job, expressed with WAIT:

- WAIT for the DMA before swapping in the banks it filled;
- WAIT for the cells before running SIMD commands on their results;
- WAIT for the SIMD unit before a cell reads rows that REQ8 wrote.

The `stall_cycles` and `issued` counters expose how often the queue head
waited and how many commands were issued.

## Memory controller

`mem_ctrl` moves `rows` rows between consecutive DRAM words and SRAM rows,
always through the DMA-side bank. One DRAM word (1024 bits) carries one
SRAM row:

- an A or B row (32 × INT8) uses the low 256 bits;
- a C row (32 × 32 bit) fills the word.

The DRAM bus is:

- a request channel: valid/ready, write flag, word address, write data;
- an in-order read-response channel.

Loads keep read requests going back to back. Stores read a row, then hold
the write request until it is accepted. The paper only names the memory
controller, so the whole bus format is this design's.

## Spatial/temporal mapping estimate

For k convolutions of dimension d on N arrays of M PEs, with
T = 3M + d − 1 per pass, `st_map_select` computes the paper's formulas:

- temporal mapping (one convolution per array):
  C_T = ceil(k/N) · ceil(d/M) · T cycles, with (d + M)·N reads per T;
- spatial mapping (one convolution folded over all arrays):
  C_S = k · ceil(d/(N·M)) · T cycles, with 2d reads per T.

It reports both values and which is faster; on a tie it picks spatial. For
the paper's examples it picks temporal:

- N = 32, M = 512, d = 1024, k = 210 (NVSA);
- the same with k = 2575 (LVRF).

The host applies the decision through the commands it issues. Temporal
mapping is one CONV command per cell (or chain). Spatial mapping means the
host places the B rotation each fold needs in that cell's SRAM B slice,
then adds the per-cell partial results with SIMD ADD.

## Departures from the paper and limits

- **SRAM C size and placement** are this design's; see Memories.
- **SIMD:** division, exp/log/tanh, norm and softmax are missing.
  Vector commands and the result drain cannot overlap.
- **Stochastic noise injection** is an algorithm-level step with no
  described hardware. It is not built; the host can add noise to operands.
- **Scale-up/scale-out fabric:** the paper names five mux schemes. Here
  they come from one mechanism: vertical chaining of consecutive cells plus
  independent cells. Chains run top to bottom only, and results leave
  from the tail cell.
- **Spatial mapping** has no dedicated hardware beyond the estimator; see
  the previous section.
- **DRAM bandwidth:** the chip figure quotes 700 GB/s. The single 1024-bit
  port here gives 102 GB/s at 800 MHz.
- **Precision:** INT8 operands and 32-bit accumulators. The accumulator
  width is this design's; the paper gives none.
- Every timing detail beyond the per-pass latency T is this design's
  reading of the dataflow:
  - the phase split;
  - the two-cycle stream lead;
  - the registered tags;
  - the GEMM latency.

## Simulation

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. Build one with
Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/cogsys_pkg.sv rtl/*.sv \
    tb/dram_model.sv tb/tb_cogsys_top.sv --top-module tb_cogsys_top -Mdir obj -o sim
./obj/sim
```

Add `-Wno-fatal` to keep going past lint warnings such as unused bits.

| testbench | what it checks |
|---|---|
| `tb_ns_pe` | random mode and operand sequences against a reference model of the four registers |
| `tb_ns_cell` | 3 × 3 cell: the d = 3 correlation example worked by hand (A1B1+A2B2+A3B3, A1B3+A2B1+A3B2, A1B2+A2B3+A3B1), convolutions, GEMM |
| `tb_bs_sequencer` | address, zero-padding and tag sequences of a head and a follower; cycle counts with stalls |
| `tb_compute_array` | 2 cells of 4 × 4: conv and corr for d = M, d < M, d > M, chains, GEMM, two cells contending for SRAM A; cycle count ceil(d/M)·T |
| `tb_dbuf_sram` | random traffic on both sides with swaps |
| `tb_simd_unit` | drain with accumulation and every vector command |
| `tb_st_map_select` | the paper's NVSA/LVRF cases and random queries |
| `tb_workload_scheduler` | in-order issue, blocking on busy cells, overlap, WAIT, SWAP, back-pressure |
| `tb_mem_ctrl` | loads and stores against a DRAM model with random back-pressure |
| `tb_cogsys_top` | end-to-end program at 2 cells of 4 × 4 (below) |
| `tb_cogsys_full` | the default 16 × 32 × 32 design (below) |
| `tb_workload_vsa` | the symbolic kernel of NVSA and LVRF at its real size (below) |

`tb_cogsys_top` runs a complete host program. It:

1. loads A and B over DMA and swaps the buffers;
2. runs a 3-fold convolution on cell 0, a GEMM on cell 1 and a DMA prefetch
   at the same time;
3. swaps A, then runs a correlation on a 2-cell chain and a 2-fold
   correlation;
4. runs SIMD ADD/MAX/RELU/RSUM/RMAX and REQ8;
5. runs two convolutions on the requantized data;
6. swaps C and stores every result to DRAM.

It checks every stored word and both reductions. It also counts each
mechanism and fails if any never happened:

- SRAM A stall, scheduler stall and queue back-pressure;
- fold accumulation and the scale-up chain;
- CONV, CORR and GEMM;
- bank swap and DMA overlapping compute;
- two cells active at once;
- reductions and INT8 saturation;
- the mapping estimate.

`tb_cogsys_full` instantiates `cogsys_top` with every parameter at its
default. It:

1. loads SRAM A and all 16 SRAM B slices;
2. runs 16 concurrent d = 32 convolutions, one per cell (temporal mapping);
3. runs a 512-lane RSUM;
4. runs a GEMM on the full 16-cell chain (M = 512);
5. stores the results.

It checks results, the reduction, and the 128-cycle busy time of cell 0.
Compiling the full design takes Verilator about 11 minutes; the simulation
itself takes seconds.

`tb_workload_vsa` runs the vector-symbolic kernel of the NVSA and LVRF
models at their real dimension, d = 1024. It uses two full-size 32 × 32
cells:

- cell 0 binds 32 vector pairs by circular convolution;
- cell 1 unbinds 32 other pairs by circular correlation;
- both share the SRAM A port.

Each operation takes 32 folds. All 65,536 outputs are compared with a
direct evaluation. The busy time of cell 0, without its SRAM A waits, must
be exactly 32 × 1119 + 1 cycles.

To change the size, override `NCELLS`, `ROWS` (= `COLS`), `A_DEPTH`,
`B_DEPTH`, `C_DEPTH` and `QDEPTH` on `cogsys_top`. Command address fields
are 12 bits (SRAM A/B rows) and 10 bits (SRAM C rows). Deeper memories
need wider fields in `cogsys_pkg`.
