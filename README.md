# A subsequence-DTW accelerator for selective nanopore sequencing

Nanopore sequencers can eject a DNA strand from a pore while it is still being
read ("Read Until"). A strand can be rejected early only if the first second or
so of its raw current signal can be placed on a target reference quickly. One
way to place it is to compare the signal directly with a synthetic signal of the
reference, using **subsequence dynamic time warping (sDTW)**. sDTW finds where
in a long reference signal `Y` (N samples) a short query `X` (M events) fits
best. Stretching and compressing in time are allowed. In software it costs
O(M·N) time and memory, and that is too slow for real-time selection on
small devices.

This RTL is the FPGA side of such a system, following the accelerator in
*Efficient Real-Time Selective Genome Sequencing on Resource-Constrained
Devices* (HARU), which targets a Zynq UltraScale+ MPSoC. A processor handles
the rest: event detection, normalisation and the final keep/reject decision.
It loads a reference signal into on-chip memory once. For each read it then
streams in a query of **M = 250 events** and gets back two numbers: the
**end position** of the best alignment in the reference and its **score**
(the accumulated distance). The accelerator needs two things to do this:

* **O(M) memory.** Read Until needs only where the alignment ends, so no
  backtracking is done. Only the two most recent cost columns are kept, not the
  full M×N matrix.
* **O(N+M) time.** A chain of M processing elements (PEs) evaluates one
  anti-diagonal of the cost matrix per clock cycle. A search over N reference
  samples takes **N+M−1 cycles** in the PE chain.

## The recurrence

With `x[1..M]` the query and `y[1..N]` the reference, the cost matrix is

    C[i][j] = |x[i] − y[j]| + min( C[i−1][j], C[i−1][j−1], C[i][j−1] )
    C[0][j] = 0          (the query may start anywhere in the reference)
    C[i][0] = infinity

The result is `score = min_j C[M][j]`, and `position` is the first `j` where
that minimum occurs. The distance is the absolute difference (Manhattan
distance), so each cell needs a subtract, an absolute value, a three-way
minimum and an add.

## How the PE chain sweeps the matrix

This section is the key to the design.

PE `k` (0-based) owns query row `i = k+1` and holds `x[k+1]` for the whole
search. Reference samples enter PE 0 one per cycle. Each PE passes its sample
to the next PE through a register, so a sample reaches PE `k` exactly `k`
cycles after PE 0. In cycle `t` (counting from the cycle `y[1]` reaches PE 0),
PE `k` therefore computes

    C[k+1][ t−k+1 ]

and all M PEs together compute one anti-diagonal. Figure it as a slanted column
sliding along the reference:

    cycle t:   PE0 → C[1][t+1]   PE1 → C[2][t]   PE2 → C[3][t−1]   …

The three neighbours of PE `k`'s cell were all produced in the previous two
cycles:

| neighbour | cell            | produced by | when     | held in     |
|-----------|-----------------|-------------|----------|-------------|
| `n`       | `C[k][j]`       | PE k−1      | cycle t−1 | `L1[k−1]`  |
| `nw`      | `C[k][j−1]`     | PE k−1      | cycle t−2 | `L2[k−1]`  |
| `w`       | `C[k+1][j−1]`   | PE k        | cycle t−1 | `L1[k]`    |

So the core keeps two register arrays. `L1` holds every PE's output from the
last cycle, and `L2` holds it from the cycle before. Every cycle the PE
outputs (the "Cost" array) move into `L1` and `L1` moves into `L2`. PE 0 reads
`n = nw = 0`, the zero top row. `L2[M−1]` would only feed a PE M, which does not
exist, so `L2` has M−1 entries.

**The infinite left border.** Each reference sample carries a valid bit
through the chain. A PE with no valid sample outputs the all-ones cost
(infinity). Before the first sample reaches PE `k`, its `L1`/`L2` neighbours
are therefore infinite, which is exactly `C[i][0] = ∞`. No special case is
needed. At the start of each search, `clear` empties the chain and sets `L1`
and `L2` to infinity.

**Draining the chain.** The last PE produces `C[M][j]` for `j = 1 … N` in
cycles `M−1 … N+M−2`, one per cycle. The score updater compares each one with
the best so far. A strictly smaller cost replaces the score and records the
position, so the earliest position wins a tie. The position is counted from 0:
it is the reference memory address of the sample where the alignment ends.

**Contiguity.** The wavefront is correct only if the reference arrives
without gaps: one valid sample per cycle for N cycles. The sequencer reads the
on-chip memory every cycle, so this always holds inside the accelerator. If you
reuse `core_sdtw` elsewhere, you must feed it the same way.

## Number formats

* Samples are **16-bit signed fixed point**. The host z-score-normalises both
  the reference and the events and multiplies them by **2^5 = 32** (so 5
  fractional bits). The hardware only subtracts and compares, so it does not
  depend on the scale.
* Costs are **32-bit unsigned**. The all-ones value `COST_INF` is reserved
  as infinity. The adder wraps on overflow, as a plain adder does. At scale
  2^5 and 250 events, real costs stay many orders of magnitude below 2^32.
  The published evaluation reports that accuracy collapses from overflow only
  at scaling factors above 2^7.

## Blocks

The module names below are the ones in `rtl/`. The data flow follows the
published accelerator diagram.

    AXI4-Stream in ─► axis_slave ─┬─► ref_mem (reference, block RAM) ─► y ─┐
                                  └─► query_buffer (x[0..M-1]) ───────────┤
                                                                          ▼
    AXI4-Lite ─► axil_slave ─► sdtw_control ──clear/read──►  core_sdtw (M × sdtw_pe, L1, L2)
                     ▲              │                                     │ C[M][j]
                     └── sdtw_status ◄──────────── score_updater ◄────────┘
                                    │ position, score
                                    ▼
                             data_sink_fifo ─► axis_master ─► AXI4-Stream out

| module | role |
|---|---|
| `haru_pkg` | sample/cost types, `COST_INF`, default sizes, register map, status fields, FSM states |
| `sdtw_pe` | one cell per cycle: `|x−y| + min3(n,nw,w)`; "previous y" register to the next PE |
| `core_sdtw` | chain of M PEs plus the `L1`/`L2` arrays |
| `query_buffer` | M query samples, shifted in from the stream, one per PE |
| `ref_mem` | reference signal, 295,000 × 16 bit, synchronous read |
| `score_updater` | position counter, comparator, score and position registers |
| `axis_slave` | input stream; routes samples to `ref_mem` or `query_buffer`; captures N |
| `sdtw_control` | CTRL register, search state machine, result pushes |
| `sdtw_status` | status/result registers and the register read mux |
| `axil_slave` | AXI4-Lite protocol to a simple register port |
| `data_sink_fifo` | 16-word result FIFO |
| `axis_master` | output register stage; two-word result packets |
| `haru_top` | everything wired together; the only ports are the three AXI buses |

## Host interface

### Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0 START (self-clearing), bit 1 REF_MODE (1 = input stream is reference, 0 = query). Reads back REF_MODE in bit 1. |
| 0x04 | STATUS | R | bit 0 busy, bit 1 done (sticky, cleared by START), bit 2 query loaded (M samples), bit 3 reference overflow, bit 4 result FIFO empty, bit 5 result FIFO full |
| 0x08 | REF_LEN | R | N, the length of the last reference packet (clipped to the memory depth) |
| 0x0C | POSITION | R | end position of the last finished search (0-based), all ones if none |
| 0x10 | SCORE | R | score of the last finished search |
| 0x14 | QCOUNT | R | query samples loaded (saturates at M) |
| 0x18 | CONFIG | R | M, the number of PEs in this build |

The result registers are captured when a search finishes, so they can be read
while the next search runs.

### Streams

* **Input**: one sample per beat in `TDATA[15:0]`. `TLAST` ends a packet.
  With REF_MODE = 1, beat k of a packet goes to reference address k, and N
  becomes the packet length. Samples beyond the memory depth are dropped and
  raise the overflow flag. With REF_MODE = 0, the beats shift into the query
  buffer; a packet longer than M leaves its last M samples. `TREADY` is low
  while a search runs. A DMA can therefore queue the next query during a
  search: it is accepted as soon as the search ends.
* **Output**: each search produces one two-beat packet: `position`, then
  `score` with `TLAST`. If the output is blocked, the FIFO holds 8 results.
  After that, the sequencer waits with the result ("stall") until there is
  room. It waits without losing anything and stays busy meanwhile.

### A typical sequence

1. Write CTRL = 0x2 and stream the reference (forward and reverse strand
   concatenated). Check REF_LEN.
2. For each read: write CTRL = 0x0, stream its 250 events, write CTRL = 0x1,
   then read the two-word result from the output stream, or poll STATUS.done
   and read POSITION and SCORE. There is no interrupt.

## Timing

Counted from the cycle in which the AXI4-Lite slave presents the START write:

| cycle | what happens |
|---|---|
| 0 | START accepted, N latched |
| 1 | `clear`: chain emptied, L1/L2 := ∞, score := ∞, position := −1 |
| 2 … N+1 | reference addresses 0 … N−1 read, one per cycle |
| 3 … N+M+1 | PE chain busy: N+M−1 cycles, first sample in PE 0 to `C[M][N]` |
| N+M+2 | position pushed to the FIFO |
| N+M+3 | score pushed, `done` |

The data path has an initiation interval of 1. At 100 MHz a 250-event query
against a 59,806-sample reference (the SARS-CoV-2 genome, both strands) takes
60,059 cycles = 0.60 ms. Against the 257,830-sample RFC1 region it takes
258,083 cycles = 2.58 ms. Streaming the query and the host software add to
this.

These numbers match the published system results. The accelerator alone
bounds the SARS-CoV-2 rate at about 1,660 reads/s. The published complete
system reaches 1,074 reads/s (0.94 ms per read), with sDTW just under 64 % of
the run time, and 0.60 ms / 0.94 ms is 64 %. Sending a 250-event query takes
about 3 µs at the reported 330 MB/s, which is negligible. The reference is
loaded once, not per read.

## What the sizes allow

* The reference memory holds 295,000 samples. The published design quotes
  5.1 Mb of block RAM and a maximum of "295 kilobases". 295,000 × 16 bit =
  4.7 Mb fits that RAM, so the limit is read as 295,000 samples. Both
  evaluated targets fit: 59,806 and 257,830 samples, each being twice the
  genome length in bases because both strands are searched. A whole human
  genome does not fit, by four orders of magnitude.
* The query length is fixed at M. The host must send exactly M events per
  read; 250 is what the published work found adequate for R9.4 flow cells.

## What follows the published design and what is this RTL's own

Taken from the published design: the sDTW recurrence and its boundaries, the
cut down to O(M) memory, the PE structure (subtract, absolute, min3, add,
"previous y" register), the PE chain fed from the first PE, the two cost
arrays L1 and L2 with the shift between them, the on-chip reference memory,
M = 250, 16-bit samples with scale 2^5, 32-bit costs, the N+M−1 cycle
search, the score updater (counter, comparator, score and position registers),
a data sink FIFO, AXI4-Lite for control and status, AXI4-Stream in and out,
and a single query processor.

Choices made here, where the description gives no detail:

* the valid bit that travels with `y`, and infinity as the output of an idle
  PE;
* which L1/L2 entry feeds which PE input, worked out from the wavefront above;
* L2 is M−1 entries long. The text says both arrays have size M, the drawing
  shows L2 one shorter, and the shorter one is all that is read;
* positions counted from 0, not 1;
* the register map, the REF_MODE bit that tells reference from query packets,
  N taken from the reference packet length, the sticky done flag, the
  overflow flag;
* the stream beat format, the two-word result packet, the FIFO depth (16
  words), input back-pressure during a search, waiting on a full FIFO, and
  ignoring START while busy;
* the state machine and its fixed overhead of 4 cycles around the N+M−1;
* a synchronous, active-low reset.

The published algorithm listings disagree with their own recurrence in small
index details: the sequential listing swaps M and N in its last loop, and the
memory-efficient listing's neighbour updates do not give `C[i−1][j−1]`. This
RTL follows the recurrence and its boundary conditions.

The published resource report (16,796 flip-flops) is below what this RTL
needs. The L1, L2, query and y registers alone are about 24,000 bits at
M = 250. The published implementation therefore differs in some way it does
not describe, for example narrower stored costs. This RTL keeps the stated
widths.

Not built: the processor, the DMA engine and DDR memory, which are bought
parts, and all software (event detection, normalisation, the selection
decision, the drivers). Also not built: the several parallel query processors
that the published work mentions only as a possible extension.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F` and stops on a watchdog. The
expected values are computed independently:

* `sdtw_model_pkg` is a software sDTW with 64-bit costs, used by
  `tb_core_sdtw`, `tb_haru_top` and `tb_haru_full`.
* `tb_core_sdtw` compares every last-row cell `C[M][j]` of the PE chain with the
  model, and checks the N+M−1 cycle latency.
* `tb_haru_top` (M = 8, 64-sample memory, 4-word FIFO) drives the real bus
  ports through `haru_host_bfm`. It checks results in the stream and in the
  registers, and both latencies. It makes each mechanism happen and counts it:
  reference/query mode switches, input back-pressure during a search, FIFO
  stall, reference overflow, a START ignored while busy, and an exact match
  (score 0).
* `tb_haru_full` runs the default build (250 PEs, 295,000-sample memory).
  It loads a SARS-CoV-2-sized and then an RFC1-sized reference, and sends each
  one a batch of three reads. Two reads are cut from the reference with noise
  and a few repeated and skipped events; one is unrelated. The signals are
  synthetic random data, not real reads. The test checks that hardware and
  model agree exactly, that the model finds the planted end, and that the
  unrelated read scores more than twice as high, the gap a keep/reject rule
  needs. It also checks the cycle counts. It takes under a minute.

The AXI handshake rules (valid held until ready, data stable) are also
asserted inside `axis_slave`, `axis_master` and `axil_slave`. Not verified:
timing closure at 100 MHz on a real FPGA, and behaviour with real nanopore data.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/haru_pkg.sv tb/sdtw_model_pkg.sv tb/tb_haru_top.sv \
        --top-module tb_haru_top -Mdir obj_top -o sim
    ./obj_top/sim

Replace `tb_haru_top` with any other testbench (`tb_haru_full`,
`tb_core_sdtw`, `tb_sdtw_pe`, …). The two packages must come first; `-y`
finds the modules by file name. Sizes are parameters of `haru_top`: `M`,
`DEPTH` (reference samples) and `FIFO_WORDS`. They default to 250, 295,000 and
16, and the package holds the shared defaults. Changing `M` changes the query
length the host must send (readable in CONFIG).
