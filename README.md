# An FPGA decomposer for large Ising problems on a small Ising chip

An oscillator-based Ising chip settles a fully connected problem of about
50 spins within microseconds. A 3-SAT instance turned into an Ising model
is much larger: with one ancilla spin per clause, a 50-variable, 218-clause
formula becomes 268 spins. The usual fix is decomposition. A host picks a
small connected piece of the problem, freezes every other spin at its
current value, lets the chip solve the piece, writes the answer back, and
repeats. Done in software, that loop keeps the chip idle most of the time.
The transfer and the bookkeeping take longer than the anneal.

This RTL moves the whole loop into logic next to the chip. It holds the
global problem in compressed sparse row (CSR) form and the current global
solution in on-chip RAM. Each iteration it:

1. selects up to `C` connected spins by breadth-first search (BFS),
2. computes their clamped fields and their coupling matrix in one pass over
   the rows,
3. ships the subproblem to the chip over a narrow serial link,
4. writes the returned spins back,
5. decides, from the energy of the whole solution, whether to stop.

The BFS for the next iteration runs while the chip anneals the current one.

The decomposer targets a 100 MHz clock, and the serial link has a clock of
its own. The design is written in SystemVerilog-2017
and has been checked with Verilator (lint and simulation) and with the
Yosys/slang front end.

## The loop and what overlaps

For a global Ising model `H(s) = -sum_i h_i s_i - sum_{i<j} J_ij s_i s_j`
with `s_i = ±1`, one iteration `k` does the following:

| stage | unit | work |
|---|---|---|
| traverse | `gtu` | BFS from a random variable; the result is a list `V_k` of at most `C` spins and a membership bitmap |
| clamp + build | `clamp_engine`, `subq_gen` | for each `i` in `V_k`: `h'_i = h_i + sum_{j not in V_k} J_ij s_j`, and `J_local[r][c] = J_{V[r] V[c]}` |
| dispatch | `async_fifo` ×2, `cobi_link` | `h'` and `J_local` cross into the link clock; frame `(k, h', J_local)` goes out serially |
| core | chip | anneals and returns `|V_k|` spins |
| feedback | `master_ctrl`, `clamp_engine` | returned spins overwrite the global solution, then the full energy is recomputed |

Clamping for iteration `k+1` needs the spins written back in iteration `k`.
Clamp, build, dispatch, core and feedback are therefore strictly
sequential. The traversal is not: it reads only the graph. So BFS(`k+1`) is
launched the moment iteration `k` is dispatched, into the other bank of the
selected-node list. When feedback ends, the controller either finds the next
list ready (counted in `stat_overlap`) or waits for it (`stat_gtu_wait`).
The traversal therefore hides behind the anneal. This is the main source of
speed in the scheme.

The controller states are:

```
IDLE -start-> INIT -> GTU -> CLAMP_SUBQ -> DISPATCH -> CORE_WAIT -> FEEDBACK
                       ^          ^                                    |
                       |          +----- next BFS ready ---------------+
                       +---------------- next BFS not ready -----------+
                                   energy <= target or iteration limit -> DONE (irq)
```

- `INIT` writes random initial spins from a 16-bit LFSR.
- BFS start points come from the same LFSR. Values at or above the number
  of variables `n` are rejected, so every start point is a SAT variable.
- `DONE` accepts a new `start` directly.

## How the problem is stored

The host loads 128-bit beats through `host_we/host_waddr/host_wdata`. The
two regions are given as byte addresses, each 16-byte aligned:

- `cfg_rowptr_base`: `N+1` row pointers of 32 bits, four per beat. Row `i`
  owns entries `row_ptr[i] .. row_ptr[i+1]-1`.
- `cfg_edge_base`: neighbor entries of 16 bits, eight per beat. Each entry
  is `{id[10:0], w[4:0]}` with `w` a signed weight from -16 to +15.

The entries of a row are its couplings `J_ij`, with each edge stored in both
directions. The field `h_i` is stored in the same row, as the entry whose
`id` equals `i`. So one row stream carries everything the clamp needs.
Spins are stored as single bits: 1 means +1 and 0 means -1.

The 16-bit entry is what makes eight lanes fit one 128-bit AXI beat. A
layout with separate 32-bit index and value arrays would need two fetches
per neighbor. Ids are 11 bits, so `N_MAX = 2048` spins. A uf50 instance
(268 spins) needs about 390 beats of the 4096-beat store.

Rows are read by `csr_row_reader`, an AXI4 read master:

1. It fetches the one or two beats that hold `row_ptr[i]` and `row_ptr[i+1]`.
2. It then fetches the entry beats in INCR bursts of at most 16 beats. A
   burst never crosses a 16-beat boundary.
3. It presents each beat with a per-lane valid mask. The mask trims the
   lanes before the row's first entry and after its last.

An empty row yields a single beat with no lane valid. Every consumer
therefore still sees a `last` beat for it.

There are two readers on two read ports of `csr_bram`. One belongs to the
traversal, the other to the clamp/build stream. Each port returns a beat per
clock under `rready` backpressure.

## Graph traversal (`gtu`)

The selected list doubles as the BFS queue:

- A head pointer walks the list.
- The row of each dequeued entry is requested.
- Each neighbor not yet in the membership bitmap is appended.

Up to eight neighbors, one per lane, can be appended in the same clock. The
lane order decides ties.

The search stops when the list holds `cap` spins or the head catches up
with the tail. Only variable rows (`id < n_vars`) are expanded. Ancilla
spins met on the way are appended but not followed. Ancillas count against
the capacity, because the chip must hold them too. Clauses whose ancilla
did not fit are still seen through the clamping.

The unit keeps two list banks. BFS(`k+1`) fills one bank while iteration
`k` reads the other. `member` is the bitmap of the bank being built; it is
stable once `done` has pulsed.

## Clamping engine (`clamp_engine`)

This is the datapath that most decides the iteration time. It takes one
beat per clock and has eight lanes. Each lane:

1. slices its `{id, w}` entry,
2. reads the global spin of `id` from its own copy of the spin RAM,
3. produces a term:
   - `+w` if the spin is +1 and `-w` if it is -1;
   - `0` if the lane is not valid;
   - `0` if `mask_en` is set and the neighbor is in the subproblem;
   - `w` itself when `id` is the row's own index (the field `h_i`).

A balanced adder tree sums the eight terms. An accumulator adds the sums
across the beats of the row. When the `last` beat leaves, the engine emits:

- `out_field = h'_i`,
- `out_row`,
- `out_spin`, the row's own global spin, read in the same cycle through a
  ninth port.

The result is ready two clocks after the last beat is accepted.
Backpressure on the output stalls the input.

The global spin memory (`spin_mem`) is one bit wide and replicated into ten
banks. Nine banks serve the clamp and one serves host read-back. A single
write port updates all banks at once. So all the random reads of a beat are
served in one clock, without arbitration.

With `mask_en = 0` the same engine gives the full local field
`f_i = h_i + sum_j J_ij s_j`. The controller uses this after each feedback
to compute the energy:

```
E = -sum_i s_i f_i  =  -sum_i h_i s_i - 2 sum_{i<j} J_ij s_i s_j
```

This is the Ising energy with the coupling counted once per direction,
which is how the CSR stores it.

## Subproblem generator (`subq_gen`)

During `CLAMP_SUBQ` the same beats go to the generator. A beat advances only
when both the clamp engine and the generator accept it. The generator handles
one entry per clock:

- The entry's row is looked up in a row CAM, and its `id` in a column CAM.
  Both CAMs are a comparison against every list slot.
- If both hit and the local row index is below the column index, the weight
  is written to `mat[bank][r*45 + c]`.

So only the upper triangle is filled, and each in-subproblem edge is written
once even though it is stored twice.

The matrix has two banks:

- One bank fills while the other is read out to the link.
- Read-out goes in upper-triangle order (`r < c`, row by row) and clears
  each cell as it goes, so a drained bank is all-zero for its next fill.
- After reset a sweep of `45*45` clocks clears both banks. Until it ends the
  generator does not accept input.

## Crossing into the link clock

The link's clock `link_clk` is unrelated to the decomposer clock `clk`.
Data crosses through two dual-clock FIFOs (`async_fifo`):

- the h FIFO, written by the controller with each `h'_i`;
- the J FIFO, written by the generator's matrix read-out.

Each FIFO keeps a binary pointer and a Gray-coded pointer per side. The
Gray pointer is passed through two flip-flops to the other side. Since one
Gray step changes a single bit, the other side always sees a valid value.
At worst the value is stale, which only makes the FIFO look fuller to the
writer or emptier to the reader. A word becomes visible to the reader two
to three read clocks after it is written.

Three control pulses cross through toggle synchronisers (`pulse_sync`):

- `tx_start` goes from `clk` to `link_clk`;
- `tx_done` and `spins_valid` go from `link_clk` to `clk`.

Two buses cross without synchronisers, because each is stable for
thousands of clocks around the pulse that announces it:

- `tx_count`, set before `tx_start`;
- the returned spins, held until the next frame.

## Serial link (`cobi_link`)

Frame format, all words 16 bits:

```
word 0              k  (subproblem size)
words 1 .. k        h'_0 .. h'_{k-1}        (from the h FIFO, list order)
next k(k-1)/2       J_rc for r < c, row by row (sign-extended from 5 bits)
```

Each word is sent as `ceil(16/LINK_W)` chunks of `LINK_W` bits, least
significant chunk first, one chunk per link clock:

- `ser_tx_sof` flags the first chunk of a frame.
- With sources that never stall, the link's `tx_done` comes
  `words * ceil(16/LINK_W) + 2` link clocks after its `tx_start`.

The chip answers with `k` spin bits in `ceil(k/LINK_W)` chunks, bit 0 first.
They are delivered as `spins[k-1:0]` with a `spins_valid` pulse.

For `k = 45` the frame has 1036 words. At `LINK_W = 10` that is 2072
link clocks, about 17 µs at 125 MHz. The link pulls words with ready/valid, so
it simply idles if a source has nothing ready.

## Controller (`master_ctrl`)

The controller sequences the stages. In `CLAMP_SUBQ` it requests the rows
of the list, in list order, from the clamp/build reader. Each `h'_i` goes
into the h FIFO. When all `k` fields are in and the generator is idle, it
does three things in one clock (the link sees the start within three link
clocks):

- pulses `tx_start` to the link,
- pulses `rd_start` to the generator,
- launches the next BFS if the traversal unit is free.

`FEEDBACK` has two phases:

1. It writes the `k` returned spins, one per clock.
2. It requests all `N` rows with the mask off and accumulates `E` from the
   clamp engine's outputs.

The run then ends in one of two ways:

| condition | `iter` | `sat` | `done`, `irq` |
|---|---|---|---|
| `E <= cfg_target` | counted | set | `done` set, `irq` pulses |
| `iter` reaches `cfg_max_iter` | counted | clear | `done` set, `irq` pulses |

The final energy stays on `energy`.

The host sets `cfg_target` to the ground energy of a satisfiable instance.
In a clause-penalty construction, each satisfied clause, with its ancilla
set at its best value, adds the same minimum. So the ground energy is known
in advance, and reaching it is the satisfiability check.

## Top level (`ising_decomp_top`)

Programming sequence:

1. Reset. Then wait `45*45` clocks for the matrix clear.
2. Load the CSR image through the host port.
3. Set the configuration:
   - `cfg_n_spins`, `cfg_n_vars`;
   - `cfg_rowptr_base`, `cfg_edge_base`;
   - `cfg_cap` (at most 45);
   - `cfg_max_iter`, `cfg_target`;
   - `cfg_seed` (0 means 1).
4. Pulse `start`.
5. Wait for `done` or `irq`.
6. Read `sat`, `iter` and `energy`. Read the solution spin by spin through
   `spin_rd_addr/spin_rd_data`, which has one clock of latency.

Both clocks must run. `rst_n` resets both domains asynchronously and should
be released when both clocks are running.

`state`, `stat_overlap` and `stat_gtu_wait` are there for observation.

Parameters of the top, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `SUB_N` | 45 | largest subproblem; side of the local matrix |
| `MEM_BEATS` | 4096 | CSR store, 128-bit beats (64 KB) |
| `MAX_BURST` | 16 | longest AXI burst |
| `LINK_W` | 10 | serial bits per clock, each direction |
| `HFIFO_DEPTH` | 64 | depth of the h' FIFO (power of two) |
| `JFIFO_DEPTH` | 16 | depth of the J FIFO (power of two) |

Shared constants live in `decomp_pkg`:

| constant | value |
|---|---|
| beat width | 128 bits |
| lanes `P` | 8 |
| id width | 11 bits |
| weight width | 5 bits |
| `N_MAX` | 2048 |
| field width | 16 bits |
| energy width | 32 bits |

Changing `P` also changes the entry width, since `P` entries fill a beat.

Synthesised coarse-grained with Yosys, the top is about 2,000 cells and
4,200 flip-flop bits. It also has about 0.57 Mbit of memory, almost all of
it the CSR store. About 3,000 of the flip-flop bits are the traversal
unit's 2048-bit membership bitmap and its two lists.

## Iteration timing

The end-to-end test measures clocks per iteration. The decomposer runs at
100 MHz; the link and the chip model run at 125 MHz, with 400 link clocks
of anneal.

| stage | uf20-sized (111 spins) | uf50-sized (268 spins) |
|---|---|---|
| BFS (hidden behind the core) | ~30 clocks | ~25 clocks |
| clamp + build | ~860 clocks (8.6 µs) | ~1280 clocks (12.8 µs) |
| dispatch + core | ~1990 clocks | ~1890 clocks |
| feedback (write-back + energy over all rows) | ~1060 clocks | ~2420 clocks |

The published hardware reports roughly 3.4 µs per BFS, 23 µs of clamping
and 56 µs of subproblem generation per uf20 iteration. The numbers here
are smaller for two reasons:

- All graph storage is on chip.
- The generator processes one entry per clock, in step with the clamp
  engine.

As in the published breakdown, the generator is the slower of the two
parallel consumers. Its one-entry-per-clock rate is what stalls the shared
row stream. Feedback is this design's own cost: the full energy pass reads
every row once per iteration.

## Where this design departs from the source architecture

- **Global problem in on-chip RAM.** The reference system keeps the problem
  in external DDR4 behind a vendor memory controller, an AXI interconnect
  and a PCIe DMA engine. Those parts are not included. The two AXI4 read
  masters talk directly to a dual-port on-chip store, and a plain write
  port stands in for DMA. Since the readers are real AXI4 masters with
  bursts and backpressure, replacing the store with a DDR path should not
  need changes in the readers.
- **Entry packing.** Couplings are packed as 16-bit `{id, weight}` entries
  to give one entry per lane, eight per beat. The reference text counts
  32-bit indices and 32-bit values.
- **`h_i` placement.** `h_i` is kept as a diagonal CSR entry.
- **Link clock.** The source decouples stages with dual-clock FIFOs but
  names no clock besides the 100 MHz fabric clock. Here the link alone sits
  in a second domain, `link_clk`, and the tests run it at 125 MHz.
- **Double-banked matrix.** There is a J FIFO after the generator, as in
  the source's block diagram. The matrix is additionally double-banked, so
  one subproblem can be built while the previous one drains.
- **Satisfiability by energy.** The satisfiability check is an energy
  comparison against a host-given target, not a clause-by-clause
  evaluation. The clause structure is not stored in the device.
- **Ancillas in the BFS list.** The source's BFS selects variables only and
  adds the ancillas of their clauses later, when the subproblem is built;
  it does not say how the result is kept within the chip's size. Here
  ancillas met by the BFS enter the list directly and count against the
  capacity. Only variables are expanded.
- **Lanes over entries, not variables.** The source's text has each
  parallel element clamp its own share of the variables. Its clamp figure,
  which this design follows, has lanes that each take one neighbor entry
  and feed a single adder tree and accumulator. Eight entries of one row
  are handled per clock.
- **Serial link.** The link's framing, word size and width are this design's
  own. The source describes only a lightweight serial link carrying
  `(J_local, h')` out and the spins back.
- **`INIT` state.** `INIT` and the `DISPATCH` state are explicit, and a
  finished next BFS lets `FEEDBACK` go straight to `CLAMP_SUBQ`.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_async_fifo` | two unrelated clocks in two ratios; order and contents against a queue model; never more than `DEPTH` words; exactly `DEPTH` accepted with the reader stopped; visibility within four read clocks |
| `tb_spin_mem` | random writes and multi-port reads against an array |
| `tb_csr_bram` | bursts of every length on both ports with random `rready`; `rlast` position; one beat per clock |
| `tb_csr_row_reader` | every row of random graphs (empty rows, rows crossing 16-beat boundaries) against the packed image; lane masks; beat count |
| `tb_gtu` | traversals against a reference BFS in both banks, stop at capacity and on empty queue, membership bitmap |
| `tb_clamp_engine` | `h'` and full fields against a reference sum, with mask on and off; rate of one beat per clock; latency |
| `tb_subq_gen` | the local matrix against the global couplings; read-out order; clear-on-read; one entry per clock |
| `tb_cobi_link` | frame contents and order, chunking, `sof`, `tx_done` timing; spin return |
| `tb_master_ctrl` | state sequence, row order, write-back, energy, `sat`/limit/`irq`, overlap and wait counters, with timed models of the other units |
| `tb_ising_decomp_top` | end-to-end; see below |

### End-to-end test

`tb_ising_decomp_top` runs the top with every parameter at its default. It
builds planted 3-SAT-shaped Ising instances in SystemVerilog: random
clauses, one ancilla per clause, couplings chosen so that a hidden
assignment is the unique ground state. It then runs three cases:

- uf20-sized (111 spins): must reach the planted energy and the planted
  assignment.
- The same instance with an unreachable target: must stop after three
  iterations without `sat`.
- uf50-sized (268 spins, three variables in no clause): must reach the
  planted energy.

The chip is a behavioural model, a greedy single-spin relaxation of the
received subproblem started from the sign of `h'`. It answers after a
fixed delay. For every frame, the testbench recomputes three things
independently:

- the BFS from the frame's first spin,
- each `h'_i`, from the global solution read back through the host port,
- every `J_rc`.

It also counts the events the design is built around, and fails if any
never happened:

- the next BFS finishing before feedback ends,
- waiting for the BFS,
- BFS stopping at capacity,
- BFS stopping on an empty queue,
- the subproblem generator stalling the shared row stream,
- the J FIFO filling up, so that the slower link side stalls the matrix
  read-out,
- both banks in use,
- a `sat` finish,
- an iteration-limit finish.

The whole test takes about 15 s of simulation on a workstation.

To run a testbench with Verilator, list the package files first:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_ising_decomp_top \
    rtl/decomp_pkg.sv tb/tb_graph_pkg.sv tb/tb_ising_decomp_top.sv
./obj_dir/Vtb_ising_decomp_top
```

The other testbenches are run the same way with their own name.
`tb_graph_pkg` holds the instance generator and the reference models, and
`cobi_chip_model` the chip stand-in.

## Limits worth knowing

- Weights are 5-bit signed. Fields saturate nowhere: 16-bit fields hold
  any row of fewer than about 2000 neighbors of weight 16.
- The CAM lookups in the generator compare an id against all 45 list slots
  in one clock. At larger `SUB_N` they set the clock.
- `cfg_cap` above `SUB_N` is not guarded. Keep it within range.
- The greedy chip model is weaker than a real annealer. The end-to-end runs
  succeed at capacity 45. With a capacity of about 12 on uf50-sized
  instances, the model gets stuck in local minima. This is a property of
  the model, not of the decomposer.
