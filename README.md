# LoAS in SystemVerilog: a temporal-parallel sparse spiking-network accelerator

A spiking neural network (SNN) layer multiplies a binary spike matrix by a
weight matrix once for every timestep, then turns each sum into spikes with a
leaky integrate-and-fire (LIF) neuron. Both operands are usually very sparse:
most neurons never fire, and most weights are pruned away. A sparse
matrix-multiply engine that walks the timesteps one after another pays for the
sparse-format bookkeeping T times, and it has to keep or re-fetch partial sums
in between.

This design puts the timestep loop innermost and runs it fully in parallel.
The spikes of one neuron over all T timesteps are packed into a single T-bit
word, so a neuron is "non-zero" if it fired at least once. One sparse join of
a row of A with a column of B then serves every timestep together. The T full
sums of an output neuron are finished in the same place at the same time, so
the LIF can be evaluated for all timesteps in one step without writing partial
sums anywhere. The loop order is m, n, k, with t innermost and parallel. It is
called the fully temporal-parallel (FTP) dataflow.

The RTL is written for the main configuration:

- T = 4 timesteps;
- 16 temporal-parallel processing elements (TPPEs) and 16 parallel LIF units;
- 128-position bitmasks;
- 8-bit signed weights, a 12-bit pseudo-accumulator and 10-bit correction
  accumulators;
- depth-8 FIFOs and a 16-adder "laggy" prefix-sum circuit;
- a 256 KB global buffer in 16 banks, reached through 16×16 crossbars.

## Data format: packed, bitmask-compressed fibers

Every matrix is stored in chunks of 128 positions along K (for A and B) or
along N (for C). A chunk is a *fiber*: a 128-bit bitmask plus the non-zero
values packed in order.

- **A (input spikes, M×K) and C (output spikes, M×N)** are stored as row
  fibers.
  - A value is one 4-bit packed spike word, with bit t = spike at timestep t.
  - Neurons that are silent at every timestep are left out. Their bitmask bit
    is 0.
  - A 128-bit line holds 32 values, so a chunk takes 1 bitmask line plus at
    most 4 data lines.
- **B (weights, K×N)** is stored as column fibers of 8-bit signed weights.
  - A line holds 16 weights, so a chunk takes 1 bitmask line plus at most 8
    data lines.

Each chunk sits in a fixed-size slot. There are no pointers; the address is
worked out from the indices:

```
A chunk (m, kc) : a_base + (m*KC + kc) * 5      KC = K/128
B chunk (n, kc) : b_base + (n*KC + kc) * 9
C chunk (m, nc) : c_base + (m*NC + nc) * 5      NC = ceil(N/128)
```

Addresses are line addresses (14 bits, 16384 lines). The low 4 address bits
select the bank, so the lines of one slot fall in different banks.

**The C region must be sized for M rounded up to a multiple of 16.** The
compressor writes the slots of all 16 rows of a row group, including rows past
M.

**Bit order.** Inside a packed word, bit index = timestep, so the spike at t0
is the LSB. In this document words are printed MSB first (t3 … t0). A neuron
that fires at t0 and t2 is therefore written `0101` here. Printed with t0
first, the same word reads `1010`.

## The TPPE: accumulate first, correct later

This is the part that needs the most explanation. A TPPE computes the four
full sums `x[t] = Σ_k A[m,k,t] · B[k,n]` of one output neuron, one K chunk at a
time. For each chunk it has three inputs:

- bitmask A of its row;
- bitmask B and the fiber-B weights, broadcast to all 16 TPPEs;
- read access to the fiber-A values through the crossbar.

**The join.** `bm_a & bm_b` gives the positions where both the neuron fired
and the weight is non-zero. Two pieces of information are needed for every
such position p:

- the index of the weight inside fiber B: the number of ones of `bm_b` below p;
- the index of the spike word inside fiber A: the number of ones of `bm_a`
  below p.

Computing both with single-cycle prefix-sum trees would double the most
expensive circuit in the PE. The TPPE builds only one of them at full speed:

- **Fast prefix sum** (`fast_prefix_sum`). This is combinational. A priority
  encoder picks the lowest remaining match, and a masked popcount of `bm_b`
  gives its offset into fiber B. `inner_join_unit` keeps the not-yet-consumed
  matches and clears one bit per cycle. The result is one match per cycle.
- **Laggy prefix sum** (`laggy_prefix_sum`). A chain of 16 adders walks
  `bm_a` 16 positions per cycle and writes the fiber-A offset of every
  position into an offset table. After 128/16 = 8 cycles the whole table is
  valid, and any position can then be looked up combinationally.

**The speculation.** The fast path runs before the fiber-A offsets are known,
so it cannot look at the spike word. It assumes the word is `1111`, meaning
the neuron fired at every timestep. Under that assumption it adds the weight
once into a single shared *pseudo-accumulator* (12 bits). The match position
and the weight are pushed into two depth-8 FIFOs, FIFO-mp and FIFO-B.

**The check.** Once the laggy table is ready (8 cycles after `start`), the
checker works through the FIFOs in order:

1. It looks up the fiber-A offset of the position at the FIFO head.
2. It fetches the cache line that holds that spike word. The fetcher keeps the
   last line, so neighbouring offsets reuse it without a new read.
3. It acts on the word:
   - if the word is `1111`, the guess was right and the weight is dropped;
   - otherwise, the weight is added to the *correction accumulator* (10 bits)
     of every timestep whose bit is 0.

The TPPE outputs `x[t] = pseudo − correction[t]`, which is exactly the sum of
the weights whose spike bit at t is 1.

**Example.** Take a chunk where position 2 has A word `1111` and position 4
has A word `0101` (fired at t0 and t2):

| cycle | event | pseudo-accumulator | corrections |
|---|---|---|---|
| 1 | fast path matches p=2 | b2 | — |
| 2 | fast path matches p=4 | b2+b4 | — |
| 8 on | check p=2: word is `1111` | b2+b4 | b2 dropped |
| later | check p=4: word is `0101` | b2+b4 | b4 added to t1 and t3 |

The resulting sums are x = (b2+b4, b2, b2+b4, b2) for t = 0..3.

**Why it pays off.** Dense-firing neurons are common among the non-silent
ones, so many checks end in a discard. The weight fiber streams through at one
match per cycle. The timestep dimension costs only the small correction
adders.

**Stalls.** The design counts three kinds of stall:

- a full FIFO stops the fast path;
- a check waits until the laggy table is ready;
- a fetch waits while another PE holds the bank.

A chunk is finished when no match remains, both FIFOs are empty and no fetch
is outstanding. All the arithmetic is two's complement and wraps on overflow.

## P-LIF: all timesteps of the neuron in one step

`plif` takes the four full sums and evaluates the LIF recurrence as a
combinational chain over t:

```
u[t]     = leak(u[t-1]) + x[t]          u[-1] = 0
spike[t] = (u[t] > vth)
after a spike, u[t] is reset to 0 (hard reset)
leak(u)  = u >>> leak_shift             τ = 2^-leak_shift, arithmetic shift
```

`fire` registers the four spike bits, which form the packed output word of
the neuron. The leak factor τ is a power of two, so the multiply becomes a
shift. τ = 1 (`leak_shift = 0`) turns the leak off. The internal width is 2
bits wider than the sums.

## Compressor: back into the same format

The output of a layer is the input of the next, so the compressor writes C in
the A format.

1. **Collect.** It buffers one packed word per P-LIF and output column, for 16
   rows × 128 columns.
2. **Flush.** For each row in turn, an inverted copy of the laggy prefix-sum
   walks the 128 words 16 per cycle.
   - A word is kept if it is non-zero.
   - In *fine-tuned mode* (`cfg_ft_mode`) a word is kept only if it has at
     least two spikes. This matches networks that were pruned and fine-tuned
     so that single-spike neurons can be dropped.
   - The kept words of a group are numbered by an adder chain and compacted,
     then shifted in after the words already kept.
3. **Write.** It writes the bitmask line and the 4 data lines of the row's
   slot.

One row takes 8 scan cycles plus 5 write cycles, so a flush of 16 rows is
about 210 cycles.

## Scheduler, cache and crossbar

`scheduler` walks the loop nest. For each group of 16 rows (m), each output
column (n) and each K chunk (kc):

1. Request the bitmask line and the 8 data lines of the B chunk (n,kc) on 9
   crossbar ports. The responses are broadcast to all TPPEs: port 0 loads
   bitmask B, ports 1–8 load the data lines.
2. Request the bitmask line of A chunk (m+i,kc) for each TPPE i, on its own
   port. TPPEs whose row is past M get an empty bitmask.
3. Start all TPPEs. Each TPPE fetches its own fiber-A lines on its own port.
   Once every TPPE has taken all its matches and holds its laggy offsets
   (`b_free`), its bitmask and fiber-B buffers are no longer read. From then
   on the scheduler goes on to step 1 for the next K chunk while the TPPEs are
   still checking and correcting. On a shared port the TPPE's fetch wins, and
   a per-port owner tag routes each response. The next `start` waits until no
   TPPE is busy. After the last chunk the scheduler simply waits.
4. After the last chunk, `fire` the P-LIFs. This feeds one column to the
   compressor. The accumulators are cleared before the next column starts. After every 128 columns, and after
   the last one, flush the compressor into the C region.

Other parts of the memory system:

- **`global_cache`** is 16 single-port banks of 1024 × 128-bit lines with a
  registered read. It is a plain scratchpad.
- **`swizzle_crossbar`** routes 16 requesters to 16 banks. Each bank grants
  one request per cycle with rotating priority, starting after its last
  winner. The read data comes back to the winner one cycle after the grant.
  Losing requesters keep their request up.
- **The write port** is owned by the compressor while it flushes, and
  otherwise by the host.

## Top level and how to use it

`loas_top` has no memory controller. The host does three things:

- It loads lines with `host_wr_*` and reads results with `host_rd_*`. Reads
  are granted only while the accelerator is idle.
- It sets `cfg_m`, `cfg_n`, `cfg_kc` (K/128), the three base addresses,
  `cfg_vth`, `cfg_leak_shift` and `cfg_ft_mode`.
- It pulses `start` and waits for `done`.

`perf` counts:

- cycles;
- matches, discards and corrections;
- FIFO stalls, laggy waits and bank stalls;
- fetcher line reuses;
- neurons dropped in fine-tuned mode.

Each unit can be simulated with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/loas_pkg.sv rtl/*.sv \
          tb/tb_loas_top.sv --top-module tb_loas_top
./obj_dir/Vtb_loas_top
```

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=F`. The main ones are:

- **`tb_loas_top`** runs the top with its default parameters. It runs several
  random layers, with and without fine-tuned mode and with several leak and
  threshold settings. It compares every output fiber with a behavioural model
  of the layer (join, LIF, compression). It also counts that each mechanism
  occurred: confirmed guesses, corrections, FIFO stalls, laggy waits, bank
  conflicts, line reuse, fine-tuned drops, flushes, fires, and cycles in which the next
  chunk loads while the TPPEs are still checking.
- **`tb_workload_layers`** runs the four single-layer workloads with random
  operands at the published densities. See below.
- The unit testbenches (`tb_tppe`, `tb_plif`, `tb_scheduler`, …) check each
  block against an independent model. The latency-bearing ones also check the
  cycle counts: one match per cycle, and the laggy table ready after 8 cycles.

## Workloads

The layer shapes are the published ones:

| layer | T, M, N, K | fixed-slot footprint | run as | cycles |
|---|---|---|---|---|
| V-L8 | 4, 16, 512, 2304 | 84704 lines | whole layer, 8 tiles of 64 columns | 179 583 |
| R-L19 | 4, 16, 512, 2304 | 84704 lines | whole layer, 8 tiles of 64 columns | 176 012 |
| A-L4 | 4, 64, 256, 3456 | 71488 lines | whole layer, 16 tiles of 16 columns | 502 258 |
| T-HFF | 4, 784, 3072, 3072 | > 94080 lines | one slice: 16 rows × 64 columns, full K | 42 722 |

The buffer holds 16384 lines. Fixed slots reserve room for dense fibers, so
none of these layers fits in one piece. The host therefore keeps A resident
and loads B one column tile at a time. The cycle counts cover compute only,
not the host loads. Whole-network runs are not possible from the data
available, because the individual layer shapes are not known.

## Where this RTL departs from the published design

- **Global buffer.** It is a directly addressed scratchpad. There are no
  cache tags, associativity, replacement policy or double buffering, and there
  is no off-chip memory model: the host port stands in for DRAM.
- **Fiber layout.** Fibers sit in fixed slots with implicit pointers. This
  wastes space for sparse data, which is why the workloads need host tiling.
- **Offset storage.** The laggy circuit stores 128 offsets of 7 bits (896
  bits), since a smaller table cannot hold them.
- **Crossbar.** It uses rotating-priority arbitration instead of a
  least-recently-granted swizzle switch. Only the logical function is built.
- **Overflow.** Accumulators and the membrane potential wrap on overflow; no
  saturation is modelled.
- **Bit order.** The LSB of a packed word is t0. This is an encoding choice;
  the published examples fix only the print order.
- **Default sizes.** All sizes are at the published defaults. Nothing is
  scaled down.
