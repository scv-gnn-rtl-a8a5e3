# A queue-based vector processor for sparse GNN aggregation

Graph neural networks spend most of their time on aggregation. Aggregation is
the product of a very sparse adjacency matrix Â (often under 0.1 % non-zero)
with a dense feature matrix Z. This processor runs that product from the
*sparse compressed vector* (SCV) format:

- The adjacency matrix is cut into column vectors of 512 rows. Each vector is
  stored row-major as a `blk ptr` (where its values start), one `blk id` per
  non-zero (its row inside the vector), and the `values`.
- The vectors are visited in a Z-Morton order over blocks of 512 columns
  (SCV-Z). This keeps the partial-sum rows (PS) and the Z rows that are in use
  small enough to sit in local memory.

Each non-zero Â(i,j) becomes one vector instruction, `PS[i] = Â(i,j) * Z[j] + PS[i]`,
executed over 64 features at once. The hardware is a set of vector engines fed
through queues. Most of the work is keeping these instructions free of
read-after-write hazards without stalling.

The same machine also runs the combination step `Z = H * W` and general vector
commands (load, add, subtract, multiply, and so on).

## Block diagram and clocks

```
            clk_a domain                         |        clk domain
 s_el ──► cmd_addr_gen ──► arbiter_distributor ──┼─► pe_queue[0..7] ──► vpe[0..7] (64 pe each)
                                │  raw_check ◄───┼── pending C addresses     │  │  │   ▲
                                                 |                          ▼  ▼  ▼   │ write
                                                 |               mem_region A  B  C ──┘
 host port (h_*) ────────────────────────────────┼──────────────► (sram_mp banks)
```

Default sizes (the evaluated configuration):

| parameter | default | meaning |
|---|---|---|
| `N_VPE` / `NVPE` | 8 | vector engines = queues |
| `N_PE` / `NPE` | 64 | PEs per engine = words per memory row |
| `QDEPTH` / `DEPTH` | 16 | entries per queue |
| `VEC_H` / `VECH` | 512 | SCV vector height |
| A, B, C | 64 kB, 64 kB, 256 kB | 256, 256 and 1024 rows of 64 FP32 words |

There are two clocks:

- `clk_a` runs the command/address generator, the arbiter and the write side of
  the queues. It should be faster than `clk`, so that one placement per `clk_a`
  can keep all eight queues supplied.
- `clk` runs the engines, the memories and the read side of the queues.

The queues are dual-clock FIFOs (Gray-coded pointers with two-flop
synchronisers), so the two clocks may be unrelated.

## The processing element (`pe`)

A PE has three inputs `a`, `b`, `c`, a result `r`, and one register `M`. The
4-bit command is `{mem_mode, op}`:

| op | vector mode (`r =`) | memory mode (`r =`) | M afterwards |
|---|---|---|---|
| LOAD (0) | – | – | M = b |
| UNLOAD (1) | M | M | unchanged |
| ADD (2) | a + b | a + M | r (see below) |
| SUB (3) | a − b | a − M | r |
| MUL (4) | a * b | a * M | r |
| MAC (5) | a * b + M | a * b + M | M = r |
| ACC (6) | a + M | a + M | M = r |
| MADD (7) | a * b + c | a * M + c | r |

The multiplier and adder are IEEE binary32 with round-to-nearest-even, and
they flush subnormals to zero. They propagate infinities and NaNs. Both are
combinational, so a PE produces one result per cycle.

Every vector-mode operation except LOAD and UNLOAD also copies its result into
M. That copy is what makes the one-apart hazard rule below work. It is this
design's choice; the operation table only requires M to change for
LOAD/MAC/ACC.

## Hazards: why there are two forwarding paths and a MAC rewrite

The memory has a write-to-read distance of three: a result written by one
entry can be read from C by the entry three places later in the same queue,
but not sooner. All work has the form `C = A * B + C`, so the only hazard is
read-after-write on the C address. It is handled where entries are placed, not
by interlocks in the engines:

1. **Across queues.** A C address that is still pending in some queue (pushed
   and not yet written back) forces the new entry into that same queue. If the
   entry is pinned elsewhere, or that queue is full, the arbiter waits. `raw_check`
   compares the address with every unretired slot of every queue.
2. **One apart in the same queue.** The previous entry of that queue writes the
   same address. A vector MADD `a*b + c` becomes MAC `a*b + M`, because M
   already holds the previous result. For any other operation that reads c,
   the entry is marked `FWD_1`: the engine takes c from its previous result
   instead of from memory. `FWD_1` is an addition of this design; the paper
   only describes the MAC rewrite.
3. **Two apart.** The entry is marked `FWD_2`: c is taken from the engine's
   two-deep result history (the output buffer BR) rather than from memory.
4. **Three or more apart.** No action is needed.

Two details make these rules safe in hardware rather than only in a
fixed-latency model:

- **Queue slots are freed when an entry's result is written, not when it is
  popped.** `pe_queue` keeps a retire pointer behind its read pointer. The
  addresses between them stay visible to `raw_check`, so an entry that is
  still executing still counts as "pending".
- **The engine issues an entry only while at most two older entries are
  unwritten.** A write can wait for a C port, and this rule keeps "three apart"
  meaning "already in memory" when it does. BR therefore holds three entries.

The arbiter forgets its one- and two-apart history for a queue in two cases:
when that queue drains, and when the same address is later placed in a
different queue. Otherwise a stale match could forward a value that memory has
since overwritten.

Queue choice when there is no hazard:

- Aggregation entries go to the queue with the fewest unretired entries,
  lowest index on ties.
- Combination entries for output row i are pinned to queue `i mod N_VPE`. This
  is output-stationary: each VPE owns whole output rows.

## Banked local memory (`mem_region`, `sram_mp`)

A, B and C are separate memories. Each is built from banks of a four-port
SRAM:

- A and B banks have 4 read ports, so they use ⌈N_VPE/4⌉ = 2 banks.
- C banks have 2 read and 2 write ports, so C uses ⌈N_VPE/2⌉ = 4 banks.
- A and B banks also get one write port, used for loading.

Every cycle, each memory's controller does the following:

- It maps each request to bank `row mod NB`.
- It merges reads of the same row into one port use (broadcast). This matters
  because many engines read the same Z row or the same A row.
- It hands out the remaining ports in a rotating priority order.
- It refuses what is left. A refused engine stalls and retries with all its
  reads, because an entry pops only when its A, B and C reads are all granted
  in the same cycle.

Reads are synchronous: data arrives one `clk` after the grant. Scalar operands
read the whole row, and the engine selects the word and broadcasts it to all
PEs. Vector operands must start on a row boundary.

The host port (`h_sel` 0/1/2 for A/B/C, `h_re`/`h_we`, whole rows) has first
claim on port 0 of the addressed bank. Use it only while `busy` is low. It
stands in for the cache/DRAM hierarchy, which is not part of this RTL.

## Stream format (`cmd_addr_gen`)

A stream element is `{kind, f0, f1, f2, f3}` with 32-bit fields, accepted
with `s_valid`/`s_ready`. There are four kinds:

| kind | fields | produces |
|---|---|---|
| `EL_AGG_HDR` | f0 = row block, f1 = column j, f2 = blk ptr | nothing; opens a column vector |
| `EL_AGG_NZ` | f0 = blk id | MADD: `C[c_base + rb*VECH + blk id] += A[a_base + blk ptr + n] * B[b_base + j]` (a scalar, b and c vectors) |
| `EL_CMB_NZ` | f0 = out row i, f1 = k, f2 = A word of H(i,k) | MADD: `C[c_base + i] += H(i,k) * B[b_base + k]`, pinned to queue i mod N_VPE |
| `EL_RAW` | f0 = `{pin_q[7:0], 15'b0, pin, 1'b0, cmd[3:0], a.vec, b.vec, c.vec}`, f1/f2/f3 = word addresses | that command as given |

In the `EL_AGG_NZ` row, `n` counts the non-zeros since the header.

Only non-zeros are sent. Zero entries of H and empty column vectors cost
nothing, because no command is ever made for them.

To run aggregation:

1. Load the values into A, the Z rows into B, and zeros (or the previous
   partial sums) into C.
2. Send the vectors in SCV-Z order, a header followed by its non-zeros.
3. Wait for `busy` to fall.
4. Read C.

The row numbers wrap modulo the memory sizes. Tiling a graph larger than local
memory is the caller's job: one PS tile of 512 rows × 64 features is 128 kB.

## Counters

`counters[k]` counts events since reset:

| k | event |
|---|---|
| 0 | entries issued |
| 1 | bank-conflict stalls (engine-cycles) |
| 2 | MACs executed |
| 3 | FWD_2 forwards executed |
| 4 | MADD→MAC rewrites |
| 5 | FWD_1 marks |
| 6 | FWD_2 marks |
| 7 | cross-queue redirects |
| 8 | arbiter waits |

Counters 0–3 are in the `clk` domain and 4–8 in the `clk_a` domain.

## Where this design departs from the paper or fills gaps

- The number format, the rounding, and the PE's combinational timing are not
  given; the choices are FP32 with RNE and flush-to-zero.
- The command encoding inside the 4 bits, the queue entry layout, the stream
  format and the host port are this design's own.
- M also latching vector-mode results, `FWD_1`, retire-based slot freeing, the
  two-unwritten issue limit and the 3-deep BR are all this design's own.
- The greedy rule (fewest entries), bank = row mod NB, rotating priority, and
  host priority are this design's own.
- The arbiter places one entry per `clk_a`. The paper only asks that it be
  faster than the engines.
- The figure of the processor draws four VPEs; the default here is the eight
  of the evaluated configuration.
- Not built: the cache/DRAM below local memory, prefetching of Z rows and
  eviction of PS rows, and the controller that merges results when several
  processors share one output tile.

## Simulating

Every testbench in `tb/` checks itself and ends with a
`TB_RESULT checks=… failures=…` line. Each one also has a watchdog. For
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_graph_processor rtl/scv_pkg.sv tb/fp_ref_pkg.sv tb/tb_graph_processor.sv
./obj_dir/Vtb_graph_processor
```

`tb/fp_ref_pkg.sv` is an independent FP32 reference, computed in `real` with
explicit rounding. The testbenches are:

- **Unit testbenches** (`tb_fp_add`, `tb_fp_mul`, `tb_pe`, `tb_sram_mp`,
  `tb_mem_region`, `tb_pe_queue`, `tb_raw_check`, `tb_arbiter_distributor`,
  `tb_vpe`, `tb_cmd_addr_gen`). They use random and directed stimulus against
  reference models. `tb_vpe` also checks the one-entry-per-cycle rate and the
  read-to-write latency.
- **`tb_graph_processor`**. End to end at reduced size (4 VPEs × 4 PEs, depth
  4, vector height 8). It runs:
  - an SCV-Z aggregation of a random 48-node graph;
  - a combination;
  - a raw add chain that exercises every hazard distance, plus memory-mode
    LOAD/MUL/UNLOAD;
  - a single-bank burst that forces bank conflicts;
  - a pinned burst that forces arbiter waits.

  The results in C are compared with a reference product. It counts a failure
  for any mechanism counter that stays at zero.
- **`tb_graph_processor_full`**. The same phases with every parameter at its
  default: 8 × 64 PEs, depth 16, vector height 512, a 256-node graph.
