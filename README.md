# Versa: a reconfigurable crossbar-memory hierarchy with systolic register links

Small in-order cores do well on irregular, branchy code. They do poorly when
every word they touch goes through a fixed, coherent cache. Versa keeps the
cores simple (ARM Cortex-M4F, 36 of them) and makes the memory system around
them reconfigurable at run time instead. A program picks the data-movement
pattern that suits its current kernel:

- **Shared or private L1.** Eight 4 KB memory slices per tile can be one
  32 KB memory visible to all eight workers of the tile, or eight private
  4 KB memories, one per worker, with shorter latency and no contention.
- **Cache or scratchpad.** Each slice can be a cache in front of the L2, or a
  software-managed scratchpad (SPM).
- **Queues.** The slices can become FIFOs that chain the workers into a ring
  of producer-consumer pairs.
- **Systolic links.** Neighbouring workers can pass floating-point values
  straight from one register file to the next. These links reach across
  tile boundaries, so the 32 workers form one 4 x 8 systolic array.
- **Scratchpads for synchronisation.** Small scratchpads at the tile and chip
  level make barriers cheap and predictable.

Switching between these configurations takes two clock cycles.

This repository gives synthesizable SystemVerilog for the parts of the chip
that define this behaviour:

- the crossbar;
- the reconfigurable memory slices;
- the mode control;
- the register-to-register link shim;
- the tile and global scratchpads;
- the wiring of tiles into the chip.

The processor cores and the L2 and lower memory levels are not included. Their
connection points are ports of the top module, `versa_top`.

## Chip organisation

```
                 versa_top
   +-----------+-----------+-----------+-----------+
   |  tile 0   |  tile 1   |  tile 2   |  tile 3   |   R2R rows continue
   | 4x2 wkrs  | 4x2 wkrs  | 4x2 wkrs  | 4x2 wkrs  |   from the east side of
   | RXB       | RXB       | RXB       | RXB       |   tile t into the west
   | 8 ROCM    | 8 ROCM    | 8 ROCM    | 8 ROCM    |   side of tile t+1
   | mode ctrl | mode ctrl | mode ctrl | mode ctrl |
   | T-SPM 8KB | T-SPM 8KB | T-SPM 8KB | T-SPM 8KB |
   +-----+-----+-----+-----+-----+-----+-----+-----+
         |           |           |           |      managers' bus
         +-----------+-----+-----+-----------+
                           G-SPM 8 KB
```

Each tile (`versa_tile`) contains:

- 8 workers and 1 manager;
- the reconfigurable crossbar (RXB, `rxb`), which connects the workers to
  the 8 slices of the L1 reconfigurable on-chip memory (ROCM, `rocm_slice`);
- the memory-mapped mode registers (`mode_ctrl`), written by the manager;
- the tile scratchpad (T-SPM, `scratchpad` with 9 ports).

Each worker has an R2R shim (`r2r_shim`) around its FPU register file. The four
managers share the global scratchpad (G-SPM, `scratchpad` with 4 ports).

The cores are outside the RTL. Every worker appears as three ports:

- its register-file write-back and read ports, through the shim;
- its RXB memory port;
- its T-SPM port.

Every manager appears as its mode-control, T-SPM and G-SPM ports. Every ROCM
slice has a 128-bit L2 port at the top level, so the chip has 32 of them.

Worker `w` of a tile sits at row `w/2`, column `w%2`. All top-level arrays are
indexed `[tile][worker]` or `[tile][slice]`.

## The reconfigurable crossbar (RXB)

The crossbar has one bidirectional port per worker and one per slice. The
mode is set per tile.

**Shared.** A worker can reach any slice. The slices are interleaved on
64-byte lines: slice = `addr[8:6]`. Each slice has its own
least-recently-granted (LRG) arbiter (`lrg_arbiter`, a matrix arbiter) and
one pipeline register:

- The winner gets its grant in the cycle it asks.
- The request reaches the slice one cycle later.
- Read data comes back tagged with the worker's number and is steered to it.
- A losing worker keeps its request up and is counted as a conflict.

**Private.** Worker `i` is wired to slice `i` in both directions. There is no
arbitration and no pipeline register, so the request reaches the slice in the
cycle it is made.

**Queue.** Slice `j` is a FIFO from worker `j-1` to worker `j`, around a ring
(worker 7 feeds slice 0). The slice's port is split: the producer's write and
the consumer's read use it in the same cycle, which doubles the port's useful
bandwidth. Addresses are ignored.

Latency follows from these structures. A slice read takes 2 cycles. A read
therefore returns 3 cycles after the request in shared mode and 2 cycles
after it in private mode. That is the 33% lower latency the private mode is
built for. While a mode change is in progress the crossbar grants nothing.

## The memory slice (ROCM)

A slice is 4 KB held in four 32-bit 1R1W SRAM sub-banks of 256 words each
(`sram_1r1w`). The same banks serve all three modes.

### SPM mode

The slice is one contiguous array. Bank 0 holds words 0-255, bank 1 holds
words 256-511, and so on.

### Cache mode

The cache is 4-way set-associative, with 16 sets and 64-byte lines. It is
write-back and write-allocate, and victims are chosen round-robin.

Tags, valid bits and dirty bits are flip-flops, so a hit is known in the
cycle the request is accepted. The data array is laid out so that both kinds
of access stay cheap. Word `w` of way `v` in set `s` is stored in bank
`w[1:0]`, row `{s, v, w[3:2]}`. As a result:

- A 32-bit worker access touches one bank.
- One 128-bit L2 beat fills one row across all four banks.
- A line takes 4 beats.

A miss goes through these steps:

1. The request is parked.
2. If the victim is dirty, it is written back in 4 beats.
3. The line is requested and refilled in 4 beats.
4. The parked request is replayed as a hit.

The slice takes no other request while a miss is in progress: the cache is
blocking.

### Queue mode

The slice is a 1024-word FIFO with independent read and write pointers. A
write and a read can each complete in the same cycle.

### Address maps

Address map, private crossbar (each slice is its own 4 KB space):

| use | field |
|---|---|
| SPM word | `addr[11:2]` |
| cache offset / index / tag | `addr[5:2]` / `addr[9:6]` / `addr[31:10]` |

Address map, shared crossbar (slices interleaved on `addr[8:6]`):

| use | field |
|---|---|
| SPM word | `{addr[14:9], addr[5:2]}` |
| cache offset / index / tag | `addr[5:2]` / `addr[12:9]` / `addr[31:13]` |

The slice's number (`SLICE_ID`) puts `addr[8:6]` back into the L2 addresses
it issues.

### L2 port

The L2 port carries one line per request:

1. The slice raises `l2_req_valid` with a line address and the direction
   `l2_req_we`, and holds them until `l2_req_ready`.
2. For a write-back, the slice then sends 4 beats on `l2_wvalid`/`l2_wdata`.
3. For a fill, the L2 returns 4 beats on `l2_rvalid`/`l2_rdata`, lowest
   address first.

This protocol is this design's own. The chip's L2 is not described in enough
detail to match.

## Mode control

Each tile's manager reconfigures the tile with memory-mapped registers:

| offset | register | bits |
|---|---|---|
| 0x0 | MODE | `[1:0]` RXB: 0 shared, 1 private, 2 queue; `[3:2]` ROCM: 0 cache, 1 SPM, 2 queue |
| 0x4 | R2R_EN | `[7:0]` one enable per worker |
| 0x8 | STATUS | `[0]` transition in progress |

The legal configurations are shared or private combined with cache or SPM,
plus queue. If either field asks for queue, both become queue.

A MODE write accepted at the end of cycle `t` makes `busy` high in cycles
`t+1` and `t+2`. In cycle `t+2`, `apply` pulses:

- every cache line is invalidated, without being written back;
- the queue pointers are reset.

The new mode is active from cycle `t+3`. Software must flush dirty data
before leaving cache mode.

## Register-to-register links (R2R)

When R2R is enabled for a worker, its FPU registers `s0`-`s3` stop being
registers and become links to the West, East, North and South neighbours:

- A write-back to `s1` is intercepted by the shim and sent east.
- A read of `s0` returns the last word the west neighbour sent.

`s4`-`s31` remain ordinary registers, and so does everything when R2R is off.

Each link has two valid bits, one at each end:

- `out_valid` at the writer: the link holds a word that has not been read yet.
- `in_valid` at the reader: a word is waiting in its inbound register.

Each bit drives one stall:

- A write to a link whose `out_valid` is set raises `wr_stall`.
- A read from a link whose `in_valid` is clear raises `rd_stall`.

The core holds the instruction until its stall drops. The two stalls are kept
separate on purpose. A write-back of an older instruction must never wait for
a read of a younger one. Otherwise two neighbours that send to each other
could block each other for ever.

Timing:

- A word written in cycle `t` can be read by the neighbour in cycle `t+1`.
- That read frees the link for a new write in cycle `t+2`.
- One link therefore carries one word every two cycles.

Each link stores a single word. The tile wires its internal neighbours
together. Links on the tile's edge are ports. At the chip level, the east
links of tile `t` join the west links of tile `t+1`. The north, south and
outer west and east links are left as chip ports.

## Scratchpads and the tree barrier

The T-SPM (8 KB, 8 workers and the manager) and the G-SPM (8 KB, 4 managers)
are single-ported arrays:

- One access per cycle, arbitrated least-recently-granted.
- A read returns data one cycle after its grant.
- Only plain loads and stores; there are no atomic operations.

They do not change with the ROCM modes. Every requester sees the same short
latency.

The barrier is built in software on top of them, in two levels:

1. Each worker sets its own flag word in the T-SPM.
2. The tile's manager waits for all eight flags, then sets its own flag in
   the G-SPM.
3. One manager waits for all four manager flags and releases the others.
4. Each manager releases its workers through the T-SPM.

This limits the serialised part of a barrier to 8 + 4 participants, not 36.
The end-to-end testbench runs exactly this sequence.

## Where this RTL departs from the chip or fills gaps

- **Not built:** the cores, the cluster message buffer, L2, L2.5, L3, the
  DRAM emulation, host interfaces, clocking, debug and pads. Apart from the
  cores (licensed IP), these parts are named but not described.
- **Miss handling:** the real slice keeps several request-state registers
  for miss handling and FIFO levels. Here one parked request and the queue
  pointers stand in for them, so a slice handles one miss at a time.
- **Own choices:** cache replacement and address maps, the L2
  protocol, the register map, the crossbar's hold during transitions, the
  worker numbering inside a tile and the tile order on the chip. Each RTL
  file's opening comment says which of its choices are its own.
- **R2R link storage:** the chip has an outbound and an inbound data
  register per direction. This shim keeps only the inbound one; outgoing
  data is the write-back data itself. The valid-bit rules are the same.
- **Tile-to-L2 links:** the chip groups the slices' L2 traffic into eight
  32-bit links upstream and one 128-bit multicast link downstream. Here
  every slice has its own 128-bit port in both directions, and there is
  no multicast.
- **Not modelled:** clock and data gating of the unused cache logic, which
  is a power feature.

## Size

Coarse synthesis of `versa_top` (yosys, memories kept as memory cells) gives:

- about 35,000 word-level cells;
- 96,532 flip-flop bits;
- 1,376,256 memory bits: 32 x 4 KB of ROCM, 4 x 8 KB of T-SPM and 8 KB of
  G-SPM.

## Verification

Every block has a self-checking testbench in `tb/`:

| testbench | what it checks |
|---|---|
| `tb_sram_1r1w` | all addresses, read latency, read-during-write |
| `tb_lrg_arbiter` | grants against a reference priority list, random requests |
| `tb_rocm_slice` | SPM (private and shared maps), cache over two passes with a behavioural L2 (hits, misses, write-backs, replays), FIFO with simultaneous read and write |
| `tb_rxb` | with real slices: private 2-cycle and shared 3-cycle reads, all-to-all traffic, LRG order, hold during transitions, the queue ring |
| `tb_mode_ctrl` | register map, the 2-cycle transition, the queue rule |
| `tb_r2r_shim` | aliasing, both stalls, throughput of 20 words in 40 cycles |
| `tb_scratchpad`, `tb_gspm` | 9- and 4-port scratchpads |
| `tb_versa_tile` | one tile through mode switches, the queue ring, R2R and a T-SPM barrier |
| `tb_versa_top` | the whole chip at full size (see below) |

`tb_versa_top` runs the whole chip at its full size. It plays the 32 workers,
4 managers and the L2 (`tb/l2_mem_model.sv`). It runs these phases:

1. Each tile is set to a different mode: shared cache, private SPM, queue,
   private cache.
2. The four tiles run parallel workloads in those modes.
3. A systolic pipeline runs along all four rows of the 4 x 8 array, across
   every tile boundary.
4. A two-level barrier runs over all 32 workers.

It counts every mechanism: mode switches, crossbar holds, arbitration
conflicts, hits, misses, write-backs, split queue ports, R2R transfers and
stalls, cross-tile transfers and barrier stages. A mechanism that never
occurs counts as a failure. A full run takes about 2,400 cycles and a few
seconds.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  --top-module tb_versa_top -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/versa_pkg.sv tb/tb_versa_top.sv
obj_dir/Vtb_versa_top +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Verilator is two-state, so every register that a test reads is reset.

Lint notes:

- Verilator reports `SYNCASYNCNET` because `rst_n` is used both as the
  asynchronous reset and in assertion `disable iff` clauses.
- The unused upper bits of the mode-control write data are reported as
  unused.
- The R2R link data outputs are the core's write-back data wired through on
  purpose, so synthesis lists them as idle outputs.
