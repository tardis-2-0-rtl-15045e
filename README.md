# Tardis 2.0 coherence in SystemVerilog

Tardis keeps a multicore's caches coherent without invalidations. Each
cacheline has a *logical* lease instead of a list of sharers. A write does not
go looking for the copies it would make stale. It moves itself later in
logical time, past the end of every lease that was handed out. Readers with
old copies stay correct: their loads are ordered before the write in logical
time, even if they happen after it in physical time. The LLC never needs a
sharer list, and a store never waits for invalidation acknowledgements.

This RTL builds the optimised version of the protocol for Total Store Order
(TSO). It has four parts that plain Tardis lacks:

* per-core load and store timestamps, so that TSO's store buffer is allowed;
* an *E-bit* in the LLC, so that private data is granted exclusive (MESI E)
  state;
* a *livelock detector*, which notices a core spinning on a stale copy and asks
  the LLC whether the line has changed;
* a *lease predictor*, which gives longer leases to lines that keep being
  renewed.

The default build is a 64-tile system on an 8 x 8 mesh. Each tile has a 32 KB
4-way L1 data cache and a 256 KB 8-way slice of the shared LLC.

## Logical time

All timestamps are 20-bit logical times (`ts_t`).

| holder | name | meaning |
|---|---|---|
| cacheline (L1 and LLC) | `wts` | logical time at which this version was written |
| cacheline (L1 and LLC) | `rts` | last logical time at which the version may be read; `rts - wts` is its lease |
| core | `lts` | load timestamp: no later load may be ordered before it |
| core | `sts` | store timestamp: no later store may be ordered before it |

The rules the hardware enforces:

* **Load.** A load of an S copy is allowed at `t = max(lts, wts)` if `t <= rts`.
  `lts` then becomes `t`.
  If `t > rts`, the lease has expired in the reader's logical time. The L1
  sends a *renew*.
  * If the LLC still has the same version (same `wts`), it only extends
    `rts`; no data is sent.
  * If the version has changed, the renew fails and the new data comes back.
* **Load of an own line.** A load of an E or M line never has to ask. With E,
  the L1 raises the line's `rts` itself; with M, `lts` is left alone (the
  core's own dirty data is always readable).
* **Store.** A store needs the line in E or M state. It commits at
  `t = max(sts, lts, rts + 1)`, so it lands after every lease ever given out
  for the old version. Then `wts = rts = t` and `sts = t`.
* **Fence.** A fence waits until the store buffer is empty. It then sets
  `lts = max(lts, sts)`, so no later load can be ordered before an earlier
  store.
* **Progress.** A core that only reads an S copy would never see a newer
  version, because its `lts` never grows. The cure is for `lts` to rise now
  and then. It self-increments every `SELF_INC_PERIOD` memory accesses
  (default 1000), and the livelock detector speeds this up where it matters
  (next sections).

## Message flow between L1 and LLC

A line's home is the LLC slice of tile `line_address mod N_TILES`. The home
holds the line's `wts`, `rts`, lease code and E-bit. If an L1 owns the line in
E or M, the home also records that owner. The request kinds are:

| request (L1 to home) | answer (home to L1) | when |
|---|---|---|
| `REQ_SH` | `RSP_SH` (S with lease, or E if the E-bit is set) | load miss |
| `REQ_EX` | `RSP_EX` | store to a line not held in E/M |
| `REQ_RENEW` | `RSP_RENEW` (extended rts, data only if changed) | load of an expired S line |
| `REQ_CHECK` | `RSP_CHECK` (like a renew, sent early) | livelock detector fired |
| `REQ_WB` | `RSP_WB_ACK` | eviction of an E/M line |

Sometimes the home does not hold the current data, because another L1 owns
the line. The home then forwards the request to the owner (`FWD_SH` or
`FWD_EX`). The owner answers the home with `UP_DATA` or `UP_NODATA`, and the
home replies to the requester.

* A shared forward makes the owner write its data back and keep an S copy.
  The `rts` it gets is pushed to the requester's `lts` plus the lease.
* An exclusive forward hands the line over.

When an LLC victim is owned by an L1, the home first *recalls* the line
(`FWD_EX` on the LLC's own behalf) before it writes the line to memory.

Memory holds no timestamps. The LLC keeps a memory timestamp `mts`:

* every eviction raises `mts` to the victim's `rts`;
* every fill from memory gets `wts = rts = mts`.

So a refetched line is never older, in logical time, than anything already
read.

### The E-bit

Tardis may grant E to a load while other cores still read old S copies. No
invalidation is needed, because a later store will jump past their leases
anyway. Granting E pays off only for private data, though, so each LLC line
keeps a hint bit:

* it is set when the line is filled from memory;
* it is set when an owner writes the line back on eviction;
* it is cleared whenever a load caches the line in S.

A load that finds the bit set gets E state.

The paper says the bit is set when a line is "downgraded to S". It also says
the bit is cleared when a load caches the line. A load that downgrades an owner
does both at once. This design lets the clearing win in that case.

### Races

Each L1 has one outstanding miss. An evicted E/M line sits in a one-entry
writeback buffer until the home acknowledges it. A forward that meets the
line there is answered from the buffer. The home serves one request per slice
at a time, so its view of the owner is never half-updated.

The three message classes travel on three separate meshes:

* requests;
* home-to-L1 answers and forwards;
* L1-to-home answers to forwards.

A forward can therefore never be stuck behind a request that waits for it.
XY routing keeps messages between the same two nodes in order, which the
protocol relies on: a forward never overtakes the grant it refers to.

## Livelock detector

In a spin loop (`while (flag == 0);`) the loads hit an unexpired S copy, so
they would see the new flag only after `lts` creeps past the lease. The
detector watches loads that hit S lines.

* **Address history buffer (AHB).** This is 8 entries with LRU replacement,
  each holding a line address and a 16-bit access count.
* **Check.** When an address's count reaches `thresh_count`, the load is
  turned into a `REQ_CHECK` to the home. This is a renew sent before the lease
  runs out.
  * If the line has changed, the new data comes back and `thresh_count`
    returns to its minimum (100).
  * After `CHECK_THRESH` (10) useless checks in a row, `thresh_count` doubles,
    up to 800.
* **Count reset.** All counts clear whenever `lts` rises because of a load or
  a fence. At that point the core is clearly not stuck.

Because the detector catches the spin loops, `lts` self-increments only every
1000 accesses, instead of every 100 as in plain Tardis. That cuts renew
traffic elsewhere.

## Lease predictor

Each LLC line stores its lease as a 2-bit code `c`, giving a lease of `8 << c`
(8, 16, 32 or 64).

* A write resets the code to 0.
* A renew whose request carries the line's current lease doubles it, up to 64.

Lines that are read far more often than written therefore earn long leases
and need fewer renews. The L1 keeps the code with its copy and sends it back
in its renew.

## Structure and timing

```
tardis_top            MESH_X x MESH_Y tiles, three mesh_net instances
 ├─ mesh_net (x3)     grid of mesh_router, XY routing, 2 cycles per hop
 └─ tardis_tile
     ├─ lsu           one core operation at a time; TSO ordering
     │   └─ store_buffer   FIFO with youngest-match load forwarding
     ├─ ts_manager    lts, sts, fence, self-increment
     ├─ livelock_detector
     ├─ l1_dcache     states I/S/E/M, wts/rts/lease per line
     └─ llc_slice     home of 1/N of the lines, with lease_predictor
```

### Core side (`lsu`)

The core port is a valid/ready request with an operation (`OP_LD`, `OP_ST`,
`OP_FENCE`), a 45-bit word address and 64-bit data. It has a one-cycle
`core_resp_valid` answer.

* A store answers as soon as it enters the store buffer.
* A load answers from the store buffer if a buffered store matches. Otherwise
  it goes to the L1 ahead of any buffered stores, which is TSO's store-to-load
  reordering.
* A fence answers once the buffer has drained.

### Caches

* **L1.** A hit answers one cycle after the L1 accepts the request.
* **LLC.** A slice answers a hit three cycles after it takes the request
  (look-up, process, send).

### Memory port

Each slice has its own memory port. `mem_req` carries a write enable, a line
address and a line. A read is answered later by `mem_resp_valid` with the
line.

### Observation outputs

Every tile exports `lts`, `sts` and an event vector `tile_ev_t`. The vector
has one pulse per mechanism:

* renew, check, check that found new data, self-increment;
* store-buffer forward, store-buffer-full stall, fence;
* L1 writeback, E grant, forward, lease doubling, failed renew;
* LLC fill, LLC recall.

## Where this design departs from the paper

* **Flits.** Each message moves through the mesh as a single wide flit of 637
  bits. The paper has 128-bit flits, so data messages here do not pay
  serialisation latency.
* **Memory ports.** Every LLC slice has its own memory port, instead of eight
  memory controllers on the mesh edge. The controllers, DRAM, cores and
  instruction caches are not part of this RTL.
* **Blocking caches.** Both caches are blocking: one miss per L1, one request
  at a time per LLC slice. L1 replacement is round-robin per set. The store
  buffer has 8 entries. None of these numbers comes from the paper.
* **Consistency model.** Only TSO is built. SC and relaxed models, and the
  directory baseline, are comparisons in the paper, not part of this design.
  Speculative load execution inside the core is not modelled either.
* **Optimisations of the original protocol.** Two optimisations are not
  built: loads that speculate on an expired line, and stores to private lines
  that leave `sts` unchanged. Every store commits at
  `max(sts, lts, rts + 1)`.
* **Timestamp wrap.** Timestamps wrap at 2^20 without the rebasing or
  compression a long run would need.
* **Check threshold.** The detector fires when a count is at or above the
  threshold, where the paper's algorithm tests for equality. This matters only
  right after the threshold changes.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_ts_manager` | load/store/fence timestamp rules, self-increment period |
| `tb_lease_predictor` | all request/lease combinations against the rule |
| `tb_store_buffer` | random traffic against a queue model, youngest-match forwarding |
| `tb_livelock_detector` | random traffic against a model of the AHB and the adaptive threshold |
| `tb_lsu` | random single-core programs against a memory model |
| `tb_mesh_router` | random traffic with back-pressure: XY port choice, order, 2-cycle hop |
| `tb_l1_dcache` | the paper's two-core TSO example replayed step by step, then renew, check, E, forwards and eviction |
| `tb_llc_slice` | one line through fill, E grant, forwarded downgrade, renew, failed renew, lease doubling and recall |
| `tb_tardis_tile` | one tile with its networks looped back |
| `tb_tardis_top` | end-to-end system test (below) |

### The end-to-end test

`tb_tardis_top` runs a 2 x 2 system with tiny caches (2 x 2 lines in each L1
and LLC slice) and shortened self-increment and threshold settings. Four
programs run at once:

* message passing through a spin loop;
* per-location coherence: no reader ever sees a value go backwards, and every
  final value is eventually seen;
* the lease example loop;
* random private traffic checked against a model.

It also counts each mechanism and fails if any never happens.

### Full-size test

The default 64-tile configuration, with every parameter at its default, has
also been simulated through one sharing operation, and it passed:

1. Core 63 loads a word of a line homed on tile 27.
2. Core 0 stores to that word and fences.
3. Core 63 loads the word until it sees the new value.
4. Core 0 rereads it.

The simulation takes well under a second. Verilator's C++ build of 64
full-size tiles, however, takes roughly 15 to 25 minutes. For that reason no
such testbench is shipped in `tb/`. To repeat the test, instantiate
`tardis_top` with no parameter list in a copy of `tb_tardis_top` and set
`N = 64`.

The largest configuration exercised by the shipped tests is the 2 x 2
end-to-end test. The 64-tile default build passes lint and elaboration.

### Running a test

With Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tardis_pkg.sv \
    tb/tb_tardis_top.sv --top-module tb_tardis_top
obj_dir/Vtb_tardis_top +verilator+rand+reset+2
```

Adding `+trace` to `tb_tardis_top` prints the operations and L1 traffic of
core 3. Sizes are parameters of `tardis_top`: `MESH_X`, `MESH_Y`, `L1_SETS`,
`L1_WAYS`, `LLC_SETS`, `LLC_WAYS`, `SB_DEPTH`, `SELF_INC_PERIOD`,
`AHB_ENTRIES`, `MIN_THRESH`, `MAX_THRESH` and `CHECK_THRESH`. `node_t` is 8
bits wide, so up to 256 tiles (16 x 16) are addressable.
