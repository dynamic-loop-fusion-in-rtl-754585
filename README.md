# Dynamic loop fusion: a Data Unit that lets sibling loops share memory

Most irregular programs contain several loops in a row that read and write the
same array, with addresses nobody can analyse at compile time
(`A[f(i)] = work(A[f(i)])` followed by `B[g(j)] = work(A[g(j)])`). Static
scheduling cannot fuse such loops. Earlier dynamically scheduled hardware
(load-store queues) still runs them one after the other, because it orders
requests by basic block and looks for hazards by searching address histories.

Dynamic loop fusion removes that restriction with one condition: **within the
innermost loop, every address an operation produces must be non-decreasing.**
Each loop becomes its own processing element (PE), split into an address
generation unit (AGU) and a compute unit (CU). All PEs run at the same time. A
shared **Data Unit (DU)** sits between the PEs and memory. For every
dependency pair it only has to compare the next request of one operation with
the *most recent acknowledged* request of the other. This works because
monotonic addresses turn "has the other loop already passed this address?"
into a single `<` comparison. The DU also forwards values from pending stores
to loads, and it handles stores that were sent speculatively.

This repository holds synthesizable SystemVerilog for the DU, its ports, the
hazard check and the AGUs. A top level wires them into a two-PE example. The
design follows the FPGA '25 paper *Dynamic Loop Fusion in High-Level Synthesis*
(Szafarczyk, Nabi, Vanderbauwhede). Places where the paper says nothing, and
one place where this RTL knowingly departs from it, are marked below.

## The example system (`dlf_top`)

```
           i-loop shared by both PEs (each AGU replicates the loop control)
 AGU 0 (PE 0: for j) --ld0 req--> FIFO --+                +--> ld0 value --> CU 0 (outside)
                     --st0 req--> FIFO --+--> data_unit --+<-- st0 value+valid <-- CU 0
 AGU 1 (PE 1: for k) --ld1 req--> FIFO --+                +--> ld1 value --> CU 1 (outside)
                                              |
                          per-port memory channels (outside: coalescing LSUs, DRAM)
```

The program the top implements is the loop nest the paper uses to introduce
its schedule. `ld0` and `st0` form a read-modify-write of the same element, as
in `A[f(i)] = work(A[f(i)])`:

```
for (i = 0; i < n_outer; ++i) {
  for (j = 0; j < n_inner0; ++j) { v = A[f(i,j)]; A[f(i,j)] = work(v); }   // PE 0
  for (k = 0; k < n_inner1; ++k) { use(A[g(i,k)]); }                       // PE 1
}
```

Trip counts and the affine address functions `f`, `g` (`base + i*stride_outer
+ inner*stride_inner`) are inputs sampled at `start`. The compute units, the
dynamically coalescing DRAM load/store units and the DRAM itself are not
included. Their channels are ports of the top, and the testbenches play their
part (`tb/mem_model.sv` stands in for memory).

## The schedule: ordering requests of loops that run at the same time

Every request carries an address and a **schedule**: one 32-bit counter per
loop depth (`du_pkg::schedule_t`, element `d-1` is depth `d`, depth 1
outermost). An AGU starts all counters at 0. It increments counter `d` each
time the body of the depth-`d` loop is entered, and never resets a counter
when an inner loop restarts. For `for i<2 { for j<2 {...} }` the requests carry

| i, j | 0,0 | 0,1 | 1,0 | 1,1 |
|------|-----|-----|-----|-----|
| schedule | {1,1} | {1,2} | {2,3} | {2,4} |

Two operations that share loops up to depth `k` are ordered by comparing
element `k` alone. Two operations in the same iteration have equal counters.
The comparator tells them apart by their order in the loop body: it uses
`<=` if the checking operation comes first in the body, `<` otherwise. That
choice is made at compile time (`pair_cfg_t.a_first`). Each request also carries
`lastIter` bits, one per depth, set on the last iteration of that loop. When an
AGU is done it sends a **sentinel** request whose schedule is all ones.

`agu.sv` generates all of this for a perfect loop nest of `DEPTH` loops. It
sends one request per memory operation of its PE per iteration, on separate
valid/ready channels, at up to one iteration per cycle.

## The hazard check

`hazard_check.sv` is the whole disambiguation logic for one pair: destination
`a` (the operation that wants to issue) against source `b`. It is
combinational, and its configuration is a `pair_cfg_t` parameter:

| field | meaning |
|-------|---------|
| `en` | pair is checked (0 = pruned) |
| `k` | innermost loop depth shared by `a` and `b` (0 = none) |
| `a_first` | `a` comes before `b` in the loop body / program text |
| `l` | deepest loop depth `<= k` where `b`'s address can go down (non-monotonic), 0 = none |
| `li_mask` | `b`'s non-monotonic depths deeper than `k` (excluding its innermost) |
| `fwd` | RAW pair with store-to-load forwarding |
| `nodep` | RAW pair inside one loop: use the NoDependence bit |

With `op` = `<=` if `a_first` else `<`, and `ack` = the most recent ACKed
request of `b`:

```
ProgramOrder = k == 0 ? a_first
             : a.sched[k] op ack.sched[k]
               || (a.sched[k] op b.next.sched[k] && b.next valid && b has nothing pending)
NoReset      = AND(ack.lastIter[d] for d in li_mask)
               && (l == 0 || a.sched[l] == ack.sched[l] + delta)
safe         = ProgramOrder
               || (a.addr < ack.addr && NoReset)
               || (nodep && a.no_dep && NoReset)
```

In words: `a` may go if it comes before what `b` has already finished. It may
also go if `b` has already moved past `a`'s address and cannot come back to it
before reaching `a`'s point in time. `b` could come back only through an outer
loop that resets its address; the `l`-equality excludes that, and the
`lastIter` bits exclude a reset from a deeper non-monotonic loop.
`tb_reset_nest` runs a four-deep nest in which the store's address restarts
at depths 1 and 3. Clearing either the `l` setting or the `li_mask` bit makes
its loads read stale data.
**NoDependence** handles a load and a store in the same loop. The AGU sets it
when the load's address is above the most recent store address it sent. By
monotonicity, no store still to come before the load can then hit that address.
Without this term, the load would wait for the store pipeline at every
iteration.

**Departure from the paper: `delta`.** The paper sets `delta = 1` whenever `a`
precedes `b`. Here `delta = 1` only when in addition `l == k`, and `delta = 0`
when `l < k`. Take `l < k` and `a` one `l`-iteration ahead of `b`'s ACK. Then
`b` executes the earlier `k`-iterations of that `l`-iteration before `a`. Its
address may already have been reset there. The example's intra-loop pair
(`ld0` against `st0`: `k = 2`, `l = 1`) is such a case. With the paper's rule,
`tb_dlf_top` and `tb_sparse_rows` fail. A load early in a new row passes the
address check against the store's ACK from the previous row, then reads a word
that an earlier store of the new row has not yet written. The rule used here
never makes more requests safe than the paper's. The rule sits in the `DELTA`
localparam in `hazard_check.sv`.

With `fwd` set, the check compares `a` with the store's *frontier* instead of
its ACK. The frontier is the store's next request, or the last request that
entered its pending buffer when the next is not yet known. The store's pending
buffer then holds every earlier store the load might depend on.

## Ports, pending buffers and the ACK barrier

Each program load or store has its own port (`load_port.sv`, `store_port.sv`).
A port holds:

* **REQ registers**: the next request from the AGU FIFO.
* **ACK registers**: address, schedule and lastIter of the most recent request
  that has completed. Other ports' checks read these.
* a **pending buffer** (`pending_buffer.sv`): registers for requests that passed
  their checks but have not completed. It has 16 entries by default, one
  512-bit burst of 32-bit words. A circular buffer with `tail` (push), `issue`
  (next memory request) and `head` (oldest) pointers. Memory ACKs return by tag
  (the entry index) and may arrive in any order. Entries leave only from the
  head, once complete, and each departure writes the ACK registers. ACKs
  therefore move forward monotonically. This is the *ACK barrier*.

A **store** moves from REQ into its pending buffer when three things hold: its
value has arrived from the CU, all its WAR/WAW checks pass, and there is room.
The CU sends every store with a *valid* bit. That lets the AGU send requests of
stores under an `if` for every iteration (speculation), so that the DU always
sees the store's progress. An invalid store goes through the same checks and
takes a pending entry, but never reaches memory. At the head it completes at
once and still advances the ACK registers.

A **load** moves from REQ into its pending buffer when all its RAW checks pass.
At the same moment, the DU searches the pending buffers of its forwarding
stores with the load's address. A hit returns the youngest valid matching
value and completes the entry with no memory access. Otherwise a read goes to
memory. Values return to the CU in request order. The load's ACK registers
advance as values leave for the CU.

When a port has received its sentinel and its buffer has drained, its ACK
registers become all ones. Checks against it then succeed, and a loop that
finished early never blocks the others.

`data_unit.sv` instantiates `NUM_LD` load ports and `NUM_ST` store ports, and
one `hazard_check` for each configured RAW (`RAW_CFG[load][store]`), WAR
(`WAR_CFG[store][load]`) and WAW (`WAW_CFG[store][store]`) pair. A request
proceeds when every pair of its port is safe. The checks are combinational on
registered state. A request that arrives in the REQ registers can therefore
leave them in the next cycle, and a port with no hazards takes one request per
cycle.

## Configuring a DU for a program

The paper's compiler derives the pair table from the loop forest, the address
monotonicity analysis and the dependency graph. The table is written by hand
here: `dlf_cfg_pkg.sv` holds the one for the example, and its opening comment
explains each entry. To fill in a table:

1. One port per load and per store of the array. Loads never check loads.
2. For each remaining (destination, source) pair, set `k` to the innermost
   shared loop depth and `a_first` to the order of the two in the program text.
   If `k == 0` and the destination comes first, the pair is always safe: set
   `en = 0`.
3. Mark every loop depth of the source where its address can go down.
   Marking too many is safe but slower. `l` is the deepest such depth `<= k`;
   `li_mask` holds the marked depths between `k` and the innermost loop.
4. A WAR pair whose stored value is computed from the loaded value can be
   dropped. By transitivity, a check `a`-vs-`c` can be dropped when `a`-vs-`b`
   and `b`-vs-`c` exist. This does not apply when forwarding makes a WAW check
   necessary. With two forwarding stores and a load in one loop, removing the
   WAW check of the second store against the first makes `tb_two_store_fwd`
   fail.
5. Set `fwd` on RAW pairs that should forward, and `nodep` on RAW pairs inside
   one loop. The AGU must then produce the NoDependence bit
   (`agu.NODEP_STORE`, `NODEP_LOADS`).

The example top marks the outer `i`-loop of every operation as non-monotonic
(`l = 1`). It is therefore correct for any addresses that do not decrease in
the inner loops, including addresses that jump back at every `i`.

## Interfaces and timing

All channels are valid/ready. The types are in `du_pkg.sv`:

* `mem_req_t`: AGU to DU request: `addr`, `sched`, `last_iter`, `no_dep`.
* `st_val_t`: CU to DU store value: `data` and the speculation `valid` bit.
* `dram_req_t` / `dram_resp_t`: port to memory: `we`, `addr`, `wdata`, `tag`;
  the response returns `tag` (and `rdata` for reads). A write must be visible
  to later reads once its response has been given.

Reset is active low and asynchronous. It clears the counters, pointers, REQ
state and ACK registers (ACK = 0 means "nothing done yet"). `dlf_top.finished`
rises when both AGUs have sent their sentinels and every port has drained.
Event outputs (`ev_*`) pulse for one cycle whenever a mechanism fires: stalls,
forwarding hits, requests made safe by the program-order, address or
NoDependence term, mis-speculated stores. They are meant for counting.

## What is not here, and other choices

* **Dynamically coalescing LSUs, the ring interconnect to the DRAM controller,
  DRAM, and the compute units.** The paper takes the LSUs and interconnect from
  the vendor's HLS flow and describes only their behaviour: they buffer
  requests into 512-bit bursts and send an incomplete burst after 16 idle
  cycles. The CUs are the user's program. They are not modelled in RTL. Each DU
  port has its own memory channel, and one coalescing LSU would sit on each.
* The AGUs generate affine addresses only. The paper's AGUs run whatever
  address code the compiler keeps, including data-dependent (e.g. CSR)
  addresses that the programmer asserts to be monotonic. Any such AGU can drive
  the DU, whose request interface carries only the address, schedule,
  lastIter bits and NoDependence bit.
* In the paper, the check and the move into the pending buffer take several
  pipeline stages. Here they take one cycle.
* Widths are this design's choices: 32-bit addresses (word addresses) and
  values, at most 4 loop depths. The 32-bit schedule counters are the paper's.
  Pending buffers have 16 entries and AGU FIFOs 8.
* The sentinel value (all ones), the ACK reset value (zero), when a load counts
  as ACKed (when its value leaves for the CU) and the tag-based memory
  interface are not specified by the paper.

## Workloads

The paper evaluates the following kernels. Each one compiles to its own PEs and
DUs:

| kernel | PEs | DUs | loads / stores per DU |
|--------|-----|-----|-----------------------|
| RAWloop, WARloop, WAWloop (n = 10^7) | 2 | 1 | 1 / 1 |
| bnn | 2 | 1 | 2 / 2 |
| pagerank | 3 | 2 | 2, 1 / 2, 1 |
| fft | 2 | 2 | 4, 4 / 4, 4 |
| matpower | 2 | 1 | 4 / 2 |
| hist+add | 3 | 2 | 2, 2 / 1, 1 |
| tanh+spmv | 2 | 2 | 2, 1 / 1, 1 |

The default top implements one fixed two-PE program, and only RAWloop maps
onto it. The mapping is one `i`-iteration. The `j`-loop stores `A[j]` (the CU
may ignore the `ld0` value), and the `k`-loop loads `A[k]`. Its 10 million
iterations fit the 32-bit schedule counters and addresses. `tb_dlf_top` runs
this shape with 1000 elements. The loops take 2770 and 1715 cycles on their
own, 4485 cycles one after the other. Fused, they take 2729 cycles, about the
time of the slower loop alone.

`tb_sibling_loops` runs all three micro-kernels exactly as described: one
memory operation per loop, 1000 elements. Each loop has its own AGU, and a
`data_unit` is configured with the kernel's single cross-loop pair. A port the
kernel does not use receives only a sentinel.

| kernel | fused | loop 1 + loop 2 alone | ratio |
|--------|-------|-----------------------|-------|
| RAWloop | 1664 cycles | 3416 cycles | 0.49 |
| WARloop | 1771 cycles | 3426 cycles | 0.52 |
| WAWloop | 1703 cycles | 3357 cycles | 0.51 |

Two sibling loops over the same array can therefore run almost fully
overlapped, close to the 2x the paper gives as the limit for these kernels.
The second loop trails the first by a few elements, held back by the hazard
check. Cycle counts depend on the random latencies of the memory model.

The other kernels need other loop structures or port counts. Most also need
data-dependent (sparse-format) addresses, which the affine AGU cannot produce.
The Data Unit itself does not care where addresses come from. `tb_sparse_rows`
feeds the default `data_unit` the request streams that a bnn- or
pagerank-style row loop would produce: sorted columns, empty rows, and an
address reset at every row. Every value comes out right. `data_unit` can be
instantiated with the other kernels' port counts and pair tables.

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_dlf_top rtl/du_pkg.sv rtl/dlf_cfg_pkg.sv tb/tb_dlf_top.sv
./obj_dir/Vtb_dlf_top
```

Any other testbench runs the same way, with its name in place of
`tb_dlf_top`. Each has a watchdog and runs in seconds. Random stimulus
comes from `$urandom`; `+verilator+seed+N` changes it.

| testbench | what it establishes |
|-----------|--------------------|
| `tb_sync_fifo` | order, flags, one-cycle latency, write-while-full-and-read |
| `tb_hazard_check` | six pair configurations against a reference model of the equations, the schedule example, delta and lastIter cases |
| `tb_agu` | the schedule table above, addresses, lastIter, NoDependence, sentinel, one iteration per cycle |
| `tb_pending_buffer` | in-order release with out-of-order ACKs, invalid entries skip memory, youngest-valid search |
| `tb_load_port` / `tb_store_port` | stalls, forwarding, in-order values, ACK only after memory ACK, invalid stores, sentinel, load rate of one per cycle |
| `tb_data_unit` | 1 load and 2 stores with RAW (forwarding, NoDependence), WAR and WAW pairs against a sequential run of the program |
| `tb_sibling_loops` (with `loop_pair_bench`) | RAWloop, WARloop, WAWloop through AGUs and a Data Unit: every load value and the final array, a stall of the dependent loop, and fused time below 0.6 of the sequential time |
| `tb_sparse_rows` | the default `data_unit` fed with CSR-like streams (sorted columns per row, random and empty rows, address reset at every row), as a sparse kernel's AGUs would produce them: every load value and the final array, over 8 matrices |
| `tb_reset_nest` | a four-deep nest with the store's address restarting at depths 1 and 3, the load in a sibling depth-3 loop: RAW with `l = 1` and a lastIter mask, WAR, every load value and the final array over 12 random trip-count sets, with address-safe loads required |
| `tb_two_store_fwd` | two stores (one speculated) and a load in one loop, all forwarding, with the full RAW/WAR/WAW pair set: every load value and the final array, forwarding from each store, WAW stalls |
| `tb_dlf_top` | the whole example at default parameters over 15 runs (overlapping, resetting and disjoint address patterns), checked load by load and word by word against a sequential run; fails if any DU mechanism or the parallel execution of the two loops never occurs, or if the fused RAWloop-shaped run is not faster than 0.8 of its loops run one after the other |

The memory model makes a read see memory as of the moment the read is
accepted. A write becomes visible only when it is ACKed. Any read that the DU
lets through too early therefore returns a stale value, and the testbench
reports it.
