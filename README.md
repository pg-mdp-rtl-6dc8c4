# PG-MDP memory dependence unit

An out-of-order core lets loads run ahead of older stores whose addresses are
still unknown. A memory dependence predictor (MDP) decides which loads should
wait instead. Store Sets is a common choice for small cores. It is a tiny,
untagged, PC-indexed table, so unrelated loads that hash onto a store set's
entry are made to wait for stores they never touch. These *false dependences*
are what holds such a core back.

Profile-guided memory dependence prediction (PG-MDP) takes most loads out of
the predictor altogether. A profiling run finds the static loads that almost
never read a value from a nearby in-flight store. The compiler or binary
rewriter then gives those loads an alternate opcode. The hardware change is
small:

* a *labeled* load does not query the predictor, so it never waits on a
  prediction, occupies no MDP read port and does not count toward the
  periodic clear;
* if a labeled load is still caught by a memory order violation, the core
  squashes and refetches as usual, but the predictor is **not** trained on it.

The predictor then holds only the loads that really need it. Fewer loads
alias with each other, there are fewer false dependences, and fewer read ports
are needed for the same performance.

This repository holds synthesizable SystemVerilog for the memory dependence
part of such a core, as a RISC-V implementation:

* decode of labeled loads;
* the dispatch-side read-port limit;
* an XS Store Sets predictor, the XiangShan variant of Store Sets with
  several store slots per set;
* the load and store queues that enforce the predictions, forward store data
  and detect violations.

Fetch, rename, the ROB, the issue queue, the execution units and the caches
are not included. They connect through the ports of the top module,
`pgmdp_mdu`.

## Structure

```
pgmdp_mdu                      top: one dispatch group per cycle
 |- pgmdp_label_decoder  x W   opcode -> none / load / labeled load / store
 |- pgmdp_port_limiter         in-order prefix that fits MDP ports, LQ, SQ
 |- pgmdp_store_sets           XS Store Sets predictor
 |   |- pgmdp_ssit             PC -> store set ID      (128 entries)
 |   '- pgmdp_lfst             store set ID -> stores  (64 entries x 2 slots)
 |- pgmdp_store_queue          26 entries, forwarding, drain to cache
 '- pgmdp_load_queue           41 entries, dependence wait, violation search
pgmdp_pkg                      sizes, types, queue-position arithmetic
```

The default sizes are those of a small efficiency-class core:

* 6-wide fetch and commit;
* a 41-entry load queue (LQ) and a 26-entry store queue (SQ);
* an SSIT of 128 entries;
* an LFST of 64 entries with 2 slots each;
* a predictor clear every 125 000 queries.

## Dispatch: labels and read ports

Each dispatch lane is decoded by `pgmdp_label_decoder`. A labeled load is an
ordinary RISC-V `LOAD` moved onto the custom-0 major opcode (`0001011`). The
I-type layout and the `funct3` width field are unchanged, so the binary layout
and instruction bandwidth stay the same. The opcode is the parameter
`LABEL_OPCODE`. `LOAD-FP` instructions are always ordinary loads.

`pgmdp_port_limiter` models a predictor with `MDP_PORTS` read ports, which
answers within the cycle:

* every store and every ordinary load uses one port;
* a labeled load uses none;
* the group is accepted as the longest in-order prefix that fits the ports,
  the free LQ and SQ entries, and `backend_ready`; the rest waits a cycle.

The default `MDP_PORTS = 6` equals the dispatch width, i.e. no port limit.
Smaller values give the port-constrained configurations, for example 3 ports
with labeling against 5 without. `disp_port_stall` and `disp_cap_stall` say
why a group was cut short.

Accepted loads and stores get their LQ/SQ *positions* (see below) in the same
cycle. Each load also records the SQ position of the next younger store. Every
store at an earlier position is older than the load.

## The predictor (XS Store Sets)

`pgmdp_ssit` is a direct-mapped, untagged table. It maps a PC to a valid bit
and a 6-bit store set ID (SSID). The index folds two 7-bit PC fields with an
exclusive-or. Aliasing between PCs is left in on purpose: it is the effect
PG-MDP relieves.

`pgmdp_lfst` maps an SSID to 2 slots. Each slot holds the SQ position of a
recently dispatched store of the set.

* **A dispatched store** with a valid SSID writes its position into a free
  slot, or else into the slot a round-robin pointer names.
* **A dispatched ordinary load** with a valid SSID takes all valid slots as
  the stores it must wait for. With several slots, one load can wait on
  stores from different program paths.
* **An executing store** frees the slots that hold its position.
* **Within one dispatch group**, lanes are handled in order: a load sees a
  store of the same set in an earlier lane of the same cycle.

`pgmdp_store_sets` joins the two tables and trains them. When the load queue
reports a violation between load L and store S:

* neither has an SSID: both get a fresh one from a round-robin counter;
* one has an SSID: the other joins it;
* both have one: both take the smaller.

If L is labeled, the violation is only counted (`train_skip_lbl`); the tables
are not touched. Both tables are invalidated together every `CLEAR_PERIOD`
predictor queries. Labeled loads never reach the predictor, so they do not
advance this count.

## Load and store queues

### Positions

Both queues are circular, and 41 and 26 are not powers of two. A queue of N
entries therefore names its entries by a *position* counted modulo 2N. The
entry index is `pos mod N`, and the extra range acts as the wrap bit. Two
positions are compared by age through their distance from the queue head.
`pos_add`, `pos_dist` and `pos_idx` in `pgmdp_pkg` do this arithmetic. Inside
the queues, each entry's age is computed once per cycle from its fixed index,
so every search runs over all entries in parallel.

### Waiting on predicted stores

`dep_ready[e]` is the memory-dependence half of the issue condition for LQ
entry e. A prediction holds the load back only while the store it names is
all three of:

* still in the SQ;
* older than the load;
* not yet executed.

A prediction that names a store that has drained, or that belongs to a younger
store after the SQ position was reused, is ignored. Labeled loads carry no
prediction and are always ready.

### Forwarding

An executing load gives its address to `pgmdp_store_queue`. The SQ looks for
the youngest store that is older than the load, has executed, and overlaps
the load's bytes. Older stores that have not executed are passed over; this is
the speculation the predictor polices.

* If that store covers every byte of the load, its data is forwarded
  (`ld_fwd_hit`).
* If it covers only some of the bytes, the load must retry later
  (`ld_fwd_stall`).
* If no store matches, the load reads the cache.

### Violation detection

When a store executes, `pgmdp_load_queue` looks at every load that is
younger than the store, has executed, and overlaps the store. Such a load
read stale data unless its value came from a store younger than this one. So
a load is flagged when either:

* it read the cache; or
* it forwarded from a store older than the executing one, *or from a store
  that has since drained from the SQ*.

The drained case needs care. The forwarding source's position may have been
reused by then, so a plain position comparison would wrongly call it younger.

The load executing in the same cycle is checked with its current address and
forwarding result, so a store and a load that pass each other in one cycle
are not missed. Of all flagged loads, the oldest is reported one cycle later
on `viol_*`, with:

* the load's LQ position and PC;
* its labeled bit;
* the SQ position from which younger stores must be discarded.

The squash itself is the core's job. It drives `flush_valid` with the LQ and
SQ positions to keep up to. The unit's own training happens by itself.

### False dependences

A *false dependence* is a load that carried a prediction but did not take its
data from any of the predicted stores. It waited for nothing. These are
counted (`cnt_false_deps`), together with:

* predictor queries, load queries and labeled loads;
* violations, all and labeled;
* port stalls and clears.

## Interface and timing of `pgmdp_mdu`

| group | signals | timing |
|---|---|---|
| dispatch | `disp[W]` (valid, PC, instruction), `backend_ready` -> `disp_accept`, `disp_cls`, `disp_lq_pos`, `disp_sq_pos`, `disp_size`, `disp_unsigned`, stall flags | combinational; state updates at the clock edge |
| issue | `dep_ready[LQ_ENTRIES]` | combinational from queue state |
| load pipe | `ld_valid`, `ld_pos`, `ld_addr`, `ld_size` -> `ld_fwd_hit`, `ld_fwd_stall`, `ld_fwd_data` | combinational search; one load per cycle |
| store pipe | `st_valid`, `st_pos`, `st_addr`, `st_size`, `st_data` | one store per cycle |
| violation | `viol_valid`, `viol_lq_pos`, `viol_sq_pos`, `viol_pc`, `viol_labeled` | registered, one cycle after the store |
| retire | `commit_ld`, `commit_st` (counts, oldest first) | clock edge |
| squash | `flush_valid`, `flush_lq_pos`, `flush_sq_pos` (first position dropped) | clock edge; overrides dispatch that cycle |
| cache | `dc_wr_valid/ready/addr/mask/data` | committed stores drain one per cycle |

Accesses are naturally aligned, 1 to 8 bytes within one doubleword. Addresses
are 48 bits and data 64 bits. `ld_fwd_data` is shifted down to the load's
offset; sign or zero extension (`disp_unsigned`) is left to the load unit. The
low three bits of `dc_wr_addr` are always zero, because the store queue drains
whole doublewords with a byte mask.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DISPATCH_W` | 6 | dispatch lanes (fetch/commit width) |
| `MDP_PORTS` | 6 | predictor read ports (6 = unconstrained) |
| `LQ_ENTRIES`, `SQ_ENTRIES` | 41, 26 | queue sizes |
| `SSIT_ENTRIES` | 128 | SSIT size, power of two |
| `LFST_ENTRIES`, `LFST_SLOTS` | 64, 2 | LFST size and slots per entry |
| `CLEAR_PERIOD` | 125000 | queries between predictor clears |
| `LABEL_OPCODE` | `7'b0001011` | major opcode of labeled loads |

The medium core of the same study is
`#(.DISPATCH_W(8), .MDP_PORTS(8), .LQ_ENTRIES(85), .SQ_ENTRIES(66), .SSIT_ENTRIES(256), .LFST_ENTRIES(128))`.
It is simulated by `tb_pgmdp_mdu_medium`.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* **Decoder, port limiter, SSIT, LFST, store queue:** randomized stimulus,
  checked against reference models written in the testbench.
* **Store sets and load queue:** directed scenarios. These cover:
  * training and merging of SSIDs;
  * labeled loads that skip training;
  * the clear;
  * dependence waits and stale predictions;
  * every violation case above, including the same-cycle and drained-source
    cases.

`tb_pgmdp_mdu` and `tb_pgmdp_mdu_full` run the whole unit under a small
in-order-retire core model (`tb/pgmdp_mdu_driver.sv`). The model:

* keeps a ROB;
* issues ready loads in random order;
* resolves some store addresses late;
* squashes and refetches on violations;
* drains stores to a memory model.

Every committed load value is compared with a sequential reference execution.
The loop mixes:

* labeled loads;
* truly dependent loads;
* a load whose PC aliases another in the SSIT;
* a labeled load that is sometimes dependent;
* a byte store under a doubleword load.

The test fails if any of the following never occurs:

* a queue-full stall;
* a prediction wait;
* forwarding;
* a partial-overlap retry;
* an ordinary violation;
* a labeled violation;
* a false dependence;
* a store drain;
* a predictor clear;
* a port stall, when ports are limited.

`tb_pgmdp_mdu` uses 2 read ports and a short clear period.
`tb_pgmdp_mdu_full` uses every default and runs about 370 000 cycles
(25 000 loop iterations), enough to pass a 125 000-query clear.

`tb_pgmdp_mdu_medium` runs the same program on the medium-core sizes, with
a 256-entry ROB.

`tb_pgmdp_mdu_ports` runs twelve copies side by side: 1 to 6 read ports, each
with the profile labels applied and with them removed (labeled loads encoded
as ordinary loads). It checks that labeling lowers, on this loop:

* predictor queries, at every port count;
* port stalls, for 1 to 4 ports;
* false dependences, over the sweep.

For example, with 2 ports, port stalls fall from about 1260 to 440. The
program is a synthetic loop, so the cycle counts it prints are no measure of
real workloads. Here they are bound as much by the single load pipe and the
late stores as by the ports.

To run one, with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_pgmdp_mdu rtl/pgmdp_pkg.sv tb/tb_pgmdp_mdu.sv
./obj_dir/Vtb_pgmdp_mdu            # add +trace for a per-cycle log
```

## Where this design makes its own choices

Beyond its sizes, the original description models the core in a simulator and
gives the predictor only at the level of its algorithm. The following are
choices of this implementation:

* **ISA and encoding:** RISC-V with the custom-0 opcode. The AArch64 form,
  using a spare `opc` encoding, is not built.
* **SSIT:** the index hash and the SSID width.
* **Training:** how SSIDs are allocated and how two sets are merged.
* **LFST slots:** they hold SQ positions rather than sequence numbers, and
  their replacement order is chosen here. The XiangShan allocation refinements
  are not described anywhere available and are not modelled.
* **Clear:** the clear counts predictor queries.
* **Pipes:** one load pipe and one store pipe.
* **Partial overlap:** the load retries instead of merging bytes.
* **False dependences:** the definition used by the counter.

The profiling step is software and lies outside the hardware:

* measuring how many stores separate each load from the store it depends on;
* labeling loads above a threshold (8 stores for the small core).

The ROB, issue queue, caches, prefetchers and branch predictor of the
simulated core are not part of this RTL.
