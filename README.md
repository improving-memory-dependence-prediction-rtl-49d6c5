# Memory dependence prediction with compiler "predict no dependency" labels

An out-of-order core lets a load run before older stores whose addresses are
still unknown. When such a store later turns out to write the load's address,
the load read stale data: a memory order violation, repaired by a rollback. A
memory dependence predictor (MDP) learns which loads were caught this way and
makes them wait for the store they collided with. The predictor used here is
**Store Sets**: a PC-indexed *Store Set ID Table* (SSIT) maps each load and
store PC to a store set, and a *Last Fetched Store Table* (LFST) remembers the
youngest in-flight store of each set.

The SSIT is untagged, so two unrelated PCs that share an index share a set.
A load that has never conflicted with anything can then be told to wait for a
store it does not depend on (a *false dependence*), which costs performance,
mostly in small tables.

The idea implemented here removes that problem for loads a compiler can prove
safe. A static analysis marks loads that have no dependence on any store or
call in their loop nest. The marked loads use distinct opcodes, so the
marking needs no extra instruction bandwidth. A load carrying this **PND
("predict no dependency") label**:

* makes **no MDP lookup**, so it can never get a false dependence and issues
  as soon as its registers are ready;
* is **never trained into the MDP** when it causes a violation;
* is **still checked** by the load queue like every other load. If it really
  did alias an older store, the violation is detected and rolled back as
  usual, so the label changes the speculation and never the result.

The RTL here is the memory-dependence part of such a core. It contains the
Store Sets predictor with the PND bypass, an issue queue for memory
operations, and a load queue and a store queue. The rest of the core is
outside the unit and reached through its ports: front end, register renaming
and wakeup, reorder buffer, and caches.

## Files

| file | content |
|---|---|
| `rtl/mdp_pkg.sv` | widths, the `mem_uop_t` micro-op struct, `seq_older()` |
| `rtl/ssit.sv` | Store Set ID Table and the training rules |
| `rtl/lfst.sv` | Last Fetched Store Table |
| `rtl/mdp_clear_timer.sv` | clear-period counter |
| `rtl/store_sets_mdp.sv` | the predictor: SSIT + LFST + timer + PND bypass + statistic counters |
| `rtl/mem_issue_queue.sv` | issue queue slots for loads and stores |
| `rtl/store_queue.sv` | in-flight stores, store-to-load forwarding, write at commit |
| `rtl/load_queue.sv` | in-flight loads, violation search |
| `rtl/pnd_mem_dep_unit.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Configurations

The design is parameterised by three core sizes. The defaults are the
*small* (phone-class) configuration, where labels help most.

| parameter | small (default) | large | extra large |
|---|---|---|---|
| `SSIT_ENTRIES`, `LFST_ENTRIES` | 32 | 128 | 256 |
| `CLEAR_PERIOD` (memory ops) | 7808 | 31232 | 62464 |
| `IQ_ENTRIES` | 64 | 192 | 384 |
| `LQ_ENTRIES`, `SQ_ENTRIES` | 32 | 96 | 192 |

The clear period is 244 memory operations per table entry. Both table sizes
must be powers of two. The published configurations also list a pipeline
width (8/12/12), a reorder buffer (192/576/1024) and caches. This unit does
not model any of them.

## How a memory operation flows

1. **Dispatch**, one op per cycle. The op is inserted into the issue queue
   and into the load queue or store queue. `disp_ready` drops while a needed
   queue is full, and also in a rollback cycle. A load with `pnd` set skips
   the predictor when `pnd_enable` is high. Any other op looks up
   `SSIT[pc]`. If that entry is valid and `LFST[ssid]` names an in-flight
   store, the op is given a predicted dependence on that store. A dispatched
   store in a known set also becomes the set's last fetched store. So stores
   of one set are ordered among themselves too.
2. **Issue.** Each cycle the issue queue picks the oldest op that meets both
   conditions:
   * its register operand has been woken (`wk_valid`/`wk_tag`);
   * its predicted store, if any, has executed.

   The op is registered into the single execute stage.
3. **Execute**, one cycle after issue.
   * A load searches the store queue for the youngest older store with a
     known, equal address and takes that store's data. If there is none, the
     load reads memory through `mem_rd_*`, which must answer in the same
     cycle.
   * A store writes its address and data into the store queue. It releases
     ops waiting on it in the issue queue and in the LFST. It then searches
     the load queue for younger loads that have already executed with the
     same address.
4. **Violation.** `squash_valid`, `squash_seq` and `squash_pc` are high for
   one cycle and name the *oldest* violating load. In that cycle:
   * every op not older than that load is dropped from all queues, from the
     LFST and from the execute stage;
   * the SSIT is trained with the (store PC, load PC) pair, unless the load
     is labelled.

   The surrounding core must re-dispatch from that load, with new sequence
   numbers.
5. **Commit.** The core commits in program order (`cm_*`). A committing store
   appears on `mem_wr_*` in the same cycle and leaves the store queue.

Instruction age is a 16-bit sequence number compared modulo 2^16
(`seq_older`). The queues find entries by sequence number, not by position,
so they need no head or tail pointers and a rollback is one compare per
entry.

## Store Sets details

* SSIT index: `pc[log2(SSIT_ENTRIES)+1 : 2]`, the PC bits above the 4-byte
  AArch64 instruction offset. PCs `SSIT_ENTRIES*4` bytes apart collide.
* Training on a violation between load PC L and store PC S:
  * neither L nor S has a set: both get SSID `pc[log2(LFST_ENTRIES)+1:2]` of L;
  * only one of them has a set: the other joins it;
  * both have sets: both take the smaller SSID.
* An LFST entry is released when the store it names executes. The release
  matches by sequence number across all entries, so a store whose PC was
  moved to another set while it was in flight still releases its old entry,
  and no op can wait forever. Entries naming rolled-back stores are
  invalidated.
* Every `CLEAR_PERIOD` dispatched memory operations, labelled loads included,
  both tables are wiped. This stops the tables from saturating.
* Counters: `lookup_count`, `pnd_skip_count`, `train_count`,
  `pnd_viol_count` (violations caused by labelled loads, which are not
  trained) and `clear_count`. Each dispatched op adds 1 to either
  `lookup_count` or `pnd_skip_count`.
  `lookup_count` is the lookups-per-kilo-instruction measure of the
  evaluation.
* `pnd_enable = 0` treats every load as unlabelled. The same binary then runs
  on the plain predictor. This is how labelled and unlabelled runs are
  compared.

## The known weak spot of labels

A labelled load is proven independent only *within its loop nest*. If a store
to the same address comes just before the loop and is still in flight, the
labelled load can overtake it. That causes a violation each time, because the
predictor is never allowed to learn the pair. The end-to-end testbench builds
exactly this case. Its load `L_P` reads `a[i-1]`, written by the previous
iteration's slow store. The testbench checks that these violations are
detected, rolled back and never trained.

## What this design chooses where the source is silent

* One memory op is dispatched, issued and executed per cycle. The
  published core is 8 or 12 wide, and the number of memory ports is not
  stated.
* Only memory ops sit in the issue queue. A register dependence is modelled
  as one source tag plus a wakeup broadcast.
* The memory read is combinational. The caches are not modelled.
* The load queue and the store queue each have the "LSQ entries" size.
* Accesses are aligned 64-bit words, so equal addresses is the alias test.
* The training rules, the SSID derivation and the LFST release and squash
  rules follow the classic Store Sets algorithm. The labels modify only
  the lookup and the training.
* Reset is active-low and asynchronous, and it clears every valid bit.
* The predictor names the *instance* of the store to wait for, by its
  sequence number. Describing it as "the PC of the store" would not let the
  queue tell two in-flight instances of the same store apart.
* No index-collision counter is included. Such a counter needs PC tags in
  the SSIT. It is a measurement aid, not part of the mechanism.
* The decoding of the labelled opcodes is not included, because their
  encodings are not published. The label arrives as the `pnd` bit of
  `mem_uop_t`.

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `tb_ssit`, `tb_lfst`, `tb_mem_issue_queue`, `tb_store_queue` and
  `tb_load_queue` run random stimulus against a reference model written
  independently in the testbench. Directed cases come first.
* `tb_mdp_clear_timer` checks that a clear comes exactly on every 7808th
  operation.
* `tb_store_sets_mdp` is a directed walk through these cases:
  * training;
  * a predicted wait;
  * store-to-store ordering;
  * the PND skip;
  * the label-disable mode;
  * a labelled violation that is not trained;
  * an aliasing PC and the false dependence it causes;
  * release on store execution;
  * squash;
  * the periodic clear.
* `tb_pnd_mem_dep_unit` runs the top at its default sizes. It plays the rest
  of the core: in-order dispatch, register wakeup after a per-op delay, a
  reorder buffer, commit, replay after a rollback, and data memory.
  * The program is a 2000-iteration loop of 8 memory ops: 16,000 ops, over
    16,000 dispatches and two table clears.
  * Labels are on for the first half and off for the second.
  * Every committed load value is checked against a sequential execution of
    the program. So is the final memory.
  * The test counts each mechanism and fails if one never happened:
    * a trained violation;
    * an untrained labelled violation;
    * a predicted wait;
    * a lookup skip;
    * forwarding;
    * a clear;
    * a dispatch stall;
    * the label-disabled mode.

Running one testbench with Verilator 5:

```
verilator --binary --timing --top-module tb_pnd_mem_dep_unit -Irtl -Itb -y rtl -y tb \
    rtl/mdp_pkg.sv tb/tb_pnd_mem_dep_unit.sv
./obj_dir/Vtb_pnd_mem_dep_unit
```

The other sizes are reached by overriding the top's parameters, for example
`-GSSIT_ENTRIES=128 -GLFST_ENTRIES=128 -GCLEAR_PERIOD=31232 ...` when the top
is built on its own.
