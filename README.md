# VAR-DRAM controller RTL

Process variation makes some DRAM banks slower than others: their cells need a
longer row-active time (tRAS) before data is restored. VAR-DRAM does not make
the whole device run at the pace of its slowest bank. Instead, it:

- pairs each slow bank (a *victim*) with a healthy bank (its *target*);
- moves the victim's data into free space in the target;
- cuts the victim's supply with a sleep transistor;
- keeps serving the victim's addresses from their new locations.

The host sees no change in the address space. It only sees a few extra cycles
on accesses to the addresses that were moved. When the healthy banks run short
of space, the victims are powered up again and their data is copied back.

This RTL is the controller side of that scheme:

- the address translator;
- the variation matrix;
- two hardware tries;
- the remapping (migration) unit;
- the utilization counters;
- the power-management unit;
- a memory controller with two tRAS values;
- a behavioural sleep-transistor model per bank.

The variation sensors and the DRAM array itself are outside. They connect
through ports of `varram_top`.

## Geometry and addresses

The default system is **4 ranks of 8 banks** (32 banks). Each bank has 32,768
rows of 1,024 64-bit words, so each rank holds 2 GB.

A word address (`dram_addr_t`, 30 bits) is `{rank[1:0], bank[2:0], row[14:0],
col[9:0]}`.

- Rank and bank together form a 5-bit bank index. Per-bank state is indexed by
  it: V, power gates and counters.
- For the tries, the address is zero-extended to a 32-bit key and cut into four
  8-bit symbols. The first symbol therefore holds the rank, the bank and the
  top row bits.

Each host request carries one word. The controller handles one request at a
time.

## FLAG: the three states of the system

A 2-bit FLAG in the remapping unit (`remap_unit`) decides how every address is
treated:

| FLAG | Meaning | How a victim-bank address is served |
|------|---------|-------------------------------------|
| `00` | normal | as is; no translation |
| `01` | migrating | as is if not yet moved; from its new place once moved |
| `10` | remapped, victims off | always from the target bank |

The MSB of FLAG steers the address decoder's DEMUX and MUX. At `00` the
address bypasses translation entirely and costs one cycle.

Otherwise the translator (`addr_translator`) reads the bank's entry in the
**variation matrix V** (`var_matrix`). V is one entry per bank:
`{victim, target rank, target bank}`. For a victim bank the translator
searches the **primary trie**, which maps a victim address to its row and
column in the target bank:

- **Hit:** the address moves to the target bank at the stored row/column. If
  that row/column differs from the victim's own, the move is a *collision*
  correction. The translator raises `intr` (INTERRUPT) and stalls three more
  cycles, standing for the recomputation of the address.
- **Miss at `01`:** the word has not moved yet and is served from the victim
  bank, which is still powered.
- **Miss at `10`:** the word has never been written. It goes to the same
  row/column of the target bank (the simple translation) and is flagged
  `pending`. A write to a pending address first gets a word of its own (see
  "The first write after closing").

Latency of one translation:

| Case | Cycles |
|------|--------|
| Non-victim address, or FLAG `00` | 1 |
| Victim address (trie lookup) | 4 |
| Victim address with INTERRUPT | 7 |

The memory controller gives every translated access the longer victim tRAS.
This is the design's way of keeping the extra translation time inside the
DRAM timing budget instead of stretching the command timing.

## The two hardware tries

Both tries are instances of `hw_trie`: a 256-ary trie four levels deep over
the 32-bit key.

- **Primary trie** (1,048,576 leaves): the translation table, from victim
  address to target row/column.
- **Auxiliary trie** (2,097,152 leaves): the set of every address that holds
  data. It is written on every host write, with the effective address after
  translation. It answers two questions:
  - which victim words must be migrated;
  - whether a destination word in a target bank is already in use.

### Storage

Each node has a 256-bit child bitmap and 256 child pointers. The pointers sit
in one large memory indexed by `{node, symbol}`. At levels 0–2 a pointer names
a node; at level 3 it names a leaf.

Nodes and leaves come from two counters in allocation order. They are released
only by a full `clear` (one cycle), which works because a node's bitmap is
zeroed when the node is allocated. A leaf stores the full key next to its
value. This lets the leaf table be read out in order through the `sc_*` port.
The remapping unit uses this instead of a recursive walk of the tree to list
the addresses of a bank.

### Lookup

Lookup is a three-stage pipeline that takes a new key every cycle:

1. Stage 1 resolves levels 0 and 1.
2. Stage 2 resolves levels 2 and 3.
3. Stage 3 reads the leaf.

`lk_done` follows `lk_valid` by exactly three cycles. The original scheme
clocks one level per clock edge with dual-edge flip-flops. Here the same
three-cycle latency comes from resolving two levels per rising edge.

The primary trie has two lookup ports:

- the translator's;
- the remapping unit's, which checks whether a word was already moved.

### Insert

An insert walks one level per cycle and creates missing nodes. It finishes
five cycles after it is accepted. `ins_new` reports a key that was not there
before. `ins_full` reports that a pool ran out, in which case nothing is
stored.

### Sizing

The tries' total budget is about 2% of a 2 GB device:

- 2^21 addresses in the auxiliary trie;
- half as many in the primary trie.

The node pools (32,768 and 16,384 nodes) are this design's choice. With
256-way nodes, a dense region of the address space fills each last-level node
with up to 256 leaves, so these pools keep the pointer memory near the budget.
Sparse keys exhaust the node pool earlier, and that is also watched (next
section).

At full size the two tries hold about 390 Mbit of memory. A gate-level netlist
of the top is therefore very large (hundreds of MiB) even though the logic
around the memories is a few thousand cells. In silicon these arrays would be
SRAM macros.

## Utilization and reopening

`util_counter` counts, per bank, the distinct words written, taken from the
auxiliary trie's `ins_new`. It also reads how many leaves and nodes each trie
uses.

Every `CHECK_PERIOD` cycles (default 64) it compares each figure with 90% of
its capacity. The two results get different responses.

**A target bank at 90%** (`bank_over`) is the target-bank overflow case. Only
the victim paired with that bank comes back:

1. its sleep signal is cleared;
2. after its power good, `open_one` starts a back-migration of that
   victim's entries alone;
3. its V entry is cleared.

FLAG stays at `10` and the other pairs stay closed. A bank at 90% that is not
a target triggers nothing.

**A trie pool at 90%** (`trie_over`) is the pre-emptive case: the device is
running short of the space the scheme needs. Every bank comes back:

1. `power_mgmt_unit` clears every sleep signal.
2. It waits until every bank's `pwr_good` is set.
3. It asks the remapping unit to migrate back.
4. When FLAG is `00` again, it clears V and **locks**.

After reopening, no further closing is accepted until reset. If every pair
has come back through overflow, the same full reopening follows. It has
nothing left to copy, but it clears the translation table and returns FLAG
to `00`.

## Migration: `remap_unit`

### Closing

A closing starts from the power-management unit. It has received the sensors'
victim vector (`var_valid`, `var_victim`) and written V.

**Pairing:** the lowest-numbered victim gets the lowest-numbered healthy bank
not yet used as a target, one pair per cycle. Each victim needs a target of
its own. If victims outnumber healthy banks, the victims left without a
target stay powered and untranslated.

**Dynamic closing** (`dynamic = 1`):

1. FLAG goes to `01`.
2. The remapping unit walks the auxiliary trie's leaf table.
3. For each address in a victim bank, it proposes the same row/column in the
   target bank and checks that destination in the auxiliary trie.
4. If the destination is taken (a collision), it increments the column,
   carrying into the row at the end of a row, until a free word is found.
5. It records the destination in the auxiliary trie, so it cannot be chosen
   twice, and the mapping in the primary trie.
6. It asks the memory controller for a one-word RowClone copy (`CMD_COPY`).

When the scan is done, FLAG becomes `10`. The power-management unit then
raises the victims' sleep signals, and their contents are lost.

**Static closing** (`dynamic = 0`) covers victims known at start-up that hold
no data. FLAG goes straight to `10` and nothing is copied.

### Writes during migration: the write table

A host write to a victim word that is not yet moved cannot go to the victim
bank, because the copy might already be under way, or might come later and
overwrite the new data with the old. The memory controller therefore:

1. posts the address to a small **write table** (4 entries) in the remapping
   unit;
2. parks the write.

The remapping unit serves table entries before its scan: the stalled word is
migrated at once, its entry is marked done, and `wp_done` lets the controller
retry the write. The retry now translates to the new location. When the scan
later reaches the same address, it finds it in the primary trie and skips it.

### The first write after closing

At FLAG `10`, an address of a victim bank that was never written has no
primary-trie entry. Sending it to the same row/column of the target bank would
overwrite the target's own data if that word is in use. Nothing would copy the
word back on reopening either.

The translator flags such an address `pending`. A write to it goes through
the write table, like a stalled write during migration. The remapping unit
then allocates a free target word for it (collision search, primary-trie
entry, no copy), and the write is retried. Reads of pending addresses return
whatever the simple translation points to; such a word was never written.

### Reverse migration

On `open`:

1. FLAG stays at `10`, so translation stays in force, and host writes are
   held (`block_writes`).
2. Every primary-trie entry is copied back from its target location to its
   victim address.
3. The primary trie is cleared and FLAG returns to `00`.

A single-bank reopening (`open_one`) walks the same table but copies only
the entries of that victim bank. It keeps FLAG at `10` and the table intact.
The victim's stale entries are never consulted again once its V entry is
clear. Writes stay held until the power-management unit has cleared that
entry, so no write is translated to the old place in between. A later full
reopening skips entries whose V entry is no longer a victim.

### Counters

The remapping unit counts migrations, collisions, priority migrations and
back-copies. `varram_top` brings these counts out.

## Memory controller and timing

`mem_ctrl` is an open-page controller: rows stay open after access, and a
different row in the same bank causes a precharge. It uses DDR4-2400 cycle
counts (1.2 GHz command clock):

| Parameter | Cycles | Origin |
|-----------|--------|--------|
| tRCD | 16 | own choice |
| tRP | 16 | own choice |
| CL | 16 | own choice |
| tRAS | 39 (32 ns) | own choice |
| tRAS of victim-translated rows (`T_RAS_V`) | 61 | tRAS + 18 ns, the tRAS increase of variation-affected cells |
| RowClone copy (`T_COPY`) | 48 | own choice |

The command spacing is exact:

- PRE → ACT = tRP;
- ACT → RD/WR = tRCD;
- RD → data to host = CL;
- COPY → `cp_done` = T_COPY;
- ACT → PRE ≥ tRAS, or ≥ T_RAS_V when the row was opened for a translated
  access.

A copy needs both banks precharged. When a host request and a copy both wait,
the controller alternates between them. A write parked on the write table does
not block copies: the controller serves copies from the parked state (this is
what lets the stalled word be migrated) and returns to the write afterwards.

Every host request passes through the translator. A request that the
translator marks `pending` or that targets a not-yet-migrated word while
migrating is posted to the write table if it is a write.

## Power gating

`bank_power_gate` is a behavioural model of one bank's header sleep
transistor:

- `vdd_bank` falls at once when `sleep` rises;
- after `sleep` falls, `pwr_good` follows `WAKE_CYCLES` (12, own choice)
  cycles later;
- it counts wake-ups.

The controller never addresses a bank whose `bank_on` (= `pwr_good`) is low.

## Consistency rules, and where they stop

Three rules keep every host word readable through a closing and a reopening:

- a victim word is never written while its copy may be pending (write table);
- a translated word never lands on a target word in use (auxiliary-trie
  collision check, also for first writes after closing);
- reverse migration holds host writes.

One case is not covered. After closing, a host write *to a target bank's own
address* whose word was taken by relocated victim data overwrites that data.
Translation protects victim addresses, not native target addresses. The
scheme as published has the same gap: it reserves free target words only at
the time of migration. The testbenches avoid such writes.

## Departures from the published scheme

- **Translation during migration.** The published scheme keeps translation
  inactive while FLAG is `01`. Here, words already migrated are redirected
  during `01`; without this, reads and writes of moved words would hit stale
  copies.
- **Speculation.** The simple translation is not issued speculatively and then
  cancelled by INTERRUPT. The trie result is awaited and INTERRUPT adds its
  three stall cycles before the address is released. Cycle counts match;
  nothing is issued that must be cancelled.
- **Dual-edge flip-flops.** Same latency, obtained from a single edge (see
  the trie section).
- **Scheduling.** The controller serves one request at a time in order. The
  evaluated system's "rank then bank round robin" scheduling across a request
  queue is not built.
- **Refresh.** Refresh is not issued, and the remapping of weak rows to
  shorten refresh is not built.
- **Performance rule.** The rule to skip power-down when performance degrades
  faster than the chips decay is not built; no measure of either rate is
  defined.
- **Channels.** Channels are not modelled. Migration stays within a channel,
  so one instance of `varram_top` corresponds to one channel.
- **Unspecified sizes.** Copy granularity (one word), write-table depth (4),
  node-pool sizes, check period and wake-up time are not specified by the
  scheme. Their values here are choices.
- **Sensors and array.** The variation sensors and the DRAM array are
  outside the RTL.

## Files

`rtl/`:

- `varram_pkg.sv`: geometry, address struct, FLAG, command enum, key
  functions.
- `var_matrix.sv`
- `hw_trie.sv`
- `addr_translator.sv`
- `remap_unit.sv`
- `util_counter.sv`
- `power_mgmt_unit.sv`
- `mem_ctrl.sv`
- `bank_power_gate.sv`
- `varram_top.sv`

`tb/` has one self-checking testbench per module, `tb_<module>.sv`, plus:

- `tb_varram_full.sv`: the end-to-end scenario at default sizes;
- `tb_varram_workload.sv`: the evaluated memory configurations at default
  sizes;
- `dram_model.sv`: a behavioural DRAM array. It keeps words sparsely, checks
  ACT/RD/WR/PRE/COPY timing and bank state, and wipes a bank when its supply
  drops.

Every testbench:

- compares against a reference it computes itself;
- checks the latencies above cycle by cycle where they apply;
- has a watchdog;
- ends by printing `TB_RESULT checks=N failures=M`.

The end-to-end tests (`tb_varram_top` at small trie sizes, `tb_varram_full`
at the defaults) go through dynamic closing under traffic, translated
read-back with INTERRUPT, first writes after closing, reopening with
back-migration, refusal of a second closing, and static closing after a
reset. `tb_varram_top` also takes one target bank past 90% of a reduced
bank capacity, so that one victim comes back on its own.

The end-to-end tests fail if any of these mechanisms never occurs: row hits,
migration, collisions, stalled writes, priority migration, copies,
back-migration, INTERRUPT, victim accesses, static closing and, in
`tb_varram_top`, the target-bank overflow.

`tb_varram_workload` runs the evaluated memory configurations at default
sizes: 2 GB (one rank, banks 0–7) with 2 and 4 banks closed, and 4 GB (two
ranks, banks 0–15) with 4 and 8 banks closed. Each configuration writes a
footprint over a few rows of every bank, closes a random victim set under a
mix of streaming and random traffic, keeps running traffic with the banks off
(including first writes to new victim words), and reads everything back. The
traffic mix is synthetic; the benchmarks' own address traces are not part of
this RTL. A typical run:

| Configuration | Requests | Migrated | Collisions | Stalled writes | INTERRUPTs | Bank-cycles gated after closing |
|---------------|----------|----------|------------|----------------|------------|---------------------------------|
| 2 GB, 2 of 8 down | 2,537 | 182 | 4 | 141 | 26 | 23.8% |
| 2 GB, 4 of 8 down | 2,505 | 207 | 8 | 124 | 64 | 45.7% |
| 4 GB, 4 of 16 down | 2,990 | 241 | 6 | 156 | 47 | 22.8% |
| 4 GB, 8 of 16 down | 2,992 | 310 | 15 | 144 | 74 | 42.5% |

The gated share stays below the victim fraction (25% or 50%) by the time the
migration itself takes. Many writes stall because the traffic deliberately
writes victim words while they are being moved.

The full-size run writes about 1.9 million words to reach the 90% trie mark
and issues about 3.8 million requests. It takes a few minutes.

## Simulating

With Verilator 5 (the package first; the module directories are searched for
the rest):

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/varram_pkg.sv tb/tb_varram_top.sv --top-module tb_varram_top
./obj_dir/Vtb_varram_top
```

Replace `tb_varram_top` with any other testbench name.

Sizes are parameters of `varram_top`:

- `PRI_LEAVES`, `PRI_NODES`, `AUX_LEAVES`, `AUX_NODES`: trie pools;
- `CHECK_PERIOD`: utilization check period;
- `T_*`: timing;
- `WAKE_CYCLES`: wake-up time.

The geometry (ranks, banks, row and column widths, word width) lives in
`varram_pkg`. The assertions in the modules check handshake rules and
parameter ranges; run with `--assert` to enable them.
