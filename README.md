# BedRock FSM coherence engine — SystemVerilog

This is RTL for the directory side of the BedRock cache-coherence system of
the BlackParrot RISC-V multicore. The engine is the FSM-based coherence engine
(CCE). BedRock keeps the private L1 instruction and data caches of every core
coherent with a MOESIF directory protocol. It has three unusual properties:

* **The directory decides everything.** A cache never changes a block's
  coherence state on its own. The one exception is the silent E→M upgrade on a
  store. Evictions go through the directory too: a cache names its victim way
  in the request, and the directory evicts the block with a command.
* **The directory is a duplicate of the cache tags.** For every L1 cache it
  tracks, the engine keeps a copy of that cache's tag array, with a tag and a
  3-bit state per way. The copy is exact, so the directory's storage is a fixed
  fraction of the caches it tracks. It never needs directory evictions.
* **Transactions are ordered per way group.** A way group is one cache set
  seen across all caches. Each engine owns a subset of the way groups. It
  processes one transaction per way group at a time, but transactions to
  different way groups may overlap.

The engine modelled here is one slice of an 8-core system. There is one
engine per core, and each owns 8 of the 64 way groups. The slice tracks all
16 L1 caches, which are 8-way with 64-byte blocks.

## Protocol in one page

A cache (the *LCE*, local cache engine) sends **requests** to the engine:

* ReqRd (read), ReqRd with the non-exclusive hint, or ReqWr (write);
* uncached load or store;
* an atomic.

The engine answers with **commands**:

* `DATA`: a fill from memory;
* `STW`: set state and wake up, which grants an upgrade;
* `Inv`: invalidate;
* `ST-WB`: set state and write back;
* the transfers `TR`, `ST-TR` and `ST-TR-WB`: tell an owner cache to send its
  block straight to the requester, optionally changing its own state and
  writing back to memory;
* `UC_DATA`: the result of an uncached load.

Caches reply with **responses**: CohAck (the transaction has completed at the
requester), InvAck, NullWB or DirtyWB. A transferred block travels on a
fourth network, the *Fill* network, directly between caches. It never passes
through the engine.

For a cached request, the engine decides as follows:

| Requester wants | Block elsewhere | Engine action | Requester gets |
|---|---|---|---|
| read | nowhere | memory fill | E (S if non-exclusive) |
| read | S copies | memory fill | S |
| read | E owner | `ST-TR-WB`, owner → F, null or dirty write-back | S |
| read | M owner | `ST-TR`, owner → O | S |
| read | O or F owner | `TR`, owner keeps its state | S |
| write | nowhere | memory fill | M |
| write | S copies | Inv each copy, then memory fill | M |
| write | E/M/O/F owner | Inv the S copies, then `ST-TR` to I | M |
| write, holds S/O/F | anything | Inv the others (and an O/F owner), then `STW` | M |

If the requester's victim way holds a block in E, M or O, that block is first
evicted with `ST-WB` to I. The victim way is the LRU way named in the request.
A victim in S or F is simply overwritten.

Uncached requests to cacheable memory work as follows. Every valid copy is
removed: S/F copies get Inv, and an E/M/O copy gets ST-WB to I. A dirty copy
is written to memory. Only then does the uncached access go to memory.
Uncached requests to I/O space, below address `0x8000_0000` here, bypass coherence
entirely.

## Way groups, pending counters and speculation

Each way group has a small **pending counter**. A request may start only when
its way group's counter is zero, checked in `READ_PB`. The counter changes as
follows:

* **+1** when the request starts;
* **+1** when the engine sends a memory command for the block, that is, the
  speculative read or a write-back;
* **−1** when the requester's CohAck arrives;
* **−1** when the last beat of a memory response for a cacheable address is
  consumed;
* **−1** when an uncached request to cacheable memory finishes. This cancels
  the +1 of its memory command in the same cycle, so that cycle writes
  nothing.

So a way group stays blocked until every message of the previous transaction
has drained. Reading the counter forwards that cycle's decrements. A waiting
request therefore starts in the same cycle the last acknowledgement arrives.

To hide memory latency, every cached request to cacheable memory sends a
**speculative block read** to memory before the directory has been consulted.
Its assumed result is M for a write, S for a non-exclusive read and E
otherwise. The way group's **speculative-bits entry** records the outcome once
the directory has been read:

* *squash*: the block came from another cache, or the request was an upgrade;
* *forward*: the assumed state was right;
* *forward-modified*: forward, but with the corrected state (for example S
  instead of E because another cache holds the block).

The memory response FSM holds a speculative response back while its way
group's entry is still unresolved.

## The duplicate-tag directory

Each engine has one **segment** per cache type. Segment 0 holds the 8
instruction caches and segment 1 the 8 data caches. LCE `2k` is core k's I$
and LCE `2k+1` its D$. A segment is a single-ported SRAM of 32 rows × 496 bits.
Each row holds two *tag sets*, each of 8 ways × {28-bit tag, 3-bit state}.

```
row(cache c, way group g) = (c / 2) * 8 + g        horizontal slot = c % 2
```

The rows of caches 0–1 for way groups 0–7 come first, then those of caches
2–3, and so on.

A segment supports four operations:

* **Way-group read.** The segment reads the 4 rows of a way group in
  consecutive cycles. Each row passes through the **tag checker**, which gives
  hit, way and state for each of the row's two caches. It also passes through
  the **LRU extractor**, which picks the requester's victim entry from the one
  row that holds the requester. The read costs **1 + C/2 = 5 cycles** and
  produces three *sharers vectors* indexed by LCE id: hit, way and state.
* **Entry read.** Takes 2 cycles.
* **Entry or state write.** Takes 1 cycle, and one can be issued every cycle.
* **Row clear.** The engine clears all rows after reset.

The **GAD** unit (Generate Auxiliary Directory information) is combinational.
From the sharers vectors it computes everything the FSM branches on:

* the requester's own copy;
* the owner, if any, meaning a cache in E/M/O/F;
* the cached-in-state flags;
* replacement, upgrade and transfer;
* the invalidation set;
* the next states of the requester and of the owner.

## The request FSM and its occupancy

One request is processed at a time, from `READY` back to `READY`. Decisions
between states cost nothing: the next state is picked in the same cycle the
current state's work is done.

```
READY → READ_PB → COH_REQ → SPEC_RD → READ_DIR (1+C/2) → GAD → WRITE_NEXT
      → [REPL_CMD → REPL_RESP]                       replacement
      → [INV_CMD ×S → INV_ACK ×S]                    invalidations
      → UPGRADE | TRANSFER [→ TRANSFER_WB] | –       resolve source
      → RESOLVE (speculation outcome) → READY
uncached, cacheable:   … → [UC_OWNER_CMD → UC_OWNER_RESP] → UC_MEM_CMD
                       [→ UC_DATA per extra store beat] → READY
uncached, I/O space:   READY → UC_REQ [→ UC_DATA per extra beat] → READY
```

On an idle system the engine reproduces the published FSM occupancies
exactly. The published figures assume no replacement; the two replacement
rows below are what this design adds. C is the number of cores (8), N the number of beats per
block (8) and S the number of invalidations. The end-to-end testbench
measures each case below:

| Request (directory state) | Cycles | Measured |
|---|---|---|
| read, I | 8 + C/2 | 12 |
| read, S | 8 + C/2 | 12 |
| read, E clean | 9 + C/2 | 13 |
| read, E dirty (silently M) | 9 + C/2 + N | 21 |
| read, M / O / F | 9 + C/2 | 13 |
| write from I, I | 8 + C/2 | 12 |
| write from I, S | 8 + C/2 + 2S | 16 (S=2) |
| write from I, E/M | 9 + C/2 | 13 |
| write from I, O/F | 9 + C/2 + 2S | 17 (S=2) |
| write from S, S | 9 + C/2 + 2(S−1) | 15 (S=2) |
| write from S or O, O/F | 9 + C/2 + 2S | 15 (S=1) |
| + clean replacement (this design's) | +2 | 14 |
| + dirty replacement (this design's) | +1 + N | 21 |
| uncached load to I/O, one beat | READY + 1 per beat | 2 |
| uncached store to I/O, N beats | READY + 1 per beat | 9 |

There is one place where the state chart and the occupancy table disagree.
For a read of a clean E block, the chart shows a one-cycle write-back-response
state before speculation is resolved. The table counts 9 + C/2. This design
follows the table: the null write-back is consumed in the same cycle that
resolves the speculation.

CohAcks are consumed in any state, alongside the FSM, and only decrement the
pending counter.

## Memory response FSM

This FSM has three states:

* `READY` examines a response;
* `FWD` forwards the remaining beats of a block;
* `SINK` drops the remaining beats.

It handles responses as follows:

* Block reads become `DATA` commands to the LCE named in the response.
  Speculative ones are first squashed or forwarded according to the
  speculative bits.
* Uncached loads and atomics with a return value become `UC_DATA`.
* Write acknowledgements are dropped.

The FSM has priority on the command network; the request FSM waits while a
block is being forwarded. On the last beat it returns a memory credit. For a
cacheable address it also decrements the pending counter. The **flow
counter** allows 8 outstanding memory commands. A state that would send a
memory command waits while no credit is left.

This FSM never sends a memory command, so only the request FSM drives the
memory command port. Block diagrams of BedRock draw both FSMs into that
port's multiplexer, but the described behaviour gives this FSM nothing to
send there.

## Interface of the top, `bp_cce_fsm`

Every network is a stream of packed *beats* with valid/ready. Each beat
carries the full message header, one 64-bit data word and a `last` flag. A
block takes 8 beats; header-only messages and uncached accesses take 1. The
types are in `bp_cce_pkg`:

| Port | Direction | Type |
|---|---|---|
| `lce_req_i` / `_v_i` / `_ready_o` | in | `lce_req_msg_t` |
| `lce_resp_i` / `_v_i` / `_ready_o` | in | `lce_resp_msg_t` |
| `lce_cmd_o` / `_v_o` / `_ready_i` | out | `lce_cmd_msg_t` |
| `mem_cmd_o` / `_v_o` / `_ready_i` | out | `mem_msg_t` (header has a `spec` bit) |
| `mem_resp_i` / `_v_i` / `_ready_o` | in | `mem_msg_t` |
| `ready_o` | out | request FSM idle |

Each input channel enters through a 2-entry bypass FIFO.

Parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_CORES` | 8 | the configuration the paper evaluates |
| `TAG_SETS_PER_ROW` | 2 | tag sets in each directory row |
| `CCE_ID` | 0 | which slice this is |
| `MEM_CREDITS` | 8 | outstanding memory commands allowed |

Reset is synchronous and active high. After reset the engine spends 32 cycles
clearing the directory before `ready_o` rises.

## What is this design's own

The following follow the BedRock description:

* the protocol;
* the block structure;
* the directory organisation and its timings;
* the pending and speculative mechanisms;
* the FSM states and the occupancies.

The following are choices made here, where the description is silent:

* the 40-bit physical address, giving the 28-bit tag of 64 sets × 64 B;
* the 64-bit beat;
* every message encoding and the state encoding (I S E F M O = 0–5);
* the LCE numbering;
* the way-group hash: set index without its low 3 bits, which select the
  engine;
* the cacheable/I-O boundary;
* the queue depths;
* the number of memory credits;
* the 3-bit width of the pending counters;
* command priority between the two FSMs;
* the post-reset clear.

Uncached loads and atomics are single-word. Uncached stores carry 1 to 8
beats, to either kind of memory, and the memory answers each uncached store
with one response.

Not built:

* The microcode-programmable engine. Its ISA is given only as a list of
  operations, with no encodings and no microcode.
* The caches' own controllers (LCEs), the on-chip networks, and the L2 and
  memory. The testbench models these.
* The optional accelerator-cache directory segment.

The directory storage figure quoted for BedRock (3.625 KiB per engine)
corresponds to 29-bit entries, and the quoted 6.25% storage overhead to
32 bits per 64-byte block. The stated 28-bit tag plus 3-bit state gives 31
bits, or 3.875 KiB. This RTL uses 31-bit entries.

## Files

* `rtl/bp_cce_pkg.sv`: geometry, states and message types.
* `rtl/bp_cce_sram_1rw.sv`: directory SRAM, with a synchronous read and a
  per-bit write mask.
* Directory: `rtl/bp_cce_tag_checker.sv`, `rtl/bp_cce_lru_extract.sv`,
  `rtl/bp_cce_dir_segment.sv` and `rtl/bp_cce_directory.sv`.
* `rtl/bp_cce_gad.sv`, `rtl/bp_cce_pending_bits.sv`, `rtl/bp_cce_spec_bits.sv`
  and `rtl/bp_cce_flow_counter.sv`.
* `rtl/bp_cce_bypass_fifo.sv`, `rtl/bp_cce_fsm_req.sv`,
  `rtl/bp_cce_fsm_mem_resp.sv`, and the top `rtl/bp_cce_fsm.sv`.
* `tb/tb_<module>.sv`: a self-checking testbench per unit. Each ends by
  printing `TB_RESULT checks=N failures=M`.

## Verification

* **`tb_bp_cce_fsm`** is the end-to-end test, run at the default size. It
  surrounds the engine with models of the rest of the system:
  * 16 behavioural caches that follow the cache-side protocol table, carry
    real data, and exchange Fill-network transfers;
  * a memory with fixed latency that the test can freeze.

  It runs in three phases:
  1. It measures every occupancy in the table above on an idle system.
  2. It exhausts the memory credits with I/O loads while memory is frozen.
  3. It runs about 4,000 random loads, stores, uncached accesses and atomics
     from all 16 caches to a small pool of blocks.

  Throughout, it checks the following:
  * every loaded value against a reference memory;
  * a single writer and a single owner per block;
  * that every command arrives in a state the cache table allows;
  * that the pending counters and credits drain at the end.

  It also counts the mechanisms. Each of these must occur at least once:
  * multi-beat uncached stores, to memory and to I/O;
  * pending stalls;
  * squashed, forwarded and forward-modified speculative reads;
  * responses held by the speculative bit;
  * exhausted credits;
  * clean and dirty replacements;
  * invalidations and upgrades;
  * all three transfer kinds, including a dirty one;
  * uncached accesses to memory and to I/O;
  * atomics;
  * owner write-backs on uncached requests.

  `+trace` prints a per-cycle trace.
* The unit testbenches compare each block with an independent reference model.
  They also check the latencies: a 5-cycle way-group read, a 2-cycle entry
  read and 1-cycle writes. The segment testbench takes its cache count and its
  tag sets per row from two localparams. It also passes with 1, 4 and 8 tag
  sets per row for 8 caches; the way-group read then takes 1 + 8 / (tag sets
  per row) cycles.

To simulate with Verilator, list the package first:

```
verilator --binary --timing --assert -Wno-fatal rtl/bp_cce_pkg.sv \
  $(ls rtl/*.sv | grep -v pkg) tb/tb_bp_cce_fsm.sv --top-module tb_bp_cce_fsm
./obj_dir/Vtb_bp_cce_fsm
```

The design contains assertions for:

* counter overflow and underflow;
* credit misuse;
* the command-network priority rule.
