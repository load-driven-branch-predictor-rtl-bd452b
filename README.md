# Load Driven Branch Predictor (LDBP) in SystemVerilog

Some branches are hard for history-based predictors such as TAGE or IMLI.
Their direction depends on data, not on the path taken. A typical case is
`if (a[i])` in a loop over an array. The data are random, but the address of
each element follows a fixed stride. A predictor that knows the address of a
future `a[i]` can load the element early and compute the branch outcome
before the branch is fetched.

LDBP does exactly this, next to a normal predictor:

1. At retirement it spots a low-confidence branch whose two operands come
   from stride-predictable loads, through at most a few simple ALU
   operations. This path from loads to branch is the *load-branch chain*.
2. Each time that branch retires, LDBP issues *trigger loads*. These fetch
   the chain's data for the instance `TL_DIST` iterations ahead.
3. When the data return, a small FSM runs the chain's *backward slice*: the
   ALU operations plus the compare. The outcome is stored in a per-branch
   queue.
4. When fetch meets the branch and the outcome for that instance is ready,
   LDBP's prediction overrides the default predictor's.

This repository holds synthesizable RTL for the whole predictor. It also has
a self-checking testbench for every unit and an end-to-end testbench that
plays the core, the default predictor and the data cache.

## Block diagram

```
                 retire port (one instruction / cycle)
                        |
   +--------------------v---------------------+        ldbp_retire_block
   |  SP (48)   RTT (32)   PLQ (48)   CSB (32x4)|
   |              \          |         /       |
   |               +----- BTT (8) -----+       |
   +-------|alloc|flush|advance|install|push---+
           v                          v
   +-------------------------------+  +-----------------+
   | LOR (16) -> LOT (16 x 64 x 64b)|  | trigger queue   |--> trigger loads
   |  ^ completions                 |  +-----------------+
   |  dispatcher -> FSMs (2) -> BOT (8 x 64) -> prediction at fetch
   |                 ^ CST (8 x 8 ops)                |  ldbp_fetch_block
   +--------------------------------------------------+
                 low-power controller (ldbp_power_ctrl)
```

| Unit | Module | Entries (default) | Role |
|---|---|---|---|
| Stride Predictor (SP) | `ldbp_sp` | 48 | Per-load last address, delta, confidence and tracking bit. |
| Rename Tracking Table (RTT) | `ldbp_rtt` | 32 | Per register: operation count and the SP entries of the loads it came from. |
| Pending Load Queue (PLQ) | `ldbp_plq` | 48 | Tracking bits of loads in live chains; cleared on a delta change. |
| Code Snippet Builder (CSB) | `ldbp_csb` | 32 x 4 ops | Per register: the ALU operations that produced it. |
| Branch Trigger Table (BTT) | `ldbp_btt` | 8 | Tracked branches; allocation, flush, accuracy and trigger decisions. |
| Load Outcome Register (LOR) | `ldbp_lor` | 16 | Per tracked load: address window (`ldstart`, `delta`, `lot_pos`). |
| Load Outcome Table (LOT) | `ldbp_lot` | 16 x 64 x 64 bit | Returned trigger-load data, one queue per LOR. |
| Branch Outcome Table (BOT) | `ldbp_bot` | 8 x 64 | Precomputed outcomes per branch, plus the fetch pointer. |
| Code Snippet Table (CST) | `ldbp_cst` | 8 x 8 ops | Installed backward slice per branch. |
| Snippet FSM | `ldbp_fsm` | 2 instances | Runs one slice: one op per cycle, then a compare cycle. |
| Trigger queue | `ldbp_trigger_queue` | 8 | Buffers trigger-load addresses for the data cache. |
| Low-power control | `ldbp_power_ctrl` | 100,000 cycles | Gates LDBP off after a long stretch without predictions. |

The top is `ldbp` (`rtl/ldbp.sv`). Shared types live in `rtl/ldbp_pkg.sv`.

## Learning a chain (retirement side)

Every retired instruction goes through the retirement block in its own
cycle. The block handles one instruction per cycle.

**Loads** update the SP entry selected by `(pc>>1) mod 48`:

- A repeated delta raises the 3-bit confidence by one.
- A new delta lowers it by four and replaces the stored delta.
- A load is *predictable* when its confidence saturates.

With a constant stride, a load becomes predictable on its ninth execution:
one execution to allocate the entry, one to set the delta, then seven
repeats.

**The RTT** follows each register. A predictable load writes
`nops = 0` and a one-entry load list. A simple ALU op writes
`nops = nops(src1) + nops(src2) + 1` and the concatenation of the two load
lists. The register becomes invalid in three cases:

- more than four operations feed one source;
- more than five loads in total;
- it was written by any other instruction.

Immediates and `x0` count as empty sources.

**A conditional branch** reads the RTT entries of its two sources. It is a
candidate when all of the following hold:

- the default predictor was not confident;
- both sources are valid;
- the joint load list has one to five loads.

If its BTT entry is free, the branch allocates. The CSB must be idle and
enough LORs must be free. Allocation fans out in a single cycle:

- set the loads' SP tracking bits;
- append the loads to the PLQ;
- claim one LOR per load, with `ldstart = lastaddr + delta`;
- clear the BOT entry;
- start the CSB.

**The CSB** then records, for the next iteration, how each register is
computed. It stores operands as references: load slot *k*, earlier op *j*,
the op's own immediate, or zero. When the branch retires again, the two
source lists are concatenated into a slice of at most eight operations.
The slice is copied into the CST.

The concatenation renumbers the second source's references. Op indices
shift by the first list's length. Load slots shift by the first source's
RTT load count. That is the same order the RTT uses for the load list, so
load slot *k* of the slice is LOR slot *k* of the branch.

**On every later retirement of a tracked branch** (a BTT hit), the BTT keeps
the chain only if all of the following hold:

- the RTT still reports the same load list;
- all of its loads are still tracked in the PLQ;
- the accuracy counter has not reached zero.

The accuracy counter is 3 bits and starts at 4. It goes up by one when LDBP
was right and the default predictor would have been wrong, and down by one
in the opposite case.

If the chain is kept:

- the chain's windows advance by one instance;
- the slice is installed if this is the first hit after building;
- one trigger load per chain load is pushed, if the trigger queue has room
  for all of them. Otherwise that instance is simply not triggered.

If the chain is not kept, it is flushed: every structure releases its part
of the chain.

## Predicting (fetch side)

### Instance numbering

Each branch instance has a slot in two 64-deep circular queues: the LOT
data queue of each of its loads and the BOT outcome queue of the branch.
All of a branch's queues advance together.

The LOR of each load holds:

- `ldstart`: the address of the oldest instance not yet retired;
- `lot_pos`: the slot of that instance.

When a trigger load for address `addr` returns, every LOR checks it against
its window:

```
lot_id = (addr - ldstart) / delta      exact, 0 <= lot_id < 64
slot   = (lot_pos + lot_id) mod 64
```

The division is a six-step restoring division. A negative delta negates both
operands, and a zero delta never matches. One returned word can fill the
queues of several chains.

The trigger address for the instance `TL_DIST` ahead is
`ldstart + delta * TL_DIST`.

### The fetch pointer

The BOT keeps `outcome_ptr`: the number of instances of the branch fetched
but not yet retired. Fetch reads slot `(pos + outcome_ptr) mod 64`, which is
the same slot the LOT used for that instance's data.

- A fetch hit increments `outcome_ptr`. This is the only speculative state.
- Retirement releases the oldest slot, advances `pos` and decrements
  `outcome_ptr`.
- A pipeline flush resets `outcome_ptr` to zero, which re-aligns fetch with
  retirement.

**The flush rule.** The flush must be raised when every unretired
instruction is squashed, i.e. a flush at retirement. A newly allocated entry
makes no predictions until the first flush after its allocation. This is
because instances fetched before the allocation were never counted.

### Dispatching jobs to the FSMs

Each cycle the dispatcher looks for a ready slot and starts one job on a
free FSM. A slot is ready when:

- the branch's slice is installed;
- all of the branch's LOT entries hold data for that slot;
- its outcome is not yet known.

Because every LOT entry of a branch uses the same slot for the same
instance, one read port per LOT entry suffices.

The dispatcher picks the lowest BOT index first. Within it, it picks the
first ready slot at or after the next slot fetch will use. If a slot is
ready but both FSMs are busy, the dispatcher stalls (`ev_fsm_stall`).

A job is killed in two cases:

- its slot is released first, because the branch retired;
- its chain is flushed or re-allocated.

An FSM takes *N* cycles for *N* operations plus one compare cycle. Five
operations therefore take six cycles.

### Low-power mode

After 100,000 cycles without an LDBP prediction, the predictor enters
low-power mode. Gating is modelled as enables, so state is kept: no
lookups, no LOT writes, no dispatch, and no BTT or CSB activity. The stride
predictor and the RTT keep learning, so a chain can be recognised at once
after waking.

The BTT still checks each retiring branch. The first one that meets the
allocation condition wakes LDBP. Waking drops every chain, so learning
starts fresh.

## Interface of `ldbp`

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | Clock; synchronous active-low reset. |
| `f_valid`, `f_pc` | in | Conditional branch being fetched. |
| `f_hit` | out | The branch is tracked (combinational). |
| `f_pred_valid`, `f_pred_taken` | out | Use LDBP's direction (combinational). |
| `pipe_flush` | in | Every unretired instruction is squashed. |
| `ret` (`retire_t`) | in | One decoded retired instruction per cycle. |
| `tl_req_valid/addr/ready` | out/out/in | Trigger load to the data cache. |
| `tl_cmp_valid/addr/data` | in | Trigger load completion (any order). |
| `lp_mode` | out | LDBP is in low-power mode. |
| `ev_dispatch`, `ev_fsm_stall` | out | Activity counters. |

The `ret` port (`retire_t`) carries these fields:

- kind: load, simple ALU op, other register write, branch, or none;
- PC;
- destination and source registers;
- ALU op and immediate;
- branch condition;
- load address;
- resolved direction;
- the default predictor's confidence and direction;
- whether LDBP predicted this instance, and its direction.

The simple ALU ops are the RV64 integer ops add, sub, and, or, xor, shifts,
slt(u) and their 32-bit `w` forms.

The final prediction is LDBP's when `f_pred_valid` is high. Otherwise it is
the default predictor's.

## Sizes and storage

| Structure | Bits |
|---|---|
| LOR | 16 x (64 ldstart + 16 delta + 6 lot_pos + 6 stride pointer) = 1,472 |
| LOT | 16 x 64 x 64 = 65,536 |
| BOT | 8 x 64 outcomes + valid bits |
| CST | 8 x 8 x 32-bit ops |
| CSB | 32 x 4 x 32-bit ops |

A snippet operation is 32 bits:

| Field | Bits |
|---|---|
| op | 4 |
| operand a | 2-bit kind + 3-bit index |
| operand b | 2-bit kind + 3-bit index |
| immediate | 16 |
| spare | 2 |

Other defaults:

- SP and PLQ: 48 entries each;
- BTT, BOT and CST: 8 entries each;
- chains: up to 5 loads, 4 operations per source and 8 per branch;
- trigger distance: 16 instances;
- idle limit: 100,000 cycles.

## Where this RTL makes its own choices

The source description leaves several details open or states them in two
ways. This RTL settles them as follows:

- **When `ldstart` and `lot_pos` advance.** They advance when the tracked
  branch retires. Trigger generation happens at that moment too. The
  fetch-side position is kept separately as `outcome_ptr`. Advancing
  `ldstart` at every fetch was the other possible reading; it would make the
  LOR speculative as well.
- **What is speculative.** The BOT fetch pointer is the only state changed
  speculatively, and a pipeline flush resets it. The source also says in one
  place that the LOR is the speculative part. Both readings need a flush to
  recover. This design keeps the LOR purely retirement-driven.
- **Operation limits.** The per-source limit is the CSB depth (4). The
  per-branch limit is the CST depth (8). The source's tuning study finds three
  operations per chain enough, but it sizes the CST for eight, so eight is
  used.
- **Table indexing.** All tables are direct-mapped and indexed by the PC:
  `(pc>>1) mod N`. BTT, BOT and CST entry *i* always belong to the same
  branch.
- **Evictions.**
  - A candidate branch whose BTT entry is held by another branch flushes
    that chain. The new branch allocates at a later retirement.
  - The PLQ evicts round-robin when full.
- **Chain change.** A changed chain is detected by comparing the RTT's load
  list with the stored one.
- **Snippet format.** The 32-bit operation format and the operand-reference
  encoding are this design's own.
- **FSMs and dispatch.**
  - There are two FSMs.
  - The dispatcher starts one job per cycle.
  - The trigger queue is 8 deep.
- **Flush timing.** A pipeline flush is assumed to squash everything not yet
  retired, as described above.
- **Missing triggers.** Triggers are pushed all-or-nothing. An instance
  whose loads were not pushed is never predicted.
- **Parts not included.** The default predictor (IMLI), the core pipeline
  and the data cache are outside. The testbenches model them.

## Simulating

Every file in `rtl/` and `tb/` begins with a description of the unit and its
timing. Each testbench prints
`TB_RESULT checks=<n> failures=<m>`.

With Verilator 5, list the package first:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv \
    rtl/ldbp_pkg.sv tb/tb_ldbp.sv --top-module tb_ldbp -o sim
./obj_dir/sim
```

Replace `tb_ldbp` with any `tb_ldbp_<unit>` to test a single unit.

`tb/tb_ldbp.sv` runs the whole predictor at its default sizes for about
120,000 cycles, which takes a few seconds. It runs these kernels:

| Kernel | What it exercises |
|---|---|
| Vector loop | One load, no operations. |
| Two-source loop | Four loads and two `addw`. |
| Eight-operation slice | Run while the cache refuses requests in bursts, which causes trigger-queue backpressure and FSM stalls. |
| Stride jump | Chain flush on a delta change. |
| Wrong trigger data | Accuracy flush. |
| Idle then rerun | Entry to and exit from low-power mode. |

Checks:

- every LDBP prediction in the clean kernels equals the true outcome;
- LDBP covers most branches of each clean kernel;
- every mechanism listed above happened at least once.

`tb/tb_ldbp_workloads.sv` checks the patterns LDBP must decline, also at
default sizes:

- a load-load chain, as in connected-components code;
- a pointer whose step cycles through 4, 8 and 12 bytes, so the stride keeps
  changing.

For both it expects no allocation, no trigger load and no LDBP prediction. A
plain vector loop serves as the positive control.

## Known limits

- A branch whose operands come from a load whose address itself depends on
  loaded data (a load-load chain) cannot be tracked.
- A load with a fluctuating stride cannot be tracked either.
- Only one chain is kept per branch. A branch reached by several different
  slices is flushed and re-learned whenever the slice changes.
- Trigger loads are assumed to return the value the program will later load.
  A store between trigger and use shows up only as a misprediction, and
  lowers the accuracy counter.
