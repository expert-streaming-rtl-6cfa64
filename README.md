# Expert streaming on a multi-chiplet MoE accelerator

## The idea

A Mixture-of-Experts layer runs each token through a few of many experts
(feed-forward sub-networks). On an edge accelerator built from several
chiplets, low batch sizes make this awkward:

- The expert weights do not fit on chip, so they stream in from DDR.
- Each expert is reused by only a handful of tokens.
- Token counts are very skewed: a few "hot" experts take most tokens, and a
  long tail of "cold" experts takes one or two.

Expert parallelism (each chiplet owns some experts) leaves chiplets idle
while a hot expert's owner works.

This design follows the opposite approach, fully sharded expert–data
parallelism (FSE-DP, from the Expert Streaming method). Tokens stay where they
are, and experts move:

- Each expert is cut into `NUM_MS` **micro-slices**.
- The chiplets that hold tokens for the expert form its **trajectory**, a
  logical ring.
- Every micro-slice travels once around that ring. Each chiplet applies it to
  its own tokens and passes it on.
- Each ring member fetches only its share of the slices from DDR, so the
  DDR traffic for an expert is paid once and split between the members.

Many experts flow at the same time. Their slices share the chiplets' small
expert buffers and are interleaved by four simple local rules rather than by
a global timetable.

A central scheduler on the IO die decides which expert starts when:

- it sorts the experts by token count;
- it pairs compute-heavy (hot) experts with transfer-heavy (cool) ones;
- it lets requests with QoS slack skip a layer instead of forcing a cold
  expert to load for a single token;
- it starts each expert as soon as a chiplet on its trajectory is idle.

The RTL here covers the two control planes of that system:

- the per-layer scheduler;
- the per-chiplet micro-slice flow controller and the die-to-die network
  between the controllers.

The datapath (MAC arrays, SRAM, DDR, UCIe PHYs) is outside the RTL. It
appears as ports: a DDR fetch port and a PE-array job port on every chiplet.

## Block map

```
                       expert_streaming_top
 ┌──────────────────────── moe_scheduler (IO die) ───────────────────────┐
 │ gate results ─► eit_reloader ─► eit (count, trajectory per expert)    │
 │                     │                                                 │
 │                     └─► bitonic_sorter ─► expert_pairing ─► queue     │
 │                     └─► cold vector ─► token_buffering ─┘  (cold_keep)│
 │ queue window ─► ec_matcher ◄─ idle_chiplet_vector ◄─ release          │
 │                     └─► sched_router ─► task packets ─────────────────┼─┐
 └───────────────────────────────────────────────────────────────────────┘ │
   ┌───────────── msflow_ctrl × NUM_CHIPLETS (compute dies) ◄──────────────┘
   │  slots, contexts, Rules 1-4 ── DDR fetch port / PE job port (out)
   └──── tx/rx micro-slice headers ◄──► nop_xbar (die-to-die network)
```

| File | Role |
|---|---|
| `fse_pkg.sv` | Shared widths, the task packet (`task_t`) and the micro-slice header (`mshdr_t`). |
| `eit.sv` | Expert Information Table: token count and trajectory mask per expert. Registered read. |
| `eit_reloader.sv` | Streams a layer's gate results into the table, the sorter and the cold vector. |
| `bitonic_sorter.sv` | Bitonic network over all experts, one stage per clock. Sorts in descending order. |
| `expert_pairing.sv` | Writes the queue: hot pairs from both ends, then the kept cold experts. |
| `token_buffering.sv` | Per-request QoS timer and pass counter; decides deferrals. |
| `idle_chiplet_vector.sv` | One idle bit per chiplet: AND-NOT on dispatch, OR on release. |
| `ec_matcher.sv` | Picks the expert to start and its entry chiplet c\*, or a pre-load target. |
| `sched_router.sv` | Sends task packets to chiplets, turns busy edges into releases, counts outstanding work. |
| `moe_scheduler.sv` | Sequences the above per layer. |
| `traj_route.sv` | From a trajectory mask: next hop, own rank and ring length. |
| `msflow_ctrl.sv` | The micro-slice flow controller of one compute die. |
| `nop_xbar.sv` | Registered crossbar carrying micro-slice headers between dies. |
| `expert_streaming_top.sv` | The scheduler, `NUM_CHIPLETS` controllers and the network. |

## Micro-slice flow on a chiplet (`msflow_ctrl`)

This block is the heart of the design and the least obvious part.

### What a slot holds

Each chiplet has `NUM_SLOTS` buffer slots. A slot holds one micro-slice
*descriptor*: expert, slice index and remaining visits. The weights live in
SRAM at the slot's address and are moved by the data-movement unit; the
controller only names the slot.

A slot is in one of four states:

- `FREE`
- `LOADING`: a DDR fetch is in flight.
- `READY`: the slice is waiting for the PE array.
- `ACTIVE`: the slice is being computed and, if needed, sent on.

A slot frees when its computation has finished and its send (if any) has been
accepted by the network.

### Experts and contexts

A task packet opens an expert in one of `NUM_CTX` contexts. The context
records:

- the expert id;
- the ring length `T`;
- this chiplet's rank `k` in the ring, and the next hop (from `traj_route`);
- a fetch pointer and a count of slices computed here.

The ring order is ascending chiplet number, wrapping around. An expert is
finished on a chiplet when all `NUM_MS` slices have been computed there and
none is left in a slot. The controller then pulses `done_valid` and frees the
context.

### Visits

A slice fetched from DDR starts with `T` visits. Each computation that
forwards it sends it on with one visit less, so the slice is dropped on the
chiplet just before the one that fetched it. Every member therefore computes
every slice exactly once.

### The four rules

1. **Rule 1.** A slice received from the previous chiplet is computed as
   soon as the PE array is free, ahead of anything local. While it is
   computed, its header is sent to the next hop.
2. **Rule 2.** With nothing received waiting, a locally fetched slice is
   computed and sent on in the same way.
3. **Rule 3.** A slice with no visit left is released when its computation
   ends.
4. **Rule 4.** Whenever there is room, the chiplet fetches the next slice of
   its share from DDR. Member `k` of a `T`-member ring fetches slices `k`,
   `k+T`, `k+2T`, and so on. Running experts are served before held ones.

### Held pre-loads

The scheduler can open an expert on one chiplet as *held*: the chiplet fetches
its share but computes nothing until the run task arrives. This hides the DDR
latency of an expert that is next in line while its ring is still busy.

### Deadlock avoidance

Slices of different rings share the same slots. A cycle of full chiplets,
each waiting to send into the next, would stop everything. The paper does not
discuss this. The controller uses bubble flow control:

| Action | Condition |
|---|---|
| Forward a received slice | One free slot at the next hop (the network's ready). |
| Inject a local slice (Rule 2) | At least two free slots at the next hop, read from `peer_free`. |
| DDR fetch, running expert | At least three free slots here. |
| DDR fetch, held expert | At least four free slots here. |

A fetch therefore always leaves the two slots that a neighbour needs to
inject into this chiplet. An earlier version fetched with only two free
slots. At full size it deadlocked: every chiplet sat at one free slot, full of
local slices that it could not inject.

### Timing

Task, DDR, PE and send outputs come from registers. The status signals
`free_slots`, `ctx_free` and `rx_ready` are decoded from the slot and
context registers without a further register stage. The send header is
stable until accepted (this is asserted). Only one send can be pending at a time. The PE array is
treated as one job at a time: `pe_start` to `pe_done`.

## Scheduling one layer (`moe_scheduler`)

### Load

After gating, software streams one entry per expert: id, token count and
trajectory mask. There must be exactly `NUM_EXPERTS` entries, one per clock
at most. Each entry is written into:

- the table;
- the sorter's input registers;
- a cold flag, set when `0 < count < theta_min`.

### Sort

A start pulse runs the bitonic network. It is folded to one stage per clock,
each stage using `NUM_EXPERTS/2` compare-exchange units. 128 experts take 28
clocks.

In the same cycles, token buffering evaluates the layer:

- A request earns one credit in its QoS timer `T` each time its pass counter
  `C` reaches `n_threshold`.
- The request is deferred if it activates a cold expert and has a credit.
  Deferral spends the credit.
- Cold experts still activated by some active, non-deferred request form
  `cold_keep`.

Choosing `n_threshold` sets the slack (how often a request may wait).

### Pair

With `H` hot experts (count ≥ `theta_min`), the queue is written one entry
per clock as sorted[0], sorted[H-1], sorted[1], sorted[H-2], …. The kept cold
experts follow, hottest first. Experts with no tokens never enter the queue.
Each entry's trajectory is read from the table as it is written.

### Dispatch

The matcher looks at the `QWIN` oldest pending queue entries. It takes the
first one whose trajectory contains an idle chiplet and whose chiplets all
have a free context, or already hold it from a pre-load. Then:

- the router sends the run task to every chiplet of the trajectory;
- the idle vector drops the whole trajectory;
- the entry chiplet c\* is the lowest idle member.

If nothing can start while some chiplet is idle, the first entry not yet
pre-loaded is pre-loaded (Rule 4) on one member of its trajectory. That member
needs a free context and at least four free slots.

The scheduler takes one action per `HOLDOFF` clocks, so chiplet status can
catch up with the tasks just sent. A chiplet returns to the idle set when its
`busy` falls, meaning it has no running expert left. The layer ends when the
queue is exhausted and every (expert, chiplet) pair has reported done.

### Latency

From `layer_start` to the first dispatch takes about `E + 28 + pairing`
clocks. At 128 experts that is 240–270 clocks, which is under a microsecond at
the test chip's clock. `sched_latency` reports it for every layer.

## Top-level interface (`expert_streaming_top`)

**Configuration**
- `theta_min`: hot threshold, in tokens.
- `n_threshold`: forward passes per QoS credit.

**Layer control**
- `layer_start` (in, strobe), `layer_done` (out, strobe) and `sched_busy`.
- The gate results come as a `gate_valid`/`gate_ready` stream of
  `gate_id`, `gate_count` and `gate_traj`.
- Requests are described by `fwd_pass` (one strobe per iteration),
  `req_active` and `req_experts[r]` (the activation mask of request `r`).
  These must be stable from `layer_start` to `layer_done`.
- `defer` holds the requests deferred at the layer.

**Per chiplet `c`**
- `ddr_req_valid/ready` with the expert, micro-slice and target slot of a
  fetch. `ddr_rsp_valid` with `ddr_rsp_slot` says the slice has landed. Only
  one fetch per chiplet is outstanding.
- `pe_start` with the expert, slice and slot to compute. `pe_done` comes back
  when the PE array has finished. The PE time can depend on how many tokens
  the chiplet holds for that expert.

**Status**
- `idle`, `dispatch_cstar`, `chip_busy` and `sched_latency`.
- One-clock event strobes: `ev_dispatch`, `ev_preload`, `ev_wait`,
  `ev_rule1`…`ev_rule4` and `ev_tx_stall`.

The reset `rst_n` is asynchronous and active low. There is one clock.

## Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `NUM_EXPERTS` | 128 | Largest evaluated model (Qwen3-30B-A3B). Must be a power of two. |
| `NUM_CHIPLETS` | 4 | The 2×2 test chip. Up to 16 are accepted. |
| `CNT_W` | 11 | Own choice. Holds the largest setting of 1024 tokens per iteration. |
| `NUM_MS` | 8 | Own choice. The method reports that fewer than 10 slices work best. |
| `NUM_SLOTS` | 5 | The buffer drawn in the method's flow examples. |
| `NUM_CTX` | 4 | Own choice: experts open at once per chiplet. |
| `NUM_REQ` | 16 | Own choice: concurrent requests tracked. |
| `QWIN` | 8 | Own choice: matcher window. |
| `HOLDOFF` | 3 | Own choice: clocks between dispatch actions. |

Models with 16, 32 or 64 experts run at the default size. Their unused
entries arrive with count 0 and are never queued. 3×3 and 4×4 arrays need
`NUM_CHIPLETS` = 9 or 16.

## Where this departs from the method, and what is own choice

**Trajectory order.** The trajectory is kept as a chiplet mask, and the ring
order is ascending chiplet number. The method calls the ring a logical route
and fixes no order.

**Token placement.** Token redispatch between chiplets is not built. With
the flow rules in place, the method itself drops redistribution. The token
side of the flow (which tokens a chiplet holds) is not built either. Tokens
only show up as the PE time of a job.

**The network.** The die-to-die network is a one-clock registered crossbar
with round-robin arbitration per destination. A 2D mesh with multi-hop
routing and link bandwidth is not modelled. For 2×2 every chiplet is at most
two hops away.

**Matcher window.** Algorithm-level scanning of every queue entry is replaced
by a window of `QWIN` entries, evaluated in one clock.

**c\* and pre-loads.** c\* is the lowest idle member. A pre-load goes only to
a member of the expert's own trajectory, at most once per expert.

In the method, the expert's stream starts at c\*. Here every trajectory
member starts fetching its own share as soon as the run task arrives, so the
stream effectively starts everywhere at once. c\* is computed and reported
(`dispatch_cstar`) but does not gate the other members.

**Flow control and contexts.** The bubble flow control, the context limit
and the held-expert mechanism are this design's own.

**Rule 5.** The optional fifth rule of the method is not built. In that rule
the DDR controller pushes each slice to whichever ring member has the most
free buffer. The method leaves it out of its own main system too.
Here each member fetches a fixed share instead.

**Cold experts.** The order of kept cold experts (hottest first) is own
choice, as are the exact counting rules of the token-buffering timers:

- `C` counts forward passes while the request is active and not deferred.
- `C` is cleared when the request earns a credit.
- Both counters saturate at 8 bits.

**Deferred tokens.** A deferred request's tokens are not taken out of the
table. Expert counts and trajectories come from the gate stream, which still
includes them. Hot experts therefore run on the same trajectory, and skipping
the deferred request's tokens is left to the compute dies' software. Only the
cold-expert decision (`cold_keep`) uses the deferral.

**Packet formats.** The packet formats, the gate-result stream and all
handshakes are own choices.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module against a reference computed in the testbench and prints
`TB_RESULT checks=<n> failures=<m>`.

- **`tb_bitonic_sorter`**: random keys in permuted order; checks the output
  order, that the ids form a permutation, and the stage count.
- **`tb_expert_pairing`**: includes the four-expert worked example of the
  method, plus random lists.
- **`tb_token_buffering`**: hundreds of random layer boundaries against a
  model of the two timer rules.
- **`tb_ec_matcher`**: random windows, idle sets and context/room flags.
- **`tb_nop_xbar`**: per-sender order, correct destination, no loss, and a
  bound on round-robin wait.
- **`tb_msflow_ctrl`**: one controller as chiplet 1 of 4, on rings of one to
  three members, with held pre-loads. The testbench plays the other ring
  members. It checks, per expert:
  - only the own share is fetched, each slice once;
  - every slice is computed exactly once;
  - forwarded headers have the right hop and visit count;
  - `done_valid` pulses once;
  - the PE array never gets two jobs;
  - all four rules and a send stall occur.
- **`tb_moe_scheduler`**: default size, five layers, against a model of the
  compute dies. It reads the queue back and compares it with the pairing rule
  and the cold/defer rule. During dispatch it checks that:
  - every queued expert goes once, to exactly its trajectory;
  - c\* is idle;
  - pre-loads go to a member of the expert's trajectory;
  - the first dispatch comes within 800 clocks.
- **`tb_expert_streaming_top`**: the whole system at reduced size (16 experts,
  4 slices, 4 requests) for five layers, with DDR and PE models. It checks
  against a reference derived from the gate data alone:
  - the deferred requests;
  - which experts run;
  - every slice fetched once and computed once on each trajectory member and
    nowhere else;
  - all chiplets idle at the end.

  It also counts every mechanism (dispatch, pre-load, waiting, release,
  deferral, kept and skipped cold experts, Rules 1–4, link stall) and fails
  any that never occurred.
- **`tb_expert_streaming_full`**: the same checks with the top at its default
  parameters (128 experts, 8 slices, 16 requests). It runs two layers, about
  7,000 clocks each, with 200+ dispatches, in a few seconds of simulation.
- **`tb_expert_streaming_workloads`**: the default-size top running one
  layer of each evaluated model size at 16, 64, 256 and 1024 tokens per
  iteration. Each token picks its experts from a long-tailed distribution,
  and the counts, trajectories and request masks follow from that. It applies
  the same per-slice checks.

### Workload results

The workload test prints clocks per layer and PE-array utilisation. Its DDR
and PE models are deliberately simple: a fixed 9–12 clock fetch, and a PE
time of 2 plus the tokens on the chiplet. The numbers below therefore show
the trend, not silicon performance.

| Model shape | 16 tok | 64 tok | 256 tok | 1024 tok |
|---|---|---|---|---|
| 16 experts, top-2 | 19 % | 33 % | 54 % | 77 % |
| 32 experts, top-2 | 17 % | 27 % | 44 % | 68 % |
| 64 experts, 2 shared + 6 | 26 % | 35 % | 60 % | 79 % |
| 128 experts, top-8 | 20 % | 29 % | 48 % | 68 % |

Utilisation rises with the token load: thin layers leave DDR transfer
exposed, which is the low-batch problem the design addresses. The first
expert leaves 170–290 clocks after `layer_start` in every case.

The same test then runs the 128-expert model at 64 tokens for twelve
iterations at each token-buffering slack level. 10, 20 and 30 % slack mean
one deferral credit every 10, 5 and 3 forward passes. The deferred requests
match a model of the QoS timers in every iteration. Deferrals grow with the
slack, and iterations with deferrals skip cold experts (88–120 of 128
experts run instead of all of them) and finish sooner.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fse_pkg.sv \
    tb/tb_expert_streaming_full.sv --top-module tb_expert_streaming_full \
    -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

The gate data of the end-to-end tests come from a small LCG seeded in the
testbench. Change `seed` to try other layers. Over thirty seeds, the
full-size test passed every time. The reduced test's rarer mechanisms (link
stall, skipped cold expert) are not reached by every seed, which the test
then reports as a failure.

## Limits

- **Scheduler timing.** Dispatch is throttled to one action per `HOLDOFF`
  clocks. This is ample next to micro-slice compute times, but it is not
  derived from the method.
- **Bubble flow control.** It was checked by simulation only, not proven.
  With many rings overlapping, the bubble argument is not a formal guarantee.
- **Performance.** No throughput figures from the method are reproduced.
  That would need the PE array, memory and link models the RTL leaves out.
