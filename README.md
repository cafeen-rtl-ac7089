# CAFEEN network-on-chip: power-gated mesh with learned XY/YX routing

Most of the time an on-chip network carries far less traffic than it was
sized for, so its routers leak power while mostly idle. Power gating switches
idle parts off, at a price: waking a part takes time and energy. CAFEEN
adjusts the grain of gating to the load:

* **Low load: fine-grained gating.** Only the one input buffer a packet
  really needs is woken. Under dimension-order routing most packets go
  straight through a router. Such a packet does not need the router at all:
  it crosses a gated router through a one-flit *bypass latch*. This is the
  "Turn-on-on-Turn" (TooT) idea. Only a packet that turns, or leaves the
  network at this router, wakes the buffer of the port it came in on.
* **High load: coarse-grained gating.** When several buffers keep being
  needed at the same time, waking them one by one piles up wake-up delays.
  The router then wakes and sleeps as a whole. At the same time, each router's
  *routing agent* starts choosing, for every packet its processing element
  (PE) injects, between the XY and the YX path. Either path has exactly one
  turning router. The agents learn by Q-learning to send packets through
  turning routers that are already awake, so that fewer routers must wake up.

This RTL implements an 8×8 mesh of such routers in synthesizable
SystemVerilog. Each router has 5 ports, 4 virtual channels (VCs) per port,
4 flits per VC and 128-bit flits. It also has a 16-state × 2-action 4-bit
Q-table, a 16-cycle reward epoch, α = 0.01 and ε = 0.05. The PEs are outside
the RTL; they connect through injection and ejection ports.

## Structure

```
cafeen_noc                    8x8 mesh, data links + reward channel
└─ cafeen_router  (x64)
   ├─ toot_bypass (x4)        bypass latch + turn check, one per mesh input
   │  └─ route_compute (x4)
   ├─ vc_buffer   (x5)        input buffer = one power domain per port
   ├─ rl_agent                injection register, epsilon-greedy XY/YX choice
   │  ├─ q_table              16 states x {XY, YX} x 4 bit, Q <- (1-a)Q + a r
   │  └─ lfsr16   (x2)
   ├─ pg_controller           OFF/WAKE/ON per buffer, fine or coarse
   ├─ pg_mode_selector        fine <-> coarse decision
   ├─ route_compute (x20)     one per VC head
   ├─ switch_allocator        separable round-robin, includes the bypasses
   └─ reward_unit             reward epoch + straight reward broadcast
```

`cafeen_pkg` holds the shared types: `flit_t`, `link_t`, `reward_flit_t`,
the port numbering and the power-state and mode enums.

Ports are numbered N=0, E=1, S=2, W=3, L=4 (local PE). Node `n` is at
`row = n / COLS`, `col = n % COLS`. Row 0 is the northern edge and rows grow
southward. Columns grow eastward.

## Packets and links

A packet is one 128-bit flit. The low 13 bits hold the header: destination
row and column, source row and column, and `route_yx`, the path chosen at the
source. The upper 115 bits are payload. The PE supplies only the
destination and the payload; the agent fills in the rest.

A link carries `valid`, a 2-bit VC and the flit forward. A 4-bit per-VC
`ready` travels back. `ready` depends only on registered state in the
receiving router, so no combinational path crosses a link. A flit keeps its
VC for its whole trip. Because packets are single flits, there is no VC
allocation stage.

**Deadlock freedom.** XY packets only use VCs 0–1 and YX packets only use
VCs 2–3. Each class on its own is dimension-order routed and therefore free
of cycles. Keeping the two classes on disjoint VCs keeps the union free of
cycles too. This is the design's version of the partitioning of VCs into
two turn-restricted sets.

**Timing.** With the buffers along the path powered, a hop takes one cycle.
A flit written into a buffer in cycle *t* can be granted in cycle *t+1*; it
crosses the link in that cycle and is written into the next router's buffer
at the end of it. The local injection register adds one cycle at the source.

## Power gating in detail

### The bypass (toot_bypass)

Each mesh input has a latch that holds one flit per VC. While the port's
buffer is not ON, an arriving flit is caught there. Its route is computed at
once:

* **Straight** (it leaves by the opposite side): it is offered to the switch
  allocator as a *bypass* request for that output. In the cycle after it
  arrived it can be on the next link, and no buffer is woken.
* **Turning or ejecting**: `wake_req` goes up, plus `wake_turn` for a turn.
  The flit waits. Once the buffer is ON, latched flits are moved into it one
  per cycle. New arrivals are held off (ready low) until the latch is empty.

While the buffer is ON, every arrival, straight or not, is written into the
buffer.

### Buffer states (pg_controller)

Each of the five input buffers cycles OFF → WAKE → ON → OFF. `pwr_en`, the
enable of the buffer's power switch, is high in WAKE and ON. A buffer is
used only in ON. A gated buffer keeps nothing: `vc_buffer` clears its
pointers while `pwr_on` is low, and the controller only gates an empty
buffer.

| mode   | wakes                               | WAKE lasts  | gated after                       |
|--------|-------------------------------------|-------------|-----------------------------------|
| fine   | only the buffer that is demanded    | t_on = 2    | t_idle = 2 idle cycles of that buffer |
| coarse | every gated buffer, on any demand   | t_on = 8    | t_idle = 4 cycles with no port busy |

A port is *busy* in a cycle if its buffer holds a flit or is being written.
A port is *demanded* if a flit waits for it: a non-straight flit in its
bypass latch, or, for the local port, a packet in the injection register.
When a router switches to coarse mode, buffers that are already ON stay ON
while the rest wake.

Measured through one router (`tb_cafeen_router`): a turning packet leaves
`t_on + 2` cycles after it was latched. That is 4 cycles in fine mode and 10
in coarse mode: one cycle to raise the demand, t_on cycles of wake-up, one
cycle to move it from the latch into the buffer, and then it leaves.

### Choosing the mode (pg_mode_selector)

The selector counts the cycles in which two or more input buffers are needed
together (busy or demanded), over windows of 64 cycles. At the end of a
window it switches:

* to coarse if the count reached 8;
* to fine if it was 2 or less.

Between the two thresholds the mode stays as it is. Reset selects fine mode.
This rule, and the three numbers, are this design's own. Only the premise
comes from the method: coarse gating pays off once several buffers are
needed at once. Change `MODE_WINDOW`, `MODE_HI_THR` and `MODE_LO_THR` on
`cafeen_router` to tune it.

## The learning loop in detail

This is the part of the design with the most moving pieces. One round works
as follows.

1. **Choice at the source (rl_agent).** A packet enters the one-entry
   injection register. If the router is in fine mode, or the source and
   destination share a row or column (no turn is needed), the path is XY.
   Otherwise, with probability ε the agent picks XY or YX at random; if not,
   it compares two table entries:
   * `Q(destination column, XY)`: an XY packet turns in the destination's
     column, in the source's row;
   * `Q(destination row, YX)`: a YX packet turns in the destination's row.

   The larger one wins; a tie picks XY. The VC is taken from the class of the
   chosen path, alternating between its two VCs.
2. **Epoch at the turning router (reward_unit).** In coarse mode a reward
   epoch opens when a turning packet reaches the router. That covers both a
   packet that must wake it and a packet that turns through it while it is
   powered. The epoch lasts 16 cycles, or less if the router is gated again.
   It sums the packets that the crossbar turns, N/S ↔ E/W, and saturates the
   sum at 15. A start while an epoch runs is ignored.
3. **Broadcast.** When the epoch ends, the router sends one reward flit to
   each side on a dedicated channel, separate from the data links. A flit
   contains `{valid, reward[3:0], coord[2:0]}`. The coordinate is the
   router's column on flits sent E/W and its row on flits sent N/S. Each hop
   is one register. Routers forward reward flits straight on and also hand
   them to their own agent. If a forwarded flit and the router's own reward
   want the same side in the same cycle, the forwarded flit goes first and
   the own reward follows one cycle later.
4. **Update (q_table).** A reward flit arriving from E or W was sent by a
   turning router in this row, so it updates `Q(coord column, XY)`. One
   arriving from N or S updates `Q(coord row, YX)`. All four sides can update
   in the same cycle; their entries are always distinct. The rule is the
   single-step form of Q-learning, `Q ← (1−α)·Q + α·r`. Updates only take
   place in coarse mode, when the table is powered (`qtab_pwr_en`).

**Stochastic rounding.** With 4-bit values and α = 0.01, the exact change
α·(r−Q) is always below one step. Rounding to nearest would freeze the
table. So each update moves Q one step toward r with probability α·|r−Q|,
realised as `rand16 < 655·|r−Q|` (655/65536 ≈ 0.01). The expected change is
then exactly α·(r−Q), and the table stays 4 bits wide. The random numbers
come from two 16-bit LFSRs per agent; the exploration draw comes from the
same source.

The table holds all ROWS + COLS = 16 states × 2 actions, laid out as in the
method (rows first). Under the update rule above, only `Q(column, XY)` and
`Q(row, YX)` are ever written or read. A synthesis tool will remove the other
half.

## Parameters

| where | parameter | default | meaning |
|---|---|---|---|
| `cafeen_pkg` | `FLIT_W`, `NUM_VC`, `BUF_DEPTH`, `Q_W`, `COORD_W` | 128, 4, 4, 4, 3 | flit width, VCs per port, flits per VC, Q width, coordinate width (mesh up to 8×8) |
| `cafeen_noc` | `ROWS`, `COLS` | 8, 8 | mesh size |
| `cafeen_router` | `T_IDLE_FINE`, `T_ON_FINE` | 2, 2 | fine-grained gating |
| | `T_IDLE_COARSE`, `T_ON_COARSE` | 4, 8 | coarse-grained gating |
| | `T_EPOCH` | 16 | reward epoch length |
| | `EPS_Q16`, `ALPHA_Q16` | 3277, 655 | ε and α in units of 1/65536 |
| | `MODE_WINDOW`, `MODE_HI_THR`, `MODE_LO_THR` | 64, 8, 2 | mode selector (this design's values) |

All defaults except the mode selector's come from the evaluated
configuration. For a mesh larger than 8×8, widen `COORD_W`.

## Where this RTL departs from the method or fills gaps

Taken from the method: the mesh and router sizes; the TooT bypass with one
flit per VC; separately gated input buffers in fine mode and whole-router
gating in coarse mode; both t_idle/t_on pairs; the XY/YX action set; the
row/column state encoding; the reward as the turns counted in a 16-cycle
epoch, ended early by gating; the straight row/column broadcast; the update
targets; Eq. `Q ← (1−α)Q + αr`; ε-greedy selection; VC partitioning; and a
4-bit 16×2 register table that is gated outside coarse mode.

This design's own choices, where the method is silent:

* Packets are single flits. There is a one-cycle router pipeline and a
  separable round-robin switch allocator. Links use per-VC ready/valid flow
  control instead of credits.
* The fine/coarse switching rule and its thresholds.
* The reward flit carries the sender's row or column index, as well as the
  reward, so that a receiver knows which state to update.
* The reward saturates at 15. Q-values reset to 0 and are kept while the
  table is gated.
* Stochastic rounding of the Q update (see above).
* The epoch starts whenever a turning packet reaches a router in coarse
  mode. One could also read the method as starting it only when a gated
  router is woken by a turning packet. Under that reading, a busy router
  that never sleeps in coarse mode would never produce rewards.
* Ejection needs the input buffer, like a turn. Injection always goes
  through the local buffer. The bypass serves only straight mesh traffic.
* A bypassed flit reaches its output through the same output multiplexer as
  the crossbar. The switch allocator treats it as a sixth requester for that
  output. In the method the bypass is a separate low-power link that needs
  no switch allocation. Functionally the two agree: the bypass never waits
  on a gated buffer. But here the allocator and output mux must stay powered.
* Only input buffers and the Q-table are power domains. The crossbar,
  allocator and control logic are treated as always on. The power switches
  themselves are not in the RTL; `pwr_en` and `qtab_pwr_en` are their
  enables.
* Random numbers come from LFSRs. Every router uses the same seeds.

Not included: the PEs, the power-switch cells, and any energy or area model.
The RTL shows when each domain is on; turning that into energy needs
per-domain power numbers for a given technology.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | checks |
|---|---|
| `tb_route_compute` | all 8192 position/destination/path combinations against a reference |
| `tb_vc_buffer` | random traffic against a queue model; gating empties the buffer |
| `tb_toot_bypass` | bypass of straight flits, wake requests, latch drain order, ready rules |
| `tb_pg_controller` | t_on/t_idle in both modes, per-buffer vs. ganged wake-up, busy buffers kept on |
| `tb_pg_mode_selector` | thresholds, hysteresis, changes only at window ends |
| `tb_switch_allocator` | grant rules on random requests, work conservation, round-robin fairness |
| `tb_q_table` | deterministic steps, the exact probability threshold, gating, 4 parallel updates, mean step rate |
| `tb_rl_agent` | XY in fine mode, VC classes, learned preference for YX/XY, exploration rate, update targets |
| `tb_reward_unit` | epoch length, reward sum and saturation, early end, forwarding, channel priority |
| `tb_cafeen_router` | bypass in 1 cycle, fine and coarse wake-up latencies, gating after idle, ejection, injection, mode switch, epoch and broadcast |
| `tb_cafeen_noc` | whole 8×8 mesh at default parameters, described below |
| `tb_synthetic_traffic` | bit-reversal, transpose, shuffle, butterfly and uniform random traffic on the full mesh, described below |

`tb_cafeen_noc` runs three phases on the full mesh:

1. light uniform-random traffic;
2. heavy transpose traffic, at 0.3 packets per node per cycle;
3. a drain.

A scoreboard checks that every packet arrives once, at the right node,
unchanged, with the right source coordinates. Roughly 38,000 packets are
checked. The test also requires each mechanism to occur at least once:

* bypassed flits and turns;
* fine and coarse wake-ups, and buffer gating;
* switches into and out of coarse mode;
* reward epochs and broadcasts, and Q-table updates;
* YX paths and exploratory choices.

It finishes in a few seconds of simulation.

`tb_synthetic_traffic` runs the standard synthetic patterns on the full mesh,
each at 0.25 and 2.5 packets per cycle for the whole network, for 1500
cycles each plus a drain. It checks every delivery and prints, for each run:

* the mean latency;
* the share of input-buffer cycles powered, a leakage proxy;
* the buffer wake-ups;
* the router-cycles spent in coarse mode;
* the share of YX paths.

In a typical run, only 1.2% of buffer-cycles are powered at the low rate,
and every router stays in fine mode. At the high rate, 8–44% of buffer-cycles
are powered, depending on the pattern, and a few percent of packets take YX
paths. The runs are short, so they check that each pattern works; they do
not reproduce energy figures.

Running a test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cafeen_pkg.sv tb/tb_cafeen_noc.sv --top-module tb_cafeen_noc
./obj_dir/Vtb_cafeen_noc
```

Replace the testbench name to run any other test. The testbenches release
reset on a falling clock edge and drive inputs 1 time unit after the rising
edge. They do not depend on the initial values of variables that nothing
resets.
