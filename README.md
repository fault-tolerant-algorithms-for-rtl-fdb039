# FATAL: self-stabilizing Byzantine-tolerant pulse generation in RTL

A set of `n` nodes, each with its own free-running, drifting oscillator, must
produce *pulses*. A pulse is an event that every correct node generates at
nearly the same time (bounded skew), and pulses repeat with a period that
stays within fixed bounds. Two things make this hard:

- Up to `f < n/3` nodes may be **Byzantine**. They can send anything, and they
  can send different things to different receivers.
- The system must be **self-stabilizing**. It may start in any state, for
  example after a burst of transient faults, and still has to reach
  synchronized pulsing on its own.

The algorithm implemented here (FATAL) does this with only:

- a few small state machines per node;
- one multi-valued "state" wire from every node to every node;
- set/reset memory flags with threshold gates;
- watchdog timers, one of them with a random timeout.

Randomization is what lets the nodes escape from arbitrary initial states. In
normal operation nothing is random. The generated pulses can also keep a
high-frequency DARTS tick generator aligned. That coupling interface is
included here; the DARTS generator itself is not.

This repository holds a synthesizable SystemVerilog implementation of:

- the node;
- the `n x n` channel fabric;
- the DARTS coupling logic;
- testbenches for every module, including a full-size system run.

The default configuration is `n = 5`, `f = 1`.

## 1. How the nodes talk

Every node continuously broadcasts a 5-bit word (`chan_word_t`):

| bits | field  | values |
|------|--------|--------|
| 4    | `init` | 1 while the initiator machine is in *init* |
| 3    | `supp` | 1 while the resync machine is in *supp j* or *supp→resync* |
| 2:0  | `core` | *other*, *recover*, *accept*, *join*, *propose*, *sleep→waking* |

These values are not the full node state. Only states that other nodes need
to see are distinguished; everything else shows as *other*. A node also
receives its own word through its own channel. Its "view of itself" goes
through the same flag logic as its view of everyone else.

**Memory flags.** The receiver does not act on the instantaneous word. For
every sender `j` and every communicated state `s` it keeps a flag meaning
"`j` has been seen in `s` since this flag was last cleared"
(`remote_flag_unit`). The state machines clear flags in groups, by state kind,
when they take certain transitions.

**Thresholds.** Guards are threshold conditions over the flags of all senders,
such as "≥ f+1 nodes in propose" or "≥ n−f nodes in propose or accept"
(`threshold_gate`).

Why the two threshold sizes:

- Out of any `f+1` nodes, at least one is correct. An `f+1` threshold
  therefore means "some correct node really is there".
- `n−f` nodes always contain at least `f+1` correct ones, and any two sets of
  `n−f` nodes share a correct node. That is what makes the decisions
  consistent.

Flags make the guards monotone between resets, so a Byzantine node flickering
its output cannot make a guard toggle.

## 2. The five machines in a node

All five run concurrently in `fatal_node` and read each other's state
registers.

### 2.1 Main routine (`core_fsm`): the basic cycle

Once the system is synchronized, a node loops through these states:

```
ready --(T3 and DARTS flag) or T4 or >=f+1 propose--> propose
propose --(>= n-f propose or accept)--> accept          <- this switch IS the pulse
accept --(T1 and >= n-f accept)--> sleep --((theta+1)T1)--> sleep->waking --> waking
waking --(T2, counted from accept)--> ready
```

The `f+1` relay on propose pulls every correct node into propose once one
correct node has timed out. The `n−f` condition on accept then makes all of
them accept within a small window.

**Flag resets.** Flags are cleared when the node takes these transitions:

| transition | flags cleared |
|---|---|
| entering propose from ready or join | accept |
| propose → accept | accept |
| sleep→waking → waking | accept, recover |
| waking → ready | join, propose, DARTS flag |
| recover → join | propose, accept |

These resets keep stale information out of the next round.

**Consistency checks.** The rest of the routine deals with inconsistencies. A
node drops to **recover** when any of these happens:

- it is in propose and T5 expires;
- T1 expires in accept without `n−f` accept;
- in waking it sees `f+1` nodes in recover or accept;
- it is in ready, already suspects a pulse was missed, and the suspect timeout
  `2θd` expires (see `suspect_fsm`).

**Getting back in.** A recovering node moves to **join** when the condition `*`
holds:

```
* = ((T6, active) and in active) or (((T7, passive) or >= f+1 join) and not in dormant)
```

From join it goes to propose on `n−f` nodes in join, propose or accept. It
falls back to recover if the extension machine returns to dormant.

### 2.2 `suspect_fsm`

A node in ready that sees `f+1` nodes in accept has evidently missed a pulse.
It moves to *suspect* and starts a `2θd` timeout. It returns to *trust* as
soon as it leaves ready.

### 2.3 Extension machine (`extension_fsm`): dormant / passive / active

This machine ties the main routine to resynchronization points:

- **dormant → passive** when the resync machine enters *resync*. This clears
  the join and sleep→waking flags and starts T7. After T7, a recovering node
  may join.
- **passive → active** when `f+1` nodes are seen in sleep→waking, i.e. some
  correct node has just pulsed. This starts T6.
- **back to dormant** when resync ends.

### 2.4 Resynchronization (`resync_init_fsm`, `resync_supp_fsm`)

**Initiator.** Each node has a watchdog with a random timeout R3, drawn
uniformly from a very wide interval. When R3 expires the node shows *init*
for one cycle and redraws.

**Agreement.** The second machine decides when to act on such an init:

1. A node in *none* that sees node `j` in init moves to *supp j* and shows
   `supp`. It does so only if it has not supported `j` within the last R2;
   this limits how often a Byzantine node can trigger resyncs.
2. If the node then memorizes `n−f` nodes in supp, it reaches **supp→resync**.
   This is the locally observed *resynchronization point*.
3. After `4θd` it enters *resync*, which the extension machine watches.
4. After R1 it returns to *none*.

Because R3 is random and unpredictable, eventually some correct node's init
comes at a moment when all correct nodes are ready to follow it. This works
even against an adversary, and it is how the system stabilizes from an
arbitrary state.

**Stabilization sequence.** From a bad state, stabilization goes:

1. resynchronization point;
2. all correct nodes become passive;
3. T7 expires and they join;
4. `n−f` join lets them propose;
5. they accept together: the first synchronized pulse.

From then on the basic cycle repeats.

## 3. Timeouts

All durations are counted in ticks of the node's local clock. The algorithm
holds if the timeouts satisfy a system of linear inequalities in:

- the drift bound θ (the ratio of the fastest to the slowest clock);
- the maximum end-to-end delay `d`.

The defaults (`fatal_pkg::DEFAULT_TIMEOUTS`) solve that system for:

- θ = 1.04, i.e. compensated ring oscillators;
- d = 8 ticks;
- n = 5, f = 1;
- T4 = 1.2·T3. The ratio may be anywhere in [1, 1.396); 1.2 leaves 83 ticks
  in which an early DARTS tick can trigger the proposal before the T4
  fallback.

Method: each timeout is set to the least value its inequality allows, and T2
is raised until the condition on λ = √((25θ−9)/(25θ)) ≈ 0.809 also holds.

| timeout | ticks | role |
|---|---|---|
| T1 | 34 | accept → sleep (`4θd`) |
| (θ+1)T1 | 68 | sleep → sleep→waking |
| T2 | 1301 | from accept to ready |
| T3 / T4 | 416 / 499 | ready → propose (with DARTS / alone) |
| T5 | 478 | propose → recover |
| T6 / T7 | 1473 / 5005 | active / passive join windows |
| 2θd, 4θd | 17, 34 | suspect, supp j / supp→resync |
| R1 | 5306 | supp→resync → none |
| R2 | 295425 | per-node support blocking |
| R3 | uniform on [307266, 759602] | random initiator |
| T_y | 64 | PULSE_i width (DARTS coupling) |

**Resulting pulse period.** Between 1626 and 1864 ticks of a slow clock.

**Stabilization time.** It is dominated by R3: from power-up the first
resynchronization point comes after 0.3–0.76 million ticks.

**Changing the defaults.** To use other θ, d or n, re-solve the inequalities
and pass a new `timeouts_t` through the `TO` parameter of `fatal_system`.
`d` must cover the channel delay plus two cycles of the slowest node. The
timeout fields are 20 bits wide (`TW`).

## 4. From asynchronous circuit to clocked RTL

The algorithm is written for asynchronous hardware: Muller C gates as flags,
state machines reacting to signal changes, ring-oscillator timers. This RTL
keeps the algorithm but realizes it synchronously.

**Clock and ticks.**

- One system clock `clk` drives every register.
- Each node's local oscillator is a one-cycle enable, `tick[i]`. Only the
  watchdog counters use it.
- State machines, flags and thresholds react every `clk` cycle, as the
  asynchronous logic reacts to every signal change.
- A testbench models drift by giving the nodes different tick rates.

**Timing conventions** (with `tick` high every cycle):

- A watchdog retriggered in cycle `c` shows `expired` in cycle `c+T+1`, so the
  state machine leaves its state in cycle `c+T+2`.
- A word change at a sender reaches the receiver's flag after `CH_DELAY+1`
  cycles (default 3). The receiving machine reacts one cycle later.
- The loop-back channel S_{i,i} has the same delay. The machines of one node
  read each other's state registers directly.

**Simultaneous guards.** Where two guards hold at once, a fixed priority
chooses; the algorithm allows any fixed order. The orders are listed in each
module's header. As an example, in waking the check "≥ f+1 recover or
accept" wins over T2.

**Other choices.**

- Flags are flip-flops. An observation in the same cycle as a clear re-sets
  the flag.
- Watchdog retriggers are synchronous, where the asynchronous original uses an
  asynchronous counter reset.
- Metastability, which the asynchronous original must reason about, does not
  arise here.

**Reset.** `rst_n` is not needed for correctness; the design stabilizes from
any state. It puts every node into a defined but unsynchronized state:

- main routine in recover;
- suspect machine in trust;
- extension machine dormant;
- resync machine in none, with the R2 timers already expired;
- initiator in wait, with a fresh random draw.

So even a cleanly reset system pulses only after the first
resynchronization. This is the same path it takes after any upset.

## 5. Coupling to a DARTS clock (`pulse_coupler`)

A DARTS tick generator produces fast ticks and marks every T-th tick. Two
signals tie it to the pulse protocol:

- **DARTS_i** (input) rises at DARTS tick `kT−X`. The node stores it in a
  DARTS flag, which allows ready → propose once T3 has expired. Its falling
  edge reports the marked tick `kT`.
- **PULSE_i** (output) rises one cycle after the main routine enters accept.
  It falls when the timeout T_y expires; the pulse is T_y+2 cycles wide.

In normal operation the falling edge of DARTS_i occurs while PULSE_i is high.
If PULSE_i falls and no such edge was seen, `force_mark` is high for one
cycle. It asks the DARTS clock to mark its next tick, or to reset.

How the DARTS generator would implement forced marking and pipeline reset is
outside this design.

## 6. Module map

```
fatal_system                    top: N nodes, N*N channels, fault injection
 ├─ state_channel  (N*N)        5-bit word, CH_DELAY register stages
 └─ fatal_node     (N)
     ├─ remote_flag_unit (N)    decode word, one flag per communicated state
     ├─ threshold_gate   (9)    >= f+1 / >= n-f conditions
     ├─ core_fsm                main routine   ── watchdog_timer x6 (T1,T2,(θ+1)T1,T3,T4,T5)
     ├─ suspect_fsm             trust/suspect ── watchdog_timer (2θd)
     ├─ extension_fsm           dormant/passive/active ── watchdog_timer x2 (T6,T7)
     ├─ resync_init_fsm         wait/init ── random_watchdog (R3, 32-bit LFSR)
     ├─ resync_supp_fsm         none/supp j/supp→resync/resync ── watchdog_timer x(N+3)
     └─ pulse_coupler           PULSE_i, force_mark ── watchdog_timer (T_y)
fatal_pkg                       types, enums, DEFAULT_TIMEOUTS
```

**Top-level ports.**

| port | meaning |
|---|---|
| `tick[N]` | local clock enables |
| `darts[N]` | DARTS_i inputs |
| `pulse[N]`, `force_mark[N]` | coupling outputs |
| `tx[N]` | words sent by each node |
| `core_state`, `susp_state`, `ext_state`, `rinit_state`, `rsupp_state` | per-node state machine states, for observation |
| `fault_en[r][s]`, `fault_word[r][s]` | replace what receiver `r` hears from sender `s`; emulates Byzantine nodes and broken channels |

Tie `fault_en` to zero in a real system.

After synthesis the 5-node system is about 3,200 word-level cells and
2,550 flip-flop bits. Most of the flip-flops are the 20-bit watchdog counters:
19 per node.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each one:

- prints `TB_RESULT checks=N failures=M`;
- has a cycle-count watchdog;
- checks timing in cycles where the algorithm defines a duration.

| testbench | what it checks |
|---|---|
| `tb_watchdog_timer` | expiry exactly T+1 cycles after retrigger for several T; irregular ticks; retrigger; start-expired variant |
| `tb_random_watchdog` | drawn values in [lo, lo+span]; expiry after value+1 ticks; spread over the interval |
| `tb_threshold_gate` | exhaustive 5-input check for every K; random 13-input check |
| `tb_state_channel` | delay and order for 2 stages and for 0 stages |
| `tb_remote_flag_unit` | flag set, hold, clear by kind, set-wins-over-clear, against a reference decode |
| `tb_core_fsm` | every transition of the main routine, the flag resets on each, and the dwell times of T1, (θ+1)T1, T2, T3, T4, T5 |
| `tb_suspect_fsm`, `tb_extension_fsm` | every transition, resets and timeouts |
| `tb_resync_init_fsm`, `tb_resync_supp_fsm` | every transition, resets and timeouts, R2 blocking |
| `tb_pulse_coupler` | pulse width; force_mark with and without a DARTS_i fall |
| `tb_fatal_node` | one node with mirrored peers: resync → passive → join → first pulse; constant period; T4 and DARTS periods; force_mark suppression; a silent peer |
| `tb_fatal_system` | the full system at the default parameters (below) |

### Full-size run (`tb_fatal_system`)

This testbench runs the full 5-node system at the default parameters. The
environment:

- Clocks run at rates 1, 0.99, 0.98, 0.971 and 0.964.
- A simple DARTS model raises DARTS_i shortly after T3 and drops it inside the
  next pulse.

Phases:

1. **Start-up.** From reset, no pulse may occur before the first
   resynchronization point. That point needs an R3 expiry and comes after
   about 450,000 cycles. All nodes must then pulse together.
2. **No DARTS input.** Five rounds. Proposals come from T4; every pulse is
   followed by `force_mark`.
3. **DARTS on.** Proposals come from T3 plus DARTS and no `force_mark` occurs.
   Then node 2's DARTS_i is held low and only node 2 must request forced
   marking.
4. **Byzantine node.** Node 4's outgoing words are replaced by random words,
   different for each receiver. Nodes 0–3 must keep pulsing together.
5. **Transient fault and recovery.** After two healthy rounds, node 3 hears
   only random words from every sender for three rounds. The other four
   nodes must keep pulsing together. Node 3 must fall back to recover. At a
   later resynchronization point of the correct nodes it must pass through
   join into propose and pulse with the others again. The random "init" words
   it heard restart its per-initiator R2 timers, so it may ignore the first
   resynchronization points; the test waits up to 1.1 million cycles. With
   the fixed seed, node 3 rejoins at about cycle 689,000.

   The two healthy rounds matter. Without them, node 3's genuine recover
   signal and the recover flag stored from node 4's last random words add up
   to `f+1 = 2` in the waking state, and every node falls back to recover.
   That is two faulty nodes at once, more than `f = 1` allows.
6. **Uneven channel delays.** The testbench replaces every channel `r ← s`
   with its own delay line of 2 to 5 cycles (4 to 7 cycles end to end, still
   below `d`). Six rounds must keep the skew bound and the period bounds, and
   the skew must become nonzero.

**Checks.**

- In each round, every correct node pulses exactly once.
- The skew is at most 17 cycles (`2θd`).
- The period is between 1626 and 1939 cycles.

**Mechanism counts.** The run counts these mechanisms and fails if any stays
at zero:

- R3 init;
- resynchronization point;
- passive;
- active;
- join;
- proposal by T4, by T3 plus DARTS, and by the `f+1` relay;
- force_mark;
- pulses;
- a node falling back to recover and rejoining through join.

**Result.** The run takes about 0.7 million cycles and makes 1058 checks,
roughly 12 seconds in Verilator.

**Observed skew.** With equal channel delays (phases 1–5) the observed skew is
0 cycles: every node sees the `n−f`-th proposal in the same cycle. With the
uneven delays of phase 6 it is 3 cycles, against the bound of 17.

### Running a testbench

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/fatal_pkg.sv tb/tb_fatal_system.sv --top-module tb_fatal_system -Mdir obj
./obj/Vtb_fatal_system
```

Replace the testbench name to run any other test.

### Lint warnings

Lint (`verilator -Wall`) reports only unused signal bits:

- every state machine receives the whole `timeouts_t` bundle and reads its own
  fields;
- the flag unit ignores the `init` bit, which the resync machine reads
  directly;
- the random scaling uses only the upper half of a product.

Each is noted in the module header.

## 8. Departures and limits

- **Timeouts.** The published constraints come in two forms: a full system
  and a simplified one used to show feasibility. The simplified one asks less
  of T6 (1354 vs 1473 ticks here), and one sentence in the informal
  description demands `min(T3,T4) ≥ θ(T2+4d)`, which the full system does
  not. The defaults satisfy the full system only.
- **Constants not given by the algorithm.** θ, d, α and the numeric timeouts
  are chosen here. So are T_y (64 ticks) and the channel depth.
- **Word encoding.** The 5-bit word layout and the state encodings are this
  design's.
- **Not built:**
  - the DARTS tick generator and its marked-tick, forced-marking and reset
    extensions;
  - the ring oscillators, replaced by the `tick` inputs;
  - the *late-joining / fast-recovery* variant. Without it a node that fell
    into recover (or was switched on late) waits for the next
    resynchronization point of the others, which can take up to about
    R2 + R3 ticks, as phase 5 of the full-size run shows. The variant would
    add a minimum dwell time in `none` and, on entering `none`, a switch to
    passive, a reset of the join and sleep→waking flags, and a periodic
    repeat of the sleep→waking reset while in `none`, so that
    such a node joins a running system within a constant time. It is a
    modification of the algorithm, given only in outline, and is left out.
- **Randomness.** R3 comes from a 32-bit LFSR per node, seeded differently
  per node. An adversary that can observe or predict the LFSR defeats the
  randomization argument. A true random source, or an LFSR clocked by an
  independent oscillator, is preferable in silicon.
- **Channels.** The channel is a synchronous register pipeline. Between
  independently clocked chips, the 5-bit word would need a bundled-data
  handshake or synchronizers, which are not modelled. All channels of the
  top share one depth, `CH_DELAY`; the full-size test emulates unequal
  delays through the fault-injection ports.
