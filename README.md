# Opportunistic mutual exclusion: a clockless two-client server

Two clients, C1 and C2, share one resource, and a server decides who may use
it. A conventional server grants the resource only after the current user
has given it back, so the resource is idle from the moment its user stops
until the next client's grant arrives and that client gets going.

This server removes part of that idle time without a clock. A client that
knows when it will stop announces an *early release* a known time before it
really stops. A client that asks for the resource ahead of need (a
*pre-emptive request*) may then be granted while the first client is still
finishing. This is safe only if the second request arrives *after* the
first client's early release. The server never measures time. It only
observes in which order the early release and the new request arrived.

The RTL here contains two servers:

* the **asymmetric** server, where only C1 can release early and only C2 can
  be granted early. It is a gate-for-gate SystemVerilog rendering of a
  published production-rule netlist, and it is the default;
* the **symmetric** server, where either client can be granted early. Its
  behaviour follows a published handshake expansion, but its gates are
  derived in this design.

Both servers are built from the same two primitives, a state-holding gate
and a mutual-exclusion element. Both can sit behind a one-bit switch that
turns the opportunistic grants off.

## Why an early grant is safe

The mechanism rests on a "timing zigzag": two cause-and-effect chains that
share no common cause, joined by one observed ordering.

* C1 lowers its early wire at time t1 and really stops using the resource at
  t3. The early release reaches the server at t_re1. The client and the
  wires bound t3 − t_re1 from above by some W1.
* C2 sends its request at t2 and starts using the resource at t4. The
  request reaches the server at t_r2. Client and wires bound t4 − t_r2 from
  below by some W2.
* If the server sees t_r2 ≥ t_re1, then t4 − t3 ≥ W2 − W1. So when
  W2 ≥ W1, C2 starts after C1 has stopped, wherever the events fall inside
  their bounds.

If C2's request arrives *before* the early release, the server cannot know
how early it was, so it waits for C1's actual release.

**The RTL does not check W2 ≥ W1.** That condition belongs to the system
around the server: the clients' early-release and pre-emption times and the
wire delays. Use the opportunistic mode only where it holds, and switch it
off (`opp_en = 0`) otherwise.

## Channels and handshakes

All signals are levels in four-phase handshakes, and there is no clock.

| client | wires | protocol |
|---|---|---|
| two-wire client (C1; C2 too in the symmetric server) | `re` early request, `ra` actual request, `a` acknowledge | raise `re` and `ra`; wait for `a`; use the resource; lower `re` (early release); stop using; lower `ra` (actual release); wait for `a` low |
| one-wire client (C2 in the asymmetric server) | `r` request, `a` acknowledge | raise `r`, wait for `a`, use, lower `r`, wait for `a` low |

The two request wires of a client travel together as the packed struct
`ome_pkg::ome_req_t` `{re, ra}`. A client must not raise `re` again before
`a` has fallen.

Two rules about acknowledges are worth knowing:

* After an early grant, the first client's acknowledge stays high until
  *its* wires are both low. Both acknowledges are then high at once. That
  overlap is the saving, and it is correct.
* In the asymmetric server, an early-granted C2 that finishes before C1's
  actual release keeps `C2.a` high until C1's handshake has completed. The
  handshake expansion of the asymmetric server waits for that completion
  before it lowers `C2.a`.

## The asymmetric server (`ome_asym`)

### One arbiter, two modes

A straightforward version of this server needs three arbiters. The
published form needs only one mutual-exclusion element, `u,v = mutex(G, C2.r)`.
A state bit `f` changes what that element decides:

* **Normal mode** (`f = 0`). The inputs are C1's request (`G = C1.re`) and
  `C2.r`.
  * If C1 wins (`v`), the server waits for `C1.ra`, raises `C1.a` and sets
    `f`.
  * If C2 wins (`u`), the server raises `C2.a`.
* **f mode** (`f = 1`, C1 holds the resource). The same element now decides
  between C1's early release (`G = ~C1.re`) and C2's request.
  * **Early release first** (`v`): the server sets `g`, which means "finish
    C1's handshake in parallel", and clears `f`. C2 is then granted in
    normal mode as soon as it asks, even though C1 has not finished. This is
    the advance approval.
  * **C2 first** (`u`): C2 asked too early. The server sets `g`, waits until
    C1's handshake has fully completed (`g` low again), then clears `f`.
    C2's grant `u` is still held, so it is served in normal mode.

A separate process lowers `C1.a` whenever `g` is set and both of C1's wires
are low, and then clears `g`.

The guard on C1's side of the arbiter is written in one expression for both
modes: `G = ~g & (f XOR C1.re)`.

### The gate netlist

`ome_asym.sv` is the published production-rule set, rule for rule:

* a rule marked as combinational becomes an `assign`;
* a pull-up/pull-down pair becomes an `ome_gc` state-holding gate;
* a name with a leading underscore (an inverted node) is spelled `n_<name>`;
* the completion signal `reg` is spelled `reg_any`.

The netlist adds some nodes to the handshake expansion above:

* **`u_reg1`, `v_reg1`, `u_reg2`, `v_reg2`** latch which of the four
  (mode, winner) cases occurred. `reg_any` is their OR.
* **`G_arb`** is a *latched* arbiter input. It rises on the guard and falls
  only once the grant has been latched.
* **`g_reg`** remembers that C1's handshake is being completed after an
  early release.

The latched input exists because switching an arbiter's guard between two
uses is unstable. When `f` changes, nothing tells the server that the
arbiter has seen the new guard.

The published circuit therefore relies on one timing assumption: the gate
that computes `G` must switch faster than the path from an `f`
transition, through the environment's response, to the next `f`
transition. In this zero-delay model the assumption holds trivially.

The transistor-level version also used further state variables that
reduce this assumption to one inverter racing a few gates. Their rules
were not published, so they are not here.

Reset is active high, and the requests must be low while it is asserted.

## The symmetric server (`ome_sym`)

Both clients have two wires. Either can be granted early, and a
pre-emptive request counts only when both of its wires are high. The single
arbiter `x,y = mutex(GX, GY)` works in three modes, set by `f1` and `f2`:

| mode | x (C1 side) decides | y (C2 side) decides |
|---|---|---|
| 00 idle | C1 request `~g1 & C1.re` | C2 request `~g2 & C2.re` |
| f1 (C1 holds) | C1 early release `~C1.re` | too-early C2 request `~g2 & C2.re & C2.ra` |
| f2 (C2 holds) | too-early C1 request `~g1 & C1.re & C1.ra` | C2 early release `~C2.re` |

Six branch registers record which command of the six-way selection fired,
and they sequence its actions. `busy` is their OR.

| reg | mode, grant | actions |
|---|---|---|
| b1 | 00, x | wait `C1.ra`; `C1.a+`; `f1+` |
| b2 | 00, y | wait `C2.ra`; `C2.a+`; `f2+` |
| b3 | f1, y | `g1+`; wait for C1's handshake to complete; `f1-`; the grant `y` is kept and served as b2 |
| b4 | f1, x | `g1+`; `f1-` (C2 may now be granted early) |
| b5 | f2, x | mirror of b3 |
| b6 | f2, y | mirror of b4 |

`GX` and `GY` are latched inputs, like `G_arb` above. There is one
difference: a latched early-release input is withdrawn when the too-early
branch (b3, b5) has made it meaningless, so that a stale early release can
never be granted later.

**Departure from the published expansion.** The expansion's idle-mode guard
for C2 reads `~g1`. Taken literally, C2 could never be granted early after
C1's early release, which contradicts the symmetric case the design exists
for. The guard used here is the mirror of C1's guard, `~g2`.

The guards follow the published expansion. The registers, the latched
inputs and every gate are this design's own derivation, so this server is
less trustworthy than the asymmetric one. It has been checked in
simulation only, with zero delay. It has not been proved speed-independent.

## Turning the mode off (`ome_mode_gate`)

The server can grant early only because it sees `re` fall before `ra`. The
mode gate passes `re | (ra & ~opp_en)` to the server. With `opp_en = 0`,
the server sees both wires fall together and behaves as a plain
mutual-exclusion server.

This is one OR and one AND per two-wire channel. Both inputs are monotonic
within a handshake, so the gate adds no hazard. Change `opp_en` only while
the channels are idle.

## Primitives

* **`ome_gc`: state-holding gate.** A pull-up guard `pu` and a pull-down
  guard `pd`; the node keeps its value while neither conducts. It is written
  as `always_latch if (pu | pd) y = pu;`, so synthesis makes it a
  level-sensitive latch. A deferred assertion reports *interference*, that
  is both guards true, except at time 0, where the power-up state may fight
  the reset.
* **`ome_mutex`: mutual-exclusion element.** Two cross-coupled NAND gates
  followed by an output filter, written as the filter's logic function.
  * A request is granted if the other side is not granted, and the grant is
    held until that request falls.
  * A pending request is then granted.
  * An assertion checks that the two grants are never high together.
  * When both requests rise in the same time step, the simulator's
    evaluation order picks the winner. In silicon a metastable latch
    resolves the tie, and the filter hides its midrail voltage. That
    filter is analog and is not modelled.

## Top level (`ome_top`)

`ome_top #(.SYMMETRIC(0))` is the default and builds the asymmetric server.
`SYMMETRIC = 1` builds the symmetric one.

| port | dir | meaning |
|---|---|---|
| `reset` | in | active high; hold the requests low while it is asserted |
| `opp_en` | in | 1: opportunistic grants allowed |
| `c1` | in | C1 `{re, ra}` |
| `c1_a` | out | C1 acknowledge |
| `c2` | in | C2 `{re, ra}`; in the asymmetric server `c2.ra` is `C2.r` and `c2.re` is unused |
| `c2_a` | out | C2 acknowledge |

## How the RTL models a clockless circuit, and what that means

* **Zero delay.** Every gate is zero-delay, and each feedback loop settles
  within the time step of the input edge that caused it. The simulator's
  iteration over the combinational loops plays the role of the circuit
  settling. A testbench should change one client's wires at a time and
  give the circuit a time step to settle. Edges that fall in the same step
  create a race, which the model resolves by evaluation order.
* **No delays or energy.** Response delays, energy and leakage are
  properties of the transistor circuit, and this model does not reproduce
  them. The published asymmetric circuit in 65 nm answered C2 in about
  330 ps and C1 in about 910 ps, took 133 fJ per pair of handshakes and
  leaked 876 nW. The symmetric circuit answered in about 1.05 ns, took
  201 fJ and leaked 1.61 µW.
* **Lint and synthesis warnings are expected.** Verilator reports circular
  logic (UNOPTFLAT), and synthesis finds latches and logic loops. These are
  the intended storage of a clockless circuit: 12 latches in the asymmetric
  server, 14 in the symmetric one, plus the arbiter's SR loop. A
  conventional synchronous flow cannot time such a netlist. Build it with a
  flow that treats the state-holding gates and the arbiter as cells, and
  the latches as asynchronous state elements.
* **A corner case with simultaneous edges.** This applies to the asymmetric
  netlist, as published. Suppose C1's early release and C2's request reach
  the server within the same settling interval, and C2 wins. Then the
  latched `G_arb` can stay high. Once C2 is done, it is granted to C1's side
  in normal mode. The server then waits for C1's next request before it
  serves C2 again. The testbenches keep such edges apart.

## Verification

| testbench | what it runs |
|---|---|
| `ome_mutex_tb` | random and tied requests against an owner-tracking reference |
| `ome_mode_gate_tb` | all 8 input combinations |
| `ome_asym_tb` | 400 random handshakes per client against the reference model, plus a reset in the middle |
| `ome_sym_tb` | the same for the symmetric server |
| `ome_top_tb` | end to end, default configuration, in three phases (mode on, off, on), with resets |
| `ome_top_sym_tb` | the same in the symmetric configuration |
| `ome_fig_sequences_tb` | directed replay of two reference sequences: in the asymmetric server an advance approval and then a too-early request; in the symmetric server an advance approval to C2 and then to C1 |

`ome_ref_model` is written from the behaviour described in this README,
not from the gates. It is checked twice per time slot. The behavioural
`ome_client` acts only on its own phase of a 10-unit slot, so the two
clients never change their wires in the same step.

Every run must exercise each mechanism at least once: normal grants, advance
approvals, too-early requests, waits caused by the mode being off, and
mode switches. The server's latency is zero in this model, so every
acknowledge is expected within the time step of the edge that caused it.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ome_pkg.sv tb/ome_top_tb.sv \
  --top-module ome_top_tb -o sim && obj_dir/sim +verilator+rand+reset+2
```

Each run takes well under a second.

## Changing the design

* **New guard or rule.** Add an `ome_gc` with its pull-up and pull-down. The
  interference assertion will tell you when the two can conduct at once.
* **Changed behaviour.** If you change what the server should do, change
  `ome_ref_model` first. Then run `ome_top_tb` and `ome_top_sym_tb` with a
  few values of `+verilator+seed+N`.
