# A distributed clause-array accelerator for Boolean satisfiability

Most of a CDCL SAT solver's time is spent in Boolean constraint
propagation (BCP). Every time a variable is assigned, each clause that
contains it must be checked. If a clause is left with exactly one
unassigned literal (it is *unit*), that literal is forced. If no literal can
be true, there is a conflict.

This design turns BCP inside out. Every clause of the problem is held in
its own small hardware unit. An assignment is broadcast to all clause units
at once, and each unit compares the variable with its literals in parallel.
A unit that becomes unit announces the forced literal, and that announcement
is broadcast in turn. On a chip the size of a large die, one wire cannot
reach all clauses in a cycle. So the clause units are grouped into *banks*,
and the banks talk over an on-chip mesh network with single-flit messages.
Propagations run asynchronously and overlap. The solver synchronises only
when the whole machine has gone quiet.

A general-purpose processor (the *host*) keeps the parts of the solver that
need heuristics: decisions, restarts and clause database policy. It reaches
the array through the *central unit*, a node in the middle of the mesh.
The RTL here covers:
- the clause units;
- the bank controller;
- the router and the mesh;
- the global idle detector;
- the central unit's network interface with its implication sorter;
- the top that ties them together.

The processor itself is not part of the RTL. Its interface is brought out as
ports of `satin_top`.

## The machine at a glance

```
              +---------+---------+---------+
              |  bank   |  bank   |  bank   |      every node: router + bank
              +---------+---------+---------+      centre node: router + central unit
              |  bank   | central |  bank   | <--> host processor (ports of satin_top)
              +---------+---------+---------+
              |  bank   |  bank   |  bank   |
              +---------+---------+---------+
   idle wires of all banks, routers and the central unit -> AND tree -> central unit
```

| Module | Role |
|---|---|
| `satin_pkg` | Flit format, message types, route bits, clause command set, shared structs |
| `clause_unit` | One clause of 8 literals, 2 execution contexts |
| `clause_bank` | NCLAUSE clause units and the controller that turns messages into clause commands and clause flags into messages |
| `msg_fifo` | The single-flit buffer used everywhere (bank receive/send, router inputs, central unit queues) |
| `router` | 5-port single-cycle mesh router with credits and broadcast |
| `mesh_network` | MX x MY routers, node id = y*MX + x |
| `idle_tree` | Registered AND tree of local idle signals, one result per context |
| `impl_sorter` | Hands received implications to the host lowest implication level first |
| `central_unit` | Host <-> network interface and quiet detection |
| `satin_top` | The accelerator: central unit at (MX/2, MY/2), a bank at every other node |

The architecture's chip holds about 100,000 clauses in banks of 1024, which
is 99 banks on a 10 x 10 mesh. The RTL keeps the 10 x 10 mesh and the
1024-clause bank (the default of `clause_bank`). `satin_top` itself defaults
to 128 clauses per bank (see *Sizes*). With `NCLAUSE = 1024` it is the
full chip.

## Messages

Every message is one 64-bit flit. No message needs more than one, so the
network has no packets and no virtual channels. The field widths are the
architecture's. The bit positions and codes are this design's own.

| Bits | Field | Normal meaning | Other uses |
|---|---|---|---|
| 63:61 | type | message type | |
| 60:58 | route | {to_src, bcast, to_cu} | |
| 57:48 | N | source or destination node | Reason: upper half of the second variable |
| 47:38 | C | clause address inside the bank | Reason: lower half of the second variable |
| 37:18 | V | variable (2^20 variables) | AddClause/validate: literal-present mask |
| 17 | P | polarity, 1 = variable true | |
| 16:3 | I | implication level | AddClause: literal index, sub-operation, connector bits |
| 2 | E | extra bit | Reason: polarity of the second variable |
| 1 | ctx | execution context | |
| 0 | flag | CancelVar: cancel the whole current level; Strengthen: begin | |

On the network a flit also carries a 10-bit `src` sideband: the node that
injected it. It is used by the "back to source" route bit.

| Type | Sent by | Effect in a bank |
|---|---|---|
| AddClause | host, unicast | setvar (one literal), validate (present mask and connectors), chkres (enable a context for loaded clauses) |
| PropLit | host (decision) or bank (implication), broadcast | every clause matches the variable. The bank raises its level to max(own, received). |
| CancelVar | host, broadcast | clear one variable, or with flag=1 every literal set in the current level. Restarts a stopped context. |
| CompleteDL | host, broadcast | start of a new decision level. Clears the "current" bits and the bank's level. |
| Conflict | bank, broadcast | stops the context in every bank |
| NotReason | host, unicast to (N, C) | the clause no longer acts as a reason |
| Reason | host or bank, broadcast | "who implied V=P?" The reason clause reads out its other literals. |
| Strengthen | host, broadcast | flag=1 copies the present bits. Otherwise it removes the learned literal V=P from the copy. A clause left with only its implied literal reports it. |

Route bits: `bcast` sends the flit to every node. `to_src` also delivers it
back to the injecting node, so a bank sees its own implications. `to_cu`
delivers it to the central unit, or, without `bcast`, sends it only there.
With all three clear, the flit goes to node N.

## The clause unit

A clause stores 8 literals, each a 20-bit variable and a polarity, with a
present mask. Per context it keeps:
- a true bit, a false bit and a "current level" bit for each literal;
- a valid bit;
- a reason flag and the index of the literal it implied;
- a reason-query flag;
- the strengthening copy of the present mask;
- the state of its two connectors.

One command reaches every clause of the bank each cycle. An associative
compare of the command's variable against all 8 literals updates the bits.
The clause then raises these combinational flags:

* **unit**: valid, no literal true, exactly one literal open. If the open
  literal is a real one, `prop_o` asks the bank for a *getpro*. The getpro
  marks that literal true, remembers it as the clause's reason literal, and
  returns it on `dout`.
* **conflict**: every literal false, or one literal both true and false.
  The second case happens when two banks imply opposite values of a variable
  at the same time.
* **str**: while strengthening, only the reason literal is left in the
  copy. The reason literal can then be removed from the learned clause.
* **rq**: a Reason query matched this clause's implied literal. The bank then
  reads the clause with *getlvlbits* (which literals were set in the current
  level) and *getvar*.

**Connecting variables** let a clause longer than 8 literals span
neighbouring units of one bank without any message.
- Literal 0 can be a connector to the previous unit, and literal 7 a
  connector to the next.
- When a clause's only open literal is a connector, the clause makes that
  connector true itself. The neighbour sees its end of the connector as
  false, and may in turn become unit.
- If both sides do this in the same cycle, each sees its connector true and
  false and raises conflict. This is the intended resolution of that race.
- While a connector is about to change, `chain_busy` keeps the bank from
  reporting idle.
- Cancelling a literal the chain depended on withdraws the connector.

The "current" bits let one CancelVar with flag=1 undo a whole decision
level in a single cycle, which is how the host backtracks by one level.

## The bank controller

```
 router -> receive FIFO -> decode reg -> [ one command to all clauses ] -> encode reg -> send FIFO -> router
                                            ^ select clause (address decode)
                                            ^ select propagation (priority encoders over clause flags)
```

Each cycle the execute stage issues one command, chosen in this order:
1. the next getvar of a learning readout;
2. getlvlbits for a clause whose reason query matched;
3. getpro for the first clause with a pending implication, unless its context is stopped;
4. a Conflict message;
5. strgetpro for the first removable literal;
6. the decoded network message.

Items 1, 3, 4 and 5 produce a message and wait for send-buffer room.
Item 6 never does, so a bank always drains its receive buffer and cannot
block the network.

**Implication levels.** Each context of a bank has a level register l.
- A received PropLit of level l_p sets l = max(l, l_p).
- An implication the bank sends carries l + 1.
- CompleteDL resets l.

A consequence is always sent with a higher level than its causes. Sorting
by level therefore gives the host a valid serial trail.

**Conflict stop.** A local conflict sends one Conflict message, which is
broadcast. It stops the context in every bank: no more implications or
conflict reports leave until a CancelVar arrives.

**Learning.** The host asks for the reason of an assignment with a Reason
message.
- The reason clause reads out its other literals.
- A literal set in the current level goes out as a new Reason query,
  broadcast, so the search continues without the host.
- A literal from an earlier level goes only to the central unit, as a
  literal of the learned clause.
- Each reply carries the falsifying assignment in V/P and the implied
  literal in {N, C}/E.

**Strengthening.** The host broadcasts the learned clause as Strengthen
messages. A clause that contains all of it except its own implied literal
reports that literal as removable (strgetpro).

The bank is idle in a context when its buffers are empty, no command is
pending, and no connector chain is moving.

## The network

The routers are single-cycle:
- route computation, output arbitration and crossbar traversal happen in
  one cycle;
- the flit is held in an output register and reaches the neighbour the next
  cycle.

Each input has a FIFO (BUF_DEPTH flits). Each output keeps a credit count of
the free places in the buffer it feeds, and a credit pulse comes back for
every flit the next router removes. There are no virtual channels.

**Routing.**
- Unicast flits go X first, then Y.
- Broadcasts follow dimension order. From the source, the flit spreads along
  its row. Every router on the row also sends it north and south. A flit
  arriving vertically keeps going vertically and is delivered locally.
- Each node therefore receives every broadcast exactly once.

An input whose head flit needs several outputs keeps it until every one of
them has accepted it. Each output arbitrates round-robin among the inputs
that want it.

## Knowing when propagation is over

The host may only make its next decision when no message is in flight
anywhere for that context.
- Each bank reports idle per context, each router reports idle, and the
  central unit reports idle too.
- The AND tree combines them with a register per level (fan-in 4).
  `idle_tree` therefore answers LEVELS cycles late.
- The central unit raises `quiet[c]` only after the tree has said "idle"
  for LEVELS+1 consecutive cycles with nothing sent or received at the
  central unit. An idle value from before the last message the host sent
  can then never be trusted by mistake.

## The central unit and the host protocol

`central_unit` sends host messages into the network against router credits.
It splits what arrives:
- PropLit messages go to `impl_sorter`. The sorter is a 64-entry register
  array that always presents its lowest-level entry.
- Conflict, Reason and Strengthen messages go to a FIFO in arrival order.

One solver step, as the end-to-end testbench runs it:

1. Load clauses: for each literal, an AddClause/setvar to (bank, clause).
   Then an AddClause/validate with the present mask and the connector bits.
2. Decide: broadcast CompleteDL, then PropLit with the decision.
3. Wait for `quiet[ctx]`. Pop `impl_*`; implications come out in level order.
4. If a Conflict arrived, the context is stopped. Send Reason queries for
   the conflicting assignments and collect the learned literals. Optionally
   run strengthening.
5. Backtrack one level with CancelVar flag=1. Cancel earlier levels with
   per-variable CancelVar. Then continue.

The second context is enabled with a broadcast AddClause/chkres and runs
independently of the first. The host can use it to keep the clause units
busy while the other context waits for quiet.

## Sizes

| Parameter | RTL default | Architecture |
|---|---|---|
| literals per clause | 8 | 8 |
| contexts | 2 | 2 (the physical clause); performance figures assume 1 |
| clauses per bank (`clause_bank`) | 1024 | 1024 |
| clauses per bank (`satin_top`) | 128 | 1024 |
| mesh | 10 x 10, central unit at (5,5) | about 100k clauses in total |
| router buffers, credits | 4 | not given |
| sorter entries | 64 | not given |

Why `satin_top` uses 128: the lint and elaboration tools keep roughly
1.25 MB per clause unit in memory. Measured:

| Banks x clauses per bank | Memory |
|---|---|
| 8 x 64 | 0.77 GB |
| 8 x 256 | 2.6 GB |
| 99 x 8 | 1.5 GB |
| 99 x 64 | 9.0 GB |
| 99 x 80 | 10.3 GB |

The full 99 x 1024 chip would need about 130 GB. 99 x 128 needs about
16 GB. That leaves room on a 32 GB machine for a synthesis run of the same
design beside it, which at 99 x 64 already reached 11 GB. The logic is the same at any
size: pass `NCLAUSE = 1024` for the full chip.

With all 99 banks, the default top holds 12,672 clauses. The paper's chip
holds 101,376. Of the ten benchmark problems the architecture is evaluated
on (11k to 385k clauses), the two smallest, about 11k clauses each, fit the
default top. Two more, with about 20k clauses each, fit the 1024-clause
chip. The rest exceed even the full chip. Clauses longer than 8 literals
take extra units joined by connectors, so these counts are lower bounds.

## Where this RTL departs from the architecture, or fills gaps

* **Controller pipeline.** The bank controller has three pipeline registers
  (decode, encode, send). The architecture's has four stages, and their
  split is not given.
* **Own encodings.** The following are this design's own:
  - the message type codes and bit positions;
  - the context and flag bits;
  - the AddClause sub-encoding;
  - the way Reason carries two literals.
* **Field widths.** The architecture's message table lists three message
  lengths that are one bit shorter than their fields add up to. The field
  widths were followed.
* **Network size.** The network size is derived from the clause count. The
  architecture also mentions a 16 x 16 network in its wire-power estimate.
* **CompleteDL.** Resetting the bank's implication level at CompleteDL is
  this design's rule.
* **Conflict handling.** Conflict stop and restart on CancelVar follow the
  described behaviour. Exactly which messages are suppressed while stopped
  is this design's choice.
* **Node positions.** Node positions are strap inputs (`my_addr`, `my_x`,
  `my_y`), so that all banks and all routers are one module each.
* **Not included.** The following are not part of the RTL:
  - the host processor and the solver software (decision heuristics, restarts, clause deletion);
  - the flattened-butterfly alternative and the dual-network variant, which were only compared against.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_satin_top \
    -y rtl +libext+.sv -Irtl rtl/satin_pkg.sv tb/tb_satin_top.sv -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_clause_unit` | Every clause command; unit and conflict; connectors and the two-sided race; context independence |
| `tb_msg_fifo` | Random push/pop against a queue model |
| `tb_clause_bank` | An 8-clause bank through its network port: implications, levels, conflict stop, learning readout, strengthening, backtrack, NotReason, second context |
| `tb_router` | Route masks for every input, credit stalls, contention |
| `tb_mesh_network` | 4 x 3 mesh: random unicast, to-central and broadcast traffic; every flit delivered exactly where it should be |
| `tb_idle_tree` | Random inputs against a delayed AND |
| `tb_impl_sorter` | Random traffic; every pop is the minimum level |
| `tb_central_unit` | Credits, sorter order, message order, quiet rule |
| `tb_satin_top` | A whole episode on a 3 x 3 mesh with 8 clauses per bank |

`tb_satin_top` checks:
- loading;
- a four-bank implication chain delivered in level order;
- broadcast reach;
- a connector chain;
- conflict and stop;
- learning, NotReason and strengthening;
- backtrack;
- the second context;
- credit stalls.

It fails if any of these mechanisms never happened.

The largest configuration simulated end to end is that 3 x 3 mesh with 8
clauses per bank. No testbench runs the default-size top: building a
simulator of 12,672 clause units takes far more memory and time than a
simulation run allows.
