# dMT-CGRA: a multithreaded dataflow grid whose threads talk to each other

A multithreaded coarse-grain reconfigurable array (MT-CGRA) runs a GPU-style
kernel by laying its dataflow graph out on a grid of functional units and
streaming every thread of a thread block through that graph. Units do not
execute threads one after another in lockstep: each token carries the ID of
the thread it belongs to (its TID), and a unit fires whenever it holds all the
operands of *some* thread. Thousands of threads are thus interleaved in one
spatial pipeline, and a thread that waits for memory is simply overtaken.

What such a grid lacks is a way for threads to share values. On a GPU that is
done through shared memory and barriers: producers write, everyone waits,
consumers read. The dMT-CGRA ("direct" MT-CGRA) lets threads hand values to
each other *inside the grid* instead. Since a value's owner is just the tag on
its token, moving a value from thread `t` to thread `t+Δ` means re-tagging the
token. Two special units do this:

* the **elevator node** implements `fromThreadOrConst<Δ, C>(v)`: thread `t`
  receives the `v` of thread `t-Δ`, or the constant `C` if thread `t-Δ` does
  not exist (or lies outside `t`'s transmission window);
* the **eLDST unit** implements `fromThreadOrMem<Δ>(addr, en)`: threads with
  `en` set load from memory, the others receive the value loaded (or itself
  received) by thread `t-Δ`, so one load serves a whole group of threads.

With these, a prefix sum needs no barrier and a convolution loads every pixel
once. This repository is synthesizable SystemVerilog for the dMT-CGRA core:
the grid of compute, control/elevator and eLDST units, the routing network and
the thread injector, plus self-checking testbenches.

## Tokens, tags and the firing rule

Every value in the grid is a `token_t` (package `dmt_pkg`): a 16-bit TID and a
32-bit data word. Every unit has three operand inputs and one output.

At the front of every unit sits a **token buffer** (`token_buffer`), the
tag-matching store. It has 16 entries, selected by `TID mod 16`. An entry
holds a TID tag, three operand slots with valid bits and a "fired" bit. An
incoming operand is accepted if its entry is free, or already belongs to the
same TID and that slot is still empty; otherwise the input waits. When an
entry holds all operands its opcode uses (operands configured as immediates do
not count), it becomes ready. Of the ready entries the one with the smallest
TID moves into a one-entry output register, from which the unit's logic
computes. An entry is freed once every used operand has arrived.

That last rule matters for the **select** of a control unit, which fires
non-strictly: `SEL(p, a, b)` fires as soon as `p` and the chosen operand are
there, and the token on the other input is absorbed when it turns up. The
elevator loop described below depends on it.

Firing oldest-first is important. Elevator nodes and eLDST units emit tokens
in TID order; if a younger thread sat in an upstream output register in front
of an older one, the in-order unit would wait for the older thread forever.

### Handshake

A unit input has `valid` and `token` from the network and answers `ready`;
the network additionally tells it `take` when the transfer really happened. A
source may feed many sinks: it transfers to all of them in the same cycle,
when all are ready. `ready` of any unit input never depends on a downstream
`ready`, so the fan-out join cannot form a combinational loop. An output that
feeds no sink is dropped (always ready).

## The elevator node (`elevator_node`)

Configured with `delta` (signed), `window` and `cval` (the constant), plus the
kernel's thread count. For every thread `t` of the kernel it emits exactly one
token tagged `t`:

```
p = t mod window - delta
value(t) = (0 <= p < window) ? input of thread t-delta : cval
```

`window = 0` means unbounded. Windows split the thread block into independent
groups (e.g. the rows of a matrix, the pairs of one level of a reduction
tree); a negative delta takes the value from a higher TID (right neighbour).

Inside is a 16-slot buffer for target TIDs `base .. base+15`
(slot = TID mod 16) with a valid bit and data per slot. When thread `t`'s
token arrives and `t+delta` is in the same window and below the thread count,
the data is written into slot `t+delta`; otherwise the token is consumed and
dropped. The output is the slot at `base`: it leaves when valid, or
immediately when thread `base` has no producer (then a multiplexer puts the
constant on the output). `base` then advances. A token whose target slot is
beyond `base+15` waits at the input.

Two consequences:

* The constant does not wait for anything, so a node may sit in a
  loop-carried dependence. In a prefix sum, `sum(t) = x(t) + sum(t-1)`: the
  node's input is the adder's output and its output feeds the same adder;
  thread 0 starts with the constant.
* `|delta|` cannot exceed the buffer size, 16. Larger distances are built by
  chaining nodes, which needs no extra hardware: route one node's output into
  the next, and the deltas add up (16 + 2 = 18 in the tests).

## The eLDST unit (`eldst_unit`)

Opcodes `LD` (address), `ST` (address, data), `ELD` (address, enable) and
`PLD` (address, predicate). Operands are matched by a token buffer; a matched
thread then gets a slot in a 16-entry in-order output buffer (`base .. base+15`)
with an "arrived" bit, a "data valid" bit and data. A thread that needs memory
sends a request (`valid/ready`, write flag, address, data, TID tag); load
responses return with their TID, in any order, and fill their slot. The slot at
`base` leaves when both bits are set.

For `ELD`, a thread with enable 0 sends no request. When a thread's token
leaves, it is also written into slot `t+delta` if `(t mod window) + delta <
window`. The receiving thread therefore gets the value in the cycle after its
producer left, and may pass it on in turn. With `window = 3, delta = 1` one
load serves a row of three threads; with `window = 9, delta = 3` one load
serves a column of a 3x3 block. `delta` must be 1..16.

A store leaves a token carrying the stored value once memory accepted it, so
that stores can be sequenced or counted. `PLD` is a predicated load whose
disabled threads get a zero token at once; it is needed by the elevator loop.

## Distances beyond the buffer: chains and the elevator loop

A chain of elevators covers any fixed distance at the cost of one control unit
per 16 threads of distance. When the same value should go to several threads
of one window (fromThreadOrMem with delta larger than 16), a loop is used
instead, built only from routing:

```
P    = LTU(t mod 36, 18)             // the first 18 threads of each 36 load
LD   = PLD(addr, P)
M1   = SEL(P, LD, M2)                // first select
E1   = ELEV(M1, delta 16, window 36)
E2   = ELEV(E1, delta 2,  window 36)
M2   = SEL(P, LD, E2)                // second select: value of thread t
```

Thread `t < 18` of a window takes its own load; thread `t >= 18` takes the
token that left the elevator chain, which came from thread `t-18` and which
that thread had passed into the chain through the first select. Both selects
absorb the token on their unselected input, and the predicated load gives a
token to every thread so nothing waits for a token that never comes.

## The core (`dmt_cgra_core`)

| units | count | built here |
|---|---|---|
| compute units (`alu_unit`) | 32 | yes |
| control / elevator units (`control_unit`) | 16 | yes |
| load/store units (`eldst_unit`) | 32 | yes, each with its own memory port |
| floating-point units | 32 | no: operand/result ports `ext_*` |
| special compute units | 12 | no: ports `ext_*` |
| split/join units | 16 | no: ports `ext_*` |

140 units in all, plus the thread injector. All are joined by `static_noc`, a
full crossbar in which every operand input names one source. Source index:
ALUs 0..31, control units 32..47, LDSTs 48..79, external units 80..139 (FPU,
SCU, SJU in that order), injector 140. Sink index of unit `u`, operand `k` is
`3*u + k` with units numbered the same way.

**Loading a kernel.** With `cfg_we = 1`:

* `cfg_is_route = 0`: `cfg_unit` is written to unit `cfg_idx` (0..79). It holds
  the opcode, an immediate mask and value (operand `k` taken from `imm`
  instead of the network), and for elevator/eLDST the `delta`, `window` and
  `cval`.
* `cfg_is_route = 1`: `cfg_route = {en, src}` is written to sink `cfg_idx`.

**Running.** A one-cycle `start` with `n_threads` clears all unit buffers and
starts the injector, which emits one token per cycle with `tid = data = t`.
`busy` is high while threads are being injected. Completion is observed by the
environment (for example by counting stores).

**Opcodes.** Compute: `ADD SUB MUL MAC(a*b+c) AND OR XOR SHL SHR MIN MAX
DIVU REMU`. Control: `SEL EQ NE LT LTU ELEV`. Memory: `LD ST ELD PLD`. The
TID-derived coordinates of a thread (row, column) are computed with
`DIVU/REMU` on the injected TID.

**Example: prefix sum.** `out[t] = in[0] + ... + in[t]`:

| unit | opcode | operands |
|---|---|---|
| ALU 0 | ADD | injector, imm `IN` |
| LDST 0 | LD | ALU 0 |
| ALU 1 | ADD | LDST 0, control 0 |
| control 0 | ELEV delta 1, window 0, cval 0 | ALU 1 |
| ALU 2 | ADD | injector, imm `OUT` |
| LDST 1 | ST | ALU 2, ALU 1 |

**Timing.** Each unit adds one clock (matching store to output register); the
network adds none, so the critical path runs from a unit's output register
through the crossbar into the next unit's token buffer. A unit accepts one
operand per input and emits one token per cycle.

## How far it follows the paper

Follows the paper: the two communication primitives and their semantics
including transmission windows and constants; the elevator's slot buffer
indexed from a base TID with a constant multiplexer at its output; the eLDST
with a predicated load, a TID adder, a window check and a multiplexer between
memory data and the looped-back output; cascading for distances above the
buffer size and the select loop for memory sharing over long distances; 16
buffer entries; the unit counts of the core.

This design's own choices:

* the widths (16-bit TID, 32-bit data), handshake, opcode set and encoding,
  configuration port and start/busy protocol;
* one full crossbar instead of a routed grid network, with zero latency;
* the token buffer is direct mapped and fires the oldest ready thread;
* the elevator emits constants without waiting for the receiving thread's
  token and is told the kernel's thread count; negative deltas use the
  mirror of the positive rule;
* each elevator has its own slot buffer next to the control unit's matching
  buffer, where the paper converts the control unit's existing buffer;
* the predicated load `PLD` and the store acknowledge token.

Not built: floating-point, special-compute and split/join units, the live
value units and their cache, and the L1/L2/DRAM. Their connection points are
ports of the core; the testbenches put a behavioural memory on the load/store
ports. Spilling of very long distances to shared memory is not modelled.

The core runs one copy of a kernel's graph: every injected thread goes to
every unit routed from the injector. Placing several replicas of the graph in
the grid, each taking part of the threads, is not supported.

Known limits: a chain whose producers run more than 16 threads ahead of the
consumer stalls them (by design) but does not lose data; a graph where two
in-order units wait on each other across more than 16 threads can deadlock,
as with any finite tag store. Graphs of the evaluated workloads that exceed
the unit counts (for example a fully unrolled 16x16 matrix tile, which needs
33 load/store units) must be split by the compiler.

## Testbenches

Each file in `tb/` checks one module and prints
`TB_RESULT checks=N failures=M`.

* `token_buffer_tb`, `alu_unit_tb`, `control_unit_tb`, `thread_injector_tb`,
  `static_noc_tb`: matching, firing rules, opcodes, selects, fan-out.
* `elevator_node_tb`: deltas 1, 2, 3, 16, -1, -3, bounded and unbounded
  windows, random input gaps and output back-pressure, one token per cycle.
* `eldst_unit_tb`: loads, stores, fromThreadOrMem patterns (window/delta
  3/1, 9/3, 64/16, 8/2) against a memory with random back-pressure and
  out-of-order latency, load counts, predicated loads.
* `dmt_cgra_core_tb`: the full-size core running five kernels one after the
  other: prefix sum (100 threads), 3x3 matrix multiply with shared loads
  (exactly 18 loads for 9 threads), a 1D convolution with elevators of delta
  +1 and -1 on rows of 16, a delta-18 chain (16 + 2), and the elevator loop
  with window 36 (one load per two threads). It also requires that elevator
  forwards, negative deltas, constants, eLDST forwards, selects, input stalls
  and memory back-pressure all occur.

To run one, for example:

```
verilator --binary --timing --assert -y rtl rtl/dmt_pkg.sv tb/dmt_cgra_core_tb.sv \
    --top-module dmt_cgra_core_tb -Mdir obj && ./obj/Vdmt_cgra_core_tb
```

The core testbench uses the default parameters and finishes in a few seconds.
