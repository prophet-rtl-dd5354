# Prophet: speculative multithreading on a small chip multiprocessor

Sequential programs leave most cores of a chip multiprocessor idle. Prophet
splits one program into threads that run ahead of the program order on
spare cores, and it does this in hardware. A running thread meets a `spawn`
instruction and starts a child thread at a later point of the program, for
example the next loop iteration or the code after a call. The child needs
values that its parent has not computed yet. It first runs a short
*pre-computation slice* (p-slice). The p-slice is a trimmed copy of the code
that produces those live-in values, and the child then executes its real
body speculatively with the predicted values.

Only one thread at a time is *stable*, meaning non-speculative. When the
stable thread reaches its end point (the `cqip` instruction), it checks
whether its successor predicted correctly. If so, the stable thread commits
its results to memory and passes the *stable token* to the successor. If
not, every speculative thread is thrown away.

The hardware keeps several versions of the same memory word side by side.
There is the p-slice's private view, each speculative thread's own writes,
and the values that an older thread wrote before and after it spawned a
child. The core of the design is a multi-version L1 data cache, a register
cache with per-register validation bits, and a snoopy bus whose answers
depend on the thread order.

This repository holds synthesizable SystemVerilog for everything that this
speculation support adds to a chip multiprocessor. The processor cores
themselves are not included: the instruction fetch, decode and execute
units stay outside. Main memory is not included either. Each PE exposes a
core port instead, and a testbench plays the cores.

## Block map

```
             core 0           core 1          core 2          core 3   (outside)
               |                |               |               |
        +--------------+ +--------------+     ...             ...
        | prophet_pe 0 | | prophet_pe 1 |
        |  thread_ctrl | |              |
        |  reg_cache   | |              |
        |  l1_access_  | |              |
        |   ctrl       | |              |
        |  mv_cache    | |              |
        |  spec_ctrl   | |              |
        +--------------+ +--------------+
           |   |   |        |   |   |
   events  |   |   | registers (dedicated paths)
           v   |   v        v   |   v
   +--------------------+       |
   | central_spec_logic |       |         snoop_bus: one transaction at a time,
   |  ISL, versions     |       |         broadcast to all L1s
   +--------------------+       |
               +----------------+---------- snoop_bus ----------+
                                                                 |
                                                            l2_cache
                                                                 |
                                                        main memory (outside)
```

| Module | Role |
|---|---|
| `prophet_top` | Four PEs, the central logic, the bus and the L2. Core ports are arrays indexed by PE. |
| `prophet_pe` | The speculation support of one PE. It decodes the speculation-instruction port. |
| `thread_ctrl` | The thread state machine of one PE. |
| `mv_cache` | The multi-version L1 memory data cache. |
| `l1_access_ctrl` | Turns core loads and stores into cache operations and bus messages. |
| `spec_ctrl` | Walks the cache for verification and for commit. |
| `reg_cache` | The register file, with a V/L/M state per register. |
| `central_spec_logic` | Keeps thread order, parents, versions and start labels. Handles spawn, verification, commit, squash and restart. |
| `snoop_bus` | Arbitration, snoop broadcast, selection of the answering PE, VioTest reporting. |
| `l2_cache` | Shared cache in front of main memory. |
| `prophet_pkg` | Widths, state encodings, line and bus-request structs. |

## Life of a thread

Each PE runs at most one thread. `thread_ctrl` tracks it through these
states:

```
Idle --spawn--> Initialization --> Pre-compute --pslice_exit--> Sp_execution
Sp_execution --cqip--> Wait --verify request--> Verification --token--> Stable
Stable --cqip--> Sub-thread verify --pass--> Commit --> Idle
                                  --fail--> Stable (successors squashed)
speculative states --squash--> Squash --> Idle
Pre-compute / Sp_execution / Wait --restart--> Restart --> Pre-compute
```

**Spawn.** The parent's registers are copied to the child in the spawn cycle
over a dedicated path. The child's start label is loaded in the same cycle,
and so is its thread version (see below). The child is inserted into the
thread order right behind its parent. The child's first core instruction is
the p-slice. The `pslice_exit` instruction ends pre-computation.

**Speculation.** From then on, the child's loads and stores are speculative.
At its own `cqip` it waits until the stable thread asks it to be verified.

**Verification and commit.** When the stable thread reaches `cqip`, it enters
Sub-thread verify, and its successor checks the values it pre-computed (next
section but two). If the check passes, the stable thread commits: it writes
every modified line to the L2, empties its caches and goes idle. The token
then moves to the successor, which becomes stable and continues from where
it had stopped.

The state names are the model's. The exact transition arcs are this
implementation's reading of what each state means. The state machine's
header comment lists them one by one.

## The multi-version memory cache

This is the part that is hardest to understand. Every L1 line carries five
state fields besides its tag and data:

| Field | Meaning |
|---|---|
| V | valid |
| RL | the line was read from another PE, not written first by this thread |
| M | modified |
| Ver | the thread version that wrote or read it; 0 = pre-computation data |
| O | "old": a newer copy of the same address exists in this cache |

These fields define nine named states:

| State | Meaning |
|---|---|
| PreSh, PreEx | Read or written during pre-computation. |
| PreExO | A pre-computed write that has since been superseded by speculation. |
| SpSh | Read during speculation from an older thread (an exposed read). |
| SpShM | That read, later overwritten by this thread. |
| SpEx | Written first by this thread during speculation. |
| SpShO, SpExO | Older versions of SpShM and SpEx kept after a new version was created. |
| Invalid | No line. |

`prophet_pkg::line_state` decodes the bits into these names.

### Why more than one copy of an address

Two situations need several copies of the same word in one cache at once.

1. **Pre-computation and speculation of the same thread.** A p-slice's writes
   are only predictions. They must survive until verification, which
   compares them with the real values. Speculative execution of the same
   address must not overwrite them. A speculative write to a PreEx line
   therefore leaves that line in place as PreExO and writes the new value to
   a fresh SpEx entry.
2. **A parent that keeps writing after it spawned a child.** The child's
   p-slice must see memory as it was at the moment of the spawn. The parent's
   later writes must not leak into that view. Each thread holds a version
   number. At a spawn, the child receives the parent's current version, and
   the parent then moves to the next version. The first speculative write
   that the parent makes under its new version does not overwrite the
   old-version line. The old line is marked O, and the new value goes into
   a new entry with the new version.

### Which line answers

- **The thread itself** sees exactly one readable line per address. That
  line is the newest one (PreSh, PreEx, SpSh, SpShM or SpEx).
  - During speculation, a PreSh line does not count as a hit. It was
    fetched for the p-slice's view, so the access goes to the bus for the
    current data, and the PreSh line is turned into SpSh in place.
- **Another PE's RSpR** (speculative read), and an **RPrR**
  (pre-computation read) from a thread that is not this PE's child, get the
  newest speculative line (SpSh, SpShM or SpEx).
- **An RPrR from this PE's own child** carries the child's version. It gets
  the speculative line, old or current, with the largest version that is not
  above the child's version. That is the value the parent had at the moment
  of the spawn.
- **Pre-computation lines** never answer another PE.

### Worked example

Thread 0 has version 1.

1. Thread 0 writes `X = 11`.
2. Thread 0 spawns thread 1. Thread 1 gets version 1, and thread 0 moves to
   version 2.
3. Thread 0 writes `X = 22`. The version-1 line becomes SpExO, and a new
   version-2 SpEx line holds 22.

Thread 1's p-slice then reads X with RPrR, version 1. Thread 0 is its
parent, so thread 0 answers from the old line: 11. After `pslice_exit`,
thread 1 reads X again with RSpR and gets 22. The end-to-end testbench runs
exactly this program.

### Full cache

Pre-computation and speculative lines cannot be evicted: they would lose
state that nothing else holds. An access that needs a new entry when none
is free therefore stalls, and `ovf_stall` is raised.

- The cache is fully associative, with one word per line.
- By default it has 32 entries. The size is the `ENTRIES` parameter.

## Register cache

Each register has three bits: V, L (read before it was written during
speculation) and M (modified during speculation). They give four states:

| V L M | State |
|---|---|
| 1 0 0 | Init |
| 1 1 0 | Validate |
| 1 0 1 | MCommit |
| 1 1 1 | VaandMC |

The state changes as follows:

- **During pre-computation**, reads and writes leave the state alone.
- **At `pslice_exit`**, every register goes to Init, and the pre-computed
  value is saved.
- **During speculation**:
  - a read moves Init to Validate;
  - a write moves Init to MCommit and Validate to VaandMC.

A register in Validate or VaandMC was *used* as a prediction, so it must
match the stable thread's register. A register still in Init was never used,
so it simply takes the stable thread's value. MCommit registers keep their
own value.

Each register keeps two extra copies besides its live value:

- the value at the end of pre-computation, so the check is still possible
  after the register has been overwritten;
- the value copied at spawn, which a restart restores.

## Verification, commit and the stable token

Verification checks two things:

- every cache line that the p-slice wrote (PreEx or PreExO);
- every register in Validate or VaandMC.

`spec_ctrl` walks all cache entries one per cycle. For each pre-computed
line, it reads the stable thread's value with an RSpR on the bus and
compares it with the line. The stable thread is the immediate predecessor,
so it answers if it has the line; otherwise the L2 answers. The register
comparison is combinational.

A pass or a fail goes through the central logic back to the stable thread:

- **On a pass:**
  1. The stable thread commits. Its `spec_ctrl` writes back every newest
     modified line (PreEx, SpShM, SpEx) and invalidates the cache.
  2. The verified thread's Init registers take the stable thread's values.
  3. The token moves on.
- **On a fail:** every speculative thread is squashed, and the stable thread
  runs on by itself.

In the model, the stable thread checks its successor. Here the successor's
own controller runs the walk and fetches the stable thread's data over the
bus. The data compared is the same.

## Violations and restart

A speculative store first broadcasts a VioTest for its address. A thread
*later* in thread order that holds an exposed read of that address (SpSh,
SpShM or SpShO) has read a stale value. The earliest such thread is
restarted: its caches are dropped, its registers return to their spawn
values, and it runs its p-slice again. Every thread after it is squashed.

A `sqush` instruction squashes the first later thread that was started at
the given label, and every thread after it.

## Central speculation logic

`central_spec_logic` holds:

- the Immediate Successor List: position 0 is the stable thread, and the
  list runs to the most speculative thread;
- each PE's parent, version and start label.

A spawn takes the lowest free PE. If no PE is free, the spawn is refused and
the parent runs on.

It handles one event per cycle, in this priority order:

1. program start;
2. violation;
3. commit;
4. verification result;
5. `sqush`;
6. spawn.

Result pulses that lose a cycle are remembered.

## Snoopy bus and timing

There is one bus, with round-robin arbitration among the PEs' L1
controllers. A granted RPrR or RSpR is broadcast in the same cycle.

| Request | PEs allowed to answer |
|---|---|
| RSpR | any earlier thread |
| RPrR | the requester's parent and the parent's predecessors only |

A thread spawned after the requester must never leak into its
pre-computation. Among the PEs that hit, the nearest one in thread order
answers in that cycle. If nobody hits, the bus reads the L2.

| Operation | Bus cycles |
|---|---|
| Snoop hit | 1 |
| VioTest | 1 |
| L2 read hit | 1 |
| L2 miss | 1 + main-memory latency |
| Write-back | until the memory acknowledges |

The L2 is direct-mapped and write-through, with one word per line. Main
memory therefore always holds the committed state.

## Core interface

Each PE offers the core four ports:

| Port | Behaviour |
|---|---|
| `creq_*` | Memory request. Hold `creq_valid` until `creq_ready`. A load's data arrives with `creq_ready`. |
| `rd_*` | Register read. Combinational. |
| `wr_*` | Register write. Written at the clock edge. |
| `spi_*` | Speculation instructions `spawn`, `cqip`, `sqush`, `pslice_entry` and `pslice_exit`, with a 16-bit label. Valid/ready handshake. |

The PE tells the core two things:

- `core_run`: whether the core may execute;
- `core_start`: a one-cycle pulse meaning "begin at `core_pc`".

To begin, pulse `start` after reset. PE 0 then runs the program as the
stable thread.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NPE` | 4 | Processing elements (the four-core configuration) |
| `ENTRIES` | 32 | Lines per multi-version L1 |
| `NREG` | 32 | Registers per PE |
| `L2_LINES` | 256 | L2 lines |
| `AW`, `DW`, `VW`, `LW` | 16, 32, 8, 16 | Address, data, version and label widths (package constants) |

Only the PE count comes from the evaluated configuration. The other sizes
were not given and are this implementation's choice.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. `tb/mem_model.sv` is a behavioural main
memory with a 3-cycle latency. Example for the whole chip:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/prophet_pkg.sv \
          $(ls rtl/*.sv | grep -v prophet_pkg) \
          tb/mem_model.sv tb/tb_prophet_top.sv --top-module tb_prophet_top
./obj_dir/Vtb_prophet_top
```

`tb_prophet_top` runs at the default size, with four PEs and no parameter
overrides. In place of the cores, it plays a script of loads, stores,
register accesses and speculation instructions. It takes a few hundred
cycles. Each of these mechanisms must happen at least once, or the test
fails:

- spawn;
- a versioned RPrR answered by the parent;
- an RSpR answered by another PE;
- a VioTest violation with restart;
- a `sqush` squash;
- verification pass, commit and token passing;
- register synchronisation;
- verification failure;
- a cache-overflow stall;
- an L2 miss to main memory.

Verilator reports UNOPTFLAT on the snoop answer arrays. The loop is not
real: Verilator treats each unpacked array as a single signal. The snoop
answers depend only on the granted request, and no request depends on an
answer.

## Departures and gaps

- **No core, instruction decoder or main memory.** The cores and the decoder
  are outside the design; their place is taken by ports. Main memory is a
  behavioural model in the testbench.
  - As a result, the benchmark programs the model was evaluated with cannot
    be run here.
  - Their live-in counts (at most 32 registers) and thread sizes fit the
    default sizes.
- **Single-word lines and a fully associative L1.** The line size,
  capacity, associativity and replacement policy were not given.
- **A full L1 stalls the access.** What happens on overflow was not
  specified.
- **Thread-state arcs, event priority, bus protocol, arbitration, the L2
  organisation, and the extra register copies** are this implementation's
  choices.
- **The successor verifies itself** over the bus, instead of being checked
  by the stable thread.
- **A PreSh line is a miss for a speculative read.** The line diagram has no
  such arc. Without it, a child would read its own pre-spawn copy after
  `pslice_exit` and miss the parent's later writes.
- **Versions start at 1.** Version 0 is reserved for pre-computation data.
