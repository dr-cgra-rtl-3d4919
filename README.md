# DR-CGRA: a multithreaded CGRA grid that keeps loop-carried values inside the array

## The problem and the idea

A coarse-grain reconfigurable array (CGRA) runs a loop body as a data-flow
graph: each instruction sits on a functional unit and values move between
units over a statically routed network. A multithreaded CGRA goes further and
runs many instances of that graph at once, one per thread. Every value
travelling through the grid is a *token* tagged with its thread ID, and every
unit matches its operands by that tag, so threads interleave freely.

Running each **loop iteration as a thread** would parallelise a tight loop,
but most tight loops carry a value from one iteration to the next
(`x1 = x1 + x2` in every iteration). In a conventional multithreaded CGRA the
iteration-`t` result has the tag `t`, while iteration `t+1` needs it under the
tag `t+1`. The value must leave the array, be stored as a live value and be
read back under the next thread's ID. Each iteration then waits for the
previous one's full round trip, and the loop runs serially.

DR-CGRA ("dependency resolved" CGRA) removes that round trip with one small
block per compute unit: the **Inter-loop Dependency Resolution unit (ILDR)**.
It takes the unit's result, adds a configured distance `diff` to the thread ID,
and writes the re-tagged value straight back into the unit's own operand
buffer. There it becomes the dependent operand of iteration `t+diff`. Only
the first `diff` iterations need their initial value from outside. After
that, the dependent value reaches the next iteration one cycle after it is
computed and never leaves the grid.

This repository holds synthesizable SystemVerilog for the grid: compute units
with their ILDR and selector, load/store units, the static network and the
configuration registers. It also has self-checking testbenches for each of
them and for the whole grid.

## How a loop is mapped

The compiler side, which is not part of this RTL, analyses the loop and
produces a configuration:

* which operation each compute unit performs and which network source feeds
  each unit input (the *routes*);
* for the unit that updates a loop-carried variable: `dep_en = 1`, which of
  its two inputs is the dependent one (`dep_operand`), and `diff`, the number
  of iterations between producer and consumer (1 for `x = f(x)`);
* the thread-group size, i.e. the number of iterations run as threads.

At run time the live values enter the grid at its edge as tokens
`{thread ID, data}`, one stream per variable. The loop-carried variable's
stream holds only the initial values (threads `0 … diff-1`). Everything else
is per-iteration input: per-thread addends, addresses for the load/store
units, and so on.

Example, the loop `x1 += load(a[t]); x4 = x1 + x3` (the grid testbench runs
exactly this):

```
 in a[t] ─────────► LSU0 (load) ──────────► CU0.OP2
 in x1[0] (thread 0 only) ────────────────► CU0.OP1   dependent, diff = 1
                                            CU0: x1 = OP1 + OP2
                                              │   └─ ILDR (tag t → t+1) → selector → CU0.OP1
                                              ├───────────────► CU1.OP1
                                              └───────────────► out x1[t]
 in x3[t] ────────────────────────────────► CU1.OP2
                                            CU1: x4 = OP1 + OP2 ────► out x4[t]
```

Supported loop shapes:

| shape | supported | how |
|---|---|---|
| single-path dependency (`x1 = x1 op x2`) | yes | ILDR on the updating unit |
| other units read the variable *after* it is updated | yes | route the updating unit's output to them as well (multicast) |
| dependency path containing a memory load (not of the variable itself) | yes | load/store unit feeds the non-dependent operand; loads of many threads overlap |
| other units read the variable *before* it is updated | yes, with a reload through the live-value path | the updater still uses its ILDR; the updated value is also written out and reloaded, tagged for the next thread, for the other readers; this costs a constant delay, not a delay per iteration |
| several consecutive updates of the same variable in one iteration | only through the live-value path | the dependency runs from the last unit of the chain back to the first, and the ILDR only loops a unit back to itself; the pattern is rare, so no dedicated hardware exists for it |
| two dependent operands on one unit | no | one dependent operand per unit, by design |

## The compute unit and its feedback path (`dr_compute_unit`)

```
 in[dep_operand] ──► selector ──► token buffer (TID | OP1 | OP2) ──► ALU ──► result reg ──┬──► network
                        ▲                                                                 │
                        └───────────── ILDR (TID + diff, data unchanged) ◄────────────────┘
 in[other] ────────────────────────► token buffer
```

* **Token buffer** (`token_buffer`) stores operands until both operands of
  one thread ID are present, then issues that thread to the ALU.
* **ALU** (`alu_op`): integer add, subtract, multiply, and, or, xor, shifts,
  signed min/max, and a single-operand pass.
* **Result register.** The result *forks*: it goes to the network and, when
  `dep_en` is set, to the ILDR. The two branches may accept it in different
  cycles. Two flags (`sent_out`, `sent_fb`) record which branch already has
  it. The register frees only when both have it, so a value is never lost or
  duplicated when the network is back-pressured.
* **ILDR** (`ildr`) is combinational: `tid + diff` on the tag, the data
  untouched. A result whose new thread ID lies outside the thread group
  (`tid + diff >= tg_size`) has no consumer and is dropped on this path. It
  still leaves on the normal output, so the last iteration's value reaches
  the outside.
* **Selector** (`dr_selector`) merges the original input (initial values)
  and the fed-back token into the dependent operand's column. A fed-back
  token has priority; an original token waits a cycle (`ev_sel_wait`). With
  `dep_en = 0` only the original input passes and the unit is an ordinary
  data-flow unit.

**Timing.** A token written at clock edge *n* can issue in the cycle after.
The result is registered at edge *n+1*. In that same cycle the ILDR and the
selector present it, re-tagged, to the token buffer, which writes it at edge
*n+2*. So the dependent operand arrives **one cycle after its result
appears**. A `diff = 1` chain advances one iteration every **2 cycles**. The
unit testbench checks this exact interval. Without dependencies a unit
accepts and issues one thread per cycle.

## The token buffer, and why it has a row per thread

The buffer is a table with the columns TID, OP1 and OP2. A token of thread
`t` goes to row `t mod DEPTH`. The row stores `t` as its tag, and each input
port fills its own column. (The unit is often drawn with a separate buffer at
each input; one table with a shared tag per row holds the same information
and makes the match a single lookup.) A row with all operands present (only OP1 for a
single-operand operation) is issued; the lowest such row goes first.

`DEPTH` defaults to 512, the size of the thread group, so every thread owns a
row. This is deliberate. A small associative buffer deadlocks as soon as
memory answers out of order: the load/store unit's output holds a token
whose row cannot be allocated, while the token the compute unit needs to
make progress sits behind it. With one row per thread a
token never waits for another thread's row, and the grid cannot deadlock on
buffer space. A smaller `DEPTH` still works logically: a token whose row is
held by another thread is refused until that row issues. But such a grid can
deadlock when tokens arrive far out of order.

The OP1/OP2 columns are plain memories (one write port and one read port
each). The valid bits and tags are flip-flops.

`w_ready` depends only on the buffer state and the offered token's thread ID,
never on a `valid`. Together with the network's rules, this means the whole
grid has no combinational valid/ready loop.

## The grid (`dr_cgra_top`)

Default size: 4 compute units, 2 load/store units, 4 live-value inputs,
4 live-value outputs, thread group of 512 threads, 9-bit thread IDs, 32-bit
data.

**Network** (`static_noc`). Every destination selects one source at
configuration time, so one source can feed several destinations. A source is
taken only when *all* of its destinations are ready, and then all of them get
it in the same cycle. A source that no destination selects is drained. The
network is a full crossbar with no registers. The units' token buffers are
its storage.

| network sources | index |
|---|---|
| compute unit `u` output | `u` (0–3) |
| load/store unit `l` output | `4 + l` (4–5) |
| live-value input `i` | `6 + i` (6–9) |

| network destinations | index |
|---|---|
| compute unit `u`, input `p` | `2u + p` (0–7) |
| load/store unit `l`, input `p` (0 = address, 1 = store data) | `8 + 2l + p` (8–11) |
| live-value output `o` | `12 + o` (12–15) |

**Load/store unit** (`ldst_unit`). It matches address and store data by
thread ID and sends requests tagged with the thread ID. It accepts responses
in any order, so many threads' accesses overlap. Each response leaves as a
token of its thread: the loaded word for a load, the stored word for a
store. The memory channels are top-level ports, to be connected to an L1 or
memory system.

**Configuration** (`grid_config`): one 32-bit word per cycle over
`cfg_we/cfg_addr/cfg_wdata`. Writes take effect in the next cycle.

| address | contents |
|---|---|
| `0x00` | `[9:0]` thread-group size (reset 512) |
| `0x10 + d` | route of destination `d`: `[15]` enable, `[3:0]` source index |
| `0x40 + u` | compute unit `u`: `[3:0]` opcode, `[4]` dep_en, `[5]` dep_operand, `[24:16]` diff |
| `0x60 + l` | load/store unit `l`: `[0]` 1 = store |

Opcodes (`drcgra_pkg::alu_op_e`): 0 add, 1 sub, 2 mul, 3 and, 4 or, 5 xor,
6 shl, 7 shr, 8 min, 9 max, 10 pass.

Reconfigure only while the grid is empty. All handshakes are valid/ready. A
token moves when both are high at a rising clock edge. `rst_n` is an
asynchronous active-low reset.

The grid exposes one event pulse per compute unit for each of: fed-back
operand written (`ev_feedback`), initial value taken on the dependent input
(`ev_initial`), result dropped at the group end (`ev_drop`), and original
token delayed by the selector (`ev_sel_wait`).

## What is not in this RTL

The multithreaded array this grid belongs to also has control units,
split/join units (which keep the memory operations of a thread in program
order), special compute units, live-value units with a live-value cache, and
an L1 cache. They are outside this RTL:

* The live-value streams are top-level ports (`lv_in_*`, `lv_out_*`).
* The memory channels are top-level ports (`mem_req_*`, `mem_rsp_*`).
* Loops with control flow inside the body, or with memory ordering between
  stores and loads of one thread, are outside what this grid can run.

Other departures and choices:

* **Integer only.** No floating-point units are built.
* **Crossbar network.** A crossbar is used instead of a mesh of per-unit
  switches, so routes have no hop latency and any mapping is routable.
* **Own choices.** Unit counts, data width, buffer organisation, opcode set,
  configuration bus and handshake are all choices of this implementation.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it shows |
|---|---|
| `tb_alu_op` | every operation against an independent reference, corner and random operands |
| `tb_ildr` | `tid + diff` re-tagging, data untouched, drop at the group end, ready passing |
| `tb_dr_selector` | every combination of mode, valids and ready; feedback priority |
| `tb_token_buffer` | 300 threads through a 16-row table in scrambled orders; issue one cycle after the pair completes; rows shared between threads; contested rows; single-operand mode |
| `tb_dr_compute_unit` | `x[t] = x[t-1] + v[t]` over 64 threads: values, feedback in the result's own cycle, 2-cycle iteration interval; `diff = 2` on OP2 under random back-pressure; plain mode |
| `tb_ldst_unit` | loads answered out of order, stores with separately arriving address/data, read-back |
| `tb_static_noc` | random routes: token delivery, all-or-nothing multicast, drained and disabled ports |
| `tb_grid_config` | reset values and every register field |
| `tb_dr_cgra_top` | whole grid at default size, 512 threads: the load/store + two-unit loop above, then `x1 += x2` with the ILDR off (value spilled and reloaded through the edge after 8 cycles) and on; checks every value and counts every mechanism (feedback, initial value, drop, network back-pressure, multicast, overlapping and out-of-order memory) |
| `tb_loop_patterns` | read-after-update and read-before-update diverging paths at 64 and 512 threads, with the testbench doing the live-value reload; checks that the reload adds the same small delay at both sizes (about 6 cycles); a chain of three consecutive updates, which serialises on the reload (about 14 cycles per iteration) |
| `tb_thread_sweep` | the same single-path loop with and without a load on the dependent path, thread groups 8 … 512, ILDR off vs on |

`tb/mem_model.sv` is a behavioural memory. It has a random latency per
access, answers out of order, and returns `addr * 17 + 3` for words never
written.

Measured on the default grid (`tb_thread_sweep`, spill/reload delay of
8 cycles when the ILDR is off):

| threads | 8 | 16 | 32 | 64 | 128 | 256 | 512 |
|---|---|---|---|---|---|---|---|
| speedup, load on the path | 2.5 | 3.1 | 3.8 | 4.2 | 4.7 | 4.1 | 4.5 |
| speedup, no memory access | 4.3 | 4.6 | 4.8 | 4.9 | 5.0 | 5.0 | 5.0 |

These numbers come from this RTL, a synthetic loop and an assumed spill
delay. They show the mechanism at work, not the speedups of any particular
benchmark. The memory figures move a little with the random seed, because
the memory latencies are random.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/drcgra_pkg.sv tb/tb_dr_cgra_top.sv --top-module tb_dr_cgra_top
./obj_dir/Vtb_dr_cgra_top
```

Every testbench runs in well under a second. The grid testbench instantiates
the top with no parameter overrides, i.e. at full size.

## Changing the design

* Grid size: `NUM_CU`, `NUM_LSU`, `NUM_LVI`, `NUM_LVO` on `dr_cgra_top`. The
  network indices shift accordingly, and the configuration address map has
  room for 48 routes, 32 compute units and 16 load/store units.
* Thread-group size: `TID_W` in `drcgra_pkg` sets the largest group. Keep
  `TB_DEPTH` equal to `2**TID_W` to keep the no-deadlock property.
* Data width: `DATA_W` in `drcgra_pkg`.
* New operations: extend `alu_op_e` and `alu_op`. Mark single-operand ones
  the way `OP_PASS` is marked in `dr_compute_unit` (`need_op2`).
