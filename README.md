# Generalized ping-pong PIM GeMM accelerator in SystemVerilog

When a neural network no longer fits in the SRAM processing-in-memory (PIM)
macros of an accelerator, its weights have to be streamed in from off-chip
memory again and again while the macros compute. A macro cannot compute while
its array is being rewritten, so the question becomes how to interleave
rewriting and computing across many macros. Three schedules are compared:

* **In situ write/compute**: all macros rewrite together, then all compute.
  The off-chip link is busy only during the rewrite bursts and idle otherwise,
  and the peak bandwidth needed is that of all macros at once.
* **Naive ping-pong**: two banks alternate. One bank computes while the
  other rewrites. Unless rewriting and computing take the same time, one
  bank waits for the other.
* **Generalized ping-pong**: only as many macros rewrite at a time as the
  off-chip bandwidth can feed. Each macro starts computing as soon as its
  rewrite ends and asks for its next tile as soon as it finishes computing.
  The macros' rewrites then fall into a staggered pattern: macro *i+1* starts
  writing when macro *i* finishes. The link is used all the time at a flat
  rate and no macro is ever idle.

This repository holds synthesizable RTL for a multi-core PIM GeMM
accelerator, in the style of PUMA, that runs any of the three schedules. The
default configuration has 16 cores of 16 macros. Each macro is 32 × 32 bytes
of int8 weights, computes one 4 × 8 operation unit per cycle and is rewritten
at 4 bytes per cycle. The number of cores and macros and the macro geometry
follow the published design study; everything else is this implementation's
own choice and is marked as such below.

## The arithmetic that drives the schedule

Let a macro hold `size_macro` bytes, compute `size_OU` multiply-accumulates
per cycle, be rewritten at `s` bytes/cycle, and let each tile be used for
`n_in` input vectors. Then

```
t_rewrite = size_macro / s                 = 1024 / 4      = 256 cycles
t_PIM     = size_macro * n_in / size_OU    = 1024 * n_in / 32 = 32 * n_in cycles
```

A macro that alternates rewrite and compute without ever idling needs
`s * t_rewrite / (t_rewrite + t_PIM)` bytes/cycle on average. An off-chip
bandwidth `band` therefore keeps

```
num_macro = band * (t_rewrite + t_PIM) / (t_rewrite * s)
```

macros busy, of which `band / s` are writing at any moment. Two examples:

* With `band = 128` and `n_in = 56` (t_PIM : t_rewrite = 7 : 1), the result
  is 8 × 32 = 256 macros, i.e. all 16 × 16 of them. 32 of them write at a
  time: two per core.
* With `band = 4` and 4 macros at `n_in = 24` (1 : 3), exactly one macro
  writes at a time.

In this design the schedule is set per GeMM instruction by two numbers:
`active_macros` (macros used in each core) and `write_slots` (macros of a
core allowed to write at once). For generalized ping-pong choose
`write_slots = active_macros * t_rewrite / (t_rewrite + t_PIM)`, so that
`N_CORES * write_slots * s = band`. The hardware does not compute these
numbers. It enforces them, and a run-time bandwidth cap (`band`) sits on top
of them.

## Block structure

```
                 off-chip side (weights, inputs, program, bias)
                   |            |            |
            +------v-----+ +----v-----+ +----v------------+
            | weight mem | | input mem| | tile instr mem  |
            | 1 rd port  | +----+-----+ +----+------------+
            | per macro  |      |            |
            +--+---------+      |       +----v-----+    +-------------------+
               |  ^             |       | top ctrl +--->| instr generation  |
  band ---> [bandwidth arbiter] |       +----+-----+    +---------+---------+
               |  grants        |            |  start/done         | tasks
   +-----------v----------------v------------v---------------------v------+
   |  PIM core 0 .. N_CORES-1                                              |
   |   generalized execution unit  <->  core control unit  <- core instr   |
   |   macro 0 .. N_MACROS-1 (32x32 B, 4x8 OU)                 memory      |
   |   input buffer (1 read port per macro)   result buffer (accumulate)  |
   +-------------------------------+--------------------------------------+
                                   | one line of every core
                              +----v----+   +-------------------+   +-----------+
                              |   VPU   +-->| SFU bias, ReLU,   +-->| result mem|
                              | (sum)   |   | sigmoid           |   +-----------+
                              +---------+   +-------------------+
```

| File | Block |
|---|---|
| `rtl/gpp_pkg.sv` | constants, strategy / lane-state / activation enums, instruction structs |
| `rtl/pim_macro.sv` | one PIM macro: memory mode and compute mode |
| `rtl/gen_exec_unit.sv` | generalized execution unit: write and compute permissions |
| `rtl/core_ctrl.sv` | core control unit: task dispatch and per-macro lane sequencing |
| `rtl/pim_core.sv` | a core: macros, execution unit, control unit, buffers |
| `rtl/bw_arbiter.sv` | off-chip bandwidth limiter for weight beats |
| `rtl/result_buffer.sv` | per-core intermediate result buffer (accumulate in place) |
| `rtl/multiport_ram.sv` | plain memories (one write port, N read ports) |
| `rtl/instr_gen_unit.sv` | expands a GeMM instruction into per-core tasks |
| `rtl/top_ctrl.sv` | top-level sequencer |
| `rtl/vpu.sv` | sums the cores' partial results |
| `rtl/sfu.sv` | bias, ReLU, hard sigmoid |
| `rtl/gpp_top.sv` | the whole accelerator |

## The macro

`pim_macro` has two modes, and a macro is never in both at once (an assertion
checks this).

* **Memory mode.** `wr_en` writes `WS` bytes into beat `wr_addr`. Beats are
  row-major, so beat *a* holds bytes `a*WS .. a*WS+WS-1` of the 32 × 32 tile.
  A whole tile takes 256 beats at `WS = 4`.
* **Compute mode.** `cmp_start` latches a 32-byte int8 input vector and a tag.
  In each of the next 32 cycles the macro handles one 4-row × 8-column
  operation unit. It walks the four column groups inside each of the eight row
  groups and adds 32 int8 products per cycle into 32 signed 32-bit
  accumulators. At the end the sums move to an output register with
  `res_valid`. They stay there until `res_ready` is high.

`cmp_ready` is also high in the last compute cycle. Vectors therefore stream
back to back at one per 32 cycles. A held result stops the next vector from
finishing, but not from starting. The tag carries the result-buffer line of
the vector, so the control unit needs no per-vector bookkeeping.

## Scheduling: the generalized execution unit

This is the part that differs between the three strategies. Every macro of a
core has a *lane* in the core control unit. A lane is always in one of five
states:

| state | meaning |
|---|---|
| `LANE_IDLE` | no task |
| `LANE_WREQ` | has a tile task, waits for permission to write |
| `LANE_WRITE` | streaming the tile's 256 beats (one per bandwidth grant) |
| `LANE_CREQ` | tile loaded, waits for permission to compute |
| `LANE_COMP` | running the task's `n_in` vectors; back to `IDLE` when the last result has left |

`gen_exec_unit` is purely combinational. From the lane states it produces
`wr_grant` (WREQ → WRITE) and `cmp_allow` (CREQ → COMP). Lanes at or above
`active_macros` are disabled and get no tasks. The input `tasks_left` says
whether the control unit still has tasks to hand out.

* **Generalized ping-pong (`STRAT_GPP`)**: waiting lanes are granted in
  index order while fewer than `write_slots` lanes are writing. Computing is
  always allowed. No other rule is needed. At start-up all lanes ask, the
  first `write_slots` get the grant and the rest wait once. After that each
  lane asks again exactly when its compute ends, which is by construction when
  a slot frees up. The staggered pattern thus sets itself up and then stays.
* **In situ (`STRAT_IN_SITU`)**: a write is granted only when no enabled
  lane is busy and none is still waiting for a task. All lanes then write
  together, sharing the bandwidth. Computing is allowed only when no lane
  writes, so all lanes compute together.
* **Naive ping-pong (`STRAT_NAIVE`)**: the enabled lanes are split into
  bank 1 (the lower half) and bank 2. A bank may start writing when all its
  lanes are free and the other bank is not writing. It may start computing
  when the other bank is not computing. Bank 1 wins ties. This reproduces
  the alternation and the waiting of the textbook scheme.

The unit does not know `t_PIM` or `t_rewrite`. It only counts writers. So
a wrong `write_slots` does not break correctness: it only wastes bandwidth
or leaves macros idle.

## Weight bandwidth

Every lane in `LANE_WRITE` raises `bw_req`. `bw_arbiter` serves the
requests round-robin over all `N_CORES * N_MACROS` lanes. It grants at most
`band` bytes per cycle through a credit that gains `band` each cycle and pays
`WS` per grant. The remainder is carried over, capped at `WS - 1`. Two
consequences:

* With `band` below `WS`, writers are slowed rather than stopped. For
  example, 2 bytes/cycle gives one 4-byte beat every other cycle.
* With more writers than bandwidth, as in the in situ and naive schedules,
  every writer is slowed evenly.

A granted lane reads its beat from its own read port of the global weight
memory and writes it into its macro in the same cycle. `band` is a top-level
input and may change between or during GeMMs. The design does not reorganise
itself when it drops. Lowering `active_macros` and raising `n_in` in the next
instructions is the program's job.

## Instructions and data layout

A program is a list of `tile_instr_t` in the tile instruction memory, ended
by `OP_END`. One `OP_GEMM` computes `Y = act(X · W + b)` with

* `X`: `n_in` × (32 · `k_tiles`) int8;
* `W`: (32 · `k_tiles`) × (32 · `n_tiles`) int8.

Its fields are `strat`, `active_macros`, `write_slots`, `n_in`, `k_tiles`,
`n_tiles`, `w_base`, `in_base`, `out_base`, `act` and `bias_en`.

| data | where | layout |
|---|---|---|
| weight tile `t = nt*k_tiles + kt` (rows `kt*32..`, columns `nt*32..`) | weight memory | lines `w_base + t*256 ..`, 4 bytes per line, row-major |
| row `v` of `X`, k-tile `kt` | input memory | line `in_base + kt*n_in + v` (32 bytes) |
| row `v` of `Y`, columns `nt*32..nt*32+31` | result memory | line `out_base + nt*n_in + v` (32 × int32) |
| bias of columns `nt*32..` | SFU bias table | line `nt` |

For each GeMM the top controller runs four phases:

1. **Prepare.** Copy the `n_in*k_tiles` input lines into the input buffer of
   every core, and clear `n_in*n_tiles` lines of every result buffer. One line
   per cycle.
2. **Generate.** The instruction generation unit writes the
   `k_tiles*n_tiles` tasks. Task *t* goes to core `t mod N_CORES`. One task
   is `{weight line, input line kt*n_in, result line nt*n_in, n_in}`.
3. **Run.** Start all cores with the instruction's strategy and wait until
   all are idle. `run_cycles` reports this phase.
4. **Drain.** Read every result line from all cores at once, sum them in the
   VPU (different cores hold different `kt` contributions), apply bias and
   activation in the SFU, and write the line to the result memory.

Inside a core, the task list is handed out in order, one task per cycle, to
the lowest-numbered idle enabled lane. All lanes share one accumulate port
into the result buffer, served round-robin. A lane whose result waits for the
port holds its macro; this is the result-port stall.

## Verifying the design

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Measured results:

* `tb_pim_core` runs the running example of the generalized ping-pong
  argument on one core: 4 macros, write : compute = 1 : 3, bandwidth of one
  writer, 8 tiles. The peak number of writers is 1 under generalized
  ping-pong, 2 under naive ping-pong and 4 under in situ. The runs take
  2832 cycles under generalized ping-pong, 3608 under naive and 3606 under
  in situ. The bound is 8 × 256 + 768 = 2816 cycles. All 96 result lines
  are checked.
* `tb_gpp_top` is the end-to-end test at 2 cores × 4 macros. It runs four
  GeMMs with all three strategies, bias, ReLU and sigmoid. The off-chip
  bandwidth drops from 8 to 2 bytes/cycle between GeMMs. Every result word
  is checked against a reference computed in the testbench. The test also
  counts bandwidth stalls, result-port stalls and GeMMs whose results needed
  the VPU to add several cores, and fails if any of these never happens.
* `tb_gpp_top_full` runs the default 16 × 16 configuration on the 7 : 1
  design point at `band = 128` bytes/cycle. It uses 256 tiles, one per
  macro, with two writers per core. The run takes 3856 cycles against an
  ideal 2048 + 1792 = 3840. It moves exactly 262144 weight bytes, has no
  bandwidth stall, and every one of the 56 × 1024 outputs is checked. The
  run takes about 5 s of wall time after a build of about 75 s.
* `tb_gpp_design_space` replays the design-phase comparison (Fig. 6) on one
  core of 16 macros. At a fixed bandwidth each strategy gets the macros it
  can keep busy: band/s for in situ, 2·band/s for naive ping-pong and
  (t_PIM + t_rewrite)/t_rewrite · band/s for generalized ping-pong. Each run
  covers 16 weight tiles. Measured speed-ups of generalized ping-pong over
  naive and over in situ:

  | write : compute | band (B/cycle) | macros (in situ / naive / generalized) | vs naive | vs in situ |
  |---|---|---|---|---|
  | 1 : 7 | 8  | 2 / 4 / 16 | 3.80 | 4.26 |
  | 1 : 1 | 8  | 2 / 4 / 4  | 1.01 | 1.78 |
  | 8 : 1 | 32 | 8 / 16 / 9 | 0.95 | 1.03 |

  The paper reports 2.51 and 5.03 at 1 : 7. At 8 : 1, generalized ping-pong
  comes within 5 % of naive while using 9 macros instead of 16.
* `tb_gpp_runtime` replays the runtime phase (Fig. 7, Table 2) on one core
  of 16 macros. The core is designed for t_rewrite = t_PIM at 32 bytes/cycle.
  The same work (32 rows times a 128 × 256 weight matrix) is run at band,
  band/2 and band/4. In situ and naive ping-pong keep the design
  configuration; generalized ping-pong uses band/s writers and bigger
  batches (8, 32, 32 rows). Run times in cycles:

  | bandwidth | in situ | naive | generalized | macro use (in situ / generalized) |
  |---|---|---|---|---|
  | band   | 6380  | 5340  | 5208 | 0.33 / 0.40 |
  | band/2 | 10476 | 9316  | 3348 | 0.20 / 0.61 |
  | band/4 | 18668 | 17508 | 5144 | 0.11 / 0.40 |

  The advantage grows as bandwidth drops, as in the paper. The paper's
  band/64 point (5.38× over in situ, 7.71× over naive) needs more macros
  than one core has, and is not run.

To simulate with plain Verilator, put the package first:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gpp_pkg.sv \
    tb/tb_gpp_top.sv rtl/gpp_top.sv --top-module tb_gpp_top
./obj_dir/Vtb_gpp_top
```

Any other testbench builds the same way, with its module file after the
testbench. Verilator finds the lower modules through `-Irtl`. Memories are
not reset, so a testbench must write (or clear) what it reads.

## Where this RTL departs from, or goes beyond, the published description

Taken from the published design:

* 16 cores × 16 macros;
* 32 × 32-byte macros with a 4 × 8-byte operation unit;
* a write speed in the 1–8 bytes/cycle range (4 here);
* the three strategies;
* the split into weight, input, result and instruction memories, top
  controller, instruction generation, core control unit, generalized
  execution unit, VPU and SFU.

One inconsistency had to be resolved. The architecture text gives a core
4 macros, while the evaluation setup and the block diagram give it 16. This
design uses 16. The block diagram draws 8 cores; the evaluation uses 16, and
so does this design.

This design's own choices:

* **Number formats.** int8 weights and inputs, 32-bit sums, and a hard
  sigmoid `clamp(x/4 + 0.5, 0, 1)` with 8 fractional bits.
* **Instruction encoding and task distribution.** The original instruction
  set and assembler are not published. `tile_instr_t` and `core_task_t` are
  invented, and tasks are dealt to cores round-robin.
* **No core-side weight buffer.** Weights go from the global weight memory
  straight into the macros. The block diagram shows a per-core weight buffer;
  it is not built.
* **Slot count from the program.** The generalized execution unit takes the
  write-slot count as a number. It does not derive it from a
  compute : write ratio.
* **Handshakes and sizes.** All handshakes, all memory sizes (weight memory
  256 KB; per-core input buffer 16 KB and result buffer 256 KB; input and
  result memories of 4096 lines) and the bandwidth credit scheme.
* **Splicing.** The SFU's "splicing" function is not specified. Here, column
  tiles are joined only by where their lines are written in the result
  memory.
* **Bias table.** Bias lines are indexed by column tile and shared by all
  GeMMs of a program.

Known limits:

* A tile handover costs one idle bandwidth cycle: the next writer is granted
  the cycle after the previous one finishes. This is the 16 extra cycles in
  the full-size run.
* Results of one GeMM are not fed back as the next GeMM's inputs
  automatically; the host moves them.
* The per-macro read ports of the weight memory and input buffers are
  idealised multi-port arrays. A real chip would bank them.
