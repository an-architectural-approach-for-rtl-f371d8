# A function-feeding front end for a heterogeneous FPU farm

A conventional core fetches instructions. This design does the opposite: a
program is written as a sequence of high-level *functions*, and the hardware
pushes each function to a *Functional Processor Unit* (FPU) built for that kind
of work. The eight FPUs are heterogeneous. Two are arithmetic, two DSP, two
graphics, one string and one multimedia. The FPUs never fetch anything. They
are fed.

The RTL here is the machinery around the FPUs, which:

- separates the functions from the stored program;
- classifies each function and gives it an identifier;
- makes a function wait until the result of a function it depends on exists;
- queues functions by priority, first come first served;
- assigns each function to an idle FPU of the right kind and leaves it there until it finishes;
- parks functions that wait for I/O;
- puts results that arrive out of order back into program order.

The FPUs are not part of the RTL. Their ports are outputs and inputs of the
top module, and the testbenches attach a behavioural FPU model to them.

The architecture this follows was described only at block-diagram and
flow-chart level. Its authors evaluated it in a C++ simulation. Almost every
width, encoding and handshake below is therefore this design's own choice.
The section *How closely this follows the architecture* lists the departures.

## The path of one function

```
 program words
      |
  func_decoder ---- reads one word per cycle, passes W_FUNC words, stops at W_END
      |
  fine_decoder ---- class -> FPU mask, FID, sequence number,
      |             waits for the producer, attaches its result (forwarding)
      |                    ^ commit count            ^ fwd read port
  prio_queue  ----- one FIFO per priority level (level 0 highest)
      |   ^  ^
      |   |  +---------------- io_queue <-- I/O request      (io_complete wakes)
      |   +------------------------------- yield (back to end of its queue)
  fps_scheduler --- head -> lowest idle FPU of its class; FPU busy until it answers
      |   ^
  fp_interconnect - issue broadcast, round-robin response arbiter
      |   ^
   FPU1 .. FPU8     (outside the RTL)
      
  fps_scheduler --- DONE result --> integration_unit (reorder buffer)
                                          |
                                   integration_memory --> host read port
                                          \--> forwarding read port
```

Every stage can take one function per cycle. Fine decoding has one cycle of
latency. The bus has one cycle from issue to the FPU. A result is committed in
the cycle after it arrives, provided all older results are already committed.

## Program format

The program is an array of `prog_word_t` (57 bits), loaded through
`prog_we/prog_addr/prog_word` before `start`:

| field      | bits | meaning |
|------------|------|---------|
| `kind`     | 2    | `W_FUNC` function, `W_END` end of program, `W_SKIP`/`W_RSVD` other process data (stepped over) |
| `fn_class` | 3    | 0 maths, 1 DSP, 2 string, 3 graphics, 4 multimedia; 5..7 are treated as maths |
| `code`     | 8    | which library function the FPU runs (meaning is up to the FPU) |
| `prio`     | 2    | priority class, 0 highest |
| `dyn`      | 1    | priority is dynamic (may be changed by the function later) |
| `has_dep`  | 1    | the function takes the result of another function |
| `dep`      | 8    | program-order index of that producer (functions only, counted from 0) |
| `operand`  | 32   | immediate argument |

Functions are numbered in program order from 0: this *sequence number* is the
address of the function's result in the integration memory. A dependency
that does not point to an earlier function is dropped. The function then runs
as independent with operand B = 0.

## Fine decoding: identity, placement and dependencies

This is the stage with the most logic in it. For each function it does four things.

* **FID.** The identifier is the class plus a running index within the class,
  counted from 1: maths functions become A1, A2, ...; DSP functions D1, D2, ...
  The index travels with the function as `job_t.fid`, next to the sequence
  number. The FID is informational. The sequence number is what the hardware
  orders by.
* **FPU locate.** The class is turned into an 8-bit mask of FPUs whose role is
  that class, using the role table `fps_pkg::FPU_CLASS`:

  | FPU  | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
  |------|---|---|---|---|---|---|---|---|
  | role | graphics | maths | DSP | string | multimedia | maths | DSP | graphics |

  Changing the table is all it takes to re-balance the farm. Every class must
  keep at least one FPU.
* **Temporal locate.** The function gets its sequence number.
* **Connectivity fix.** A function that consumes another's output is held in
  fine decoding until the producer has been committed to the integration
  memory. It is then released with the producer's result as operand B, read
  through the memory's forwarding port.

The hold is in program order: later functions wait behind a held one. This
is deliberate. With it, everything already past fine decoding has its input,
and so can always run to completion. A dependent function sitting in a
priority queue could otherwise block, at the head of its queue, the very
producer it waits for. The price is lost overlap around dependencies. The
end-to-end test shows how often this happens (the `dep_hold` count).

Fine decoding also stalls while 16 functions (`ROB_DEPTH`) are outstanding,
meaning decoded but not yet committed. The reorder buffer indexes its slots by
`seq mod ROB_DEPTH`, and this window guarantees that no two live functions
share a slot.

## Scheduling: priority queues and the FPU occupancy rule

`prio_queue` is an array of `NUM_PRIO` = 4 circular FIFOs of 16 entries, one
per priority class. A function always enters at the *end* of the queue of its
priority. This holds for a new function from fine decoding and equally for
one that comes back after I/O or after giving up its FPU. The head of the
highest non-empty level is the only candidate for dispatch.

`fps_scheduler` applies the first-come first-served rule:

* The candidate goes to the lowest-numbered idle FPU in its mask, in the
  same cycle. If none is idle, the candidate waits (`stall`) and nothing behind
  it overtakes it, not even a function for a different, idle class. Higher
  priority classes can therefore monopolise the farm.
* An FPU belongs to its function until the FPU answers. There is no time slice
  and no preemption. The answers are:
  * `RSP_DONE` with the result. The result goes to the integration unit.
  * `RSP_IO`. The function is parked in `io_queue`. Each `io_complete` pulse
    marks the oldest parked function runnable. It then goes back to the end of
    its priority queue. I/O completions are assumed to come in request order.
  * `RSP_YIELD` with a requested priority. The function goes back to the end
    of a priority queue. If its priority is dynamic (`dyn`), it goes to the
    requested level. A static priority never changes.

  In all three cases the FPU is free again in the next cycle.
* Functions that go back to a queue carry `resume = 1`. This lets the FPU tell
  a continuation from a first run.
* The priority queue takes one write per cycle. Returning functions win over
  new ones, and a woken function wins over a yielding one. A yield that
  loses is simply not acknowledged, and the FPU keeps presenting it.

## Integration: back into program order

`integration_unit` is a 16-entry reorder buffer. A `DONE` result is written
into slot `seq mod 16`. Whenever the slot of the next function in program
order is full, its result is written to `integration_memory` at the
function's sequence number, and `commit_cnt` advances. This is one commit per
cycle.

`commit_cnt` does two jobs. It is the "producer is ready" test for
dependencies in fine decoding, and it sets the outstanding-function window.

`integration_memory` holds 256 results. It has one write port and two
combinational read ports, one for forwarding and one for the host.

`done` rises once three things are true: the end of the program was reached,
fine decoding is empty, and every decoded function has been committed.

## Connecting FPUs

```
fpu_issue[i]      out  one-cycle pulse: FPU i gets the job on fpu_job (shared by all FPUs)
fpu_job           out  job_t: seq, fid, fpu_mask, code, prio, dyn, resume, op_a, op_b
fpu_rsp_valid[i]  in   FPU i has a response; hold it and fpu_rsp[i] until acknowledged
fpu_rsp[i]        in   fpu_rsp_t: kind (DONE/IO/YIELD), result, new_prio
fpu_rsp_ack[i]    out  response of FPU i taken in this cycle
io_complete       in   one-cycle pulse: the oldest outstanding I/O transfer finished
```

Besides these, the top has a `status` output (`fps_status_t`). It shows
which FPUs are busy, whether the queue head is stalled, whether fine decoding
is holding for a producer or for a reorder slot, the number of functions
queued, waiting for I/O and committed, and whether a result has just arrived
ahead of an older one.

An FPU is only issued a job while it is idle in the scheduler's table. That
lasts from issue until its response is acknowledged. Each FPU must answer every
job exactly once. When several FPUs answer together, a round-robin arbiter
takes one per cycle, so an FPU waits at most seven cycles for the bus.

## Parameters and size

| name | default | where | meaning |
|------|---------|-------|---------|
| `NUM_FPU` | 8 | `fps_pkg` | FPUs (from the architecture) |
| `NUM_CLASS` | 5 | `fps_pkg` | function classes |
| `NUM_PRIO` | 4 | `fps_pkg` | priority levels |
| `DATA_W` | 32 | `fps_pkg` | operand and result width |
| `SEQ_W` | 8 | `fps_pkg` | sequence number: up to 256 functions per program |
| `PROG_DEPTH` | 256 | `fps_top` | program words |
| `QDEPTH` | 16 | `fps_top` | entries per priority level |
| `IOQ_DEPTH` | 8 | `fps_top` | functions waiting for I/O |
| `ROB_DEPTH` | 16 | `fps_top` | reorder buffer slots = outstanding functions |

Only `NUM_FPU = 8` and the roles of FPU1 to FPU4 come from the architecture.
Everything else is this design's choice. The package constants size the
shared structs, so change them in `fps_pkg`. The rest are module parameters.

At the defaults, coarse synthesis with yosys gives about 440 word-level cells
and 380 flip-flop bits. It also gives 31.5 kbit of memory: the program array,
the queues and the integration memory.

## How closely this follows the architecture

Taken from the architecture:

* the chain functional decoder → fine decoding → interconnect bus → eight FPUs → reorder-buffer integration unit → integration memory;
* the flow of the functional decoder: store, read, check for end, hand on;
* classification by function kind;
* class-plus-index FIDs;
* the three fine-decoding jobs (FPU locate, temporal locate, connectivity fix);
* priority queues with FIFO order inside a class;
* the non-preemptive first-come first-served rule;
* return to the end of the queue after I/O or a voluntary yield;
* static and dynamic priorities;
* the I/O wait queue.

Choices made here where the description is silent:

* all formats and widths;
* level 0 being the highest priority;
* strict head-of-line dispatch;
* lowest-index FPU choice;
* the in-order dependency hold with forwarding from integration memory;
* the reorder window;
* in-order I/O completion;
* round-robin bus arbitration;
* the FPU handshake;
* unknown class codes becoming maths;
* the roles of FPU5 to FPU8.

Departures and gaps:

* **Result path.** Results reach the integration unit over the bus and through
  the scheduler. The block diagram draws a direct connection from the FPU
  groups to the integration unit. The scheduler has to see each completion to
  free the FPU, so the path was merged.
* **No time slice.** The description mentions functions using "the whole time
  slice", but also says an assigned function keeps its unit until it
  completes. The latter is built.
* **Not built.** The FPUs and their processing element, cache and local
  function store (their behaviour is not specified); the "forwarding
  channels" that appear below the integration memory (named only); a
  graph-based placement step, an "execution map" and a "sync chart" (named
  without content); extra FPUs dedicated to I/O.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog:

| testbench | what it establishes |
|-----------|---------------------|
| `tb_func_decoder` | only function words come out, in order; one word per cycle; END or end of array stops the run |
| `tb_fine_decoder` | cycle-by-cycle reference for acceptance (dependency and window holds), FIDs, masks, forwarded operand, restart |
| `tb_prio_queue` | reference queues per level: head, occupancy, full levels, port precedence |
| `tb_fps_scheduler` | FPU choice, stall, routing of DONE/IO/YIELD, static vs dynamic priority, wake-up precedence |
| `tb_fp_interconnect` | issue delivery, round-robin grant sequence, acknowledge, fairness under full load |
| `tb_io_queue` | order, no early release, ignored spurious completions |
| `tb_integration_unit` | in-order commit of a random-order stream, commit latency, restart |
| `tb_integration_memory` | read-after-write on both ports |
| `tb_fps_top` | two random programs (200 and 60 functions) at default sizes with eight FPU models; every result checked, and each mechanism (stall, both holds, out-of-order completion, I/O, wake-up, yield with static and dynamic priority, priority overtaking, class remap, skip words, simultaneous FPU responses, yield waiting behind wake-up) must occur |
| `tb_fig5_fifo` | 15 same-priority functions, 3 with I/O: first runs issued strictly in arrival order and one per cycle, I/O returns in request order, all eight FPUs busy at once |

The FPU stand-in (`tb/fpu_model.sv`) gives each code a made-up result
(`tb/fps_tb_pkg.sv`: `ref_result`) and a run time of 1 + `code[3:0]` cycles.
Code bit 7 asks for one I/O transfer and bit 6 for one yield. The testbenches
compute expected results independently from the same formula.

To run one with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fps_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/fps_pkg.sv tb/fps_tb_pkg.sv tb/tb_fps_top.sv
./obj_dir/Vtb_fps_top
```

Every file builds and lints with `verilator --lint-only -Wall`. The remaining
warnings note that `rst_n` is used both as an asynchronous reset and in
assertion `disable iff` clauses. A few modules also do not use every
package constant.

How far to trust it: each block is checked against an independent reference
model under random stimulus. The whole system is checked end to end against
program-order results. Each testbench was also shown to catch a deliberately
broken version of its block. Nothing has been timed or implemented on silicon
or an FPGA. The FPU side is a model, so its protocol is only as right as that
model.

## Files

`rtl/fps_pkg.sv` (shared types and constants), `rtl/func_decoder.sv`,
`rtl/fine_decoder.sv`, `rtl/prio_queue.sv`, `rtl/fps_scheduler.sv`,
`rtl/fp_interconnect.sv`, `rtl/io_queue.sv`, `rtl/integration_unit.sv`,
`rtl/integration_memory.sv`, `rtl/fps_top.sv` (top). Testbenches and the FPU
model are in `tb/`.
