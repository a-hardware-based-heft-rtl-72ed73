# A hardware HEFT_RT task scheduler for heterogeneous SoCs

A heterogeneous SoC runs many interleaved applications on processing elements
(PEs) of different kinds, such as CPU cores and an FFT accelerator. A task
takes a different time on each kind of PE. Each time tasks become ready, the
runtime must decide which PE gets each one. HEFT_RT is the runtime variant of
the Heterogeneous Earliest Finish Time list scheduler. At every *mapping
event* it does two things:

1. It orders the ready tasks by their average execution time over all PEs,
   longest first.
2. It takes the tasks in that order. Each one goes to the PE on which it
   would finish earliest. That PE's availability time then moves to this
   finish time.

In software the sort costs O(n log n) per event, and it becomes a bottleneck
once ready queues hold hundreds of tasks. This RTL does the whole mapping
event in hardware in at most 3n+3 clock cycles for n tasks. After about
2n+3 cycles it returns one decision per cycle.

The RTL follows the architecture of the hardware HEFT_RT scheduler by Fusco,
Hassan, Mack and Akoglu ("A Hardware-based HEFT Scheduler Implementation for
Dynamic Workloads on Heterogeneous SoCs"). That paper gives the block
diagram, the priority-queue sorting scheme, the cycle counts and the main
sizes. The stream formats, several widths, the tie rules and the flow control
are not in the paper and were chosen here. Each is listed below.

## Data flow

```
          s_axis (runtime -> scheduler)
                  |
            axis_queuing ----- avail_wen, T_avail[i] -------------+
             |    |    \                                          |
        TID  | Avg|     Exec[0..P-1]                              v
             |    v                                       pe_handler x P
   assign_id -> priority_queue        exec_lutram ----Exec[i]--> (T_avail + Exec)
     (QID)   |  (QID, Avg) cells       (at QID)                   |  T_finish[i]
             |        | dequeued QID ------^                      v
             +--> tid_bram <----------- (rd_addr)           eft_selector
                 (at QID)                                        | PE index
                      | TID                                      v
                      +----------> axis_scheduling <------- pe_decoder --sel--> pe_handler
                                        |
                                  m_axis (decisions -> runtime)
```

| Module | Role |
|---|---|
| `heft_pkg` | Default sizes, beat-kind and queue-mode enums, width helpers |
| `axis_queuing` | Input AXI4-Stream. Splits beats into availability times and task records; closes a batch |
| `assign_id` | Gives each task a queue identifier QID = 0, 1, ... D-1 |
| `priority_queue` | D-cell shift-register queue. Sorted by odd-even transposition |
| `exec_lutram` | Per-PE execution times per QID. Asynchronous read (LUT-RAM) |
| `tid_bram` | Runtime TID per QID. Synchronous read (block RAM) |
| `pe_handler` | One per PE: availability register and finish-time adder |
| `eft_selector` | Minimum tree over the P finish times |
| `pe_decoder` | PE index to one-hot write select for the handlers |
| `axis_scheduling` | Output AXI4-Stream of (TID, PE) decisions |
| `heft_scheduler` | Top level |

The runtime's task identifiers can be any 32-bit value. Inside, every task is
known only by its QID, its slot number in the current batch. So the two
memories are exactly D words deep, and the queue cells carry only
`clog2(D)` bits of identity plus the sort key.

## The priority queue

This is the largest and least obvious part. It is a row of D cells. Cell 0 is
the front. Each cell holds `{valid, QID, Avg}`. The queue passes through three
modes in turn:

**FILL.** A new task enters cell 0, and every other cell moves one place back
(cell k to cell k+1). Insertion therefore costs one cycle whatever the queue
depth. Sorted insertion would need a search or a heap. The last task of the
batch (`sort_start`) moves the queue to SORT.

**SORT.** One phase of odd-even transposition sort runs per cycle. In the even
phase the pairs (0,1), (2,3), ... compare; in the odd phase the pairs (1,2),
(3,4), ... compare. Each pair has its own comparator. It computes
`A > B ? 1 : 0`, where A is the key of the higher-numbered cell and B that of
the lower-numbered cell. When this is 1 the two cells swap. Large averages
therefore move toward cell 0. Every cell depends only on its neighbours, so
the clock period does not depend on D; only area grows with D. When two
phases in a row make no swap, every adjacent pair is in order and the queue
is sorted. Odd-even transposition needs at most n phases for n entries. With
the two quiet phases, SORT lasts at most n+2 cycles. An already sorted queue
finishes in 2 cycles.

**DEQ.** The register shifts the other way (cell k+1 to cell k). Cell 0 offers
its QID. One task leaves per cycle unless the output stream stalls. When the
last valid entry leaves, the queue goes back to FILL.

Two details are this design's own:

- **Valid bits.** A cell that is empty never moves ahead of a full one. This
  lets a partly filled queue sort and drain correctly.
- **Tie order.** The swap test is strict, so tasks of equal average keep their
  relative order. Tasks enter at the front, so of two equal tasks **the one
  sent later is mapped first**. A software reference model must use the same
  rule to match the output exactly.

At D = 512 the queue holds 512 x (16 + 9 + 1) = 13,312 flip-flops.

## Mapping a task

While a task sits in cell 0 in DEQ mode, everything below happens in one
cycle. Its QID reads the LUT-RAM asynchronously and gives the task's
execution time on every PE. Each `pe_handler` adds that time to its
availability register. `eft_selector` reduces the P sums with a binary
minimum tree, log2(P) levels deep; on equal finish times the lower PE index
wins. `pe_decoder` turns the winner's index into a write enable for that one
handler.

At the clock edge three things happen together:

- The chosen handler stores the finish time as its new availability time.
- `axis_scheduling` registers the PE index.
- `tid_bram` registers the TID read at the same QID.

Because of this, the next task in the queue already sees the PE it competes
for as busy. The loop from availability register through adder, tree,
decoder and back to the register sets the clock period. It grows with log P,
not with D.

## Cycle budget

For a batch of n tasks sent back to back, and an output that never stalls:

| Step | Cycles |
|---|---|
| fill | n (one task per cycle) |
| sort | s <= n + 2 (including the two quiet phases) |
| first decision | registered 1 cycle later: n + s + 1 <= **2n + 3** |
| remaining decisions | n - 1 more, one per cycle: <= 3n + 2 <= **3n + 3** |

The end-to-end testbench checks both bounds on every batch that is sent
without gaps and drained without back-pressure.

## Stream interfaces

The input is one AXI4-Stream, `s_axis_*`. Its tdata is
`max(W_TID + W_AVG + P*W_EXEC, P*W_TIME)` bits wide: 128 bits at the
defaults. `tuser` gives the kind of beat:

| tuser | beat | tdata, from bit 0 up |
|---|---|---|
| 0 | availability | T_avail[PE0], T_avail[PE1], ... (W_TIME bits each) |
| 1 | task | TID (W_TID), Avg_TID (W_AVG), Exec[PE0], Exec[PE1], ... (W_EXEC each) |

A mapping event is one availability beat followed by the task beats. `tlast`
marks the last task. The scheduler computes nothing from the average: it
uses the value the runtime sends.

`s_axis_tready` is high only while the queue is in FILL mode. A runtime can
therefore send the next event at once; it is held off until the current one
has been mapped.

**Over-long ready queues.** A batch of more than D tasks is cut. The task that
takes slot D-1 closes the batch, as if it carried tlast. The remaining tasks
form the next batch and use the availability times left by the first. The
decisions then follow a per-D-block priority order instead of a global
one. The paper's measurements include ready queues of more than 1000 tasks,
but it does not say how its hardware handled them.

The output is `m_axis_*`. Each beat has tdata = `{PE index, TID}`; tlast is
set on the last decision of a batch. While a beat waits for `tready`, the
queue does not dequeue. Assertions check the stream rule (a pending beat
stays stable) on both ports. The updated availability time is not sent. The
runtime sends fresh availability times at the start of every event.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `P` | 4 | paper: 4 PEs (the evaluated SoC is given as 3 ARM cores + 1 FFT accelerator; the board has four cores, so counting all of them would need P = 5) |
| `D` | 512 | paper: queue depth 512 |
| `W_AVG` | 16 | paper: 16-bit average execution time |
| `W_EXEC` | 16 | own choice |
| `W_TIME` | 32 | own choice. Chosen to fit the 128 PE-handler flip-flops the paper reports for 4 PEs |
| `W_TID` | 32 | own choice |

All modules take these sizes as parameters. The paper's other synthesized
points can be set directly: D = 64 to 512 with P = 4, P = 8 or 16 with
D = 512, P = 16 with D = 132, and W_AVG = 32 with D = 64. `D` must be at
least 2. Times wrap at `W_TIME` bits, so the runtime should send
availability times relative to a recent origin.

## Where this RTL departs from, or goes beyond, the paper

- **QID range.** The paper says in one place that QIDs range up to D, and
  elsewhere that they are `ceil(log2 D)` bits wide. Here they run 0..D-1,
  and the counter restarts at every batch.
- **Sort speed.** The paper says in one place that a comparison takes two
  clock cycles, and elsewhere counts one odd or even phase per cycle in its
  2n+3 / 3n+3 analysis. The analysis is followed here: one phase per cycle,
  starting with the even phase.
- **Output contents.** The paper's background section says the updated
  availability time is returned with the decision. Its hardware description
  and block diagram send only TID and PE index. The latter is followed here.
- Chosen here, where the paper says nothing:
  - stream layouts, tuser and tlast use, and back-pressure;
  - valid bits in the queue;
  - the cut of over-long queues;
  - tie rules in the queue and in the EFT selector;
  - widths other than `W_AVG`;
  - synchronous active-low reset.
- **Memories.** The TID memory is a synchronous-read array and the
  execution-time memory an asynchronous-read array. On an FPGA they map to
  block RAM and LUT-RAM. For an ASIC the LUT-RAM would have to become
  flip-flops or a macro with a different read timing.
- The host runtime, the DMA engines and the PEs themselves are outside this
  RTL. The AXI4-Stream ports are where they connect.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values the testbench computes itself. Each prints
`TB_RESULT checks=N failures=M`.

- `tb_priority_queue` uses a 16-cell queue. It checks the exact number of
  sort cycles against its own odd-even model and against n+2. It also checks
  the dequeue order against a stable descending sort, over random, tied,
  sorted, reverse-sorted and constant batches, with random dequeue stalls.
- `tb_heft_scheduler` runs the top at its default size (4 PEs, 512 cells)
  against a software HEFT_RT model. The batches include:
  - a single task;
  - a full 512-task queue;
  - a 600-task queue, which is cut;
  - heavy ties;
  - an event offered while the previous one is still being mapped.

  It compares every decision and the final availability registers, and
  checks the 2n+3 and 3n+3 cycle bounds. It also counts each mechanism (input
  stall, sort swaps, early sort stop, full-queue cut, output back-pressure,
  EFT tie) and fails if one never occurs.

- `tb_heft_workloads` runs the same end-to-end checks on eight scheduler
  instances, one per synthesized configuration:

  | P | D | W_AVG | Note |
  |---|---|---|---|
  | 4 | 512 | 16 | includes a 1330-task ready queue, the largest measured, mapped in three passes |
  | 8 | 512 | 16 | |
  | 16 | 512 | 16 | |
  | 4 | 64 | 16 | |
  | 4 | 128 | 16 | |
  | 4 | 256 | 16 | |
  | 16 | 132 | 16 | |
  | 4 | 64 | 32 | |

  The harness it uses is `heft_workload_harness`.

To simulate with Verilator, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/heft_pkg.sv \
    tb/tb_heft_scheduler.sv --top-module tb_heft_scheduler -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. The full-size run takes
well under a second; `tb_heft_workloads` takes under a minute to build,
because it builds eight schedulers.
