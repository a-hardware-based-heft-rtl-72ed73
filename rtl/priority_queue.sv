// priority_queue -- shift-register priority queue with odd-even
// transposition sorting.
//
// The queue is a row of D cells, cell 0 at the front. Each cell holds a
// valid bit, a queue identifier (QID) and the task's average execution time
// Avg_TID, the sort key. The queue has three modes:
//   FILL  Tasks enter at the front: the new task goes into cell 0 and every
//         cell passes its contents one place back (cell k -> cell k+1). One
//         task per cycle. sort_start (asserted with the last task of the
//         ready queue) moves the queue to SORT.
//   SORT  Each cycle one phase of odd-even transposition sort runs: in the
//         even phase the pairs (0,1), (2,3), ... are compared, in the odd
//         phase the pairs (1,2), (3,4), ...; the phase alternates every cycle.
//         A pair swaps when the Avg_TID of the higher-numbered cell is larger
//         than that of the lower-numbered cell, so the largest average drifts
//         to cell 0. Every comparison involves only neighbours, which keeps
//         the critical path independent of D. When two successive phases make
//         no swap the queue is sorted and moves to DEQ.
//   DEQ   Right-shift mode: cell 0 is offered on deq_qid; when deq_ready is
//         high every cell takes the contents of the cell behind it
//         (cell k+1 -> cell k). When the last valid task leaves, the queue
//         returns to FILL.
// The swap rule is strict, so tasks of equal average keep their relative
// order: of two equal tasks the one enqueued later leaves first.
//
// Timing: a ready queue of n tasks takes n FILL cycles and at most n+2 SORT
// cycles, after which one task leaves per cycle. Outputs come straight from
// the cell registers. Synchronous active-low reset empties the queue.
// D must be at least 2.
// Cells, comparators, sorting rule, stop condition and shift directions
// follow the paper. The valid bits, and the rule that an empty cell never
// moves ahead of a full one, are this design's own.
module priority_queue #(
  parameter int unsigned D     = heft_pkg::D_DEF,
  parameter int unsigned W_AVG = heft_pkg::W_AVG_DEF,
  localparam int unsigned QW   = $clog2(D)
) (
  input  logic             clk,
  input  logic             rst_n,
  // enqueue (FILL mode only)
  input  logic             enq_valid,
  input  logic [QW-1:0]    enq_qid,
  input  logic [W_AVG-1:0] enq_avg,
  input  logic             sort_start,
  // dequeue (DEQ mode only)
  output logic             deq_valid,
  input  logic             deq_ready,
  output logic [QW-1:0]    deq_qid,
  output logic [W_AVG-1:0] deq_avg,
  output logic             deq_last,
  // status
  output heft_pkg::pq_mode_e mode,
  output logic             swapped,     // a swap happened in this SORT cycle
  output logic             sort_phase   // 0: even pairs, 1: odd pairs
);
  import heft_pkg::*;

  typedef struct packed {
    logic             valid;
    logic [QW-1:0]    qid;
    logic [W_AVG-1:0] avg;
  } cell_t;

  cell_t    cell_q [D];
  cell_t    cell_d [D];
  logic     swap   [D];          // swap[k]: exchange cells k and k+1
  pq_mode_e mode_q;
  logic     phase_q;
  logic     prev_quiet_q;        // previous SORT phase made no swap
  logic     any_swap;
  logic     deq_fire;

  // Comparator between cell k (B) and cell k+1 (A): A > B ? 1 : 0, gated
  // by the phase so that only every other pair works in a cycle.
  always_comb begin
    for (int k = 0; k < D; k++) begin
      swap[k] = 1'b0;
      if (k < D - 1) begin
        if ((mode_q == PQ_SORT) && ((k % 2) == int'(phase_q))) begin
          swap[k] = cell_q[k+1].valid &&
                    (!cell_q[k].valid || (cell_q[k+1].avg > cell_q[k].avg));
        end
      end
    end
  end

  always_comb begin
    any_swap = 1'b0;
    for (int k = 0; k < D; k++) any_swap |= swap[k];
  end

  assign deq_fire = (mode_q == PQ_DEQ) && cell_q[0].valid && deq_ready;

  // Next value of every cell.
  always_comb begin
    for (int k = 0; k < D; k++) begin
      cell_d[k] = cell_q[k];
      unique case (mode_q)
        PQ_FILL: begin
          if (enq_valid) begin
            if (k == 0) cell_d[k] = '{valid: 1'b1, qid: enq_qid, avg: enq_avg};
            else        cell_d[k] = cell_q[k-1];
          end
        end
        PQ_SORT: begin
          if ((k < D - 1) && swap[k])       cell_d[k] = cell_q[k+1];
          else if ((k > 0) && swap[k-1])    cell_d[k] = cell_q[k-1];
        end
        PQ_DEQ: begin
          if (deq_fire) begin
            if (k == D - 1) cell_d[k] = '0;
            else            cell_d[k] = cell_q[k+1];
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < D; k++) cell_q[k] <= '0;
    end else begin
      for (int k = 0; k < D; k++) cell_q[k] <= cell_d[k];
    end
  end

  // Mode control.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode_q       <= PQ_FILL;
      phase_q      <= 1'b0;
      prev_quiet_q <= 1'b0;
    end else begin
      unique case (mode_q)
        PQ_FILL: begin
          phase_q      <= 1'b0;
          prev_quiet_q <= 1'b0;
          if (sort_start) mode_q <= PQ_SORT;
        end
        PQ_SORT: begin
          phase_q      <= ~phase_q;
          prev_quiet_q <= !any_swap;
          if (!any_swap && prev_quiet_q) mode_q <= PQ_DEQ;
        end
        PQ_DEQ: begin
          if (!cell_q[0].valid || (deq_fire && !cell_q[1].valid)) mode_q <= PQ_FILL;
        end
        default: mode_q <= PQ_FILL;
      endcase
    end
  end

  assign deq_valid  = (mode_q == PQ_DEQ) && cell_q[0].valid;
  assign deq_qid    = cell_q[0].qid;
  assign deq_avg    = cell_q[0].avg;
  assign deq_last   = deq_valid && !cell_q[1].valid;
  assign mode       = mode_q;
  assign swapped    = any_swap;
  assign sort_phase = phase_q;

  // Tasks are only offered in FILL mode and the queue never overflows.
  a_enq_in_fill: assert property (@(posedge clk) disable iff (!rst_n)
      enq_valid |-> (mode_q == PQ_FILL) && !cell_q[D-1].valid)
    else $error("priority_queue: enqueue outside FILL mode or into a full queue");

endmodule
