// axis_queuing -- AXI4-Stream queuing interface (runtime -> scheduler).
//
// At every mapping event the runtime first sends the current availability
// time of each PE, then one beat per ready-queue task. This block accepts
// the stream, tells the two kinds of beat apart by tuser (see heft_pkg) and
// splits each beat into its fields:
//   * an availability beat raises avail_wen for one cycle with the P
//     availability times, which every PE handler loads into its register;
//   * a task beat raises task_push for one cycle with TID, Avg_TID and the
//     per-PE execution times; the top writes them into the priority queue and
//     the two memories at the QID of that cycle.
// A batch (the ready queue of one mapping event) ends at the task beat that
// carries tlast, or at the task that fills the last queue slot, whichever
// comes first; batch_end then pulses together with task_push.
//
// Handshake: tready = accept, driven by the top (high only while the priority
// queue is in its fill mode). A beat transfers in a cycle with tvalid and
// tready both high; one task per cycle can be taken. Purely combinational
// apart from the protocol assertion.
// The field layout, the tuser encoding and the full-queue rule are this
// design's own choices; the paper gives the content of the beats only.
module axis_queuing #(
  parameter int unsigned P      = heft_pkg::P_DEF,
  parameter int unsigned W_TID  = heft_pkg::W_TID_DEF,
  parameter int unsigned W_AVG  = heft_pkg::W_AVG_DEF,
  parameter int unsigned W_EXEC = heft_pkg::W_EXEC_DEF,
  parameter int unsigned W_TIME = heft_pkg::W_TIME_DEF,
  localparam int unsigned TDW   = heft_pkg::in_tdata_bits(P, W_TID, W_AVG, W_EXEC, W_TIME)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // AXI4-Stream slave
  input  logic                          s_axis_tvalid,
  output logic                          s_axis_tready,
  input  logic [TDW-1:0]                s_axis_tdata,
  input  logic                          s_axis_tuser,
  input  logic                          s_axis_tlast,
  // flow control from the scheduler
  input  logic                          accept,
  input  logic                          last_slot,
  // availability times to the PE handlers
  output logic                          avail_wen,
  output logic [P-1:0][W_TIME-1:0]      avail_time,
  // task record to the queue and memories
  output logic                          task_push,
  output logic [W_TID-1:0]              task_tid,
  output logic [W_AVG-1:0]              task_avg,
  output logic [P-1:0][W_EXEC-1:0]      task_exec,
  output logic                          batch_end
);
  import heft_pkg::*;

  logic fire;
  beat_kind_e kind;

  assign s_axis_tready = accept;
  assign fire          = s_axis_tvalid && s_axis_tready;
  assign kind          = beat_kind_e'(s_axis_tuser);

  assign avail_wen  = fire && (kind == BEAT_AVAIL);
  assign avail_time = s_axis_tdata[P*W_TIME-1:0];

  assign task_push  = fire && (kind == BEAT_TASK);
  assign task_tid   = s_axis_tdata[W_TID-1:0];
  assign task_avg   = s_axis_tdata[W_TID +: W_AVG];
  assign task_exec  = s_axis_tdata[W_TID+W_AVG +: P*W_EXEC];
  assign batch_end  = task_push && (s_axis_tlast || last_slot);

  // AXI4-Stream rule for the sender: once tvalid is high it stays high, with
  // the same payload, until the beat is taken.
  property p_hold_until_taken;
    @(posedge clk) disable iff (!rst_n)
      (s_axis_tvalid && !s_axis_tready) |=>
        (s_axis_tvalid && $stable(s_axis_tdata) && $stable(s_axis_tuser)
         && $stable(s_axis_tlast));
  endproperty
  a_hold_until_taken: assert property (p_hold_until_taken)
    else $error("axis_queuing: input beat changed or withdrawn before it was taken");

endmodule
