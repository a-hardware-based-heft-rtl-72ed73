// heft_scheduler -- hardware HEFT_RT scheduler, top level.
//
// At each mapping event the host runtime streams in the availability time of
// every PE and then its ready queue, one task per beat (TID, average
// execution time over all PEs, execution time on each PE). The scheduler
//   1. gives each task a queue identifier QID (assign_id), writes
//      (QID, Avg_TID) into the front of the priority queue, the per-PE
//      execution times into the LUT-RAM and the TID into the block RAM, all
//      at address QID, one task per cycle;
//   2. sorts the queue by decreasing average execution time with odd-even
//      transposition sort until two phases in a row make no swap;
//   3. shifts the tasks out in that order, one per cycle. For the task at the
//      front, each PE handler adds the task's execution time on its PE to
//      the PE's availability time; the EFT selector picks the PE with the
//      earliest finish time; through the decoder that PE's handler takes the
//      finish time as its new availability time; and the decision
//      (TID, PE index) is sent back over the output stream.
// A ready queue of n tasks is taken in n cycles, the first decision leaves
// at most 2n+3 cycles after the first task entered, and the last at most
// 3n+3 cycles after (without output back-pressure).
//
// Interfaces: AXI4-Stream slave s_axis_* (beat layout in heft_pkg; tuser
// tells availability beats from task beats; tlast closes the ready queue)
// and AXI4-Stream master m_axis_* (tdata = {PE index, TID}; tlast on the
// last decision). The input is not ready while a ready queue is being
// sorted or mapped. A ready queue longer than D is cut at D tasks: the D-th
// task closes it and the rest is taken as the next mapping event.
// The block structure and the data flow follow the paper; stream formats,
// back-pressure and the over-long-queue rule are this design's own.
module heft_scheduler #(
  parameter int unsigned P      = heft_pkg::P_DEF,
  parameter int unsigned D      = heft_pkg::D_DEF,
  parameter int unsigned W_AVG  = heft_pkg::W_AVG_DEF,
  parameter int unsigned W_EXEC = heft_pkg::W_EXEC_DEF,
  parameter int unsigned W_TIME = heft_pkg::W_TIME_DEF,
  parameter int unsigned W_TID  = heft_pkg::W_TID_DEF,
  localparam int unsigned TDW   = heft_pkg::in_tdata_bits(P, W_TID, W_AVG, W_EXEC, W_TIME),
  localparam int unsigned W_PE  = heft_pkg::pe_bits(P),
  localparam int unsigned QW    = $clog2(D)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ready queue and availability times from the runtime
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  logic [TDW-1:0]        s_axis_tdata,
  input  logic                  s_axis_tuser,
  input  logic                  s_axis_tlast,
  // mapping decisions to the runtime
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic [W_TID+W_PE-1:0] m_axis_tdata,
  output logic                  m_axis_tlast,
  // status
  output heft_pkg::pq_mode_e    pq_mode,
  output logic [P-1:0][W_TIME-1:0] t_avail
);
  import heft_pkg::*;

  // queuing interface outputs
  logic                     avail_wen;
  logic [P-1:0][W_TIME-1:0] avail_time;
  logic                     task_push;
  logic [W_TID-1:0]         task_tid;
  logic [W_AVG-1:0]         task_avg;
  logic [P-1:0][W_EXEC-1:0] task_exec;
  logic                     batch_end;
  // QID
  logic [QW-1:0]            qid;
  logic                     last_slot;
  // priority queue
  logic                     deq_valid, deq_ready, deq_last, deq_fire;
  logic [QW-1:0]            deq_qid;
  pq_mode_e                 mode;
  // memories
  logic [P-1:0][W_EXEC-1:0] exec_rd;
  logic [W_TID-1:0]         tid_rd;
  // mapping datapath
  logic [P-1:0][W_TIME-1:0] t_finish;
  logic [W_PE-1:0]          eft_idx;
  logic [P-1:0]             pe_sel;
  logic                     can_accept;

  axis_queuing #(
    .P(P), .W_TID(W_TID), .W_AVG(W_AVG), .W_EXEC(W_EXEC), .W_TIME(W_TIME)
  ) u_queuing (
    .clk, .rst_n,
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tuser, .s_axis_tlast,
    .accept     (mode == PQ_FILL),
    .last_slot  (last_slot),
    .avail_wen, .avail_time,
    .task_push, .task_tid, .task_avg, .task_exec,
    .batch_end
  );

  assign_id #(.D(D)) u_assign_id (
    .clk, .rst_n,
    .inc       (task_push),
    .clear     (batch_end),
    .qid       (qid),
    .last_slot (last_slot)
  );

  priority_queue #(.D(D), .W_AVG(W_AVG)) u_pq (
    .clk, .rst_n,
    .enq_valid  (task_push),
    .enq_qid    (qid),
    .enq_avg    (task_avg),
    .sort_start (batch_end),
    .deq_valid, .deq_ready, .deq_qid, .deq_avg (), .deq_last,
    .mode, .swapped (), .sort_phase ()
  );

  exec_lutram #(.DEPTH(D), .WIDTH(P * W_EXEC)) u_lutram (
    .clk,
    .we      (task_push),
    .wr_addr (qid),
    .wr_data (task_exec),
    .rd_addr (deq_qid),
    .rd_data (exec_rd)
  );

  tid_bram #(.DEPTH(D), .WIDTH(W_TID)) u_bram (
    .clk, .rst_n,
    .we      (task_push),
    .wr_addr (qid),
    .wr_data (task_tid),
    .re      (deq_fire),
    .rd_addr (deq_qid),
    .rd_data (tid_rd)
  );

  for (genvar i = 0; i < P; i++) begin : g_pe
    pe_handler #(.W_EXEC(W_EXEC), .W_TIME(W_TIME)) u_handler (
      .clk, .rst_n,
      .avail_wen (avail_wen),
      .avail_in  (avail_time[i]),
      .exec_time (exec_rd[i]),
      .sel       (pe_sel[i]),
      .t_finish  (t_finish[i]),
      .t_avail   (t_avail[i])
    );
  end

  eft_selector #(.P(P), .W_TIME(W_TIME)) u_eft (
    .t_finish (t_finish),
    .min_idx  (eft_idx),
    .min_time ()
  );

  assign deq_ready = can_accept;
  assign deq_fire  = deq_valid && deq_ready;

  pe_decoder #(.P(P)) u_dec (
    .en  (deq_fire),
    .idx (eft_idx),
    .sel (pe_sel)
  );

  axis_scheduling #(.W_TID(W_TID), .W_PE(W_PE)) u_sched (
    .clk, .rst_n,
    .dec_valid  (deq_fire),
    .dec_pe     (eft_idx),
    .dec_last   (deq_last),
    .tid_in     (tid_rd),
    .can_accept (can_accept),
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast
  );

  assign pq_mode = mode;

endmodule
