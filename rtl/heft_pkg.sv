// heft_pkg -- shared constants and types of the HEFT_RT hardware scheduler.
//
// Default sizes are those of the main configuration: 4 processing elements
// (PEs), a priority queue 512 cells deep and 16-bit average execution times.
// The widths of the per-PE execution time, of the availability/finish times
// and of the task identifier are this design's own choice (see each constant).
// The package also fixes the layout of the AXI4-Stream beats exchanged with
// the host runtime, which is likewise this design's own choice.
package heft_pkg;

  // Number of processing elements (P).
  localparam int unsigned P_DEF      = 4;
  // Depth of the priority queue (D); QID width is ceil(log2 D).
  localparam int unsigned D_DEF      = 512;
  // Bit width of the average execution time Avg_TID, the sort key.
  localparam int unsigned W_AVG_DEF  = 16;
  // Bit width of one per-PE execution time Exec_TID[PE_i] (own choice: same
  // as the average it is averaged into).
  localparam int unsigned W_EXEC_DEF = 16;
  // Bit width of the availability / finish times held by the PE handlers
  // (own choice: 32 bits, matching 128 handler registers for 4 PEs).
  localparam int unsigned W_TIME_DEF = 32;
  // Bit width of the runtime's task identifier TID (own choice).
  localparam int unsigned W_TID_DEF  = 32;

  // Kind of an input stream beat, carried on s_axis_tuser.
  //   BEAT_AVAIL: tdata holds P availability times, PE0 in the low bits,
  //               W_TIME bits each.
  //   BEAT_TASK : tdata holds, from bit 0 up, TID (W_TID bits), Avg_TID
  //               (W_AVG bits), then Exec_TID[PE0..PE(P-1)] (W_EXEC bits each).
  // tlast on a task beat closes the ready queue of the current mapping event.
  typedef enum logic {
    BEAT_AVAIL = 1'b0,
    BEAT_TASK  = 1'b1
  } beat_kind_e;

  // Operating mode of the priority queue.
  typedef enum logic [1:0] {
    PQ_FILL = 2'd0,   // accepting tasks at the front of the queue
    PQ_SORT = 2'd1,   // odd-even transposition sort in progress
    PQ_DEQ  = 2'd2    // right-shift mode: one task leaves per cycle
  } pq_mode_e;

  // Width of a task beat's payload.
  function automatic int unsigned task_bits(int unsigned p, int unsigned w_tid,
                                            int unsigned w_avg, int unsigned w_exec);
    return w_tid + w_avg + p * w_exec;
  endfunction

  // Width of the input stream's tdata: wide enough for either kind of beat.
  function automatic int unsigned in_tdata_bits(int unsigned p, int unsigned w_tid,
                                                int unsigned w_avg, int unsigned w_exec,
                                                int unsigned w_time);
    int unsigned t;
    int unsigned a;
    t = task_bits(p, w_tid, w_avg, w_exec);
    a = p * w_time;
    return (t > a) ? t : a;
  endfunction

  // Width of a PE index; at least one bit.
  function automatic int unsigned pe_bits(int unsigned p);
    return (p > 1) ? $clog2(p) : 1;
  endfunction

endpackage
