// tb_heft_scheduler -- end-to-end testbench of the HEFT_RT scheduler at its
// default size (4 PEs, 512-deep queue).
//
// The testbench plays the host runtime. For each mapping event it sends the
// PEs' availability times and a ready queue of random tasks (execution time
// per PE, their average as the key, a random TID), and collects the
// decisions. A reference model computes the expected decisions on its own:
// it sorts the tasks by decreasing average (of two equal averages the task
// sent later goes first), then for each task in that order picks the PE
// with the smallest availability-plus-execution time (lowest index on a tie)
// and advances that PE's availability. Every decision's TID, PE index and
// tlast, and the final availability registers, are compared with the model.
//
// Events include a single task, a full 512-task queue, a queue longer than
// 512 (cut into two mapping events), few distinct averages (ties) and
// events sent without gaps and read without back-pressure, on which the
// cycle counts are checked: first decision within 2n+3 cycles of the first
// task, last decision within 3n+3. Each mechanism (availability load, input
// stall while busy, sort swaps, early sort stop, full-queue cut, output
// back-pressure, PE tie in the EFT selection) is counted, and one that never
// happened counts as a failure.
module tb_heft_scheduler;
  import heft_pkg::*;
  localparam int unsigned P = P_DEF, D = D_DEF;
  localparam int unsigned W_AVG = W_AVG_DEF, W_EXEC = W_EXEC_DEF;
  localparam int unsigned W_TIME = W_TIME_DEF, W_TID = W_TID_DEF;
  localparam int unsigned TDW = in_tdata_bits(P, W_TID, W_AVG, W_EXEC, W_TIME);
  localparam int unsigned W_PE = pe_bits(P);

  logic clk = 1'b0;
  logic rst_n;
  logic s_axis_tvalid, s_axis_tready, s_axis_tuser, s_axis_tlast;
  logic [TDW-1:0] s_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [W_TID+W_PE-1:0] m_axis_tdata;
  pq_mode_e pq_mode;
  logic [P-1:0][W_TIME-1:0] t_avail;

  typedef struct {
    logic [W_TID-1:0]         tid;
    logic [W_AVG-1:0]         avg;
    logic [P-1:0][W_EXEC-1:0] exec;
  } task_t;
  typedef struct {
    logic [W_TID-1:0] tid;
    int               pe;
    bit               last;
  } dec_t;

  dec_t            expected[$];
  logic [W_TIME-1:0] m_avail [P];
  int checks = 0, failures = 0;
  longint cyc = 0;
  bit  fast_mode;            // no gaps, no back-pressure: check cycle counts
  longint t_first_task;
  int  chunk_n;
  bit  chunk_first_pending = 0;
  int  got_in_chunk = 0;
  bit  done_sending = 0;
  // mechanism counters
  int n_avail_load = 0, n_in_stall = 0, n_swap_cycles = 0, n_early_stop = 0;
  int n_full_cut = 0, n_out_bp = 0, n_tie = 0, n_decisions = 0, n_latency_checked = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  heft_scheduler dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- reference model ----------------
  task automatic model_chunk(task_t tk[$]);
    int n = tk.size();
    bit used[$];
    int best, pe;
    logic [W_TIME-1:0] f, fbest;
    int nbest;
    for (int i = 0; i < n; i++) used.push_back(0);
    for (int j = 0; j < n; j++) begin
      best = -1;
      for (int i = n - 1; i >= 0; i--)
        if (!used[i] && (best < 0 || tk[i].avg > tk[best].avg)) best = i;
      used[best] = 1;
      pe = 0; fbest = m_avail[0] + W_TIME'(tk[best].exec[0]);
      for (int p = 1; p < P; p++) begin
        f = m_avail[p] + W_TIME'(tk[best].exec[p]);
        if (f < fbest) begin fbest = f; pe = p; end
      end
      nbest = 0;
      for (int p = 0; p < P; p++)
        if (m_avail[p] + W_TIME'(tk[best].exec[p]) == fbest) nbest++;
      if (nbest > 1) n_tie++;
      m_avail[pe] = fbest;
      expected.push_back('{tid: tk[best].tid, pe: pe, last: (j == n - 1)});
    end
  endtask

  // ---------------- runtime: sender ----------------
  task automatic send_beat(logic kind, logic [TDW-1:0] data, logic last, bit gaps);
    if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
    s_axis_tvalid = 1'b1; s_axis_tuser = kind; s_axis_tdata = data; s_axis_tlast = last;
    #1;
    while (!s_axis_tready) begin
      n_in_stall++;
      @(negedge clk);
    end
    @(negedge clk);
    s_axis_tvalid = 1'b0;
  endtask

  task automatic mapping_event(int n, int style, bit fast, bit eager = 0);
    logic [TDW-1:0] d;
    task_t tk, chunk[$];
    int sent_in_chunk = 0;
    // wait until the scheduler takes input again and the previous
    // decisions are out, then send availability times; an eager runtime
    // offers the next event at once and is held off by tready
    if (!eager) while (expected.size() != 0 || pq_mode != PQ_FILL) @(negedge clk);
    fast_mode = fast;
    d = '0;
    for (int p = 0; p < P; p++) begin
      d[p*W_TIME +: W_TIME] = W_TIME'($urandom_range(0, 5000));
    end
    send_beat(BEAT_AVAIL, d, 1'b0, !fast);
    for (int p = 0; p < P; p++) m_avail[p] = d[p*W_TIME +: W_TIME];
    n_avail_load++;
    for (int i = 0; i < n; i++) begin
      int sum = 0;
      tk.tid = $urandom;
      for (int p = 0; p < P; p++) begin
        case (style)
          1: tk.exec[p] = W_EXEC'($urandom_range(1, 4) * 100);   // ties
          2: tk.exec[p] = W_EXEC'(10 + i);                       // sorted input
          default: tk.exec[p] = W_EXEC'($urandom_range(1, 3000));
        endcase
        sum += int'(tk.exec[p]);
      end
      tk.avg = W_AVG'(sum / P);
      d = '0;
      d[W_TID-1:0] = tk.tid;
      d[W_TID +: W_AVG] = tk.avg;
      for (int p = 0; p < P; p++) d[W_TID + W_AVG + p*W_EXEC +: W_EXEC] = tk.exec[p];
      chunk.push_back(tk);
      sent_in_chunk++;
      if (sent_in_chunk == 1) begin
        t_first_task = cyc + 1;        // edge at which it is taken if ready
      end
      send_beat(BEAT_TASK, d, (i == n - 1), !fast);
      if (sent_in_chunk == 1) t_first_task = cyc;  // edge that took it
      if (i == n - 1 || sent_in_chunk == D) begin
        if (sent_in_chunk == D && i != n - 1) n_full_cut++;
        chunk_n = sent_in_chunk;
        chunk_first_pending = 1;
        got_in_chunk = 0;
        model_chunk(chunk);
        chunk = {};
        sent_in_chunk = 0;
        // the next chunk is only taken after this one has been mapped
        if (i != n - 1) while (expected.size() != 0 || pq_mode != PQ_FILL) @(negedge clk);
      end
    end
  endtask

  // ---------------- runtime: receiver ----------------
  initial begin : receiver
    dec_t e;
    longint t_first_dec;
    m_axis_tready = 1'b0;
    forever begin
      @(negedge clk);
      m_axis_tready = fast_mode ? 1'b1 : ($urandom_range(0, 3) != 0);
      #1;
      if (m_axis_tvalid && got_in_chunk == 0 && chunk_first_pending) begin
        t_first_dec = cyc;
        if (fast_mode) begin
          check($sformatf("first decision after %0d cycles, n=%0d, bound 2n+3",
                          t_first_dec - t_first_task + 1, chunk_n),
                t_first_dec - t_first_task + 1 <= 2 * chunk_n + 3);
        end
        chunk_first_pending = 0;
      end
      if (m_axis_tvalid && !m_axis_tready) n_out_bp++;
      if (m_axis_tvalid && m_axis_tready) begin
        if (expected.size() == 0) begin
          check("unexpected decision", 1'b0);
        end else begin
          e = expected.pop_front();
          n_decisions++;
          got_in_chunk++;
          check($sformatf("decision %0d: tid %h pe %0d last %0d, expected tid %h pe %0d last %0d",
                          n_decisions, m_axis_tdata[W_TID-1:0], m_axis_tdata[W_TID +: W_PE],
                          m_axis_tlast, e.tid, e.pe, e.last),
                m_axis_tdata[W_TID-1:0] == e.tid && int'(m_axis_tdata[W_TID +: W_PE]) == e.pe
                && m_axis_tlast == e.last);
          if (e.last && fast_mode) begin
            check($sformatf("last decision after %0d cycles, n=%0d, bound 3n+3",
                            cyc - t_first_task + 1, chunk_n),
                  cyc - t_first_task + 1 <= 3 * chunk_n + 3);
            n_latency_checked++;
          end
          if (e.last) begin
            for (int p = 0; p < P; p++)
              check($sformatf("T_avail[%0d] %0d expected %0d", p, t_avail[p], m_avail[p]),
                    t_avail[p] == m_avail[p]);
          end
        end
      end
    end
  end

  // sort activity seen inside the queue
  int sort_len;
  always @(posedge clk) begin
    if (pq_mode == PQ_SORT) begin
      sort_len <= sort_len + 1;
      if (dut.u_pq.swapped) n_swap_cycles++;
    end else begin
      if (sort_len != 0 && sort_len < chunk_n + 2 && chunk_n > 1) n_early_stop++;
      sort_len <= 0;
    end
  end

  initial begin : runtime
    rst_n = 1'b0; s_axis_tvalid = 1'b0; s_axis_tuser = 1'b0; s_axis_tlast = 1'b0;
    s_axis_tdata = '0; fast_mode = 1'b1; sort_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    mapping_event(1, 0, 1);
    mapping_event(2, 0, 1);
    mapping_event(7, 0, 0);
    mapping_event(40, 1, 1);
    mapping_event(40, 2, 1);
    mapping_event(25, 0, 1, 1);       // offered while the previous one is mapped
    mapping_event(D, 0, 1);           // full queue, closed by tlast
    mapping_event(D + 88, 0, 0);      // longer than the queue: cut at D
    mapping_event(300, 1, 0);
    for (int k = 0; k < 10; k++) mapping_event($urandom_range(1, 64), k % 3, (k % 2) == 1);
    while (expected.size() != 0 || pq_mode != PQ_FILL) @(negedge clk);
    repeat (5) @(negedge clk);
    check("no stray output", !m_axis_tvalid);
    $display("decisions=%0d avail_loads=%0d input_stalls=%0d swap_cycles=%0d early_sort_stops=%0d",
             n_decisions, n_avail_load, n_in_stall, n_swap_cycles, n_early_stop);
    $display("full_queue_cuts=%0d output_backpressure=%0d eft_ties=%0d latency_checks=%0d",
             n_full_cut, n_out_bp, n_tie, n_latency_checked);
    check("mechanism: availability load", n_avail_load > 0);
    check("mechanism: input stall while busy", n_in_stall > 0);
    check("mechanism: sort swaps", n_swap_cycles > 0);
    check("mechanism: early sort stop", n_early_stop > 0);
    check("mechanism: full-queue cut", n_full_cut > 0);
    check("mechanism: output back-pressure", n_out_bp > 0);
    check("mechanism: EFT tie", n_tie > 0);
    check("cycle bounds checked", n_latency_checked > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
