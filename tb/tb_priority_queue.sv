// tb_priority_queue -- self-checking testbench for priority_queue.
//
// A 16-cell queue with 8-bit keys is filled with batches of 1 to 16 tasks:
// random keys, few distinct keys (many ties), already sorted, reverse
// sorted and all equal. For each batch the testbench checks
//   * the number of SORT cycles against the count given by playing odd-even
//     transposition (even phase first, stop after two swap-free phases) on
//     its own copy, and against the bound n+2;
//   * the dequeue order against a stable sort by decreasing key in which the
//     later-enqueued of two equal tasks leaves first;
//   * deq_last on the last task and the return to FILL mode,
// with deq_ready dropped at random to exercise stalls in dequeue mode.
module tb_priority_queue;
  import heft_pkg::*;
  localparam int unsigned D = 16, W = 8, QW = $clog2(D);

  logic clk = 1'b0;
  logic rst_n, enq_valid, sort_start, deq_valid, deq_ready, deq_last;
  logic [QW-1:0] enq_qid, deq_qid;
  logic [W-1:0] enq_avg, deq_avg;
  pq_mode_e mode;
  logic swapped, sort_phase;
  int checks = 0, failures = 0;
  int n_stall = 0, n_early = 0, n_worst = 0;

  always #5 clk = ~clk;

  priority_queue #(.D(D), .W_AVG(W)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Number of phases odd-even transposition needs, with the stop rule.
  function automatic int sort_phases(int keys[$]);
    int c[$];
    int phases = 0, phase = 0;
    bit quiet_prev = 0, any;
    int t;
    // cell 0 holds the last key enqueued
    for (int i = keys.size() - 1; i >= 0; i--) c.push_back(keys[i]);
    forever begin
      any = 0;
      for (int k = phase; k + 1 < c.size(); k += 2) begin
        if (c[k+1] > c[k]) begin
          t = c[k]; c[k] = c[k+1]; c[k+1] = t; any = 1;
        end
      end
      phases++;
      if (!any && quiet_prev) break;
      quiet_prev = !any;
      phase ^= 1;
    end
    return phases;
  endfunction

  task automatic run_batch(int keys[$]);
    int n = keys.size();
    int order[$];        // expected QIDs in dequeue order
    int cyc, exp_phases, got, best;
    bit used[$];
    // expected order: largest key first, ties: later enqueue first
    for (int i = 0; i < n; i++) used.push_back(0);
    for (int j = 0; j < n; j++) begin
      best = -1;
      for (int i = n - 1; i >= 0; i--)
        if (!used[i] && (best < 0 || keys[i] > keys[best])) best = i;
      used[best] = 1;
      order.push_back(best);
    end
    exp_phases = sort_phases(keys);
    // fill
    for (int i = 0; i < n; i++) begin
      check("FILL mode while enqueuing", mode == PQ_FILL);
      enq_valid = 1'b1; enq_qid = QW'(i); enq_avg = W'(keys[i]);
      sort_start = (i == n - 1);
      @(negedge clk);
    end
    enq_valid = 1'b0; sort_start = 1'b0;
    // sort
    cyc = 0;
    while (mode == PQ_SORT) begin
      cyc++;
      @(negedge clk);
      if (cyc > 4 * D) break;
    end
    check($sformatf("sort cycles %0d == %0d (n=%0d)", cyc, exp_phases, n), cyc == exp_phases);
    check("sort cycles <= n+2", cyc <= n + 2);
    if (n > 1 && cyc < n + 2) n_early++;
    if (cyc == n + 2) n_worst++;
    // dequeue
    got = 0;
    while (got < n) begin
      deq_ready = ($urandom_range(0, 3) != 0);
      #1;
      check("DEQ mode", mode == PQ_DEQ);
      check("deq_valid", deq_valid);
      if (deq_ready && deq_valid) begin
        check($sformatf("order pos %0d qid %0d exp %0d", got, deq_qid, order[got]),
              int'(deq_qid) == order[got] && int'(deq_avg) == keys[order[got]]);
        check("deq_last", deq_last == (got == n - 1));
        got++;
      end else n_stall++;
      @(negedge clk);
      if (cyc > 100 * D) break;
    end
    deq_ready = 1'b0;
    check("back in FILL", mode == PQ_FILL && !deq_valid);
  endtask

  initial begin
    int keys[$];
    int n;
    rst_n = 1'b0; enq_valid = 1'b0; sort_start = 1'b0; deq_ready = 1'b0;
    enq_qid = '0; enq_avg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 400; b++) begin
      keys = {};
      n = (b % 5 == 0) ? D : $urandom_range(1, D);
      for (int i = 0; i < n; i++) begin
        case (b % 6)
          0, 1: keys.push_back($urandom_range(0, 255));
          2:    keys.push_back($urandom_range(0, 3));
          3:    keys.push_back(i * 7);             // ascending in, front = largest
          4:    keys.push_back(200 - i * 7);       // descending in: worst case
          default: keys.push_back(42);
        endcase
      end
      run_batch(keys);
    end
    check("dequeue stalls exercised", n_stall > 0);
    check("early sort stop exercised", n_early > 0);
    check("worst-case sort exercised", n_worst > 0);
    $display("stalls=%0d early_stop=%0d worst_case=%0d", n_stall, n_early, n_worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
