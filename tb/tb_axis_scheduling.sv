// tb_axis_scheduling -- self-checking testbench for axis_scheduling.
//
// Plays the scheduler side: offers a decision whenever can_accept is high
// (at random), and models the TID block RAM by updating tid_in only at the
// edge where a decision is taken. The runtime side drops tready at random.
// Checks that every decision comes out once, in order, with its TID, PE
// index and tlast, that can_accept is low exactly while a beat waits, and
// that a waiting beat does not change.
module tb_axis_scheduling;
  import heft_pkg::*;
  localparam int unsigned W_TID = W_TID_DEF, W_PE = pe_bits(P_DEF);

  logic clk = 1'b0;
  logic rst_n, dec_valid, dec_last, can_accept;
  logic [W_PE-1:0] dec_pe;
  logic [W_TID-1:0] tid_in, next_tid;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [W_TID+W_PE-1:0] m_axis_tdata;
  typedef struct { logic [W_TID-1:0] tid; logic [W_PE-1:0] pe; logic last; } dec_t;
  dec_t sent[$];
  dec_t e;
  int checks = 0, failures = 0, n_out = 0, n_bp = 0;

  always #5 clk = ~clk;

  axis_scheduling dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  initial begin
    rst_n = 1'b0; dec_valid = 1'b0; dec_pe = '0; dec_last = 1'b0; tid_in = '0;
    m_axis_tready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      m_axis_tready = ($urandom_range(0, 2) != 0);
      #1;
      check("can_accept", can_accept == (!m_axis_tvalid || m_axis_tready));
      if (m_axis_tvalid && m_axis_tready) begin
        e = sent.pop_front();
        check("beat content", m_axis_tdata == {e.pe, e.tid} && m_axis_tlast == e.last);
        n_out++;
      end
      if (m_axis_tvalid && !m_axis_tready) n_bp++;
      dec_valid = can_accept && ($urandom_range(0, 3) != 0);
      dec_pe    = W_PE'($urandom);
      dec_last  = ($urandom_range(0, 4) == 0);
      next_tid  = $urandom;
      if (dec_valid) sent.push_back('{tid: next_tid, pe: dec_pe, last: dec_last});
      @(posedge clk);
      if (dec_valid) tid_in <= next_tid;   // RAM read at the decision edge
      @(negedge clk);
    end
    check("beats sent", n_out > 100);
    check("back-pressure exercised", n_bp > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
