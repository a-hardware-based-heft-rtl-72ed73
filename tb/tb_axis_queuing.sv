// tb_axis_queuing -- self-checking testbench for axis_queuing.
//
// Sends random availability and task beats at the default sizes, with the
// accept input toggled at random, and checks each cycle that tready follows
// accept, that exactly the right strobe (avail_wen or task_push) fires on a
// transfer, that every field is cut from the expected bits of tdata, and
// that batch_end fires with a task carrying tlast or filling the last slot.
module tb_axis_queuing;
  import heft_pkg::*;
  localparam int unsigned P = P_DEF, W_TID = W_TID_DEF, W_AVG = W_AVG_DEF;
  localparam int unsigned W_EXEC = W_EXEC_DEF, W_TIME = W_TIME_DEF;
  localparam int unsigned TDW = in_tdata_bits(P, W_TID, W_AVG, W_EXEC, W_TIME);

  logic clk = 1'b0;
  logic rst_n;
  logic s_axis_tvalid, s_axis_tready, s_axis_tuser, s_axis_tlast;
  logic [TDW-1:0] s_axis_tdata;
  logic accept, last_slot;
  logic avail_wen, task_push, batch_end;
  logic [P-1:0][W_TIME-1:0] avail_time;
  logic [W_TID-1:0] task_tid;
  logic [W_AVG-1:0] task_avg;
  logic [P-1:0][W_EXEC-1:0] task_exec;
  int checks = 0, failures = 0;
  int n_avail = 0, n_task = 0, n_end = 0;

  always #5 clk = ~clk;

  axis_queuing dut (.*);

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
    logic fire;
    rst_n = 1'b0; s_axis_tvalid = 1'b0; s_axis_tuser = 1'b0; s_axis_tlast = 1'b0;
    s_axis_tdata = '0; accept = 1'b0; last_slot = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      // a new beat only when the previous one was taken (stream rule)
      if (!(s_axis_tvalid && !s_axis_tready)) begin
        s_axis_tvalid = ($urandom_range(0, 4) != 0);
        s_axis_tuser  = ($urandom_range(0, 1) == 1);
        s_axis_tlast  = ($urandom_range(0, 5) == 0);
        for (int w = 0; w < (TDW + 31) / 32; w++)
          s_axis_tdata[w*32 +: 32] = $urandom;
      end
      accept    = ($urandom_range(0, 3) != 0);
      last_slot = ($urandom_range(0, 7) == 0);
      #1;
      fire = s_axis_tvalid && accept;
      check("tready", s_axis_tready == accept);
      check("avail_wen", avail_wen == (fire && !s_axis_tuser));
      check("task_push", task_push == (fire && s_axis_tuser));
      check("batch_end", batch_end == (fire && s_axis_tuser && (s_axis_tlast || last_slot)));
      for (int p = 0; p < P; p++) begin
        check("avail_time", avail_time[p] == s_axis_tdata[p*W_TIME +: W_TIME]);
        check("task_exec", task_exec[p] == s_axis_tdata[W_TID + W_AVG + p*W_EXEC +: W_EXEC]);
      end
      check("task_tid", task_tid == s_axis_tdata[W_TID-1:0]);
      check("task_avg", task_avg == s_axis_tdata[W_TID +: W_AVG]);
      if (avail_wen) n_avail++;
      if (task_push) n_task++;
      if (batch_end) n_end++;
      @(negedge clk);
    end
    check("saw both beat kinds and batch ends", n_avail > 0 && n_task > 0 && n_end > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
