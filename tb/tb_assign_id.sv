// tb_assign_id -- self-checking testbench for assign_id.
//
// Drives random increments and occasional clears into an 8-slot counter
// and checks the QID and last_slot outputs every cycle against a counter
// kept by the testbench, including wrap-around and clear-over-increment
// priority. Inputs change on the falling edge, outputs are checked before
// the rising edge.
module tb_assign_id;
  localparam int unsigned D = 8;

  logic clk = 1'b0;
  logic rst_n, inc, clear, last_slot;
  logic [$clog2(D)-1:0] qid;
  int checks = 0, failures = 0;
  int model;

  always #5 clk = ~clk;

  assign_id #(.D(D)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: qid=%0d last=%0d model=%0d", what, qid, last_slot, model);
    end
  endtask

  initial begin
    rst_n = 1'b0; inc = 1'b0; clear = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    model = 0;
    for (int i = 0; i < 2000; i++) begin
      inc   = ($urandom_range(0, 3) != 0);
      clear = ($urandom_range(0, 15) == 0);
      #1;
      check("qid", qid == model[$clog2(D)-1:0]);
      check("last_slot", last_slot == (model == D - 1));
      @(negedge clk);
      if (clear)    model = 0;
      else if (inc) model = (model + 1) % D;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
