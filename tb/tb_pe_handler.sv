// tb_pe_handler -- self-checking testbench for pe_handler.
//
// Loads availability times from the "runtime", presents random execution
// times and selects the handler at random. Checks every cycle that t_finish
// is t_avail plus the execution time (32-bit wrap) and that the register
// takes the runtime value on avail_wen, the finish time on sel, and holds
// otherwise.
module tb_pe_handler;
  import heft_pkg::*;
  localparam int unsigned W_EXEC = W_EXEC_DEF, W_TIME = W_TIME_DEF;

  logic clk = 1'b0;
  logic rst_n, avail_wen, sel;
  logic [W_TIME-1:0] avail_in, t_finish, t_avail;
  logic [W_EXEC-1:0] exec_time;
  logic [W_TIME-1:0] model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe_handler dut (.*);

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
      $display("FAIL %s: avail=%0d finish=%0d model=%0d exec=%0d", what, t_avail, t_finish, model, exec_time);
    end
  endtask

  initial begin
    rst_n = 1'b0; avail_wen = 1'b0; sel = 1'b0; avail_in = '0; exec_time = '0;
    @(negedge clk);
    model = '0;
    check("reset", t_avail == '0);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      avail_wen = ($urandom_range(0, 7) == 0);
      sel       = ($urandom_range(0, 1) == 1);
      avail_in  = ($urandom_range(0, 9) == 0) ? 32'hFFFF_FF00 + $urandom_range(0, 255) : $urandom_range(0, 100000);
      exec_time = W_EXEC'($urandom);
      #1;
      check("avail", t_avail == model);
      check("finish", t_finish == W_TIME'(model + W_TIME'(exec_time)));
      @(negedge clk);
      if (avail_wen) model = avail_in;
      else if (sel)  model = model + W_TIME'(exec_time);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
