// tb_tid_bram -- self-checking testbench for tid_bram.
//
// Fills a 64-deep, 32-bit RAM, then writes and reads at random. Checks that
// data read with re high appears one clock edge later, that rd_data keeps
// its value while re is low, and that the read register is cleared by reset.
module tb_tid_bram;
  localparam int unsigned DEPTH = 64, WIDTH = 32, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic rst_n, we, re;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tid_bram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

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
      $display("FAIL %s: got %h expected %h", what, rd_data, expect_q);
    end
  endtask

  initial begin
    rst_n = 1'b0; we = 1'b0; re = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(negedge clk);
    expect_q = '0;
    check("reset value", rd_data == '0);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      we = 1'b1; wr_addr = AW'(a); wr_data = $urandom;
      model[a] = wr_data;
      @(negedge clk);
    end
    we = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      we      = ($urandom_range(0, 1) == 1);
      re      = ($urandom_range(0, 2) != 0);
      wr_addr = AW'($urandom_range(0, DEPTH - 1));
      wr_data = $urandom;
      rd_addr = AW'($urandom_range(0, DEPTH - 1));
      if (we && rd_addr == wr_addr) we = 1'b0;   // no read-during-write case
      if (re) expect_q = model[rd_addr];
      @(negedge clk);
      if (we) model[wr_addr] = wr_data;
      check("read data / hold", rd_data == expect_q);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
