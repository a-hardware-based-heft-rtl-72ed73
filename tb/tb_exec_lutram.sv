// tb_exec_lutram -- self-checking testbench for exec_lutram.
//
// Writes random words at random addresses of a 64-deep, 64-bit RAM while
// reading random written addresses, and checks that the read data equals
// the last value written there and arrives in the same cycle as the address
// (asynchronous read), also when the write and read address coincide (the
// old word is seen until the clock edge).
module tb_exec_lutram;
  localparam int unsigned DEPTH = 64, WIDTH = 64, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  exec_lutram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(negedge clk);
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      we = 1'b1; wr_addr = AW'(a); wr_data = {$urandom, $urandom};
      model[a] = wr_data; written[a] = 1'b1;
      @(negedge clk);
    end
    for (int i = 0; i < 3000; i++) begin
      we      = ($urandom_range(0, 1) == 1);
      wr_addr = AW'($urandom_range(0, DEPTH - 1));
      wr_data = {$urandom, $urandom};
      rd_addr = ($urandom_range(0, 3) == 0) ? wr_addr : AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rd_data !== model[rd_addr]) begin
        failures++;
        $display("FAIL addr %0d: got %h expected %h", rd_addr, rd_data, model[rd_addr]);
      end
      @(negedge clk);
      if (we) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
