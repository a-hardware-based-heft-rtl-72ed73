// tb_eft_selector -- self-checking testbench for eft_selector.
//
// Applies random finish times, many of them equal, to the default 4-PE
// selector and to a 5-PE and a 16-PE one, and checks that the index output
// is the lowest index holding the minimum and that min_time is that minimum.
module tb_eft_selector;
  localparam int unsigned W = 32;

  logic clk = 1'b0;
  logic [3:0][W-1:0]  f4;
  logic [4:0][W-1:0]  f5;
  logic [15:0][W-1:0] f16;
  logic [1:0] i4;
  logic [2:0] i5;
  logic [3:0] i16;
  logic [W-1:0] m4, m5, m16;
  int checks = 0, failures = 0, ties = 0;

  always #5 clk = ~clk;

  eft_selector u4 (.t_finish(f4), .min_idx(i4), .min_time(m4));
  eft_selector #(.P(5))  u5  (.t_finish(f5),  .min_idx(i5),  .min_time(m5));
  eft_selector #(.P(16)) u16 (.t_finish(f16), .min_idx(i16), .min_time(m16));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    case ($urandom_range(0, 3))
      0: return W'($urandom_range(0, 3));
      1: return '1;
      default: return $urandom;
    endcase
  endfunction

  task automatic expect_min(string name, int n, logic [15:0][W-1:0] f, int got_i, logic [W-1:0] got_m);
    int best = 0;
    int cnt = 0;
    for (int i = 1; i < n; i++) if (f[i] < f[best]) best = i;
    for (int i = 0; i < n; i++) if (f[i] == f[best]) cnt++;
    if (cnt > 1) ties++;
    checks += 2;
    if (got_i != best || got_m != f[best]) begin
      failures++;
      $display("FAIL %s: idx %0d (exp %0d) min %0d (exp %0d)", name, got_i, best, got_m, f[best]);
    end
  endtask

  initial begin
    logic [15:0][W-1:0] f;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 16; i++) f[i] = rnd();
      f4 = f[3:0]; f5 = f[4:0]; f16 = f;
      #1;
      expect_min("P=4", 4, f, int'(i4), m4);
      expect_min("P=5", 5, f, int'(i5), m5);
      expect_min("P=16", 16, f, int'(i16), m16);
      @(negedge clk);
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no ties exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
