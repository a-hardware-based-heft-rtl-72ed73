// tb_pe_decoder -- self-checking testbench for pe_decoder.
//
// Exhaustively checks the default 4-PE decoder and a 5-PE one (index field
// wider than needed) for every index with the enable high and low.
module tb_pe_decoder;
  logic clk = 1'b0;
  logic en4, en5;
  logic [1:0] idx4;
  logic [2:0] idx5;
  logic [3:0] sel4;
  logic [4:0] sel5;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe_decoder u4 (.en(en4), .idx(idx4), .sel(sel4));
  pe_decoder #(.P(5)) u5 (.en(en5), .idx(idx5), .sel(sel5));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int i = 0; i < 8; i++) begin
        en4 = e[0]; en5 = e[0]; idx4 = 2'(i); idx5 = 3'(i);
        #1;
        checks += 2;
        if (sel4 != (e[0] ? 4'(1 << (i % 4)) : 4'b0)) begin
          failures++; $display("FAIL P=4 en=%0d idx=%0d sel=%b", e, i % 4, sel4);
        end
        if (sel5 != ((e[0] && i < 5) ? 5'(1 << i) : 5'b0)) begin
          failures++; $display("FAIL P=5 en=%0d idx=%0d sel=%b", e, i, sel5);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
