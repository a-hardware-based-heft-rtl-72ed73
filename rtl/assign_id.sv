// assign_id -- counter-based queue identifier (QID) generator.
//
// Every task taken from the input stream is given the next QID, counting
// from 0 up to D-1, so that the runtime's arbitrary task identifiers are
// mapped onto the fixed address range of the execution-time and TID
// memories. The counter restarts from 0 when a ready queue is closed (clear),
// because the next batch is only accepted after the queue has drained.
//
// Interface: inc advances the counter (one task accepted this cycle); qid is
// the identifier for the task accepted this cycle; last_slot is high while
// the D-th (final) slot is the one being handed out; clear has priority
// over inc.
// Timing: qid is combinational from the counter register; the count updates
// on the rising clock edge. Synchronous active-low reset.
// The counter itself follows the paper; the restart-per-batch rule and the
// last_slot output are this design's choices.
module assign_id #(
  parameter int unsigned D = heft_pkg::D_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 inc,
  input  logic                 clear,
  output logic [$clog2(D)-1:0] qid,
  output logic                 last_slot
);
  localparam int unsigned QW = $clog2(D);

  logic [QW-1:0] count_q;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      count_q <= '0;
    end else if (inc) begin
      count_q <= (count_q == QW'(D - 1)) ? '0 : count_q + 1'b1;
    end
  end

  assign qid       = count_q;
  assign last_slot = (count_q == QW'(D - 1));

endmodule
