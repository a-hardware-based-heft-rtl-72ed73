// eft_selector -- earliest-finish-time selector: a minimum comparator tree.
//
// Takes the finish time offered by every PE handler and returns the index of
// the PE with the lowest one, together with that time. The P inputs are the
// leaves of a binary tree padded to the next power of two; every node passes
// on the smaller of its two children, so the depth, and the delay, grow with
// log2(P). On equal finish times the lower PE index wins (the left child is
// kept unless the right one is strictly smaller); padding leaves never win.
//
// Purely combinational. The tree structure follows the paper; the tie rule
// is this design's own.
module eft_selector #(
  parameter int unsigned P      = heft_pkg::P_DEF,
  parameter int unsigned W_TIME = heft_pkg::W_TIME_DEF,
  localparam int unsigned IW    = heft_pkg::pe_bits(P)
) (
  input  logic [P-1:0][W_TIME-1:0] t_finish,
  output logic [IW-1:0]            min_idx,
  output logic [W_TIME-1:0]        min_time
);
  localparam int unsigned L = IW;        // tree levels
  localparam int unsigned N = 1 << L;    // padded leaf count

  // The tree is evaluated level by level in place: node j of a level is
  // the winner of nodes 2j and 2j+1 of the level below.
  always_comb begin
    logic [W_TIME-1:0] val [N];
    logic [IW-1:0]     idx [N];
    logic              ok  [N];
    logic              take_right;
    for (int i = 0; i < N; i++) begin
      val[i] = (i < P) ? t_finish[i] : '1;
      idx[i] = IW'(i);
      ok[i]  = (i < P);
    end
    for (int l = 0; l < L; l++) begin
      for (int j = 0; j < (N >> (l + 1)); j++) begin
        take_right = ok[2*j+1] && (!ok[2*j] || (val[2*j+1] < val[2*j]));
        val[j] = take_right ? val[2*j+1] : val[2*j];
        idx[j] = take_right ? idx[2*j+1] : idx[2*j];
        ok[j]  = ok[2*j] || ok[2*j+1];
      end
    end
    min_idx  = idx[0];
    min_time = val[0];
  end

endmodule
