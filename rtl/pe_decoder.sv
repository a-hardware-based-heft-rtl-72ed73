// pe_decoder -- decoder from the selected PE index to one select line per
// PE handler.
//
// When en is high, line idx of sel is high and all others low; when en is
// low, all lines are low, so no availability register changes. en is high
// in the cycles in which a task leaves the priority queue and is mapped.
// Purely combinational. The decoder is in the paper's block diagram; the
// enable is this design's own.
module pe_decoder #(
  parameter int unsigned P  = heft_pkg::P_DEF,
  localparam int unsigned IW = heft_pkg::pe_bits(P)
) (
  input  logic          en,
  input  logic [IW-1:0] idx,
  output logic [P-1:0]  sel
);
  always_comb begin
    for (int i = 0; i < P; i++) sel[i] = en && (idx == IW'(i));
  end
endmodule
