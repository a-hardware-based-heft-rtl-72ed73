// axis_scheduling -- AXI4-Stream scheduling interface (scheduler -> runtime).
//
// Reports every task-to-PE mapping decision to the runtime as one stream
// beat: tdata holds the task's TID in the low W_TID bits and the selected PE
// index above it; tlast marks the decision for the last task of the ready
// queue. The beat is held until the runtime takes it.
//
// Timing: a decision is presented by dec_valid with dec_pe and dec_last in
// the cycle the task leaves the priority queue; they are registered at that
// clock edge. The TID comes from the TID block RAM, whose read is started at
// the same edge, so tid_in is already the registered RAM output and is used
// directly. can_accept tells the scheduler whether a decision may be made
// this cycle (the output register is empty or is being emptied); the
// scheduler stalls its dequeue otherwise, and must keep the RAM output
// unchanged while a beat waits.
// Sending TID and PE index follows the paper; the beat layout, tlast and
// the back-pressure rule are this design's own.
module axis_scheduling #(
  parameter int unsigned W_TID = heft_pkg::W_TID_DEF,
  parameter int unsigned W_PE  = heft_pkg::pe_bits(heft_pkg::P_DEF)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // decision from the scheduler
  input  logic                   dec_valid,
  input  logic [W_PE-1:0]        dec_pe,
  input  logic                   dec_last,
  input  logic [W_TID-1:0]       tid_in,
  output logic                   can_accept,
  // AXI4-Stream master
  output logic                   m_axis_tvalid,
  input  logic                   m_axis_tready,
  output logic [W_TID+W_PE-1:0]  m_axis_tdata,
  output logic                   m_axis_tlast
);
  logic            valid_q;
  logic [W_PE-1:0] pe_q;
  logic            last_q;

  assign can_accept = !valid_q || m_axis_tready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      pe_q    <= '0;
      last_q  <= 1'b0;
    end else if (can_accept) begin
      valid_q <= dec_valid;
      if (dec_valid) begin
        pe_q   <= dec_pe;
        last_q <= dec_last;
      end
    end
  end

  assign m_axis_tvalid = valid_q;
  assign m_axis_tdata  = {pe_q, tid_in};
  assign m_axis_tlast  = last_q;

  // A decision is only made when there is room for it.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      dec_valid |-> can_accept)
    else $error("axis_scheduling: decision made while the output beat is blocked");

  // AXI4-Stream rule: a waiting beat keeps its payload until taken.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (m_axis_tvalid && !m_axis_tready) |=>
        (m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast)))
    else $error("axis_scheduling: output beat changed before it was taken");

endmodule
