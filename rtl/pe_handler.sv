// pe_handler -- availability-time register and finish-time adder of one PE.
//
// Each PE has one handler. It keeps T_avail, the time at which its PE is
// expected to become free, and offers the finish time
//     T_finish = T_avail + Exec_TID[PE_i]
// of the task now at the front of the priority queue. The register is
// loaded in two ways:
//   * avail_wen: the runtime's value for this PE (start of a mapping event);
//   * sel: the EFT selector, through the decoder, picked this PE for the
//     current task; the finish time becomes the new availability time, so
//     the next task sees the PE as busy until then.
// avail_wen has priority (the two never coincide in the scheduler, because
// availability beats are only taken while no task is being mapped).
//
// Timing: t_finish is combinational from the register and the exec input;
// the register updates on the rising edge. Synchronous active-low reset to
// zero. The adder wraps at W_TIME bits; the runtime is expected to send
// times relative to a recent origin. Behaviour follows the paper; the widths,
// reset value and priority are this design's own.
module pe_handler #(
  parameter int unsigned W_EXEC = heft_pkg::W_EXEC_DEF,
  parameter int unsigned W_TIME = heft_pkg::W_TIME_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              avail_wen,
  input  logic [W_TIME-1:0] avail_in,
  input  logic [W_EXEC-1:0] exec_time,
  input  logic              sel,
  output logic [W_TIME-1:0] t_finish,
  output logic [W_TIME-1:0] t_avail
);
  logic [W_TIME-1:0] avail_q;

  assign t_finish = avail_q + W_TIME'(exec_time);
  assign t_avail  = avail_q;

  always_ff @(posedge clk) begin
    if (!rst_n)         avail_q <= '0;
    else if (avail_wen) avail_q <= avail_in;
    else if (sel)       avail_q <= t_finish;
  end

endmodule
