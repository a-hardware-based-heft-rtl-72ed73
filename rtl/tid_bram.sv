// tid_bram -- block RAM holding the runtime task identifier of each queued
// task.
//
// Word QID holds the TID of the task that was given that QID. It is written
// when the task enters the queue and read when the task leaves the front of
// the queue, so that the mapping decision can be reported under the
// runtime's own identifier.
//
// Interface: a synchronous write port and a synchronous read port with read
// enable, as an FPGA block RAM. rd_data shows mem[rd_addr] from the clock
// edge at which re was high and keeps that value until the next read; this
// one-cycle read latency lines the TID up with the PE decision, which is
// registered at the same edge. Storage is not reset; the read register is.
// Use of a block RAM addressed by QID follows the paper; the read enable and
// the hold behaviour are this design's own.
module tid_bram #(
  parameter int unsigned DEPTH = heft_pkg::D_DEF,
  parameter int unsigned WIDTH = heft_pkg::W_TID_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             re,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  rd_data <= '0;
    else if (re) rd_data <= mem[rd_addr];
  end

endmodule
