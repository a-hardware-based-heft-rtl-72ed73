// exec_lutram -- distributed (LUT) RAM holding the per-PE execution times.
//
// One word per priority-queue slot: word QID holds Exec_TID[PE_0..PE_(P-1)]
// of the task that was given that QID, PE 0 in the low bits. The word is
// written in the cycle the task enters the queue and read while the task
// sits at the front of the queue in dequeue mode.
//
// Interface: one synchronous write port (we, wr_addr, wr_data) and one
// asynchronous read port (rd_addr -> rd_data), the behaviour of FPGA LUT-RAM,
// so the execution times of the dequeued task reach the PE handlers in the
// same cycle. The storage is not reset; only written words are ever read.
// Size, address (QID) and async read follow the paper; the word layout is
// this design's own.
module exec_lutram #(
  parameter int unsigned DEPTH = heft_pkg::D_DEF,
  parameter int unsigned WIDTH = heft_pkg::P_DEF * heft_pkg::W_EXEC_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];

endmodule
