// local_imem: private instruction memory of one element of a column (a PE, the
// LSU, the MXCU or the LCU).
//
// The IMEM controller fills it with one kernel's instructions at kernel onset; while
// the kernel runs, the column's program counter reads it. The paper places such a
// memory in every element and fills it from the global IMEM; its depth (64 rows,
// for kernels of "a few dozen instructions") and its realisation as a flip-flop array
// with an asynchronous read port, so that all seven elements execute the row at the
// PC in the same cycle, are this design's own.
//
// Timing: write at the rising edge; rdata follows raddr combinationally. Contents
// are not reset (they are always written before a kernel runs).
module local_imem #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 24,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
