// global_imem: the 10 KiB global instruction memory of DISCO-CGRA.
//
// A single-port synchronous SRAM (2560 words of 32 bits by default) that holds the
// VLIW rows of several kernels, five words per 160-bit row, 512 rows in all. The host
// writes it over the configuration bus; the IMEM controller reads it when it
// dispatches a kernel to the columns. The paper replaced a flip-flop global IMEM by
// SRAM macros; this file is a behaviour-equivalent array that a macro would replace.
//
// Timing: one access per cycle when en is high; a write lands at the rising edge,
// read data appears one cycle after the read request.
module global_imem #(
  parameter int unsigned WORDS = 2560,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
