// vwr_mux: operand multiplexer in front of one processing element.
//
// A PE sees only its own slice (one quarter) of each of the column's very wide
// registers. This block picks, from the PE's slice of VWR A, B and C, the 32-bit
// word at the index the MXCU holds, and hands all three words to the PE, which
// then chooses its operands. The paper draws this mux with a 1 kb input, a 32 b
// output and a control line from the MXCU; offering all three words at once (so one
// instruction can combine two VWRs) is this design's own choice.
//
// Purely combinational.
module vwr_mux
  import disco_pkg::*;
#(
  parameter int unsigned SW = SLICE_W,
  parameter int unsigned WW = WORD_W,
  parameter int unsigned NV = N_VWR,
  parameter int unsigned IW = $clog2(SW / WW)
) (
  input  logic [SW-1:0] slice_in [NV],
  input  logic [IW-1:0] idx,
  output logic [WW-1:0] word     [NV]
);

  always_comb begin
    for (int v = 0; v < NV; v++)
      word[v] = slice_in[v][int'(idx)*WW +: WW];
  end

endmodule
