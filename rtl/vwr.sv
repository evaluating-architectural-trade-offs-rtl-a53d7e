// vwr: one very wide register (VWR) of a DISCO-CGRA column.
//
// The register holds a whole scratchpad line (4096 bits by default). The LSU writes
// it as a whole in one cycle, either with a line read from the scratchpad or with
// the output of the shuffle unit. Each of the N_PE processing elements owns one
// quarter of it (a 1024-bit slice of 32 words) and can write the 32-bit word at the
// index held by the MXCU. The paper gives the widths and the slicing; giving the
// whole-line write priority over a PE word write in the same cycle is this design's
// own choice.
//
// Timing: all writes take effect at the rising clock edge; q shows the contents.
// Reset clears the register.
module vwr
  import disco_pkg::*;
#(
  parameter int unsigned W      = VWR_W,
  parameter int unsigned NP     = N_PE,
  parameter int unsigned WW     = WORD_W,
  parameter int unsigned IW     = $clog2(W / NP / WW)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              line_we,
  input  logic [W-1:0]      line_wdata,
  input  logic [IW-1:0]     idx,
  input  logic [NP-1:0]     word_we,
  input  logic [WW-1:0]     word_wdata [NP],
  output logic [W-1:0]      q
);

  localparam int unsigned SW = W / NP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (line_we) begin
      q <= line_wdata;
    end else begin
      for (int p = 0; p < NP; p++)
        if (word_we[p]) q[p*SW + int'(idx)*WW +: WW] <= word_wdata[p];
    end
  end

endmodule
