// srf: scalar register file of a DISCO-CGRA column.
//
// Holds the scalars that every unit of the column shares: loop bounds, base line
// numbers, constants. At kernel onset the LSU loads it as a whole from the first
// words of a scratchpad line (bulk write); afterwards the four PEs and the MXCU can
// write single entries. All entries are visible to all units at once (q).
// The paper says the SRF is loaded from the SPM and shared by all units; its depth
// (8) and the write priority (bulk load first, then the requester with the lowest
// number: PE0..PE3, MXCU) are this design's own.
//
// Timing: writes at the rising clock edge; reset clears all entries.
module srf
  import disco_pkg::*;
#(
  parameter int unsigned DEPTH = SRF_DEPTH,
  parameter int unsigned W     = WORD_W,
  parameter int unsigned NWR   = N_PE + 1,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           bulk_we,
  input  logic [W-1:0]   bulk_wdata [DEPTH],
  input  logic [NWR-1:0] we,
  input  logic [AW-1:0]  idx   [NWR],
  input  logic [W-1:0]   wdata [NWR],
  output logic [W-1:0]   q     [DEPTH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else if (bulk_we) begin
      q <= bulk_wdata;
    end else begin
      // Highest-numbered requester first so that the lowest-numbered one wins.
      for (int k = NWR - 1; k >= 0; k--)
        if (we[k]) q[idx[k]] <= wdata[k];
    end
  end

endmodule
