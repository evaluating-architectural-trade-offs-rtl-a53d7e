// mxcu: multiplexer-control unit of a DISCO-CGRA column.
//
// Holds the word index that drives the four PE operand multiplexers, i.e. which
// 32-bit word of its 1024-bit slice of each very wide register a PE sees, and moves
// scalars between its four local registers and the scalar register file (SRF). The
// paper assigns the VWR index pointers and the SRF lookups to this unit; the
// instruction set (mx_instr_t) and register count are this design's own.
//
// Timing: idx is a register. An instruction that changes it takes effect for the
// next row, so a PE instruction in the same row still uses the old index (the
// paper's inner loop updates the index in the same step as the MAC that uses it).
// SRF writes are strobes for the clock edge that ends the instruction.
module mxcu
  import disco_pkg::*;
#(
  parameter int unsigned W  = WORD_W,
  parameter int unsigned IW = IDX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  mx_instr_t         instr,
  input  logic [W-1:0]      srf [SRF_DEPTH],
  output logic [IW-1:0]     idx,
  output logic              srf_we,
  output logic [SRF_AW-1:0] srf_idx,
  output logic [W-1:0]      srf_wdata
);

  logic [W-1:0] r [4];
  logic [W-1:0] imm_ext;

  assign imm_ext   = W'($signed(instr.imm));
  assign srf_we    = en && (instr.op == MX_WSRF);
  assign srf_idx   = instr.imm[SRF_AW-1:0];
  assign srf_wdata = r[instr.rs];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      for (int i = 0; i < 4; i++) r[i] <= '0;
    end else if (en) begin
      case (instr.op)
        MX_SETIDX: idx <= IW'(instr.imm);
        MX_ADDIDX: idx <= idx + IW'(instr.imm);
        MX_IDXR:   idx <= IW'(r[instr.rs]);
        MX_SETR:   r[instr.rd] <= imm_ext;
        MX_ADDI:   r[instr.rd] <= r[instr.rs] + imm_ext;
        MX_RSRF:   r[instr.rd] <= srf[instr.imm[SRF_AW-1:0]];
        MX_ADD:    r[instr.rd] <= r[instr.rd] + r[instr.rs];
        default: ;
      endcase
    end
  end

endmodule
