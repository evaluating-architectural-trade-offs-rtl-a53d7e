// lsu: load-store unit of a DISCO-CGRA column.
//
// Moves whole 4096-bit lines between the shared scratchpad (SPM) and the column's
// three very wide registers in a single cycle, loads the scalar register file from
// the first words of an SPM line at kernel onset, and triggers the shuffle unit.
// Four local registers hold SPM line pointers; loads and stores post-increment the
// pointer by the signed immediate, so that "SPM to VWR B" and "advance the SPM index"
// are one instruction, as in the paper's GEMM inner loop. The instruction set
// (lsu_instr_t) and the register count are this design's own.
//
// Interface: spm_addr/spm_we go to the column's wide SPM port; vwr_line_we selects
// which VWR captures a whole line, from the SPM read data or, when vwr_from_shuf is
// high, from the shuffle unit; st_sel selects the VWR driven onto the SPM write data.
// Timing: the SPM is read combinationally, so every transfer completes at the clock
// edge that ends the instruction; pointer registers update at that edge too.
module lsu
  import disco_pkg::*;
#(
  parameter int unsigned W  = WORD_W,
  parameter int unsigned AW = LINE_AW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  lsu_instr_t     instr,
  input  logic [W-1:0]   srf [SRF_DEPTH],
  output logic [AW-1:0]  spm_addr,
  output logic           spm_we,
  output logic [1:0]     st_sel,
  output logic [N_VWR-1:0] vwr_line_we,
  output logic           vwr_from_shuf,
  output logic [2:0]     shuf_mode,
  output logic           srf_bulk_we
);

  logic [W-1:0] r [4];
  logic [W-1:0] imm_ext;

  assign imm_ext   = W'($signed(instr.imm));
  assign spm_addr  = AW'(r[instr.rs]);
  assign st_sel    = instr.vwr;
  assign shuf_mode = instr.imm[2:0];

  always_comb begin
    spm_we        = 1'b0;
    vwr_line_we   = '0;
    vwr_from_shuf = 1'b0;
    srf_bulk_we   = 1'b0;
    if (en) begin
      case (instr.op)
        LSU_LDV:   vwr_line_we[instr.vwr] = 1'b1;
        LSU_STV:   spm_we = 1'b1;
        LSU_LDSRF: srf_bulk_we = 1'b1;
        LSU_SHUF:  begin
          vwr_line_we[instr.vwr] = 1'b1;
          vwr_from_shuf          = 1'b1;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) r[i] <= '0;
    end else if (en) begin
      case (instr.op)
        LSU_LDV, LSU_STV, LSU_LDSRF: r[instr.rs] <= r[instr.rs] + imm_ext;
        LSU_SETR: r[instr.rd] <= imm_ext;
        LSU_ADDI: r[instr.rd] <= r[instr.rs] + imm_ext;
        LSU_RSRF: r[instr.rd] <= srf[instr.imm[SRF_AW-1:0]];
        LSU_ADD:  r[instr.rd] <= r[instr.rd] + r[instr.rs];
        default: ;
      endcase
    end
  end

endmodule
