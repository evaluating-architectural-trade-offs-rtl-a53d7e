// lcu: loop-control unit of a DISCO-CGRA column.
//
// Runs the kernel's loop nest in parallel with the computation, so the PEs spend no
// instructions on control. Four local registers serve as loop counters and bounds;
// DBNZ decrements a counter and branches while it is not zero, BNE/BEQ/BLT compare
// two registers, JMP branches always and EXIT ends the kernel. Branch requests go to
// the column's PC. The paper says the LCU manages the nested loops and drives the PC;
// the instruction set (lcu_instr_t) is this design's own.
//
// Timing: branch/exit decisions are combinational from the current registers and
// take effect at the clock edge that ends the row (zero-delay branches); counters
// update at the same edge.
module lcu
  import disco_pkg::*;
#(
  parameter int unsigned W    = WORD_W,
  parameter int unsigned PCW  = disco_pkg::PC_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  lcu_instr_t      instr,
  input  logic [W-1:0]    srf [SRF_DEPTH],
  output logic            br_taken,
  output logic [PCW-1:0] br_target,
  output logic            exit_o
);

  logic [W-1:0] r [4];
  logic [W-1:0] imm_ext, dec;

  assign imm_ext   = W'($signed(instr.imm));
  assign dec       = r[instr.rd] - 1'b1;
  assign br_target = PCW'(instr.tgt);

  always_comb begin
    br_taken = 1'b0;
    exit_o   = 1'b0;
    if (en) begin
      case (instr.op)
        LCU_DBNZ: br_taken = (dec != '0);
        LCU_BNE:  br_taken = (r[instr.rd] != r[instr.rs]);
        LCU_BEQ:  br_taken = (r[instr.rd] == r[instr.rs]);
        LCU_BLT:  br_taken = ($signed(r[instr.rd]) < $signed(r[instr.rs]));
        LCU_JMP:  br_taken = 1'b1;
        LCU_EXIT: exit_o   = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) r[i] <= '0;
    end else if (en) begin
      case (instr.op)
        LCU_SETR: r[instr.rd] <= imm_ext;
        LCU_ADDI: r[instr.rd] <= r[instr.rs] + imm_ext;
        LCU_RSRF: r[instr.rd] <= srf[instr.imm[SRF_AW-1:0]];
        LCU_DBNZ: r[instr.rd] <= dec;
        default: ;
      endcase
    end
  end

endmodule
