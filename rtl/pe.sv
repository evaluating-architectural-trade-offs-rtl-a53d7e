// pe: one processing element of a DISCO-CGRA column.
//
// A 32-bit ALU that executes one pe_instr_t per cycle while the column runs. Operand
// A and B come from the two local registers R0/R1, the words of VWR A/B/C that the
// column's PE multiplexer selected at the MXCU index, one scalar register file (SRF)
// entry, the output register of a neighbouring PE (LEFT = PE i-1, RIGHT = PE i+1),
// zero or the sign-extended 8-bit immediate. The result is written to the destination
// (R0, R1, a VWR word, an SRF entry or nowhere) and always to the output register
// `out`, which the neighbours read in the next cycle.
//
// Following the paper, the ALU has a single-cycle multiply-accumulate (MAC: dst =
// dst + a*b, as in "MAC R0, R1, VA") and SIMD operations that treat a 32-bit word as
// two independent 16-bit lanes. The encoding, the operand set and the truncation of
// products to the lane width are this design's own.
//
// Timing: combinational result; R0, R1 and out update at the clock edge that ends
// the instruction, VWR/SRF writes are presented as strobes for that same edge.
module pe
  import disco_pkg::*;
#(
  parameter int unsigned W = WORD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  pe_instr_t            instr,
  input  logic [W-1:0]         vwr_word [N_VWR],
  input  logic [W-1:0]         srf      [SRF_DEPTH],
  input  logic [W-1:0]         left,
  input  logic [W-1:0]         right,
  output logic [W-1:0]         out,
  output logic                 vwr_we,
  output logic [1:0]           vwr_sel,
  output logic [W-1:0]         vwr_wdata,
  output logic                 srf_we,
  output logic [SRF_AW-1:0]    srf_idx,
  output logic [W-1:0]         srf_wdata
);

  localparam int unsigned H = W / 2;

  logic [W-1:0] r0, r1;
  logic [W-1:0] a, b, acc, res, imm_ext;
  logic         wr;

  assign imm_ext = W'($signed(instr.imm));
  assign srf_idx = instr.imm[SRF_AW-1:0];

  function automatic logic [W-1:0] pick(pe_src_e s, logic [W-1:0] r0_v, logic [W-1:0] r1_v,
                                        logic [W-1:0] va, logic [W-1:0] vb, logic [W-1:0] vc,
                                        logic [W-1:0] sr, logic [W-1:0] l, logic [W-1:0] r,
                                        logic [W-1:0] im, logic [W-1:0] own);
    case (s)
      SRC_R0:    return r0_v;
      SRC_R1:    return r1_v;
      SRC_VWRA:  return va;
      SRC_VWRB:  return vb;
      SRC_VWRC:  return vc;
      SRC_SRF:   return sr;
      SRC_LEFT:  return l;
      SRC_RIGHT: return r;
      SRC_IMM:   return im;
      SRC_OWN:   return own;
      default:   return '0;
    endcase
  endfunction

  always_comb begin
    a = pick(instr.srca, r0, r1, vwr_word[0], vwr_word[1], vwr_word[2],
             srf[srf_idx], left, right, imm_ext, out);
    b = pick(instr.srcb, r0, r1, vwr_word[0], vwr_word[1], vwr_word[2],
             srf[srf_idx], left, right, imm_ext, out);
    // Accumulator for MAC: the current value of the destination.
    case (instr.dst)
      DST_R0:   acc = r0;
      DST_R1:   acc = r1;
      DST_VWRA: acc = vwr_word[0];
      DST_VWRB: acc = vwr_word[1];
      DST_VWRC: acc = vwr_word[2];
      DST_SRF:  acc = srf[srf_idx];
      default:  acc = out;
    endcase
  end

  always_comb begin
    res = '0;
    case (instr.op)
      PE_ADD:   res = a + b;
      PE_SUB:   res = a - b;
      PE_MUL:   res = a * b;
      PE_MAC:   res = acc + a * b;
      PE_AND:   res = a & b;
      PE_OR:    res = a | b;
      PE_XOR:   res = a ^ b;
      PE_SLL:   res = a << b[4:0];
      PE_SRL:   res = a >> b[4:0];
      PE_SRA:   res = W'($signed(a) >>> b[4:0]);
      PE_MOV:   res = a;
      PE_ADD16: res = {a[W-1:H] + b[W-1:H], a[H-1:0] + b[H-1:0]};
      PE_SUB16: res = {a[W-1:H] - b[W-1:H], a[H-1:0] - b[H-1:0]};
      PE_MUL16: res = {H'(a[W-1:H] * b[W-1:H]), H'(a[H-1:0] * b[H-1:0])};
      PE_MAC16: res = {H'(acc[W-1:H] + a[W-1:H] * b[W-1:H]),
                       H'(acc[H-1:0] + a[H-1:0] * b[H-1:0])};
      default:  res = '0;
    endcase
  end

  assign wr = en && (instr.op != PE_NOP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0  <= '0;
      r1  <= '0;
      out <= '0;
    end else if (wr) begin
      out <= res;
      if (instr.dst == DST_R0) r0 <= res;
      if (instr.dst == DST_R1) r1 <= res;
    end
  end

  always_comb begin
    vwr_we    = wr && (instr.dst inside {DST_VWRA, DST_VWRB, DST_VWRC});
    vwr_sel   = (instr.dst == DST_VWRB) ? 2'd1 : (instr.dst == DST_VWRC) ? 2'd2 : 2'd0;
    vwr_wdata = res;
    srf_we    = wr && (instr.dst == DST_SRF);
    srf_wdata = res;
  end

endmodule
