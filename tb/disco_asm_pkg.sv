// disco_asm_pkg: testbench-side assembler for DISCO-CGRA programs.
//
// Builds the 160-bit VLIW rows (four PE, LSU, MXCU and LCU instructions) that the
// IMEM controller dispatches, and provides the two kernels the testbenches run:
//   gemm_program:    C += A * B for up to 32 x 32 x 32 blocks on one column, one
//                    output row per PE, following the paper's loop nest (LCU loops,
//                    LSU loads lines of A, B and C, MXCU walks the VWR index, B
//                    elements passed from PE to PE, PEs multiply-accumulate).
//                    With simd=1 every 32-bit word carries two 16-bit elements (so
//                    K = 64) and the two lane sums are added at the end, mod 2^16.
//   shuffle_program: the shuffle unit's butterfly patterns on two lines, plus a
//                    neighbour transfer (PE1 takes PE0's output, "R1 = Left").
// Both read their parameters from an SPM line into the SRF at kernel onset.
package disco_asm_pkg;
  import disco_pkg::*;

  typedef logic [ROW_W-1:0] row_t;
  typedef row_t prog_t [$];

  function automatic logic [PE_IW-1:0] pe_i(pe_op_e op, pe_dst_e d = DST_NONE,
                                            pe_src_e a = SRC_ZERO, pe_src_e b = SRC_ZERO, int imm = 0);
    pe_instr_t i;
    i.op = op; i.dst = d; i.srca = a; i.srcb = b; i.imm = 8'(imm);
    return i;
  endfunction

  function automatic logic [LSU_IW-1:0] lsu_i(lsu_op_e op, int vwr = 0, int rd = 0, int rs = 0, int imm = 0);
    lsu_instr_t i;
    i.op = op; i.vwr = 2'(vwr); i.rd = 2'(rd); i.rs = 2'(rs); i.imm = 10'(imm);
    return i;
  endfunction

  function automatic logic [MXCU_IW-1:0] mx_i(mx_op_e op, int rd = 0, int rs = 0, int imm = 0);
    mx_instr_t i;
    i.op = op; i.rd = 2'(rd); i.rs = 2'(rs); i.imm = 12'(imm);
    return i;
  endfunction

  function automatic logic [LCU_IW-1:0] lcu_i(lcu_op_e op, int rd = 0, int rs = 0, int tgt = 0, int imm = 0);
    lcu_instr_t i;
    i.op = op; i.rd = 2'(rd); i.rs = 2'(rs); i.tgt = 6'(tgt); i.imm = 10'(imm);
    return i;
  endfunction

  // Same PE instruction on all four PEs.
  function automatic logic [4*PE_IW-1:0] all_pe(logic [PE_IW-1:0] p);
    return {p, p, p, p};
  endfunction

  function automatic row_t row(logic [4*PE_IW-1:0] pes = '0, logic [LSU_IW-1:0] l = '0,
                               logic [MXCU_IW-1:0] m = '0, logic [LCU_IW-1:0] c = '0);
    return {c, m, l, pes};
  endfunction

  // gemm_program: C += A * B on blocks of up to 32x32x32, the paper's three-loop mapping.
  // SRF layout (first words of line srf_line):
  //   [0] first line of A   [1] first line of B   [2] nbl = lines of B (4 columns each)
  //   [3] first line of C   [4] K words per row (32)   [5] nal = lines of A (4 rows each)
  // Data layout: line a of A holds rows 4a..4a+3, one per PE slice (row-wise); line b of
  // B holds columns 4b..4b+3 of B, one per slice (column-wise, i.e. B transposed); line
  // a of C holds rows 4a..4a+3 of C, word j of slice p = C[4a+p][j] (j < 32).
  // Loops: L3 over the lines of A (LCU R2), L2 over the lines of B (LCU R1), the four
  // columns of a B line unrolled, L1 over K (LCU R0). Column s of a B line lies in PE
  // s's slice, so in L1 PE s reads the B element at the MXCU index and the other PEs
  // take it from their left neighbour one after the other (the paper's "read B value on
  // PE0" / "share B value" / "R1 = Left"); then all four PEs multiply-accumulate it
  // with their A word at the same index into R0. Each finished dot product is added
  // into the C word at index j (MXCU R1).
  // With simd=1 each word holds two 16-bit elements; the two lane sums are folded and
  // added (16-bit) to the low half of the C word.
  function automatic prog_t gemm_program(int srf_line, bit simd);
    prog_t p;
    int l1, l2, l3;
    p.push_back(row('0, lsu_i(LSU_SETR, 0, 0, 0, srf_line)));                          // 0
    p.push_back(row('0, lsu_i(LSU_LDSRF, 0, 0, 0, 0)));                                // 1
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 1, 0, 0), '0, lcu_i(LCU_RSRF, 2, 0, 0, 5))); // 2
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 3, 0, 3)));                                 // 3
    // L3 head: next rows of A, their C rows; j = 0; first line of B, L2 count
    l3 = p.size();
    p.push_back(row('0, lsu_i(LSU_LDV, 0, 0, 1, 1), mx_i(MX_SETR, 1, 0, 0)));
    p.push_back(row('0, lsu_i(LSU_LDV, 2, 0, 3, 0)));
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 2, 0, 1), '0, lcu_i(LCU_RSRF, 1, 0, 0, 2)));
    // L2 head: next line of B
    l2 = p.size();
    p.push_back(row('0, lsu_i(LSU_LDV, 1, 0, 2, 1)));
    for (int c = 0; c < N_PE; c++) begin
      logic [4*PE_IW-1:0] rd;
      // clear partial sums, index 0, L1 count
      p.push_back(row(all_pe(pe_i(PE_MOV, DST_R0, SRC_ZERO)), '0, mx_i(MX_SETIDX, 0, 0, 0),
                      lcu_i(LCU_RSRF, 0, 0, 0, 4)));
      // L1: PE c reads B, the others take it from the left, then all MAC
      l1 = p.size();
      rd = '0;
      rd[c*PE_IW +: PE_IW] = pe_i(PE_MOV, DST_R1, SRC_VWRB);
      p.push_back(row(rd));
      for (int h = 1; h < N_PE; h++) begin
        rd = '0;
        rd[((c + h) % N_PE)*PE_IW +: PE_IW] = pe_i(PE_MOV, DST_R1, SRC_LEFT);
        p.push_back(row(rd));
      end
      p.push_back(row(all_pe(pe_i(simd ? PE_MAC16 : PE_MAC, DST_R0, SRC_R1, SRC_VWRA)), '0,
                      mx_i(MX_ADDIDX, 0, 0, 1), lcu_i(LCU_DBNZ, 0, 0, l1)));
      if (simd) begin
        p.push_back(row(all_pe(pe_i(PE_SRL, DST_R1, SRC_R0, SRC_IMM, 16))));
        p.push_back(row(all_pe(pe_i(PE_SLL, DST_R0, SRC_R0, SRC_IMM, 16))));
        p.push_back(row(all_pe(pe_i(PE_SRL, DST_R0, SRC_R0, SRC_IMM, 16))));
        p.push_back(row(all_pe(pe_i(PE_ADD16, DST_R0, SRC_R0, SRC_R1))));
      end
      p.push_back(row('0, '0, mx_i(MX_IDXR, 0, 1, 0)));                                // idx <- j
      p.push_back(row(all_pe(pe_i(simd ? PE_ADD16 : PE_ADD, DST_VWRC, SRC_VWRC, SRC_R0)), '0,
                      mx_i(MX_ADDI, 1, 1, 1)));                                        // C[.][j] += R0
    end
    p.push_back(row('0, '0, '0, lcu_i(LCU_DBNZ, 1, 0, l2)));                           // L2
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 3, 1)));                                  // C -> SPM
    p.push_back(row('0, '0, '0, lcu_i(LCU_DBNZ, 2, 0, l3)));                           // L3
    p.push_back(row('0, '0, '0, lcu_i(LCU_EXIT)));
    return p;
  endfunction

  // Cycles from start to exit of gemm_program (K = 32, 4 PEs): 4 set-up rows; per line of
  // A 3 + nbl*(2 + 4*(5*K + 3 + simd fold)) + 2 rows; the EXIT row.
  function automatic int gemm_cycles(int nal, int nbl, bit simd);
    return 4 + nal * (3 + nbl * (2 + 4 * (5 * 32 + 3 + (simd ? 4 : 0))) + 2) + 1;
  endfunction

  // SRF layout for shuffle_program: [0] line of A, [1] line of B, [2] first output
  // line; outputs: EVEN, ODD, BITREV(A), ILV_LO, then a line whose PE1 slice word 3
  // is the ILV_LO line with word 3 of every slice cleared, except that PE1's word 3
  // holds word 3 of PE0's slice of A (neighbour transfer).
  function automatic prog_t shuffle_program(int srf_line);
    prog_t p;
    logic [4*PE_IW-1:0] nb;
    nb = {pe_i(PE_NOP), pe_i(PE_NOP), pe_i(PE_MOV, DST_VWRC, SRC_LEFT), pe_i(PE_NOP)};
    p.push_back(row('0, lsu_i(LSU_SETR, 0, 0, 0, srf_line)));
    p.push_back(row('0, lsu_i(LSU_LDSRF, 0, 0, 0, 0)));
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 1, 0, 0)));
    p.push_back(row('0, lsu_i(LSU_LDV, 0, 0, 1, 0)));
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 1, 0, 1)));
    p.push_back(row('0, lsu_i(LSU_LDV, 1, 0, 1, 0)));
    p.push_back(row('0, lsu_i(LSU_RSRF, 0, 2, 0, 2)));
    p.push_back(row('0, lsu_i(LSU_SHUF, 2, 0, 0, int'(SHUF_EVEN))));
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 2, 1)));
    p.push_back(row('0, lsu_i(LSU_SHUF, 2, 0, 0, int'(SHUF_ODD))));
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 2, 1)));
    p.push_back(row('0, lsu_i(LSU_SHUF, 2, 0, 0, int'(SHUF_BITREV))));
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 2, 1)));
    p.push_back(row('0, lsu_i(LSU_SHUF, 2, 0, 0, int'(SHUF_ILV_LO))));
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 2, 1)));
    // neighbour transfer: clear C, PE0 reads A[idx], PE1 writes its LEFT into C
    p.push_back(row('0, '0, mx_i(MX_SETIDX, 0, 0, 3)));
    p.push_back(row(all_pe(pe_i(PE_MOV, DST_VWRC, SRC_ZERO)), '0, '0, '0));
    p.push_back(row({pe_i(PE_NOP), pe_i(PE_NOP), pe_i(PE_NOP), pe_i(PE_MOV, DST_NONE, SRC_VWRA)}));
    p.push_back(row(nb));
    p.push_back(row('0, lsu_i(LSU_STV, 2, 0, 2, 1)));
    p.push_back(row('0, '0, '0, lcu_i(LCU_EXIT)));
    return p;
  endfunction

endpackage
