// disco_pkg: architectural constants, instruction formats and bus types shared by
// the DISCO-CGRA modules.
//
// Sizes that follow the paper: two independent columns, four PEs and three very wide
// registers (VWRs) per column, 4096-bit VWRs split into four 1024-bit PE slices of
// 32-bit words, 64 scratchpad (SPM) lines of 4096 bits (32 KiB), a 10 KiB global
// instruction memory holding 512 VLIW rows, and seven instructions per column per
// cycle (4 PE + LSU + MXCU + LCU).
//
// This design's own choices: every instruction encoding below, the 8-entry scalar
// register file, 64-entry local instruction memories, and the bus structs, which
// follow the OBI request/grant/rvalid handshake in its simplest form.
package disco_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W      = 32;
  localparam int unsigned N_COLS      = 2;
  localparam int unsigned N_PE        = 4;
  localparam int unsigned N_VWR       = 3;
  localparam int unsigned VWR_W       = 4096;
  localparam int unsigned SLICE_W     = VWR_W / N_PE;       // 1024
  localparam int unsigned SLICE_WORDS = SLICE_W / WORD_W;   // 32
  localparam int unsigned IDX_W       = $clog2(SLICE_WORDS); // 5
  localparam int unsigned SPM_LINES   = 64;
  localparam int unsigned LINE_AW     = $clog2(SPM_LINES);  // 6
  localparam int unsigned SRF_DEPTH   = 8;
  localparam int unsigned SRF_AW      = $clog2(SRF_DEPTH);  // 3
  localparam int unsigned LIMEM_DEPTH = 64;
  localparam int unsigned PC_W        = $clog2(LIMEM_DEPTH); // 6
  localparam int unsigned GIMEM_WORDS = 2560;                // 10 KiB of 32-bit words
  localparam int unsigned GIMEM_AW    = 12;

  // ---------------------------------------------------------------- instruction widths
  localparam int unsigned PE_IW   = 24;
  localparam int unsigned LSU_IW  = 20;
  localparam int unsigned MXCU_IW = 20;
  localparam int unsigned LCU_IW  = 24;
  localparam int unsigned ROW_W   = N_PE * PE_IW + LSU_IW + MXCU_IW + LCU_IW; // 160
  localparam int unsigned ROW_WORDS = ROW_W / WORD_W;                         // 5

  // Bit offsets of each element's instruction inside a 160-bit VLIW row.
  localparam int unsigned ROW_LSU_LSB  = N_PE * PE_IW;           // 96
  localparam int unsigned ROW_MXCU_LSB = ROW_LSU_LSB + LSU_IW;   // 116
  localparam int unsigned ROW_LCU_LSB  = ROW_MXCU_LSB + MXCU_IW; // 136

  // ---------------------------------------------------------------- PE
  typedef enum logic [4:0] {
    PE_NOP   = 5'd0,
    PE_ADD   = 5'd1,
    PE_SUB   = 5'd2,
    PE_MUL   = 5'd3,
    PE_MAC   = 5'd4,  // dst = dst + a*b
    PE_AND   = 5'd5,
    PE_OR    = 5'd6,
    PE_XOR   = 5'd7,
    PE_SLL   = 5'd8,
    PE_SRL   = 5'd9,
    PE_SRA   = 5'd10,
    PE_MOV   = 5'd11, // dst = a
    PE_ADD16 = 5'd12, // two 16-bit lanes
    PE_SUB16 = 5'd13,
    PE_MUL16 = 5'd14,
    PE_MAC16 = 5'd15
  } pe_op_e;

  typedef enum logic [3:0] {
    SRC_R0    = 4'd0,
    SRC_R1    = 4'd1,
    SRC_VWRA  = 4'd2,
    SRC_VWRB  = 4'd3,
    SRC_VWRC  = 4'd4,
    SRC_SRF   = 4'd5,  // SRF[imm[2:0]]
    SRC_LEFT  = 4'd6,  // output register of PE i-1
    SRC_RIGHT = 4'd7,  // output register of PE i+1
    SRC_ZERO  = 4'd8,
    SRC_IMM   = 4'd9,  // sign-extended imm
    SRC_OWN   = 4'd10  // own output register
  } pe_src_e;

  typedef enum logic [2:0] {
    DST_NONE = 3'd0,
    DST_R0   = 3'd1,
    DST_R1   = 3'd2,
    DST_VWRA = 3'd3,
    DST_VWRB = 3'd4,
    DST_VWRC = 3'd5,
    DST_SRF  = 3'd6   // SRF[imm[2:0]]
  } pe_dst_e;

  typedef struct packed {
    pe_op_e     op;
    pe_dst_e    dst;
    pe_src_e    srca;
    pe_src_e    srcb;
    logic [7:0] imm;
  } pe_instr_t; // 24 bits

  // ---------------------------------------------------------------- LSU
  typedef enum logic [3:0] {
    LSU_NOP   = 4'd0,
    LSU_LDV   = 4'd1, // VWR[vwr] <- SPM[R[rs]];       R[rs] += imm
    LSU_STV   = 4'd2, // SPM[R[rs]] <- VWR[vwr];       R[rs] += imm
    LSU_LDSRF = 4'd3, // SRF <- SPM[R[rs]] words 0..7; R[rs] += imm
    LSU_SHUF  = 4'd4, // VWR[vwr] <- shuffle(VWR A, VWR B) with mode imm[2:0]
    LSU_SETR  = 4'd5, // R[rd] <- imm
    LSU_ADDI  = 4'd6, // R[rd] <- R[rs] + imm
    LSU_RSRF  = 4'd7, // R[rd] <- SRF[imm[2:0]]
    LSU_ADD   = 4'd8  // R[rd] <- R[rd] + R[rs]
  } lsu_op_e;

  typedef struct packed {
    lsu_op_e    op;
    logic [1:0] vwr;  // 0 = A, 1 = B, 2 = C
    logic [1:0] rd;
    logic [1:0] rs;
    logic [9:0] imm;
  } lsu_instr_t; // 20 bits

  // ---------------------------------------------------------------- shuffle unit
  typedef enum logic [2:0] {
    SHUF_EVEN   = 3'd0, // y[i] = {A,B}[2i]
    SHUF_ODD    = 3'd1, // y[i] = {A,B}[2i+1]
    SHUF_ILV_LO = 3'd2, // y[2i] = A[i],    y[2i+1] = B[i]     (i < half)
    SHUF_ILV_HI = 3'd3, // y[2i] = A[h+i],  y[2i+1] = B[h+i]
    SHUF_BITREV = 3'd4  // y[i] = A[bitrev(i)]
  } shuf_mode_e;

  // ---------------------------------------------------------------- MXCU
  typedef enum logic [3:0] {
    MX_NOP    = 4'd0,
    MX_SETIDX = 4'd1, // idx <- imm
    MX_ADDIDX = 4'd2, // idx <- idx + imm
    MX_IDXR   = 4'd3, // idx <- R[rs]
    MX_SETR   = 4'd4, // R[rd] <- imm
    MX_ADDI   = 4'd5, // R[rd] <- R[rs] + imm
    MX_RSRF   = 4'd6, // R[rd] <- SRF[imm[2:0]]
    MX_WSRF   = 4'd7, // SRF[imm[2:0]] <- R[rs]
    MX_ADD    = 4'd8  // R[rd] <- R[rd] + R[rs]
  } mx_op_e;

  typedef struct packed {
    mx_op_e      op;
    logic [1:0]  rd;
    logic [1:0]  rs;
    logic [11:0] imm;
  } mx_instr_t; // 20 bits

  // ---------------------------------------------------------------- LCU
  typedef enum logic [3:0] {
    LCU_NOP  = 4'd0,
    LCU_SETR = 4'd1, // R[rd] <- imm
    LCU_ADDI = 4'd2, // R[rd] <- R[rs] + imm
    LCU_RSRF = 4'd3, // R[rd] <- SRF[imm[2:0]]
    LCU_DBNZ = 4'd4, // R[rd] <- R[rd] - 1; branch if the new value != 0
    LCU_BNE  = 4'd5, // branch if R[rd] != R[rs]
    LCU_BEQ  = 4'd6, // branch if R[rd] == R[rs]
    LCU_BLT  = 4'd7, // branch if R[rd] <  R[rs] (signed)
    LCU_JMP  = 4'd8, // branch always
    LCU_EXIT = 4'd9  // end of kernel
  } lcu_op_e;

  typedef struct packed {
    lcu_op_e    op;
    logic [1:0] rd;
    logic [1:0] rs;
    logic [5:0] tgt;
    logic [9:0] imm;
  } lcu_instr_t; // 24 bits

  // ---------------------------------------------------------------- OBI bus
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_rsp_t;

  // Configuration port map (byte addresses). Words below CFG_REG_BASE address the
  // global IMEM; the registers sit above it.
  localparam logic [31:0] CFG_REG_BASE = 32'h0000_4000;
  localparam int unsigned REG_KROW    = 0; // first VLIW row of the kernel in the global IMEM
  localparam int unsigned REG_KNROWS  = 1; // number of rows (1..LIMEM_DEPTH)
  localparam int unsigned REG_COLMASK = 2; // columns addressed by the command
  localparam int unsigned REG_CMD     = 3; // write: bit0 load rows, bit1 run
  localparam int unsigned REG_STATUS  = 4; // read: {.., col_busy, done, running, loading}
  localparam int unsigned REG_CYCLES  = 5; // read: cycles of the last run

endpackage
