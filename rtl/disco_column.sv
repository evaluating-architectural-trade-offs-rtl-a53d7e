// disco_column: one self-contained column of DISCO-CGRA.
//
// A column is a small VLIW machine. Every cycle its program counter selects one row
// of seven instructions, one per element, from the seven private instruction
// memories: four PEs, the load-store unit (LSU), the multiplexer-control unit (MXCU)
// and the loop-control unit (LCU). Data lives in three 4096-bit very wide registers
// (VWR A, B, C): the LSU fills or drains a whole VWR from/to one scratchpad line in a
// single cycle, or writes the shuffle unit's rearrangement of VWR A and B into a VWR;
// each PE sees only its quarter (1024 bits = 32 words) of each VWR, through a
// multiplexer that picks the word at the MXCU's index. Scalars shared by all units
// sit in the scalar register file (SRF), which the LSU loads from a scratchpad line
// at kernel onset. PEs form a ring in which each PE can read the output register of
// its two neighbours. This organisation follows the paper; the absence of any
// pipeline (fetch and execute of a row in one cycle) is this design's own choice.
//
// Interface: the IMEM controller writes instruction rows through imem_* while the
// column is idle and then pulses start; busy is high from start until the LCU
// executes EXIT, when done pulses for a cycle. spm_* is the column's wide port to the
// shared scratchpad (combinational read, write at the clock edge).
module disco_column
  import disco_pkg::*;
#(
  parameter int unsigned LIMEM_D = LIMEM_DEPTH,
  parameter int unsigned LAW     = LINE_AW,
  parameter int unsigned PCW     = $clog2(LIMEM_D)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              imem_we,
  input  logic [PCW-1:0]    imem_waddr,
  input  logic [ROW_W-1:0]  imem_wrow,
  output logic [LAW-1:0]    spm_addr,
  output logic              spm_we,
  output logic [VWR_W-1:0]  spm_wdata,
  input  logic [VWR_W-1:0]  spm_rdata,
  output logic              busy,
  output logic              done
);

  // ------------------------------------------------------------ control
  logic [PCW-1:0] pc;
  logic           br_taken, exit_s;
  logic [PCW-1:0] br_target;

  disco_pc #(.PC_W(PCW)) u_pc (
    .clk, .rst_n, .start, .br_taken, .br_target, .exit_i(exit_s),
    .pc, .running(busy), .done
  );

  // ------------------------------------------------------------ local IMEMs
  logic [PE_IW-1:0]   pe_iw [N_PE];
  logic [LSU_IW-1:0]  lsu_iw;
  logic [MXCU_IW-1:0] mx_iw;
  logic [LCU_IW-1:0]  lcu_iw;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe_imem
    local_imem #(.DEPTH(LIMEM_D), .WIDTH(PE_IW)) u_imem (
      .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wrow[p*PE_IW +: PE_IW]),
      .raddr(pc), .rdata(pe_iw[p])
    );
  end

  local_imem #(.DEPTH(LIMEM_D), .WIDTH(LSU_IW)) u_lsu_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wrow[ROW_LSU_LSB +: LSU_IW]),
    .raddr(pc), .rdata(lsu_iw)
  );
  local_imem #(.DEPTH(LIMEM_D), .WIDTH(MXCU_IW)) u_mxcu_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wrow[ROW_MXCU_LSB +: MXCU_IW]),
    .raddr(pc), .rdata(mx_iw)
  );
  local_imem #(.DEPTH(LIMEM_D), .WIDTH(LCU_IW)) u_lcu_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wrow[ROW_LCU_LSB +: LCU_IW]),
    .raddr(pc), .rdata(lcu_iw)
  );

  // ------------------------------------------------------------ SRF
  logic [WORD_W-1:0] srf_q    [SRF_DEPTH];
  logic [WORD_W-1:0] srf_bulk [SRF_DEPTH];
  logic              srf_bulk_we;
  logic [N_PE:0]     srf_we;
  logic [SRF_AW-1:0] srf_idx  [N_PE+1];
  logic [WORD_W-1:0] srf_wd   [N_PE+1];

  for (genvar i = 0; i < SRF_DEPTH; i++) begin : g_srf_bulk
    assign srf_bulk[i] = spm_rdata[i*WORD_W +: WORD_W];
  end

  srf u_srf (
    .clk, .rst_n, .bulk_we(srf_bulk_we), .bulk_wdata(srf_bulk),
    .we(srf_we), .idx(srf_idx), .wdata(srf_wd), .q(srf_q)
  );

  // ------------------------------------------------------------ LSU, MXCU, LCU
  logic [N_VWR-1:0] vwr_line_we;
  logic             vwr_from_shuf;
  logic [2:0]       shuf_mode;
  logic [1:0]       st_sel;
  logic [IDX_W-1:0] idx;

  lsu #(.AW(LAW)) u_lsu (
    .clk, .rst_n, .en(busy), .instr(lsu_instr_t'(lsu_iw)), .srf(srf_q),
    .spm_addr, .spm_we, .st_sel, .vwr_line_we, .vwr_from_shuf, .shuf_mode,
    .srf_bulk_we
  );

  mxcu u_mxcu (
    .clk, .rst_n, .en(busy), .instr(mx_instr_t'(mx_iw)), .srf(srf_q),
    .idx, .srf_we(srf_we[N_PE]), .srf_idx(srf_idx[N_PE]), .srf_wdata(srf_wd[N_PE])
  );

  lcu #(.PCW(PCW)) u_lcu (
    .clk, .rst_n, .en(busy), .instr(lcu_instr_t'(lcu_iw)), .srf(srf_q),
    .br_taken, .br_target, .exit_o(exit_s)
  );

  // ------------------------------------------------------------ VWRs and shuffle unit
  logic [VWR_W-1:0]  vq [N_VWR];
  logic [VWR_W-1:0]  shuf_y;
  logic [N_PE-1:0]   pe_vwr_we;
  logic [1:0]        pe_vwr_sel [N_PE];
  logic [WORD_W-1:0] pe_vwr_wd  [N_PE];

  shuffle_unit u_shuf (.a(vq[0]), .b(vq[1]), .mode(shuf_mode), .y(shuf_y));

  for (genvar v = 0; v < N_VWR; v++) begin : g_vwr
    logic [N_PE-1:0] word_we;
    for (genvar p = 0; p < N_PE; p++) begin : g_we
      assign word_we[p] = pe_vwr_we[p] && (pe_vwr_sel[p] == 2'(v));
    end
    vwr u_vwr (
      .clk, .rst_n, .line_we(vwr_line_we[v]),
      .line_wdata(vwr_from_shuf ? shuf_y : spm_rdata),
      .idx, .word_we, .word_wdata(pe_vwr_wd), .q(vq[v])
    );
  end

  assign spm_wdata = vq[st_sel];

  // ------------------------------------------------------------ PEs
  logic [WORD_W-1:0] pe_out [N_PE];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic [SLICE_W-1:0] sl [N_VWR];
    logic [WORD_W-1:0]  word [N_VWR];
    for (genvar v = 0; v < N_VWR; v++) begin : g_sl
      assign sl[v] = vq[v][p*SLICE_W +: SLICE_W];
    end
    vwr_mux u_mux (.slice_in(sl), .idx, .word);
    pe u_pe (
      .clk, .rst_n, .en(busy), .instr(pe_instr_t'(pe_iw[p])),
      .vwr_word(word), .srf(srf_q),
      .left(pe_out[(p + N_PE - 1) % N_PE]), .right(pe_out[(p + 1) % N_PE]),
      .out(pe_out[p]),
      .vwr_we(pe_vwr_we[p]), .vwr_sel(pe_vwr_sel[p]), .vwr_wdata(pe_vwr_wd[p]),
      .srf_we(srf_we[p]), .srf_idx(srf_idx[p]), .srf_wdata(srf_wd[p])
    );
  end

  // A new kernel must not be written into the IMEMs of a running column.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(imem_we && busy));

endmodule
