// disco_cgra: top level of DISCO-CGRA, a heterogeneous coarse-grained
// reconfigurable array with a shared scratchpad.
//
// Two independent columns (disco_column) each run their own VLIW program out of
// private instruction memories: four PEs with MAC and 2x16-bit SIMD, a load-store
// unit, a multiplexer-control unit and a loop-control unit, around three 4096-bit
// very wide registers. Both columns share one 32 KiB scratchpad (spm) through a
// 4096-bit port each. The IMEM controller (imem_ctrl) holds the 10 KiB global
// instruction memory, dispatches kernels into the columns and signals completion.
// This structure follows the paper; see the submodules for what is this design's own.
//
// Interface: two OBI slave ports towards the system bus, spm_obi_* for the scratchpad
// (host or DMA data) and cfg_obi_* for the global IMEM and the kernel registers; irq
// is the level "kernel done" flag (cleared by the next command). Completion is taken
// from the columns' busy flags, so their one-cycle done pulses are left unused here.
module disco_cgra
  import disco_pkg::*;
#(
  parameter int unsigned SPM_L   = SPM_LINES,
  parameter int unsigned GWORDS  = GIMEM_WORDS,
  parameter int unsigned LIMEM_D = LIMEM_DEPTH
) (
  input  logic     clk,
  input  logic     rst_n,
  input  obi_req_t spm_obi_req,
  output obi_rsp_t spm_obi_rsp,
  input  obi_req_t cfg_obi_req,
  output obi_rsp_t cfg_obi_rsp,
  output logic     irq
);

  localparam int unsigned LAW = $clog2(SPM_L);
  localparam int unsigned PCW = $clog2(LIMEM_D);

  logic [LAW-1:0]   spm_addr  [N_COLS];
  logic [N_COLS-1:0] spm_we;
  logic [VWR_W-1:0] spm_wdata [N_COLS];
  logic [VWR_W-1:0] spm_rdata [N_COLS];

  logic [N_COLS-1:0] col_imem_we, col_start, col_busy, col_done;
  logic [PCW-1:0]    col_imem_waddr;
  logic [ROW_W-1:0]  col_imem_wrow;

  spm #(.LINES(SPM_L), .LINE_W(VWR_W), .NP(N_COLS)) u_spm (
    .clk, .rst_n, .obi_req(spm_obi_req), .obi_rsp(spm_obi_rsp),
    .addr(spm_addr), .we(spm_we), .wdata(spm_wdata), .rdata(spm_rdata)
  );

  imem_ctrl #(.GWORDS(GWORDS), .NC(N_COLS), .LIMEM_D(LIMEM_D)) u_ctrl (
    .clk, .rst_n, .obi_req(cfg_obi_req), .obi_rsp(cfg_obi_rsp),
    .col_imem_we, .col_imem_waddr, .col_imem_wrow, .col_start, .col_busy, .irq
  );

  for (genvar c = 0; c < N_COLS; c++) begin : g_col
    disco_column #(.LIMEM_D(LIMEM_D), .LAW(LAW)) u_col (
      .clk, .rst_n, .start(col_start[c]),
      .imem_we(col_imem_we[c]), .imem_waddr(col_imem_waddr), .imem_wrow(col_imem_wrow),
      .spm_addr(spm_addr[c]), .spm_we(spm_we[c]), .spm_wdata(spm_wdata[c]),
      .spm_rdata(spm_rdata[c]), .busy(col_busy[c]), .done(col_done[c])
    );
  end

endmodule
