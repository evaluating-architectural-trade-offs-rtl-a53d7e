// tb_disco_cgra: end-to-end test of the whole array at its default sizes, driven
// the way a host processor would drive it over the two bus ports.
//
// Run 1: one 32x32x32 block of C += A*B in 32-bit arithmetic, using the paper's
//        scratchpad map (parameters, B lines, two buffers of A and C). The block is
//        split symmetrically: each column computes 16 rows of C with its own copy of
//        the kernel, both started together. The two kernels are dispatched one after
//        the other (load commands with different masks); a global-IMEM write issued
//        during a dispatch has to wait. While the columns run, the host fills the
//        other buffer with the next block (double buffering).
// Run 2: the next block in 16-bit SIMD arithmetic from that buffer; column 1 is
//        loaded and run alone, then column 0, so that each start is checked alone.
// Run 3: the shuffle / neighbour kernel on column 1.
// Results are read back over the bus and compared with values computed here; the
// run times are checked against the kernels' row counts; each mechanism (dispatch,
// bus wait, line load/store, SRF load, MAC, SIMD MAC, shuffle, neighbour read, loop
// branch, exit, both columns busy, bus access during a run) is counted and must
// have happened.
module tb_disco_cgra;
  import disco_pkg::*;
  import disco_asm_pkg::*;

  logic clk = 0, rst_n = 0;
  obi_req_t sreq, creq;
  obi_rsp_t srsp, crsp;
  logic irq;
  int checks = 0, failures = 0;

  disco_cgra dut (.clk, .rst_n, .spm_obi_req(sreq), .spm_obi_rsp(srsp),
                  .cfg_obi_req(creq), .cfg_obi_rsp(crsp), .irq);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanism counters
  int n_dispatch = 0, n_wait = 0, n_ldv = 0, n_stv = 0, n_ldsrf = 0, n_mac = 0, n_mac16 = 0;
  int n_shuf = 0, n_left = 0, n_branch = 0, n_exit = 0, n_both = 0, n_bus_run = 0;

  for (genvar c = 0; c < N_COLS; c++) begin : g_mon
    always @(posedge clk) if (dut.g_col[c].u_col.busy) begin
      case (dut.g_col[c].u_col.u_lsu.instr.op)
        LSU_LDV:   n_ldv++;
        LSU_STV:   n_stv++;
        LSU_LDSRF: n_ldsrf++;
        LSU_SHUF:  n_shuf++;
        default: ;
      endcase
      if (dut.g_col[c].u_col.br_taken) n_branch++;
      if (dut.g_col[c].u_col.exit_s) n_exit++;
    end
    for (genvar p = 0; p < N_PE; p++) begin : g_pe
      always @(posedge clk) if (dut.g_col[c].u_col.busy) begin
        if (dut.g_col[c].u_col.g_pe[p].u_pe.instr.op == PE_MAC) n_mac++;
        if (dut.g_col[c].u_col.g_pe[p].u_pe.instr.op == PE_MAC16) n_mac16++;
        if (dut.g_col[c].u_col.g_pe[p].u_pe.instr.op != PE_NOP &&
            dut.g_col[c].u_col.g_pe[p].u_pe.instr.srca == SRC_LEFT) n_left++;
      end
    end
  end
  always @(posedge clk) begin
    if (dut.col_imem_we != 0) n_dispatch++;
    if (creq.req && !crsp.gnt) n_wait++;
    if (dut.col_busy == 2'b11) n_both++;
    if (sreq.req && dut.col_busy != 0) n_bus_run++;
  end

  // ------------------------------------------------------------ bus tasks
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic cfg(bit wr, logic [31:0] a, logic [31:0] d, output logic [31:0] q);
    creq.req = 1; creq.we = wr; creq.addr = a; creq.wdata = d; creq.be = 4'hF;
    #1;
    while (!crsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    creq.req = 0;
    q = crsp.rdata;
  endtask

  task automatic spm_wr(int line, int word, logic [31:0] d);
    sreq.req = 1; sreq.we = 1; sreq.addr = 32'((line * 128 + word) * 4); sreq.wdata = d; sreq.be = 4'hF;
    @(negedge clk);
    sreq.req = 0;
  endtask

  task automatic spm_rd(int line, int word, output logic [31:0] q);
    sreq.req = 1; sreq.we = 0; sreq.addr = 32'((line * 128 + word) * 4); sreq.be = 4'hF;
    @(negedge clk);
    sreq.req = 0;
    q = srsp.rdata;
  endtask

  task automatic put_program(int first_row, prog_t p);
    logic [31:0] q;
    foreach (p[r]) for (int w = 0; w < ROW_WORDS; w++)
      cfg(1, 32'(((first_row + r) * ROW_WORDS + w) * 4), p[r][w*32 +: 32], q);
  endtask

  task automatic load(int first_row, int nrows, int mask, bit run);
    logic [31:0] q;
    cfg(1, CFG_REG_BASE + 4*REG_KROW, first_row, q);
    cfg(1, CFG_REG_BASE + 4*REG_KNROWS, nrows, q);
    cfg(1, CFG_REG_BASE + 4*REG_COLMASK, mask, q);
    cfg(1, CFG_REG_BASE + 4*REG_CMD, run ? 3 : 1, q);
  endtask

  task automatic wait_done();
    logic [31:0] q;
    do cfg(0, CFG_REG_BASE + 4*REG_STATUS, 0, q); while (q[2] == 0);
  endtask

  // ------------------------------------------------------------ data
  // img mirrors every word the host wrote into the scratchpad; expected results are
  // computed from it.
  logic [31:0] img [SPM_LINES][128];
  logic [31:0] q, acc;
  logic [15:0] a16;
  prog_t g32a, g32b, g16a, g16b, sh;

  task automatic wr(int line, int word, logic [31:0] d);
    img[line][word] = d;
    spm_wr(line, word, d);
  endtask

  task automatic params(int line, int a, int b, int nbl, int c, int nal);
    wr(line, 0, a); wr(line, 1, b); wr(line, 2, nbl); wr(line, 3, c); wr(line, 4, 32); wr(line, 5, nal);
  endtask

  // Rows r0..r0+nr-1 of C (4 per line, from line c0) after C += A*B with A from line
  // a0 and B (transposed, 4 columns per line) from line b0; 32 columns, all of them
  // updated when nbl = 8.
  task automatic check_gemm(string what, int a0, int b0, int c0, int nr, bit simd);
    for (int r = 0; r < nr; r++) for (int j = 0; j < 32; j++) begin
      logic [31:0] cin, av, bv;
      cin = img[c0 + r/4][(r%4)*32 + j];
      acc = cin; a16 = cin[15:0];
      for (int k = 0; k < 32; k++) begin
        av = img[a0 + r/4][(r%4)*32 + k];
        bv = img[b0 + j/4][(j%4)*32 + k];
        acc += av * bv;
        a16 += 16'(av * bv) + 16'(av >> 16) * 16'(bv >> 16);
      end
      spm_rd(c0 + r/4, (r%4)*32 + j, q);
      check($sformatf("%s C[%0d][%0d]", what, r, j), q, simd ? {cin[31:16], a16} : acc);
    end
  endtask

  initial begin
    sreq = '0; creq = '0;
    foreach (img[l, w]) img[l][w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Kernels in the global IMEM: one copy per column and precision, each with the
    // line of its own parameters.
    g32a = gemm_program(0, 0);  g32b = gemm_program(57, 0);
    g16a = gemm_program(17, 1); g16b = gemm_program(18, 1);
    sh   = shuffle_program(19);
    put_program(0, g32a); put_program(64, g32b); put_program(128, g16a);
    put_program(192, g16b); put_program(256, sh);

    // ---- run 1: one 32x32x32 block, C += A*B, with the scratchpad map of the
    // paper's GEMM mapping: SRF values line 0, B lines 1.., buffer 0 = A 25..32 and
    // C 33..40, buffer 1 = A 41..48 and C 49..56. Column 0 takes rows 0..15 of C,
    // column 1 rows 16..31 (its parameters in line 57).
    params(0, 25, 1, 8, 33, 4);
    params(57, 29, 1, 8, 37, 4);
    for (int l = 1; l <= 8; l++)   for (int i = 0; i < 128; i++) wr(l, i, $urandom % 512 - 256);
    for (int l = 25; l <= 40; l++) for (int i = 0; i < 128; i++) wr(l, i, $urandom % 512 - 256);

    // dispatch the kernel of column 0, then try to write the global IMEM at once
    load(0, g32a.size(), 1, 0);
    cfg(1, 32'(2500 * 4), 32'h0BAD_F00D, q);
    wait_done();
    load(64, g32b.size(), 2, 0);
    wait_done();
    cfg(1, CFG_REG_BASE + 4*REG_COLMASK, 3, q);
    cfg(1, CFG_REG_BASE + 4*REG_CMD, 2, q);   // run both
    // double buffering: the host fills buffer 1 (and the B lines and parameters of the
    // next, 16-bit, block) while the columns work on buffer 0
    params(17, 41, 9, 8, 49, 4);
    params(18, 45, 9, 8, 53, 4);
    for (int l = 9; l <= 16; l++)  for (int i = 0; i < 128; i++) wr(l, i, $urandom);
    for (int l = 41; l <= 56; l++) for (int i = 0; i < 128; i++) wr(l, i, $urandom);
    wait_done();
    cfg(0, CFG_REG_BASE + 4*REG_CYCLES, 0, q);
    // both columns run the same number of rows (+1 cycle to observe completion)
    check("run 1 cycles", q, gemm_cycles(4, 8, 0) + 1);
    check("irq", 32'(irq), 1);
    check_gemm("32-bit", 25, 1, 33, 32, 0);
    cfg(0, 32'(2500 * 4), 0, q); check("waited gimem write", q, 32'h0BAD_F00D);

    // ---- run 2: SIMD block from buffer 1; column 1 loaded and run alone, then
    // column 0 (loaded earlier) started alone, so that each start is checked.
    load(128, g16a.size(), 1, 0); wait_done();
    load(192, g16b.size(), 2, 1); wait_done();
    cfg(0, CFG_REG_BASE + 4*REG_CYCLES, 0, q);
    check("run 2 column 1 cycles", q, gemm_cycles(4, 8, 1) + 1);
    check_gemm("16-bit col1", 45, 9, 53, 16, 1);
    cfg(1, CFG_REG_BASE + 4*REG_COLMASK, 1, q);
    cfg(1, CFG_REG_BASE + 4*REG_CMD, 2, q);
    wait_done();
    cfg(0, CFG_REG_BASE + 4*REG_CYCLES, 0, q);
    check("run 2 column 0 cycles", q, gemm_cycles(4, 8, 1) + 1);
    check_gemm("16-bit col0", 41, 9, 49, 16, 1);

    // ---- run 3: shuffle / neighbour kernel on column 1. SRF line 19, A 20, B 21,
    // outputs 22..26.
    wr(19, 0, 20); wr(19, 1, 21); wr(19, 2, 22);
    for (int i = 0; i < 128; i++) begin wr(20, i, 32'h00A0_0000 + i); wr(21, i, 32'h00B0_0000 + i); end
    load(256, sh.size(), 2, 1); wait_done();
    cfg(0, CFG_REG_BASE + 4*REG_CYCLES, 0, q);
    check("run 3 cycles", q, sh.size() + 1);
    for (int i = 0; i < 128; i++) begin
      spm_rd(22, i, q); check("even", q, (2*i < 128) ? 32'h00A0_0000 + 2*i : 32'h00B0_0000 + 2*i - 128);
      spm_rd(23, i, q); check("odd", q, (2*i+1 < 128) ? 32'h00A0_0000 + 2*i + 1 : 32'h00B0_0000 + 2*i + 1 - 128);
      spm_rd(24, i, q); check("bitrev", q, 32'h00A0_0000 + 32'({i[0], i[1], i[2], i[3], i[4], i[5], i[6]}));
    end
    spm_rd(26, 32 + 3, q); check("neighbour", q, 32'h00A0_0000 + 3);

    $display("mechanisms: dispatch=%0d bus_wait=%0d ldv=%0d stv=%0d ldsrf=%0d mac=%0d mac16=%0d shuf=%0d left=%0d branch=%0d exit=%0d both_busy=%0d bus_during_run=%0d",
             n_dispatch, n_wait, n_ldv, n_stv, n_ldsrf, n_mac, n_mac16, n_shuf, n_left, n_branch, n_exit, n_both, n_bus_run);
    check("dispatch happened", 32'(n_dispatch > 0), 1);
    check("bus wait happened", 32'(n_wait > 0), 1);
    check("line loads happened", 32'(n_ldv > 0), 1);
    check("line stores happened", 32'(n_stv > 0), 1);
    check("SRF loads happened", 32'(n_ldsrf > 0), 1);
    check("MACs happened", 32'(n_mac > 0), 1);
    check("SIMD MACs happened", 32'(n_mac16 > 0), 1);
    check("shuffles happened", 32'(n_shuf > 0), 1);
    check("neighbour reads happened", 32'(n_left > 0), 1);
    check("loop branches happened", 32'(n_branch > 0), 1);
    check("exits", n_exit, 5);
    check("both columns ran together", 32'(n_both > 0), 1);
    check("bus access during a run", 32'(n_bus_run > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
