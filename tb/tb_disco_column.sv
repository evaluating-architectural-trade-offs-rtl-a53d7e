// tb_disco_column: self-checking test of one column with a scratchpad model.
// Loads programs through the IMEM write port, then runs:
//   1. the 32-bit GEMM kernel C(8x8) += A(8x32) * B(32x8) (two lines of A, two of B),
//   2. a second GEMM that takes the first one's result lines as its A operand, as in a
//      chain of two products (2mm): E(8x8) += D(8x32) * F(32x8), D being the C above,
//   3. the SIMD GEMM kernel on 2x16-bit packed data (K = 64),
//   4. the shuffle / neighbour kernel,
// and checks the results in the scratchpad against products and permutations
// computed here, and each kernel's cycle count against its row count.
module tb_disco_column;
  import disco_pkg::*;
  import disco_asm_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, imem_we = 0;
  logic [5:0] imem_waddr = 0;
  logic [ROW_W-1:0] imem_wrow = '0;
  logic [LINE_AW-1:0] spm_addr;
  logic spm_we, busy, done;
  logic [VWR_W-1:0] spm_wdata, spm_rdata;
  logic [VWR_W-1:0] mem [SPM_LINES];
  int checks = 0, failures = 0;

  disco_column dut (.clk, .rst_n, .start, .imem_we, .imem_waddr, .imem_wrow,
                    .spm_addr, .spm_we, .spm_wdata, .spm_rdata, .busy, .done);

  assign spm_rdata = mem[spm_addr];
  always_ff @(posedge clk) if (spm_we) mem[spm_addr] <= spm_wdata;

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  function automatic logic [31:0] w(int line, int word);
    return mem[line][word*32 +: 32];
  endfunction

  task automatic setw(int line, int word, logic [31:0] v);
    mem[line][word*32 +: 32] = v;
  endtask

  task automatic run(prog_t p, output int cyc);
    @(negedge clk);
    foreach (p[i]) begin
      imem_we = 1; imem_waddr = 6'(i); imem_wrow = p[i];
      @(negedge clk);
    end
    imem_we = 0;
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin cyc++; @(negedge clk); end
  endtask

  logic [31:0] cin [2][128];
  int cyc;
  logic [31:0] acc;
  logic [15:0] a16;
  logic [VWR_W-1:0] ilv;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---------------- 32-bit GEMM, C(8x8) += A(8x32) * B(32x8):
    // SRF line 0, A lines 1..2, B lines 3..4 (B transposed), C lines 5..6
    setw(0, 0, 1); setw(0, 1, 3); setw(0, 2, 2); setw(0, 3, 5); setw(0, 4, 32); setw(0, 5, 2);
    for (int l = 1; l <= 6; l++) for (int i = 0; i < 128; i++) setw(l, i, $urandom % 2000 - 1000);
    for (int l = 0; l < 2; l++) for (int i = 0; i < 128; i++) cin[l][i] = w(5 + l, i);
    run(gemm_program(0, 0), cyc);
    check("gemm cycles", cyc, gemm_cycles(2, 2, 0));
    for (int r = 0; r < 8; r++) for (int j = 0; j < 32; j++) begin
      // row r of A: line 1 + r/4, slice r%4; column j of B: line 3 + j/4, slice j%4
      acc = cin[r/4][(r%4)*32 + j];
      if (j < 8)
        for (int k = 0; k < 32; k++) acc += w(1 + r/4, (r%4)*32 + k) * w(3 + j/4, (j%4)*32 + k);
      check($sformatf("C[%0d][%0d]", r, j), w(5 + r/4, (r%4)*32 + j), acc);
    end

    // ---------------- chained product: D = lines 5..6 (the result above) used as A,
    // SRF line 11, F lines 7..8 (transposed), E lines 9..10 starting at zero
    setw(11, 0, 5); setw(11, 1, 7); setw(11, 2, 2); setw(11, 3, 9); setw(11, 4, 32); setw(11, 5, 2);
    for (int l = 7; l <= 8; l++) for (int i = 0; i < 128; i++) setw(l, i, $urandom % 2000 - 1000);
    for (int l = 9; l <= 10; l++) for (int i = 0; i < 128; i++) setw(l, i, 0);
    run(gemm_program(11, 0), cyc);
    check("2mm cycles", cyc, gemm_cycles(2, 2, 0));
    for (int r = 0; r < 8; r++) for (int j = 0; j < 32; j++) begin
      acc = 0;
      if (j < 8)
        for (int k = 0; k < 32; k++) acc += w(5 + r/4, (r%4)*32 + k) * w(7 + j/4, (j%4)*32 + k);
      check($sformatf("E[%0d][%0d]", r, j), w(9 + r/4, (r%4)*32 + j), acc);
    end

    // ---------------- SIMD GEMM, C(4x4) += A(4x64) * B(64x4) on 2x16-bit words:
    // SRF line 20, A line 21, B line 22, C line 23
    setw(20, 0, 21); setw(20, 1, 22); setw(20, 2, 1); setw(20, 3, 23); setw(20, 4, 32); setw(20, 5, 1);
    for (int l = 21; l <= 23; l++) for (int i = 0; i < 128; i++) setw(l, i, $urandom);
    for (int i = 0; i < 128; i++) cin[0][i] = w(23, i);
    run(gemm_program(20, 1), cyc);
    check("simd gemm cycles", cyc, gemm_cycles(1, 1, 1));
    for (int p = 0; p < 4; p++) for (int j = 0; j < 4; j++) begin
      a16 = cin[0][p*32 + j][15:0];
      for (int k = 0; k < 32; k++) begin
        a16 += 16'(w(21, p*32 + k) * w(22, j*32 + k));                        // low lanes
        a16 += 16'(w(21, p*32 + k) >> 16) * 16'(w(22, j*32 + k) >> 16);       // high lanes
      end
      check($sformatf("C16[%0d][%0d]", p, j), w(23, p*32 + j), {cin[0][p*32 + j][31:16], a16});
    end

    // ---------------- shuffle kernel: SRF line 40, A 41, B 42, outputs 43..47
    setw(40, 0, 41); setw(40, 1, 42); setw(40, 2, 43);
    for (int i = 0; i < 128; i++) begin setw(41, i, 32'hA000 + i); setw(42, i, 32'hB000 + i); end
    run(shuffle_program(40), cyc);
    check("shuffle cycles", cyc, shuffle_program(40).size());
    for (int i = 0; i < 128; i++) begin
      check("even", w(43, i), (2*i < 128) ? 32'hA000 + 2*i : 32'hB000 + 2*i - 128);
      check("odd", w(44, i), (2*i+1 < 128) ? 32'hA000 + 2*i + 1 : 32'hB000 + 2*i + 1 - 128);
      check("bitrev", w(45, i), 32'hA000 + {i[0], i[1], i[2], i[3], i[4], i[5], i[6]});
      ilv[i*32 +: 32] = (i % 2 == 0) ? 32'hA000 + i/2 : 32'hB000 + i/2;
      check("ilv_lo", w(46, i), ilv[i*32 +: 32]);
    end
    for (int i = 0; i < 128; i++) begin
      logic [31:0] e;
      e = ilv[i*32 +: 32];
      if (i % 32 == 3) e = 0;
      if (i == 32 + 3) e = 32'hA000 + 3;
      check("neighbour", w(47, i), e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
