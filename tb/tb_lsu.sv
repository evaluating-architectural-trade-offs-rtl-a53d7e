// tb_lsu: self-checking test of the load-store unit: pointer set/add/SRF read,
// load and store strobes with post-increment of the line pointer, SRF bulk load,
// shuffle strobes, and no effect when the column is not running.
module tb_lsu;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  lsu_instr_t instr;
  logic [31:0] sr [SRF_DEPTH];
  logic [LINE_AW-1:0] spm_addr;
  logic spm_we, vwr_from_shuf, srf_bulk_we;
  logic [1:0] st_sel;
  logic [N_VWR-1:0] vwr_line_we;
  logic [2:0] shuf_mode;
  int checks = 0, failures = 0;
  int rm [4];

  lsu dut (.clk, .rst_n, .en, .instr, .srf(sr), .spm_addr, .spm_we, .st_sel,
           .vwr_line_we, .vwr_from_shuf, .shuf_mode, .srf_bulk_we);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  function automatic lsu_instr_t mk(lsu_op_e op, int vwr, int rd, int rs, int imm);
    lsu_instr_t i;
    i.op = op; i.vwr = 2'(vwr); i.rd = 2'(rd); i.rs = 2'(rs); i.imm = 10'(imm);
    return i;
  endfunction

  // Execute one instruction; check the combinational strobes before the edge.
  task automatic exec(lsu_instr_t i, int exp_addr, int exp_we, int exp_line, int exp_shuf, int exp_bulk);
    instr = i; #1;
    if (exp_addr >= 0) check("spm_addr", int'(spm_addr), exp_addr);
    check("spm_we", int'(spm_we), exp_we);
    check("vwr_line_we", int'(vwr_line_we), exp_line);
    check("from_shuf", int'(vwr_from_shuf), exp_shuf);
    check("srf_bulk", int'(srf_bulk_we), exp_bulk);
    @(negedge clk);
  endtask

  initial begin
    foreach (sr[i]) sr[i] = 32'(10 * i + 1);
    instr = mk(LSU_NOP, 0, 0, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    exec(mk(LSU_SETR, 0, 1, 0, 25), -1, 0, 0, 0, 0);       // R1 = 25
    exec(mk(LSU_RSRF, 0, 2, 0, 3), -1, 0, 0, 0, 0);        // R2 = SRF[3] = 31
    exec(mk(LSU_ADDI, 0, 3, 1, -5), -1, 0, 0, 0, 0);       // R3 = R1 - 5 = 20
    exec(mk(LSU_LDV, 1, 0, 1, 1), 25, 0, 3'b010, 0, 0);   // VWR B <- SPM[25]; R1 = 26
    exec(mk(LSU_LDV, 0, 0, 1, 1), 26, 0, 3'b001, 0, 0);   // VWR A <- SPM[26]; R1 = 27
    exec(mk(LSU_STV, 2, 0, 2, -1), 31, 1, 0, 0, 0);       // SPM[31] <- VWR C; R2 = 30
    check("st_sel", int'(st_sel), 2);
    exec(mk(LSU_STV, 2, 0, 2, 0), 30, 1, 0, 0, 0);        // post-decrement took effect
    exec(mk(LSU_LDSRF, 0, 0, 0, 0), 0, 0, 0, 0, 1);       // SRF <- SPM[0]
    exec(mk(LSU_SHUF, 2, 0, 0, 4), -1, 0, 3'b100, 1, 0);   // VWR C <- bitrev
    check("shuf_mode", int'(shuf_mode), 4);
    exec(mk(LSU_ADD, 0, 3, 1, 0), -1, 0, 0, 0, 0);         // R3 = 20 + 27 = 47 -> line 47
    exec(mk(LSU_LDV, 2, 0, 3, 0), 47, 0, 3'b100, 0, 0);
    // random pointer arithmetic against a model
    rm[0] = 0; rm[1] = 27; rm[2] = 30; rm[3] = 47;
    for (int n = 0; n < 200; n++) begin
      int rd, rs, imm;
      rd = $urandom % 4; rs = $urandom % 4; imm = int'($urandom % 21) - 10;
      case ($urandom % 3)
        0: begin exec(mk(LSU_LDV, 0, rd, rs, imm), ((rm[rs] % 64) + 64) % 64, 0, 1, 0, 0); rm[rs] += imm; end
        1: begin exec(mk(LSU_ADDI, 0, rd, rs, imm), -1, 0, 0, 0, 0) ; rm[rd] = rm[rs] + imm; end
        default: begin exec(mk(LSU_STV, 1, rd, rs, imm), ((rm[rs] % 64) + 64) % 64, 1, 0, 0, 0); rm[rs] += imm; end
      endcase
    end
    // disabled: no strobes
    en = 0;
    exec(mk(LSU_LDV, 0, 0, 0, 1), ((rm[0] % 64) + 64) % 64, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
