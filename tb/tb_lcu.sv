// tb_lcu: self-checking test of the loop-control unit: a counted DBNZ loop
// (branch taken count-1 times), compare branches, jump, exit and SRF loads.
module tb_lcu;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  lcu_instr_t instr;
  logic [31:0] sr [SRF_DEPTH];
  logic br_taken, exit_o;
  logic [5:0] br_target;
  int checks = 0, failures = 0;
  int taken;

  lcu dut (.clk, .rst_n, .en, .instr, .srf(sr), .br_taken, .br_target, .exit_o);

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

  function automatic lcu_instr_t mk(lcu_op_e op, int rd, int rs, int tgt, int imm);
    lcu_instr_t i;
    i.op = op; i.rd = 2'(rd); i.rs = 2'(rs); i.tgt = 6'(tgt); i.imm = 10'(imm);
    return i;
  endfunction

  initial begin
    foreach (sr[i]) sr[i] = 32'(i * 3);
    instr = mk(LCU_NOP, 0, 0, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    // loop of 32 iterations: R0 = SRF[...]: use SETR
    instr = mk(LCU_SETR, 0, 0, 0, 32); #1 check("setr no branch", int'(br_taken), 0); @(negedge clk);
    taken = 0;
    for (int n = 0; n < 32; n++) begin
      instr = mk(LCU_DBNZ, 0, 0, 13, 0); #1;
      if (br_taken) begin taken++; check("target", int'(br_target), 13); end
      @(negedge clk);
    end
    check("DBNZ taken 31 of 32", taken, 31);
    instr = mk(LCU_RSRF, 1, 0, 0, 5); @(negedge clk);      // R1 = 15
    instr = mk(LCU_ADDI, 2, 1, 0, -3); @(negedge clk);     // R2 = 12
    instr = mk(LCU_SETR, 3, 0, 0, 12); @(negedge clk);     // R3 = 12
    instr = mk(LCU_BEQ, 2, 3, 9, 0); #1 check("beq taken", int'(br_taken), 1);
    instr = mk(LCU_BNE, 2, 3, 9, 0); #1 check("bne not taken", int'(br_taken), 0);
    instr = mk(LCU_BNE, 1, 3, 9, 0); #1 check("bne taken", int'(br_taken), 1);
    instr = mk(LCU_BLT, 3, 1, 9, 0); #1 check("blt 12<15", int'(br_taken), 1);
    instr = mk(LCU_BLT, 1, 3, 9, 0); #1 check("blt 15<12", int'(br_taken), 0);
    instr = mk(LCU_SETR, 0, 0, 0, -1); @(negedge clk);     // R0 = -1
    instr = mk(LCU_BLT, 0, 3, 9, 0); #1 check("blt signed", int'(br_taken), 1);
    instr = mk(LCU_JMP, 0, 0, 44, 0); #1 check("jmp", int'(br_taken), 1); check("jmp tgt", int'(br_target), 44);
    instr = mk(LCU_EXIT, 0, 0, 0, 0); #1 check("exit", int'(exit_o), 1); check("exit no br", int'(br_taken), 0);
    en = 0; #1 check("exit gated", int'(exit_o), 0);
    instr = mk(LCU_JMP, 0, 0, 44, 0); #1 check("jmp gated", int'(br_taken), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
