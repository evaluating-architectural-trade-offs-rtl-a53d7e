// tb_mxcu: self-checking test of the multiplexer-control unit: index set/add with
// wrap-around, index from a register, register arithmetic, SRF read and write.
module tb_mxcu;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  mx_instr_t instr;
  logic [31:0] sr [SRF_DEPTH];
  logic [IDX_W-1:0] idx;
  logic srf_we;
  logic [2:0] srf_idx;
  logic [31:0] srf_wdata;
  int checks = 0, failures = 0;
  int ei, rm [4];

  mxcu dut (.clk, .rst_n, .en, .instr, .srf(sr), .idx, .srf_we, .srf_idx, .srf_wdata);

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

  function automatic mx_instr_t mk(mx_op_e op, int rd, int rs, int imm);
    mx_instr_t i;
    i.op = op; i.rd = 2'(rd); i.rs = 2'(rs); i.imm = 12'(imm);
    return i;
  endfunction

  task automatic exec(mx_instr_t i);
    instr = i; @(negedge clk);
  endtask

  initial begin
    foreach (sr[i]) sr[i] = 32'(100 + i);
    instr = mk(MX_NOP, 0, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    check("reset idx", int'(idx), 0);
    exec(mk(MX_SETIDX, 0, 0, 7));  check("setidx", int'(idx), 7);
    ei = 7;
    for (int n = 0; n < 100; n++) begin
      int d;
      d = $urandom % 41;
      instr = mk(MX_ADDIDX, 0, 0, d);
      #1 check("idx holds until edge", int'(idx), ei);
      @(negedge clk);
      ei = (ei + d) % 32;
      check("addidx wrap", int'(idx), ei);
    end
    exec(mk(MX_RSRF, 2, 0, 6));     // R2 = 106
    exec(mk(MX_SETR, 1, 0, 5));     // R1 = 5
    exec(mk(MX_ADD, 2, 1, 0));      // R2 = 111
    exec(mk(MX_ADDI, 3, 2, -11));   // R3 = 100
    exec(mk(MX_IDXR, 0, 3, 0));     // idx = 100 % 32 = 4
    check("idxr", int'(idx), 4);
    exec(mk(MX_ADDI, 3, 3, 60));    // R3 = 160
    exec(mk(MX_IDXR, 0, 3, 0));     // idx = 160 % 32 = 0
    check("idxr wrap", int'(idx), 0);
    instr = mk(MX_WSRF, 0, 2, 5); #1;
    check("wsrf we", int'(srf_we), 1); check("wsrf idx", int'(srf_idx), 5); check("wsrf data", int'(srf_wdata), 111);
    @(negedge clk);
    en = 0;
    instr = mk(MX_WSRF, 0, 2, 5); #1;
    check("no write when disabled", int'(srf_we), 0);
    instr = mk(MX_SETIDX, 0, 0, 9); @(negedge clk);
    check("idx held when disabled", int'(idx), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
