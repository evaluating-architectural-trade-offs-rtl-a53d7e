// tb_pe: self-checking test of one processing element.
// Drives random operands through the VWR inputs and checks every ALU operation,
// the multiply-accumulate into R1, the SIMD lanes, neighbour and SRF operands, SRF
// and VWR destinations and the enable, against a reference model in this file.
module tb_pe;
  import disco_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  pe_instr_t instr;
  logic [31:0] vw [N_VWR];
  logic [31:0] sr [SRF_DEPTH];
  logic [31:0] left, right, out, vwr_wdata, srf_wdata;
  logic vwr_we, srf_we;
  logic [1:0] vwr_sel;
  logic [2:0] srf_idx;
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .en, .instr, .vwr_word(vw), .srf(sr), .left, .right, .out,
          .vwr_we, .vwr_sel, .vwr_wdata, .srf_we, .srf_idx, .srf_wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic pe_instr_t mk(pe_op_e op, pe_dst_e d, pe_src_e a, pe_src_e b, logic [7:0] imm);
    pe_instr_t i;
    i.op = op; i.dst = d; i.srca = a; i.srcb = b; i.imm = imm;
    return i;
  endfunction

  function automatic logic [31:0] model(pe_op_e op, logic [31:0] a, logic [31:0] b, logic [31:0] c);
    logic [15:0] hi, lo;
    case (op)
      PE_ADD: return a + b;
      PE_SUB: return a - b;
      PE_MUL: return a * b;
      PE_MAC: return c + a * b;
      PE_AND: return a & b;
      PE_OR:  return a | b;
      PE_XOR: return a ^ b;
      PE_SLL: return a << (b % 32);
      PE_SRL: return a >> (b % 32);
      PE_SRA: return $unsigned($signed(a) >>> (b % 32));
      PE_MOV: return a;
      PE_ADD16: begin hi = a[31:16] + b[31:16]; lo = a[15:0] + b[15:0]; return {hi, lo}; end
      PE_SUB16: begin hi = a[31:16] - b[31:16]; lo = a[15:0] - b[15:0]; return {hi, lo}; end
      PE_MUL16: begin hi = 16'(a[31:16] * b[31:16]); lo = 16'(a[15:0] * b[15:0]); return {hi, lo}; end
      PE_MAC16: begin hi = 16'(c[31:16] + a[31:16] * b[31:16]); lo = 16'(c[15:0] + a[15:0] * b[15:0]); return {hi, lo}; end
      default: return 0;
    endcase
  endfunction

  logic [31:0] r1_model, exp;
  pe_op_e op;

  initial begin
    instr = mk(PE_NOP, DST_NONE, SRC_ZERO, SRC_ZERO, 0);
    foreach (vw[i]) vw[i] = 0;
    foreach (sr[i]) sr[i] = 32'h100 + i;
    left = 32'hAAAA_0001; right = 32'hBBBB_0002;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;

    // immediate into R1 (sign extension)
    instr = mk(PE_MOV, DST_R1, SRC_IMM, SRC_ZERO, 8'hFE);
    @(negedge clk);
    check("mov imm out", out, 32'hFFFF_FFFE);
    r1_model = 32'hFFFF_FFFE;

    // random ALU operations: a = VWR A word, b = VWR B word, destination R1
    for (int n = 0; n < 600; n++) begin
      op = pe_op_e'(1 + ($urandom % 15));
      vw[0] = $urandom; vw[1] = $urandom; vw[2] = $urandom;
      if (n % 3 == 0) vw[1] = $urandom % 40;
      instr = mk(op, DST_R1, SRC_VWRA, SRC_VWRB, 0);
      exp = model(op, vw[0], vw[1], r1_model);
      #1 check("vwr_wdata comb", vwr_wdata, exp);
      @(negedge clk);
      check($sformatf("op %s", op.name()), out, exp);
      r1_model = exp;
    end

    // R1 holds the last result: MOV out <- R1
    instr = mk(PE_MOV, DST_NONE, SRC_R1, SRC_ZERO, 0);
    @(negedge clk);
    check("R1 readback", out, r1_model);

    // MAC R0, R1, VA as in the GEMM inner loop
    instr = mk(PE_MOV, DST_R0, SRC_ZERO, SRC_ZERO, 0); @(negedge clk);
    instr = mk(PE_MOV, DST_R1, SRC_IMM, SRC_ZERO, 8'd7); @(negedge clk);
    exp = 0;
    for (int k = 0; k < 32; k++) begin
      vw[0] = k + 1;
      instr = mk(PE_MAC, DST_R0, SRC_R1, SRC_VWRA, 0);
      exp += 7 * (k + 1);
      @(negedge clk);
    end
    check("MAC dot product", out, exp);

    // neighbour operands
    instr = mk(PE_ADD, DST_NONE, SRC_LEFT, SRC_RIGHT, 0); @(negedge clk);
    check("left+right", out, 32'hAAAA_0001 + 32'hBBBB_0002);

    // SRF source and destination
    instr = mk(PE_ADD, DST_SRF, SRC_SRF, SRC_OWN, 8'd5);
    exp = sr[5] + out;
    #1;
    check("srf we", 32'(srf_we), 1); check("srf idx", 32'(srf_idx), 5); check("srf wdata", srf_wdata, exp);
    @(negedge clk);

    // VWR C destination with MAC accumulating into the VWR word
    vw[2] = 1000; vw[0] = 3; vw[1] = 4;
    instr = mk(PE_MAC, DST_VWRC, SRC_VWRA, SRC_VWRB, 0);
    #1;
    check("vwr we", 32'(vwr_we), 1); check("vwr sel", 32'(vwr_sel), 2); check("vwr mac", vwr_wdata, 1012);
    @(negedge clk);

    // disabled PE does not change state
    en = 0;
    exp = out;
    instr = mk(PE_ADD, DST_R0, SRC_IMM, SRC_IMM, 8'd1);
    #1 check("no vwr we when disabled", 32'(vwr_we | srf_we), 0);
    @(negedge clk);
    check("hold when disabled", out, exp);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
