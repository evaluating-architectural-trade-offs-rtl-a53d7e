// tb_disco_pc: self-checking test of the column program counter: start, sequential
// advance, taken branches, exit and the done pulse, and that start is ignored
// while running.
module tb_disco_pc;
  logic clk = 0, rst_n = 0, start = 0, br_taken = 0, exit_i = 0;
  logic [5:0] br_target = 0, pc;
  logic running, done;
  int checks = 0, failures = 0;

  disco_pc #(.PC_W(6)) dut (.clk, .rst_n, .start, .br_taken, .br_target, .exit_i, .pc, .running, .done);

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

  int exp_pc;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("idle", int'(running), 0);
    start = 1; @(negedge clk); start = 0;
    check("running", int'(running), 1); check("pc0", int'(pc), 0);
    exp_pc = 0;
    for (int n = 0; n < 100; n++) begin
      br_taken = ($urandom % 3 == 0); br_target = 6'($urandom);
      start = ($urandom % 5 == 0);  // must be ignored
      exp_pc = br_taken ? int'(br_target) : (exp_pc + 1) % 64;
      @(negedge clk);
      check("pc", int'(pc), exp_pc);
      check("still running", int'(running), 1);
    end
    br_taken = 0; start = 0;
    exit_i = 1; @(negedge clk); exit_i = 0;
    check("stopped", int'(running), 0); check("done pulse", int'(done), 1);
    @(negedge clk);
    check("done one cycle", int'(done), 0);
    // exit while idle does nothing
    exit_i = 1; @(negedge clk); exit_i = 0;
    check("no done while idle", int'(done), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
