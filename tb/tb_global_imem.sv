// tb_global_imem: self-checking test of the global IMEM SRAM model: writes, one
// cycle read latency, no access when en is low.
module tb_global_imem;
  localparam int WORDS = 2560;
  logic clk = 0, en = 0, we = 0;
  logic [11:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [int];
  int checks = 0, failures = 0;
  int a;

  global_imem #(.WORDS(WORDS)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      a = $urandom % WORDS;
      en = 1; we = 1; addr = 12'(a); wdata = $urandom; model[a] = wdata;
    end
    foreach (model[k]) begin
      @(negedge clk);
      en = 1; we = 0; addr = 12'(k);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[k]) begin failures++; $display("FAIL word %0d", k); end
    end
    // en low: a write request is ignored and rdata holds
    @(negedge clk);
    a = int'(addr);
    en = 0; we = 1; wdata = ~model[a];
    @(negedge clk);
    checks++;
    if (rdata !== model[a]) begin failures++; $display("FAIL rdata changed with en low"); end
    en = 1; we = 0; @(posedge clk); #1;
    checks++;
    if (rdata !== model[a]) begin failures++; $display("FAIL write with en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
