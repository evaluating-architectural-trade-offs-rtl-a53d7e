// tb_local_imem: self-checking test of a local instruction memory: write every
// row, read them back in random order through the asynchronous port.
module tb_local_imem;
  localparam int D = 64, W = 24;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata, model [D];
  int checks = 0, failures = 0;

  local_imem #(.DEPTH(D), .WIDTH(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      raddr = 6'($urandom); #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL row %0d", raddr); end
    end
    // a write with we low changes nothing
    waddr = 3; wdata = ~model[3]; @(negedge clk);
    raddr = 3; #1; checks++;
    if (rdata !== model[3]) begin failures++; $display("FAIL write without we"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
