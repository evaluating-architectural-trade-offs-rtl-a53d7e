// tb_vwr: self-checking test of a very wide register: whole-line writes, per-PE
// word writes at the MXCU index, priority of the line write, reset.
module tb_vwr;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0, line_we = 0;
  logic [VWR_W-1:0] line_wdata, q, model;
  logic [IDX_W-1:0] idx = 0;
  logic [N_PE-1:0] word_we = 0;
  logic [31:0] word_wdata [N_PE];
  int checks = 0, failures = 0;

  vwr dut (.clk, .rst_n, .line_we, .line_wdata, .idx, .word_we, .word_wdata, .q);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [VWR_W-1:0] got, logic [VWR_W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    line_wdata = '0;
    foreach (word_wdata[p]) word_wdata[p] = 0;
    repeat (2) @(negedge clk);
    check("reset", q, '0);
    model = '0;
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      line_we = ($urandom % 4 == 0);
      for (int k = 0; k < VWR_W / 32; k++) line_wdata[k*32 +: 32] = $urandom;
      idx = IDX_W'($urandom);
      word_we = N_PE'($urandom);
      foreach (word_wdata[p]) word_wdata[p] = $urandom;
      // reference: line write wins, else word p lands at word p*32+idx
      if (line_we) model = line_wdata;
      else for (int p = 0; p < N_PE; p++)
        if (word_we[p]) model[(p * SLICE_WORDS + int'(idx)) * 32 +: 32] = word_wdata[p];
      @(posedge clk); #1;
      check($sformatf("cycle %0d", n), q, model);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
