// tb_srf: self-checking test of the scalar register file: reset, bulk load,
// single writes from several requesters with lowest-number priority.
module tb_srf;
  import disco_pkg::*;
  localparam int NWR = N_PE + 1;
  logic clk = 0, rst_n = 0, bulk_we = 0;
  logic [31:0] bulk [SRF_DEPTH], q [SRF_DEPTH], model [SRF_DEPTH];
  logic [NWR-1:0] we = 0;
  logic [2:0] idx [NWR];
  logic [31:0] wd [NWR];
  int checks = 0, failures = 0;
  bit taken [SRF_DEPTH];

  srf dut (.clk, .rst_n, .bulk_we, .bulk_wdata(bulk), .we, .idx, .wdata(wd), .q);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string what);
    for (int i = 0; i < SRF_DEPTH; i++) begin
      checks++;
      if (q[i] !== model[i]) begin failures++; $display("FAIL %s entry %0d: %h vs %h", what, i, q[i], model[i]); end
    end
  endtask

  initial begin
    foreach (bulk[i]) bulk[i] = 0;
    foreach (wd[i]) begin wd[i] = 0; idx[i] = 0; end
    foreach (model[i]) model[i] = 0;
    @(negedge clk); cmp("reset");
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      bulk_we = ($urandom % 8 == 0);
      foreach (bulk[i]) bulk[i] = $urandom;
      we = NWR'($urandom);
      foreach (wd[k]) begin wd[k] = $urandom; idx[k] = 3'($urandom); end
      if (bulk_we) model = bulk;
      else begin
        foreach (taken[i]) taken[i] = 0;
        for (int k = 0; k < NWR; k++)
          if (we[k] && !taken[idx[k]]) begin model[idx[k]] = wd[k]; taken[idx[k]] = 1; end
      end
      @(posedge clk); #1;
      cmp($sformatf("cycle %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
