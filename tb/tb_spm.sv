// tb_spm: self-checking test of the shared scratchpad: OBI word writes with byte
// enables and reads with one-cycle rvalid, whole-line writes and combinational reads
// on both wide ports, and the write order (bus last) on a collision.
module tb_spm;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  logic [LINE_AW-1:0] addr [N_COLS];
  logic [N_COLS-1:0] we = 0;
  logic [VWR_W-1:0] wdata [N_COLS], rdata [N_COLS];
  logic [VWR_W-1:0] model [SPM_LINES];
  int checks = 0, failures = 0;

  spm dut (.clk, .rst_n, .obi_req(req), .obi_rsp(rsp), .addr, .we, .wdata, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  task automatic bus(bit wr, int line, int word, logic [31:0] d, logic [3:0] be, output logic [31:0] q);
    req.req = 1; req.we = wr; req.addr = 32'((line * 128 + word) * 4); req.wdata = d; req.be = be;
    #1 check("gnt", 32'(rsp.gnt), 1);
    @(negedge clk);
    req.req = 0;
    check("rvalid", 32'(rsp.rvalid), 1);
    q = rsp.rdata;
  endtask

  logic [31:0] q, old;
  int l, wd;

  initial begin
    req = '0;
    foreach (addr[p]) begin addr[p] = 0; wdata[p] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill every line through the wide ports
    for (int i = 0; i < SPM_LINES; i++) begin
      for (int p = 0; p < N_COLS; p++) begin
        addr[p] = LINE_AW'(i);
        for (int k = 0; k < 128; k++) wdata[p][k*32 +: 32] = $urandom;
      end
      we = 2'b01; model[i] = wdata[0];
      @(negedge clk);
    end
    we = 0;
    // combinational read on both ports
    for (int n = 0; n < 50; n++) begin
      addr[0] = LINE_AW'($urandom); addr[1] = LINE_AW'($urandom); #1;
      checks++; if (rdata[0] !== model[addr[0]]) begin failures++; $display("FAIL port0 read"); end
      checks++; if (rdata[1] !== model[addr[1]]) begin failures++; $display("FAIL port1 read"); end
      @(negedge clk);
    end
    // bus writes with byte enables, bus reads
    for (int n = 0; n < 200; n++) begin
      logic [3:0] be;
      logic [31:0] d;
      l = $urandom % SPM_LINES; wd = $urandom % 128; be = 4'($urandom); d = $urandom;
      old = model[l][wd*32 +: 32];
      for (int k = 0; k < 4; k++) if (be[k]) model[l][wd*32 + k*8 +: 8] = d[k*8 +: 8];
      bus(1, l, wd, d, be, q);
      bus(0, l, wd, 0, 4'hF, q);
      check("bus read", q, model[l][wd*32 +: 32]);
    end
    // port 1 line write visible on the bus
    addr[1] = 6'd9; wdata[1] = {128{32'h1234_5678}}; we = 2'b10; @(negedge clk); we = 0;
    bus(0, 9, 77, 0, 4'hF, q); check("port1 write", q, 32'h1234_5678);
    // collision: port 0 writes line 5 and the bus writes word 2 of line 5 in one cycle
    addr[0] = 6'd5; wdata[0] = '0; we = 2'b01;
    req.req = 1; req.we = 1; req.addr = 32'((5 * 128 + 2) * 4); req.wdata = 32'hCAFE_F00D; req.be = 4'hF;
    @(negedge clk); we = 0; req.req = 0;
    bus(0, 5, 2, 0, 4'hF, q); check("bus wins", q, 32'hCAFE_F00D);
    bus(0, 5, 3, 0, 4'hF, q); check("line written", q, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
