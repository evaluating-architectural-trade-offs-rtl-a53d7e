// tb_imem_ctrl: self-checking test of the IMEM controller with its global IMEM.
// Writes a kernel of random rows into the global IMEM over the bus, reads words
// back, dispatches it to column 1 only and checks every row written to the local
// IMEM port, the 5*N+1 cycle dispatch time, the bus wait (gnt low) on a global-IMEM
// access during dispatch, and the run / completion handshake with two model
// columns that stay busy for different times.
module tb_imem_ctrl;
  import disco_pkg::*;
  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  logic [N_COLS-1:0] col_imem_we, col_start, col_busy;
  logic [5:0] col_imem_waddr;
  logic [ROW_W-1:0] col_imem_wrow;
  logic irq;
  int checks = 0, failures = 0;
  logic [ROW_W-1:0] rows [64];
  logic [ROW_W-1:0] got [64];
  int got_mask [64];
  int busy_left [N_COLS];

  imem_ctrl dut (.clk, .rst_n, .obi_req(req), .obi_rsp(rsp), .col_imem_we, .col_imem_waddr,
                 .col_imem_wrow, .col_start, .col_busy, .irq);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model columns: busy for a programmed number of cycles after start
  int col_len [N_COLS] = '{40, 75};
  always_ff @(posedge clk) begin
    for (int c = 0; c < N_COLS; c++) begin
      if (col_start[c]) busy_left[c] <= col_len[c];
      else if (busy_left[c] > 0) busy_left[c] <= busy_left[c] - 1;
    end
    if (col_imem_we != 0) begin
      got[col_imem_waddr] <= col_imem_wrow;
      got_mask[col_imem_waddr] <= int'(col_imem_we);
    end
  end
  always_comb for (int c = 0; c < N_COLS; c++) col_busy[c] = busy_left[c] > 0;

  task automatic check(string what, logic [31:0] got_v, logic [31:0] exp);
    checks++;
    if (got_v !== exp) begin failures++; $display("FAIL %s: %h vs %h", what, got_v, exp); end
  endtask

  task automatic bus(bit wr, logic [31:0] a, logic [31:0] d, output logic [31:0] q, output int waits);
    req.req = 1; req.we = wr; req.addr = a; req.wdata = d; req.be = 4'hF;
    waits = 0;
    #1;
    while (!rsp.gnt) begin waits++; @(negedge clk); #1; end
    @(negedge clk);
    req.req = 0;
    check("rvalid", 32'(rsp.rvalid), 1);
    q = rsp.rdata;
  endtask

  logic [31:0] q;
  int waits, t0, t_last, nwr;
  localparam int KROW = 37, N = 20;

  initial begin
    req = '0;
    foreach (busy_left[c]) busy_left[c] = 0;
    foreach (got_mask[r]) got_mask[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      for (int w = 0; w < 5; w++) rows[r][w*32 +: 32] = $urandom;
      for (int w = 0; w < 5; w++) bus(1, 32'(((KROW + r) * 5 + w) * 4), rows[r][w*32 +: 32], q, waits);
    end
    for (int w = 0; w < 5; w++) begin
      bus(0, 32'(((KROW + 3) * 5 + w) * 4), 0, q, waits);
      check("gimem readback", q, rows[3][w*32 +: 32]);
    end
    bus(1, CFG_REG_BASE + 4*REG_KROW, KROW, q, waits);
    bus(1, CFG_REG_BASE + 4*REG_KNROWS, N, q, waits);
    bus(1, CFG_REG_BASE + 4*REG_COLMASK, 2, q, waits);
    bus(0, CFG_REG_BASE + 4*REG_KNROWS, 0, q, waits);
    check("knrows readback", q, N);
    // load only; then a global-IMEM write must wait for the dispatch to end
    t0 = $time;
    bus(1, CFG_REG_BASE + 4*REG_CMD, 1, q, waits);
    bus(1, 32'((2000) * 4), 32'h5555_AAAA, q, waits);
    checks++; if (waits < 5*N - 2) begin failures++; $display("FAIL bus did not wait during dispatch: %0d", waits); end
    for (int r = 0; r < N; r++) begin
      check($sformatf("row %0d lo", r), got[r][31:0], rows[r][31:0]);
      check($sformatf("row %0d hi", r), got[r][159:128], rows[r][159:128]);
      checks++; if (got[r] !== rows[r]) begin failures++; $display("FAIL row %0d", r); end
      check("mask", got_mask[r], 2);
    end
    bus(0, 32'((2000) * 4), 0, q, waits);
    check("write after wait", q, 32'h5555_AAAA);
    bus(0, CFG_REG_BASE + 4*REG_STATUS, 0, q, waits);
    check("status done after load", q & 7, 4);
    // dispatch time: count cycles with col_imem_we during a second load to both columns
    bus(1, CFG_REG_BASE + 4*REG_COLMASK, 3, q, waits);
    bus(1, CFG_REG_BASE + 4*REG_KNROWS, 4, q, waits);
    req.req = 1; req.we = 1; req.addr = CFG_REG_BASE + 4*REG_CMD; req.wdata = 3; // load + run
    @(negedge clk); req.req = 0;
    t0 = 0; t_last = 0; nwr = 0;
    for (int c = 1; c < 40; c++) begin
      if (col_imem_we != 0) begin nwr++; t_last = c; check("both columns", 32'(col_imem_we), 3); end
      if (col_start != 0 && t0 == 0) begin t0 = c; check("start both", 32'(col_start), 3); end
      @(negedge clk);
    end
    check("rows written", nwr, 4);
    check("last row at 5N+1", t_last, 5*4 + 1);
    // run ends when the longer column ends
    while (!irq) @(negedge clk);
    bus(0, CFG_REG_BASE + 4*REG_CYCLES, 0, q, waits);
    checks++; if (q < 75 || q > 78) begin failures++; $display("FAIL cycles %0d", q); end
    check("both idle at done", 32'(col_busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
