// tb_shuffle_unit: self-checking test of the shuffle unit. Words are numbered so
// that each pattern's expected placement can be computed index by index here:
// even/odd split of {A,B}, interleave of the halves, bit reversal, and that an
// EVEN/ODD split followed by ILV_LO/ILV_HI restores the original order.
module tb_shuffle_unit;
  import disco_pkg::*;
  localparam int N = VWR_W / 32;
  logic [VWR_W-1:0] a, b, y;
  logic [2:0] mode;
  int checks = 0, failures = 0;

  shuffle_unit dut (.a, .b, .mode, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rev7(int i);
    int r = 0;
    for (int k = 0; k < $clog2(N); k++) if (i & (1 << k)) r |= 1 << ($clog2(N) - 1 - k);
    return r;
  endfunction

  task automatic chk(string what, int i, logic [31:0] exp);
    checks++;
    if (y[i*32 +: 32] !== exp) begin
      failures++;
      $display("FAIL %s word %0d: %h vs %h", what, i, y[i*32 +: 32], exp);
    end
  endtask

  logic [VWR_W-1:0] ev, od;

  initial begin
    for (int i = 0; i < N; i++) begin
      a[i*32 +: 32] = 32'h0A00_0000 + i;   // A word i
      b[i*32 +: 32] = 32'h0B00_0000 + i;   // B word i
    end
    mode = SHUF_EVEN; #1;
    for (int i = 0; i < N; i++) chk("even", i, (2*i < N) ? 32'h0A00_0000 + 2*i : 32'h0B00_0000 + 2*i - N);
    ev = y;
    mode = SHUF_ODD; #1;
    for (int i = 0; i < N; i++) chk("odd", i, (2*i+1 < N) ? 32'h0A00_0000 + 2*i+1 : 32'h0B00_0000 + 2*i+1 - N);
    od = y;
    mode = SHUF_ILV_LO; #1;
    for (int i = 0; i < N; i++) chk("ilv_lo", i, (i % 2 == 0) ? 32'h0A00_0000 + i/2 : 32'h0B00_0000 + i/2);
    mode = SHUF_ILV_HI; #1;
    for (int i = 0; i < N; i++) chk("ilv_hi", i, (i % 2 == 0) ? 32'h0A00_0000 + N/2 + i/2 : 32'h0B00_0000 + N/2 + i/2);
    mode = SHUF_BITREV; #1;
    for (int i = 0; i < N; i++) chk("bitrev", i, 32'h0A00_0000 + rev7(i));
    mode = 3'd7; #1;
    for (int i = 0; i < N; i++) chk("default", i, 32'h0A00_0000 + i);
    // round trip: interleaving the even and odd parts restores {A,B}
    a = ev; b = od; mode = SHUF_ILV_LO; #1;
    for (int i = 0; i < N; i++) chk("roundtrip lo", i, 32'h0A00_0000 + i);
    mode = SHUF_ILV_HI; #1;
    for (int i = 0; i < N; i++) chk("roundtrip hi", i, 32'h0B00_0000 + i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
