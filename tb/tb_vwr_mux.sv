// tb_vwr_mux: self-checking test of the PE operand multiplexer: for random slices
// and every index, each output must be the indexed 32-bit word of its VWR slice.
module tb_vwr_mux;
  import disco_pkg::*;
  logic [SLICE_W-1:0] sl [N_VWR];
  logic [IDX_W-1:0] idx;
  logic [31:0] word [N_VWR];
  logic [31:0] words [N_VWR][SLICE_WORDS];
  int checks = 0, failures = 0;

  vwr_mux dut (.slice_in(sl), .idx, .word);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++) begin
      for (int v = 0; v < N_VWR; v++)
        for (int w = 0; w < SLICE_WORDS; w++) begin
          words[v][w] = $urandom;
          sl[v][w*32 +: 32] = words[v][w];
        end
      for (int i = 0; i < SLICE_WORDS; i++) begin
        idx = IDX_W'(i);
        #1;
        for (int v = 0; v < N_VWR; v++) begin
          checks++;
          if (word[v] !== words[v][i]) begin
            failures++;
            $display("FAIL vwr %0d idx %0d: %h vs %h", v, i, word[v], words[v][i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
