// shuffle_unit: single-cycle word permutation between very wide registers.
//
// The unit takes VWR A and VWR B of a column (N words each) and produces one
// N-word line in one of the patterns of a radix-2 Cooley-Tukey FFT: the even-indexed
// or odd-indexed words of the concatenation {A, B} (the decimation split of a
// butterfly stage), the interleaving of the low or high halves of A and B (its
// inverse), and the bit-reversed order of A. The LSU writes the result into a VWR.
// The paper states only that the unit performs the butterfly data pattern in one
// cycle; the pattern set and encoding (shuf_mode_e) are this design's own. An
// unused mode returns A unchanged.
//
// Purely combinational: a fixed wiring selected by `mode`.
module shuffle_unit
  import disco_pkg::*;
#(
  parameter int unsigned W  = VWR_W,
  parameter int unsigned WW = WORD_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [2:0]   mode,
  output logic [W-1:0] y
);

  localparam int unsigned N  = W / WW;   // words per VWR
  localparam int unsigned HN = N / 2;
  localparam int unsigned LB = $clog2(N);

  logic [2*W-1:0] ab;
  assign ab = {b, a};  // word i of A is word i of ab, word i of B is word N+i

  function automatic int unsigned bitrev(int unsigned i);
    int unsigned r = 0;
    for (int k = 0; k < LB; k++)
      if (((i >> k) & 1) != 0) r |= 1 << (LB - 1 - k);
    return r;
  endfunction

  always_comb begin
    y = a;
    case (mode)
      SHUF_EVEN:   for (int i = 0; i < N; i++) y[i*WW +: WW] = ab[(2*i)*WW +: WW];
      SHUF_ODD:    for (int i = 0; i < N; i++) y[i*WW +: WW] = ab[(2*i+1)*WW +: WW];
      SHUF_ILV_LO: for (int i = 0; i < HN; i++) begin
                     y[(2*i)*WW +: WW]   = a[i*WW +: WW];
                     y[(2*i+1)*WW +: WW] = b[i*WW +: WW];
                   end
      SHUF_ILV_HI: for (int i = 0; i < HN; i++) begin
                     y[(2*i)*WW +: WW]   = a[(HN+i)*WW +: WW];
                     y[(2*i+1)*WW +: WW] = b[(HN+i)*WW +: WW];
                   end
      SHUF_BITREV: for (int i = 0; i < N; i++) y[i*WW +: WW] = a[bitrev(i)*WW +: WW];
      default:     y = a;
    endcase
  end

endmodule
