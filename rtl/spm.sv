// spm: shared scratchpad memory of DISCO-CGRA.
//
// LINES lines of LINE_W bits (64 x 4096 bits = 32 KiB by default). Each column has
// one wide port that reads or writes a whole line, so a very wide register is filled
// or stored in a single cycle. A 32-bit OBI slave port connects the memory to the
// system bus, through which the host (or a DMA) fills input tiles and collects
// results while the columns work on the other buffer (double buffering). The paper
// gives the line width and the single-cycle VWR transfer; the line count comes from
// the paper's SPM map and SRAM budget. Modelling the memory as a flip-flop array with
// combinational wide reads is this design's own simplification of the SRAM.
//
// OBI port: every request is granted in the cycle it is made; rvalid (with rdata for a
// read) follows one cycle later. Byte address bits [1:0] are ignored, byte enables
// are honoured. Word w of line l sits at byte address (l * LINE_W/32 + w) * 4.
// Write order within a cycle: wide port 0, wide port 1, then the bus, so the bus
// wins a same-word collision.
module spm
  import disco_pkg::*;
#(
  parameter int unsigned LINES  = SPM_LINES,
  parameter int unsigned LINE_W = VWR_W,
  parameter int unsigned NP     = N_COLS,
  parameter int unsigned AW     = $clog2(LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  obi_req_t          obi_req,
  output obi_rsp_t          obi_rsp,
  input  logic [AW-1:0]     addr  [NP],
  input  logic [NP-1:0]     we,
  input  logic [LINE_W-1:0] wdata [NP],
  output logic [LINE_W-1:0] rdata [NP]
);

  localparam int unsigned WPL = LINE_W / 32;      // words per line
  localparam int unsigned WB  = $clog2(WPL);

  logic [LINE_W-1:0] mem [LINES];
  logic [AW-1:0]     h_line;
  logic [WB-1:0]     h_word;
  logic              h_acc;
  logic [31:0]       h_old, h_new;

  assign h_line = obi_req.addr[2+WB +: AW];
  assign h_word = obi_req.addr[2 +: WB];
  assign h_acc  = obi_req.req && (obi_req.addr[31:2+WB+AW] == '0);
  assign h_old  = mem[h_line][int'(h_word)*32 +: 32];

  always_comb begin
    for (int k = 0; k < 4; k++)
      h_new[k*8 +: 8] = obi_req.be[k] ? obi_req.wdata[k*8 +: 8] : h_old[k*8 +: 8];
  end

  for (genvar p = 0; p < NP; p++) begin : g_rd
    assign rdata[p] = mem[addr[p]];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (we[p]) mem[addr[p]] <= wdata[p];
    if (h_acc && obi_req.we) mem[h_line][int'(h_word)*32 +: 32] <= h_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obi_rsp.rvalid <= 1'b0;
      obi_rsp.rdata  <= '0;
    end else begin
      obi_rsp.rvalid <= obi_req.req;
      if (obi_req.req && !obi_req.we) obi_rsp.rdata <= h_acc ? h_old : '0;
    end
  end

  assign obi_rsp.gnt = obi_req.req;

  // OBI: a response only follows a granted request.
  a_rvalid_follows_gnt: assert property (@(posedge clk) disable iff (!rst_n)
    obi_rsp.rvalid |-> $past(obi_req.req && obi_rsp.gnt));

endmodule
