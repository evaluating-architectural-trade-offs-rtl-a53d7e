// imem_ctrl: IMEM controller and configuration port of DISCO-CGRA.
//
// Owns the 10 KiB global instruction memory (an SRAM) and serves the configuration
// slave port of the system bus. The host writes kernels into the global IMEM, then
// writes the kernel registers: first row, row count, column mask, and a command.
// A "load" command dispatches the kernel: the controller reads the global IMEM one
// 32-bit word per cycle, assembles each 160-bit VLIW row from five words and writes it
// into the seven local IMEMs of every column in the mask. This multi-cycle dispatch
// replaces the single-cycle transfer of a flip-flop global IMEM, as the paper
// describes; it costs 5*N+1 cycles for N rows. A "run" command (alone or together with
// "load", then after it) starts the masked columns and waits for all of them to
// finish: that completion point raises `irq` and the status done bit and latches the
// cycle count of the run. The register map, command encoding and the rule that bus
// accesses to the global IMEM wait (gnt low) while a dispatch reads it are this
// design's own.
//
// Register map (byte offsets from CFG_REG_BASE): 0x00 first row, 0x04 row count,
// 0x08 column mask, 0x0C command (bit0 load, bit1 run; write only), 0x10 status
// (bit0 loading, bit1 running, bit2 done, bits 3.. column busy), 0x14 cycles of the
// last run. Addresses below CFG_REG_BASE are global IMEM words.
// OBI timing: gnt in the request cycle (except the wait above), rvalid one cycle later.
// Every access is a whole 32-bit word, so the byte enables are not used.
module imem_ctrl
  import disco_pkg::*;
#(
  parameter int unsigned GWORDS  = GIMEM_WORDS,
  parameter int unsigned NC      = N_COLS,
  parameter int unsigned LIMEM_D = LIMEM_DEPTH,
  parameter int unsigned GAW     = $clog2(GWORDS),
  parameter int unsigned PCW     = $clog2(LIMEM_D)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  obi_req_t         obi_req,
  output obi_rsp_t         obi_rsp,
  output logic [NC-1:0]    col_imem_we,
  output logic [PCW-1:0]   col_imem_waddr,
  output logic [ROW_W-1:0] col_imem_wrow,
  output logic [NC-1:0]    col_start,
  input  logic [NC-1:0]    col_busy,
  output logic             irq
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_START, S_RUN} state_e;
  state_e state;

  // ------------------------------------------------------------ registers
  logic [GAW-1:0]  krow;      // first row
  logic [PCW:0]    knrows;    // row count
  logic [NC-1:0]   colmask;
  logic            run_after_load, done;
  logic [31:0]     cycles;

  // ------------------------------------------------------------ bus decode
  logic        is_reg, is_gim, gim_ok, gnt;
  logic [2:0]  reg_sel;
  logic [GAW-1:0] bus_gaddr;

  assign is_reg    = obi_req.addr >= CFG_REG_BASE;
  assign is_gim    = !is_reg;
  assign reg_sel   = obi_req.addr[4:2];
  assign bus_gaddr = GAW'(obi_req.addr[31:2]);
  assign gim_ok    = (obi_req.addr[31:2] < 30'(GWORDS));
  assign gnt       = obi_req.req && !(is_gim && state == S_LOAD);

  // ------------------------------------------------------------ global IMEM
  logic           g_en, g_we;
  logic [GAW-1:0] g_addr;
  logic [31:0]    g_rdata;

  global_imem #(.WORDS(GWORDS), .WIDTH(32)) u_gimem (
    .clk, .en(g_en), .we(g_we), .addr(g_addr), .wdata(obi_req.wdata), .rdata(g_rdata)
  );

  // ------------------------------------------------------------ dispatch datapath
  logic [GAW-1:0]  rd_addr;     // next word to read
  logic [PCW:0]    rd_row;      // row of the next read
  logic [2:0]      rd_word;     // word of the next read
  logic            cap_vld;     // a dispatch read returns this cycle
  logic [2:0]      cap_word;
  logic [PCW-1:0]  cap_row;
  logic [ROW_W-32-1:0] row_buf; // words 0..ROW_WORDS-2 of the row being assembled
  logic            issue;

  assign issue = (state == S_LOAD) && (rd_row < knrows);

  always_comb begin
    g_en   = 1'b0;
    g_we   = 1'b0;
    g_addr = bus_gaddr;
    if (issue) begin
      g_en   = 1'b1;
      g_addr = rd_addr;
    end else if (gnt && is_gim && gim_ok) begin
      g_en = 1'b1;
      g_we = obi_req.we;
    end
  end

  always_comb begin
    col_imem_we    = '0;
    col_imem_waddr = cap_row;
    col_imem_wrow  = {g_rdata, row_buf};
    if (cap_vld && cap_word == 3'(ROW_WORDS - 1)) col_imem_we = colmask;
  end

  // ------------------------------------------------------------ control FSM
  logic cmd_wr;
  assign cmd_wr = gnt && is_reg && obi_req.we && reg_sel == 3'(REG_CMD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      krow           <= '0;
      knrows         <= '0;
      colmask        <= '0;
      run_after_load <= 1'b0;
      done           <= 1'b0;
      cycles         <= '0;
      rd_addr        <= '0;
      rd_row         <= '0;
      rd_word        <= '0;
      cap_vld        <= 1'b0;
      cap_word       <= '0;
      cap_row        <= '0;
      row_buf        <= '0;
      col_start      <= '0;
    end else begin
      col_start <= '0;
      cap_vld   <= issue;
      cap_word  <= rd_word;
      cap_row   <= PCW'(rd_row);
      if (cap_vld && cap_word != 3'(ROW_WORDS - 1))
        row_buf[int'(cap_word)*32 +: 32] <= g_rdata;

      // register writes (ignored while busy, except that the status stays readable)
      if (gnt && is_reg && obi_req.we && state == S_IDLE) begin
        case (reg_sel)
          3'(REG_KROW):    krow    <= GAW'(obi_req.wdata);
          3'(REG_KNROWS):  knrows  <= (PCW+1)'(obi_req.wdata);
          3'(REG_COLMASK): colmask <= NC'(obi_req.wdata);
          default: ;
        endcase
      end

      case (state)
        S_IDLE: if (cmd_wr) begin
          done <= 1'b0;
          if (obi_req.wdata[0]) begin
            state          <= S_LOAD;
            run_after_load <= obi_req.wdata[1];
            rd_addr        <= GAW'(int'(krow) * ROW_WORDS);
            rd_row         <= '0;
            rd_word        <= '0;
          end else if (obi_req.wdata[1]) begin
            state     <= S_START;
            col_start <= colmask;
          end
        end
        S_LOAD: begin
          if (issue) begin
            rd_addr <= rd_addr + 1'b1;
            if (rd_word == 3'(ROW_WORDS - 1)) begin
              rd_word <= '0;
              rd_row  <= rd_row + 1'b1;
            end else begin
              rd_word <= rd_word + 1'b1;
            end
          end else if (!cap_vld) begin
            // all rows issued and the last word captured
            if (run_after_load) begin
              state     <= S_START;
              col_start <= colmask;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_START: begin
          cycles <= 32'd1;
          state  <= S_RUN;
        end
        S_RUN: begin
          if ((col_busy & colmask) == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            cycles <= cycles + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign irq = done;

  // ------------------------------------------------------------ bus response
  logic        rsp_gim;
  logic [31:0] reg_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obi_rsp.rvalid <= 1'b0;
      rsp_gim        <= 1'b0;
      reg_rdata      <= '0;
    end else begin
      obi_rsp.rvalid <= gnt;
      rsp_gim        <= gnt && is_gim && !obi_req.we && gim_ok;
      if (gnt && is_reg && !obi_req.we) begin
        case (reg_sel)
          3'(REG_KROW):    reg_rdata <= 32'(krow);
          3'(REG_KNROWS):  reg_rdata <= 32'(knrows);
          3'(REG_COLMASK): reg_rdata <= 32'(colmask);
          3'(REG_STATUS):  reg_rdata <= 32'({col_busy, done, state == S_RUN || state == S_START,
                                             state == S_LOAD});
          3'(REG_CYCLES):  reg_rdata <= cycles;
          default:         reg_rdata <= '0;
        endcase
      end else if (gnt) begin
        reg_rdata <= '0;
      end
    end
  end

  assign obi_rsp.gnt   = gnt;
  assign obi_rsp.rdata = rsp_gim ? g_rdata : reg_rdata;

  a_rvalid_follows_gnt: assert property (@(posedge clk) disable iff (!rst_n)
    obi_rsp.rvalid |-> $past(obi_req.req && obi_rsp.gnt));
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_wr && obi_req.wdata[0] && state == S_IDLE |-> knrows <= (PCW+1)'(LIMEM_D));

endmodule
