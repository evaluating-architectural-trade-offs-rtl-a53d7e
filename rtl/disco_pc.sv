// disco_pc: program counter of one DISCO-CGRA column.
//
// One PC per column addresses the seven local instruction memories, so the four
// PEs, LSU, MXCU and LCU execute the same row in lockstep (the paper's VLIW-style
// column). On `start` the PC goes to row 0 and the column runs; each cycle it moves
// to the next row or, when the LCU takes a branch, to the LCU's target. When the
// LCU executes EXIT the column stops and `done` pulses for one cycle. The paper
// shows the LCU driving the PC; the start/exit protocol is this design's own.
//
// Timing: registered PC and running flag, updated at the rising edge.
module disco_pc #(
  parameter int unsigned PC_W = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            br_taken,
  input  logic [PC_W-1:0] br_target,
  input  logic            exit_i,
  output logic [PC_W-1:0] pc,
  output logic            running,
  output logic            done
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        pc      <= '0;
        running <= 1'b1;
      end else if (running) begin
        if (exit_i) begin
          running <= 1'b0;
          done    <= 1'b1;
          pc      <= '0;
        end else if (br_taken) begin
          pc <= br_target;
        end else begin
          pc <= pc + 1'b1;
        end
      end
    end
  end

endmodule
