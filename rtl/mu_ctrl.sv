// mu_ctrl: control of one matrix pipeline (MU2 for issue slot 2, MU3 for slot 3).
//
// The pipeline accepts one MMA instruction per cycle when ready. Rank-k
// updates and xxsetaccz occupy it for one cycle: the accumulator slices are
// read, updated and written back in the issue cycle, so a dependent update may
// issue in the very next cycle, on either pipeline. The accumulator moves take
// the transfer times the paper gives:
//   xxmtacc  2 cycles: two VSRs per cycle arrive on the pipeline's two fetch
//            buses (rows 0,1 of the accumulator, then rows 2,3);
//   xxmfacc  4 cycles: one accumulator row (one VSR) per cycle leaves on the
//            pipeline's result bus.
// While a move is in progress `ready` is low; an instruction offered then is
// not accepted (an assertion flags it, as the issue logic must not do this).
//
// Outputs, valid in the cycle they refer to:
//   ex_valid/ex_instr  instruction being executed (the newly issued one in its
//                      first cycle, the stored one afterwards)
//   row_we             PU rows whose accumulator slices are written
//   wsrc               source of those writes
//   rd_valid/rd_row    accumulator row read for xxmfacc
// The per-instruction timing is this design's own except for the two move
// durations, which follow the paper. Reset is synchronous and active low.
module mu_ctrl
  import mma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       issue_valid,
  input  mma_instr_t issue_instr,
  output logic       ready,
  output logic       ex_valid,
  output mma_instr_t ex_instr,
  output logic [3:0] row_we,
  output wr_src_e    wsrc,
  output logic       rd_valid,
  output logic [1:0] rd_row
);
  logic [1:0] phase;   // cycle of the move, 0 for the issue cycle
  typedef enum logic [1:0] {S_IDLE, S_MT, S_MF} state_e;

  state_e     state;
  logic [1:0] cnt;
  mma_instr_t saved;

  assign ready = (state == S_IDLE);

  always_comb begin
    if (state == S_IDLE) begin
      ex_valid = issue_valid;
      ex_instr = issue_instr;
      phase    = 2'd0;
    end else begin
      ex_valid = 1'b1;
      ex_instr = saved;
      phase    = cnt;
    end
    row_we   = 4'b0000;
    wsrc     = WSRC_ALU;
    rd_valid = 1'b0;
    rd_row   = phase;
    if (ex_valid) begin
      unique case (ex_instr.op)
        OP_SETACCZ: begin row_we = 4'b1111; wsrc = WSRC_ZERO; end
        OP_MTACC:   begin row_we = (phase == 2'd0) ? 4'b0011 : 4'b1100; wsrc = WSRC_MOVE; end
        OP_MFACC:   rd_valid = 1'b1;
        OP_NOP:     ;
        default:    row_we = 4'b1111;   // rank-k updates
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      saved <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (issue_valid && issue_instr.op == OP_MTACC) begin
            state <= S_MT; cnt <= 2'd1; saved <= issue_instr;
          end else if (issue_valid && issue_instr.op == OP_MFACC) begin
            state <= S_MF; cnt <= 2'd1; saved <= issue_instr;
          end
        S_MT: state <= S_IDLE;
        S_MF: begin
          cnt <= cnt + 2'd1;
          if (cnt == 2'(MFACC_CYCLES - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // issue handshake: nothing is offered while a move occupies the pipeline
  a_no_issue_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    issue_valid |-> ready)
    else $error("mu_ctrl: instruction offered while the pipeline is busy");

endmodule
