// tb_mu_ctrl: self-checking test of mu_ctrl.
//
// Random instruction streams are offered only when the pipeline is ready. For
// every instruction the testbench predicts, cycle by cycle, which rows are
// written, from which source, which row is read, and when the pipeline becomes
// ready again: 1 cycle for rank-k updates and xxsetaccz, 2 for xxmtacc and 4
// for xxmfacc (the transfer times of the paper). It also measures the
// occupancy of each move and counts the instructions seen of each kind.
module tb_mu_ctrl;
  import mma_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       issue_valid;
  mma_instr_t issue_instr;
  logic       ready, ex_valid, rd_valid;
  mma_instr_t ex_instr;
  logic [3:0] row_we;
  wr_src_e    wsrc;
  logic [1:0] rd_row;
  int checks = 0, failures = 0, n_mt = 0, n_mf = 0, n_ger = 0, n_z = 0;

  mu_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cycle(logic [3:0] we, wr_src_e src, logic rv, logic [1:0] rr, logic rdy, mma_op_e op);
    checks++;
    if (row_we !== we || (we != 0 && wsrc !== src) || rd_valid !== rv || (rv && rd_row !== rr) ||
        ready !== rdy || ex_valid !== 1'b1 || ex_instr.op !== op) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: row_we=%b wsrc=%0d rd=%b/%0d ready=%b (expected %b %0d %b/%0d %b)",
                 op.name(), row_we, wsrc, rd_valid, rd_row, ready, we, src, rv, rr, rdy);
    end
  endtask

  initial begin
    mma_op_e ops [7] = '{OP_SETACCZ, OP_MFACC, OP_MTACC, OP_I8GER4, OP_F32GER, OP_F64GER, OP_NOP};
    issue_valid = 0; issue_instr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      mma_op_e op;
      int      busy;
      @(negedge clk);
      checks++;
      if (!ready) begin failures++; $display("FAIL not ready between instructions"); end
      op = ops[$urandom_range(0, 6)];
      if (op == OP_NOP) begin
        issue_valid = 0;
        #1;
        checks++;
        if (ex_valid || row_we != 0 || rd_valid) begin failures++; $display("FAIL activity while idle"); end
        continue;
      end
      issue_valid = 1;
      issue_instr = '0; issue_instr.op = op; issue_instr.acc = 3'($urandom);
      #1;
      busy = 0;
      unique case (op)
        OP_SETACCZ: begin expect_cycle(4'b1111, WSRC_ZERO, 0, 0, 1, op); n_z++; end
        OP_MTACC: begin
          expect_cycle(4'b0011, WSRC_MOVE, 0, 0, 1, op);
          @(negedge clk); issue_valid = 0; #1; busy++;
          expect_cycle(4'b1100, WSRC_MOVE, 0, 0, 0, op);
          n_mt++;
        end
        OP_MFACC: begin
          expect_cycle(4'b0000, WSRC_ALU, 1, 0, 1, op);
          for (int k = 1; k < 4; k++) begin
            @(negedge clk); issue_valid = 0; #1; busy++;
            expect_cycle(4'b0000, WSRC_ALU, 1, 2'(k), 0, op);
          end
          n_mf++;
        end
        default: begin expect_cycle(4'b1111, WSRC_ALU, 0, 0, 1, op); n_ger++; end
      endcase
      // occupancy in cycles = busy + 1
      checks++;
      if ((op == OP_MTACC && busy + 1 != MTACC_CYCLES) || (op == OP_MFACC && busy + 1 != MFACC_CYCLES)) begin
        failures++; $display("FAIL occupancy of %s", op.name());
      end
      @(negedge clk); issue_valid = 0;
    end
    if (n_mt == 0 || n_mf == 0 || n_ger == 0 || n_z == 0) begin failures++; $display("FAIL kind never seen"); end
    $display("moves to acc %0d, moves from acc %0d, updates %0d, zeroings %0d", n_mt, n_mf, n_ger, n_z);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
