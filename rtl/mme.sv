// mme: matrix math engine executing the Power ISA 3.1 MMA instructions.
//
// The engine sits beside the core's execution slices. Two issue slots (slot 2
// feeds pipeline MU2, slot 3 feeds MU3) may each hand it one decoded MMA
// instruction per cycle, so two rank-k updates can complete every cycle. Both
// pipelines share the eight 512-bit accumulators, which live only inside the
// engine: during a matrix kernel only the X and Y operands travel from the
// vector-scalar registers (VSRs); accumulators leave the engine only through
// xxmfacc.
//
// Organisation: a 4 x 2 grid of processing units (pu). PU (r, c) holds row r,
// doubleword c of every accumulator and computes the elements of that slice.
// Each PU has a half per pipeline with its own copy of the slice; a small table
// (loc) remembers, per accumulator, which pipeline's half wrote it last, and
// every ALU reads its accumulator input from that half. Accumulator row i
// corresponds to VSR[4a+i] of accumulator a (the VSR group it is associated
// with).
//
// Buses per pipeline p (p = 0: slot 2 / MU2, p = 1: slot 3 / MU3), 128 bits each:
//   fetch_x1, fetch_x2, fetch_y  X and Y operands in the issue cycle
//                                (fetch_x2 carries the second register of the
//                                fp64 X pair)
//   fetch_mv[p][0..1]            VSR data for xxmtacc: rows 0,1 in the issue
//                                cycle, rows 2,3 in the next cycle (the A0/A1
//                                buses of MU2, B0/B1 of MU3)
//   res_valid/res_vsr/res_data   xxmfacc result bus (Y0 for MU2, Y1 for MU3):
//                                row k of the accumulator, for VSR[4a+k], one
//                                cycle after it is read, in 4 successive cycles
// Timing: rank-k updates and xxsetaccz: 1 cycle, the next dependent one may
// issue in the following cycle on either pipeline. xxmtacc: 2 cycles,
// xxmfacc: 4 cycles (ready low meanwhile). Reset (synchronous, active low)
// clears the pipelines and the location table, not the accumulators.
//
// The organisation, the 2R/1W slices and the move times follow the paper;
// cycle-level timing of the updates, the location table and the bus timing are
// this design's own. The two pipelines must not write the same accumulator in
// the same cycle (asserted); the architecture leaves such code undefined.
module mme
  import mma_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         issue_valid [2],
  input  mma_instr_t   issue_instr [2],
  output logic         ready       [2],
  input  logic [127:0] fetch_x1    [2],
  input  logic [127:0] fetch_x2    [2],
  input  logic [127:0] fetch_y     [2],
  input  logic [127:0] fetch_mv    [2][2],
  output logic         res_valid   [2],
  output logic [5:0]   res_vsr     [2],
  output logic [127:0] res_data    [2]
);
  logic                 ex_valid [2];
  mma_instr_t           ex_instr [2];
  logic [3:0]           row_we   [2];
  wr_src_e              wsrc     [2];
  logic                 rd_valid [2];
  logic [1:0]           rd_row   [2];
  logic [ACC_IDX_W-1:0] acc_idx  [2];
  logic                 rd_loc   [2];
  logic                 loc      [NUM_ACC];
  logic [63:0]          pu_rd    [PU_ROWS][PU_COLS][2];

  for (genvar p = 0; p < 2; p++) begin : g_mu
    mu_ctrl u_mu (
      .clk         (clk),
      .rst_n       (rst_n),
      .issue_valid (issue_valid[p]),
      .issue_instr (issue_instr[p]),
      .ready       (ready[p]),
      .ex_valid    (ex_valid[p]),
      .ex_instr    (ex_instr[p]),
      .row_we      (row_we[p]),
      .wsrc        (wsrc[p]),
      .rd_valid    (rd_valid[p]),
      .rd_row      (rd_row[p])
    );
    assign acc_idx[p] = ex_instr[p].acc;
    assign rd_loc[p]  = loc[ex_instr[p].acc];
  end

  for (genvar r = 0; r < PU_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PU_COLS; c++) begin : g_col
      logic        we      [2];
      logic [63:0] mv_data [2];
      for (genvar p = 0; p < 2; p++) begin : g_p
        assign we[p]      = ex_valid[p] & row_we[p][r];
        assign mv_data[p] = fetch_mv[p][r % 2][127 - 64*c -: 64];
      end
      pu #(.ROW(r), .COL(c)) u_pu (
        .clk     (clk),
        .instr   (ex_instr),
        .x1      (fetch_x1),
        .x2      (fetch_x2),
        .y       (fetch_y),
        .acc_idx (acc_idx),
        .rd_loc  (rd_loc),
        .we      (we),
        .wsrc    (wsrc),
        .mv_data (mv_data),
        .rd_data (pu_rd[r][c])
      );
    end
  end

  // accumulator location table and result buses
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_ACC; a++) loc[a] <= 1'b0;
      for (int p = 0; p < 2; p++) begin
        res_valid[p] <= 1'b0;
        res_vsr[p]   <= '0;
        res_data[p]  <= '0;
      end
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (ex_valid[p] && row_we[p] != 4'b0000) loc[acc_idx[p]] <= 1'(p);
        res_valid[p] <= rd_valid[p];
        if (rd_valid[p]) begin
          res_vsr[p]  <= {1'b0, acc_idx[p], rd_row[p]};
          res_data[p] <= {pu_rd[rd_row[p]][0][p], pu_rd[rd_row[p]][1][p]};
        end
      end
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(ex_valid[0] && ex_valid[1] && row_we[0] != 4'b0000 && row_we[1] != 4'b0000 &&
      acc_idx[0] == acc_idx[1]))
    else $error("mme: both pipelines write accumulator %0d in one cycle", acc_idx[0]);

endmodule
