// pu: one processing unit of the matrix math engine.
//
// The engine is a 4 x 2 grid of PUs; the PU at (ROW, COL) owns the 64-bit slice
// "row ROW, doubleword COL" of all eight accumulators. A PU has two identical
// halves, one per issuing slot: half 0 (ALU2 + ACC2) serves pipeline MU2 and
// half 1 (ALU3 + ACC3) serves MU3. An ALU always writes the accumulator slice
// of its own half, but reads its accumulator input from whichever half holds
// the newest copy of that accumulator (rd_loc, kept by the engine), which is why
// every slice file has two read ports. This lets the two pipelines work on the
// same accumulators in successive cycles without copying them.
//
// Interface, per pipeline p (0 = MU2 / slot 2, 1 = MU3 / slot 3):
//   instr[p], x1[p], x2[p], y[p]  decoded instruction and the X/Y fetch buses
//   acc_idx[p]                    accumulator read and written by pipeline p
//   rd_loc[p]                     half holding the newest copy of acc_idx[p]
//   we[p], wsrc[p], mv_data[p]    write this PU's slice in half p with the ALU
//                                 result, the move data (xxmtacc) or zero
//   rd_data[p]                    newest copy of the slice (ALU input; also the
//                                 source of xxmfacc)
// Timing: read and compute are combinational; the write takes effect at the
// rising clock edge, so a dependent instruction can issue in the next cycle.
module pu
  import mma_pkg::*;
#(
  parameter int unsigned ROW = 0,
  parameter int unsigned COL = 0
) (
  input  logic                 clk,
  input  mma_instr_t           instr   [2],
  input  logic [127:0]         x1      [2],
  input  logic [127:0]         x2      [2],
  input  logic [127:0]         y       [2],
  input  logic [ACC_IDX_W-1:0] acc_idx [2],
  input  logic                 rd_loc  [2],
  input  logic                 we      [2],
  input  wr_src_e              wsrc    [2],
  input  logic [63:0]          mv_data [2],
  output logic [63:0]          rd_data [2]
);
  // rf_rd[h][p]: read port p of the slice file in half h
  logic [63:0] rf_rd  [2][2];
  logic [63:0] alu_out[2];
  logic [63:0] wdata  [2];

  for (genvar h = 0; h < 2; h++) begin : g_half
    acc_slice_rf #(.ENTRIES(NUM_ACC), .WIDTH(SLICE_W)) u_acc (
      .clk    (clk),
      .raddr0 (acc_idx[0]),
      .rdata0 (rf_rd[h][0]),
      .raddr1 (acc_idx[1]),
      .rdata1 (rf_rd[h][1]),
      .we     (we[h]),
      .waddr  (acc_idx[h]),
      .wdata  (wdata[h])
    );

    assign rd_data[h] = rd_loc[h] ? rf_rd[1][h] : rf_rd[0][h];

    pu_alu #(.ROW(ROW), .COL(COL)) u_alu (
      .instr   (instr[h]),
      .x1      (x1[h]),
      .x2      (x2[h]),
      .y       (y[h]),
      .acc_in  (rd_data[h]),
      .acc_out (alu_out[h])
    );

    always_comb begin
      unique case (wsrc[h])
        WSRC_MOVE: wdata[h] = mv_data[h];
        WSRC_ZERO: wdata[h] = '0;
        default:   wdata[h] = alu_out[h];
      endcase
    end
  end
endmodule
