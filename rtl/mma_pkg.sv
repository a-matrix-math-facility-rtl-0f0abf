// mma_pkg: types and constants shared by the matrix math engine (MME).
//
// The MME executes the Matrix-Multiply Assist (MMA) instructions of Power ISA
// 3.1: three accumulator moves (xxsetaccz, xxmfacc, xxmtacc) and the integer and
// floating-point rank-k update ("ger") families. Instructions reach the engine
// already decoded, as an mma_instr_t; the binary instruction encoding is not
// modelled (the core's front end decodes it).
//
// Bit and element order follows the Power ISA convention: in a 128-bit
// vector-scalar register (VSR) element 0 is the leftmost (most significant)
// element, so element i of width w sits at bits [127-w*i -: w]. Mask fields are
// declared [0:N-1] so that xmsk[i] is the mask bit x_i of the instruction.
package mma_pkg;

  localparam int unsigned VSR_W    = 128;  // vector-scalar register width
  localparam int unsigned ACC_W    = 512;  // accumulator width
  localparam int unsigned NUM_ACC  = 8;    // ACC[0:7]
  localparam int unsigned ACC_IDX_W = 3;
  localparam int unsigned SLICE_W  = 64;   // accumulator bits held by one PU half
  localparam int unsigned PU_ROWS  = 4;    // processing-unit grid: 4 rows ...
  localparam int unsigned PU_COLS  = 2;    // ... by 2 columns
  localparam int unsigned MTACC_CYCLES = 2; // 4 VSRs -> accumulator
  localparam int unsigned MFACC_CYCLES = 4; // accumulator -> 4 VSRs

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_SETACCZ  = 4'd1,   // xxsetaccz
    OP_MFACC    = 4'd2,   // xxmfacc  (accumulator -> VSRs)
    OP_MTACC    = 4'd3,   // xxmtacc  (VSRs -> accumulator)
    OP_I16GER2  = 4'd4,   // [pm]xvi16ger2[s][pp]
    OP_I8GER4   = 4'd5,   // [pm]xvi8ger4[pp,spp]
    OP_I4GER8   = 4'd6,   // [pm]xvi4ger8[pp]
    OP_BF16GER2 = 4'd7,   // [pm]xvbf16ger2[pp,np,pn,nn]
    OP_F16GER2  = 4'd8,   // [pm]xvf16ger2[pp,np,pn,nn]
    OP_F32GER   = 4'd9,   // [pm]xvf32ger[pp,np,pn,nn]
    OP_F64GER   = 4'd10   // [pm]xvf64ger[pp,np,pn,nn]
  } mma_op_e;

  // A decoded MMA instruction. Conventional (non-prefixed) forms carry all-ones
  // masks; prefixed (pm...) forms carry their immediate masks.
  typedef struct packed {
    mma_op_e              op;
    logic [ACC_IDX_W-1:0] acc;       // target accumulator AT
    logic                 accum;     // accumulating form (pp/np/pn/nn/spp), else plain ger
    logic                 neg_prod;  // first suffix letter n: negated product
    logic                 neg_acc;   // second suffix letter n: negated accumulator
    logic                 sat;       // saturating integer form (s / spp)
    logic [0:3]           xmsk;      // x_0..x_3: enabled rows of X
    logic [0:3]           ymsk;      // y_0..y_3: enabled columns of Y^T (fp64 uses y_0,y_1)
    logic [0:7]           pmsk;      // p_0..p_7: enabled partial products along k
  } mma_instr_t;

  // Source of an accumulator-slice write.
  typedef enum logic [1:0] {
    WSRC_ALU  = 2'd0,   // rank-k update result
    WSRC_MOVE = 2'd1,   // data from a fetch bus (xxmtacc)
    WSRC_ZERO = 2'd2    // xxsetaccz
  } wr_src_e;

  function automatic logic is_ger(mma_op_e op);
    return op inside {OP_I16GER2, OP_I8GER4, OP_I4GER8, OP_BF16GER2,
                      OP_F16GER2, OP_F32GER, OP_F64GER};
  endfunction

endpackage
