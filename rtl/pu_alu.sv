// pu_alu: arithmetic unit of one processing-unit half (ALU2 or ALU3).
//
// The accumulator of the matrix math engine is spread over a 4 x 2 grid of
// processing units (PUs). The PU at grid position (ROW, COL) owns one 64-bit
// slice of every accumulator: row ROW, doubleword COL of the accumulator, which
// is either one fp64 element A[ROW][COL] (4 x 2 fp64 layout) or the two 32-bit
// elements A[ROW][2*COL] and A[ROW][2*COL+1] (4 x 4 fp32/int32 layout). This
// ALU computes the new value of that slice for one rank-k update instruction:
//   * xvf64ger:  1 fp64 multiply-add,   A_ij = [-]X_i*Y_j [+-A_ij]
//   * xvf32ger:  2 fp32 multiply-adds
//   * xvf16ger2 / xvbf16ger2: 4 multiply-adds (k = 2 per element)
//   * xvi16ger2: 4, xvi8ger4: 8, xvi4ger8: 16 integer multiply-adds
// which are the per-half counts the paper gives. Element order inside the
// 128-bit X and Y registers is big-endian (element 0 leftmost); for a rank-K
// instruction X_ik is element K*i + k of X and Y_jk is element K*j + k of Y. For fp64, X is the register pair x1:x2
// (x1 holds X_0, X_1; x2 holds X_2, X_3) and Y holds Y_0, Y_1.
//
// Masks (prefixed forms): an element with x_i = 0 or y_j = 0 is not computed;
// it keeps its accumulator value in accumulating forms and becomes 0 in
// non-accumulating forms. A partial product with p_k = 0 contributes nothing.
// Integer forms: int8 X is signed and Y unsigned; saturating forms clamp the
// exact sum of products plus accumulator to the int32 range, other forms wrap.
//
// Own choices: fp16 and bfloat16 inputs are widened exactly to fp32 and the two
// products of an element are added by two chained fp32 fused multiply-adds
// (product 0 first), so the result is rounded twice. Non-accumulating float
// forms add the product to -0, which returns the product exactly (keeping the
// sign of a zero product). Negated forms flip the sign of X (product) and of
// the accumulator value before the multiply-add.
//
// Timing: combinational; the slice is read and written by the enclosing PU.
module pu_alu
  import mma_pkg::*;
#(
  parameter int unsigned ROW = 0,   // PU grid row 0..3
  parameter int unsigned COL = 0    // PU grid column 0..1
) (
  input  mma_instr_t  instr,
  input  logic [127:0] x1,          // X (or first register of the fp64 X pair)
  input  logic [127:0] x2,          // second register of the fp64 X pair
  input  logic [127:0] y,           // Y
  input  logic [63:0]  acc_in,      // current accumulator slice
  output logic [63:0]  acc_out      // updated accumulator slice
);
  localparam logic [31:0] NZERO32 = 32'h8000_0000;
  localparam logic [63:0] NZERO64 = 64'h8000_0000_0000_0000;

  // exact fp16 -> fp32 widening
  function automatic logic [31:0] f16_to_f32(logic [15:0] h);
    logic [4:0] e;
    logic [9:0] f;
    int         l;
    e = h[14:10];
    f = h[9:0];
    if (e == 5'd31) return {h[15], 8'hFF, f, 13'd0};
    if (e != 5'd0)  return {h[15], 8'(int'(e) + 112), f, 13'd0};
    if (f == '0)    return {h[15], 31'd0};
    l = 0;
    for (int i = 0; i < 10; i++) if (f[i]) l = i;
    return {h[15], 8'(103 + l), 23'(({13'd0, f} << (23 - l)))};
  endfunction

  function automatic logic [15:0] el16(logic [127:0] v, int i);
    return v[127 - 16*i -: 16];
  endfunction
  function automatic logic [7:0] el8(logic [127:0] v, int i);
    return v[127 - 8*i -: 8];
  endfunction
  function automatic logic [3:0] el4(logic [127:0] v, int i);
    return v[127 - 4*i -: 4];
  endfunction
  function automatic logic [31:0] el32(logic [127:0] v, int i);
    return v[127 - 32*i -: 32];
  endfunction
  function automatic logic [63:0] el64(logic [127:0] v, int i);
    return v[127 - 64*i -: 64];
  endfunction

  // ---------------- floating point ----------------
  logic [31:0] fa0 [2], fb0 [2], fc0 [2], fr0 [2];   // product k = 0 (or the fp32 product)
  logic [31:0] fa1 [2], fb1 [2], fc1 [2], fr1 [2];   // product k = 1
  logic [63:0] da, db, dc, dr;

  for (genvar e = 0; e < 2; e++) begin : g_f32
    fp_fma #(.EXP_W(8), .MAN_W(23)) u_fma0 (.a(fa0[e]), .b(fb0[e]), .c(fc0[e]), .r(fr0[e]));
    fp_fma #(.EXP_W(8), .MAN_W(23)) u_fma1 (.a(fa1[e]), .b(fb1[e]), .c(fc1[e]), .r(fr1[e]));
  end
  fp_fma #(.EXP_W(11), .MAN_W(52)) u_fma64 (.a(da), .b(db), .c(dc), .r(dr));

  logic [31:0] f32_res [2];
  logic [31:0] i32_res [2];
  logic [63:0] f64_res;

  logic [31:0] start_w [2], xk1_w [2], yk1_w [2], s1_w [2];
  logic        en_w [2];

  // first multiply-add of each element (k = 0, or the fp32 product)
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      int          j;
      logic [31:0] acc_w, xk0, yk0;
      j          = 2*int'(COL) + e;
      acc_w      = acc_in[63 - 32*e -: 32];
      en_w[e]    = instr.xmsk[ROW] & instr.ymsk[j];
      start_w[e] = instr.accum ? (acc_w ^ {instr.neg_acc, 31'd0}) : NZERO32;
      unique case (instr.op)
        OP_BF16GER2: begin
          xk0      = {el16(x1, 2*int'(ROW)),     16'd0}; yk0      = {el16(y, 2*j),     16'd0};
          xk1_w[e] = {el16(x1, 2*int'(ROW) + 1), 16'd0}; yk1_w[e] = {el16(y, 2*j + 1), 16'd0};
        end
        OP_F16GER2: begin
          xk0      = f16_to_f32(el16(x1, 2*int'(ROW)));     yk0      = f16_to_f32(el16(y, 2*j));
          xk1_w[e] = f16_to_f32(el16(x1, 2*int'(ROW) + 1)); yk1_w[e] = f16_to_f32(el16(y, 2*j + 1));
        end
        default: begin  // OP_F32GER
          xk0      = el32(x1, int'(ROW)); yk0      = el32(y, j);
          xk1_w[e] = '0;                  yk1_w[e] = '0;
        end
      endcase
      fa0[e] = xk0 ^ {instr.neg_prod, 31'd0};
      fb0[e] = yk0;
      fc0[e] = start_w[e];
    end
  end

  // second multiply-add (k = 1) of the rank-2 forms
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      s1_w[e] = (instr.op == OP_F32GER || instr.pmsk[0]) ? fr0[e] : start_w[e];
      fa1[e]  = xk1_w[e] ^ {instr.neg_prod, 31'd0};
      fb1[e]  = yk1_w[e];
      fc1[e]  = s1_w[e];
    end
  end

  always_comb begin
    for (int e = 0; e < 2; e++) begin
      logic [31:0] acc_w, s2;
      acc_w = acc_in[63 - 32*e -: 32];
      s2 = (instr.op != OP_F32GER && instr.pmsk[1]) ? fr1[e] : s1_w[e];
      if (!en_w[e])
        f32_res[e] = instr.accum ? acc_w : '0;
      else if (!instr.accum && instr.op != OP_F32GER && instr.pmsk[0:1] == 2'b00)
        f32_res[e] = '0;        // no product enabled: the element is 0
      else
        f32_res[e] = s2;
    end
  end

  always_comb begin
    logic [63:0] xv;
    xv = (ROW < 2) ? el64(x1, int'(ROW % 2)) : el64(x2, int'(ROW % 2));
    da = xv ^ {instr.neg_prod, 63'd0};
    db = el64(y, int'(COL));
    dc = instr.accum ? (acc_in ^ {instr.neg_acc, 63'd0}) : NZERO64;
    if (!(instr.xmsk[ROW] & instr.ymsk[COL]))
      f64_res = instr.accum ? acc_in : '0;
    else
      f64_res = dr;
  end

  // ---------------- integer ----------------
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      int                 j;
      logic signed [63:0] sum;
      logic        [31:0] acc_w;
      j     = 2*int'(COL) + e;
      acc_w = acc_in[63 - 32*e -: 32];
      sum   = instr.accum ? 64'(signed'(acc_w)) : 64'sd0;
      unique case (instr.op)
        OP_I16GER2:
          for (int k = 0; k < 2; k++)
            if (instr.pmsk[k])
              sum += 64'(signed'(el16(x1, 2*int'(ROW) + k))) * 64'(signed'(el16(y, 2*j + k)));
        OP_I8GER4:
          for (int k = 0; k < 4; k++)
            if (instr.pmsk[k])
              sum += 64'(signed'(el8(x1, 4*int'(ROW) + k))) * 64'(signed'({56'd0, el8(y, 4*j + k)}));
        default:  // OP_I4GER8
          for (int k = 0; k < 8; k++)
            if (instr.pmsk[k])
              sum += 64'(signed'(el4(x1, 8*int'(ROW) + k))) * 64'(signed'(el4(y, 8*j + k)));
      endcase
      if (!(instr.xmsk[ROW] & instr.ymsk[j]))
        i32_res[e] = instr.accum ? acc_w : '0;
      else if (instr.sat && sum > 64'sd2147483647)
        i32_res[e] = 32'h7FFF_FFFF;
      else if (instr.sat && sum < -64'sd2147483648)
        i32_res[e] = 32'h8000_0000;
      else
        i32_res[e] = sum[31:0];
    end
  end

  always_comb begin
    unique case (instr.op)
      OP_F64GER:                          acc_out = f64_res;
      OP_F32GER, OP_F16GER2, OP_BF16GER2: acc_out = {f32_res[0], f32_res[1]};
      OP_I16GER2, OP_I8GER4, OP_I4GER8:   acc_out = {i32_res[0], i32_res[1]};
      default:                            acc_out = acc_in;
    endcase
  end

endmodule
