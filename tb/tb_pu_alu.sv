// tb_pu_alu: self-checking test of pu_alu.
//
// A 4 x 2 grid of pu_alu instances, one per processing-unit position, forms a
// whole accumulator, so the test also checks which element each position
// computes. Random instructions of every rank-k family are applied with random
// suffix forms (accumulate, negate, saturate) and random masks. Reference
// values are computed here element by element from the definition
// A_ij = [-] sum_k p_k X_ik Y_jk [+- A_ij]. Floating-point operands are small
// integers, so every product and sum is exact and the simulator's double
// arithmetic (same operation order, so the same signed zeros) gives the exact
// expected bits. Integer operands are random over their full range, with
// accumulators near the int32 limits to exercise saturation and wrap-around.
module tb_pu_alu;
  import mma_pkg::*;

  mma_instr_t   instr;
  logic [127:0] x1, x2, y;
  logic [63:0]  acc_in  [4][2];
  logic [63:0]  acc_out [4][2];
  int checks = 0, failures = 0;
  int n_sat = 0;

  for (genvar r = 0; r < 4; r++) begin : g_r
    for (genvar c = 0; c < 2; c++) begin : g_c
      pu_alu #(.ROW(r), .COL(c)) dut (.instr(instr), .x1(x1), .x2(x2), .y(y),
                                      .acc_in(acc_in[r][c]), .acc_out(acc_out[r][c]));
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- encoders for small integer values ----
  function automatic logic [63:0] i2d(int v);
    return $realtobits(real'(v));
  endfunction
  function automatic logic [31:0] d2f(real v);   // exact for the values used here
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:0] == '0) return {d[63], 31'd0};
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
  function automatic logic [15:0] d2h(real v);   // fp16, exact for small integers
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:0] == '0) return {d[63], 15'd0};
    return {d[63], 5'(int'(d[62:52]) - 1023 + 15), d[51:42]};
  endfunction
  function automatic real f2d(logic [31:0] f);
    if (f[30:0] == '0) return f[31] ? $bitstoreal(64'h8000_0000_0000_0000) : 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  // Exact reference multiply-add on integer-valued operands with IEEE signed
  // zeros: value v plus the sign z of a zero value.
  task automatic madd(input bit neg, input int x, input int y, inout longint v, inout bit z);
    longint pv;
    bit     pz;
    pv = longint'(neg ? -x : x) * longint'(y);
    pz = neg ^ (x < 0) ^ (y < 0);
    if (pv + v == 0) z = (pv == 0 && v == 0) ? (pz & z) : 1'b0;
    v = pv + v;
  endtask
  function automatic logic [63:0] v2d(longint v, bit z);
    return (v == 0) ? {z, 63'd0} : $realtobits(real'(v));
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s op=%s got %h expected %h", what, instr.op.name(), got, exp);
    end
  endtask

  initial begin
    longint v;
    bit     z;
    int     xi [4][8], yi [4][8];
    int     kk;
    mma_op_e ops [7] = '{OP_I16GER2, OP_I8GER4, OP_I4GER8, OP_BF16GER2, OP_F16GER2, OP_F32GER, OP_F64GER};
    for (int n = 0; n < 3000; n++) begin
      instr = '0;
      instr.op       = ops[$urandom_range(0, 6)];
      instr.acc      = 3'($urandom);
      instr.accum    = 1'($urandom);
      instr.xmsk     = ($urandom_range(0, 1) == 1) ? 4'hF : 4'($urandom);
      instr.ymsk     = ($urandom_range(0, 1) == 1) ? 4'hF : 4'($urandom);
      instr.pmsk     = ($urandom_range(0, 1) == 1) ? 8'hFF : 8'($urandom);
      x1 = {$urandom, $urandom, $urandom, $urandom};
      x2 = {$urandom, $urandom, $urandom, $urandom};
      y  = {$urandom, $urandom, $urandom, $urandom};
      for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++) acc_in[r][c] = {$urandom, $urandom};
      if (instr.op inside {OP_I16GER2, OP_I8GER4, OP_I4GER8}) begin
        instr.sat = (instr.op == OP_I4GER8) ? 1'b0 :
                    (instr.op == OP_I8GER4) ? (instr.accum & 1'($urandom)) : 1'($urandom);
        // push some accumulators next to the int32 limits
        for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++)
          if ($urandom_range(0, 2) == 0)
            acc_in[r][c] = {($urandom_range(0, 1) ? 32'h7FFF_FF00 : 32'h8000_00FF) ^ 32'($urandom_range(0, 255)),
                            ($urandom_range(0, 1) ? 32'h7FFF_F000 : 32'h8000_0FFF)};
        kk = (instr.op == OP_I16GER2) ? 2 : (instr.op == OP_I8GER4) ? 4 : 8;
        #1;
        for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
          longint sum;
          logic [31:0] aw, exp;
          aw  = acc_in[i][j/2][63 - 32*(j%2) -: 32];
          sum = instr.accum ? longint'(signed'(aw)) : 0;
          for (int k = 0; k < kk; k++) if (instr.pmsk[k]) begin
            longint xe, ye;
            case (kk)
              2: begin xe = longint'(signed'(x1[127-16*(2*i+k) -: 16])); ye = longint'(signed'(y[127-16*(2*j+k) -: 16])); end
              4: begin xe = longint'(signed'(x1[127-8*(4*i+k) -: 8]));   ye = longint'({1'b0, y[127-8*(4*j+k) -: 8]}); end
              default: begin xe = longint'(signed'(x1[127-4*(8*i+k) -: 4])); ye = longint'(signed'(y[127-4*(8*j+k) -: 4])); end
            endcase
            sum += xe * ye;
          end
          if (!(instr.xmsk[i] && instr.ymsk[j])) exp = instr.accum ? aw : 32'd0;
          else if (instr.sat && sum > 64'sd2147483647) begin exp = 32'h7FFF_FFFF; n_sat++; end
          else if (instr.sat && sum < -64'sd2147483648) begin exp = 32'h8000_0000; n_sat++; end
          else exp = sum[31:0];
          check(acc_out[i][j/2][63 - 32*(j%2) -: 32], exp, "int");
        end
      end else if (instr.op == OP_F64GER) begin
        instr.neg_prod = 1'($urandom); instr.neg_acc = 1'($urandom);
        for (int i = 0; i < 4; i++) begin
          xi[i][0] = $urandom_range(0, 16) - 8;
          if (i < 2) x1[127 - 64*i -: 64] = i2d(xi[i][0]); else x2[127 - 64*(i-2) -: 64] = i2d(xi[i][0]);
        end
        for (int j = 0; j < 2; j++) begin yi[j][0] = $urandom_range(0, 16) - 8; y[127 - 64*j -: 64] = i2d(yi[j][0]); end
        for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++) acc_in[r][c] = i2d($urandom_range(0, 200) - 100);
        #1;
        for (int i = 0; i < 4; i++) for (int j = 0; j < 2; j++) begin
          logic [63:0] exp;
          v = instr.accum ? longint'($bitstoreal(acc_in[i][j])) : 0;
          z = instr.accum ? acc_in[i][j][63] : 1'b1;
          if (instr.accum && instr.neg_acc) begin v = -v; z = ~z; end
          madd(instr.neg_prod, xi[i][0], yi[j][0], v, z);
          if (!(instr.xmsk[i] && instr.ymsk[j])) exp = instr.accum ? acc_in[i][j] : 64'd0;
          else exp = v2d(v, z);
          check(acc_out[i][j][63:32], exp[63:32], "f64 hi");
          check(acc_out[i][j][31:0],  exp[31:0],  "f64 lo");
        end
      end else begin
        instr.neg_prod = 1'($urandom); instr.neg_acc = 1'($urandom);
        kk = (instr.op == OP_F32GER) ? 1 : 2;
        for (int i = 0; i < 4; i++) for (int k = 0; k < kk; k++) begin
          xi[i][k] = $urandom_range(0, 16) - 8; yi[i][k] = $urandom_range(0, 16) - 8;
          case (instr.op)
            OP_F32GER:   begin x1[127-32*i -: 32] = d2f(real'(xi[i][k])); y[127-32*i -: 32] = d2f(real'(yi[i][k])); end
            OP_BF16GER2: begin x1[127-16*(2*i+k) -: 16] = d2f(real'(xi[i][k])) >> 16; y[127-16*(2*i+k) -: 16] = d2f(real'(yi[i][k])) >> 16; end
            default:     begin x1[127-16*(2*i+k) -: 16] = d2h(real'(xi[i][k])); y[127-16*(2*i+k) -: 16] = d2h(real'(yi[i][k])); end
          endcase
        end
        for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++)
          acc_in[r][c] = {d2f(real'($urandom_range(0, 200)) - 100.0), d2f(real'($urandom_range(0, 200)) - 100.0)};
        #1;
        for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
          logic [31:0] aw, exp;
          aw = acc_in[i][j/2][63 - 32*(j%2) -: 32];
          v = instr.accum ? longint'(f2d(aw)) : 0;
          z = instr.accum ? aw[31] : 1'b1;
          if (instr.accum && instr.neg_acc) begin v = -v; z = ~z; end
          for (int k = 0; k < kk; k++) if (kk == 1 || instr.pmsk[k])
            madd(instr.neg_prod, xi[i][k], yi[j][k], v, z);
          if (!(instr.xmsk[i] && instr.ymsk[j])) exp = instr.accum ? aw : 32'd0;
          else if (!instr.accum && kk == 2 && instr.pmsk[0:1] == 2'b00) exp = 32'd0;
          else exp = d2f($bitstoreal(v2d(v, z)));
          check(acc_out[i][j/2][63 - 32*(j%2) -: 32], exp, "f32");
        end
      end
    end
    // fp16 subnormal input: 2^-24 * 2^-24 is far below fp32 range of interest, use 2^-24 * 1
    instr = '0; instr.op = OP_F16GER2; instr.xmsk = 4'hF; instr.ymsk = 4'hF; instr.pmsk = 8'hC0;
    x1 = '0; y = '0; x1[127 -: 16] = 16'h0001; y[127 -: 16] = 16'h3C00;   // X00 = 2^-24, Y00 = 1.0
    #1;
    check(acc_out[0][0][63:32], 32'h3380_0000, "f16 subnormal");           // 2^-24 in fp32
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturations: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
