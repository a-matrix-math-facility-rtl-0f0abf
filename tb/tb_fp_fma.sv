// tb_fp_fma: self-checking test of fp_fma in its fp64 and fp32 configurations.
//
// Reference values come from the simulator's own double-precision arithmetic.
// Operands a and b are drawn with short significands so that a*b is exact in
// double precision; a*b + c evaluated with one double rounding is then the
// correctly rounded fused result. For fp32 the significands are shorter still,
// and exponents narrow, so that a*b + c is exact in double and only the final
// conversion to fp32 (done by a round-to-nearest-even function below) rounds.
// Directed cases cover zeros, infinities, NaNs, subnormals, overflow and
// cancellation.
module tb_fp_fma;
  logic [63:0] a64, b64, c64, r64;
  logic [31:0] a32, b32, c32, r32;
  int checks = 0, failures = 0;

  fp_fma #(.EXP_W(11), .MAN_W(52)) u64 (.a(a64), .b(b64), .c(c64), .r(r64));
  fp_fma #(.EXP_W(8),  .MAN_W(23)) u32 (.a(a32), .b(b32), .c(c32), .r(r32));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic is_nan64(logic [63:0] v);
    return (v[62:52] == '1) && (v[51:0] != '0);
  endfunction

  // Round a double holding a value in the fp32 normal range to fp32 (RNE).
  function automatic logic [31:0] d2f(real v);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] k;
    logic        g, s;
    int          e;
    d = $realtobits(v);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    k = {1'b0, m[52:29]};
    g = m[28];
    s = (m[27:0] != '0);
    if (g && (s || k[0])) k = k + 1;
    if (k[24]) begin k = k >> 1; e = e + 1; end
    return {d[63], 8'(e), k[22:0]};
  endfunction

  task automatic chk64(logic [63:0] a, logic [63:0] b, logic [63:0] c, logic [63:0] exp);
    a64 = a; b64 = b; c64 = c; #1;
    checks++;
    if (is_nan64(exp) ? !is_nan64(r64) : (r64 !== exp)) begin
      failures++;
      if (failures < 10) $display("FAIL fp64 %h*%h+%h = %h expected %h", a, b, c, r64, exp);
    end
  endtask

  task automatic chk32(logic [31:0] a, logic [31:0] b, logic [31:0] c, logic [31:0] exp);
    a32 = a; b32 = b; c32 = c; #1;
    checks++;
    if (r32 !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL fp32 %h*%h+%h = %h expected %h", a, b, c, r32, exp);
    end
  endtask

  function automatic real f2d(logic [31:0] f);
    // exact widening of a normal fp32 value
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  localparam logic [63:0] PINF = 64'h7FF0_0000_0000_0000;
  localparam logic [63:0] NINF = 64'hFFF0_0000_0000_0000;
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;
  localparam logic [63:0] ONE  = 64'h3FF0_0000_0000_0000;
  localparam logic [63:0] TWO  = 64'h4000_0000_0000_0000;

  initial begin
    logic [63:0] a, b, c;
    logic [31:0] x, y, z;
    real ra, rb, rc;
    // directed fp64 cases
    chk64(ONE, TWO, ONE, 64'h4008_0000_0000_0000);            // 1*2+1 = 3
    chk64(ONE, TWO, 64'hC000_0000_0000_0000, 64'd0);          // 2-2 = +0
    chk64(64'h8000_0000_0000_0000, ONE, 64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000); // -0*1 + -0 = -0
    chk64(64'h0, ONE, 64'h8000_0000_0000_0000, 64'h0);        // +0 + -0 = +0
    chk64(PINF, 64'h0, ONE, QNAN);                            // inf*0
    chk64(PINF, ONE, NINF, QNAN);                             // inf - inf
    chk64(PINF, 64'hBFF0_0000_0000_0000, ONE, NINF);          // -inf
    chk64(ONE, ONE, PINF, PINF);
    chk64(64'h7FF0_0000_0000_0001, ONE, ONE, QNAN);           // NaN in
    chk64(64'h7FEF_FFFF_FFFF_FFFF, TWO, 64'h0, PINF);         // overflow
    chk64(64'h0010_0000_0000_0000, 64'h3FE0_0000_0000_0000, 64'h0, 64'h0008_0000_0000_0000); // to subnormal
    chk64(64'h0000_0000_0000_0001, TWO, 64'h0000_0000_0000_0001, 64'h0000_0000_0000_0003); // subnormal in
    chk64(64'h0000_0000_0000_0001, 64'h3FE0_0000_0000_0000, 64'h0, 64'h0);  // 2^-1075 ties to even 0
    chk64(64'h0000_0000_0000_0003, 64'h3FE0_0000_0000_0000, 64'h0, 64'h0000_0000_0000_0002); // 1.5 ulp -> 2
    chk64(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0001, 64'hBFF0_0000_0000_0002,
          64'h3970_0000_0000_0000);                           // (1+u)^2-(1+2u) = u^2 exactly (fused)
    chk64(ONE, 64'h3CA0_0000_0000_0000, ONE, ONE);            // 1 + 2^-53: tie to even
    chk64(ONE, 64'h3CA0_0000_0000_0001, ONE, 64'h3FF0_0000_0000_0001); // just above tie
    chk64(64'h0, 64'h0, 64'h0010_0000_0000_0000, 64'h0010_0000_0000_0000);
    chk64(64'h3000_0000_0000_0000, 64'h3000_0000_0000_0000, TWO, TWO);  // tiny product
    chk64(64'h3000_0000_0000_0000, 64'h3000_0000_0000_0000, 64'hC000_0000_0000_0000,
          64'hC000_0000_0000_0000);
    // random fp64: short significands keep a*b exact
    for (int n = 0; n < 4000; n++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      a[26:0] = '0; b[26:0] = '0;
      a[62:52] = 11'(520 + $urandom_range(0, 1007));
      b[62:52] = 11'(520 + $urandom_range(0, 1007));
      case (n % 4)
        0: c[62:52] = 11'(int'(a[62:52]) + int'(b[62:52]) - 1023 + $urandom_range(0, 120) - 60);
        1: c[62:52] = 11'(int'(a[62:52]) + int'(b[62:52]) - 1023);
        2: c[62:52] = 11'($urandom_range(0, 2046));
        default: begin c[62:52] = 11'(int'(a[62:52]) + int'(b[62:52]) - 1023); c[63] = ~(a[63]^b[63]);
                       c[51:30] = a[51:30]; end
      endcase
      ra = $bitstoreal(a); rb = $bitstoreal(b); rc = $bitstoreal(c);
      chk64(a, b, c, $realtobits(ra * rb + rc));
    end
    // fp32 directed
    chk32(32'h3F80_0000, 32'h4000_0000, 32'h3F80_0000, 32'h4040_0000);
    chk32(32'h7F80_0000, 32'h0000_0000, 32'h0, 32'h7FC0_0000);
    chk32(32'h7F7F_FFFF, 32'h4000_0000, 32'h0, 32'h7F80_0000);
    chk32(32'h0080_0000, 32'h3F00_0000, 32'h0, 32'h0040_0000);
    // random fp32: products and sums exact in double, one rounding to fp32
    for (int n = 0; n < 4000; n++) begin
      x = $urandom; y = $urandom; z = $urandom;
      x[11:0] = '0; y[11:0] = '0;
      x[30:23] = 8'($urandom_range(120, 134));
      y[30:23] = 8'($urandom_range(120, 134));
      z[30:23] = 8'(int'(x[30:23]) + int'(y[30:23]) - 127 + $urandom_range(0, 20) - 10);
      if (n % 3 == 0) begin z[30:23] = 8'(int'(x[30:23]) + int'(y[30:23]) - 127); z[31] = ~(x[31]^y[31]); end
      ra = f2d(x) * f2d(y) + f2d(z);
      if (ra != 0.0) chk32(x, y, z, d2f(ra));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
