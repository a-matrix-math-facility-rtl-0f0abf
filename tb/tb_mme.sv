// tb_mme: end-to-end test of the matrix math engine at its full size.
//
// The testbench plays the part of the core: it holds the 64 vector-scalar
// registers (VSRs), issues decoded MMA instructions to the two issue slots
// (waiting while a slot is not ready), serves the fetch buses from its VSRs and
// writes the result buses back into them. Three programs run in sequence:
//   1. the DGEMM kernel: an 8 x 8 fp64 result built from all eight accumulators
//      (accumulator 2c+b holds rows 4b..4b+3, columns 2c..2c+1) as the product
//      of an 8 x K and a K x 8 matrix, K = 128, one xvf64ger followed by
//      xvf64gerpp updates, two per cycle, alternating the pipeline that updates
//      each accumulator so that updates read the other pipeline's copy;
//   2. an fp32 8 x 27 x 16 kernel of the SCONV shape (8 x 16 virtual
//      accumulator, 27 rank-1 updates), primed with xxsetaccz;
//   3. xxmtacc of VSR data into an accumulator, a prefixed, masked, saturating
//      int16 update (pmxvi16ger2spp) and an xxmfacc back to the VSRs.
// Every result is moved out with xxmfacc and compared with values computed here
// (small-integer floating-point operands keep every sum exact). The testbench
// also counts cycle-level events - dual issue, issue stalls behind moves,
// cross-pipeline accumulator reads, each move kind, saturation and masking -
// and fails if one never happened. It checks the move occupancies (2 and 4
// cycles) and the one-cycle throughput of rank-k updates.
module tb_mme;
  import mma_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         issue_valid [2];
  mma_instr_t   issue_instr [2];
  logic         ready       [2];
  logic [127:0] fetch_x1 [2], fetch_x2 [2], fetch_y [2];
  logic [127:0] fetch_mv [2][2];
  logic         res_valid [2];
  logic [5:0]   res_vsr   [2];
  logic [127:0] res_data  [2];

  mme dut (.*);

  always #5 clk = ~clk;

  logic [127:0] vsr [64];
  int checks = 0, failures = 0, cycle = 0;
  int n_dual = 0, n_stall = 0, n_cross = 0, n_mt = 0, n_mf = 0, n_z = 0, n_sat = 0, n_mask = 0;
  int res_beats = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result buses write the VSRs
  always @(posedge clk)
    for (int p = 0; p < 2; p++)
      if (res_valid[p]) begin vsr[res_vsr[p]] <= res_data[p]; res_beats++; end

  // cross-pipeline accumulator reads: an update on pipeline p whose accumulator
  // copy lives in the other pipeline's half
  always @(posedge clk)
    for (int p = 0; p < 2; p++)
      if (dut.ex_valid[p] && is_ger(dut.ex_instr[p].op) && dut.ex_instr[p].accum && dut.rd_loc[p] != 1'(p))
        n_cross++;

  // operands of one issued instruction: register numbers of X (pair xa:xa+1) and Y
  typedef struct {
    logic       v;
    mma_instr_t in;
    int         xa, ya;
  } slot_t;

  function automatic mma_instr_t mk(mma_op_e op, int acc, logic accum);
    mma_instr_t i;
    i = '0; i.op = op; i.acc = 3'(acc); i.accum = accum;
    i.xmsk = '1; i.ymsk = '1; i.pmsk = '1;
    return i;
  endfunction

  // Issue up to one instruction per slot in the same cycle, waiting for both
  // slots to be ready; returns after the instructions' last fetch cycle.
  task automatic issue(slot_t s0, slot_t s1);
    slot_t s [2];
    bit    mt;
    s[0] = s0; s[1] = s1;
    @(negedge clk);
    while ((s[0].v && !ready[0]) || (s[1].v && !ready[1])) begin
      n_stall++;
      issue_valid[0] = 0; issue_valid[1] = 0;
      @(negedge clk);
    end
    if (s[0].v && s[1].v) n_dual++;
    mt = 0;
    for (int p = 0; p < 2; p++) begin
      issue_valid[p] = s[p].v;
      issue_instr[p] = s[p].in;
      fetch_x1[p] = vsr[s[p].xa];
      fetch_x2[p] = vsr[(s[p].xa + 1) % 64];
      fetch_y[p]  = vsr[s[p].ya];
      fetch_mv[p][0] = vsr[4*s[p].in.acc];
      fetch_mv[p][1] = vsr[4*s[p].in.acc + 1];
      if (s[p].v && s[p].in.op == OP_MTACC) begin mt = 1; n_mt++; end
      if (s[p].v && s[p].in.op == OP_MFACC) n_mf++;
      if (s[p].v && s[p].in.op == OP_SETACCZ) n_z++;
      if (s[p].v && (s[p].in.xmsk != '1 || s[p].in.ymsk != '1 || s[p].in.pmsk != '1)) n_mask++;
    end
    if (mt) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        issue_valid[p] = 0;
        fetch_mv[p][0] = vsr[4*s[p].in.acc + 2];
        fetch_mv[p][1] = vsr[4*s[p].in.acc + 3];
      end
    end
    @(posedge clk);
    #1;
    issue_valid[0] = 0; issue_valid[1] = 0;
  endtask

  function automatic slot_t sl(mma_instr_t in, int xa, int ya);
    slot_t s;
    s.v = 1; s.in = in; s.xa = xa; s.ya = ya;
    return s;
  endfunction
  function automatic slot_t none();
    slot_t s;
    s.v = 0; s.in = '0; s.xa = 0; s.ya = 0;
    return s;
  endfunction

  task automatic drain();
    repeat (8) @(posedge clk);
  endtask

  task automatic move_out(int a0, int a1);
    issue(sl(mk(OP_MFACC, a0, 0), 0, 0), sl(mk(OP_MFACC, a1, 0), 0, 0));
  endtask

  function automatic logic [31:0] d2f(real v);   // exact for the values used
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:0] == '0) return {d[63], 31'd0};
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  task automatic chk(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  localparam int K1 = 128;   // DGEMM inner dimension (the paper's kernel size)
  localparam int K2 = 27;    // SCONV-shape kernel: 3 channels x 9 taps

  int A [8][K1], B [K1][8];  // DGEMM operands, C = A * B
  int H [8][K2], G [K2][16]; // fp32 kernel operands

  initial begin
    int t0, t1;
    for (int p = 0; p < 2; p++) begin
      issue_valid[p] = 0; issue_instr[p] = '0;
      fetch_x1[p] = '0; fetch_x2[p] = '0; fetch_y[p] = '0; fetch_mv[p][0] = '0; fetch_mv[p][1] = '0;
    end
    for (int r = 0; r < 64; r++) vsr[r] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // ---------------- 1. DGEMM 8 x K1 x 8, fp64 ----------------
    for (int i = 0; i < 8; i++) for (int k = 0; k < K1; k++) A[i][k] = $urandom_range(0, 20) - 10;
    for (int k = 0; k < K1; k++) for (int j = 0; j < 8; j++) B[k][j] = $urandom_range(0, 20) - 10;
    @(posedge clk); #1;
    t0 = cycle;
    for (int k = 0; k < K1; k++) begin
      // column k of A in VSR 32..35 (two pairs), row k of B in VSR 36..39
      for (int q = 0; q < 4; q++) begin
        vsr[32 + q] = {$realtobits(real'(A[2*q][k])), $realtobits(real'(A[2*q+1][k]))};
        vsr[36 + q] = {$realtobits(real'(B[k][2*q])), $realtobits(real'(B[k][2*q+1]))};
      end
      // accumulator 2c+b: rows 4b.., columns 2c..; alternate the pipeline per k
      for (int c = 0; c < 4; c++) begin
        slot_t s [2];
        for (int b = 0; b < 2; b++) begin
          int a;
          a = 2*c + b;
          s[(a + k) % 2] = sl(mk(OP_F64GER, a, k != 0), 32 + 2*b, 36 + c);
        end
        issue(s[0], s[1]);
      end
    end
    t1 = cycle;
    checks++;
    if (t1 - t0 != 4*K1) begin failures++; $display("FAIL DGEMM took %0d cycles, expected %0d", t1 - t0, 4*K1); end
    $display("DGEMM 8x%0dx8: %0d rank-1 fp64 updates in %0d cycles", K1, 8*K1, t1 - t0);
    for (int a = 0; a < 8; a += 2) move_out(a, a + 1);
    drain();
    for (int a = 0; a < 8; a++) begin
      int b, c;
      b = a % 2; c = a / 2;
      for (int r = 0; r < 4; r++) for (int j = 0; j < 2; j++) begin
        longint s;
        s = 0;
        for (int k = 0; k < K1; k++) s += longint'(A[4*b + r][k]) * longint'(B[k][2*c + j]);
        chk(vsr[4*a + r][127 - 64*j -: 64], $realtobits(real'(s)), $sformatf("DGEMM C[%0d][%0d]", 4*b + r, 2*c + j));
      end
    end

    // ---------------- 2. fp32 8 x 27 x 16 ----------------
    for (int i = 0; i < 8; i++) for (int k = 0; k < K2; k++) H[i][k] = $urandom_range(0, 16) - 8;
    for (int k = 0; k < K2; k++) for (int j = 0; j < 16; j++) G[k][j] = $urandom_range(0, 16) - 8;
    for (int a = 0; a < 8; a += 2) issue(sl(mk(OP_SETACCZ, a, 0), 0, 0), sl(mk(OP_SETACCZ, a + 1, 0), 0, 0));
    for (int k = 0; k < K2; k++) begin
      for (int q = 0; q < 2; q++)
        for (int e = 0; e < 4; e++) vsr[40 + q][127 - 32*e -: 32] = d2f(real'(H[4*q + e][k]));
      for (int q = 0; q < 4; q++)
        for (int e = 0; e < 4; e++) vsr[44 + q][127 - 32*e -: 32] = d2f(real'(G[k][4*q + e]));
      // accumulator 4*rb + cb holds rows 4rb.., columns 4cb..
      for (int cb = 0; cb < 4; cb++)
        issue(sl(mk(OP_F32GER, cb, 1), 40, 44 + cb), sl(mk(OP_F32GER, 4 + cb, 1), 41, 44 + cb));
    end
    for (int a = 0; a < 8; a += 2) move_out(a, a + 1);
    drain();
    for (int a = 0; a < 8; a++) begin
      int rb, cb;
      rb = a / 4; cb = a % 4;
      for (int r = 0; r < 4; r++) for (int j = 0; j < 4; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < K2; k++) s += H[4*rb + r][k] * G[k][4*cb + j];
        chk(64'(vsr[4*a + r][127 - 32*j -: 32]), 64'(d2f(real'(s))), $sformatf("SCONV C[%0d][%0d]", 4*rb + r, 4*cb + j));
      end
    end

    // ---------------- 3. moves, masked saturating int16 ----------------
    begin
      logic [127:0] init [4];
      mma_instr_t   in;
      logic [127:0] xv, yv;
      for (int r = 0; r < 4; r++) begin
        for (int e = 0; e < 4; e++)
          init[r][127 - 32*e -: 32] = (e % 2 == 0) ? 32'h7FFF_FF00 - 32'($urandom_range(0, 255))
                                                   : 32'($urandom);
        vsr[8 + r] = init[r];                 // ACC[2] <-> VSR[8..11]
      end
      xv = {8{16'h7FFF}}; yv = {$urandom, $urandom, $urandom, $urandom};
      yv[127 -: 16] = 16'h7FFF;
      vsr[48] = xv; vsr[49] = yv;
      @(posedge clk); #1;
      t0 = cycle;
      issue(sl(mk(OP_MTACC, 2, 0), 0, 0), none());
      t1 = cycle;
      checks++;
      if (t1 - t0 != MTACC_CYCLES) begin failures++; $display("FAIL xxmtacc took %0d cycles", t1 - t0); end
      in = mk(OP_I16GER2, 2, 1); in.sat = 1; in.xmsk = 4'b1101; in.ymsk = 4'b1011; in.pmsk = 8'b10000000;
      issue(none(), sl(in, 48, 49));
      @(posedge clk); #1;
      t0 = cycle;
      issue(sl(mk(OP_MFACC, 2, 0), 0, 0), none());
      issue(sl(mk(OP_MFACC, 2, 0), 0, 0), none());   // waits behind the first
      t1 = cycle;
      checks++;
      if (t1 - t0 != MFACC_CYCLES + 1) begin failures++; $display("FAIL xxmfacc occupancy: %0d cycles", t1 - t0 - 1); end
      drain();
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        longint s;
        logic [31:0] exp, aw;
        aw = init[i][127 - 32*j -: 32];
        if (!(in.xmsk[i] && in.ymsk[j])) exp = aw;
        else begin
          s = longint'(signed'(aw)) + longint'(signed'(xv[127 - 16*(2*i) -: 16])) * longint'(signed'(yv[127 - 16*(2*j) -: 16]));
          if (s > 64'sd2147483647) begin exp = 32'h7FFF_FFFF; n_sat++; end
          else if (s < -64'sd2147483648) begin exp = 32'h8000_0000; n_sat++; end
          else exp = s[31:0];
        end
        chk(64'(vsr[8 + i][127 - 32*j -: 32]), 64'(exp), $sformatf("int16 sat A[%0d][%0d]", i, j));
      end
    end

    $display("dual issues %0d, stall cycles %0d, cross-pipeline reads %0d, xxmtacc %0d, xxmfacc %0d, xxsetaccz %0d, saturations %0d, masked %0d, result beats %0d",
             n_dual, n_stall, n_cross, n_mt, n_mf, n_z, n_sat, n_mask, res_beats);
    if (n_dual == 0)  begin failures++; $display("FAIL no dual issue"); end
    if (n_stall == 0) begin failures++; $display("FAIL no issue stall"); end
    if (n_cross == 0) begin failures++; $display("FAIL no cross-pipeline read"); end
    if (n_mt == 0 || n_mf == 0 || n_z == 0) begin failures++; $display("FAIL a move kind never ran"); end
    if (n_sat == 0)   begin failures++; $display("FAIL no saturation"); end
    if (n_mask == 0)  begin failures++; $display("FAIL no masked form"); end
    checks++;
    if (res_beats != 4*n_mf) begin failures++; $display("FAIL %0d result beats for %0d xxmfacc", res_beats, n_mf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
