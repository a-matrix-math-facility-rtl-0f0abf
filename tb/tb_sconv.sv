// tb_sconv: a 3-channel 3 x 3 convolution run on the matrix math engine.
//
// Eight 3 x 3 x 3 convolution kernels are applied to one output row of a
// 3-channel image, 16 output pixels wide, with no padding and unit stride.
// The kernels form an 8 x 27 matrix Hbar (one kernel per row); the image
// supplies the 27 x 16 right-hand matrix without it ever being built: for
// channel ch, kernel row r and tap s, the Y operand is image row r of channel ch
// starting at column s. Each of the 27 steps is an 8 x 16 fp32 outer product
// added to an 8 x 16 virtual accumulator made of all eight accumulators
// (accumulator 4*rb + cb holds kernels 4rb..4rb+3, output columns
// 4cb..4cb+3): 8 xvf32ger(pp) instructions per step, two per cycle. The result
// is moved out with xxmfacc and compared with a direct convolution computed
// here. Operands are small integers, so the fp32 sums are exact. The update
// phase must take 4 cycles per step.
module tb_sconv;
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

  localparam int W_IMG = 18;              // image row width: 16 outputs + 2
  int img [3][3][W_IMG];                  // [channel][row][column]
  int ker [8][3][3][3];                   // [kernel][channel][row][tap]
  logic [127:0] vsr [64];
  int checks = 0, failures = 0, cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk)
    for (int p = 0; p < 2; p++)
      if (res_valid[p]) vsr[res_vsr[p]] <= res_data[p];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] d2f(real v);   // exact for the values used
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:0] == '0) return {d[63], 31'd0};
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic mma_instr_t mk(mma_op_e op, int acc, logic accum);
    mma_instr_t i;
    i = '0; i.op = op; i.acc = 3'(acc); i.accum = accum;
    i.xmsk = '1; i.ymsk = '1; i.pmsk = '1;
    return i;
  endfunction

  // issue one instruction on each slot in the same cycle
  task automatic issue2(mma_instr_t i0, int x0, int y0, mma_instr_t i1, int x1v, int y1v);
    @(negedge clk);
    while (!ready[0] || !ready[1]) @(negedge clk);
    issue_valid[0] = 1; issue_instr[0] = i0; fetch_x1[0] = vsr[x0];  fetch_y[0] = vsr[y0];
    issue_valid[1] = 1; issue_instr[1] = i1; fetch_x1[1] = vsr[x1v]; fetch_y[1] = vsr[y1v];
    @(posedge clk);
    #1;
    issue_valid[0] = 0; issue_valid[1] = 0;
  endtask

  initial begin
    int t0, t1, k;
    for (int p = 0; p < 2; p++) begin
      issue_valid[p] = 0; issue_instr[p] = '0;
      fetch_x1[p] = '0; fetch_x2[p] = '0; fetch_y[p] = '0; fetch_mv[p][0] = '0; fetch_mv[p][1] = '0;
    end
    for (int r = 0; r < 64; r++) vsr[r] = '0;
    for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++) for (int c = 0; c < W_IMG; c++)
      img[ch][r][c] = $urandom_range(0, 15);
    for (int n = 0; n < 8; n++) for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++)
      ker[n][ch][r][s] = $urandom_range(0, 8) - 4;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(posedge clk); #1;
    t0 = cycle;
    k = 0;
    for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++) begin
      // column k of Hbar in VSR 32, 33; the shifted image row in VSR 36..39
      for (int e = 0; e < 4; e++) begin
        vsr[32][127 - 32*e -: 32] = d2f(real'(ker[e][ch][r][s]));
        vsr[33][127 - 32*e -: 32] = d2f(real'(ker[4 + e][ch][r][s]));
      end
      for (int q = 0; q < 4; q++) for (int e = 0; e < 4; e++)
        vsr[36 + q][127 - 32*e -: 32] = d2f(real'(img[ch][r][s + 4*q + e]));
      for (int cb = 0; cb < 4; cb++)
        issue2(mk(OP_F32GER, cb, k != 0), 32, 36 + cb, mk(OP_F32GER, 4 + cb, k != 0), 33, 36 + cb);
      k++;
    end
    t1 = cycle;
    checks++;
    if (t1 - t0 != 4*27) begin failures++; $display("FAIL update phase took %0d cycles, expected %0d", t1 - t0, 4*27); end
    for (int a = 0; a < 8; a += 2) issue2(mk(OP_MFACC, a, 0), 0, 0, mk(OP_MFACC, a + 1, 0), 0, 0);
    repeat (8) @(posedge clk);
    for (int n = 0; n < 8; n++) for (int col = 0; col < 16; col++) begin
      int s, a;
      logic [31:0] got;
      s = 0;
      for (int ch = 0; ch < 3; ch++) for (int r = 0; r < 3; r++) for (int t = 0; t < 3; t++)
        s += ker[n][ch][r][t] * img[ch][r][col + t];
      a = 4*(n / 4) + col / 4;
      got = vsr[4*a + n % 4][127 - 32*(col % 4) -: 32];
      checks++;
      if (got !== d2f(real'(s))) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d][%0d] = %h expected %h", n, col, got, d2f(real'(s)));
      end
    end
    $display("SCONV 8 kernels x 27 taps x 16 outputs: %0d cycles of updates", t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
