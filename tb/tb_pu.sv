// tb_pu: self-checking test of one processing unit (grid position 1,1).
//
// Both pipelines issue random slice writes each cycle: accumulator moves,
// zeroing, and accumulating int16 rank-2 updates that read the newest copy of
// an accumulator from either half. The testbench keeps its own table of which
// half holds the newest copy of each accumulator and the expected slice value,
// drives rd_loc from that table, and checks every read and every update. It
// counts how often an ALU took its input from the other half.
module tb_pu;
  import mma_pkg::*;
  localparam int ROW = 1, COL = 1;

  logic                 clk = 0;
  mma_instr_t           instr   [2];
  logic [127:0]         x1 [2], x2 [2], y [2];
  logic [ACC_IDX_W-1:0] acc_idx [2];
  logic                 rd_loc  [2];
  logic                 we      [2];
  wr_src_e              wsrc    [2];
  logic [63:0]          mv_data [2];
  logic [63:0]          rd_data [2];

  logic [63:0] model [8];
  logic        loc   [8];
  int checks = 0, failures = 0, cross_reads = 0;

  pu #(.ROW(ROW), .COL(COL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_i16(logic [127:0] x, logic [127:0] yv, logic [63:0] acc);
    logic [63:0] r;
    for (int e = 0; e < 2; e++) begin
      int j;
      logic [31:0] s;
      j = 2*COL + e;
      s = acc[63-32*e -: 32];
      for (int k = 0; k < 2; k++)
        s += 32'(signed'(x[127-16*(2*ROW+k) -: 16]) * signed'(yv[127-16*(2*j+k) -: 16]));
      r[63-32*e -: 32] = s;
    end
    return r;
  endfunction

  initial begin
    logic [63:0] expv [2];
    // prime all accumulators through pipeline 0
    for (int a = 0; a < 8; a++) begin
      @(negedge clk);
      we[0] = 1; we[1] = 0; wsrc[0] = WSRC_MOVE; wsrc[1] = WSRC_MOVE;
      acc_idx[0] = 3'(a); acc_idx[1] = 3'(a); rd_loc[0] = 0; rd_loc[1] = 0;
      mv_data[0] = {$urandom, $urandom}; mv_data[1] = '0;
      instr[0] = '0; instr[1] = '0;
      x1[0] = '0; x1[1] = '0; x2[0] = '0; x2[1] = '0; y[0] = '0; y[1] = '0;
      model[a] = mv_data[0]; loc[a] = 0;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      acc_idx[0] = 3'($urandom);
      acc_idx[1] = 3'($urandom);
      for (int p = 0; p < 2; p++) begin
        int kind;
        kind = $urandom_range(0, 5);
        instr[p] = '0;
        instr[p].op = OP_I16GER2; instr[p].accum = 1; instr[p].xmsk = '1; instr[p].ymsk = '1; instr[p].pmsk = '1;
        x1[p] = {$urandom, $urandom, $urandom, $urandom};
        y[p]  = {$urandom, $urandom, $urandom, $urandom};
        mv_data[p] = {$urandom, $urandom};
        rd_loc[p] = loc[acc_idx[p]];
        we[p] = (kind != 0);
        wsrc[p] = (kind == 1) ? WSRC_MOVE : (kind == 2) ? WSRC_ZERO : WSRC_ALU;
      end
      if (acc_idx[0] == acc_idx[1]) we[1] = 0;   // one writer per accumulator
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_data[p] !== model[acc_idx[p]]) begin
          failures++;
          $display("FAIL read pipe %0d acc %0d: %h expected %h", p, acc_idx[p], rd_data[p], model[acc_idx[p]]);
        end
        expv[p] = (wsrc[p] == WSRC_MOVE) ? mv_data[p] : (wsrc[p] == WSRC_ZERO) ? 64'd0 :
                  ref_i16(x1[p], y[p], model[acc_idx[p]]);
        if (we[p] && wsrc[p] == WSRC_ALU && rd_loc[p] != 1'(p)) cross_reads++;
      end
      @(posedge clk);
      for (int p = 0; p < 2; p++)
        if (we[p]) begin model[acc_idx[p]] = expv[p]; loc[acc_idx[p]] = 1'(p); end
    end
    // read everything back from the final locations
    @(negedge clk);
    we[0] = 0; we[1] = 0;
    for (int a = 0; a < 8; a++) begin
      acc_idx[0] = 3'(a); acc_idx[1] = 3'(a); rd_loc[0] = loc[a]; rd_loc[1] = loc[a];
      #1;
      checks += 2;
      if (rd_data[0] !== model[a] || rd_data[1] !== model[a]) begin failures++; $display("FAIL final acc %0d", a); end
    end
    if (cross_reads == 0) begin failures++; $display("no cross-half read"); end
    $display("cross-half ALU reads: %0d", cross_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
