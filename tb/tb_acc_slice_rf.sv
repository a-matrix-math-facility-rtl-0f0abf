// tb_acc_slice_rf: self-checking test of acc_slice_rf. Random writes and
// reads on both read ports are compared with a shadow array; reads in the
// cycle of a write must return the old contents.
module tb_acc_slice_rf;
  logic        clk = 0;
  logic [2:0]  raddr0, raddr1, waddr;
  logic [63:0] rdata0, rdata1, wdata;
  logic        we;
  logic [63:0] shadow [8];
  int checks = 0, failures = 0;

  acc_slice_rf dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr0 = 0; raddr1 = 0; waddr = 0; wdata = 0;
    // fill every entry
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); we = 1; waddr = 3'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 3'($urandom); wdata = {$urandom, $urandom};
      raddr0 = 3'($urandom); raddr1 = (n % 4 == 0) ? waddr : 3'($urandom);
      #1;
      checks += 2;
      if (rdata0 !== shadow[raddr0]) begin failures++; $display("FAIL port0 %0d", raddr0); end
      if (rdata1 !== shadow[raddr1]) begin failures++; $display("FAIL port1 %0d", raddr1); end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
