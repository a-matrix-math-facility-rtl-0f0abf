// acc_slice_rf: one 64-bit slice of the accumulator register file.
//
// Every half of every processing unit holds the same 64-bit slice of all eight
// 512-bit accumulators (ACC2 in the half fed by issue slot 2, ACC3 in the half
// fed by slot 3). The slice has two read ports and one write port, as in the
// paper: read port 0 feeds pipeline MU2 and read port 1 feeds MU3, because an
// ALU may take its accumulator input from either half, while only the ALU of
// this half (or an accumulator move issued to this half's pipeline) writes it.
//
// Timing: reads are combinational from the address; the write happens at the
// rising clock edge. A read in the cycle of a write returns the old value.
// The storage is not reset: an accumulator must be primed (xxsetaccz, xxmtacc
// or a non-accumulating rank-k update) before it is read.
module acc_slice_rf #(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned WIDTH   = 64
) (
  input  logic                       clk,
  input  logic [$clog2(ENTRIES)-1:0] raddr0,
  output logic [WIDTH-1:0]           rdata0,
  input  logic [$clog2(ENTRIES)-1:0] raddr1,
  output logic [WIDTH-1:0]           rdata1,
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [WIDTH-1:0]           wdata
);
  logic [WIDTH-1:0] mem [ENTRIES];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
