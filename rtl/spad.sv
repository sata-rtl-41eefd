// spad: scratch pad inside a PE (input, filter and psum spads are each one
// instance). DEPTH entries of DATA_W bits; the default 128 x 9 entries of
// 8 bits (1.125 KB) holds 128 input channels of a 3x3 kernel.
//
// One synchronous write port and one combinational read port, so the PE can
// consume one entry per clock. The read port has an enable: when the PE's
// sparsity logic gates a read (re = 0) the output is forced to zero, which
// stands in for the array not being read. Size and role follow the paper;
// the port arrangement is this design's choice.
module spad #(
  parameter int unsigned DEPTH  = 1152,
  parameter int unsigned DATA_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = re ? mem[raddr] : '0;
endmodule
