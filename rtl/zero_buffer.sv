// zero_buffer: bit-mask store used for sparsity gating in a PE.
//
// Every time a value is written into the input spad, the same strobe writes
// one bit here: 1 when the value is non-zero, 0 when it is zero (the '=='
// comparator in front of the buffer). During backpropagation the PE reads the
// bit of the entry it is about to use and, when it is 0, skips the filter
// read and the multiply-accumulate. DEPTH = 1152 bits is the 144-byte buffer
// of the design point. Write is synchronous, read combinational.
module zero_buffer #(
  parameter int unsigned DEPTH  = 1152,
  parameter int unsigned DATA_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic              mask
);
  logic bits [DEPTH];

  always_ff @(posedge clk) begin
    if (we) bits[waddr] <= (wdata != '0);
  end

  assign mask = bits[raddr];
endmodule
