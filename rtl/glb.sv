// glb: global buffer (the W, U, dU and S buffers are each one instance).
//
// DEPTH words of WORD_W bits (default 64 = the T = 8 bytes of one neuron, or
// eight 8-bit weights / spike bytes). One read port with the data registered
// (rdata valid the cycle after re) and one write port with byte enables, so
// single bytes can be written. Sizes of the four instances follow the paper
// (144 KB, 256 KB, 256 KB, 32 KB); word width and ports are this design's.
module glb #(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned NB    = WORD_W / 8
) (
  input  logic              clk,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic [NB-1:0]     wbe
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < NB; b++)
        if (wbe[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
    if (re) rdata <= mem[raddr];
  end
endmodule
