// pgu_mask_gen: firing-gradient mask of a potential gradient unit.
//
// mask = 1 when |U - UTH| < HALF_BETA, i.e. when the membrane potential lies
// inside the window of width beta around the threshold where the surrogate
// derivative f'(U) = 1/beta is non-zero. When mask = 0 the PGU skips the
// whole dS computation (nabla-f sparsity). Combinational. The rule follows
// the paper; the constants are the paper's Uth = 0.75 and beta = 2.5 in Q3.4.
module pgu_mask_gen
  import sata_pkg::*;
#(
  parameter int UTH       = UTH_DEF,
  parameter int HALF_BETA = HALF_BETA_DEF
) (
  input  logic signed [7:0] u,
  output logic              mask
);
  logic signed [9:0] diff;
  logic        [9:0] mag;

  always_comb begin
    diff = 10'(u) - 10'(UTH);
    mag  = diff[9] ? 10'(-diff) : 10'(diff);
    mask = (int'(mag) < HALF_BETA);
  end
endmodule
