// lif_unit: leaky integrate-and-fire update of one neuron for one timestep.
//
//   U_t      = sat8( alpha * U_carry + psum )      alpha*x = x - (x >>> ALPHA_SHIFT)
//   S_t      = (U_t > UTH)
//   U_next   = S_t ? 0 : U_t                        (reset after a spike)
//
// U_carry is the potential kept from the previous timestep, already reset to
// zero if the neuron fired then, so U_t = alpha*U_{t-1}*(1-S_{t-1}) + W*S_t.
// With integrate_only set (neurons of the last, output layer) the leak,
// the comparison and the reset are switched off: U_t = sat8(U_carry + psum)
// and S_t = 0, as the output neurons of the paper's network only accumulate.
// Purely combinational; the PE registers U_next. The structure (shift and
// subtract for the leak, '> Uth' comparator, reset multiplexer with 0)
// and the non-leaky, non-firing output layer follow the paper; the shift
// amount, the saturation and the integrate_only input are this design's.
module lif_unit
  import sata_pkg::*;
#(
  parameter int unsigned ACC_W       = ACC_W_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF
) (
  input  logic signed [ACC_W-1:0] psum,
  input  logic signed [7:0]       u_carry,
  input  logic                    integrate_only,
  output logic signed [7:0]       u_t,
  output logic                    s_t,
  output logic signed [7:0]       u_next
);
  logic signed [7:0]  leaked;
  logic signed [31:0] sum;

  always_comb begin
    leaked = integrate_only ? u_carry : u_carry - (u_carry >>> ALPHA_SHIFT);
    sum    = 32'(leaked) + 32'(psum);
    u_t    = sat8(sum);
    s_t    = !integrate_only && (32'(u_t) > UTH);
    u_next = s_t ? 8'sd0 : u_t;
  end
endmodule
