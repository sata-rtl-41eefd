// sata_ref_pkg: integer reference model of the SATA arithmetic, used by the
// testbenches to compute expected values independently of the RTL.
// Right shifts of signed values are written as floor divisions, the 8-bit
// saturation as an explicit clamp. Numbers are Q3.4 (value * 16).
package sata_ref_pkg;

  localparam int UTH_R       = 12;  // 0.75
  localparam int HALF_BETA_R = 20;  // 1.25

  function automatic int clamp8(input int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  // floor(v / 2^sh)
  function automatic int fdiv(input int v, input int sh);
    int d;
    d = 1 << sh;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int leak(input int v);   // alpha = 15/16
    return v - fdiv(v, 4);
  endfunction

  function automatic int s8(input logic [7:0] b);  // byte as signed int
    return int'($signed(b));
  endfunction

  function automatic bit in_window(input int u);
    int d;
    d = u - UTH_R;
    if (d < 0) d = -d;
    return d < HALF_BETA_R;
  endfunction

  // PGU: returns the dU word for one neuron
  function automatic logic [63:0] pgu_model(input logic [63:0] u_w, input logic [7:0] s_b,
                                            input logic [63:0] dh_w,
                                            output int n_ds, output int n_skip);
    int dnext, a, u, prod, ds, term, keep, du;
    logic [63:0] r;
    r = '0; dnext = 0; n_ds = 0; n_skip = 0;
    for (int t = 7; t >= 0; t--) begin
      a = leak(dnext);
      u = s8(u_w[8*t +: 8]);
      if (in_window(u)) begin
        prod = -a * u;
        ds   = clamp8(fdiv(prod, 4) + s8(dh_w[8*t +: 8]));
        term = fdiv(ds, 1);
        n_ds++;
      end else begin
        term = 0;
        n_skip++;
      end
      keep = s_b[t] ? 0 : a;
      du   = clamp8(keep + term);
      r[8*t +: 8] = 8'(du);
      dnext = du;
    end
    return r;
  endfunction

endpackage
