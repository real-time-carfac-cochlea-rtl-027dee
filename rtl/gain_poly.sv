// gain_poly - division-free DC gain of one CAR section.
//
// The exact gain g = (1 - 2 a0 r + r^2) / (1 - (2 a0 - h c0) r + r^2) varies
// with the undamping u through r = r1 + d_rz * u. The source design replaces
// the division by a per-channel quadratic in u, g = A u^2 + B u + C, whose
// coefficients are computed off-line for each channel and stored with the
// other channel coefficients. It is evaluated here in Horner form,
// g = (A u + B) u + C, i.e. two multipliers and one cycle of logic.
// Combinational. u is in [0, 1] (sig_t), A/B/C and g are coef_t (Q2.16).
module gain_poly
  import carfac_pkg::*;
(
  input  sig_t  u,
  input  coef_t ga,
  input  coef_t gb,
  input  coef_t gc,
  output coef_t g
);
  sig_t t, acc;

  always_comb begin
    t   = add(mul_sc(u, ga), c2s(gb));
    acc = add(mul_ss(t, u), c2s(gc));
    g   = s2c(acc);
  end
endmodule
