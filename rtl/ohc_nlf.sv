// ohc_nlf - division-free compression nonlinearity of the digital outer
// hair cell (DOHC).
//
// The original CARFAC uses NLF = 1/(1 + (scale*v + offset)^2). This block
// uses the replacement of the source design:
//   sqr = (0.1 * v + 0.04)^2
//   NLF = max(0, 1 - sqr/8)^8
// with the /8 done as a shift and the 8th power as three squarings.
// Combinational. Interface: v is the BM velocity (difference of W1 across
// one sample), nlf is in [0, 1]; clip flags that max(0, .) was active, i.e.
// the velocity is large enough to switch the undamping off entirely.
module ohc_nlf
  import carfac_pkg::*;
(
  input  sig_t v,
  output sig_t nlf,
  output logic clip
);
  sig_t s, sqr, t, t2, t4;

  always_comb begin
    s    = add(mul_sc(v, C_OHC_SCALE), S_OHC_OFS);
    sqr  = mul_ss(s, s);
    t    = sub(S_ONE, sqr >>> 3);
    clip = (t < 0);
    if (clip) t = '0;
    t2   = mul_ss(t, t);
    t4   = mul_ss(t2, t2);
    nlf  = mul_ss(t4, t4);
  end
endmodule
