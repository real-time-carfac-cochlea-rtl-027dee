// ihc_nlf - division-free transduction nonlinearity of the digital inner
// hair cell (DIHC).
//
// The original CARFAC conductance p^3/(p^3+p^2+0.1) needs a divider. This
// block uses the polynomial replacement of the source design instead:
//   p_int = max(0, 1 - (x + 0.13)/4)
//   p     = min(1, p_int^8)
//   vmem  = 0.75 * (1 - p)^2
// The /4 is an arithmetic shift, p_int^8 is three squarings. The block is
// purely combinational (it sits inside the first DIHC pipeline cycle).
// Interface: x is the high-pass filtered BM displacement (sig_t), vmem the
// membrane conductance in [0, 0.75]; p_clip flags that min(1, .) was active
// (strong negative drive, vmem = 0).
module ihc_nlf
  import carfac_pkg::*;
(
  input  sig_t x,
  output sig_t vmem,
  output logic p_clip
);
  sig_t pint, p2, p4, p8, p, om;

  always_comb begin
    pint = sub(S_ONE, add(x, S_IHC_OFS) >>> 2);
    if (pint < 0) pint = '0;
    p2 = mul_ss(pint, pint);
    p4 = mul_ss(p2, p2);
    p8 = mul_ss(p4, p4);
    p_clip = (pint >= S_ONE);
    p  = p_clip ? S_ONE : p8;
    om = S_ONE - p;
    vmem = mul_sc(mul_ss(om, om), C_IHC_GAIN);
  end
endmodule
