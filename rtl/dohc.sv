// dohc - digital outer hair cell: the fast-acting part of the compression.
//
// For one channel per cycle it forms the BM velocity v = W1(t) - W1(t-1),
// passes it through the division-free OHC nonlinearity, scales the result
// by the AGC factor (1 - b) to get the undamping u, and from u derives the
// next pole radius and DC gain of that channel's CAR section:
//   r = r1 + d_rz * u
//   g = A u^2 + B u + C            (gain_poly)
// Timing: one pipeline cycle (the "DOHC" cycle of the six-cycle channel
// schedule); inputs are sampled at the clock edge, upd_* are registered and
// are written into the CAR section's r/g memory on the following edge.
// The structure and constants follow the source design; the one-register
// placement inside the cycle is this design's choice.
module dohc
  import carfac_pkg::*;
#(
  parameter int CHW = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  sig_t           w1_new,     // W1 after this sample's update
  input  sig_t           w1_old,     // W1 one sample earlier
  input  sig_t           one_m_b,    // 1 - b from the AGC loop, in [0,1]
  input  coef_t          r1,
  input  coef_t          drz,
  input  coef_t          ga,
  input  coef_t          gb,
  input  coef_t          gc,
  output logic           upd_valid,
  output logic [CHW-1:0] upd_ch,
  output coef_t          upd_r,
  output coef_t          upd_g,
  output sig_t           upd_u,      // undamping, for observation
  output logic           nlf_clip    // OHC nonlinearity fully saturated
);
  sig_t  v, nlf, u;
  coef_t r_c, g_c;
  logic  clip_c;

  assign v = sub(w1_new, w1_old);

  ohc_nlf u_nlf (.v(v), .nlf(nlf), .clip(clip_c));

  assign u   = mul_ss(one_m_b, nlf);
  assign r_c = s2c(add(c2s(r1), mul_sc(u, drz)));

  gain_poly u_gain (.u(u), .ga(ga), .gb(gb), .gc(gc), .g(g_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_valid <= 1'b0;
      upd_ch    <= '0;
      upd_r     <= '0;
      upd_g     <= '0;
      upd_u     <= '0;
      nlf_clip  <= 1'b0;
    end else begin
      upd_valid <= in_valid;
      upd_ch    <= in_ch;
      upd_r     <= r_c;
      upd_g     <= g_c;
      upd_u     <= u;
      nlf_clip  <= in_valid & clip_c;
    end
  end
endmodule
