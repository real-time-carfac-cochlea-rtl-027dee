// agc_sf - the single AGC smoothing filter (temporal LPF + 3-tap spatial
// smoother) that is time-shared by all four AGC stages and all channels.
//
// Temporal part:  in = acc_avg + 2 * slower      (gain 2 is a shift)
//                 t  = c_t * in + (1 - c_t) * prev
// where acc_avg is the decimated (averaged) DIHC accumulation of this stage,
// slower the state of the next-slower stage (zero for the slowest stage) and
// prev this stage's own state for the channel.
// Spatial part:   out = s1 * left + (1 - s1 - s2) * center + s2 * right
// taking the temporal results of the channel and of its two neighbours.
// Both halves are combinational; agc_loop sequences them so that the
// spatial result of channel j-1 is formed when the temporal result of
// channel j appears.
// The structure (c_t, 1-c_t, s1, 1-s1-s2, s2, gain 2 from the slower
// stage) follows the source design; the coefficient values are supplied by
// agc_loop and are this design's choice for s1/s2.
module agc_sf
  import carfac_pkg::*;
(
  // temporal LPF
  input  sig_t  acc_avg,
  input  sig_t  slower,
  input  sig_t  prev,
  input  coef_t ct,
  output sig_t  t,
  // spatial smoother
  input  sig_t  left,
  input  sig_t  center,
  input  sig_t  right,
  input  coef_t s1,
  input  coef_t s2,
  output sig_t  out
);
  sig_t in_sum;
  coef_t one_m_ct, one_m_s;

  // temporal and spatial halves are kept in separate processes: the
  // sequencer feeds t of channel j back as the right neighbour of channel j-1
  always_comb begin
    in_sum   = add(add(acc_avg, slower), slower);
    one_m_ct = C_ONE - ct;
    t        = add(mul_sc(in_sum, ct), mul_sc(prev, one_m_ct));
  end

  always_comb begin
    one_m_s  = C_ONE - s1 - s2;
    out      = add(add(mul_sc(left, s1), mul_sc(center, one_m_s)), mul_sc(right, s2));
  end
endmodule
