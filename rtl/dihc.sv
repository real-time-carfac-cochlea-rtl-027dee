// dihc - time-multiplexed digital inner hair cell.
//
// Converts the BM displacement y of one channel per cycle into a firing-rate
// like signal that drives the AGC loop. Two pipeline cycles:
//   cycle 1: AC-coupling high-pass  hp = y - lp,  lp += c_hpf (y - lp);
//            transduction NLF        vmem = ihc_nlf(hp)
//   cycle 2: transducer              released = vmem * (1 - q)
//                                    q  += c_q   (20 * released - q)
//            two output LPFs          l1 += c_lpf (released - l1)
//                                    l2 += c_lpf (l1' - l2)
// q is the depletion of the transmitter reservoir ("1 - q" is the
// reservoir), fed back through an LPF with the printed gain of 20 (done as
// shifts, 16x + 4x). Every filter keeps its per-channel state here.
// The structure follows the DIHC diagram of the source design; the filter
// coefficients are this design's choices (parameters).
// Timing: in_* sampled at a clock edge, out_* valid two edges later.
module dihc
  import carfac_pkg::*;
#(
  parameter int    N_CH  = 64,
  parameter int    CHW   = (N_CH > 1) ? $clog2(N_CH) : 1,
  parameter coef_t C_HPF = C_IHC_HPF,
  parameter coef_t C_Q   = C_IHC_Q,
  parameter coef_t C_LPF = C_IHC_LPF
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  sig_t           in_y,
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output sig_t           out_ihc,
  output logic           out_p_clip
);
  sig_t hlp_mem [N_CH];
  sig_t q_mem   [N_CH];
  sig_t l1_mem  [N_CH];
  sig_t l2_mem  [N_CH];

  // ---------------- cycle 1 ----------------
  sig_t hlp, hp, vmem_c;
  logic clip_c;

  always_comb begin
    hlp = hlp_mem[in_ch];
    hp  = sub(in_y, hlp);
  end

  ihc_nlf u_nlf (.x(hp), .vmem(vmem_c), .p_clip(clip_c));

  logic           s1_valid;
  logic [CHW-1:0] s1_ch;
  sig_t           s1_vmem;
  logic           s1_clip;

  // ---------------- cycle 2 ----------------
  sig_t q, l1, l2, rel, rel20, q_n, l1_n, l2_n;

  always_comb begin
    q     = q_mem[s1_ch];
    l1    = l1_mem[s1_ch];
    l2    = l2_mem[s1_ch];
    rel   = mul_ss(s1_vmem, sub(S_ONE, q));
    rel20 = add(rel <<< 4, rel <<< 2);
    q_n   = add(q, mul_sc(sub(rel20, q), C_Q));
    l1_n  = add(l1, mul_sc(sub(rel, l1), C_LPF));
    l2_n  = add(l2, mul_sc(sub(l1_n, l2), C_LPF));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) begin
        hlp_mem[i] <= '0;
        q_mem[i]   <= '0;
        l1_mem[i]  <= '0;
        l2_mem[i]  <= '0;
      end
      s1_valid   <= 1'b0;
      s1_ch      <= '0;
      s1_vmem    <= '0;
      s1_clip    <= 1'b0;
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_ihc    <= '0;
      out_p_clip <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
      out_p_clip <= s1_valid & s1_clip;
      if (in_valid) begin
        hlp_mem[in_ch] <= add(hlp, mul_sc(hp, C_HPF));
        s1_ch   <= in_ch;
        s1_vmem <= vmem_c;
        s1_clip <= clip_c;
      end
      if (s1_valid) begin
        q_mem[s1_ch]  <= q_n;
        l1_mem[s1_ch] <= l1_n;
        l2_mem[s1_ch] <= l2_n;
        out_ch     <= s1_ch;
        out_ihc    <= l2_n;
      end
    end
  end
endmodule
