// carfac_pkg - shared fixed-point formats, constants and arithmetic helpers
// for the time-multiplexed CARFAC (Cascade of Asymmetric Resonators with
// Fast-Acting Compression) cochlea accelerator.
//
// Number formats (this design's choice; the source design only states a
// 24-bit input, mostly 18-bit multiplier operands, one guard bit on adds and
// shifts for multiplications by two):
//   sig_t  : signed 36-bit signal/state word, 24 fractional bits (Q12.24).
//   coef_t : signed 18-bit coefficient, 16 fractional bits (Q2.16), so every
//            signal x coefficient product is an 18-bit-operand DSP product.
// All helpers truncate (arithmetic shift) and saturate to the sig_t range.
// The time constants, sample rate and clock below are those of the
// published system; the remaining defaults are this design's choices.
package carfac_pkg;

  localparam int DW = 36;           // signal word width
  localparam int FW = 24;           // signal fraction bits
  localparam int CW = 18;           // coefficient width
  localparam int CF = 16;           // coefficient fraction bits
  localparam int XW = 24;           // input sample width (Q1.23)
  localparam int N_AGC = 4;         // AGC smoothing stages
  localparam int AGC_DECIM0 = 8;    // fastest stage updates every 8 samples

  localparam real FS_HZ  = 256000.0;     // input sample rate
  localparam real CLK_HZ = 100.0e6;      // system clock
  localparam int  CYCLES_PER_SAMPLE = 390; // floor(CLK_HZ / FS_HZ)

  typedef logic signed [DW-1:0] sig_t;
  typedef logic signed [CW-1:0] coef_t;
  typedef logic signed [79:0]   wide_t;

  localparam sig_t  S_ONE = sig_t'(1) <<< FW;
  localparam coef_t C_ONE = coef_t'(1) <<< CF;

  // per-channel coefficient fields held in the coefficient memory
  typedef enum logic [2:0] {
    F_A0  = 3'd0,   // a0 = cos(theta)
    F_C0  = 3'd1,   // c0 = sin(theta)
    F_H   = 3'd2,   // zero coefficient h
    F_R1  = 3'd3,   // pole radius at maximum damping
    F_DRZ = 3'd4,   // radius range d_rz
    F_GA  = 3'd5,   // DC-gain polynomial A
    F_GB  = 3'd6,   // DC-gain polynomial B
    F_GC  = 3'd7    // DC-gain polynomial C (gain at u = 0)
  } coef_sel_e;

  typedef struct packed {
    coef_t a0, c0, h, r1, drz, ga, gb, gc;
  } chan_coef_t;

  // ---- conversions of real constants (elaboration time only) ----
  function automatic coef_t r2c(input real r);
    return coef_t'($rtoi(r * 65536.0 + ((r < 0.0) ? -0.5 : 0.5)));
  endfunction
  function automatic sig_t r2s(input real r);
    return sig_t'($rtoi(r * 16777216.0 + ((r < 0.0) ? -0.5 : 0.5)));
  endfunction

  // ---- saturating fixed-point arithmetic ----
  localparam wide_t W_MAX = (wide_t'(1) <<< (DW - 1)) - 1;
  localparam wide_t W_MIN = -(wide_t'(1) <<< (DW - 1));

  function automatic sig_t sat(input wide_t v);
    if (v > W_MAX) return sig_t'(W_MAX);
    if (v < W_MIN) return sig_t'(W_MIN);
    return sig_t'(v);
  endfunction

  function automatic sig_t add(input sig_t a, input sig_t b);
    return sat(wide_t'(a) + wide_t'(b));
  endfunction

  function automatic sig_t sub(input sig_t a, input sig_t b);
    return sat(wide_t'(a) - wide_t'(b));
  endfunction

  // signal x coefficient (18-bit coefficient operand)
  function automatic sig_t mul_sc(input sig_t a, input coef_t c);
    return sat((wide_t'(a) * wide_t'(c)) >>> CF);
  endfunction

  // signal x signal
  function automatic sig_t mul_ss(input sig_t a, input sig_t b);
    return sat((wide_t'(a) * wide_t'(b)) >>> FW);
  endfunction

  // coefficient to signal format and back (saturating)
  function automatic sig_t c2s(input coef_t c);
    return sig_t'(c) <<< (FW - CF);
  endfunction
  function automatic coef_t s2c(input sig_t s);
    sig_t t;
    t = s >>> (FW - CF);
    if (t > sig_t'(131071)) return coef_t'(131071);
    if (t < -sig_t'(131072)) return coef_t'(-131072);
    return coef_t'(t);
  endfunction

  // clamp to [0, 1]
  function automatic sig_t clamp01(input sig_t s);
    if (s < 0) return '0;
    if (s > S_ONE) return S_ONE;
    return s;
  endfunction

  // ---- constants of the division-free nonlinearities ----
  localparam sig_t  S_IHC_OFS   = r2s(0.13);   // DIHC offset (eq. 6)
  localparam coef_t C_IHC_GAIN  = r2c(0.75);   // DIHC output scale (eq. 4)
  localparam coef_t C_OHC_SCALE = r2c(0.1);    // DOHC velocity scale
  localparam sig_t  S_OHC_OFS   = r2s(0.04);   // DOHC velocity offset

  // ---- DIHC filter coefficients (this design's choices) ----
  localparam coef_t C_IHC_HPF = r2c(2.0 * 3.14159265 * 20.0 / FS_HZ); // 20 Hz AC coupling
  localparam coef_t C_IHC_Q   = r2c(1.0 / (FS_HZ * 0.0005));          // reservoir LPF, 0.5 ms
  localparam coef_t C_IHC_LPF = r2c(1.0 / (FS_HZ * 0.00008));         // output LPFs, 80 us

  // ---- AGC loop coefficients ----
  // stage k = 0 is the fastest (tau 0.002 s, every 8 samples),
  // stage k = 3 the slowest (tau 0.128 s, every 64 samples).
  function automatic real agc_tau(input int k);
    case (k)
      0: return 0.002;
      1: return 0.008;
      2: return 0.032;
      default: return 0.128;
    endcase
  endfunction
  function automatic coef_t agc_ct(input int k);
    return r2c(real'(AGC_DECIM0 << k) / (FS_HZ * agc_tau(k)));
  endfunction
  localparam coef_t AGC_CT [N_AGC] = '{agc_ct(0), agc_ct(1), agc_ct(2), agc_ct(3)};
  localparam coef_t C_AGC_S1 = r2c(0.125);  // spatial tap towards the left neighbour
  localparam coef_t C_AGC_S2 = r2c(0.125);  // spatial tap towards the right neighbour

endpackage
