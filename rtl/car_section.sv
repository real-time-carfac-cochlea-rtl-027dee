// car_section - the time-multiplexed cascade of asymmetric resonators (CAR).
//
// One two-pole-two-zero section H_n is evaluated per clock cycle; issuing
// channels 0..N_CH-1 on consecutive cycles runs the whole cascade for one
// input sample, the output of channel n being registered and fed to channel
// n+1 on the next cycle. With W0/W1 the two state words of the channel:
//   W0' = r (a0 W0 - c0 W1) + x_in
//   W1' = r (c0 W0 + a0 W1)
//   y   = g (x_in + h W1')
// x_in is the input sample for the first channel (in_first) and the previous
// channel's y otherwise. a0, c0, h come from the coefficient memory; r and g
// are per-channel state owned here, rewritten by the DOHC (upd_*) every
// sample and initialised by host writes of the r1 / C coefficients (init_*).
// Timing: one cycle; out_* are registered. out_w1_old carries W1 of the
// previous sample so the DOHC can form the velocity.
// The section structure follows the source design; the number formats and
// the host initialisation of r/g are this design's choices.
module car_section
  import carfac_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int CHW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // issue of one channel
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  logic           in_first,
  input  sig_t           in_x,
  input  coef_t          a0,
  input  coef_t          c0,
  input  coef_t          h,
  // registered result
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output sig_t           out_y,
  output sig_t           out_w1_new,
  output sig_t           out_w1_old,
  // r / g update from the DOHC
  input  logic           upd_valid,
  input  logic [CHW-1:0] upd_ch,
  input  coef_t          upd_r,
  input  coef_t          upd_g,
  // host initialisation of r / g
  input  logic           init_r_we,
  input  logic           init_g_we,
  input  logic [CHW-1:0] init_ch,
  input  coef_t          init_data
);
  sig_t  w0_mem [N_CH];
  sig_t  w1_mem [N_CH];
  coef_t r_mem  [N_CH];
  coef_t g_mem  [N_CH];

  sig_t  w0, w1, x_in, w0_n, w1_n, y_n;
  coef_t r, g;

  always_comb begin
    w0   = w0_mem[in_ch];
    w1   = w1_mem[in_ch];
    r    = r_mem[in_ch];
    g    = g_mem[in_ch];
    x_in = in_first ? in_x : out_y;
    w0_n = add(mul_sc(sub(mul_sc(w0, a0), mul_sc(w1, c0)), r), x_in);
    w1_n = mul_sc(add(mul_sc(w0, c0), mul_sc(w1, a0)), r);
    y_n  = mul_sc(add(x_in, mul_sc(w1_n, h)), g);
  end

  // BM state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) begin
        w0_mem[i] <= '0;
        w1_mem[i] <= '0;
      end
    end else if (in_valid) begin
      w0_mem[in_ch] <= w0_n;
      w1_mem[in_ch] <= w1_n;
    end
  end

  // radius / gain state: the DOHC update has priority over host writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) begin
        r_mem[i] <= '0;
        g_mem[i] <= '0;
      end
    end else if (upd_valid) begin
      r_mem[upd_ch] <= upd_r;
      g_mem[upd_ch] <= upd_g;
    end else begin
      if (init_r_we) r_mem[init_ch] <= init_data;
      if (init_g_we) g_mem[init_ch] <= init_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_y      <= '0;
      out_w1_new <= '0;
      out_w1_old <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ch     <= in_ch;
        out_y      <= y_n;
        out_w1_new <= w1_n;
        out_w1_old <= w1;
      end
    end
  end
endmodule
