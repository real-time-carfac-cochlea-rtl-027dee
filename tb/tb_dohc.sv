// tb_dohc - checks the DOHC update for random velocities, AGC factors and
// channel coefficients against real arithmetic:
//   v = W1new - W1old, NLF = max(0, 1-(0.1v+0.04)^2/8)^8, u = (1-b) NLF,
//   r = r1 + d_rz u, g = A u^2 + B u + C,
// and that the result appears exactly one clock after the inputs.
module tb_dohc;
  import carfac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid = 0;
  logic [5:0] in_ch = '0;
  sig_t       w1n = '0, w1o = '0, omb = '0;
  coef_t      r1 = '0, drz = '0, ga = '0, gb = '0, gc = '0;
  logic       upd_valid, clip;
  logic [5:0] upd_ch;
  coef_t      upd_r, upd_g;
  sig_t       upd_u;
  int checks = 0, failures = 0, nclip = 0;

  dohc #(.CHW(6)) dut (.clk, .rst_n, .in_valid, .in_ch, .w1_new(w1n), .w1_old(w1o),
    .one_m_b(omb), .r1, .drz, .ga, .gb, .gc,
    .upd_valid, .upd_ch, .upd_r, .upd_g, .upd_u, .nlf_clip(clip));

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      real vn, vo, b, v, s, t, nl, u, er, eg;
      vn = rnd(-2.0, 2.0);
      vo = (i % 10 == 0) ? vn + rnd(-40.0, 40.0) : vn + rnd(-4.0, 4.0);
      b  = rnd(0.0, 1.0);
      w1n <= r2s(vn); w1o <= r2s(vo); omb <= r2s(b);
      r1 <= r2c(rnd(0.3, 0.9)); drz <= r2c(rnd(0.0, 0.1));
      ga <= r2c(rnd(-0.5, 0.5)); gb <= r2c(rnd(-0.5, 0.5)); gc <= r2c(rnd(0.5, 1.0));
      in_valid <= 1; in_ch <= 6'(i);
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks++;
      if (!upd_valid || upd_ch != 6'(i)) begin
        failures++; $display("FAIL no update one cycle after the input");
      end
      v  = real'(w1n - w1o) / 16777216.0;
      s  = 0.1 * v + 0.04;
      t  = 1.0 - s * s / 8.0;
      if (t < 0.0) t = 0.0;
      nl = t * t; nl = nl * nl; nl = nl * nl;
      u  = real'(omb) / 16777216.0 * nl;
      er = real'(r1) / 65536.0 + real'(drz) / 65536.0 * u;
      eg = (real'(ga) * u * u + real'(gb) * u + real'(gc)) / 65536.0;
      if (clip) nclip++;
      checks += 3;
      if (real'(upd_u) / 16777216.0 - u > 1e-4 || u - real'(upd_u) / 16777216.0 > 1e-4) begin
        failures++; $display("FAIL u %f expected %f", real'(upd_u) / 16777216.0, u);
      end
      if (real'(upd_r) / 65536.0 - er > 1e-4 || er - real'(upd_r) / 65536.0 > 1e-4) begin
        failures++; $display("FAIL r %f expected %f", real'(upd_r) / 65536.0, er);
      end
      if (real'(upd_g) / 65536.0 - eg > 1e-4 || eg - real'(upd_g) / 65536.0 > 1e-4) begin
        failures++; $display("FAIL g %f expected %f", real'(upd_g) / 65536.0, eg);
      end
      @(posedge clk);
      #1;
      checks++;
      if (upd_valid) begin failures++; $display("FAIL stray update"); end
    end
    checks++;
    if (nclip == 0) begin failures++; $display("FAIL NLF never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
