// tb_gain_poly - checks g = A u^2 + B u + C against real arithmetic for
// random u and coefficients, then fits A, B, C for the channels of a
// 64-channel filter bank and checks that the polynomial stays within 2 % of
// the exact rational DC gain over u in [0, 1].
module tb_gain_poly;
  import carfac_pkg::*;
  import carfac_ref_pkg::*;
  sig_t  u;
  coef_t ga, gb, gc, g;
  int checks = 0, failures = 0;

  gain_poly dut (.u(u), .ga(ga), .gb(gb), .gc(gc), .g(g));

  initial begin
    real worst = 0.0;
    for (int i = 0; i < 500; i++) begin
      real ur, a, b, c, e, got;
      ur = real'($urandom_range(0, 1000)) / 1000.0;
      a  = (real'($urandom_range(0, 2000)) - 1000.0) / 2000.0;
      b  = (real'($urandom_range(0, 2000)) - 1000.0) / 2000.0;
      c  = real'($urandom_range(0, 1000)) / 1000.0;
      u = r2s(ur); ga = r2c(a); gb = r2c(b); gc = r2c(c);
      #1;
      e   = (real'(ga) * ur * ur + real'(gb) * ur + real'(gc)) / 65536.0;
      got = real'(g) / 65536.0;
      checks++;
      if (got - e > 1e-4 || e - got > 1e-4) begin
        failures++;
        $display("FAIL u=%f a=%f b=%f c=%f g=%f expected %f", ur, a, b, c, got, e);
      end
    end
    // approximation quality against the exact division
    for (int ch = 0; ch < 64; ch += 3) begin
      chan_coef_t cf;
      cf = design_channel(ch);
      ga = cf.ga; gb = cf.gb; gc = cf.gc;
      for (int i = 0; i <= 20; i++) begin
        real ur, r, ex, got, err;
        ur = i / 20.0;
        u  = r2s(ur);
        #1;
        r   = (real'(cf.r1) + ur * real'(cf.drz)) / 65536.0;
        ex  = exact_g(real'(cf.a0) / 65536.0, real'(cf.c0) / 65536.0, real'(cf.h) / 65536.0, r);
        got = real'(g) / 65536.0;
        err = (got - ex) / ex;
        if (err < 0.0) err = -err;
        if (err > worst) worst = err;
        checks++;
        if (err > 0.02) begin
          failures++;
          $display("FAIL ch %0d u=%f g=%f exact %f", ch, ur, got, ex);
        end
      end
    end
    $display("largest relative error of the quadratic gain: %f %%", worst * 100.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
