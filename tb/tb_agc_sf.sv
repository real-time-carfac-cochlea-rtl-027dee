// tb_agc_sf - checks the shared AGC smoothing filter: the temporal part
// t = c_t (acc + 2 slower) + (1 - c_t) prev and the spatial part
// out = s1 left + (1 - s1 - s2) center + s2 right, against real arithmetic
// with random operands and unequal s1 / s2.
module tb_agc_sf;
  import carfac_pkg::*;
  sig_t  acc, slower, prev, t, left, center, right, out;
  coef_t ct, s1, s2;
  int checks = 0, failures = 0;

  agc_sf dut (.acc_avg(acc), .slower(slower), .prev(prev), .ct(ct), .t(t),
              .left(left), .center(center), .right(right), .s1(s1), .s2(s2), .out(out));

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  initial begin
    for (int i = 0; i < 1000; i++) begin
      real a, sl, pv, c, l, m, r, k1, k2, et, eo, gt, go;
      a = rnd(0.0, 1.0); sl = rnd(0.0, 1.0); pv = rnd(0.0, 2.0); c = rnd(0.0, 0.1);
      l = rnd(-1.0, 1.0); m = rnd(-1.0, 1.0); r = rnd(-1.0, 1.0);
      k1 = rnd(0.0, 0.3); k2 = rnd(0.0, 0.3);
      acc = r2s(a); slower = r2s(sl); prev = r2s(pv); ct = r2c(c);
      left = r2s(l); center = r2s(m); right = r2s(r); s1 = r2c(k1); s2 = r2c(k2);
      #1;
      c  = real'(ct) / 65536.0; k1 = real'(s1) / 65536.0; k2 = real'(s2) / 65536.0;
      et = c * (a + 2.0 * sl) + (1.0 - c) * pv;
      eo = k1 * l + (1.0 - k1 - k2) * m + k2 * r;
      gt = real'(t) / 16777216.0;
      go = real'(out) / 16777216.0;
      checks++;
      if (gt - et > 1e-5 || et - gt > 1e-5) begin
        failures++;
        $display("FAIL temporal %f expected %f", gt, et);
      end
      checks++;
      if (go - eo > 1e-5 || eo - go > 1e-5) begin
        failures++;
        $display("FAIL spatial %f expected %f", go, eo);
      end
    end
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
