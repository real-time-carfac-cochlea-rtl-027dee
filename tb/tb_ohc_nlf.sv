// tb_ohc_nlf - checks the division-free DOHC nonlinearity against the
// real-valued formula NLF = max(0, 1 - (0.1 v + 0.04)^2 / 8)^8 for
// velocities from -40 to +40, and the clip flag.
module tb_ohc_nlf;
  import carfac_pkg::*;
  sig_t v, nlf;
  logic clip;
  int checks = 0, failures = 0;

  ohc_nlf dut (.v(v), .nlf(nlf), .clip(clip));

  initial begin
    for (int i = 0; i <= 1600; i++) begin
      real vr, s, t, e, got;
      vr  = -40.0 + 0.05 * i;
      v   = r2s(vr);
      #1;
      s   = 0.1 * vr + 0.04;
      t   = 1.0 - s * s / 8.0;
      if (t < 0.0) t = 0.0;
      e   = t ** 8;
      got = real'(nlf) / 16777216.0;
      checks++;
      if (got - e > 1e-4 || e - got > 1e-4) begin
        failures++;
        $display("FAIL v=%f nlf=%f expected %f", vr, got, e);
      end
      checks++;
      if (clip != (1.0 - s * s / 8.0 < -1e-6)) begin
        if (s * s / 8.0 - 1.0 > 1e-4 || 1.0 - s * s / 8.0 > 1e-4) begin
          failures++;
          $display("FAIL v=%f clip=%0b", vr, clip);
        end
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
