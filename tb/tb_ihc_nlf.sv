// tb_ihc_nlf - checks the division-free DIHC nonlinearity against the
// real-valued formula vmem = 0.75 (1 - min(1, max(0, 1-(x+0.13)/4)^8))^2
// over a sweep of the input from -2 to +6, and the clip flag.
module tb_ihc_nlf;
  import carfac_pkg::*;
  sig_t x, vmem;
  logic clip;
  int checks = 0, failures = 0;

  ihc_nlf dut (.x(x), .vmem(vmem), .p_clip(clip));

  initial begin
    for (int i = 0; i <= 800; i++) begin
      real xr, pi_, p, e, got;
      xr  = -2.0 + 0.01 * i;
      x   = r2s(xr);
      #1;
      pi_ = 1.0 - (xr + 0.13) / 4.0;
      if (pi_ < 0.0) pi_ = 0.0;
      p   = pi_ ** 8;
      if (p > 1.0) p = 1.0;
      e   = 0.75 * (1.0 - p) * (1.0 - p);
      got = real'(vmem) / 16777216.0;
      checks++;
      if (got - e > 1e-4 || e - got > 1e-4) begin
        failures++;
        $display("FAIL x=%f vmem=%f expected %f", xr, got, e);
      end
      checks++;
      if (clip != (pi_ >= 1.0)) begin
        failures++;
        $display("FAIL x=%f clip=%0b", xr, clip);
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
