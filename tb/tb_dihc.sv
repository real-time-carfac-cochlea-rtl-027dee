// tb_dihc - drives 3 channels back to back (one per cycle) for 300 samples
// of a loud random BM signal and compares the DIHC output of every channel
// with a real-valued model of AC coupling, the transduction NLF, the
// reservoir feedback (gain 20) and the two output LPFs. Checks the two-cycle
// latency and that the NLF clip flag occurs.
module tb_dihc;
  import carfac_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid = 0;
  logic [1:0] in_ch = '0;
  sig_t       in_y = '0;
  logic       out_valid, clip;
  logic [1:0] out_ch;
  sig_t       out_ihc;
  real hlp [N], mq [N], l1 [N], l2 [N];
  real exp_out [$];
  int  exp_ch [$];
  int checks = 0, failures = 0, nclip = 0;

  dihc #(.N_CH(N)) dut (.clk, .rst_n, .in_valid, .in_ch, .in_y,
                        .out_valid, .out_ch, .out_ihc, .out_p_clip(clip));

  function automatic real q(coef_t c); return real'(c) / 65536.0; endfunction

  always @(posedge clk) if (rst_n) begin
    if (clip) nclip++;
    if (out_valid) begin
      real e, got;
      int c;
      checks++;
      e = exp_out.pop_front();
      c = exp_ch.pop_front();
      got = real'(out_ihc) / 16777216.0;
      if (out_ch != 2'(c) || got - e > 1e-4 || e - got > 1e-4) begin
        failures++;
        $display("FAIL ch %0d ihc %f expected ch %0d %f", out_ch, got, c, e);
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin hlp[i] = 0; mq[i] = 0; l1[i] = 0; l2[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      for (int ch = 0; ch < N; ch++) begin
        real y, hp, pi_, p, vm, rel;
        y = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * (ch + 1) * 0.5 + 0.1 * ch;
        in_valid <= 1; in_ch <= 2'(ch); in_y <= r2s(y);
        y   = real'(r2s(y)) / 16777216.0;
        hp  = y - hlp[ch];
        hlp[ch] = hlp[ch] + q(C_IHC_HPF) * hp;
        pi_ = 1.0 - (hp + 0.13) / 4.0;
        if (pi_ < 0.0) pi_ = 0.0;
        p   = pi_ * pi_; p = p * p; p = p * p;
        if (p > 1.0) p = 1.0;
        vm  = 0.75 * (1.0 - p) * (1.0 - p);
        rel = vm * (1.0 - mq[ch]);
        mq[ch] = mq[ch] + q(C_IHC_Q) * (20.0 * rel - mq[ch]);
        l1[ch] = l1[ch] + q(C_IHC_LPF) * (rel - l1[ch]);
        l2[ch] = l2[ch] + q(C_IHC_LPF) * (l1[ch] - l2[ch]);
        exp_out.push_back(l2[ch]);
        exp_ch.push_back(ch);
        @(posedge clk);
      end
      in_valid <= 0;
      // the output of the last channel must appear two edges after issue
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || out_ch != 2'(N - 1)) begin failures++; $display("FAIL latency"); end
      @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_out.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    checks++;
    if (nclip == 0) begin failures++; $display("FAIL NLF never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
