// tb_agc_loop - 5-channel AGC loop driven for 128 samples with random DIHC
// outputs. A real-valued model of the four decimated stages (accumulate,
// average, temporal LPF with input from the next-slower stage times 2,
// 3-tap spatial smoothing with edge reflection, slowest stage first) gives
// the expected 1 - b of every channel, checked on the per-channel output
// two cycles after each input. Also checks how often each stage runs and
// that a run of k stages keeps `busy` high for k * (N + 1) cycles.
module tb_agc_loop;
  import carfac_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid = 0, tick = 0, out_valid, busy;
  logic [2:0] in_ch = '0, out_ch;
  sig_t       in_ihc = '0, omb;
  logic [N_AGC-1:0] done;
  real acc [N_AGC][N], st [N_AGC][N], t [N];
  real exp_q [$];
  int  ch_q [$];
  int  n_done [N_AGC];
  int checks = 0, failures = 0, busy_cyc = 0;

  agc_loop #(.N_CH(N)) dut (.clk, .rst_n, .in_valid, .in_ch, .in_ihc,
    .out_valid, .out_ch, .out_one_m_b(omb), .tick, .busy, .stage_done(done));

  function automatic real q(coef_t c); return real'(c) / 65536.0; endfunction

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < N_AGC; k++) if (done[k]) n_done[k]++;
    if (busy) busy_cyc++;
    if (out_valid) begin
      real e, got;
      int c;
      e = exp_q.pop_front();
      c = ch_q.pop_front();
      got = real'(omb) / 16777216.0;
      checks++;
      if (out_ch != 3'(c) || got - e > 2e-4 || e - got > 2e-4) begin
        failures++;
        $display("FAIL ch %0d 1-b %f expected ch %0d %f", out_ch, got, c, e);
      end
    end
  end

  initial begin
    for (int k = 0; k < N_AGC; k++) begin
      n_done[k] = 0;
      for (int i = 0; i < N; i++) begin acc[k][i] = 0; st[k][i] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < 128; s++) begin
      int ns;
      for (int ch = 0; ch < N; ch++) begin
        real v, e;
        v = real'($urandom_range(0, 1000)) / 1000.0 * (ch + 1) * 0.4;
        in_valid <= 1; in_ch <= 3'(ch); in_ihc <= r2s(v);
        v = real'(r2s(v)) / 16777216.0;
        for (int k = 0; k < N_AGC; k++) acc[k][ch] += v;
        e = 1.0 - st[0][ch];
        if (e < 0.0) e = 0.0;
        if (e > 1.0) e = 1.0;
        exp_q.push_back(e);
        ch_q.push_back(ch);
        @(posedge clk);
      end
      in_valid <= 0;
      repeat (3) @(posedge clk);
      // model of the stage updates for this sample
      ns = 0;
      for (int k = N_AGC - 1; k >= 0; k--) begin
        real ct, s1, s2;
        if ((s + 1) % (8 << k) != 0) continue;
        ns++;
        ct = q(AGC_CT[k]); s1 = q(C_AGC_S1); s2 = q(C_AGC_S2);
        for (int j = 0; j < N; j++) begin
          real in_;
          in_ = acc[k][j] / real'(8 << k) + ((k < N_AGC - 1) ? 2.0 * st[k+1][j] : 0.0);
          t[j] = ct * in_ + (1.0 - ct) * st[k][j];
          acc[k][j] = 0;
        end
        for (int j = 0; j < N; j++)
          st[k][j] = s1 * t[(j == 0) ? 0 : j - 1] + (1.0 - s1 - s2) * t[j] + s2 * t[(j == N - 1) ? j : j + 1];
      end
      busy_cyc = 0;
      tick <= 1;
      @(posedge clk);
      tick <= 0;
      @(posedge clk);
      while (busy) @(posedge clk);
      checks++;
      if (busy_cyc != ns * (N + 1)) begin
        failures++;
        $display("FAIL sample %0d: busy %0d cycles for %0d stages", s, busy_cyc, ns);
      end
    end
    repeat (3) @(posedge clk);
    for (int k = 0; k < N_AGC; k++) begin
      checks++;
      if (n_done[k] != 128 / (8 << k)) begin
        failures++; $display("FAIL stage %0d ran %0d times", k, n_done[k]);
      end
    end
    $display("final 1-b of channel 0: %f", 1.0 - st[0][0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
