// tb_carfac_realtime - the evaluated workload: a 64-channel bank on a
// continuous 256 kHz stream at the default size. Two runs of 1024 samples
// each (4 ms of sound) with a 10 kHz tone, one at -40 dBFS and one 34 dB
// louder, separated by a reset. Checks:
//   * every output word matches the sequential reference model;
//   * the sustained throughput: 1024 samples take at most 1024 * 390
//     cycles (100 MHz / 256 kHz) with the input always valid;
//   * level-dependent compression: in the most excited channel the output
//     level grows by clearly less than the 34 dB (x50) input step.
module tb_carfac_realtime;
  import carfac_pkg::*;
  import carfac_ref_pkg::*;

  localparam int N_CH   = 64;
  localparam int N_SAMP = 1024;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [XW-1:0] s_tdata = '0;
  logic          s_tvalid = 1'b0, s_tready;
  logic [79:0]   m_tdata;
  logic          m_tvalid, m_tlast;
  logic          cfg_we = 1'b0;
  logic [5:0]    cfg_ch = '0;
  coef_sel_e     cfg_sel = F_A0;
  coef_t         cfg_data = '0;
  logic          busy, st_credit, st_ohc, st_ihc;
  logic [N_AGC-1:0] st_agc;

  carfac_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(1'b1),
    .m_axis_tlast(m_tlast),
    .cfg_we, .cfg_ch, .cfg_sel, .cfg_data,
    .busy, .stat_credit_stall(st_credit), .stat_agc_stage(st_agc),
    .stat_ohc_clip(st_ohc), .stat_ihc_clip(st_ihc)
  );

  int checks = 0, failures = 0, n_mism = 0;
  out_t exp_q[$];
  carfac_model model;
  longint cyc = 0;
  real energy [N_CH];
  int  samp_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && m_tvalid) begin
    out_t e;
    checks++;
    e = exp_q.pop_front();
    if (int'(m_tdata[79:72]) != e.ch || sig_t'(m_tdata[35:0]) != e.y || sig_t'(m_tdata[71:36]) != e.ihc) begin
      failures++;
      if (n_mism++ < 10) $display("FAIL ch %0d output differs from the model", e.ch);
    end
    if (samp_out >= N_SAMP / 2) begin
      real y;
      y = real'(sig_t'(m_tdata[35:0])) / 16777216.0;
      energy[e.ch] += y * y;
    end
    if (m_tlast) samp_out++;
  end

  task automatic run(real amp, output real peak);
    longint t0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    model = new(N_CH);
    for (int ch = 0; ch < N_CH; ch++) begin
      chan_coef_t c;
      c = design_channel(ch);
      model.set_coef(ch, c);
      for (int f = 0; f < 8; f++) begin
        cfg_we <= 1; cfg_ch <= 6'(ch); cfg_sel <= coef_sel_e'(f);
        cfg_data <= coef_field(c, coef_sel_e'(f));
        @(posedge clk);
      end
    end
    cfg_we <= 0;
    for (int ch = 0; ch < N_CH; ch++) energy[ch] = 0.0;
    samp_out = 0;
    @(posedge clk);
    t0 = cyc;
    for (int s = 0; s < N_SAMP; s++) begin
      logic signed [XW-1:0] x;
      x = XW'($rtoi(amp * $sin(2.0 * PI * 10000.0 * real'(s) / FS_HZ) * 8388607.0));
      s_tvalid <= 1;
      s_tdata  <= x;
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      model.step(x, exp_q);
    end
    s_tvalid <= 0;
    while (busy || exp_q.size() != 0) @(posedge clk);
    checks++;
    if (cyc - t0 > longint'(N_SAMP) * CYCLES_PER_SAMPLE) begin
      failures++;
      $display("FAIL %0d samples took %0d cycles", N_SAMP, cyc - t0);
    end
    $display("amplitude %f: %0d samples in %0d cycles (%0.1f per sample)", amp, N_SAMP, cyc - t0,
             real'(cyc - t0) / N_SAMP);
    peak = 0.0;
    for (int ch = 0; ch < N_CH; ch++) if (energy[ch] > peak) peak = energy[ch];
    peak = $sqrt(peak / (N_SAMP / 2));
  endtask

  initial begin
    real quiet, loud, gain;
    run(0.01, quiet);
    run(0.5, loud);
    gain = loud / quiet;
    $display("peak channel rms: quiet %f loud %f, output step x%0.1f for input step x50", quiet, loud, gain);
    checks++;
    if (!(gain < 35.0 && gain > 1.0)) begin
      failures++;
      $display("FAIL no compression");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
