// tb_carfac_top - end-to-end test of the CARFAC accelerator at its default
// size (64 channels), compared bit for bit with the sequential reference
// model of carfac_ref_pkg.
//
// 1. Loads the coefficients of a 64-channel filter bank through the
//    configuration port.
// 2. Phase A (samples 0..127): input always valid, output always ready.
//    Every accepted-sample interval is checked against the schedule
//    N_CH + 8 + (N_CH + 1) * (AGC stages due), and against the real-time
//    budget of 390 clock cycles per 256 kHz sample at 100 MHz.
// 3. Phase B (samples 128..255): random input gaps and random output
//    back-pressure, with a long output stall that fills the output FIFO.
// The input is a 20 kHz tone, quiet at first and then near full scale, plus
// clicks, so that the compressive nonlinearities saturate. Each mechanism
// (input stall, output credit stall, output back-pressure, each of the four
// AGC stages, DOHC and DIHC clipping) is counted and must occur.
module tb_carfac_top;
  import carfac_pkg::*;
  import carfac_ref_pkg::*;

  localparam int N_CH   = 64;
  localparam int N_SAMP = 256;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [XW-1:0] s_tdata;
  logic          s_tvalid, s_tready;
  logic [79:0]   m_tdata;
  logic          m_tvalid, m_tready, m_tlast;
  logic          cfg_we;
  logic [5:0]    cfg_ch;
  coef_sel_e     cfg_sel;
  coef_t         cfg_data;
  logic          busy, st_credit, st_ohc, st_ihc;
  logic [N_AGC-1:0] st_agc;

  carfac_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast),
    .cfg_we, .cfg_ch, .cfg_sel, .cfg_data,
    .busy, .stat_credit_stall(st_credit), .stat_agc_stage(st_agc),
    .stat_ohc_clip(st_ohc), .stat_ihc_clip(st_ihc)
  );

  int checks = 0, failures = 0;
  out_t exp_q[$];
  carfac_model model;
  longint cyc = 0;
  int n_in_stall = 0, n_credit = 0, n_backp = 0, n_ohc = 0, n_ihc = 0, n_cfg = 0;
  int n_agc [N_AGC];
  int n_out = 0;
  bit phase_b = 0;
  bit hold_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  // ---- mechanism counters ----
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && !s_tready) n_in_stall++;
    if (st_credit) n_credit++;
    if (m_tvalid && !m_tready) n_backp++;
    if (st_ohc) n_ohc++;
    if (st_ihc) n_ihc++;
    for (int k = 0; k < N_AGC; k++) if (st_agc[k]) n_agc[k]++;
  end

  // ---- output side: back-pressure and comparison ----
  always @(posedge clk) begin
    if (!rst_n) m_tready <= 1'b0;
    else if (hold_out) m_tready <= 1'b0;
    else if (phase_b) m_tready <= ($urandom_range(0, 3) != 0);
    else m_tready <= 1'b1;
  end

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    out_t e;
    n_out++;
    checks++;
    if (exp_q.size() == 0) fail("unexpected output beat");
    else begin
      e = exp_q.pop_front();
      if (int'(m_tdata[79:72]) != e.ch || sig_t'(m_tdata[35:0]) != e.y ||
          sig_t'(m_tdata[71:36]) != e.ihc || m_tlast != (e.ch == N_CH - 1))
        fail($sformatf("ch %0d: got ch %0d y %0d ihc %0d last %0b, exp y %0d ihc %0d",
                       e.ch, m_tdata[79:72], sig_t'(m_tdata[35:0]), sig_t'(m_tdata[71:36]),
                       m_tlast, e.y, e.ihc));
    end
  end

  function automatic logic signed [XW-1:0] stimulus(int s);
    real a, v;
    a = (s < 16) ? 0.02 : 0.9;
    v = a * $sin(2.0 * PI * 20000.0 * real'(s) / FS_HZ);
    if (s % 37 == 20) v = 0.99;       // click
    if (s % 37 == 21) v = -0.99;
    return XW'($rtoi(v * 8388607.0));
  endfunction

  int agc_due;
  longint t_acc, t_prev;

  initial begin
    for (int k = 0; k < N_AGC; k++) n_agc[k] = 0;
    model = new(N_CH);
    s_tvalid = 0; s_tdata = '0; cfg_we = 0; cfg_ch = '0; cfg_sel = F_A0; cfg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // ---- load coefficients ----
    for (int ch = 0; ch < N_CH; ch++) begin
      chan_coef_t c;
      c = design_channel(ch);
      model.set_coef(ch, c);
      for (int f = 0; f < 8; f++) begin
        cfg_we <= 1; cfg_ch <= 6'(ch); cfg_sel <= coef_sel_e'(f);
        cfg_data <= coef_field(c, coef_sel_e'(f));
        @(posedge clk);
        n_cfg++;
      end
    end
    cfg_we <= 0;
    @(posedge clk);
    // ---- stream samples ----
    t_prev = -1;
    for (int s = 0; s < N_SAMP; s++) begin
      if (s == 128) phase_b = 1;
      if (s == 160) fork
        begin
          hold_out = 1;
          repeat (600) @(posedge clk);
          hold_out = 0;
        end
      join_none
      if (phase_b && $urandom_range(0, 2) == 0) begin
        s_tvalid <= 0;
        repeat ($urandom_range(1, 40)) @(posedge clk);
      end
      s_tvalid <= 1;
      s_tdata  <= stimulus(s);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      // handshake happened at this edge
      t_acc = cyc;
      model.step(stimulus(s), exp_q);
      if (!phase_b && t_prev >= 0) begin
        int expect_int;
        expect_int = N_CH + 8 + (N_CH + 1) * agc_due;
        checks++;
        if (t_acc - t_prev != expect_int)
          fail($sformatf("sample %0d interval %0d, expected %0d", s, t_acc - t_prev, expect_int));
        checks++;
        if (t_acc - t_prev > CYCLES_PER_SAMPLE)
          fail($sformatf("sample %0d interval %0d over real-time budget", s, t_acc - t_prev));
      end
      t_prev = t_acc;
      agc_due = 0;
      for (int k = 0; k < N_AGC; k++) if ((s + 1) % (AGC_DECIM0 << k) == 0) agc_due++;
    end
    s_tvalid <= 0;
    // drain
    while (exp_q.size() != 0 && cyc < 400000) @(posedge clk);
    repeat (20) @(posedge clk);
    while (busy) @(posedge clk);
    checks++;
    if (n_out != N_SAMP * N_CH) fail($sformatf("%0d output beats, expected %0d", n_out, N_SAMP * N_CH));
    // ---- mechanisms ----
    $display("mechanisms: in_stall=%0d credit_stall=%0d out_backpressure=%0d cfg=%0d ohc_clip=%0d ihc_clip=%0d agc=%0d/%0d/%0d/%0d",
             n_in_stall, n_credit, n_backp, n_cfg, n_ohc, n_ihc, n_agc[0], n_agc[1], n_agc[2], n_agc[3]);
    checks++; if (n_in_stall == 0) fail("no input stall");
    checks++; if (n_credit == 0) fail("no output credit stall");
    checks++; if (n_backp == 0) fail("no output back-pressure");
    checks++; if (n_ohc == 0) fail("DOHC NLF never clipped");
    checks++; if (n_ihc == 0) fail("DIHC NLF never clipped");
    checks++; if (n_ohc != model.n_ohc_clip) fail("DOHC clip count differs from model");
    checks++; if (n_ihc != model.n_ihc_clip) fail("DIHC clip count differs from model");
    for (int k = 0; k < N_AGC; k++) begin
      checks++;
      if (n_agc[k] != N_SAMP / (AGC_DECIM0 << k)) fail($sformatf("AGC stage %0d ran %0d times", k, n_agc[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
