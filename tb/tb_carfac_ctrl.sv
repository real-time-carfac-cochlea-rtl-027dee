// tb_carfac_ctrl - checks the sample sequencer with 4 channels: for every
// accepted sample the channels 0..3 must be issued on the 4 following
// cycles with the converted sample, agc_tick must come exactly 6 cycles
// after the last issue, no new sample may be accepted while the AGC loop is
// busy or while the output FIFO lacks room for 4 words, and the sample
// interval must be N + 8 + (AGC busy cycles).
module tb_carfac_ctrl;
  import carfac_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [XW-1:0] s_tdata = '0;
  logic          s_tvalid = 0, s_tready;
  logic [7:0]    fifo_free = 8'd16;
  logic          iss_valid, iss_first, agc_tick, agc_busy = 0, busy, cstall;
  logic [1:0]    iss_ch;
  sig_t          iss_x;
  int checks = 0, failures = 0, n_cstall = 0, n_tick = 0, n_acc = 0;
  longint cyc = 0, t_hs = -1, t_last_iss = -1;
  int tk = 0;
  int busy_len = 0, busy_left = 0, last_busy_len = 0;
  logic [XW-1:0] cur;

  carfac_ctrl #(.N_CH(N), .FW_FREE(8)) dut (.clk, .rst_n, .s_tdata, .s_tvalid, .s_tready,
    .fifo_free, .iss_valid, .iss_ch, .iss_first, .iss_x, .agc_tick, .agc_busy, .busy,
    .credit_stall(cstall));

  task automatic fail(string m);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, m);
  endtask

  // AGC loop stand-in: busy for a random time after some ticks
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy_left > 0) begin
      busy_left <= busy_left - 1;
      agc_busy <= (busy_left > 1);
    end else if (agc_tick) begin
      if (tk % 2 == 1) begin
        busy_len = $urandom_range(1, 20);
        busy_left <= busy_len;
        agc_busy <= 1;
        last_busy_len = busy_len;
      end
      tk++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (cstall) n_cstall++;
    if (s_tready && fifo_free < 8'(N)) fail("ready without output room");
    if (s_tready && agc_busy) fail("ready while AGC busy");
    if (s_tvalid && s_tready) begin
      n_acc++;
      t_hs = cyc;
      cur = s_tdata;
    end
    if (iss_valid) begin
      checks += 3;
      if (cyc - t_hs - 1 != longint'(iss_ch)) fail($sformatf("channel %0d issued late", iss_ch));
      if (iss_first != (iss_ch == 0)) fail("first flag");
      if (iss_x != (sig_t'($signed(cur)) <<< 1)) fail("sample value");
      t_last_iss = cyc;
    end
    if (agc_tick) begin
      n_tick++;
      checks++;
      if (cyc - t_last_iss != 6) fail($sformatf("tick %0d cycles after last issue", cyc - t_last_iss));
    end
  end

  longint t_a, t_b;
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // back-to-back samples: check the interval
    for (int s = 0; s < 40; s++) begin
      s_tvalid <= 1;
      s_tdata  <= XW'($urandom);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      t_a = cyc;
      if (s > 0) begin
        int e;
        e = N + 8 + ((s % 2 == 0) ? last_busy_len : 0);
        checks++;
        if (t_a - t_b != e) fail($sformatf("interval %0d, expected %0d", t_a - t_b, e));
      end
      t_b = t_a;
    end
    // output FIFO without room: nothing may be accepted
    fifo_free <= 8'd3;
    repeat (100) @(posedge clk);
    checks++;
    if (n_acc != 40) fail($sformatf("%0d samples accepted", n_acc));
    fifo_free <= 8'd16;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    s_tvalid <= 0;
    repeat (100) @(posedge clk);
    checks++;
    if (n_acc != 41) fail($sformatf("%0d samples accepted after room", n_acc));
    checks++;
    if (n_cstall == 0) fail("no credit stall seen");
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
