// tb_car_section - runs a 4-channel cascade for 200 samples of a random
// input and compares every channel output with a real-valued model of
//   W0' = r (a0 W0 - c0 W1) + x,  W1' = r (c0 W0 + a0 W1),  y = g (x + h W1')
// in which each channel's input is the previous channel's output. Halfway
// through, r and g of every channel are changed through the DOHC update
// port; initial r and g are set through the host init port. Also checks
// the one-cycle latency and that out_w1_old is the previous W1.
module tb_car_section;
  import carfac_pkg::*;
  import carfac_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid = 0, in_first = 0;
  logic [1:0] in_ch = '0;
  sig_t       in_x = '0;
  coef_t      a0 = '0, c0 = '0, h = '0;
  logic       out_valid;
  logic [1:0] out_ch;
  sig_t       out_y, w1n, w1o;
  logic       upd_valid = 0, init_r_we = 0, init_g_we = 0;
  logic [1:0] upd_ch = '0, init_ch = '0;
  coef_t      upd_r = '0, upd_g = '0, init_data = '0;
  chan_coef_t cf [N];
  real mw0 [N], mw1 [N], mr [N], mg [N];
  int checks = 0, failures = 0;

  car_section #(.N_CH(N)) dut (.clk, .rst_n, .in_valid, .in_ch, .in_first, .in_x,
    .a0, .c0, .h, .out_valid, .out_ch, .out_y, .out_w1_new(w1n), .out_w1_old(w1o),
    .upd_valid, .upd_ch, .upd_r, .upd_g, .init_r_we, .init_g_we, .init_ch, .init_data);

  function automatic real q(coef_t c); return real'(c) / 65536.0; endfunction
  function automatic real s(sig_t c); return real'(c) / 16777216.0; endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int ch = 0; ch < N; ch++) begin
      cf[ch] = design_channel(ch * 12);
      mw0[ch] = 0.0; mw1[ch] = 0.0;
      init_r_we <= 1; init_g_we <= 0; init_ch <= 2'(ch); init_data <= cf[ch].r1;
      @(posedge clk);
      init_r_we <= 0; init_g_we <= 1; init_data <= cf[ch].gc;
      @(posedge clk);
      mr[ch] = q(cf[ch].r1); mg[ch] = q(cf[ch].gc);
    end
    init_g_we <= 0;
    for (int n = 0; n < 200; n++) begin
      real x, w0o, w1o_m, y;
      x = (real'($urandom_range(0, 2000)) - 1000.0) / 2000.0;
      if (n == 100) begin
        for (int ch = 0; ch < N; ch++) begin
          coef_t nr, ng;
          nr = r2c(q(cf[ch].r1) + 0.5 * q(cf[ch].drz));
          ng = r2c(q(cf[ch].gc) * 1.1);
          upd_valid <= 1; upd_ch <= 2'(ch); upd_r <= nr; upd_g <= ng;
          @(posedge clk);
          mr[ch] = q(nr); mg[ch] = q(ng);
        end
        upd_valid <= 0;
      end
      for (int ch = 0; ch < N; ch++) begin
        in_valid <= 1; in_ch <= 2'(ch); in_first <= (ch == 0); in_x <= r2s(x);
        a0 <= cf[ch].a0; c0 <= cf[ch].c0; h <= cf[ch].h;
        @(posedge clk);
        #1;
        if (ch == 0) x = s(r2s(x));
        w0o = mw0[ch]; w1o_m = mw1[ch];
        mw0[ch] = mr[ch] * (q(cf[ch].a0) * w0o - q(cf[ch].c0) * w1o_m) + x;
        mw1[ch] = mr[ch] * (q(cf[ch].c0) * w0o + q(cf[ch].a0) * w1o_m);
        y = mg[ch] * (x + q(cf[ch].h) * mw1[ch]);
        checks += 4;
        if (!out_valid || out_ch != 2'(ch)) begin failures++; $display("FAIL latency"); end
        if (s(out_y) - y > 1e-4 || y - s(out_y) > 1e-4) begin
          failures++; $display("FAIL n %0d ch %0d y %f expected %f", n, ch, s(out_y), y);
        end
        if (s(w1n) - mw1[ch] > 1e-4 || mw1[ch] - s(w1n) > 1e-4) begin
          failures++; $display("FAIL n %0d ch %0d W1 %f expected %f", n, ch, s(w1n), mw1[ch]);
        end
        if (s(w1o) - w1o_m > 1e-4 || w1o_m - s(w1o) > 1e-4) begin
          failures++; $display("FAIL n %0d ch %0d old W1", n, ch);
        end
        x = y;
      end
      in_valid <= 0;
      @(posedge clk);
    end
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
