// carfac_top - real-time CARFAC cochlea model accelerator (top level).
//
// A single time-multiplexed channel pipeline computes all N_CH channels of
// the CARFAC model for each input sample: CAR resonator (1 cycle), DIHC
// (2 cycles), AGC accumulation / b fetch (2 cycles) and DOHC r/g update
// (1 cycle), with channel n+1 entering one cycle after channel n. After the
// sweep the single shared AGC smoothing filter updates whichever of the
// four AGC stages is due. Per-channel coefficients live in coef_ram.
//
// Interfaces
//   s_axis_*  input samples, 24-bit two's complement (Q1.23), one per beat.
//   m_axis_*  one beat per channel and sample, channel 0 first, tlast on
//             the last channel: tdata[35:0] BM displacement y (Q12.24),
//             tdata[71:36] DIHC output (Q12.24), tdata[79:72] channel.
//   cfg_*     host write port of the coefficient memory (one field per
//             write); writing r1 / C also sets the channel's current r / g.
// Throughput: N_CH + 8 cycles per sample, plus N_CH + 1 cycles for each AGC
// stage due (at most 4, every 64th sample). With N_CH = 64 that is at most
// 332 cycles, inside the 390 cycles a 256 kHz sample allows at 100 MHz.
// With N_CH = 64 the two top bits of the channel field are always zero.
// The unit structure, schedule and rates follow the source design; word
// widths, the output word layout, the configuration port and the flow
// control are this design's choices. Each unit does its work within its
// scheduled cycles using long combinational paths rather than the deep
// register pipelining of the original, so 100 MHz timing is not claimed.
module carfac_top
  import carfac_pkg::*;
#(
  parameter int N_CH       = 64,
  parameter int CHW        = (N_CH > 1) ? $clog2(N_CH) : 1,
  parameter int FIFO_DEPTH = 1 << $clog2(2 * N_CH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // AXI4-Stream input
  input  logic [XW-1:0]  s_axis_tdata,
  input  logic           s_axis_tvalid,
  output logic           s_axis_tready,
  // AXI4-Stream output
  output logic [79:0]    m_axis_tdata,
  output logic           m_axis_tvalid,
  input  logic           m_axis_tready,
  output logic           m_axis_tlast,
  // coefficient configuration
  input  logic           cfg_we,
  input  logic [CHW-1:0] cfg_ch,
  input  coef_sel_e      cfg_sel,
  input  coef_t          cfg_data,
  // status
  output logic           busy,              // a sample is in progress
  output logic           stat_credit_stall, // input held back by output space
  output logic [N_AGC-1:0] stat_agc_stage,  // pulse: AGC stage k updated
  output logic           stat_ohc_clip,     // DOHC NLF fully compressed
  output logic           stat_ihc_clip      // DIHC NLF clipped at p = 1
);
  localparam int FAW = $clog2(FIFO_DEPTH);

  // ---------------- sequencer ----------------
  logic           iss_valid, iss_first, agc_tick, agc_busy;
  logic [CHW-1:0] iss_ch;
  sig_t           iss_x;
  logic [FAW:0]   fifo_free;

  carfac_ctrl #(.N_CH(N_CH), .CHW(CHW), .FW_FREE(FAW + 1)) u_ctrl (
    .clk, .rst_n,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .fifo_free, .iss_valid, .iss_ch, .iss_first, .iss_x,
    .agc_tick, .agc_busy, .busy, .credit_stall(stat_credit_stall)
  );

  // ---------------- coefficients ----------------
  chan_coef_t     coef_a, coef_b;
  logic [CHW-1:0] dohc_ch;

  coef_ram #(.N_CH(N_CH), .CHW(CHW)) u_coef (
    .clk, .wr_en(cfg_we), .wr_ch(cfg_ch), .wr_sel(cfg_sel), .wr_data(cfg_data),
    .rd_ch_a(iss_ch), .rd_a(coef_a), .rd_ch_b(dohc_ch), .rd_b(coef_b)
  );

  // ---------------- CAR (cycle 1) ----------------
  logic           car_valid, upd_valid;
  logic [CHW-1:0] car_ch, upd_ch;
  sig_t           car_y, car_w1n, car_w1o;
  coef_t          upd_r, upd_g;

  car_section #(.N_CH(N_CH), .CHW(CHW)) u_car (
    .clk, .rst_n,
    .in_valid(iss_valid), .in_ch(iss_ch), .in_first(iss_first), .in_x(iss_x),
    .a0(coef_a.a0), .c0(coef_a.c0), .h(coef_a.h),
    .out_valid(car_valid), .out_ch(car_ch), .out_y(car_y),
    .out_w1_new(car_w1n), .out_w1_old(car_w1o),
    .upd_valid, .upd_ch, .upd_r, .upd_g,
    .init_r_we(cfg_we && cfg_sel == F_R1), .init_g_we(cfg_we && cfg_sel == F_GC),
    .init_ch(cfg_ch), .init_data(cfg_data)
  );

  // ---------------- DIHC (cycles 2-3) ----------------
  logic           ihc_valid;
  logic [CHW-1:0] ihc_ch;
  sig_t           ihc_out;

  dihc #(.N_CH(N_CH), .CHW(CHW)) u_dihc (
    .clk, .rst_n,
    .in_valid(car_valid), .in_ch(car_ch), .in_y(car_y),
    .out_valid(ihc_valid), .out_ch(ihc_ch), .out_ihc(ihc_out), .out_p_clip(stat_ihc_clip)
  );

  // delay balancing: BM output to the DIHC output, W1 to the DOHC
  sig_t y_d [2];
  sig_t w1n_d [4];
  sig_t w1o_d [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_d   <= '{default: '0};
      w1n_d <= '{default: '0};
      w1o_d <= '{default: '0};
    end else begin
      y_d[0] <= car_y;
      y_d[1] <= y_d[0];
      w1n_d[0] <= car_w1n;
      w1o_d[0] <= car_w1o;
      for (int i = 1; i < 4; i++) begin
        w1n_d[i] <= w1n_d[i-1];
        w1o_d[i] <= w1o_d[i-1];
      end
    end
  end

  // ---------------- AGC loop (cycles 4-5) ----------------
  logic           agc_valid;
  sig_t           one_m_b;

  agc_loop #(.N_CH(N_CH), .CHW(CHW)) u_agc (
    .clk, .rst_n,
    .in_valid(ihc_valid), .in_ch(ihc_ch), .in_ihc(ihc_out),
    .out_valid(agc_valid), .out_ch(dohc_ch), .out_one_m_b(one_m_b),
    .tick(agc_tick), .busy(agc_busy), .stage_done(stat_agc_stage)
  );

  // ---------------- DOHC (cycle 6) ----------------
  dohc #(.CHW(CHW)) u_dohc (
    .clk, .rst_n,
    .in_valid(agc_valid), .in_ch(dohc_ch),
    .w1_new(w1n_d[3]), .w1_old(w1o_d[3]), .one_m_b,
    .r1(coef_b.r1), .drz(coef_b.drz), .ga(coef_b.ga), .gb(coef_b.gb), .gc(coef_b.gc),
    .upd_valid, .upd_ch, .upd_r, .upd_g, .upd_u(), .nlf_clip(stat_ohc_clip)
  );

  // ---------------- output stream ----------------
  logic [80:0] push_word, pop_word;

  assign push_word = {ihc_ch == CHW'(N_CH - 1), 8'(ihc_ch), ihc_out, y_d[1]};

  axis_out_fifo #(.WIDTH(81), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(ihc_valid), .push_data(push_word), .free(fifo_free),
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_tdata(pop_word)
  );

  assign m_axis_tlast = pop_word[80];
  assign m_axis_tdata = pop_word[79:0];

  initial assert (N_CH >= 1 && N_CH <= 256) else $error("N_CH must be 1..256");
endmodule
