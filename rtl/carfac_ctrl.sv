// carfac_ctrl - sample-level sequencer of the time-multiplexed CARFAC.
//
// It accepts one input sample over AXI4-Stream, then issues the channels
// 0 .. N_CH-1 on consecutive cycles into the channel pipeline (CAR 1 cycle,
// DIHC 2, AGC 2, DOHC 1), waits until the last channel has left the
// pipeline and its r/g update is stored, signals the AGC loop that a sample
// is complete (tick) and waits while the AGC loop runs any due stage update.
// Only then is the next sample accepted, so the accelerator works only when
// valid input exists and stalls its input (s_tready low) while busy.
// Output flow control is credit based: a sample is only accepted when the
// output FIFO has room for all N_CH result words of that sample.
// Cycles per sample: N_CH + DRAIN + 2, plus N_CH + 1 per AGC stage run.
// The one-channel-per-cycle issue follows the source design's schedule;
// one sample in flight and the credit check are this design's choices.
// iss_x is the 24-bit sample shifted into Q12.24, so its LSB is always 0.
module carfac_ctrl
  import carfac_pkg::*;
#(
  parameter int N_CH  = 64,
  parameter int CHW   = (N_CH > 1) ? $clog2(N_CH) : 1,
  parameter int FW_FREE = 8,       // width of the FIFO free count
  parameter int DRAIN = 6          // cycles from last issue to stored r/g
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [XW-1:0]      s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  input  logic [FW_FREE-1:0] fifo_free,
  output logic               iss_valid,
  output logic [CHW-1:0]     iss_ch,
  output logic               iss_first,
  output sig_t               iss_x,
  output logic               agc_tick,
  input  logic               agc_busy,
  output logic               busy,
  output logic               credit_stall   // input waiting on output space
);
  typedef enum logic [1:0] {C_IDLE, C_SWEEP, C_DRAIN, C_AGC} cstate_e;
  cstate_e     st;
  logic [7:0]  dcnt;
  logic        room;

  assign room      = (fifo_free >= FW_FREE'(N_CH));
  assign s_tready  = (st == C_IDLE) && room;
  assign iss_valid = (st == C_SWEEP);
  assign iss_first = (iss_ch == '0);
  assign agc_tick  = (st == C_DRAIN) && (dcnt == 8'(DRAIN - 1));
  assign busy      = (st != C_IDLE);
  assign credit_stall = (st == C_IDLE) && s_tvalid && !room;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= C_IDLE;
      iss_ch <= '0;
      iss_x  <= '0;
      dcnt   <= '0;
    end else begin
      case (st)
        C_IDLE: if (s_tvalid && s_tready) begin
          // 24-bit Q1.23 sample into the Q12.24 signal format
          iss_x  <= sig_t'($signed(s_tdata)) <<< (FW - (XW - 1));
          iss_ch <= '0;
          st     <= C_SWEEP;
        end
        C_SWEEP: begin
          if (iss_ch == CHW'(N_CH - 1)) begin
            st   <= C_DRAIN;
            dcnt <= '0;
          end else begin
            iss_ch <= iss_ch + 1'b1;
          end
        end
        C_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (agc_tick) st <= C_AGC;
        end
        default: if (!agc_busy) st <= C_IDLE;
      endcase
    end
  end

  // AXI4-Stream rule: tready may not wait for tvalid, and a sample is
  // taken exactly once
  assert property (@(posedge clk) disable iff (!rst_n) (s_tvalid && s_tready) |=> !s_tready);
endmodule
