// agc_loop - four-stage, multi-time-scale automatic gain control loop built
// around ONE shared smoothing filter (agc_sf).
//
// Per-channel path (two pipeline cycles, one channel per cycle):
//   cycle A1: the channel's DIHC output is added into four decimation
//             accumulators, one per stage;
//   cycle A2: the channel's AGC output b (state of the fastest stage) is read
//             and 1 - b, clamped to [0, 1], is registered for the DOHC.
// Stage update (between input samples, started by `tick` once per sample):
//   stage k (k = 0 fastest ... 3 slowest) is due every 8 * 2^k samples, with
//   time constant 0.002, 0.008, 0.032, 0.128 s. Due stages are run from the
//   slowest to the fastest, so that a stage sees the fresh state of the
//   next-slower stage. A stage run sweeps all channels through agc_sf:
//   cycle j computes the temporal result of channel j from
//   acc/2^(3+k) + 2 * state[k+1] and state[k] (and clears the accumulator),
//   and the spatial result of channel j-1 from the temporal results of
//   channels j-2, j-1 and j, written back as state[k][j-1]. Edge channels
//   reuse their own value for the missing neighbour. One stage therefore
//   takes N_CH + 1 cycles; `busy` is high while any stage runs.
// Stage numbering here is fastest-first; the source design's figure numbers
// the same stages SF4 (fastest) down to SF1 (slowest).
module agc_loop
  import carfac_pkg::*;
#(
  parameter int    N_CH = 64,
  parameter int    CHW  = (N_CH > 1) ? $clog2(N_CH) : 1,
  parameter coef_t S1   = C_AGC_S1,
  parameter coef_t S2   = C_AGC_S2
) (
  input  logic             clk,
  input  logic             rst_n,
  // per-channel path
  input  logic             in_valid,
  input  logic [CHW-1:0]   in_ch,
  input  sig_t             in_ihc,
  output logic             out_valid,
  output logic [CHW-1:0]   out_ch,
  output sig_t             out_one_m_b,
  // stage updates
  input  logic             tick,          // one input sample completed
  output logic             busy,
  output logic [N_AGC-1:0] stage_done     // pulse: stage k finished a run
);
  localparam int CNTW = 3 + N_AGC - 1;   // counts 0 .. 63

  sig_t acc_mem [N_AGC][N_CH];
  sig_t st_mem  [N_AGC][N_CH];

  // ---------------- per-channel path ----------------
  logic           a1_valid;
  logic [CHW-1:0] a1_ch;

  // ---------------- stage sequencer ----------------
  typedef enum logic {U_IDLE, U_RUN} ustate_e;
  ustate_e        ust;
  logic [CNTW-1:0] cnt;
  logic [N_AGC-1:0] due;
  logic [1:0]     stg;
  logic [CHW:0]   j;
  sig_t           tq1, tq2;

  sig_t  sf_acc, sf_slower, sf_prev, sf_t, sf_left, sf_right, sf_out;
  coef_t sf_ct;
  logic  in_range;
  logic [CHW-1:0] jc, jm1;

  always_comb begin
    in_range  = (j < (CHW+1)'(N_CH));
    jc        = in_range ? j[CHW-1:0] : '0;
    jm1       = CHW'(j - 1'b1);
    sf_acc    = acc_mem[stg][jc] >>> (3 + int'(stg));
    sf_slower = (stg == 2'(N_AGC - 1)) ? '0 : st_mem[stg + 2'd1][jc];
    sf_prev   = st_mem[stg][jc];
    sf_ct     = AGC_CT[stg];
  end

  // spatial neighbours: edge channels reuse their own temporal result
  assign sf_left  = (j == 1) ? tq1 : tq2;
  assign sf_right = in_range ? sf_t : tq1;

  agc_sf u_sf (
    .acc_avg(sf_acc), .slower(sf_slower), .prev(sf_prev), .ct(sf_ct), .t(sf_t),
    .left(sf_left), .center(tq1), .right(sf_right), .s1(S1), .s2(S2), .out(sf_out)
  );

  // next due stage below the current one
  function automatic logic [2:0] next_due(input logic [N_AGC-1:0] d, input int from);
    for (int k = N_AGC - 1; k >= 0; k--)
      if (k < from && d[k]) return {1'b1, 2'(k)};
    return 3'b000;
  endfunction

  logic [CNTW-1:0] cnt_n;
  logic [N_AGC-1:0] due_n;
  logic [2:0]      first_due, nxt;

  always_comb begin
    cnt_n = cnt + 1'b1;
    for (int k = 0; k < N_AGC; k++)
      due_n[k] = ((cnt_n & CNTW'((1 << (3 + k)) - 1)) == '0);
    first_due = next_due(due_n, N_AGC);
    nxt       = next_due(due, int'(stg));
  end

  assign busy = (ust == U_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_AGC; k++)
        for (int i = 0; i < N_CH; i++) begin
          acc_mem[k][i] <= '0;
          st_mem[k][i]  <= '0;
        end
      a1_valid    <= 1'b0;
      a1_ch       <= '0;
      out_valid   <= 1'b0;
      out_ch      <= '0;
      out_one_m_b <= '0;
      ust         <= U_IDLE;
      cnt         <= '0;
      due         <= '0;
      stg         <= '0;
      j           <= '0;
      tq1         <= '0;
      tq2         <= '0;
      stage_done  <= '0;
    end else begin
      stage_done <= '0;
      // A1: accumulate the DIHC output into every stage's accumulator
      a1_valid <= in_valid;
      if (in_valid) begin
        a1_ch <= in_ch;
        for (int k = 0; k < N_AGC; k++)
          acc_mem[k][in_ch] <= add(acc_mem[k][in_ch], in_ihc);
      end
      // A2: fetch b of the fastest stage
      out_valid <= a1_valid;
      if (a1_valid) begin
        out_ch      <= a1_ch;
        out_one_m_b <= clamp01(sub(S_ONE, st_mem[0][a1_ch]));
      end
      // stage sequencer
      case (ust)
        U_IDLE: if (tick) begin
          cnt <= cnt_n;
          due <= due_n;
          if (first_due[2]) begin
            ust <= U_RUN;
            stg <= first_due[1:0];
            j   <= '0;
          end
        end
        U_RUN: begin
          if (in_range) begin
            acc_mem[stg][jc] <= '0;
          end
          if (j != 0) st_mem[stg][jm1] <= sf_out;
          tq2 <= tq1;
          tq1 <= sf_t;
          if (j == (CHW+1)'(N_CH)) begin
            stage_done[stg] <= 1'b1;
            j <= '0;
            if (nxt[2]) stg <= nxt[1:0];
            else        ust <= U_IDLE;
          end else begin
            j <= j + 1'b1;
          end
        end
        default: ust <= U_IDLE;
      endcase
    end
  end

  // no channel may be processed while the shared filter is sweeping
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !in_valid);
endmodule
