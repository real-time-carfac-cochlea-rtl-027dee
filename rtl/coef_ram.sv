// coef_ram - per-channel coefficient memory of the time-multiplexed CARFAC.
//
// Holds, for every channel, the resonator coefficients a0, c0, h, the radius
// parameters r1 and d_rz and the three DC-gain polynomial coefficients
// A, B, C (chan_coef_t). The host fills it one 18-bit field at a time
// through the write port (wr_sel picks the field). Two asynchronous read
// ports serve the two pipeline stages that need coefficients: port A the
// CAR cycle (a0, c0, h), port B the DOHC cycle (r1, d_rz, A, B, C), so no
// coefficient has to travel down the pipeline. Written as a plain array
// (distributed RAM); it is not reset - the host must load it before use.
module coef_ram
  import carfac_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int CHW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [CHW-1:0] wr_ch,
  input  coef_sel_e      wr_sel,
  input  coef_t          wr_data,
  input  logic [CHW-1:0] rd_ch_a,
  output chan_coef_t     rd_a,
  input  logic [CHW-1:0] rd_ch_b,
  output chan_coef_t     rd_b
);
  chan_coef_t mem [N_CH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (wr_sel)
        F_A0:    mem[wr_ch].a0  <= wr_data;
        F_C0:    mem[wr_ch].c0  <= wr_data;
        F_H:     mem[wr_ch].h   <= wr_data;
        F_R1:    mem[wr_ch].r1  <= wr_data;
        F_DRZ:   mem[wr_ch].drz <= wr_data;
        F_GA:    mem[wr_ch].ga  <= wr_data;
        F_GB:    mem[wr_ch].gb  <= wr_data;
        default: mem[wr_ch].gc  <= wr_data;
      endcase
    end
  end

  assign rd_a = mem[rd_ch_a];
  assign rd_b = mem[rd_ch_b];
endmodule
