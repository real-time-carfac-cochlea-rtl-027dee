// tb_coef_ram - writes random values into every field of every channel of
// the coefficient memory, then reads all channels back through both read
// ports and compares them with a shadow copy.
module tb_coef_ram;
  import carfac_pkg::*;
  localparam int N_CH = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic       wr_en = 0;
  logic [3:0] wr_ch = '0, rd_ch_a = '0, rd_ch_b = '0;
  coef_sel_e  wr_sel = F_A0;
  coef_t      wr_data = '0;
  chan_coef_t rd_a, rd_b;
  coef_t      shadow [N_CH][8];
  int checks = 0, failures = 0;

  coef_ram #(.N_CH(N_CH)) dut (.clk, .wr_en, .wr_ch, .wr_sel, .wr_data,
                               .rd_ch_a, .rd_a, .rd_ch_b, .rd_b);

  function automatic coef_t field(chan_coef_t c, int f);
    case (f)
      0: return c.a0; 1: return c.c0; 2: return c.h; 3: return c.r1;
      4: return c.drz; 5: return c.ga; 6: return c.gb; default: return c.gc;
    endcase
  endfunction

  initial begin
    @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int ch = 0; ch < N_CH; ch++)
        for (int f = 0; f < 8; f++) begin
          shadow[ch][f] = coef_t'($urandom);
          wr_en <= 1; wr_ch <= 4'(ch); wr_sel <= coef_sel_e'(f); wr_data <= shadow[ch][f];
          @(posedge clk);
        end
      wr_en <= 0;
      @(posedge clk);
      for (int ch = 0; ch < N_CH; ch++) begin
        rd_ch_a <= 4'(ch); rd_ch_b <= 4'(N_CH - 1 - ch);
        @(posedge clk);
        #1;
        for (int f = 0; f < 8; f++) begin
          checks += 2;
          if (field(rd_a, f) != shadow[ch][f]) begin
            failures++; $display("FAIL port A ch %0d field %0d", ch, f);
          end
          if (field(rd_b, f) != shadow[N_CH - 1 - ch][f]) begin
            failures++; $display("FAIL port B ch %0d field %0d", N_CH - 1 - ch, f);
          end
        end
      end
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
