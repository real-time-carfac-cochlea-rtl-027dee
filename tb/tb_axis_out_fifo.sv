// tb_axis_out_fifo - random pushes (only when there is room) and random
// AXI4-Stream back-pressure; every popped word is compared with a queue
// model, and the free count is checked every cycle.
module tb_axis_out_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic         push = 0, m_tvalid, m_tready = 0;
  logic [W-1:0] push_data = '0, m_tdata;
  logic [3:0]   free;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, nfull = 0;

  axis_out_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .push_data, .free,
                                             .m_tvalid, .m_tready, .m_tdata);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(free) != D - model.size()) begin
      failures++; $display("FAIL free %0d, expected %0d", free, D - model.size());
    end
    if (free == 0) nfull++;
    if (m_tvalid && m_tready) begin
      checks++;
      if (model.size() == 0 || m_tdata != model[0]) begin
        failures++; $display("FAIL pop %h", m_tdata);
      end
      void'(model.pop_front());
    end
    if (push) model.push_back(push_data);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      m_tready = (i % 400 < 200) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      push = (free != 0) && ($urandom_range(0, 1) == 1);
      push_data = W'($urandom);
    end
    @(negedge clk);
    push = 0;
    m_tready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (model.size() != 0 || m_tvalid) begin failures++; $display("FAIL not drained"); end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
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
