// axis_out_fifo - synchronous FIFO that decouples the CARFAC pipeline from
// the AXI4-Stream output.
//
// The pipeline pushes one word per channel and cannot be stopped once a
// sample has started, so the controller only starts a sample when `free`
// shows room for all of its words; a push into a full FIFO is an error
// (asserted). The read side is a standard AXI4-Stream master: a word leaves
// on a cycle with m_tvalid && m_tready. First-word latency is one cycle.
// DEPTH must be a power of two.
// The source design only states AXI4-Stream transport; the FIFO and its
// credit use are this design's choice.
module axis_out_fifo #(
  parameter int WIDTH = 81,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] push_data,
  output logic [AW:0]      free,
  output logic             m_tvalid,
  input  logic             m_tready,
  output logic [WIDTH-1:0] m_tdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp, count;
  logic             pop;

  assign count    = wp - rp;
  assign free     = (AW+1)'(DEPTH) - count;
  assign m_tvalid = (count != 0);
  assign m_tdata  = mem[rp[AW-1:0]];
  assign pop      = m_tvalid && m_tready;

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count != (AW+1)'(DEPTH)));
  // AXI4-Stream: once valid, data must stay until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata)));
endmodule
