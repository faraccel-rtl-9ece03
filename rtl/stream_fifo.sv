// stream_fifo: synchronous first-word-fall-through FIFO with a ready/valid
// (AXI-Stream style) interface on both sides, placed between the DMA
// streams and the data transfer manager.
//
// A word is accepted when s_valid && s_ready and leaves when m_valid &&
// m_ready; m_data shows the oldest word whenever m_valid is high. count
// tells the producer how full the FIFO is, so a producer with a read
// pipeline can stop early. Full throughput: one word in and one out per
// cycle. The paper lists FIFOs among the accelerator's resources; depth,
// width and the count output are this design's choices.
module stream_fifo #(
  parameter int unsigned WIDTH = 65,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic [WIDTH-1:0]         s_data,
  output logic                     m_valid,
  input  logic                     m_ready,
  output logic [WIDTH-1:0]         m_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign s_ready = (32'(count) < DEPTH);
  assign m_valid = (count != 0);
  assign m_data  = mem[rp];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  // A word offered on m_data must not change until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            (m_valid && !m_ready) |=> (m_valid && $stable(m_data)))
    else $error("stream_fifo: output changed while stalled");

endmodule
