// tb_stream_fifo: pushes a counting sequence through the FIFO with random
// producer and consumer stalls and checks order, no loss or duplication,
// the count output, full-throughput operation when both sides are always
// ready, and that the FIFO fills (s_ready low) when the consumer stops.
module tb_stream_fifo;
  localparam int W = 65, D = 64;
  logic clk = 0, rst_n = 0, s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [W-1:0] s_data = 0, m_data;
  logic [6:0] count;
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0, mode = 0, saw_full = 0, stream_cycles = 0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (32'(count) != sent - rcvd) begin failures++; if (failures < 10) $display("count %0d vs %0d", count, sent - rcvd); end
    if (m_valid && m_ready) begin
      checks++;
      if (m_data != W'(rcvd)) begin failures++; if (failures < 10) $display("got %0d expected %0d", m_data, rcvd); end
      rcvd++;
    end
    if (s_valid && s_ready) sent++;
    if (!s_ready) saw_full++;
  end

  // drive on the negative edge
  always @(negedge clk) if (rst_n) begin
    unique case (mode)
      0: begin s_valid = ($urandom % 3) != 0; m_ready = ($urandom % 3) != 0; end
      1: begin s_valid = 1; m_ready = 1; end
      default: begin s_valid = 1; m_ready = 0; end
    endcase
    s_data = W'(sent);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    mode = 1;
    @(posedge clk);
    begin
      automatic int r0 = rcvd;
      repeat (500) @(posedge clk);
      checks++;
      if (rcvd - r0 < 499) begin failures++; $display("throughput %0d", rcvd - r0); end
    end
    mode = 2;
    repeat (100) @(posedge clk);
    checks++;
    if (saw_full == 0 || count != 7'(D)) begin failures++; $display("never full"); end
    mode = 0;
    repeat (1000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
