// tb_tile_buffer: fills both banks of a two-bank buffer beat by beat
// (4 FP16 per beat) and reads rows back, checking every element and the
// one-cycle read latency, with reads of one bank interleaved with writes
// to the other as in ping-pong use.
module tb_tile_buffer;
  import far_pkg::*;
  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [4:0] wrow = 0, rrow = 0;
  logic [2:0] wgrp = 0;
  logic [63:0] wdata = 0;
  fp16_t [LANES-1:0] rdata;
  int checks = 0, failures = 0;
  fp16_t model [2][ROWS][LANES];

  tile_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic fill(bit b);
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < LANES / 4; g++) begin
      @(negedge clk);
      we = 1; wbank = b; wrow = 5'(r); wgrp = 3'(g);
      for (int i = 0; i < 4; i++) begin
        model[b][r][4*g+i] = 16'($urandom);
        wdata[16*i +: 16] = model[b][r][4*g+i];
      end
      // read the other bank meanwhile
      rbank = ~b; rrow = 5'($urandom);
    end
    @(negedge clk) we = 0;
  endtask

  task automatic check_bank(bit b);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); rbank = b; rrow = 5'(r);
      @(negedge clk); rrow = 5'(r + 7);
      for (int l = 0; l < LANES; l++) chk(rdata[l] == model[b][r][l], $sformatf("bank %0d row %0d lane %0d", b, r, l));
    end
  endtask

  initial begin
    fill(0);
    fill(1);
    check_bank(0);
    check_bank(1);
    fill(0);
    check_bank(0);
    check_bank(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
