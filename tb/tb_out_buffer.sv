// tb_out_buffer: writes one result per cycle in the engine's order (column
// n outer, row m inner) into both banks and reads 4-result beats row-major,
// checking each beat against the model and the one-cycle read latency.
module tb_out_buffer;
  import far_pkg::*;
  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [4:0] wm = 0, wn = 0, rm = 0;
  logic [2:0] rgrp = 0;
  fp16_t wdata = 0;
  logic [63:0] rdata;
  int checks = 0, failures = 0;
  fp16_t model [2][COLS][ROWS];

  out_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int n = 0; n < ROWS; n++) for (int m = 0; m < COLS; m++) begin
        @(negedge clk);
        we = 1; wbank = b[0]; wm = 5'(m); wn = 5'(n);
        model[b][m][n] = 16'($urandom);
        wdata = model[b][m][n];
      end
    @(negedge clk) we = 0;
    for (int b = 0; b < 2; b++)
      for (int m = 0; m < COLS; m++) for (int g = 0; g < ROWS / 4; g++) begin
        @(negedge clk); rbank = b[0]; rm = 5'(m); rgrp = 3'(g);
        @(negedge clk); rgrp = 3'(g + 1);
        checks++;
        if (rdata != {model[b][m][4*g+3], model[b][m][4*g+2], model[b][m][4*g+1], model[b][m][4*g]}) begin
          failures++;
          if (failures < 10) $display("bank %0d m %0d grp %0d: %h", b, m, g, rdata);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
