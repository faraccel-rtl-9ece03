// tb_shadow_store: writes random donor words into both banks, reads whole
// rows back one cycle after re and checks value and parity; checks that
// inj_err stores a word with failing parity and that rdata holds while re
// is low.
module tb_shadow_store;
  import far_pkg::*;
  logic clk = 0, we = 0, wbank = 0, inj_err = 0, re = 0, rbank = 0;
  logic [4:0] wrow = 0, rrow = 0;
  logic [2:0] wslot = 0;
  fp16_t wdata = '0;
  shadow_word_t [SLOTS-1:0] rdata;
  int checks = 0, failures = 0;
  fp16_t model [2][ROWS][SLOTS];

  shadow_store dut (.*);
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

  initial begin
    repeat (2) @(posedge clk);
    for (int b = 0; b < 2; b++) for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) begin
      @(negedge clk);
      model[b][r][s] = 16'($urandom);
      we = 1; wbank = b[0]; wrow = 5'(r); wslot = 3'(s); wdata = model[b][r][s];
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int b = $urandom % 2, r = $urandom % ROWS;
      @(negedge clk); re = 1; rbank = b[0]; rrow = 5'(r);
      @(negedge clk); re = 0; rrow = 5'(r + 1);
      @(negedge clk);
      for (int s = 0; s < SLOTS; s++) begin
        chk(rdata[s].w == model[b][r][s], "data");
        chk((^rdata[s]) == 1'b0, "parity");
      end
    end
    @(negedge clk); we = 1; inj_err = 1; wbank = 0; wrow = 4; wslot = 2; wdata = 16'h3C00;
    @(negedge clk); we = 0; inj_err = 0; re = 1; rbank = 0; rrow = 4;
    @(negedge clk); re = 0;
    chk(rdata[2].w == 16'h3C00 && (^rdata[2]) == 1'b1, "injected parity error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
