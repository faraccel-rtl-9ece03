// tb_operand_redirect: drives random select vectors, baseline weights and
// shadow slots and checks that every lane forwards, one cycle later, its
// baseline weight, the named shadow slot, or zero.
module tb_operand_redirect;
  import far_pkg::*;
  logic clk = 0;
  lane_sel_t [LANES-1:0] sel;
  fp16_t [LANES-1:0] w_main, w_eff;
  fp16_t [SLOTS-1:0] w_shadow;
  int checks = 0, failures = 0;
  int n_main = 0, n_shadow = 0, n_skip = 0;

  operand_redirect dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      fp16_t exp [LANES];
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        automatic int r = $urandom % 3;
        w_main[l] = 16'($urandom) | 16'h0001;
        begin automatic int sl = int'($urandom % 5); sel[l].slot = sl[2:0]; end
        sel[l].mode = (r == 0) ? SEL_MAIN : (r == 1) ? SEL_SHADOW : SEL_SKIP;
      end
      for (int s = 0; s < SLOTS; s++) w_shadow[s] = 16'($urandom) | 16'h8000;
      for (int l = 0; l < LANES; l++)
        exp[l] = (sel[l].mode == SEL_MAIN) ? w_main[l] :
                 (sel[l].mode == SEL_SHADOW) ? w_shadow[sel[l].slot] : 16'h0000;
      @(posedge clk); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        case (sel[l].mode)
          SEL_MAIN: n_main++;
          SEL_SHADOW: n_shadow++;
          default: n_skip++;
        endcase
        if (w_eff[l] !== exp[l]) begin
          failures++;
          if (failures < 10) $display("lane %0d got %h expected %h sel %b main %h", l, w_eff[l], exp[l], sel[l], w_main[l]);
        end
      end
    end
    checks++;
    if (n_main == 0 || n_shadow == 0 || n_skip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
