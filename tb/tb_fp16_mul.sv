// tb_fp16_mul: checks the FP16 multiplier against the real-valued reference
// on directed corner cases (zeros, subnormals, inf, NaN, overflow, flush to
// zero, rounding ties) and on random operands over the whole exponent range.
module tb_fp16_mul;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, p;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .p(p));

  task automatic check(logic [15:0] x, logic [15:0] y);
    logic [15:0] exp;
    a = x; b = y;
    #1;
    exp = ref_mul(x, y);
    checks++;
    if (p !== exp) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h, expected %h", x, y, p, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);   // 1*1
    check(16'h4000, 16'h4200);   // 2*3
    check(16'h3800, 16'hC400);   // 0.5*-4
    check(16'h0000, 16'h7C00);   // 0*inf
    check(16'h7C00, 16'hC000);   // inf*-2
    check(16'h7E01, 16'h3C00);   // NaN
    check(16'h0001, 16'h3C00);   // subnormal in
    check(16'h7BFF, 16'h7BFF);   // overflow
    check(16'h0400, 16'h0400);   // underflow
    check(16'h3C01, 16'h3C01);   // rounding
    check(16'h3555, 16'h3C00);   // 1/3
    for (int i = 0; i < 20000; i++) check(rand_h(0, 31), rand_h(0, 31));
    for (int i = 0; i < 20000; i++) check(rand_h(8, 22), rand_h(8, 22));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
