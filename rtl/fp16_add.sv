// fp16_add: IEEE-754 binary16 adder, used for the 31 nodes of the DPE
// adder tree and for the K-step accumulator.
//
// Purely combinational: the adder tree registers each level. Interface:
// a, b in, s = a+b out, all FP16. Operands are aligned with guard, round
// and sticky bits, added or subtracted, normalised and rounded to nearest
// even. The paper names FP16 adders only; these choices are this design's:
// subnormals flushed to signed zero, an exact zero sum is +0 unless both
// operands are -0, inf + -inf or any NaN gives 16'h7E00.
module fp16_add
  import far_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t s
);

  logic        sa, sb, sx, sy;
  logic [4:0]  ea, eb, ex, ey;
  logic [9:0]  fa, fb;
  logic        za, zb, ia, ib, na, nb;
  logic [4:0]  d;
  logic [14:0] mx, my, sum;     // {carry, 1.f (11 bits), g, r, st}
  logic [3:0]  lz;
  logic signed [6:0] e;
  logic [10:0] m;
  logic        up;
  logic [11:0] mr;
  logic        sub;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    za = (ea == 5'd0);
    zb = (eb == 5'd0);
    ia = (ea == 5'h1F) && (fa == '0);
    ib = (eb == 5'h1F) && (fb == '0);
    na = (ea == 5'h1F) && (fa != '0);
    nb = (eb == 5'h1F) && (fb != '0);

    // larger magnitude first
    if ({ea, fa} >= {eb, fb}) begin
      sx = sa; ex = ea; mx = {1'b0, 1'b1, fa, 3'b000};
      sy = sb; ey = eb; my = {1'b0, 1'b1, fb, 3'b000};
    end else begin
      sx = sb; ex = eb; mx = {1'b0, 1'b1, fb, 3'b000};
      sy = sa; ey = ea; my = {1'b0, 1'b1, fa, 3'b000};
    end
    d = ex - ey;
    if (d >= 5'd14) my = 15'd1;                       // only sticky survives
    else            my = (my >> d) | {14'd0, |(my & ((15'd1 << d) - 15'd1))};

    sub = sx ^ sy;
    sum = sub ? (mx - my) : (mx + my);
    e   = $signed({2'b00, ex});
    if (sum[14]) begin
      sum = {1'b0, sum[14:2], sum[1] | sum[0]};
      e   = e + 7'sd1;
    end
    lz = 4'd0;
    for (int i = 13; i >= 0; i--) begin
      if (sum[i]) begin
        lz = 4'(13 - i);
        break;
      end
    end
    sum = sum << lz;
    e   = e - $signed({3'b000, lz});
    m   = sum[13:3];
    up  = sum[2] & (sum[1] | sum[0] | m[0]);
    mr  = {1'b0, m} + {11'd0, up};
    if (mr[11]) begin
      mr = mr >> 1;
      e  = e + 7'sd1;
    end

    if (na || nb || (ia && ib && (sa != sb)))  s = FP16_QNAN;
    else if (ia)                               s = a;
    else if (ib)                               s = b;
    else if (za && zb)                         s = {sa & sb, 15'd0};
    else if (za)                               s = b;
    else if (zb)                               s = a;
    else if (sum == 15'd0)                     s = 16'h0000;
    else if (e >= 7'sd31)                      s = {sx, 5'h1F, 10'd0};
    else if (e <= 7'sd0)                       s = {sx, 15'd0};
    else                                       s = {sx, e[4:0], mr[9:0]};
  end

endmodule
