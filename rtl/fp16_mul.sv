// fp16_mul: IEEE-754 binary16 multiplier, one per DPE lane.
//
// Purely combinational; the DPE places pipeline registers after it (the
// registers a DSP48 multiplier offers), so timing is set by the caller.
// Interface: a, b in, p = a*b out, all FP16.
//
// The paper asks for an FP16 multiplier per lane and nothing more. The
// arithmetic details are this design's choice: round to nearest even,
// subnormal inputs and results flushed to signed zero (the usual FPGA
// trade-off), any NaN operand or inf*0 giving the canonical NaN 16'h7E00,
// overflow giving a signed infinity.
module fp16_mul
  import far_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t p
);

  logic        sa, sb, sp;
  logic [4:0]  ea, eb;
  logic [9:0]  fa, fb;
  logic        za, zb, ia, ib, na, nb;
  logic [21:0] prod;
  logic signed [7:0] e;
  logic [10:0] m;
  logic        g, st, up;
  logic [11:0] mr;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sp = sa ^ sb;
    za = (ea == 5'd0);
    zb = (eb == 5'd0);
    ia = (ea == 5'h1F) && (fa == '0);
    ib = (eb == 5'h1F) && (fb == '0);
    na = (ea == 5'h1F) && (fa != '0);
    nb = (eb == 5'h1F) && (fb != '0);

    prod = {1'b1, fa} * {1'b1, fb};            // in [2^20, 2^22)
    e    = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 8'sd15;
    if (prod[21]) begin
      m  = prod[21:11];
      g  = prod[10];
      st = |prod[9:0];
      e  = e + 8'sd1;
    end else begin
      m  = prod[20:10];
      g  = prod[9];
      st = |prod[8:0];
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + {11'd0, up};
    if (mr[11]) begin
      mr = mr >> 1;
      e  = e + 8'sd1;
    end

    if (na || nb || (ia && zb) || (za && ib))   p = FP16_QNAN;
    else if (ia || ib)                          p = {sp, 5'h1F, 10'd0};
    else if (za || zb)                          p = {sp, 15'd0};
    else if (e >= 8'sd31)                       p = {sp, 5'h1F, 10'd0};
    else if (e <= 8'sd0)                        p = {sp, 15'd0};
    else                                        p = {sp, e[4:0], mr[9:0]};
  end

endmodule
