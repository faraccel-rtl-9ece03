// operand_redirect: the per-lane three-way operand selector of FaRAccel.
//
// For every multiplier lane it forwards one weight: the baseline weight of
// that lane (SEL_MAIN), the shadow-store slot named in the lane's select
// entry (SEL_SHADOW; the slot holds a donor weight already scaled by 1, 1/2
// or 1/3), or zero (SEL_SKIP). It performs no arithmetic. The output is
// registered, so the selector sits one pipeline stage ahead of the
// multipliers and adds one cycle of latency. The three-way choice and its
// position follow the paper; the registered output and the treatment of an
// unused encoding (it selects the baseline weight) are this design's.
// The activation operand is never redirected: only the weight changes.
module operand_redirect
  import far_pkg::*;
#(
  parameter int unsigned N  = LANES,
  parameter int unsigned NS = SLOTS
) (
  input  logic                clk,
  input  lane_sel_t [N-1:0]   sel,
  input  fp16_t     [N-1:0]   w_main,
  input  fp16_t     [NS-1:0]  w_shadow,
  output fp16_t     [N-1:0]   w_eff
);

  fp16_t [N-1:0] w_d;

  always_comb begin
    for (int l = 0; l < N; l++) begin
      if (sel[l].mode == SEL_SKIP)
        w_d[l] = '0;
      else if (sel[l].mode == SEL_SHADOW && 32'(sel[l].slot) < NS)
        w_d[l] = w_shadow[sel[l].slot];
      else
        w_d[l] = w_main[l];
    end
  end

  always_ff @(posedge clk) w_eff <= w_d;

endmodule
