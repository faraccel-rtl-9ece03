// far_dpe: FaR-aware dot-product engine (DPE).
//
// Computes one LANES-element FP16 dot product per cycle:
//   dot = sum_l a_vec[l] * w_eff[l],  w_eff chosen per lane by the select
//   vector from {w_main[l], w_shadow[slot], 0}.
// Pipeline (one stage each unless noted), 12 cycles from in_valid to
// dot_valid for the default sizes:
//   1  input registers for activations, weights, shadow slots, select
//   2  operand redirect (registered three-way selector)
//   3-5 FP16 multipliers followed by MUL_STAGES registers
//   6-10 five-level adder tree (31 adders)
//   11 K-step accumulator ("Accum Reg"): first starts a new sum, later
//      steps add to it; a result is complete on the step flagged last
//   12 output register (dot_val) with dot_valid
// The datapath (32 FP16 multipliers, 31-adder five-level tree, input and
// output registers, 12-cycle fill, redirect one stage before the
// multipliers) follows the paper. The way the 12 cycles are split, and the
// first/last interface of the K-step accumulation, are this design's.
module far_dpe
  import far_pkg::*;
#(
  parameter int unsigned N          = LANES,
  parameter int unsigned NS         = SLOTS,
  parameter int unsigned MUL_STAGES = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  fp16_t     [N-1:0]  a_vec,
  input  fp16_t     [N-1:0]  w_main,
  input  fp16_t     [NS-1:0] w_shadow,
  input  lane_sel_t [N-1:0]  sel,
  output logic               dot_valid,
  output fp16_t              dot_val
);

  localparam int unsigned TREE_LAT = $clog2(N);

  // ---- stage 1: input registers
  fp16_t     [N-1:0]  a_q, wm_q;
  fp16_t     [NS-1:0] ws_q;
  lane_sel_t [N-1:0]  sel_q;
  logic               v1;
  logic [1:0]         fl1;

  always_ff @(posedge clk) begin
    a_q   <= a_vec;
    wm_q  <= w_main;
    ws_q  <= w_shadow;
    sel_q <= sel;
    fl1   <= {first, last};
  end

  // ---- stage 2: operand redirect; activations delayed alongside
  fp16_t [N-1:0] w_eff, a_q2;
  logic          v2;
  logic [1:0]    fl2;

  operand_redirect #(.N(N), .NS(NS)) u_redirect (
    .clk, .sel(sel_q), .w_main(wm_q), .w_shadow(ws_q), .w_eff
  );

  always_ff @(posedge clk) begin
    a_q2 <= a_q;
    fl2  <= fl1;
  end

  // ---- stages 3..(2+MUL_STAGES): multipliers
  fp16_t [N-1:0] prod;
  for (genvar l = 0; l < N; l++) begin : g_lane
    fp16_mul u_mul (.a(a_q2[l]), .b(w_eff[l]), .p(prod[l]));
  end

  fp16_t [N-1:0] mp [MUL_STAGES];
  logic          mv [MUL_STAGES];
  logic [1:0]    mf [MUL_STAGES];

  always_ff @(posedge clk) begin
    mp[0] <= prod;
    mf[0] <= fl2;
    for (int s = 1; s < MUL_STAGES; s++) begin
      mp[s] <= mp[s-1];
      mf[s] <= mf[s-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      for (int s = 0; s < MUL_STAGES; s++) mv[s] <= 1'b0;
    end else begin
      v1    <= in_valid;
      v2    <= v1;
      mv[0] <= v2;
      for (int s = 1; s < MUL_STAGES; s++) mv[s] <= mv[s-1];
    end
  end

  // ---- adder tree; first/last flags travel beside it
  logic       tv;
  fp16_t      tsum;
  logic [1:0] tf [TREE_LAT];

  adder_tree #(.N(N)) u_tree (
    .clk, .rst_n, .in_valid(mv[MUL_STAGES-1]), .in_vec(mp[MUL_STAGES-1]),
    .out_valid(tv), .sum(tsum)
  );

  always_ff @(posedge clk) begin
    tf[0] <= mf[MUL_STAGES-1];
    for (int s = 1; s < TREE_LAT; s++) tf[s] <= tf[s-1];
  end

  // ---- K-step accumulator
  fp16_t acc_q, acc_sum;
  logic  acc_done;

  fp16_add u_acc (.a(acc_q), .b(tsum), .s(acc_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q    <= '0;
      acc_done <= 1'b0;
    end else begin
      acc_done <= tv & tf[TREE_LAT-1][0];
      if (tv) acc_q <= tf[TREE_LAT-1][1] ? tsum : acc_sum;
    end
  end

  // ---- output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dot_valid <= 1'b0;
      dot_val   <= '0;
    end else begin
      dot_valid <= acc_done;
      if (acc_done) dot_val <= acc_q;
    end
  end

endmodule
