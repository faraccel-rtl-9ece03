// adder_tree: pipelined FP16 reduction tree of the dot-product engine.
//
// Reduces LANES FP16 products to one sum with LANES-1 fp16_add nodes
// arranged in log2(LANES) levels; for 32 lanes that is the paper's five
// levels and 31 adders. Level l adds neighbours 2i and 2i+1 of level l-1
// and is registered, so a new vector is accepted every cycle and its sum
// appears LEVELS cycles later with out_valid. The pairwise order is this
// design's choice (FP16 addition is not associative, so it fixes the
// rounding of the result); the tree shape is the paper's.
module adder_tree
  import far_pkg::*;
#(
  parameter int unsigned N = LANES        // power of two
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fp16_t [N-1:0]   in_vec,
  output logic            out_valid,
  output fp16_t           sum
);

  localparam int unsigned LEVELS = $clog2(N);

  // lvl[l] holds the N>>l values after level l (lvl[0] is the input).
  fp16_t [N-1:0] lvl [LEVELS+1];
  logic          vld [LEVELS+1];

  assign lvl[0] = in_vec;
  assign vld[0] = in_valid;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned W = N >> l;
    fp16_t [W-1:0] s;
    for (genvar i = 0; i < W; i++) begin : g_node
      fp16_add u_add (.a(lvl[l-1][2*i]), .b(lvl[l-1][2*i+1]), .s(s[i]));
    end
    always_ff @(posedge clk) begin
      lvl[l][W-1:0] <= s;
    end
    if (W < N) begin : g_pad
      assign lvl[l][N-1:W] = '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
    end
  end

  assign sum       = lvl[LEVELS][0];
  assign out_valid = vld[LEVELS];

endmodule
