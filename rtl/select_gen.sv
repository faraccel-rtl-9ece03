// select_gen: turns one output row's FaRMap entries into the dense
// per-lane select vector used by the operand redirect network.
//
// decode (one cycle after the FaRMap and shadow rows were read) expands the
// NS sparse entries into N lane selects and stores them, with the row's NS
// shadow weights, in a "next" register. commit copies "next" to "active",
// which drives the DPE and stays stable for the whole row. The controller
// decodes row n+1 while row n is still streaming and commits on the first
// cycle of row n+1, so select generation costs no issue slot.
//
// Entry j with valid=1 acts on lane victim: skip=1 forces the lane's weight
// to zero (SEL_SKIP); skip=0 makes the lane read shadow slot j
// (SEL_SHADOW). Lanes named by no entry keep the baseline weight. If FaR is
// off for the tile, or the row shows a parity error in a used entry or
// shadow word, or two entries name the same victim, the whole row uses the
// baseline weights and row_fault pulses when it is committed.
//
// From the paper: dense 32-element select vector built from the row's
// FaRMap slice, latched for the row, prepared during the previous row,
// fall back to baseline on bad configuration. This design's choices: the
// implicit slot addressing, the row-level fall back and the fault checks.
module select_gen
  import far_pkg::*;
#(
  parameter int unsigned N  = LANES,
  parameter int unsigned NS = SLOTS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    far_on,
  input  logic                    decode,
  input  logic                    commit,
  input  farmap_word_t [NS-1:0]   entries,
  input  shadow_word_t [NS-1:0]   shadow,
  output lane_sel_t    [N-1:0]    sel,
  output fp16_t        [NS-1:0]   w_shadow,
  output logic                    row_fault,
  output logic [$clog2(N+1)-1:0]  row_redirects
);

  lane_sel_t [N-1:0]  dense;
  logic      [N-1:0]  hit;
  logic               fault;
  logic [$clog2(N+1)-1:0] cnt;

  always_comb begin
    hit   = '0;
    fault = 1'b0;
    cnt   = '0;
    for (int l = 0; l < N; l++) dense[l] = '{mode: SEL_MAIN, slot: '0};
    for (int j = 0; j < NS; j++) begin
      if (^entries[j]) fault = 1'b1;
      if (entries[j].e.valid) begin
        if (32'(entries[j].e.victim) >= N)            fault = 1'b1;
        else if (hit[entries[j].e.victim])            fault = 1'b1;
        else begin
          hit[entries[j].e.victim] = 1'b1;
          cnt = cnt + 1'b1;
          if (entries[j].e.skip)
            dense[entries[j].e.victim] = '{mode: SEL_SKIP, slot: '0};
          else begin
            if (^shadow[j]) fault = 1'b1;
            dense[entries[j].e.victim] = '{mode: SEL_SHADOW, slot: SLOT_W'(j)};
          end
        end
      end
    end
    if (fault || !far_on) begin
      for (int l = 0; l < N; l++) dense[l] = '{mode: SEL_MAIN, slot: '0};
      cnt = '0;
    end
  end

  lane_sel_t [N-1:0]      nxt_sel;
  fp16_t     [NS-1:0]     nxt_ws;
  logic                   nxt_fault;
  logic [$clog2(N+1)-1:0] nxt_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt_sel       <= '0;
      nxt_ws        <= '0;
      nxt_fault     <= 1'b0;
      nxt_cnt       <= '0;
      sel           <= '0;
      w_shadow      <= '0;
      row_fault     <= 1'b0;
      row_redirects <= '0;
    end else begin
      if (decode) begin
        nxt_sel   <= dense;
        nxt_fault <= fault & far_on;
        nxt_cnt   <= cnt;
        for (int j = 0; j < NS; j++) nxt_ws[j] <= shadow[j].w;
      end
      row_fault <= commit & nxt_fault;
      if (commit) begin
        sel           <= nxt_sel;
        w_shadow      <= nxt_ws;
        row_redirects <= nxt_cnt;
      end
    end
  end

endmodule
