// far_pkg: types and constants shared by the FaRAccel datapath and control.
//
// FaRAccel computes 32x32x32 FP16 matrix tiles on a 32-lane dot-product
// engine. Forget-and-Rewire (FaR) is applied by choosing, per multiplier
// lane, which weight the lane consumes: the baseline weight, a pre-scaled
// donor copy from the shadow store, or zero. This package defines the
// encodings used for that choice.
//
// From the paper: 32 lanes, 32x32 tiles, FP16 arithmetic, a three-way
// {main, shadow, skip} select, five shadow slots per row (W_shadow[5]),
// division factors restricted to 2 or 3. Chosen here: the bit layout of a
// FaRMap entry, the division-selector code points, and even parity as the
// SRAM error indication.
package far_pkg;

  localparam int unsigned LANES  = 32;  // multiplier lanes = tile K
  localparam int unsigned ROWS   = 32;  // output neurons per tile (n)
  localparam int unsigned COLS   = 32;  // activation rows per tile (m)
  localparam int unsigned SLOTS  = 5;   // FaRMap entries / shadow words per row
  localparam int unsigned IDX_W  = $clog2(LANES);
  localparam int unsigned SLOT_W = $clog2(SLOTS);

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_QNAN = 16'h7E00;

  // Operand source of one multiplier lane.
  typedef enum logic [1:0] {
    SEL_MAIN   = 2'd0,   // baseline weight buffer
    SEL_SHADOW = 2'd1,   // shadow store slot
    SEL_SKIP   = 2'd2    // constant zero (forgotten connection)
  } sel_mode_e;

  typedef struct packed {
    sel_mode_e          mode;
    logic [SLOT_W-1:0]  slot;
  } lane_sel_t;

  localparam int unsigned LANE_SEL_W = $bits(lane_sel_t);

  // Division applied offline to the donor copy in the shadow store.
  typedef enum logic [1:0] {
    DIV_1    = 2'd0,
    DIV_2    = 2'd1,
    DIV_3    = 2'd2,
    DIV_RSVD = 2'd3    // illegal
  } div_sel_e;

  typedef struct packed {
    logic              valid;
    logic [IDX_W-1:0]  victim;   // lane whose weight is replaced or skipped
    logic [IDX_W-1:0]  donor;    // lane whose weight was copied (informational)
    div_sel_e          div;
    logic              skip;     // 1: forget only (weight forced to zero)
  } farmap_entry_t;

  localparam int unsigned ENTRY_W = $bits(farmap_entry_t);  // 14

  // Stored words carry one parity bit so that a corrupted SRAM word is seen.
  typedef struct packed {
    logic          par;
    farmap_entry_t e;
  } farmap_word_t;

  typedef struct packed {
    logic  par;
    fp16_t w;
  } shadow_word_t;

  // Stream header types (bits [63:60] of the first beat of a packet).
  typedef enum logic [3:0] {
    PKT_WEIGHT = 4'h1,
    PKT_ACT    = 4'h2,
    PKT_FARMAP = 4'h3,
    PKT_SHADOW = 4'h4
  } pkt_type_e;

  // Tile command, written through the AXI-Lite register file.
  typedef struct packed {
    logic far_en;       // apply the FaR configuration
    logic overlap_en;   // prepare next row's select vector during current row
    logic act_bank;     // input (activation) ping-pong bank to read
    logic cfg_bank;     // FaRMap / shadow bank to use
    logic out_bank;     // output ping-pong bank to fill
  } tile_cmd_t;

endpackage
