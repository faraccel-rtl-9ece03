// farmap_cache: on-chip store of the FaRMap, the sparse list of rewiring
// exceptions of the current weight tile.
//
// Organisation: BANKS banks x ROWS output rows x NS slots. Each slot holds
// one FaRMap entry (valid, victim lane, donor lane, division selector,
// skip flag) plus an even-parity bit computed when the entry is written.
// A whole row (all NS slots) is read in one cycle, registered, so the
// select generator sees a row one cycle after re. Two banks let the host
// load the next tile's map while the current one is in use.
//
// Validation: every write is checked before it is stored. A reserved
// division code, an index outside the lanes, a slot/row outside the array,
// or a rewire whose victim equals its donor marks the bank as erroneous
// (bank_err); the controller then runs tiles that use this bank without
// FaR. clr (with cbank) empties a bank and clears its error flag; it is
// issued at the start of every FaRMap packet. Slot valid bits are kept in
// flip-flops so that clr takes one cycle.
//
// From the paper: a small FaRMap SRAM with victim/donor/division/skip
// fields, validation of the map before a layer is enabled, fall back to
// baseline on illegal indexes or SRAM errors, prefetch of the next map.
// This design's choices: the number of banks, parity as the error
// indication, write-time validation, and the inj_err test hook that stores
// the next entry with inverted parity.
module farmap_cache
  import far_pkg::*;
#(
  parameter int unsigned NR    = ROWS,
  parameter int unsigned NS    = SLOTS,
  parameter int unsigned BANKS = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic [$clog2(BANKS)-1:0] cbank,
  input  logic                     we,
  input  logic [$clog2(BANKS)-1:0] wbank,
  input  logic [$clog2(NR)-1:0]    wrow,
  input  logic [SLOT_W-1:0]        wslot,
  input  farmap_entry_t            wdata,
  input  logic                     inj_err,
  input  logic                     re,
  input  logic [$clog2(BANKS)-1:0] rbank,
  input  logic [$clog2(NR)-1:0]    rrow,
  output farmap_word_t [NS-1:0]    rdata,
  output logic [BANKS-1:0]         bank_err
);

  farmap_word_t mem [BANKS][NR][NS];
  logic [NS-1:0] vld [BANKS][NR];

  logic illegal;
  always_comb begin
    illegal = 1'b0;
    if (wdata.valid) begin
      if (wdata.div == DIV_RSVD)                        illegal = 1'b1;
      if (32'(wdata.victim) >= LANES)                   illegal = 1'b1;
      if (32'(wdata.donor) >= LANES)                    illegal = 1'b1;
      if (!wdata.skip && (wdata.victim == wdata.donor)) illegal = 1'b1;
    end
    if (32'(wslot) >= NS || 32'(wrow) >= NR)            illegal = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (we && !illegal)
      mem[wbank][wrow][wslot] <= '{par: (^wdata) ^ inj_err, e: wdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_err <= '0;
      for (int b = 0; b < BANKS; b++)
        for (int r = 0; r < NR; r++) vld[b][r] <= '0;
    end else begin
      if (clr) begin
        bank_err[cbank] <= 1'b0;
        for (int r = 0; r < NR; r++) vld[cbank][r] <= '0;
      end
      if (we) begin
        if (illegal) bank_err[wbank] <= 1'b1;
        else         vld[wbank][wrow][wslot] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      for (int s = 0; s < NS; s++)
        rdata[s] <= vld[rbank][rrow][s] ? mem[rbank][rrow][s] : '0;
    end
  end

endmodule
