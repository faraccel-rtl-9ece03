// shadow_store: on-chip store of the pre-scaled donor weights ("shadow"
// weights) that the FaRMap of the current tile refers to.
//
// Organisation: BANKS banks x ROWS output rows x NS slots of one FP16 word
// plus an even-parity bit. Slot j of row n holds the weight used by FaRMap
// entry j of row n: the donor weight multiplied offline by 1, 1/2 or 1/3,
// so the datapath never divides. A row's NS words are read together,
// registered (one cycle after re), through a port separate from the
// baseline weight buffer.
//
// From the paper: a small shadow SRAM of pre-scaled FP16 donor copies,
// read on its own port. This design's choices: slot-for-entry addressing,
// two banks, parity, and inj_err, a test hook that stores the next word
// with inverted parity.
module shadow_store
  import far_pkg::*;
#(
  parameter int unsigned NR    = ROWS,
  parameter int unsigned NS    = SLOTS,
  parameter int unsigned BANKS = 2
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(BANKS)-1:0] wbank,
  input  logic [$clog2(NR)-1:0]    wrow,
  input  logic [SLOT_W-1:0]        wslot,
  input  fp16_t                    wdata,
  input  logic                     inj_err,
  input  logic                     re,
  input  logic [$clog2(BANKS)-1:0] rbank,
  input  logic [$clog2(NR)-1:0]    rrow,
  output shadow_word_t [NS-1:0]    rdata
);

  shadow_word_t mem [BANKS][NR][NS];

  always_ff @(posedge clk) begin
    if (we && 32'(wslot) < NS)
      mem[wbank][wrow][wslot] <= '{par: (^wdata) ^ inj_err, w: wdata};
  end

  always_ff @(posedge clk) begin
    if (re) begin
      for (int s = 0; s < NS; s++) rdata[s] <= mem[rbank][rrow][s];
    end
  end

endmodule
