// out_buffer: ping-pong result buffers of the processing engine.
//
// BANKS banks x NM activation rows x NN output neurons of FP16. The engine
// writes one result per cycle at (wbank, wm, wn); the drain side reads four
// consecutive results of row rm (columns 4*rgrp .. 4*rgrp+3) as one 64-bit
// beat, registered (one cycle after the address). While one bank drains to
// the output stream the engine fills the other.
//
// From the paper: two output buffers used in ping-pong fashion. The
// row-major beat layout is this design's choice.
module out_buffer
  import far_pkg::*;
#(
  parameter int unsigned NM    = COLS,
  parameter int unsigned NN    = ROWS,
  parameter int unsigned BANKS = 2,
  localparam int unsigned GW   = (NN > 4) ? $clog2(NN / 4) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(BANKS)-1:0] wbank,
  input  logic [$clog2(NM)-1:0]    wm,
  input  logic [$clog2(NN)-1:0]    wn,
  input  fp16_t                    wdata,
  input  logic [$clog2(BANKS)-1:0] rbank,
  input  logic [$clog2(NM)-1:0]    rm,
  input  logic [GW-1:0]            rgrp,
  output logic [63:0]              rdata
);

  fp16_t mem [BANKS][NM][NN];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][wm][wn] <= wdata;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++)
      rdata[16*i +: 16] <= mem[rbank][rm][4*int'(rgrp) + i];
  end

endmodule
