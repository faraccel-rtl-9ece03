// tile_buffer: on-chip tile store for activations or baseline weights.
//
// BANKS banks x NR rows x N FP16 elements. The stream side writes one
// 64-bit beat (4 elements, element 4g+i in bits [16i+15:16i]) per cycle
// at (wbank, wrow, wgrp). The compute side reads a whole N-element row per
// cycle; the read is registered, so data follows the address by one cycle.
// Instantiated with two banks as the activation ping-pong buffer (the host
// fills one bank while the engine reads the other) and with one bank as the
// weight buffer, where row n holds the N weights of output neuron n.
//
// From the paper: tile buffers fed by the DMA, ping-pong input buffers and a
// single weight buffer, one FP16 operand per lane per cycle. The 64-bit
// beat and the row organisation are this design's choices.
module tile_buffer
  import far_pkg::*;
#(
  parameter int unsigned NR    = ROWS,
  parameter int unsigned N     = LANES,
  parameter int unsigned BANKS = 2,
  localparam int unsigned BW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned GW   = (N > 4) ? $clog2(N / 4) : 1
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [BW-1:0]         wbank,
  input  logic [$clog2(NR)-1:0] wrow,
  input  logic [GW-1:0]         wgrp,
  input  logic [63:0]           wdata,
  input  logic [BW-1:0]         rbank,
  input  logic [$clog2(NR)-1:0] rrow,
  output fp16_t [N-1:0]         rdata
);

  // One memory word per 4-element group, so a beat is a plain word write.
  logic [N/4-1:0][63:0] mem [BANKS][NR];

  always_ff @(posedge clk) begin
    if (we && 32'(wbank) < BANKS)
      mem[wbank][wrow][wgrp] <= wdata;
  end

  always_ff @(posedge clk) begin
    rdata <= mem[(32'(rbank) < BANKS) ? rbank : '0][rrow];
  end

endmodule
