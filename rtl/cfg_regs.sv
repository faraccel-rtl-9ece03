// cfg_regs: AXI4-Lite register file through which the host processor
// controls FaRAccel.
//
// Register map (32-bit, word addresses):
//   0x00 CTRL    W: [0] start a tile (self-clearing), [1] far_en,
//                   [2] overlap_en, [3] act_bank, [4] cfg_bank, [5] out_bank,
//                   [8] inj_err (next configuration word is stored with a
//                   parity error; test hook, cleared once a FaRMap or
//                   shadow word has been written), [9] clear irq
//                R: the stored bits, [0] = start still pending
//   0x04 STATUS  R: [0] busy, [2:1] output bank draining, [4:3] FaRMap
//                   bank failed validation, [5] irq
//   0x08 TILES       tiles completed
//   0x0C CYCLES      cycles of the last tile, first DPE input to last result
//   0x10 FALLBACKS   tiles run without FaR because the bank was invalid
//   0x14 ROWFAULTS   rows run without FaR because of a parity or index fault
//   0x18 STALLS      cycles a start waited for an output bank to drain
//   0x1C REDIRECTS   lanes redirected (shadow or skip), summed over rows
//   0x20 BUBBLES     issue cycles lost to select-vector latching
// A write is taken when AWVALID and WVALID are both high and no response
// is pending; BVALID follows one cycle later. A read returns RDATA one
// cycle after ARVALID. All responses are OKAY.
//
// The paper shows an AXI-Lite configuration bus from the processor and a
// control bit that turns FaR on for a layer; the register map is this
// design's own.
module cfg_regs
  import far_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [7:0]  araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // to / from the controller
  output tile_cmd_t   cmd,
  output logic        start,
  input  logic        start_ack,
  output logic        inj_err,
  input  logic        cfg_we,
  input  logic        busy,
  input  logic        done,
  input  logic [1:0]  drain_busy,
  input  logic [1:0]  bank_err,
  input  logic [31:0] tiles,
  input  logic [31:0] cycles,
  input  logic [31:0] fallbacks,
  input  logic [31:0] row_faults,
  input  logic [31:0] stalls,
  input  logic [31:0] redirects,
  input  logic [31:0] bubbles,
  output logic        irq
);

  logic wr;
  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;
  assign arready = !rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd     <= '0;
      start   <= 1'b0;
      inj_err <= 1'b0;
      irq     <= 1'b0;
      bvalid  <= 1'b0;
    end else begin
      if (start_ack) start <= 1'b0;
      if (done)      irq   <= 1'b1;
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        if (awaddr[7:2] == 6'd0 && wstrb[0]) begin
          cmd <= '{far_en: wdata[1], overlap_en: wdata[2], act_bank: wdata[3],
                   cfg_bank: wdata[4], out_bank: wdata[5]};
          if (wdata[0]) start <= 1'b1;
        end
        if (awaddr[7:2] == 6'd0 && wstrb[1]) begin
          if (wdata[8]) inj_err <= 1'b1;
          if (wdata[9]) irq     <= 1'b0;
        end
      end
      if (inj_err && cfg_we) inj_err <= 1'b0;   // used by one word
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        unique case (araddr[7:2])
          6'd0:    rdata <= {26'd0, cmd.out_bank, cmd.cfg_bank, cmd.act_bank,
                             cmd.overlap_en, cmd.far_en, start};
          6'd1:    rdata <= {26'd0, irq, bank_err, drain_busy, busy};
          6'd2:    rdata <= tiles;
          6'd3:    rdata <= cycles;
          6'd4:    rdata <= fallbacks;
          6'd5:    rdata <= row_faults;
          6'd6:    rdata <= stalls;
          6'd7:    rdata <= redirects;
          6'd8:    rdata <= bubbles;
          default: rdata <= '0;
        endcase
      end
    end
  end

  // AXI4-Lite rule: a response, once valid, stays valid until accepted.
  a_bhold : assert property (@(posedge clk) disable iff (!rst_n) (bvalid && !bready) |=> bvalid)
    else $error("cfg_regs: BVALID dropped before BREADY");
  a_rhold : assert property (@(posedge clk) disable iff (!rst_n) (rvalid && !rready) |=> (rvalid && $stable(rdata)))
    else $error("cfg_regs: RVALID or RDATA changed before RREADY");

endmodule
