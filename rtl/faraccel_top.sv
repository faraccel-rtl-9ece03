// faraccel_top: the FaRAccel programmable-logic core.
//
// A host processor configures the core over AXI4-Lite and feeds it, through
// a DMA, one AXI-Stream of packets: a weight tile, activation tiles, the
// tile's FaRMap (rewiring exceptions) and its shadow weights (pre-scaled
// donor copies). Results leave on a second AXI-Stream, one 32x32 FP16
// result tile per packet.
//
// Blocks and data flow:
//   s_axis -> stream_fifo -> data_transfer_manager -> weight buffer (1 bank)
//                                                  -> input buffers (2 banks)
//                                                  -> farmap_cache (2 banks)
//                                                  -> shadow_store (2 banks)
//   pe_controller reads one activation row, one weight row, and (per output
//   row) one FaRMap and shadow row; select_gen turns the FaRMap row into
//   the latched per-lane select vector; far_dpe redirects operands and
//   computes one 32-element dot per cycle; results go to out_buffer (2
//   banks), from which the data transfer manager drains finished tiles
//   through a second stream_fifo to m_axis.
//   cfg_regs holds the tile command (FaR on/off, overlap on/off, bank
//   choices), the start bit, status and counters; irq rises when a tile is
//   done.
//
// Timing: a stream beat is taken every cycle; a tile computes in 1036
// cycles from its first DPE input to its last result (plus a 2-cycle
// prologue), and drains in 256 beats while the next tile runs.
//
// Following the paper: one process engine made of a 32-lane FaR-aware DPE,
// FaRMap cache, shadow store and select-vector controller, ping-pong input
// and output buffers, a single weight buffer, FIFOs and a data transfer
// manager between the DMA streams and the buffers, AXI-Lite configuration.
// This design's own: the packet format, the register map, a single process
// engine (the paper does not give the count).
module faraccel_top
  import far_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite configuration bus
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI-Stream in (from the read DMA)
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI-Stream out (to the write DMA)
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  output logic        irq
);

  localparam int unsigned NR = ROWS, NM = COLS, N = LANES;
  localparam int unsigned GW = $clog2(N / 4);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- input FIFO
  logic        fi_valid, fi_ready, fi_last;
  logic [63:0] fi_data;
  logic [CW-1:0] fi_count;

  stream_fifo #(.WIDTH(65), .DEPTH(FIFO_DEPTH)) u_fifo_in (
    .clk, .rst_n,
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data({s_axis_tlast, s_axis_tdata}),
    .m_valid(fi_valid), .m_ready(fi_ready), .m_data({fi_last, fi_data}), .count(fi_count)
  );

  // ---------------- data transfer manager
  logic        w_we, a_we, a_wbank, map_clr, map_we, cfg_wbank, sh_we;
  logic [$clog2(NR)-1:0] t_wrow, cfg_wrow;
  logic [GW-1:0] t_wgrp, o_rgrp;
  logic [63:0] t_wdata, o_rdata;
  logic [SLOT_W-1:0] cfg_wslot;
  farmap_entry_t map_wdata;
  fp16_t sh_wdata;
  logic [1:0]  drain_req, drain_busy;
  logic        o_rbank;
  logic [$clog2(NM)-1:0] o_rm;
  logic        fo_valid, fo_last, fo_ready_unused;
  logic [63:0] fo_data;
  logic [CW-1:0] fo_count;

  data_transfer_manager #(.NR(NR), .NM(NM), .N(N), .FIFO_D(FIFO_DEPTH)) u_dtm (
    .clk, .rst_n,
    .s_valid(fi_valid), .s_ready(fi_ready), .s_data(fi_data), .s_last(fi_last),
    .w_we, .a_we, .a_wbank, .t_wrow, .t_wgrp, .t_wdata,
    .map_clr, .map_we, .cfg_wbank, .cfg_wrow, .cfg_wslot, .map_wdata,
    .sh_we, .sh_wdata,
    .drain_req, .drain_busy, .o_rbank, .o_rm, .o_rgrp, .o_rdata,
    .fifo_count(fo_count), .m_valid(fo_valid), .m_data(fo_data), .m_last(fo_last)
  );

  // ---------------- output FIFO
  stream_fifo #(.WIDTH(65), .DEPTH(FIFO_DEPTH)) u_fifo_out (
    .clk, .rst_n,
    .s_valid(fo_valid), .s_ready(fo_ready_unused), .s_data({fo_last, fo_data}),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data({m_axis_tlast, m_axis_tdata}),
    .count(fo_count)
  );

  // ---------------- controller and register file
  tile_cmd_t cmd;
  logic start, start_ack, inj_err, busy, done;
  logic [1:0] bank_err;
  logic [31:0] tiles, cycles, fallbacks, row_faults, stalls, redirects, bubbles;
  logic a_rbank, cfg_re, cfg_rbank, far_on, sg_decode, sg_commit, row_fault;
  logic [$clog2(NM)-1:0] a_rrow, o_wm;
  logic [$clog2(NR)-1:0] w_rrow, cfg_rrow, o_wn;
  logic [$clog2(N+1)-1:0] row_redirects;
  logic dpe_valid, dpe_first, dpe_last, dot_valid, o_we, o_wbank;
  fp16_t dot_val;

  cfg_regs u_regs (
    .clk, .rst_n,
    .awaddr(s_axil_awaddr), .awvalid(s_axil_awvalid), .awready(s_axil_awready),
    .wdata(s_axil_wdata), .wstrb(s_axil_wstrb), .wvalid(s_axil_wvalid), .wready(s_axil_wready),
    .bresp(s_axil_bresp), .bvalid(s_axil_bvalid), .bready(s_axil_bready),
    .araddr(s_axil_araddr), .arvalid(s_axil_arvalid), .arready(s_axil_arready),
    .rdata(s_axil_rdata), .rresp(s_axil_rresp), .rvalid(s_axil_rvalid), .rready(s_axil_rready),
    .cmd, .start, .start_ack, .inj_err, .cfg_we(map_we || sh_we),
    .busy, .done, .drain_busy, .bank_err,
    .tiles, .cycles, .fallbacks, .row_faults, .stalls, .redirects, .bubbles, .irq
  );

  pe_controller #(.NM(NM), .NN(NR), .N(N)) u_ctrl (
    .clk, .rst_n, .start, .start_ack, .cmd, .bank_err, .drain_busy,
    .a_rbank, .a_rrow, .w_rrow, .cfg_re, .cfg_rbank, .cfg_rrow,
    .far_on, .sg_decode, .sg_commit, .row_fault, .row_redirects,
    .dpe_valid, .dpe_first, .dpe_last, .dot_valid,
    .o_we, .o_wbank, .o_wm, .o_wn, .drain_req,
    .busy, .done, .tiles, .cycles, .fallbacks, .row_faults, .stalls, .redirects, .bubbles
  );

  // ---------------- tile buffers
  fp16_t [N-1:0] a_row, w_row;

  tile_buffer #(.NR(NM), .N(N), .BANKS(2)) u_inbuf (
    .clk, .we(a_we), .wbank(a_wbank), .wrow(t_wrow), .wgrp(t_wgrp), .wdata(t_wdata),
    .rbank(a_rbank), .rrow(a_rrow), .rdata(a_row)
  );

  tile_buffer #(.NR(NR), .N(N), .BANKS(1)) u_wbuf (
    .clk, .we(w_we), .wbank(1'b0), .wrow(t_wrow), .wgrp(t_wgrp), .wdata(t_wdata),
    .rbank(1'b0), .rrow(w_rrow), .rdata(w_row)
  );

  // ---------------- FaR configuration stores and select generation
  farmap_word_t [SLOTS-1:0] map_row;
  shadow_word_t [SLOTS-1:0] sh_row;
  lane_sel_t    [N-1:0]     sel;
  fp16_t        [SLOTS-1:0] w_shadow;

  farmap_cache #(.NR(NR), .NS(SLOTS), .BANKS(2)) u_map (
    .clk, .rst_n, .clr(map_clr), .cbank(cfg_wbank),
    .we(map_we), .wbank(cfg_wbank), .wrow(cfg_wrow), .wslot(cfg_wslot), .wdata(map_wdata),
    .inj_err, .re(cfg_re), .rbank(cfg_rbank), .rrow(cfg_rrow), .rdata(map_row), .bank_err
  );

  shadow_store #(.NR(NR), .NS(SLOTS), .BANKS(2)) u_shadow (
    .clk, .we(sh_we), .wbank(cfg_wbank), .wrow(cfg_wrow), .wslot(cfg_wslot), .wdata(sh_wdata),
    .inj_err, .re(cfg_re), .rbank(cfg_rbank), .rrow(cfg_rrow), .rdata(sh_row)
  );

  select_gen #(.N(N), .NS(SLOTS)) u_sel (
    .clk, .rst_n, .far_on, .decode(sg_decode), .commit(sg_commit),
    .entries(map_row), .shadow(sh_row), .sel, .w_shadow, .row_fault, .row_redirects
  );

  // ---------------- dot-product engine and output buffers
  far_dpe #(.N(N), .NS(SLOTS)) u_dpe (
    .clk, .rst_n, .in_valid(dpe_valid), .first(dpe_first), .last(dpe_last),
    .a_vec(a_row), .w_main(w_row), .w_shadow, .sel, .dot_valid, .dot_val
  );

  out_buffer #(.NM(NM), .NN(NR), .BANKS(2)) u_outbuf (
    .clk, .we(o_we), .wbank(o_wbank), .wm(o_wm), .wn(o_wn), .wdata(dot_val),
    .rbank(o_rbank), .rm(o_rm), .rgrp(o_rgrp), .rdata(o_rdata)
  );

endmodule
