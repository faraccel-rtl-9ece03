// data_transfer_manager: moves tiles and FaR configuration from the input
// stream into the on-chip stores, and finished results to the output
// stream.
//
// Input packets (64-bit beats, the last beat flagged by s_last):
//   header beat: [63:60] packet type (pkt_type_e), [56] bank
//   PKT_WEIGHT : NR*N/4 beats, weight row n = beats 8n..8n+7, 4 FP16 each
//   PKT_ACT    : same layout, into activation bank [56]
//   PKT_FARMAP : one beat per entry, [13:0] farmap_entry_t, [20:16] row,
//                [26:24] slot; the header empties FaRMap bank [56] first
//   PKT_SHADOW : one beat per word, [15:0] FP16, [20:16] row, [26:24] slot
// A payload beat is written on the cycle it is accepted; s_ready is always
// high, so a tile streams in at one beat per cycle. Payload bits go
// straight from s_data to the stores' write-data ports, and drained beats
// straight from the output buffer to m_data: this block generates only the
// addresses, enables and framing around them. Beats past the end of a
// dense tile and packets of unknown type are dropped up to s_last.
//
// Output: drain_req[b] (a pulse from the controller) queues output bank b.
// A queued bank is read row-major, one 4-result beat per cycle while the
// output FIFO has room (fifo_count leaves space for the beat in flight),
// and the final beat carries m_last. drain_busy[b] stays high from the
// request until the bank's last beat has been sent, so the controller does
// not overwrite a bank that is still draining.
//
// From the paper: a data transfer manager between the AXI DMA stream and
// the weight, input and output buffers, with configuration loaded ahead of
// the inputs. The packet format is this design's own.
module data_transfer_manager
  import far_pkg::*;
#(
  parameter int unsigned NR     = ROWS,
  parameter int unsigned NM     = COLS,
  parameter int unsigned N      = LANES,
  parameter int unsigned FIFO_D = 64,
  localparam int unsigned GW    = (N > 4) ? $clog2(N / 4) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // input stream
  input  logic                      s_valid,
  output logic                      s_ready,
  input  logic [63:0]               s_data,
  input  logic                      s_last,
  // weight and activation buffers
  output logic                      w_we,
  output logic                      a_we,
  output logic                      a_wbank,
  output logic [$clog2(NR)-1:0]     t_wrow,
  output logic [GW-1:0]             t_wgrp,
  output logic [63:0]               t_wdata,
  // FaRMap cache
  output logic                      map_clr,
  output logic                      map_we,
  output logic                      cfg_wbank,
  output logic [$clog2(NR)-1:0]     cfg_wrow,
  output logic [SLOT_W-1:0]         cfg_wslot,
  output farmap_entry_t             map_wdata,
  // shadow store
  output logic                      sh_we,
  output fp16_t                     sh_wdata,
  // output buffer drain
  input  logic [1:0]                drain_req,
  output logic [1:0]                drain_busy,
  output logic                      o_rbank,
  output logic [$clog2(NM)-1:0]     o_rm,
  output logic [GW-1:0]             o_rgrp,
  input  logic [63:0]               o_rdata,
  input  logic [$clog2(FIFO_D+1)-1:0] fifo_count,
  output logic                      m_valid,
  output logic [63:0]               m_data,
  output logic                      m_last
);

  localparam int unsigned TILE_BEATS = NR * N / 4;
  localparam int unsigned OUT_BEATS  = NM * NR / 4;

  // ---------------- input side
  typedef enum logic [1:0] {S_HDR, S_PAY, S_DROP} in_state_e;
  in_state_e   st;
  pkt_type_e   ptype;
  logic        pbank;
  logic [$clog2(TILE_BEATS+1)-1:0] beat;

  logic acc;
  assign s_ready = 1'b1;
  assign acc     = s_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_HDR;
      ptype <= PKT_WEIGHT;
      pbank <= 1'b0;
      beat  <= '0;
    end else if (acc) begin
      unique case (st)
        S_HDR: begin
          ptype <= pkt_type_e'(s_data[63:60]);
          pbank <= s_data[56];
          beat  <= '0;
          if (!s_last) begin
            if (s_data[63:60] inside {PKT_WEIGHT, PKT_ACT, PKT_FARMAP, PKT_SHADOW}) st <= S_PAY;
            else st <= S_DROP;
          end
        end
        S_PAY: begin
          if (32'(beat) < TILE_BEATS) beat <= beat + 1'b1;
          if (s_last) st <= S_HDR;
        end
        default: if (s_last) st <= S_HDR;
      endcase
    end
  end

  logic dense_ok;
  assign dense_ok = (32'(beat) < TILE_BEATS);

  always_comb begin
    w_we      = acc && st == S_PAY && ptype == PKT_WEIGHT && dense_ok;
    a_we      = acc && st == S_PAY && ptype == PKT_ACT && dense_ok;
    a_wbank   = pbank;
    t_wrow    = $clog2(NR)'(32'(beat) / (N / 4));
    t_wgrp    = GW'(32'(beat) % (N / 4));
    t_wdata   = s_data;
    map_clr   = acc && st == S_HDR && s_data[63:60] == PKT_FARMAP;
    map_we    = acc && st == S_PAY && ptype == PKT_FARMAP;
    sh_we     = acc && st == S_PAY && ptype == PKT_SHADOW;
    cfg_wbank = map_clr ? s_data[56] : pbank;
    cfg_wrow  = s_data[16 +: $clog2(NR)];
    cfg_wslot = s_data[24 +: SLOT_W];
    map_wdata = farmap_entry_t'(s_data[ENTRY_W-1:0]);
    sh_wdata  = s_data[15:0];
  end

  // ---------------- output side
  logic [1:0] pend;
  logic       draining, dbank;
  logic [$clog2(OUT_BEATS+1)-1:0] rcnt;
  logic       rd_issue, rd_last, vq, lq;

  assign rd_issue = draining && 32'(rcnt) < OUT_BEATS && 32'(fifo_count) + 2 < FIFO_D;
  assign rd_last  = 32'(rcnt) == OUT_BEATS - 1;
  assign o_rbank  = dbank;
  assign o_rm     = $clog2(NM)'(32'(rcnt) / (NR / 4));
  assign o_rgrp   = GW'(32'(rcnt) % (NR / 4));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      draining <= 1'b0;
      dbank    <= 1'b0;
      rcnt     <= '0;
      vq       <= 1'b0;
      lq       <= 1'b0;
    end else begin
      pend <= pend | drain_req;
      vq   <= rd_issue;
      lq   <= rd_issue && rd_last;
      if (!draining) begin
        if (pend[0] || pend[1]) begin
          draining <= 1'b1;
          dbank    <= pend[0] ? 1'b0 : 1'b1;
          rcnt     <= '0;
        end
      end else begin
        if (rd_issue) rcnt <= rcnt + 1'b1;
        if (vq && lq) begin
          draining    <= 1'b0;
          pend[dbank] <= drain_req[dbank];
        end
      end
    end
  end

  assign drain_busy = pend;
  assign m_valid    = vq;
  assign m_data     = o_rdata;
  assign m_last     = lq;

endmodule
