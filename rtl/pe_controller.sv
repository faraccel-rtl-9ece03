// pe_controller: schedules one tile C[m][n] = sum_k A[m][k] * Weff[k][n]
// of NM activation rows x NN output neurons x LANES inner elements on the
// dot-product engine, output-stationary: each cycle one (m, n) dot.
//
// Order: output neuron n in the outer loop, activation row m in the inner
// loop. For a whole row of NM dots the weight word (neuron n) and the
// select vector stay the same; only the activation row changes.
//
// Per tile:
//   start        accepted when idle (start_ack); the command is latched and
//                FaR is switched off for the tile if its FaRMap bank failed
//                validation (a fallback).
//   STALL        while the chosen output bank is still being drained.
//   PREP0/PREP1  read FaRMap and shadow row 0, decode it (2 cycles).
//   RUN          issue one dot per cycle; commit the decoded select vector
//                on the first dot of every row.
//     overlap_en=1: row n+1 is read two cycles before the end of row n and
//                decoded on its last cycle, so rows follow back to back.
//     overlap_en=0: row n+1 is read on the last cycle of row n and decoded
//                in an extra LATCH cycle with no issue (one bubble per row
//                boundary).
//   DRAIN        wait until every result has been written to the output
//                bank, then request its drain and pulse done.
// Buffer reads have one cycle latency, so dpe_valid follows an issue by one
// cycle; results arrive DPE_LAT cycles later and are written in issue
// order. cycles reports first DPE input to last result inclusive: NM*NN +
// DPE_LAT = 1036 for the default sizes with overlap, 31 more without.
//
// From the paper: the row-wise latched select vector, select synthesis
// overlapped with the current row, the one-cycle-per-row cost when it is
// not overlapped, validation before enabling FaR with fall back to the
// baseline, and the 1,036-cycle tile. The loop order, the two-cycle
// prologue, the stall on a busy output bank and the counters are this
// design's own.
module pe_controller
  import far_pkg::*;
#(
  parameter int unsigned NM      = COLS,
  parameter int unsigned NN      = ROWS,
  parameter int unsigned N       = LANES,
  parameter int unsigned DPE_LAT = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    start_ack,
  input  tile_cmd_t               cmd,
  input  logic [1:0]              bank_err,
  input  logic [1:0]              drain_busy,
  // buffer reads
  output logic                    a_rbank,
  output logic [$clog2(NM)-1:0]   a_rrow,
  output logic [$clog2(NN)-1:0]   w_rrow,
  output logic                    cfg_re,
  output logic                    cfg_rbank,
  output logic [$clog2(NN)-1:0]   cfg_rrow,
  // select generator
  output logic                    far_on,
  output logic                    sg_decode,
  output logic                    sg_commit,
  input  logic                    row_fault,
  input  logic [$clog2(N+1)-1:0]  row_redirects,
  // DPE
  output logic                    dpe_valid,
  output logic                    dpe_first,
  output logic                    dpe_last,
  input  logic                    dot_valid,
  // output buffer
  output logic                    o_we,
  output logic                    o_wbank,
  output logic [$clog2(NM)-1:0]   o_wm,
  output logic [$clog2(NN)-1:0]   o_wn,
  output logic [1:0]              drain_req,
  // status
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             tiles,
  output logic [31:0]             cycles,
  output logic [31:0]             fallbacks,
  output logic [31:0]             row_faults,
  output logic [31:0]             stalls,
  output logic [31:0]             redirects,
  output logic [31:0]             bubbles
);

  typedef enum logic [2:0] {IDLE, STALL, PREP0, PREP1, RUN, LATCH, DRAIN} state_e;
  state_e st;
  tile_cmd_t c;
  logic [$clog2(NM)-1:0] m;
  logic [$clog2(NN)-1:0] n;
  logic [$clog2(NM*NN+1)-1:0] wcnt;
  logic [31:0] span;
  logic counting, commit_d, last_wr;

  wire run    = (st == RUN);
  wire m_end  = (32'(m) == NM - 1);
  wire n_end  = (32'(n) == NN - 1);

  assign start_ack = (st == IDLE) && start;
  assign busy      = (st != IDLE);
  assign a_rbank   = c.act_bank;
  assign a_rrow    = m;
  assign w_rrow    = n;
  assign cfg_rbank = c.cfg_bank;
  assign dpe_first = 1'b1;
  assign dpe_last  = 1'b1;
  assign o_we      = dot_valid;
  assign o_wbank   = c.out_bank;
  assign last_wr   = dot_valid && (32'(wcnt) == NM * NN - 1);
  // drain request on the cycle of the last write, so the bank counts as
  // busy from the very next cycle on
  assign drain_req = last_wr ? (c.out_bank ? 2'b10 : 2'b01) : 2'b00;

  always_comb begin
    cfg_re    = 1'b0;
    cfg_rrow  = n + 1'b1;
    sg_decode = 1'b0;
    sg_commit = 1'b0;
    unique case (st)
      PREP0: begin cfg_re = 1'b1; cfg_rrow = '0; end
      PREP1: sg_decode = 1'b1;
      LATCH: sg_decode = 1'b1;
      RUN: begin
        sg_commit = (m == '0);
        if (!n_end) begin
          if (c.overlap_en) begin
            cfg_re    = (32'(m) == NM - 2);
            sg_decode = m_end;
          end else begin
            cfg_re    = m_end;
          end
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= IDLE;
      c          <= '0;
      far_on     <= 1'b0;
      m          <= '0;
      n          <= '0;
      dpe_valid  <= 1'b0;
      wcnt       <= '0;
      o_wm       <= '0;
      o_wn       <= '0;
      span       <= '0;
      counting   <= 1'b0;
      commit_d   <= 1'b0;
      done       <= 1'b0;
      tiles      <= '0;
      cycles     <= '0;
      fallbacks  <= '0;
      row_faults <= '0;
      stalls     <= '0;
      redirects  <= '0;
      bubbles    <= '0;
    end else begin
      done      <= 1'b0;
      dpe_valid <= run;
      commit_d  <= sg_commit;
      if (commit_d)  redirects  <= redirects + 32'(row_redirects);
      if (row_fault) row_faults <= row_faults + 1;
      if (dpe_valid) counting <= 1'b1;
      if (dpe_valid || counting) span <= span + 1;

      unique case (st)
        IDLE: if (start) begin
          c      <= cmd;
          far_on <= cmd.far_en && !bank_err[cmd.cfg_bank];
          if (cmd.far_en && bank_err[cmd.cfg_bank]) fallbacks <= fallbacks + 1;
          m      <= '0;
          n      <= '0;
          wcnt   <= '0;
          o_wm   <= '0;
          o_wn   <= '0;
          span   <= '0;
          counting <= 1'b0;
          st     <= drain_busy[cmd.out_bank] ? STALL : PREP0;
        end
        STALL: begin
          stalls <= stalls + 1;
          if (!drain_busy[c.out_bank]) st <= PREP0;
        end
        PREP0: st <= PREP1;
        PREP1: st <= RUN;
        RUN: begin
          if (m_end) begin
            m <= '0;
            if (n_end) st <= DRAIN;
            else begin
              n <= n + 1'b1;
              if (!c.overlap_en) st <= LATCH;
            end
          end else begin
            m <= m + 1'b1;
          end
        end
        LATCH: begin
          bubbles <= bubbles + 1;
          st      <= RUN;
        end
        default: ;   // DRAIN: leaves on the last result below
      endcase

      if (dot_valid) begin
        wcnt <= wcnt + 1'b1;
        if (32'(o_wm) == NM - 1) begin
          o_wm <= '0;
          o_wn <= o_wn + 1'b1;
        end else begin
          o_wm <= o_wm + 1'b1;
        end
      end
      if (last_wr) begin
        st                   <= IDLE;
        done                 <= 1'b1;
        tiles                <= tiles + 1;
        cycles               <= span + 1;
        counting             <= 1'b0;
      end
    end
  end

endmodule
