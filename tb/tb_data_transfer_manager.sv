// tb_data_transfer_manager: sends weight, activation, FaRMap and shadow
// packets (plus one of unknown type, which must be dropped) and checks
// every buffer write strobe, address and data; then requests the drain of
// both output banks and checks that the beats come out row-major from a
// modelled output buffer (one-cycle read), with m_last on the 256th beat,
// that the sender holds back while the output FIFO is nearly full, and
// that drain_busy covers the whole drain.
module tb_data_transfer_manager;
  import far_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, s_last = 0;
  logic [63:0] s_data = 0;
  logic w_we, a_we, a_wbank, map_clr, map_we, cfg_wbank, sh_we;
  logic [4:0] t_wrow, cfg_wrow, o_rm;
  logic [2:0] t_wgrp, cfg_wslot, o_rgrp;
  logic [63:0] t_wdata, o_rdata, m_data;
  farmap_entry_t map_wdata;
  fp16_t sh_wdata;
  logic [1:0] drain_req = 0, drain_busy;
  logic o_rbank, m_valid, m_last;
  logic [6:0] fifo_count = 0;
  int checks = 0, failures = 0;

  data_transfer_manager dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected write log
  typedef struct { int kind; int bank; int row; int sub; logic [63:0] d; } wr_t;
  wr_t exp_q [$];
  int n_w = 0, n_a = 0, n_m = 0, n_s = 0, n_clr = 0;
  always @(posedge clk) if (rst_n) begin
    if (w_we || a_we || map_we || sh_we) begin
      wr_t e;
      automatic int kind = w_we ? 0 : a_we ? 1 : map_we ? 2 : 3;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected write"); end
      else begin
        e = exp_q.pop_front();
        if (kind != e.kind) begin failures++; $display("kind %0d exp %0d", kind, e.kind); end
        else if (kind < 2 && (int'(t_wrow) != e.row || int'(t_wgrp) != e.sub || t_wdata != e.d || (kind == 1 && int'(a_wbank) != e.bank)))
          begin failures++; $display("tile write"); end
        else if (kind == 2 && (int'(cfg_wrow) != e.row || int'(cfg_wslot) != e.sub || 64'(map_wdata) != e.d || int'(cfg_wbank) != e.bank))
          begin failures++; $display("map write"); end
        else if (kind == 3 && (int'(cfg_wrow) != e.row || int'(cfg_wslot) != e.sub || 64'(sh_wdata) != e.d || int'(cfg_wbank) != e.bank))
          begin failures++; $display("shadow write"); end
      end
      if (kind == 0) n_w++; else if (kind == 1) n_a++; else if (kind == 2) n_m++; else n_s++;
    end
    if (map_clr) n_clr++;
  end

  task automatic send(logic [63:0] d, bit last);
    @(negedge clk);
    s_data = d; s_valid = 1; s_last = last;
    @(posedge clk);
    chk(s_ready, "s_ready");
    @(negedge clk);
    s_valid = 0; s_last = 0;
  endtask

  task automatic tile_pkt(pkt_type_e t, int bank);
    send({t, 3'b000, 1'(bank), 56'd0}, 0);
    for (int b = 0; b < 256; b++) begin
      automatic logic [63:0] d = {$urandom, $urandom};
      exp_q.push_back('{kind: (t == PKT_WEIGHT) ? 0 : 1, bank: bank, row: b / 8, sub: b % 8, d: d});
      send(d, b == 255);
    end
  endtask

  // output buffer model: value of (bank, m, grp) is a fixed function
  function automatic logic [63:0] ob(int b, int m, int g);
    return {16'(b), 16'(m), 16'(g), 16'hA5A5};
  endfunction
  always @(posedge clk) o_rdata <= ob(int'(o_rbank), int'(o_rm), int'(o_rgrp));

  int rx = 0, rx_bank = 0, full_cycles = 0, sent_while_full = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid) begin
      checks++;
      if (m_data != ob(rx_bank, (rx % 256) / 8, rx % 8)) begin failures++; if (failures < 10) $display("beat %0d %h", rx, m_data); end
      checks++;
      if (m_last != ((rx % 256) == 255)) failures++;
      rx++;
      if (rx % 256 == 0) rx_bank ^= 1;
    end
  end
  // FIFO level model: mostly empty, sometimes nearly full
  int hold = 0;
  always @(negedge clk) begin
    if (hold > 0) begin fifo_count = 7'd62; hold--; full_cycles++; end
    else begin
      fifo_count = 7'($urandom % 20);
      if ($urandom % 50 == 0) hold = 10;
    end
  end
  always @(posedge clk) if (rst_n && fifo_count == 7'd62 && $past(fifo_count) == 7'd62 && m_valid) sent_while_full++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    tile_pkt(PKT_WEIGHT, 0);
    tile_pkt(PKT_ACT, 1);
    tile_pkt(PKT_ACT, 0);
    // FaRMap bank 1: header clears the bank, then 3 entries
    send({PKT_FARMAP, 3'b000, 1'b1, 56'd0}, 0);
    for (int i = 0; i < 3; i++) begin
      automatic logic [13:0] e = 14'($urandom);
      exp_q.push_back('{kind: 2, bank: 1, row: 7 + i, sub: i, d: 64'(e)});
      send({37'd0, 3'(i), 3'd0, 5'(7 + i), 2'd0, e}, i == 2);
    end
    // unknown packet type: dropped
    send({4'hE, 60'd0}, 0);
    send(64'hFFFF_FFFF_FFFF_FFFF, 0);
    send(64'hFFFF_FFFF_FFFF_FFFF, 1);
    // shadow bank 0
    send({PKT_SHADOW, 3'b000, 1'b0, 56'd0}, 0);
    for (int i = 0; i < 4; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      exp_q.push_back('{kind: 3, bank: 0, row: 30 - i, sub: 4 - i, d: 64'(w)});
      send({37'd0, 3'(4 - i), 3'd0, 5'(30 - i), w}, i == 3);
    end
    repeat (3) @(posedge clk);
    chk(exp_q.size() == 0, "all writes seen");
    chk(n_w == 256 && n_a == 512 && n_m == 3 && n_s == 4 && n_clr == 1, $sformatf("write counts %0d %0d %0d %0d %0d", n_w, n_a, n_m, n_s, n_clr));
    // drain bank 0 then bank 1
    @(negedge clk) drain_req = 2'b01;
    @(negedge clk) drain_req = 2'b10;
    @(negedge clk) drain_req = 2'b00;
    chk(drain_busy == 2'b11, "both banks busy");
    while (rx < 256) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(drain_busy == 2'b10, "bank 0 released after its last beat");
    while (rx < 512) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(drain_busy == 2'b00, "bank 1 released");
    chk(full_cycles > 0 && sent_while_full == 0, $sformatf("back-pressure full=%0d sent=%0d", full_cycles, sent_while_full));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
