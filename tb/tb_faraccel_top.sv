// tb_faraccel_top: end-to-end test of FaRAccel at its default size
// (32 lanes, 32x32x32 tiles), driving only the AXI4-Lite and AXI-Stream
// ports, as a host with a DMA would.
//
// It loads a weight tile, two activation tiles (both ping-pong banks), a
// FaRMap with skip and rewire entries (division 1, 2 and 3) and the
// matching pre-scaled shadow weights, runs tiles and compares every result
// with a reference built from real arithmetic (FP16 products, pairwise
// tree, one rounding per operation). Mechanisms exercised and counted:
//   FaR tile with overlapped select generation (1036 cycles),
//   baseline tile (FaR off: mode switch), FaR tile without overlap
//   (1067 cycles, 31 bubbles), output back-pressure causing a start to stall
//   on a draining output bank, fallback to baseline for a FaRMap bank that
//   failed validation, a row fallback after an injected shadow-word parity
//   error, skip lanes and shadow lanes, both input and both output banks.
module tb_faraccel_top;
  import far_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_rready = 1;
  logic [31:0] s_axil_wdata = 0;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [31:0] s_axil_rdata;
  logic [63:0] s_axis_tdata = 0, m_axis_tdata;
  logic        s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic        m_axis_tvalid, m_axis_tready = 1, m_axis_tlast;
  logic        irq;

  faraccel_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    #40ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite host
  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    do @(posedge clk); while (!s_axil_awready);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
  endtask

  // ---------------- stream host
  task automatic send(logic [63:0] d, bit last);
    @(negedge clk);
    s_axis_tdata = d; s_axis_tvalid = 1; s_axis_tlast = last;
    do @(posedge clk); while (!s_axis_tready);
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  fp16_t W [ROWS][LANES];          // W[n][k]
  fp16_t A [2][COLS][LANES];       // A[bank][m][k]
  farmap_entry_t MAP [2][ROWS][SLOTS];
  fp16_t SH [2][ROWS][SLOTS];

  task automatic send_tile(pkt_type_e t, bit bank, input fp16_t X [32][32]);
    send({t, 3'b000, bank, 56'd0}, 0);
    for (int r = 0; r < 32; r++) for (int g = 0; g < 8; g++)
      send({X[r][4*g+3], X[r][4*g+2], X[r][4*g+1], X[r][4*g]}, r == 31 && g == 7);
  endtask

  task automatic send_map(bit bank);
    int cnt = 0, sent = 0;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) if (MAP[bank][r][s].valid) cnt++;
    send({PKT_FARMAP, 3'b000, bank, 56'd0}, cnt == 0);
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) if (MAP[bank][r][s].valid) begin
      sent++;
      send({37'd0, 3'(s), 3'd0, 5'(r), 2'd0, MAP[bank][r][s]}, sent == cnt);
    end
  endtask

  task automatic send_shadow(bit bank);
    int cnt = 0, sent = 0;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) if (MAP[bank][r][s].valid && !MAP[bank][r][s].skip) cnt++;
    send({PKT_SHADOW, 3'b000, bank, 56'd0}, cnt == 0);
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) if (MAP[bank][r][s].valid && !MAP[bank][r][s].skip) begin
      sent++;
      send({37'd0, 3'(s), 3'd0, 5'(r), SH[bank][r][s]}, sent == cnt);
    end
  endtask

  // FaRMap for one bank: per row up to SLOTS distinct victims, each a skip or
  // a rewire from another lane with division 1, 2 or 3 (shadow = W[n][donor]/div).
  function automatic void make_map(bit bank);
    for (int r = 0; r < ROWS; r++) begin
      bit [LANES-1:0] used = '0;
      int ne = int'($urandom % (SLOTS + 1));
      if (r == 0) ne = SLOTS;
      for (int s = 0; s < SLOTS; s++) begin
        farmap_entry_t e = '0;
        if (s < ne) begin
          int v;
          do v = int'($urandom % LANES); while (used[v]);
          used[v] = 1;
          e.valid  = 1;
          e.victim = 5'(v);
          e.donor  = 5'((v + 1 + int'($urandom % (LANES - 1))) % LANES);
          e.skip   = (r == 0) ? (s == 4) : (($urandom % 4) == 0);
          e.div    = (r == 0) ? div_sel_e'(s % 3) : div_sel_e'($urandom % 3);
          SH[bank][r][s] = r2h(h2r(W[r][e.donor]) /
                                ((e.div == DIV_1) ? 1.0 : (e.div == DIV_2) ? 2.0 : 3.0));
        end
        MAP[bank][r][s] = e;
      end
    end
  endfunction

  // Reference result tile: C[m][n] with the effective weights of row n.
  function automatic void ref_tile(bit abank, bit far, bit cbank, int bad_row, output fp16_t C [32][32]);
    for (int n = 0; n < ROWS; n++) begin
      fp16_t we [LANES];
      for (int k = 0; k < LANES; k++) we[k] = W[n][k];
      if (far && n != bad_row)
        for (int s = 0; s < SLOTS; s++) if (MAP[cbank][n][s].valid)
          we[MAP[cbank][n][s].victim] = MAP[cbank][n][s].skip ? 16'h0000 : SH[cbank][n][s];
      for (int m = 0; m < COLS; m++) begin
        fp16_t t [LANES];
        for (int k = 0; k < LANES; k++) t[k] = ref_mul(A[abank][m][k], we[k]);
        for (int w = LANES / 2; w >= 1; w /= 2)
          for (int i = 0; i < w; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
        C[m][n] = t[0];
      end
    end
  endfunction

  // ---------------- output collector
  logic [63:0] beats [$];
  int tiles_rx = 0, beat_in_tile = 0, slow_sink = 0;
  always @(negedge clk) m_axis_tready = slow_sink ? (($urandom % 8) == 0) : 1'b1;
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    beats.push_back(m_axis_tdata);
    beat_in_tile++;
    checks++;
    if (m_axis_tlast != (beat_in_tile == 256)) begin failures++; $display("TLAST at beat %0d", beat_in_tile); end
    if (m_axis_tlast) begin tiles_rx++; beat_in_tile = 0; end
  end

  task automatic check_tile(string name, bit abank, bit far, bit cbank, int bad_row);
    fp16_t C [32][32];
    int bad = 0;
    while (beats.size() < 256) @(posedge clk);
    ref_tile(abank, far, cbank, bad_row, C);
    for (int b = 0; b < 256; b++) begin
      logic [63:0] d = beats.pop_front();
      int m = b / 8, g = b % 8;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (d[16*i +: 16] !== C[m][4*g+i]) begin
          failures++; bad++;
          if (bad < 4) $display("%s: C[%0d][%0d] = %h expected %h", name, m, 4*g+i, d[16*i +: 16], C[m][4*g+i]);
        end
      end
    end
  endtask

  // CTRL word: start | far_en<<1 | overlap<<2 | act<<3 | cfg<<4 | out<<5
  function automatic logic [31:0] ctrl(bit far, bit ovl, bit ab, bit cb, bit ob);
    return {26'd0, ob, cb, ab, ovl, far, 1'b1};
  endfunction

  task automatic wait_tiles(int n);
    logic [31:0] t;
    do begin repeat (50) @(posedge clk); axil_read(8'h08, t); end while (t < 32'(n));
  endtask

  int n_far_ovl = 0, n_far_novl = 0, n_base = 0, n_fallback = 0, n_rowfault = 0, n_stall = 0;
  int n_skip_lane = 0, n_shadow_lane = 0, n_div [3] = '{0, 0, 0}, n_bank_use [4] = '{0, 0, 0, 0};

  initial begin
    logic [31:0] r;
    int bad_row;
    for (int n = 0; n < ROWS; n++) for (int k = 0; k < LANES; k++) W[n][k] = rand_h(11, 17);
    for (int b = 0; b < 2; b++) for (int m = 0; m < COLS; m++) for (int k = 0; k < LANES; k++) A[b][m][k] = rand_h(11, 17);
    make_map(0);
    for (int r2 = 0; r2 < ROWS; r2++) for (int s = 0; s < SLOTS; s++) if (MAP[0][r2][s].valid) begin
      if (MAP[0][r2][s].skip) n_skip_lane++; else begin n_shadow_lane++; n_div[int'(MAP[0][r2][s].div)]++; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // load everything; configuration goes ahead of the inputs
    send_map(0);
    send_shadow(0);
    send_tile(PKT_WEIGHT, 0, W);
    send_tile(PKT_ACT, 0, A[0]);
    send_tile(PKT_ACT, 1, A[1]);
    axil_read(8'h04, r);
    chk(r[4:3] == 2'b00, "map bank 0 valid");

    // tile 1: FaR on, overlapped select generation
    axil_write(8'h00, ctrl(1, 1, 0, 0, 0));
    check_tile("far overlapped", 0, 1, 0, -1);
    n_far_ovl++; n_bank_use[0]++; n_bank_use[2]++;
    axil_read(8'h0C, r); chk(r == 32'd1036, $sformatf("tile cycles %0d (1036 expected)", r));
    axil_read(8'h1C, r); chk(r == 32'(n_skip_lane + n_shadow_lane), $sformatf("redirects %0d", r));
    chk(irq == 1'b1, "irq after tile");
    axil_write(8'h00, 32'h200);   // clear irq
    chk(irq == 1'b0, "irq cleared");

    // tile 2: FaR off (baseline) on activation bank 1 into output bank 1
    axil_write(8'h00, ctrl(0, 1, 1, 0, 1));
    check_tile("baseline", 1, 0, 0, -1);
    n_base++; n_bank_use[1]++; n_bank_use[3]++;

    // tiles 3 and 4 back to back with a slow output sink: tile 4 has to wait
    // for output bank 0 to drain (stall). Tile 3 runs without overlap.
    slow_sink = 1;
    axil_write(8'h00, ctrl(1, 0, 1, 0, 0));
    repeat (20) @(posedge clk);
    axil_write(8'h00, ctrl(1, 1, 0, 0, 0));   // pending until tile 3 is done
    wait_tiles(4);
    axil_read(8'h18, r); chk(r > 0, "stall cycles counted"); if (r > 0) n_stall++;
    check_tile("far not overlapped", 1, 1, 0, -1);
    n_far_novl++;
    check_tile("far after stall", 0, 1, 0, -1);
    n_far_ovl++;
    slow_sink = 0;
    axil_read(8'h20, r); chk(r == 32'd31, $sformatf("bubbles %0d (31 expected)", r));

    // tile 5: FaRMap bank 1 contains an illegal entry -> whole tile on baseline
    make_map(1);
    MAP[1][6][0].valid = 1; MAP[1][6][0].div = DIV_RSVD; MAP[1][6][0].skip = 0;
    send_map(1);
    send_shadow(1);
    axil_read(8'h04, r); chk(r[4:3] == 2'b10, "bank 1 flagged invalid");
    axil_write(8'h00, ctrl(1, 1, 0, 1, 1));
    check_tile("fallback", 0, 0, 1, -1);
    n_fallback++;
    axil_read(8'h10, r); chk(r == 32'd1, "fallback counted");

    // tile 6: a shadow word of bank 0 is stored with a parity error; only
    // its row falls back to the baseline weights
    bad_row = -1;
    for (int rr = 0; rr < ROWS && bad_row < 0; rr++)
      for (int s = 0; s < SLOTS; s++) if (bad_row < 0 && MAP[0][rr][s].valid && !MAP[0][rr][s].skip) bad_row = rr;
    axil_write(8'h00, 32'h100);   // inject on the next configuration word
    send_shadow(0);              // first word written belongs to bad_row
    axil_write(8'h00, ctrl(1, 1, 1, 0, 0));
    check_tile("row fault", 1, 1, 0, bad_row);
    axil_read(8'h14, r); chk(r == 32'd1, $sformatf("row faults %0d", r)); if (r > 0) n_rowfault++;

    axil_read(8'h08, r); chk(r == 32'd6, "six tiles");
    chk(tiles_rx == 6, "six result packets");
    // every mechanism must have happened
    chk(n_far_ovl > 0 && n_far_novl > 0 && n_base > 0, "modes");
    chk(n_fallback > 0 && n_rowfault > 0 && n_stall > 0, "safety and stall");
    chk(n_skip_lane > 0 && n_shadow_lane > 0 && n_div[0] > 0 && n_div[1] > 0 && n_div[2] > 0, "lane kinds");
    chk(n_bank_use[0] > 0 && n_bank_use[1] > 0 && n_bank_use[2] > 0 && n_bank_use[3] > 0, "banks");
    $display("mechanisms: far_overlap=%0d far_no_overlap=%0d baseline=%0d fallback=%0d row_fault=%0d stall=%0d skip_lanes=%0d shadow_lanes=%0d",
             n_far_ovl, n_far_novl, n_base, n_fallback, n_rowfault, n_stall, n_skip_lane, n_shadow_lane);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
