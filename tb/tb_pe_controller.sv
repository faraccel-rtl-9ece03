// tb_pe_controller: runs the controller against small models of its
// neighbours: buffers with one-cycle reads, a select generator that tracks
// which FaRMap row was read, decoded and committed, and a DPE modelled as a
// 12-cycle delay line. Checks, for tiles with and without overlap:
//   - every DPE input pairs activation row m with weight row n in
//     n-outer/m-inner order, and the committed select row equals n;
//   - results are written to (m, n) in order, into the commanded bank;
//   - cycles = 1036 with overlap, 1036 + 31 without, bubbles = 31;
//   - a start waits while the target output bank drains (stall);
//   - FaR is switched off (fallback) when the FaRMap bank is invalid;
//   - done and drain_req pulse once per tile.
module tb_pe_controller;
  import far_pkg::*;
  localparam int LAT = 12;
  logic clk = 0, rst_n = 0, start = 0, start_ack;
  tile_cmd_t cmd = '0;
  logic [1:0] bank_err = 0, drain_busy = 0;
  logic a_rbank, cfg_re, cfg_rbank, far_on, sg_decode, sg_commit, row_fault = 0;
  logic [4:0] a_rrow, w_rrow, cfg_rrow, o_wm, o_wn;
  logic [5:0] row_redirects = 6'd3;
  logic dpe_valid, dpe_first, dpe_last, dot_valid, o_we, o_wbank, busy, done;
  logic [1:0] drain_req;
  logic [31:0] tiles, cycles, fallbacks, row_faults, stalls, redirects, bubbles;
  int checks = 0, failures = 0;

  pe_controller dut (.*);
  always #5 clk = ~clk;

  // neighbour models
  int rd_m, rd_n, map_row_q, next_row, active_row;
  logic [LAT-1:0] dl;
  int exp_m, exp_n, dones, drains;
  assign dot_valid = dl[LAT-1];
  always @(posedge clk) begin
    if (!rst_n) dl <= '0; else dl <= {dl[LAT-2:0], dpe_valid};
    if (cfg_re) map_row_q <= int'(cfg_rrow);
    if (sg_decode) next_row <= map_row_q;
    if (sg_commit) active_row <= next_row;
    rd_m <= int'(a_rrow);
    rd_n <= int'(w_rrow);
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int iss_m, iss_n;
  always @(posedge clk) if (rst_n) begin
    if (dpe_valid) begin
      chk(rd_m == iss_m && rd_n == iss_n, $sformatf("issue order m %0d n %0d exp %0d %0d", rd_m, rd_n, iss_m, iss_n));
      chk(active_row == rd_n, $sformatf("select row %0d for n %0d", active_row, rd_n));
      if (iss_m == COLS - 1) begin iss_m = 0; iss_n++; end else iss_m++;
    end
    if (o_we) begin
      chk(int'(o_wm) == exp_m && int'(o_wn) == exp_n && o_wbank == cmd.out_bank, "write address");
      if (exp_m == COLS - 1) begin exp_m = 0; exp_n++; end else exp_m++;
    end
    if (done) dones++;
    if (drain_req != 0) drains++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(bit ovl, bit far, bit ob, int expect_cycles);
    int d0 = dones;
    iss_m = 0; iss_n = 0; exp_m = 0; exp_n = 0;
    @(negedge clk);
    cmd = '{far_en: far, overlap_en: ovl, act_bank: 1'b1, cfg_bank: 1'b0, out_bank: ob};
    start = 1;
    @(negedge clk);
    while (!start_ack && !busy) @(negedge clk);
    start = 0;
    while (dones == d0) @(negedge clk);
    chk(cycles == 32'(expect_cycles), $sformatf("cycles %0d expected %0d", cycles, expect_cycles));
    chk(iss_n == ROWS && exp_n == ROWS, "all dots issued and written");
    chk(a_rbank == 1'b1, "activation bank");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // overlapped: 1024 + 12
    run_tile(1, 1, 0, COLS * ROWS + LAT);
    chk(tiles == 1 && bubbles == 0 && far_on, "tile 1 counters");
    chk(redirects == 32'(3 * ROWS), "redirect sum");
    // not overlapped: one latch cycle per row boundary
    run_tile(0, 1, 1, COLS * ROWS + LAT + ROWS - 1);
    chk(bubbles == 32'(ROWS - 1), "bubbles");
    // stall on a draining bank
    drain_busy = 2'b01;
    fork
      run_tile(1, 1, 0, COLS * ROWS + LAT);
      begin repeat (40) @(negedge clk); chk(busy && iss_n == 0, "stalled"); drain_busy = 0; end
    join
    chk(stalls >= 39, $sformatf("stall cycles %0d", stalls));
    // fallback on invalid configuration bank
    bank_err = 2'b01;
    run_tile(1, 1, 1, COLS * ROWS + LAT);
    chk(fallbacks == 1 && !far_on, "fallback");
    bank_err = 2'b00;
    chk(dones == 4 && drains == 4 && tiles == 4, "done and drain pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
