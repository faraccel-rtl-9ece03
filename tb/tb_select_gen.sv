// tb_select_gen: feeds random FaRMap rows (with skips, rewires, unused
// slots), checks the dense select vector and shadow slots after
// decode+commit, and checks the fall backs to baseline: FaR off, a parity
// error in an entry, a parity error in a used shadow word, and two entries
// with the same victim. Also checks that "active" does not change on decode
// alone, so the next row can be prepared while the current one streams.
module tb_select_gen;
  import far_pkg::*;
  logic clk = 0, rst_n = 0, far_on, decode = 0, commit = 0, row_fault;
  farmap_word_t [SLOTS-1:0] entries;
  shadow_word_t [SLOTS-1:0] shadow;
  lane_sel_t [LANES-1:0] sel;
  fp16_t [SLOTS-1:0] w_shadow;
  logic [5:0] row_redirects;
  int checks = 0, failures = 0;
  int n_fault = 0, n_ok = 0;

  select_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    lane_sel_t exp [LANES];
    int cnt;
    bit bad;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      automatic int kind = $urandom % 8;   // 0 off, 1 entry parity, 2 shadow parity, 3 duplicate
      automatic bit [LANES-1:0] used = '0;
      @(negedge clk);
      far_on = (kind != 0);
      for (int l = 0; l < LANES; l++) exp[l] = '{mode: SEL_MAIN, slot: '0};
      cnt = 0;
      for (int j = 0; j < SLOTS; j++) begin
        farmap_entry_t e;
        automatic int v;
        do v = $urandom % LANES; while (used[v]);
        used[v] = 1;
        e.valid  = ($urandom % 4) != 0;
        e.victim = v[4:0];
        e.donor  = 5'((v + 1) % LANES);
        e.div    = div_sel_e'($urandom % 3);
        e.skip   = ($urandom % 3) == 0;
        entries[j] = '{par: ^e, e: e};
        shadow[j].w = 16'($urandom);
        shadow[j].par = ^shadow[j].w;
        if (e.valid) begin
          cnt++;
          exp[v] = e.skip ? '{mode: SEL_SKIP, slot: '0} : '{mode: SEL_SHADOW, slot: 3'(j)};
        end
      end
      bad = 0;
      if (kind == 1) begin entries[2].par = ~entries[2].par; bad = 1; end
      if (kind == 2) begin
        entries[1].e.valid = 1; entries[1].e.skip = 0; entries[1].par = ^entries[1].e;
        exp[entries[1].e.victim] = '{mode: SEL_SHADOW, slot: 3'd1};
        shadow[1].par = ~shadow[1].par; bad = 1;
      end
      if (kind == 3) begin
        entries[3].e = entries[0].e; entries[3].e.valid = 1; entries[0].e.valid = 1;
        entries[3].par = ^entries[3].e; entries[0].par = ^entries[0].e; bad = 1;
      end
      if (bad || kind == 0) begin
        for (int l = 0; l < LANES; l++) exp[l] = '{mode: SEL_MAIN, slot: '0};
        cnt = 0;
      end
      decode = 1;
      @(negedge clk);
      decode = 0;
      // decode alone must not disturb the active vector
      chk(row_fault == 0, "spurious fault");
      commit = 1;
      @(negedge clk);
      commit = 0;
      chk(row_fault == (bad && far_on), "row_fault flag");
      if (bad && far_on) n_fault++; else n_ok++;
      chk(32'(row_redirects) == cnt, "redirect count");
      for (int l = 0; l < LANES; l++) chk(sel[l] == exp[l], $sformatf("lane %0d sel %b exp %b kind %0d", l, sel[l], exp[l], kind));
      for (int j = 0; j < SLOTS; j++) chk(w_shadow[j] == shadow[j].w, "shadow slot");
    end
    chk(n_fault > 0 && n_ok > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
