// tb_farmap_cache: writes random legal FaRMap entries into both banks and
// reads whole rows back (one cycle read latency), checking contents,
// parity, empty slots reading as zero, write-time validation (reserved
// division code, victim equal to donor) setting bank_err for the right
// bank only, clr emptying a bank and clearing its error, and inj_err
// storing a word whose parity does not check.
module tb_farmap_cache;
  import far_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, cbank = 0, we = 0, wbank = 0, inj_err = 0, re = 0, rbank = 0;
  logic [4:0] wrow = 0, rrow = 0;
  logic [2:0] wslot = 0;
  farmap_entry_t wdata = '0;
  farmap_word_t [SLOTS-1:0] rdata;
  logic [1:0] bank_err;
  int checks = 0, failures = 0;
  farmap_entry_t model [2][ROWS][SLOTS];

  farmap_cache dut (.*);
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

  task automatic wr(bit b, int r, int s, farmap_entry_t e);
    @(negedge clk);
    we = 1; wbank = b; wrow = 5'(r); wslot = 3'(s); wdata = e;
    @(negedge clk);
    we = 0;
  endtask

  task automatic rd_check(bit b, int r);
    @(negedge clk);
    re = 1; rbank = b; rrow = 5'(r);
    @(negedge clk);
    re = 0;
    for (int s = 0; s < SLOTS; s++) begin
      chk(rdata[s].e == model[b][r][s], $sformatf("bank %0d row %0d slot %0d", b, r, s));
      chk((^rdata[s]) == 1'b0, "parity");
    end
  endtask

  function automatic farmap_entry_t rand_entry();
    farmap_entry_t e;
    e.valid  = 1;
    e.victim = 5'($urandom);
    e.donor  = e.victim + 5'd1 + 5'($urandom % 31);
    e.div    = div_sel_e'($urandom % 3);
    e.skip   = 1'($urandom);
    return e;
  endfunction

  initial begin
    farmap_entry_t e;
    for (int b = 0; b < 2; b++) for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) model[b][r][s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(bank_err == 2'b00, "reset status");
    for (int i = 0; i < 300; i++) begin
      automatic int b = $urandom % 2, r = $urandom % ROWS, s = $urandom % SLOTS;
      e = rand_entry();
      model[b][r][s] = e;
      wr(b[0], r, s, e);
    end
    for (int b = 0; b < 2; b++) for (int r = 0; r < ROWS; r++) rd_check(b[0], r);
    chk(bank_err == 2'b00, "no error after legal writes");
    // illegal: reserved division
    e = rand_entry(); e.div = DIV_RSVD; wr(1, 3, 0, e);
    @(negedge clk); chk(bank_err == 2'b10, "reserved div flags bank 1");
    rd_check(1, 3);   // illegal word not stored
    // clr bank 1
    @(negedge clk); clr = 1; cbank = 1; @(negedge clk); clr = 0;
    chk(bank_err == 2'b00, "clr clears error");
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < SLOTS; s++) model[1][r][s] = '0;
    for (int r = 0; r < ROWS; r++) rd_check(1, r);
    rd_check(0, 5);   // bank 0 untouched
    // illegal: victim == donor rewire
    e = rand_entry(); e.skip = 0; e.donor = e.victim; wr(0, 7, 2, e);
    @(negedge clk); chk(bank_err == 2'b01, "victim==donor flags bank 0");
    // skip with victim == donor is legal (no donor used)
    @(negedge clk); clr = 1; cbank = 1; @(negedge clk); clr = 0;
    e = rand_entry(); e.skip = 1; e.donor = e.victim; model[1][9][4] = e; wr(1, 9, 4, e);
    @(negedge clk); chk(bank_err == 2'b01, "skip with victim==donor legal");
    rd_check(1, 9);
    // parity injection
    e = rand_entry(); model[1][10][1] = e;
    @(negedge clk); inj_err = 1; wr(1, 10, 1, e); inj_err = 0;
    @(negedge clk); re = 1; rbank = 1; rrow = 10; @(negedge clk); re = 0;
    chk((^rdata[1]) == 1'b1, "injected parity error visible");
    chk(rdata[1].e == e, "injected word data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
