// tb_far_pkg: checks the encodings that every other block and the host
// software rely on, since a change to them silently breaks the stream
// format.
//
// It packs FaRMap entries, lane selects, stored words and tile commands
// through the package's types and compares every field's bit position with
// the documented layout, written out here by hand:
//   entry  [13] valid [12:8] victim [7:3] donor [2:1] div [0] skip
//   word   [14] parity above the entry; shadow word [16] parity above FP16
//   select [4:3] mode [2:0] slot; command {far_en, overlap_en, act_bank,
//   cfg_bank, out_bank} from bit 4 down to bit 0
// It also checks the sizes (32 lanes, rows and columns, 5 slots), the code
// points of the select, division and packet enums and the quiet NaN. Pure
// combinational checks; a watchdog ends the run if it never finishes.
module tb_far_pkg;
  import far_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    farmap_entry_t e;
    farmap_word_t  fw;
    shadow_word_t  sw;
    lane_sel_t     s;
    tile_cmd_t     c;
    logic [13:0]   raw;

    chk(LANES == 32 && ROWS == 32 && COLS == 32, "tile sizes");
    chk(SLOTS == 5, "five slots per row");
    chk(IDX_W == 5 && SLOT_W == 3, "index widths");
    chk(ENTRY_W == 14, "entry width");
    chk($bits(farmap_word_t) == 15 && $bits(shadow_word_t) == 17, "stored word widths");
    chk(LANE_SEL_W == 5, "lane select width");
    chk(FP16_QNAN == 16'h7E00, "quiet NaN");
    chk(SEL_MAIN == 2'd0 && SEL_SHADOW == 2'd1 && SEL_SKIP == 2'd2, "select codes");
    chk(DIV_1 == 2'd0 && DIV_2 == 2'd1 && DIV_3 == 2'd2 && DIV_RSVD == 2'd3, "division codes");
    chk(PKT_WEIGHT == 4'h1 && PKT_ACT == 4'h2 && PKT_FARMAP == 4'h3 && PKT_SHADOW == 4'h4,
        "packet types");

    for (int i = 0; i < 200; i++) begin
      automatic int unsigned r = $urandom;
      automatic logic [4:0] vi = r[4:0], dn = r[9:5];
      automatic logic [1:0] dv = r[11:10];
      automatic logic       va = r[12], sk = r[13], p = r[14];
      e.valid = va; e.victim = vi; e.donor = dn; e.div = div_sel_e'(dv); e.skip = sk;
      raw = {va, vi, dn, dv, sk};
      chk(14'(e) == raw, $sformatf("entry packing %h vs %h", 14'(e), raw));
      e = farmap_entry_t'(raw);
      chk(e.victim == vi && e.donor == dn && e.div == div_sel_e'(dv) && e.skip == sk && e.valid == va,
          "entry unpacking");
      fw.par = p; fw.e = e;
      chk(15'(fw) == {p, raw}, "FaRMap word packing");
      sw.par = p; sw.w = r[31:16];
      chk(17'(sw) == {p, r[31:16]}, "shadow word packing");
    end

    s.mode = SEL_SKIP; s.slot = 3'd4;
    chk(5'(s) == 5'b10_100, "lane select packing");
    c = '{far_en: 1'b1, overlap_en: 1'b0, act_bank: 1'b1, cfg_bank: 1'b0, out_bank: 1'b1};
    chk(5'(c) == 5'b10101, "tile command packing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
