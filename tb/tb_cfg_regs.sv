// tb_cfg_regs: AXI4-Lite transactions against the register file: CTRL
// write fields the tile command, start stays pending until acknowledged,
// inj_err is held until one configuration word is written, irq sets on
// done and clears on request, status and counter registers read back what
// their inputs carry, write and read responses follow the handshake
// (including a delayed BREADY/RREADY).
module tb_cfg_regs;
  import far_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic [1:0] bresp, rresp;
  tile_cmd_t cmd;
  logic start, start_ack = 0, inj_err, cfg_we = 0, busy = 0, done = 0, irq;
  logic [1:0] drain_busy = 0, bank_err = 0;
  logic [31:0] tiles = 0, cycles = 0, fallbacks = 0, row_faults = 0, stalls = 0, redirects = 0, bubbles = 0;
  int checks = 0, failures = 0;

  cfg_regs dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d, int bdelay);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1; bready = (bdelay == 0);
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    chk(bvalid, "bvalid after write");
    repeat (bdelay) begin @(negedge clk); chk(bvalid, "bvalid held"); end
    bready = 1;
    @(negedge clk);
    chk(!bvalid && bresp == 2'b00, "bresp");
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d, input int rdelay);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = (rdelay == 0);
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    chk(rvalid, "rvalid");
    d = rdata;
    repeat (rdelay) begin @(negedge clk); chk(rvalid && rdata == d, "rdata held"); end
    rready = 1;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] r;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(!start && !irq && !inj_err, "reset values");
    // CTRL with start: far_en, overlap, act 1, cfg 0, out 1
    wr(8'h00, 32'b10_1111, 0);
    chk(start && cmd.far_en && cmd.overlap_en && cmd.act_bank && !cmd.cfg_bank && cmd.out_bank, "ctrl fields");
    rd(8'h00, r, 0);
    chk(r[5:0] == 6'b10_1111, "ctrl readback with start pending");
    repeat (3) @(negedge clk);
    chk(start, "start pending");
    start_ack = 1; @(negedge clk); start_ack = 0;
    chk(!start, "start acknowledged");
    // inj_err
    wr(8'h00, 32'h100, 2);
    chk(inj_err, "inj_err set");
    repeat (3) @(negedge clk);
    chk(inj_err, "inj_err held");
    cfg_we = 1; @(negedge clk); cfg_we = 0;
    chk(!inj_err, "inj_err used once");
    // irq
    done = 1; @(negedge clk); done = 0;
    chk(irq, "irq set");
    rd(8'h04, r, 0);
    chk(r[5], "irq in status");
    wr(8'h00, 32'h200, 0);
    chk(!irq, "irq cleared");
    // status and counters
    busy = 1; drain_busy = 2'b10; bank_err = 2'b01;
    tiles = 32'd7; cycles = 32'd1036; fallbacks = 32'd2; row_faults = 32'd3; stalls = 32'd44; redirects = 32'd99; bubbles = 32'd31;
    rd(8'h04, r, 3); chk(r[4:0] == 5'b01_10_1, $sformatf("status %b", r[4:0]));
    rd(8'h08, r, 0); chk(r == 7, "tiles");
    rd(8'h0C, r, 1); chk(r == 1036, "cycles");
    rd(8'h10, r, 0); chk(r == 2, "fallbacks");
    rd(8'h14, r, 0); chk(r == 3, "row faults");
    rd(8'h18, r, 0); chk(r == 44, "stalls");
    rd(8'h1C, r, 0); chk(r == 99, "redirects");
    rd(8'h20, r, 0); chk(r == 31, "bubbles");
    rd(8'h3C, r, 0); chk(r == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
