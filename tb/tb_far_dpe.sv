// tb_far_dpe: end-to-end check of the FaR-aware dot-product engine.
// Random activations, baseline weights, shadow slots and select vectors are
// streamed back to back (one vector per cycle) in dots of 1 to 3 K-steps.
// Each result is compared with a reference: effective weight per lane,
// FP16 products, pairwise tree sum, then FP16 accumulation over the K-steps.
// The latency from the last K-step's input to dot_valid must be 12 cycles,
// and during the unbroken stream one result per single-step dot is produced
// every cycle.
module tb_far_dpe;
  import far_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LAT = 12;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, dot_valid;
  fp16_t [LANES-1:0] a_vec, w_main;
  fp16_t [SLOTS-1:0] w_shadow;
  lane_sel_t [LANES-1:0] sel;
  fp16_t dot_val;
  int checks = 0, failures = 0, cyc = 0;
  fp16_t exp_q[$];
  int    t_q[$];
  int    n_shadow = 0, n_skip = 0, n_multi = 0;

  far_dpe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic fp16_t ref_dot();
    fp16_t t[LANES];
    for (int l = 0; l < LANES; l++) begin
      fp16_t w = (sel[l].mode == SEL_MAIN) ? w_main[l] :
                 (sel[l].mode == SEL_SHADOW) ? w_shadow[sel[l].slot] : 16'h0000;
      t[l] = ref_mul(a_vec[l], w);
    end
    for (int w = LANES / 2; w >= 1; w /= 2)
      for (int i = 0; i < w; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  always @(posedge clk) begin
    if (dot_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        automatic fp16_t e = exp_q.pop_front();
        automatic int t = t_q.pop_front();
        if (dot_val !== e) begin failures++; if (failures < 10) $display("dot %h expected %h", dot_val, e); end
        if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t acc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int d = 0; d < 1500; d++) begin
      automatic int ks = (d < 300) ? 1 : 1 + int'($urandom % 3);
      if (ks > 1) n_multi++;
      for (int k = 0; k < ks; k++) begin
        fp16_t p;
        @(negedge clk);
        in_valid = 1; first = (k == 0); last = (k == ks - 1);
        for (int l = 0; l < LANES; l++) begin
          automatic int r = $urandom % 8;
          a_vec[l]  = rand_h(10, 18);
          w_main[l] = rand_h(10, 18);
          begin automatic int sl = int'($urandom % 5); sel[l].slot = sl[2:0]; end
          sel[l].mode = (r == 0) ? SEL_SHADOW : (r == 1) ? SEL_SKIP : SEL_MAIN;
          if (r == 0) n_shadow++;
          if (r == 1) n_skip++;
        end
        for (int s = 0; s < SLOTS; s++) w_shadow[s] = rand_h(10, 18);
        p = ref_dot();
        acc = (k == 0) ? p : ref_add(acc, p);
        if (last) begin exp_q.push_back(acc); t_q.push_back(cyc + 1); end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) failures++;
    if (n_shadow == 0 || n_skip == 0 || n_multi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
