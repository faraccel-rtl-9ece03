// tb_adder_tree: streams random 32-element FP16 vectors, one per cycle with
// random gaps, into the adder tree and checks each sum against a pairwise
// reference reduction and its arrival exactly 5 cycles after the input.
module tb_adder_tree;
  import fp16_ref_pkg::*;
  localparam int N = 32, LAT = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N-1:0][15:0] in_vec;
  logic [15:0] sum;
  int checks = 0, failures = 0, cyc = 0;
  logic [15:0] exp_q[$];
  int          t_q[$];

  adder_tree #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [15:0] ref_tree(logic [N-1:0][15:0] v);
    logic [15:0] t[N];
    for (int i = 0; i < N; i++) t[i] = v[i];
    for (int w = N / 2; w >= 1; w /= 2)
      for (int i = 0; i < w; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic logic [15:0] e = exp_q.pop_front();
        automatic int t = t_q.pop_front();
        if (sum !== e) begin failures++; $display("sum %h expected %h", sum, e); end
        if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < N; i++) in_vec[i] = rand_h(8, 22);
      if (k % 7 == 0) in_vec[3] = 16'h0000;
      if (in_valid) begin exp_q.push_back(ref_tree(in_vec)); t_q.push_back(cyc + 1); end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
