// tb_fcad_postproc: self-checking test of bias, leaky ReLU and requantisation.
//
// Random accumulators (small and large, to reach both saturation limits) and
// random biases go through 4 lanes; the expected 8-bit results are computed
// here; the result must appear one cycle after in_valid.
module tb_fcad_postproc;
  localparam int N = 4, SHIFT = 6, LEAKY = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [N-1:0][31:0] acc;
  logic [N-1:0][15:0] bias;
  logic [N-1:0][7:0]  out_q;
  int checks = 0, failures = 0, n_sat = 0, n_neg = 0;

  fcad_postproc #(.N(N), .ACT(1), .SHIFT(SHIFT), .LEAKY_SHIFT(LEAKY)) dut (.*);

  function automatic int refq(int a, int b);
    int v;
    v = a + b;
    if (v < 0) v = v >>> LEAKY;
    v = v >>> SHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  initial begin
    in_valid = 0; acc = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int expv [N];
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) begin
        int a;
        a = (t % 3 == 0) ? int'($urandom_range(0, 40000)) - 20000 : int'($urandom_range(0, 4000)) - 2000;
        acc[i] = 32'(a);
        bias[i] = 16'($urandom);
        expv[i] = refq(a, int'($signed(bias[i])));
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL valid"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if ($signed(out_q[i]) !== expv[i]) begin
          failures++; $display("FAIL lane %0d got %0d exp %0d", i, $signed(out_q[i]), expv[i]);
        end
        if (expv[i] == 127 || expv[i] == -128) n_sat++;
        if (expv[i] < 0) n_neg++;
      end
    end
    checks++;
    if (n_sat == 0 || n_neg == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
