// tb_fcad_fanout: self-checking test of the branch fan-out.
//
// A counting stream is offered with random gaps and both outputs are taken
// with independent random back-pressure. Each output must see every value
// exactly once and in order; the split case (one output took a beat, the
// other not yet) must occur.
module tb_fcad_fanout;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, split;
  logic [15:0] in_data, out_data;
  logic [1:0] out_valid, out_ready;
  int checks = 0, failures = 0, nsplit = 0;
  int sent = 0;
  int got [2] = '{0, 0};

  fcad_fanout #(.WIDTH(16)) dut (.*);

  assign in_data = 16'(sent);

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (split) nsplit <= nsplit + 1;
      if (in_valid && in_ready) begin
        sent <= sent + 1;
        in_valid <= ($urandom_range(0, 3) != 0);
      end else if (!in_valid) in_valid <= ($urandom_range(0, 3) != 0);
      out_ready <= 2'($urandom);
      for (int i = 0; i < 2; i++)
        if (out_valid[i] && out_ready[i]) begin
          checks++;
          if (out_data !== 16'(got[i])) begin failures++; $display("FAIL out%0d", i); end
          got[i]++;
        end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent >= 500);
    repeat (20) @(posedge clk);
    checks++;
    if (nsplit == 0) begin failures++; $display("FAIL no split"); end
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
