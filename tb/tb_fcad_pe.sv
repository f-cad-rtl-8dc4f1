// tb_fcad_pe: self-checking test of the process element.
//
// Random windows of 1..9 samples of CPF=3 feature/weight pairs are fed, with
// random idle cycles in between. The expected window sum is computed here
// from the same operands; out_valid must rise exactly one cycle after the
// window's last sample.
module tb_fcad_pe;
  localparam int CPF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, out_valid;
  logic [CPF*8-1:0] feat, wgt;
  logic signed [31:0] out_acc;
  int checks = 0, failures = 0;

  fcad_pe #(.CPF(CPF)) dut (.*);

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; feat = '0; wgt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < 200; win++) begin
      int len, expv;
      len = $urandom_range(1, 9);
      expv = 0;
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        in_valid = 1; in_first = (s == 0); in_last = (s == len - 1);
        for (int c = 0; c < CPF; c++) begin
          feat[c*8 +: 8] = 8'($urandom);
          wgt[c*8 +: 8]  = 8'($urandom);
          expv += int'($signed(feat[c*8 +: 8])) * int'($signed(wgt[c*8 +: 8]));
        end
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== (s == len - 1)) begin failures++; $display("FAIL out_valid timing"); end
        if (s == len - 1) begin
          checks++;
          if (out_acc !== expv) begin failures++; $display("FAIL acc %0d exp %0d", out_acc, expv); end
        end
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
    end
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
