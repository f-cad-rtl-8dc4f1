// tb_fcad_engine: self-checking test of a compute engine (KPF=3 PEs, CPF=2).
//
// Random windows are fed; every PE must return the window sum of the shared
// features with its own weight slice, one cycle after the last sample.
module tb_fcad_engine;
  localparam int CPF = 2, KPF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, out_valid;
  logic [CPF*8-1:0] feat;
  logic [KPF*CPF*8-1:0] wgt;
  logic [KPF-1:0][31:0] out_acc;
  int checks = 0, failures = 0;

  fcad_engine #(.CPF(CPF), .KPF(KPF)) dut (.*);

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; feat = '0; wgt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < 100; win++) begin
      int len;
      int expv [KPF];
      len = $urandom_range(1, 6);
      for (int k = 0; k < KPF; k++) expv[k] = 0;
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        in_valid = 1; in_first = (s == 0); in_last = (s == len - 1);
        for (int c = 0; c < CPF; c++) feat[c*8 +: 8] = 8'($urandom);
        for (int i = 0; i < KPF * CPF; i++) wgt[i*8 +: 8] = 8'($urandom);
        for (int k = 0; k < KPF; k++)
          for (int c = 0; c < CPF; c++)
            expv[k] += int'($signed(feat[c*8 +: 8])) * int'($signed(wgt[(k*CPF+c)*8 +: 8]));
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== (s == len - 1)) begin failures++; $display("FAIL valid timing"); end
        if (s == len - 1)
          for (int k = 0; k < KPF; k++) begin
            checks++;
            if ($signed(out_acc[k]) !== expv[k]) begin failures++; $display("FAIL pe%0d", k); end
          end
      end
      @(negedge clk);
      in_valid = 0;
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
