// tb_fcad_outbuf: self-checking test of the output buffer and up-sampling.
//
// OUT_CH=4, KPF=2, HP=2, W=3. Four groups are written block by block in the
// order a unit produces them (column, then channel block; both engine rows at
// once) into alternating slots, each group after its slot is free. With UP=1
// each group must leave as 4 rows of 6 pixels, every source pixel repeated
// twice along the row and every row twice; a UP=0 instance must leave the 2x3
// pixels unchanged. Reading uses random back-pressure.
module tb_fcad_outbuf;
  localparam int OUT_CH = 4, KPF = 2, HP = 2, W = 3, KB = OUT_CH / KPF, NGRP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic logic [7:0] val(int g, int e, int x, int c);
    return 8'(g * 64 + e * 16 + x * 4 + c);
  endfunction

  logic wr_en, wr_slot, wr_done;
  logic [15:0] wr_col, wr_kb;
  logic [HP-1:0][KPF*8-1:0] wr_data;
  logic [1:0] full_u, full_n;
  logic ov_u, ov_n, or_u, or_n;
  logic [OUT_CH*8-1:0] od_u, od_n;

  fcad_outbuf #(.OUT_CH(OUT_CH), .KPF(KPF), .HP(HP), .W(W), .UP(1)) dut_u (
    .clk, .rst_n, .wr_en, .wr_slot, .wr_col, .wr_kb, .wr_data, .wr_done,
    .slot_full(full_u), .out_valid(ov_u), .out_ready(or_u), .out_data(od_u));
  fcad_outbuf #(.OUT_CH(OUT_CH), .KPF(KPF), .HP(HP), .W(W), .UP(0)) dut_n (
    .clk, .rst_n, .wr_en, .wr_slot, .wr_col, .wr_kb, .wr_data, .wr_done,
    .slot_full(full_n), .out_valid(ov_n), .out_ready(or_n), .out_data(od_n));

  int nu = 0, nn = 0;   // beats received
  always_ff @(posedge clk) begin
    if (rst_n) begin
      or_u <= ($urandom_range(0, 2) != 0);
      or_n <= ($urandom_range(0, 2) != 0);
      if (ov_u && or_u) begin
        int g, r, x;
        g = nu / (4 * HP * W); r = (nu / (2 * W)) % (2 * HP); x = nu % (2 * W);
        for (int c = 0; c < OUT_CH; c++) begin
          checks++;
          if (od_u[c*8 +: 8] !== val(g, r / 2, x / 2, c)) begin failures++; $display("FAIL up beat %0d", nu); end
        end
        nu <= nu + 1;
      end
      if (ov_n && or_n) begin
        int g, r, x;
        g = nn / (HP * W); r = (nn / W) % HP; x = nn % W;
        for (int c = 0; c < OUT_CH; c++) begin
          checks++;
          if (od_n[c*8 +: 8] !== val(g, r, x, c)) begin failures++; $display("FAIL beat %0d", nn); end
        end
        nn <= nn + 1;
      end
    end
  end

  initial begin
    wr_en = 0; wr_slot = 0; wr_done = 0; wr_col = 0; wr_kb = 0; wr_data = '0; or_u = 0; or_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NGRP; g++) begin
      @(negedge clk);
      while (full_u[g % 2] || full_n[g % 2]) @(negedge clk);
      for (int x = 0; x < W; x++)
        for (int kb = 0; kb < KB; kb++) begin
          wr_en = 1; wr_slot = 1'(g % 2); wr_col = 16'(x); wr_kb = 16'(kb);
          wr_done = (x == W - 1) && (kb == KB - 1);
          for (int e = 0; e < HP; e++)
            for (int k = 0; k < KPF; k++) wr_data[e][k*8 +: 8] = val(g, e, x, kb * KPF + k);
          @(negedge clk);
        end
      wr_en = 0; wr_done = 0;
    end
    wait (nu == NGRP * 4 * HP * W && nn == NGRP * HP * W);
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
