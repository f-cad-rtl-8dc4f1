// tb_fcad_inbuf: self-checking test of the banked input buffer.
//
// IN_CH=4, CPF=2, H=10, W=5, K=3, HP=2 (ring of 6 rows in 2 banks). Rows are
// written in raster order into ring slot r mod 6 (rd_base 0); before each new row overwrites an old one, every
// read the window allows is made: for each kernel row and column offset and
// channel block, both engines read their rows in the same cycle. Data must
// arrive one cycle later and be zero outside the map (padding rows -1 and H,
// columns -1 and W).
module tb_fcad_inbuf;
  import fcad_tb_pkg::*;
  localparam int IN_CH = 4, CPF = 2, H = 10, W = 5, K = 3, HP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [15:0] wr_slot, wr_col, rd_cb, rd_base;
  logic [IN_CH*8-1:0] wr_pix;
  logic signed [17:0] rd_row0, rd_col;
  logic [HP-1:0][CPF*8-1:0] rd_data;
  int checks = 0, failures = 0;

  fcad_inbuf #(.IN_CH(IN_CH), .CPF(CPF), .H(H), .W(W), .K(K), .HP(HP)) dut (.*);

  task automatic write_row(int r);
    for (int x = 0; x < W; x++) begin
      @(negedge clk);
      wr_en = 1; wr_slot = 16'(r % 6); wr_col = 16'(x);
      for (int c = 0; c < IN_CH; c++) wr_pix[c*8 +: 8] = feat(0, r, x, c);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  // rows r0-1 .. r0+HP are in the window once rows up to r0+HP are written
  task automatic read_group(int r0);
    for (int ky = 0; ky < K; ky++)
      for (int x = -1; x <= W; x++)
        for (int cb = 0; cb < IN_CH / CPF; cb++) begin
          @(negedge clk);
          rd_en = 1; rd_row0 = 18'(r0 - 1 + ky); rd_col = 18'(x); rd_cb = 16'(cb);
          @(posedge clk);
          #1;
          rd_en = 0;
          for (int e = 0; e < HP; e++)
            for (int c = 0; c < CPF; c++) begin
              int y;
              logic [7:0] expv;
              y = r0 - 1 + ky + e;
              expv = (y < 0 || y >= H || x < 0 || x >= W) ? 8'd0 : feat(0, y, x, cb * CPF + c);
              checks++;
              if (rd_data[e][c*8 +: 8] !== expv) begin
                failures++;
                if (failures < 10) $display("FAIL r0=%0d ky=%0d x=%0d e=%0d c=%0d", r0, ky, x, e, c);
              end
            end
        end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_slot = 0; rd_base = 0; wr_col = 0; wr_pix = '0; rd_row0 = 0; rd_col = 0; rd_cb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    write_row(0); write_row(1); write_row(2);
    for (int g = 0; g < H / HP; g++) begin
      read_group(g * HP);
      for (int r = g * HP + 3; r < g * HP + 5 && r < H; r++) write_row(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
