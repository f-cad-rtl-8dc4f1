// tb_fcad_weightbuf: self-checking test of the weight buffer.
//
// IN_CH=4, OUT_CH=6, K=3, CPF=2, KPF=3: 48-bit entries, one 64-bit beat each,
// 54 entries. Beats from fcad_tb_pkg::mem_word are offered with random gaps;
// `loaded` must rise after the last entry and not before, then every entry is
// read back (one-cycle read latency) and compared with the low 48 bits of its
// beat. A second configuration (CPF=4, KPF=4: 128-bit entries over two beats)
// checks the multi-beat gearbox.
module tb_fcad_weightbuf;
  import fcad_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // configuration A: one beat per entry
  localparam int DA = 2 * 3 * 3 * 2;
  logic va, ra, la, rea;
  logic [63:0] da;
  logic [31:0] aa;
  logic [47:0] qa;
  fcad_weightbuf #(.IN_CH(4), .OUT_CH(6), .K(3), .CPF(2), .KPF(3)) dut_a (
    .clk, .rst_n, .in_valid(va), .in_ready(ra), .in_data(da), .loaded(la),
    .rd_en(rea), .rd_addr(aa), .rd_data(qa));

  // configuration B: two beats per entry
  localparam int DB = 1 * 1 * 1 * 2;
  logic vb, rb, lb, reb;
  logic [63:0] db;
  logic [31:0] ab;
  logic [127:0] qb;
  fcad_weightbuf #(.IN_CH(8), .OUT_CH(4), .K(1), .CPF(4), .KPF(4)) dut_b (
    .clk, .rst_n, .in_valid(vb), .in_ready(rb), .in_data(db), .loaded(lb),
    .rd_en(reb), .rd_addr(ab), .rd_data(qb));

  initial begin
    va = 0; vb = 0; rea = 0; reb = 0; aa = 0; ab = 0; da = '0; db = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DA; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) begin va = 0; @(negedge clk); end
      va = 1; da = mem_word(1, i);
      @(posedge clk);
      #1;
      checks++;
      if (!ra || la !== 1'b0 && i < DA - 1) begin failures++; $display("FAIL load %0d", i); end
    end
    @(negedge clk); va = 0;
    @(negedge clk);
    checks++;
    if (!la) begin failures++; $display("FAIL loaded A"); end
    for (int i = 0; i < DA; i++) begin
      @(negedge clk); rea = 1; aa = 32'(i);
      @(posedge clk); #1;
      checks++;
      if (qa !== mem_word(1, i)[47:0]) begin failures++; $display("FAIL A entry %0d", i); end
    end
    rea = 0;
    for (int i = 0; i < 2 * DB; i++) begin
      @(negedge clk); vb = 1; db = mem_word(2, i);
      @(posedge clk);
    end
    @(negedge clk); vb = 0;
    @(negedge clk);
    checks++;
    if (!lb) begin failures++; $display("FAIL loaded B"); end
    for (int i = 0; i < DB; i++) begin
      @(negedge clk); reb = 1; ab = 32'(i);
      @(posedge clk); #1;
      checks++;
      if (qb !== {mem_word(2, 2 * i + 1), mem_word(2, 2 * i)}) begin failures++; $display("FAIL B entry %0d", i); end
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
