// tb_fcad_mem_reader: self-checking test of a unit's memory read port.
//
// NWB=5 weight beats and NBB=7 bias beats per frame, DEPTH=4, against the
// DRAM model with random request stalls and a 6-cycle latency. The weight
// port must deliver words 0..4 in order; the bias port must deliver words
// 5..11 repeatedly (three frames here), both consumed with random
// back-pressure. The number of requests in flight plus buffered beats must
// never exceed DEPTH.
module tb_fcad_mem_reader;
  import fcad_tb_pkg::*;
  localparam int NWB = 5, NBB = 7, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rqv, rqr, rsv, wv, wr, bv, br;
  logic [31:0] rqa;
  logic [63:0] rsd, wd, bd;
  int checks = 0, failures = 0, nw = 0, nb = 0;

  fcad_mem_reader #(.NWB(NWB), .NBB(NBB), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .mem_req_valid(rqv), .mem_req_ready(rqr), .mem_req_addr(rqa),
    .mem_rsp_valid(rsv), .mem_rsp_data(rsd),
    .w_valid(wv), .w_ready(wr), .w_data(wd), .b_valid(bv), .b_ready(br), .b_data(bd));

  fcad_dram_model #(.UNIT(9), .LAT(6), .STALL(1)) u_mem (
    .clk, .rst_n, .req_valid(rqv), .req_ready(rqr), .req_addr(rqa),
    .rsp_valid(rsv), .rsp_data(rsd));

  always_ff @(posedge clk) begin
    if (rst_n) begin
      wr <= ($urandom_range(0, 2) != 0);
      br <= ($urandom_range(0, 2) != 0);
      if (int'(dut.inflight) + int'(dut.fcount) > DEPTH) begin
        failures++; $display("FAIL credit overrun");
      end
      if (wv && wr) begin
        checks++;
        if (wd !== mem_word(9, nw)) begin failures++; $display("FAIL weight beat %0d", nw); end
        nw <= nw + 1;
      end
      if (bv && br) begin
        checks++;
        if (bd !== mem_word(9, NWB + nb % NBB)) begin failures++; $display("FAIL bias beat %0d", nb); end
        nb <= nb + 1;
      end
    end
  end

  initial begin
    wr = 0; br = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nb >= 3 * NBB);
    checks++;
    if (nw != NWB) begin failures++; $display("FAIL weight count %0d", nw); end
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
