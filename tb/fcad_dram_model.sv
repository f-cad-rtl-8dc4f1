// fcad_dram_model: behavioural model of one unit's external memory
// (testbench only, not synthesizable as a memory: contents come from
// fcad_tb_pkg::mem_word).
//
// Accepts a word read request when req_ready is high and returns the word
// LAT cycles later on rsp_valid/rsp_data, in order. With STALL=1 req_ready is
// low on about one cycle in four (pseudo-random), to exercise back-pressure.
module fcad_dram_model #(
  parameter int UNIT  = 0,
  parameter int LAT   = 6,
  parameter int STALL = 1,
  parameter int MW    = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [31:0]   req_addr,
  output logic          rsp_valid,
  output logic [MW-1:0] rsp_data
);
  import fcad_tb_pkg::*;

  logic [LAT-1:0]       v_pipe;
  logic [LAT-1:0][31:0] a_pipe;
  logic [31:0]          lfsr;

  assign req_ready = (STALL == 0) || (lfsr[1:0] != 2'b00);
  assign rsp_valid = v_pipe[LAT-1];
  assign rsp_data  = MW'(mem_word(UNIT, int'(a_pipe[LAT-1])));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0;
      a_pipe <= '0;
      lfsr   <= 32'h1234_5678 + UNIT;
    end else begin
      lfsr   <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      v_pipe <= {v_pipe[LAT-2:0], req_valid && req_ready};
      a_pipe <= {a_pipe[LAT-2:0], req_addr};
    end
  end
endmodule
