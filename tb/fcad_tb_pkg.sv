// fcad_tb_pkg: shared testbench functions.
//
// mem_word(unit, addr) defines the contents of the external memory of unit
// `unit`: every byte of the 64-bit word at word address `addr` is a small
// signed value in [-8, 7] taken from a hash of (unit, addr, byte). The DRAM
// model returns these words and the reference models read weights and
// untied biases from the same function, so no data files are needed.
// feat(frame, y, x, c) gives a test input feature in [-16, 15].
package fcad_tb_pkg;

  function automatic logic [31:0] hash32(logic [31:0] v);
    logic [31:0] h;
    h = v ^ 32'h9e37_79b9;
    h = h ^ (h >> 16);
    h = h * 32'h7feb_352d;
    h = h ^ (h >> 15);
    h = h * 32'h846c_a68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [63:0] mem_word(int unit, int addr);
    logic [63:0] w;
    for (int b = 0; b < 8; b++) begin
      logic [31:0] h;
      h = hash32(32'(unit * 1000003 + addr * 8 + b));
      w[b*8 +: 8] = 8'(int'(h[3:0]) - 8);
    end
    return w;
  endfunction

  function automatic logic signed [7:0] feat(int frame, int y, int x, int c);
    logic [31:0] h;
    h = hash32(32'(frame * 7919 + y * 131071 + x * 257 + c * 3 + 12345));
    return 8'(int'(h[4:0]) - 16);
  endfunction

endpackage
