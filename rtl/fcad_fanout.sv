// fcad_fanout: hands the result of a shared stage to two branches.
//
// Branches 2 and 3 of the decoder share their front end; the last shared
// stage belongs to branch 2 and its results "are distributed to two different
// branches". This block copies each beat of a valid/ready stream to two
// valid/ready outputs. A beat leaves the input only when both outputs have
// taken it; an output that has already taken the current beat is masked
// until the other has too, so neither branch sees a beat twice or misses one,
// and either may stall without blocking the other's acceptance of the current
// beat. The handshake is this design's own.
//
// rst_n also disables the a_hold assertion, so lint sees it both as
// asynchronous reset and as a plain signal; that is intended.
module fcad_fanout #(
  parameter int WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic [1:0]       out_valid,
  input  logic [1:0]       out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             split      // one output took the beat, the other waits
);

  logic [1:0] taken;

  assign out_valid = {2{in_valid}} & ~taken;
  assign in_ready  = &(taken | out_ready);
  assign out_data  = in_data;
  assign split     = in_valid && !in_ready && |(out_valid & out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) taken <= '0;
    else if (in_valid && in_ready) taken <= '0;
    else taken <= taken | (out_valid & out_ready);
  end

  // A beat offered to an output stays on offer until that output takes it.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> in_valid && $stable(in_data));

endmodule
