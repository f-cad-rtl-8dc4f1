// fcad_pe: process element (PE) of a compute engine.
//
// A PE multiplies CPF input features with CPF weights in one cycle, adds the
// CPF products in an adder tree and accumulates the sum over the cycles of
// one convolution window (all kernel positions and all input-channel
// blocks). This is the paper's PE: "each PE performs cpf multiply-
// accumulations in parallel". Features and weights are signed two's
// complement; the accumulator width is our own choice.
//
// Interface and timing: in_valid qualifies feat/wgt. in_first clears the
// accumulator (the sample is the first of a window), in_last marks the last
// sample of a window. One cycle after a sample with in_last, out_valid is high
// for one cycle and out_acc holds the complete window sum.
module fcad_pe #(
  parameter int CPF   = 16,
  parameter int DW    = 8,
  parameter int WW    = 8,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [CPF*DW-1:0]       feat,
  input  logic [CPF*WW-1:0]       wgt,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_acc
);

  logic signed [ACC_W-1:0] dot;
  logic signed [ACC_W-1:0] acc_q;

  always_comb begin
    dot = '0;
    for (int c = 0; c < CPF; c++) begin
      dot += ACC_W'($signed(feat[c*DW +: DW]) * $signed(wgt[c*WW +: WW]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) acc_q <= (in_first ? '0 : acc_q) + dot;
    end
  end

  assign out_acc = acc_q;

endmodule
