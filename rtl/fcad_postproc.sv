// fcad_postproc: untied bias, fused activation and requantisation.
//
// The decoder's customised convolution gives every output pixel of every
// output channel its own bias ("untied bias"); the bias values stream in from
// external memory in computation order. Layer fusion folds the activation
// into the convolution stage. For each of N accumulator lanes this block
// computes  v = acc + bias,  v = (ACT && v < 0) ? v >>> LEAKY_SHIFT : v,
// q = saturate_DW(v >>> shift)  and registers q.
//
// The paper names the activation but not its kind: the leaky ReLU with a
// slope of 2^-LEAKY_SHIFT, the floor rounding of the arithmetic shifts and the
// saturation are this design's own choices. Timing: out_valid and out_q
// follow in_valid by one cycle.
module fcad_postproc #(
  parameter int N           = 1,
  parameter int DW          = 8,
  parameter int ACC_W       = 32,
  parameter int BIAS_W      = 16,
  parameter int ACT         = 1,
  parameter int SHIFT       = 8,
  parameter int LEAKY_SHIFT = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [N-1:0][ACC_W-1:0]    acc,
  input  logic [N-1:0][BIAS_W-1:0]   bias,
  output logic                       out_valid,
  output logic [N-1:0][DW-1:0]       out_q
);

  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 <<< (DW - 1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 <<< (DW - 1));

  logic [N-1:0][DW-1:0] q;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [ACC_W-1:0] v;
      v = $signed(acc[i]) + ACC_W'($signed(bias[i]));
      if (ACT != 0 && v < 0) v = v >>> LEAKY_SHIFT;
      v = v >>> SHIFT;
      if (v > QMAX)      q[i] = QMAX[DW-1:0];
      else if (v < QMIN) q[i] = QMIN[DW-1:0];
      else               q[i] = v[DW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_q     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_q <= q;
    end
  end

endmodule
