// fcad_engine: compute engine of a basic architecture unit.
//
// An engine holds KPF process elements (fcad_pe). All PEs receive the same
// CPF input features from the engine's input buffer (the DW*cpf bus of the
// paper's Fig. 5(b)); PE k receives the k-th CPF-weight slice of the
// WW*kpf*cpf weight bus, so the engine produces KPF output channels of one
// output pixel at a time. This follows the paper: "each engine contains kpf
// process elements". The weight bus is shared by all engines of a unit.
//
// Timing: as fcad_pe; out_valid rises one cycle after the sample with
// in_last, and out_acc[k] is the window sum of output channel k of the block.
module fcad_engine #(
  parameter int CPF   = 16,
  parameter int KPF   = 16,
  parameter int DW    = 8,
  parameter int WW    = 8,
  parameter int ACC_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic                        in_last,
  input  logic [CPF*DW-1:0]           feat,
  input  logic [KPF*CPF*WW-1:0]       wgt,
  output logic                        out_valid,
  output logic [KPF-1:0][ACC_W-1:0]   out_acc
);

  logic [KPF-1:0] pe_valid;

  for (genvar k = 0; k < KPF; k++) begin : g_pe
    fcad_pe #(.CPF(CPF), .DW(DW), .WW(WW), .ACC_W(ACC_W)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_first (in_first),
      .in_last  (in_last),
      .feat     (feat),
      .wgt      (wgt[k*CPF*WW +: CPF*WW]),
      .out_valid(pe_valid[k]),
      .out_acc  (out_acc[k])
    );
  end

  assign out_valid = pe_valid[0];

endmodule
