// fcad_weightbuf: weight buffer (WeightBuf) of a basic architecture unit.
//
// The layer's weights are fetched from external memory over the MW-bit bus
// and stored "following the computation order", as the paper puts it: entry
// a = ((kb*K + ky)*K + kx)*CB + cb holds, for output-channel block kb, kernel
// position (ky,kx) and input-channel block cb, the KPF*CPF weights that the
// PEs use in one cycle. Within an entry, PE k's CPF weights sit at bits
// [k*CPF*WW +: CPF*WW] and input channel c of the block at [c*WW +: WW].
// Each entry takes ceil(KPF*CPF*WW / MW) beats (fcad_gearbox).
//
// Our own choice is that the whole layer's weights stay resident: loading
// happens once after reset and `loaded` then stays high; the weights are then
// re-used for every frame. The read port (WW*kpf*cpf wide, Fig. 5(b)) is
// registered: rd_data is valid one cycle after rd_en.
module fcad_weightbuf #(
  parameter int IN_CH  = 4,
  parameter int OUT_CH = 256,
  parameter int K      = 3,
  parameter int CPF    = 4,
  parameter int KPF    = 1,
  parameter int WW     = 8,
  parameter int MW     = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [MW-1:0]           in_data,
  output logic                    loaded,
  input  logic                    rd_en,
  input  logic [31:0]             rd_addr,
  output logic [KPF*CPF*WW-1:0]   rd_data
);

  localparam int EW    = KPF * CPF * WW;
  localparam int DEPTH = (OUT_CH / KPF) * K * K * (IN_CH / CPF);

  logic [EW-1:0] mem [DEPTH];
  logic          ent_valid;
  logic [EW-1:0] ent_data;
  int            wr_ptr;

  fcad_gearbox #(.MW(MW), .EW(EW)) u_gear (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid && !loaded),
    .in_ready (in_ready),
    .in_data  (in_data),
    .out_valid(ent_valid),
    .out_ready(1'b1),
    .out_data (ent_data)
  );

  always_ff @(posedge clk) begin
    if (ent_valid && !loaded) mem[wr_ptr] <= ent_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= 0;
      loaded <= 1'b0;
    end else if (ent_valid && !loaded) begin
      wr_ptr <= wr_ptr + 1;
      if (wr_ptr == DEPTH - 1) loaded <= 1'b1;
    end
  end

endmodule
