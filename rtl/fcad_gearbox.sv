// fcad_gearbox: assembles EW-bit entries from MW-bit memory beats.
//
// A helper of the weight buffer and of the untied-bias path. An entry takes
// BEATS = ceil(EW/MW) consecutive beats; the first beat fills the lowest MW
// bits. Bits above EW in the last beat are padding and dropped. This memory
// layout (one entry starts on a beat boundary) is this design's choice.
// in_ready is low while a complete entry waits for out_ready.
//
// When EW is not a multiple of MW the padding bits of the last beat are
// stored but never read; lint reports them as unused, which is intended.
module fcad_gearbox #(
  parameter int MW = 64,
  parameter int EW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [MW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [EW-1:0] out_data
);

  localparam int BEATS = (EW + MW - 1) / MW;

  logic [BEATS*MW-1:0] buf_q;
  int                  nbeat;

  assign out_valid = (nbeat == BEATS);
  assign in_ready  = !out_valid || out_ready;
  assign out_data  = buf_q[EW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbeat <= 0;
      buf_q <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (out_valid) begin
          // entry leaves in this cycle, the new beat starts the next one
          buf_q[MW-1:0] <= in_data;
          nbeat         <= 1;
        end else begin
          buf_q[nbeat*MW +: MW] <= in_data;
          nbeat                 <= nbeat + 1;
        end
      end else if (out_valid && out_ready) begin
        nbeat <= 0;
      end
    end
  end

endmodule
