// fcad_outbuf: output buffer with fused 2x up-sampling.
//
// A unit computes HP output rows at once (one per engine), KPF channels of
// one pixel column per engine and window, so its results arrive column by
// column and channel block by channel block, not in raster order. This buffer
// collects one group of HP rows in one of two slots (ping-pong), then sends it
// to the next stage as whole pixels (all OUT_CH channels per beat) in raster
// order. With UP=1 the up-sampling layer fused into the stage is applied on
// the way out: every pixel is sent twice along the row and every row twice,
// i.e. 2x nearest-neighbour up-sampling.
//
// The 2x factor follows from the layer sizes (each [CAU] doubles height and
// width, Table I); nearest-neighbour interpolation and the ping-pong buffer
// are this design's choices.
//
// Write side: wr_en writes wr_data[e] (KPF channels of block wr_kb, column
// wr_col, row e of the group) into slot wr_slot; wr_done marks that slot full.
// slot_full shows which slots hold data not yet sent. Read side: out_valid /
// out_ready stream; out_data is combinational from the buffer.
module fcad_outbuf #(
  parameter int OUT_CH = 256,
  parameter int KPF    = 1,
  parameter int HP     = 1,
  parameter int W      = 8,
  parameter int UP     = 1,
  parameter int DW     = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic                        wr_slot,
  input  logic [15:0]                 wr_col,
  input  logic [15:0]                 wr_kb,
  input  logic [HP-1:0][KPF*DW-1:0]   wr_data,
  input  logic                        wr_done,
  output logic [1:0]                  slot_full,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [OUT_CH*DW-1:0]        out_data
);

  localparam int KB  = OUT_CH / KPF;
  localparam int UPF = (UP != 0) ? 2 : 1;

  logic [KPF*DW-1:0] mem [2][HP][W][KB];

  logic rd_slot;
  int   e_q, ry_q, x_q, rx_q;
  logic last_beat;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int e = 0; e < HP; e++) mem[wr_slot][e][int'(wr_col)][int'(wr_kb)] <= wr_data[e];
    end
  end

  assign out_valid = slot_full[rd_slot];
  always_comb begin
    for (int kb = 0; kb < KB; kb++) out_data[kb*KPF*DW +: KPF*DW] = mem[rd_slot][e_q][x_q][kb];
  end
  assign last_beat = (e_q == HP - 1) && (ry_q == UPF - 1) && (x_q == W - 1) && (rx_q == UPF - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_full <= '0;
      rd_slot   <= 1'b0;
      e_q       <= 0;
      ry_q      <= 0;
      x_q       <= 0;
      rx_q      <= 0;
    end else begin
      if (out_valid && out_ready) begin
        if (rx_q < UPF - 1) rx_q <= rx_q + 1;
        else begin
          rx_q <= 0;
          if (x_q < W - 1) x_q <= x_q + 1;
          else begin
            x_q <= 0;
            if (ry_q < UPF - 1) ry_q <= ry_q + 1;
            else begin
              ry_q <= 0;
              e_q  <= (e_q < HP - 1) ? e_q + 1 : 0;
            end
          end
        end
      end
      for (int s = 0; s < 2; s++) begin
        if (wr_done && wr_slot == s[0]) slot_full[s] <= 1'b1;
        else if (out_valid && out_ready && last_beat && rd_slot == s[0]) slot_full[s] <= 1'b0;
      end
      if (out_valid && out_ready && last_beat) rd_slot <= !rd_slot;
    end
  end

endmodule
