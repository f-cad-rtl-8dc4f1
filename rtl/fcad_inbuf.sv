// fcad_inbuf: banked input buffer (InBuf 1..n) of a basic architecture unit.
//
// The input feature map arrives from the left one pixel (all IN_CH channels)
// per write, in raster order. Only a sliding window of NR rows is kept, the
// "fraction" of the feature map the paper's InBuf holds. Rows go into a ring
// of NR slots that runs on across frames: row r of the frame being computed
// sits in slot (rd_base + r) mod NR, where rd_base is the slot of the frame's
// row 0, so the next frame's first rows can arrive while the current frame's
// last rows are still read. Slot s lives in bank s mod HP, so the HP engines of
// the unit, which always read HP consecutive rows (one output row each, same
// kernel row, same column), hit HP different banks: bank b is InBuf b of the
// paper's Fig. 5(b), with one read port each and no conflicts. A rotation
// network after the banks hands each engine its row.
//
// NR = HP * (2 + ceil((K-1)/HP)) keeps the K-1+HP rows that one group of HP
// output rows needs plus HP rows being filled for the next group. The bank
// mapping, ring size and rotation are this design's own; the paper gives the
// buffer's purpose and the per-engine DW*cpf read bus.
//
// Write: wr_en writes pixel wr_pix at column wr_col of ring slot wr_slot.
// Read: rd_en with rd_base, rd_row0 (frame row seen by engine 0, engine e
// reads rd_row0+e), rd_col and the input-channel block rd_cb. One cycle later
// rd_data[e] holds CPF features, or zeros where the row or column lies outside
// the feature map (zero padding). The caller keeps every row it reads inside
// the window (fcad_bau does so).
module fcad_inbuf #(
  parameter int IN_CH = 4,
  parameter int CPF   = 4,
  parameter int H     = 8,
  parameter int W     = 8,
  parameter int K     = 3,
  parameter int HP    = 1,
  parameter int DW    = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // write port
  input  logic                        wr_en,
  input  logic [15:0]                 wr_slot,
  input  logic [15:0]                 wr_col,
  input  logic [IN_CH*DW-1:0]         wr_pix,
  // read port
  input  logic                        rd_en,
  input  logic [15:0]                 rd_base,
  input  logic signed [17:0]          rd_row0,
  input  logic signed [17:0]          rd_col,
  input  logic [15:0]                 rd_cb,
  output logic [HP-1:0][CPF*DW-1:0]   rd_data
);

  localparam int CB  = IN_CH / CPF;
  localparam int NR  = HP * (2 + (K - 1 + HP - 1) / HP);
  localparam int RPB = NR / HP;

  // ----------------------------------------------------------------- read
  int slot0;      // ring slot of row rd_row0 (may lie outside the map)
  int row0_mod;   // slot0 mod HP
  always_comb begin
    slot0    = ((int'(rd_base) + int'(rd_row0)) % NR + NR) % NR;
    row0_mod = slot0 % HP;
  end

  logic [HP-1:0][CPF*DW-1:0] bank_q;
  logic [HP-1:0]             valid_q;   // per engine: row and column inside the map
  int                        rot_q;

  for (genvar b = 0; b < HP; b++) begin : g_bank
    logic [CPF*DW-1:0] mem [RPB][W][CB];
    int e_sel, row_sel, slot_sel;

    always_comb begin
      e_sel    = ((b - row0_mod) % HP + HP) % HP;
      row_sel  = int'(rd_row0) + e_sel;
      slot_sel = (slot0 + e_sel) % NR;
    end

    always_ff @(posedge clk) begin
      if (wr_en && (int'(wr_slot) % HP) == b) begin
        for (int c = 0; c < CB; c++) begin
          mem[int'(wr_slot) / HP][int'(wr_col)][c] <= wr_pix[c*CPF*DW +: CPF*DW];
        end
      end
      if (rd_en && rd_col >= 0 && int'(rd_col) < W && row_sel >= 0 && row_sel < H) begin
        bank_q[b] <= mem[slot_sel / HP][int'(rd_col)][int'(rd_cb)];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rot_q   <= 0;
    end else if (rd_en) begin
      rot_q <= row0_mod;
      for (int e = 0; e < HP; e++) begin
        valid_q[e] <= (rd_col >= 0) && (int'(rd_col) < W) &&
                      (int'(rd_row0) + e >= 0) && (int'(rd_row0) + e < H);
      end
    end
  end

  always_comb begin
    for (int e = 0; e < HP; e++) begin
      rd_data[e] = valid_q[e] ? bank_q[(rot_q + e) % HP] : '0;
    end
  end

endmodule
