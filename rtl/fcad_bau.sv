// fcad_bau: basic architecture unit, one pipeline stage of the accelerator.
//
// A unit runs one fused layer: a KxK stride-1 zero-padded convolution with an
// untied bias, optionally followed by a leaky-ReLU activation and a 2x
// up-sampling ([CAU] or C in the decoder's notation). It offers the paper's
// three-dimensional parallelism: HP compute engines work on HP output rows at
// once (the H-partition), each engine holds KPF PEs for KPF output channels
// (kernel parallelism), and each PE does CPF MACs per cycle over CPF input
// channels (channel parallelism). One layer therefore takes
//   OUT_CH*IN_CH*H*W*K*K / (CPF*KPF*HP)
// compute cycles per frame, the paper's latency model Lat_i times f.
//
// Blocks, as in Fig. 5(b): the external memory port (fcad_mem_reader) fills
// the WeightBuf (fcad_weightbuf) once and then streams untied biases into a
// bias FIFO; the feature map arrives from the left into the banked InBuf
// (fcad_inbuf); HP engines (fcad_engine) share the weight bus; the results go
// through fcad_postproc (bias, activation, requantisation) into the output
// buffer (fcad_outbuf), which sends whole pixels, up-sampled if UP=1, to the
// next unit.
//
// Schedule (our own): for each group of HP output rows, for each column x,
// for each output-channel block kb, one window of K*K*IN_CH/CPF cycles
// (ky, kx, then cb fastest). A group starts when its input rows (up to row
// row0+HP-1+(K-1)/2) have arrived, the weights are loaded and its output slot
// is free, so a stage starts on the first rows of a frame while the previous
// stage is still producing later rows: a row-level fine-grained pipeline. The
// input stalls (in_ready low) when the InBuf window is full. Rows of the next
// frame are taken as soon as the window has room, also while the current
// frame's last groups are computed, so frames overlap in every stage.
//
// The bias FIFO's fill count is not needed and left open (lint notes the
// empty pin). rst_n also disables the a_rows_ready assertion, so lint sees it
// used both as asynchronous reset and as a plain signal; that is intended.
//
// The parameter defaults are the first layer of branch 1 (4 -> 256 channels on
// an 8x8 map, cpf 4); fcad_top sets every unit from its layer table.
//
// Interfaces: in_* and out_* are valid/ready pixel streams in raster order
// (one pixel, all channels, channel c at bits [c*DW +: DW]); mem_* is the
// external memory port of fcad_mem_reader. evt reports, per cycle, an input
// stall [0], a wait for an untied bias [1] and a wait for a free output slot
// [2]; frame_done pulses when the last window of a frame is issued.
module fcad_bau #(
  parameter int IN_CH       = 4,
  parameter int OUT_CH      = 256,
  parameter int H           = 8,
  parameter int W           = 8,
  parameter int K           = 3,
  parameter int CPF         = 4,
  parameter int KPF         = 1,
  parameter int HP          = 1,
  parameter int UP          = 1,
  parameter int ACT         = 1,
  parameter int SHIFT       = 8,
  parameter int LEAKY_SHIFT = 2,
  parameter int DW          = 8,
  parameter int WW          = 8,
  parameter int MW          = 64,
  parameter int BIAS_W      = 16,
  parameter int ACC_W       = 32,
  parameter int ADDR_W      = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [IN_CH*DW-1:0]    in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [OUT_CH*DW-1:0]   out_data,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic [ADDR_W-1:0]      mem_req_addr,
  input  logic                   mem_rsp_valid,
  input  logic [MW-1:0]          mem_rsp_data,
  output logic                   weights_loaded,
  output logic                   frame_done,
  output logic [2:0]             evt
);

  localparam int CB     = IN_CH / CPF;
  localparam int KB     = OUT_CH / KPF;
  localparam int P      = (K - 1) / 2;
  localparam int NG     = H / HP;
  localparam int NR     = HP * (2 + (K - 1 + HP - 1) / HP);
  localparam int NWE    = KB * K * K * CB;
  localparam int WBEATS = (KPF * CPF * WW + MW - 1) / MW;
  localparam int BEW    = HP * KPF * BIAS_W;
  localparam int BBEATS = (BEW + MW - 1) / MW;
  localparam int NBB    = NG * W * KB * BBEATS;

  // ------------------------------------------------------------ memory side
  logic          mw_valid, mw_ready, mb_valid, mb_ready;
  logic [MW-1:0] mw_data, mb_data;
  logic          be_valid, be_ready;      // bias entry out of the gearbox
  logic [BEW-1:0] be_data;
  logic          bias_valid, bias_pop;
  logic [BEW-1:0] bias_data;

  fcad_mem_reader #(.MW(MW), .ADDR_W(ADDR_W), .NWB(NWE * WBEATS), .NBB(NBB), .DEPTH(16)) u_mem (
    .clk, .rst_n,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .w_valid(mw_valid), .w_ready(mw_ready), .w_data(mw_data),
    .b_valid(mb_valid), .b_ready(mb_ready), .b_data(mb_data)
  );

  logic                 wb_rd_en;
  logic [31:0]          wb_rd_addr;
  logic [KPF*CPF*WW-1:0] wb_rd_data;

  fcad_weightbuf #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .K(K), .CPF(CPF), .KPF(KPF), .WW(WW), .MW(MW)) u_wbuf (
    .clk, .rst_n,
    .in_valid(mw_valid), .in_ready(mw_ready), .in_data(mw_data),
    .loaded(weights_loaded),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  fcad_gearbox #(.MW(MW), .EW(BEW)) u_bgear (
    .clk, .rst_n,
    .in_valid(mb_valid), .in_ready(mb_ready), .in_data(mb_data),
    .out_valid(be_valid), .out_ready(be_ready), .out_data(be_data)
  );

  fcad_fifo #(.WIDTH(BEW), .DEPTH(4)) u_bfifo (
    .clk, .rst_n,
    .in_valid(be_valid), .in_ready(be_ready), .in_data(be_data),
    .out_valid(bias_valid), .out_ready(bias_pop), .out_data(bias_data),
    .count()
  );

  // ------------------------------------------------------------- input side
  int   in_row, in_col;     // in_row counts from row 0 of the frame being computed
  int   wr_slot, base_slot;  // InBuf ring slot being written / of row 0
  int   g_q, x_q, kb_q, ky_q, kx_q, cb_q;   // issue counters
  logic active;                             // a group is being issued
  logic in_fire;
  int   row0;
  int   rows_needed;
  logic iss_go;
  logic [HP-1:0][CPF*DW-1:0] ib_rd_data;

  assign row0        = g_q * HP;
  assign rows_needed = (row0 + HP + P < H) ? row0 + HP + P : H;
  assign in_ready    = (in_row < row0 - P + NR);
  assign in_fire     = in_valid && in_ready;

  fcad_inbuf #(.IN_CH(IN_CH), .CPF(CPF), .H(H), .W(W), .K(K), .HP(HP), .DW(DW)) u_inbuf (
    .clk, .rst_n,
    .wr_en(in_fire), .wr_slot(16'(wr_slot)), .wr_col(16'(in_col)), .wr_pix(in_data),
    .rd_en(iss_go), .rd_base(16'(base_slot)), .rd_row0(18'(row0 - P + ky_q)), .rd_col(18'(x_q + kx_q - P)), .rd_cb(16'(cb_q)),
    .rd_data(ib_rd_data)
  );

  // ------------------------------------------------------------ issue logic
  logic [1:0] slot_full, slot_pend;
  logic       slot;           // output slot of the group being issued (alternates)
  logic       win_last, grp_last, frm_last;
  logic       can_start;

  assign win_last  = (cb_q == CB - 1) && (kx_q == K - 1) && (ky_q == K - 1);
  assign grp_last  = win_last && (kb_q == KB - 1) && (x_q == W - 1);
  assign frm_last  = grp_last && (g_q == NG - 1);
  assign can_start = !active && weights_loaded && (in_row >= rows_needed) &&
                     !slot_full[slot] && !slot_pend[slot];
  assign iss_go    = active && (!win_last || bias_valid);
  assign bias_pop  = iss_go && win_last;
  assign wb_rd_en  = iss_go;
  assign wb_rd_addr = 32'(((kb_q * K + ky_q) * K + kx_q) * CB + cb_q);
  assign frame_done = iss_go && frm_last;
  assign evt = {!active && weights_loaded && (in_row >= rows_needed) && !can_start,
                active && win_last && !bias_valid,
                in_valid && !in_ready};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row <= 0; in_col <= 0; wr_slot <= 0; base_slot <= 0;
      g_q <= 0; x_q <= 0; kb_q <= 0; ky_q <= 0; kx_q <= 0; cb_q <= 0;
      active <= 1'b0;
      slot   <= 1'b0;
    end else begin
      if (in_fire) begin
        if (in_col == W - 1) begin
          in_col  <= 0;
          wr_slot <= (wr_slot == NR - 1) ? 0 : wr_slot + 1;
        end else begin
          in_col <= in_col + 1;
        end
      end
      // row count relative to the computed frame; it drops by H at frame end
      in_row <= in_row + ((in_fire && in_col == W - 1) ? 1 : 0) - ((iss_go && frm_last) ? H : 0);
      if (can_start) active <= 1'b1;
      if (iss_go) begin
        if (cb_q < CB - 1) cb_q <= cb_q + 1;
        else begin
          cb_q <= 0;
          if (kx_q < K - 1) kx_q <= kx_q + 1;
          else begin
            kx_q <= 0;
            if (ky_q < K - 1) ky_q <= ky_q + 1;
            else begin
              ky_q <= 0;
              if (kb_q < KB - 1) kb_q <= kb_q + 1;
              else begin
                kb_q <= 0;
                if (x_q < W - 1) x_q <= x_q + 1;
                else begin
                  x_q    <= 0;
                  active <= 1'b0;
                  slot   <= !slot;
                  if (g_q < NG - 1) g_q <= g_q + 1;
                  else begin
                    // frame complete: the next frame's row 0 becomes the base
                    g_q       <= 0;
                    base_slot <= (base_slot + H) % NR;
                  end
                end
              end
            end
          end
        end
      end
    end
  end

  // ------------------------------------------------------- compute pipeline
  typedef struct packed {
    logic         valid;
    logic         first;
    logic         last;
    logic         grp_last;
    logic         slot;
    logic [15:0]  x;
    logic [15:0]  kb;
    logic [BEW-1:0] bias;
  } tag_t;

  tag_t t1, t2, t3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0;
    end else begin
      t1.valid    <= iss_go;
      t1.first    <= (cb_q == 0) && (kx_q == 0) && (ky_q == 0);
      t1.last     <= win_last;
      t1.grp_last <= grp_last;
      t1.slot     <= slot;
      t1.x        <= 16'(x_q);
      t1.kb       <= 16'(kb_q);
      t1.bias     <= bias_data;
      t2          <= t1;
      t3          <= t2;
    end
  end

  logic [HP-1:0]                       eng_valid;
  logic [HP-1:0][KPF-1:0][ACC_W-1:0]   eng_acc;

  for (genvar e = 0; e < HP; e++) begin : g_eng
    fcad_engine #(.CPF(CPF), .KPF(KPF), .DW(DW), .WW(WW), .ACC_W(ACC_W)) u_eng (
      .clk, .rst_n,
      .in_valid(t1.valid), .in_first(t1.first), .in_last(t1.last),
      .feat(ib_rd_data[e]), .wgt(wb_rd_data),
      .out_valid(eng_valid[e]), .out_acc(eng_acc[e])
    );
  end

  logic                          pp_valid;
  logic [HP*KPF-1:0][DW-1:0]     pp_q;

  fcad_postproc #(.N(HP * KPF), .DW(DW), .ACC_W(ACC_W), .BIAS_W(BIAS_W), .ACT(ACT),
                  .SHIFT(SHIFT), .LEAKY_SHIFT(LEAKY_SHIFT)) u_pp (
    .clk, .rst_n,
    .in_valid(eng_valid[0] && t2.last), .acc(eng_acc), .bias(t2.bias),
    .out_valid(pp_valid), .out_q(pp_q)
  );

  fcad_outbuf #(.OUT_CH(OUT_CH), .KPF(KPF), .HP(HP), .W(W), .UP(UP), .DW(DW)) u_obuf (
    .clk, .rst_n,
    .wr_en(pp_valid), .wr_slot(t3.slot), .wr_col(t3.x), .wr_kb(t3.kb),
    .wr_data(pp_q), .wr_done(pp_valid && t3.grp_last),
    .slot_full(slot_full),
    .out_valid, .out_ready, .out_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slot_pend <= '0;
    else begin
      for (int s = 0; s < 2; s++) begin
        if (can_start && slot == s[0]) slot_pend[s] <= 1'b1;
        else if (pp_valid && t3.grp_last && t3.slot == s[0]) slot_pend[s] <= 1'b0;
      end
    end
  end

  // A group never starts before the rows it reads are in the InBuf window.
  a_rows_ready : assert property (@(posedge clk) disable iff (!rst_n)
    can_start |-> in_row >= rows_needed);

endmodule
