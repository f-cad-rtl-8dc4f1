// fcad_top: elastic multi-pipeline accelerator for the three-branch
// codec-avatar decoder.
//
// The units (fcad_bau) form a two-dimensional array: one row (Y) per branch,
// one unit per layer stage along the row (X), each unit running its own layer
// and passing its output feature map to the right. Branch 1 (facial geometry)
// is a chain of BR1_N units fed by in1. Branch 2 (UV texture) is a chain of
// BR2_N units fed by in2; its first SHARED_N units are the front end that
// branch 3 (warp field) shares, so after layer reorganisation they belong to
// branch 2 and fcad_fanout copies the output of unit SHARED_N of branch 2 to
// both the rest of branch 2 and the single unit of branch 3. All branches run
// at the same time, each as its own pipeline, and all stages of a branch
// overlap on successive rows and successive frames.
//
// From the paper: the unit array, the one-stage-per-layer mapping, the shared
// front end assigned to branch 2 with its output distributed to branch 3, one
// external memory per unit. Our own: the per-stage layer table (fcad_pkg),
// the stream and memory protocols.
//
// Every link between units carries one pixel per cycle. A branch therefore
// delivers one image every max(Lat_i, pixels on its busiest link) cycles: for
// the default table that is the slowest unit for branches 1 and 3, and the
// 1024x1024 links (1,048,576 cycles) for branch 2.
//
// rst_n also disables the assertions inside the units and the fan-out, so
// lint sees it both as asynchronous reset and as a plain signal; intended.
//
// Ports: in1/in2 are the input feature maps of branches 1 and 2/3 (pixel per
// beat, raster order, channel c at bits [c*DW +: DW] of a PIX_W bus; unused
// high bits ignored); out1..out3 the branch outputs in the same format. Unit
// u has external memory port u: units 0..BR1_N-1 are branch 1, then BR2_N
// units of branch 2, then branch 3. weights_loaded, frame_done and evt are the
// per-unit status of fcad_bau; fan_split reports fcad_fanout's split event.
module fcad_top
  import fcad_pkg::*;
#(
  parameter layer_cfg_t [BR1_N-1:0] BR1 = BR1_CFG,
  parameter layer_cfg_t [BR2_N-1:0] BR2 = BR2_CFG,
  parameter layer_cfg_t [BR3_N-1:0] BR3 = BR3_CFG,
  parameter int         NU  = BR1_N + BR2_N + BR3_N
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in1_valid,
  output logic                       in1_ready,
  input  logic [PIX_W-1:0]           in1_data,
  input  logic                       in2_valid,
  output logic                       in2_ready,
  input  logic [PIX_W-1:0]           in2_data,
  output logic                       out1_valid,
  input  logic                       out1_ready,
  output logic [PIX_W-1:0]           out1_data,
  output logic                       out2_valid,
  input  logic                       out2_ready,
  output logic [PIX_W-1:0]           out2_data,
  output logic                       out3_valid,
  input  logic                       out3_ready,
  output logic [PIX_W-1:0]           out3_data,
  output logic [NU-1:0]              mem_req_valid,
  input  logic [NU-1:0]              mem_req_ready,
  output logic [NU-1:0][ADDR_W-1:0]  mem_req_addr,
  input  logic [NU-1:0]              mem_rsp_valid,
  input  logic [NU-1:0][MW-1:0]      mem_rsp_data,
  output logic [NU-1:0]              weights_loaded,
  output logic [NU-1:0]              frame_done,
  output logic [NU-1:0][2:0]         evt,
  output logic                       fan_split
);

  localparam int B2 = BR1_N;           // first unit of branch 2
  localparam int B3 = BR1_N + BR2_N;   // unit of branch 3
  localparam int FAN = B2 + SHARED_N - 1;

  logic [NU-1:0]            s_in_v, s_in_r, s_out_v, s_out_r;
  logic [NU-1:0][PIX_W-1:0] s_in_d, s_out_d;
  logic [1:0]               fan_v, fan_r;
  logic [PIX_W-1:0]         fan_d;
  logic                     fan_r_in;

  // ----------------------------------------------------------- the units
  for (genvar u = 0; u < NU; u++) begin : g_unit
    localparam layer_cfg_t C = (u < B2) ? BR1[(u < B2) ? u : 0] :
                               (u < B3) ? BR2[(u >= B2 && u < B3) ? u - B2 : 0] : BR3[0];

    fcad_bau #(
      .IN_CH(C.in_ch), .OUT_CH(C.out_ch), .H(C.h), .W(C.w), .K(C.k),
      .CPF(C.cpf), .KPF(C.kpf), .HP(C.hp), .UP(C.up), .ACT(C.act), .SHIFT(C.shift),
      .DW(DW), .WW(WW), .MW(MW), .BIAS_W(BIAS_W), .ACC_W(ACC_W), .ADDR_W(ADDR_W)
    ) u_bau (
      .clk, .rst_n,
      .in_valid(s_in_v[u]), .in_ready(s_in_r[u]), .in_data(s_in_d[u][C.in_ch*DW-1:0]),
      .out_valid(s_out_v[u]), .out_ready(s_out_r[u]), .out_data(s_out_d[u][C.out_ch*DW-1:0]),
      .mem_req_valid(mem_req_valid[u]), .mem_req_ready(mem_req_ready[u]),
      .mem_req_addr(mem_req_addr[u]), .mem_rsp_valid(mem_rsp_valid[u]),
      .mem_rsp_data(mem_rsp_data[u]),
      .weights_loaded(weights_loaded[u]), .frame_done(frame_done[u]), .evt(evt[u])
    );

    if (C.out_ch < MAX_CH) begin : g_pad
      assign s_out_d[u][PIX_W-1:C.out_ch*DW] = '0;
    end
  end

  // ---------------------------------------------------------- the links
  always_comb begin
    s_in_v = '0;
    s_in_d = '0;
    s_out_r = '0;
    // branch 1
    s_in_v[0] = in1_valid;
    s_in_d[0] = in1_data;
    for (int u = 1; u < B2; u++) begin
      s_in_v[u]     = s_out_v[u-1];
      s_in_d[u]     = s_out_d[u-1];
      s_out_r[u-1]  = s_in_r[u];
    end
    // branch 2 (front end shared with branch 3)
    s_in_v[B2] = in2_valid;
    s_in_d[B2] = in2_data;
    for (int u = B2 + 1; u < B3; u++) begin
      if (u == FAN + 1) begin
        s_in_v[u] = fan_v[0];
        s_in_d[u] = fan_d;
      end else begin
        s_in_v[u]    = s_out_v[u-1];
        s_in_d[u]    = s_out_d[u-1];
        s_out_r[u-1] = s_in_r[u];
      end
    end
    // branch 3
    s_in_v[B3] = fan_v[1];
    s_in_d[B3] = fan_d;
    s_out_r[FAN]  = fan_r_in;
    s_out_r[B2-1] = out1_ready;
    s_out_r[B3-1] = out2_ready;
    s_out_r[B3]   = out3_ready;
  end

  assign fan_r = {s_in_r[B3], s_in_r[FAN+1]};

  fcad_fanout #(.WIDTH(PIX_W)) u_fan (
    .clk, .rst_n,
    .in_valid(s_out_v[FAN]), .in_ready(fan_r_in), .in_data(s_out_d[FAN]),
    .out_valid(fan_v), .out_ready(fan_r), .out_data(fan_d),
    .split(fan_split)
  );

  assign in1_ready  = s_in_r[0];
  assign in2_ready  = s_in_r[B2];
  assign out1_valid = s_out_v[B2-1];
  assign out1_data  = s_out_d[B2-1];
  assign out2_valid = s_out_v[B3-1];
  assign out2_data  = s_out_d[B3-1];
  assign out3_valid = s_out_v[B3];
  assign out3_data  = s_out_d[B3];

endmodule
