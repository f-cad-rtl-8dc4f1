// tb_fcad_top_full: one complete decoding pass of the accelerator at its
// default (full) configuration.
//
// fcad_top is used with its default layer table: branch 1 turns a [4,8,8]
// input into a [3,256,256] output, branches 2 and 3 turn a [7,8,8] input
// into [3,1024,1024] and [2,256,256]. With the paper's batch sizes {1,2,2},
// one image goes into branch 1 and two into branches 2/3; the outputs are
// always ready. Checked: the output pixel counts of all three
// branches, that every unit completes its frame, and that every unit spends
// exactly OUT_CH*IN_CH*H*W*K*K/(cpf*kpf*hp) compute cycles on it. The
// slowest stage of each branch sets the frame rate (FPS = batch /
// max(Lat_i)). Here a stage is either a unit's compute (Lat_i cycles) or a
// stream link, which moves one pixel per cycle: the interval between the two
// branch-2 output images must lie within 10% above the larger of the two.
// For the default branch 2 the 1024x1024 links (1,048,576 pixels) are slower
// than the slowest unit (589,824 cycles). Rates are printed for 200 MHz.
module tb_fcad_top_full;
  import fcad_pkg::*;
  import fcad_tb_pkg::*;

  localparam int NU = BR1_N + BR2_N + BR3_N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in1_valid, in1_ready, in2_valid, in2_ready;
  logic [PIX_W-1:0] in1_data, in2_data, out1_data, out2_data, out3_data;
  logic out1_valid, out2_valid, out3_valid;
  logic [NU-1:0] mreq_v, mreq_r, mrsp_v, loaded, fdone;
  logic [NU-1:0][31:0] mreq_a;
  logic [NU-1:0][63:0] mrsp_d;
  logic [NU-1:0][2:0] evt;
  logic fan_split;

  fcad_top dut (
    .clk, .rst_n,
    .in1_valid, .in1_ready, .in1_data, .in2_valid, .in2_ready, .in2_data,
    .out1_valid, .out1_ready(1'b1), .out1_data, .out2_valid, .out2_ready(1'b1), .out2_data,
    .out3_valid, .out3_ready(1'b1), .out3_data,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a),
    .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
    .weights_loaded(loaded), .frame_done(fdone), .evt(evt), .fan_split(fan_split)
  );

  for (genvar u = 0; u < NU; u++) begin : g_mem
    fcad_dram_model #(.UNIT(u), .LAT(8), .STALL(0)) u_mem (
      .clk, .rst_n, .req_valid(mreq_v[u]), .req_ready(mreq_r[u]), .req_addr(mreq_a[u]),
      .rsp_valid(mrsp_v[u]), .rsp_data(mrsp_d[u]));
  end

  function automatic layer_cfg_t cfg_of(int u);
    if (u < BR1_N) return BR1_CFG[u];
    if (u < BR1_N + BR2_N) return BR2_CFG[u - BR1_N];
    return BR3_CFG[0];
  endfunction

  function automatic longint lat(layer_cfg_t c);
    return longint'(c.out_ch) * c.in_ch * c.h * c.w * c.k * c.k / (c.cpf * c.kpf * c.hp);
  endfunction

  localparam int N1 = BR1_CFG[0].h * BR1_CFG[0].w, N2 = BR2_CFG[0].h * BR2_CFG[0].w;
  localparam int NO1 = 256 * 256, NO2 = 1024 * 1024, NO3 = 256 * 256;

  int checks = 0, failures = 0;
  int i1 = 0, i2 = 0, o1 = 0, o2 = 0, o3 = 0;
  longint cyc = 0, t_img1 = 0, t_img2 = 0;
  longint iss [NU] = '{default: 0};
  int frames_u [NU] = '{default: 0};

  always_comb begin
    in1_data = '0;
    in2_data = '0;
    for (int c = 0; c < 4; c++) in1_data[c*8 +: 8] = feat(0, i1 / 8, i1 % 8, c);
    for (int c = 0; c < 7; c++) in2_data[c*8 +: 8] = feat(1 + i2 / N2, (i2 % N2) / 8, i2 % 8, c);
  end
  assign in1_valid = rst_n && (i1 < N1);
  assign in2_valid = rst_n && (i2 < 2 * N2);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in1_valid && in1_ready) i1 <= i1 + 1;
      if (in2_valid && in2_ready) i2 <= i2 + 1;
      if (out1_valid) o1 <= o1 + 1;
      if (out2_valid) begin
        o2 <= o2 + 1;
        if (o2 == NO2 - 1) t_img1 <= cyc;
        if (o2 == 2 * NO2 - 1) t_img2 <= cyc;
      end
      if (out3_valid) o3 <= o3 + 1;
      for (int u = 0; u < NU; u++) if (fdone[u]) frames_u[u]++;
      if ((cyc % 100000) == 0) $display("cycle %0d: out beats %0d %0d %0d", cyc, o1, o2, o3);
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_cnt
    always_ff @(posedge clk) if (rst_n && dut.g_unit[u].u_bau.iss_go) iss[u] <= iss[u] + 1;
  end

  initial begin
    longint mx1, mx2, mx3, lk2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (o1 == NO1 && o2 == 2 * NO2 && o3 == 2 * NO3);
    repeat (100) @(posedge clk);
    $display("one pass took %0d cycles", cyc);
    checks++;
    if (o1 != NO1 || o2 != 2 * NO2 || o3 != 2 * NO3) begin failures++; $display("FAIL counts"); end
    mx1 = 0; mx2 = 0; mx3 = 0; lk2 = 0;
    for (int u = 0; u < NU; u++) begin
      checks += 2;
      if (frames_u[u] != (u < BR1_N ? 1 : 2)) begin failures++; $display("FAIL unit %0d frames %0d", u, frames_u[u]); end
      if (iss[u] != (u < BR1_N ? 1 : 2) * lat(cfg_of(u))) begin
        failures++; $display("FAIL unit %0d compute cycles %0d exp %0d", u, iss[u], lat(cfg_of(u)));
      end
      if (u < BR1_N) begin if (lat(cfg_of(u)) > mx1) mx1 = lat(cfg_of(u)); end
      else if (u < BR1_N + BR2_N) begin
        if (lat(cfg_of(u)) > mx2) mx2 = lat(cfg_of(u));
        if (longint'(cfg_of(u).h) * cfg_of(u).w * (cfg_of(u).up != 0 ? 4 : 1) > lk2)
          lk2 = longint'(cfg_of(u).h) * cfg_of(u).w * (cfg_of(u).up != 0 ? 4 : 1);
      end
      else if (lat(cfg_of(u)) > mx3) mx3 = lat(cfg_of(u));
    end
    $display("bottleneck cycles per image: br1 %0d br2 %0d br3 %0d", mx1, mx2, mx3);
    $display("images/s at 200 MHz: br1 %0d br2 %0d br3 %0d", 200000000 / mx1, 200000000 / mx2, 200000000 / mx3);
    if (lk2 > mx2) mx2 = lk2;
    $display("branch-2 image interval %0d cycles, slowest stage %0d", t_img2 - t_img1, mx2);
    checks++;
    if (t_img2 - t_img1 < mx2 || t_img2 - t_img1 > mx2 + mx2 / 10) begin
      failures++; $display("FAIL branch-2 interval %0d vs slowest stage %0d", t_img2 - t_img1, mx2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog o1=%0d o2=%0d o3=%0d", o1, o2, o3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
