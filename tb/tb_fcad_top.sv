// tb_fcad_top: end-to-end test of the three-branch accelerator at reduced
// layer sizes.
//
// The branch structure is the full one (6 + 8 + 1 units, shared front end of
// 5 units with fan-out to branch 3) with the paper's input and output
// channel counts (4 and 7 in; 3, 3 and 2 out) but small feature maps and 4
// channels inside. Every unit has its own DRAM model with random stalls.
// FRAMES frames are fed to both inputs; the outputs are taken with random
// back-pressure. Checked: every branch delivers exactly FRAMES full output
// frames of the right size; branch 1 output values are compared with a
// reference computed here layer by layer; every unit loads its weights and
// completes every frame; the compute cycles of every unit equal
// OUT_CH*IN_CH*H*W*K*K/(cpf*kpf*hp) per frame. Mechanisms counted (each must
// happen): input stall, untied-bias wait (branch 3 uses a 1x1 kernel, whose
// one-cycle windows outrun the bias stream), output-slot wait and fan-out
// split. Units with hp = 2 and 4 exercise the H-partition; branch 1 values
// check it.
module tb_fcad_top;
  import fcad_pkg::*;
  import fcad_tb_pkg::*;

  localparam int FRAMES = 2;
  //                                     in out  h   w  k cpf kpf hp up act sh
  localparam layer_cfg_t [BR1_N-1:0] T1 = '{
    layer_cfg_t'{4, 3, 32, 32, 3, 2, 3, 2, 0, 0, 4},
    layer_cfg_t'{4, 4, 16, 16, 3, 4, 2, 2, 1, 1, 4},
    layer_cfg_t'{4, 4,  8,  8, 3, 2, 2, 2, 1, 1, 4},
    layer_cfg_t'{4, 4,  4,  4, 3, 4, 4, 1, 1, 1, 4},
    layer_cfg_t'{4, 4,  2,  2, 3, 2, 2, 1, 1, 1, 4},
    layer_cfg_t'{4, 4,  1,  1, 3, 4, 1, 1, 1, 1, 4}
  };
  localparam layer_cfg_t [BR2_N-1:0] T2 = '{
    layer_cfg_t'{4, 3, 128, 128, 3, 4, 3, 4, 0, 0, 4},
    layer_cfg_t'{4, 4,  64,  64, 3, 4, 4, 2, 1, 1, 4},
    layer_cfg_t'{4, 4,  32,  32, 3, 4, 2, 2, 1, 1, 4},
    layer_cfg_t'{4, 4,  16,  16, 3, 2, 2, 2, 1, 1, 4},
    layer_cfg_t'{4, 4,   8,   8, 3, 4, 4, 1, 1, 1, 4},
    layer_cfg_t'{4, 4,   4,   4, 3, 2, 2, 1, 1, 1, 4},
    layer_cfg_t'{4, 4,   2,   2, 3, 4, 2, 1, 1, 1, 4},
    layer_cfg_t'{7, 4,   1,   1, 3, 7, 2, 1, 1, 1, 4}
  };
  localparam layer_cfg_t [BR3_N-1:0] T3 = '{
    layer_cfg_t'{4, 2, 32, 32, 1, 4, 2, 4, 0, 0, 4}
  };
  localparam int NU = BR1_N + BR2_N + BR3_N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in1_valid, in1_ready, in2_valid, in2_ready;
  logic [PIX_W-1:0] in1_data, in2_data, out1_data, out2_data, out3_data;
  logic out1_valid, out1_ready, out2_valid, out2_ready, out3_valid, out3_ready;
  logic [NU-1:0] mreq_v, mreq_r, mrsp_v, loaded, fdone;
  logic [NU-1:0][31:0] mreq_a;
  logic [NU-1:0][63:0] mrsp_d;
  logic [NU-1:0][2:0] evt;
  logic fan_split;

  fcad_top #(.BR1(T1), .BR2(T2), .BR3(T3)) dut (
    .clk, .rst_n,
    .in1_valid, .in1_ready, .in1_data, .in2_valid, .in2_ready, .in2_data,
    .out1_valid, .out1_ready, .out1_data, .out2_valid, .out2_ready, .out2_data,
    .out3_valid, .out3_ready, .out3_data,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a),
    .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
    .weights_loaded(loaded), .frame_done(fdone), .evt(evt), .fan_split(fan_split)
  );

  for (genvar u = 0; u < NU; u++) begin : g_mem
    fcad_dram_model #(.UNIT(u), .LAT(8), .STALL(1)) u_mem (
      .clk, .rst_n, .req_valid(mreq_v[u]), .req_ready(mreq_r[u]), .req_addr(mreq_a[u]),
      .rsp_valid(mrsp_v[u]), .rsp_data(mrsp_d[u]));
  end

  // ------------------------------------------- branch-1 reference model
  function automatic layer_cfg_t cfg1(int s);
    return T1[s];
  endfunction

  function automatic int wgt(int unit, layer_cfg_t c, int oc, int ic, int ky, int kx);
    int kb, k, cb, ci, a, off, beat, wbeats, cbn;
    logic [63:0] wd;
    cbn = c.in_ch / c.cpf;
    wbeats = (c.kpf * c.cpf * 8 + 63) / 64;
    kb = oc / c.kpf; k = oc % c.kpf; cb = ic / c.cpf; ci = ic % c.cpf;
    a = ((kb * c.k + ky) * c.k + kx) * cbn + cb;
    off = (k * c.cpf + ci) * 8;
    beat = a * wbeats + off / 64;
    wd = mem_word(unit, beat);
    return int'($signed(wd[off % 64 +: 8]));
  endfunction

  function automatic int bias(int unit, layer_cfg_t c, int y, int x, int oc);
    int g, e, kb, k, n, off, beat, nwb, bbeats, kbn;
    logic [63:0] wd;
    kbn = c.out_ch / c.kpf;
    nwb = kbn * c.k * c.k * (c.in_ch / c.cpf) * ((c.kpf * c.cpf * 8 + 63) / 64);
    bbeats = (c.hp * c.kpf * 16 + 63) / 64;
    g = y / c.hp; e = y % c.hp; kb = oc / c.kpf; k = oc % c.kpf;
    n = (g * c.w + x) * kbn + kb;
    off = (e * c.kpf + k) * 16;
    beat = nwb + n * bbeats + off / 64;
    wd = mem_word(unit, beat);
    return int'($signed(wd[off % 64 +: 16]));
  endfunction

  // feature maps of branch 1, [stage][y][x][c]; stage 0 is the input
  localparam int MAXS = 64;
  int fm [BR1_N+1][MAXS][MAXS][4];

  task automatic ref_branch1(int f);
    for (int y = 0; y < T1[0].h; y++)
      for (int x = 0; x < T1[0].w; x++)
        for (int c = 0; c < T1[0].in_ch; c++) fm[0][y][x][c] = int'(feat(f, y, x, c));
    for (int s = 0; s < BR1_N; s++) begin
      layer_cfg_t c;
      int p;
      c = cfg1(s);
      p = (c.k - 1) / 2;
      for (int y = 0; y < c.h; y++)
        for (int x = 0; x < c.w; x++)
          for (int oc = 0; oc < c.out_ch; oc++) begin
            int v;
            v = 0;
            for (int ic = 0; ic < c.in_ch; ic++)
              for (int ky = 0; ky < c.k; ky++)
                for (int kx = 0; kx < c.k; kx++) begin
                  int yy, xx;
                  yy = y + ky - p; xx = x + kx - p;
                  if (yy >= 0 && yy < c.h && xx >= 0 && xx < c.w)
                    v += fm[s][yy][xx][ic] * wgt(s, c, oc, ic, ky, kx);
                end
            v += bias(s, c, y, x, oc);
            if (c.act != 0 && v < 0) v = v >>> 2;
            v = v >>> c.shift;
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            if (c.up != 0) begin
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++) fm[s+1][2*y+dy][2*x+dx][oc] = v;
            end else fm[s+1][y][x][oc] = v;
          end
    end
  endtask

  // ------------------------------------------------------------ stimulus
  int checks = 0, failures = 0;
  int i1 = 0, i2 = 0;                 // input beats sent
  int o1 = 0, o2 = 0, o3 = 0;         // output beats received
  int ref_frame = -1;
  int n_stall_in = 0, n_bias_wait = 0, n_slot_wait = 0, n_split = 0;
  int iss [NU] = '{default: 0};
  int frames_u [NU] = '{default: 0};
  localparam int N1 = T1[0].h * T1[0].w, N2 = T2[0].h * T2[0].w;
  localparam int NO1 = 32 * 32, NO2 = 128 * 128, NO3 = 32 * 32;

  function automatic int lat(layer_cfg_t c);
    return c.out_ch * c.in_ch * c.h * c.w * c.k * c.k / (c.cpf * c.kpf * c.hp);
  endfunction

  always_comb begin
    in1_data = '0;
    in2_data = '0;
    for (int c = 0; c < 4; c++) in1_data[c*8 +: 8] = feat(i1 / N1, (i1 % N1) / T1[0].w, i1 % T1[0].w, c);
    for (int c = 0; c < 7; c++) in2_data[c*8 +: 8] = feat(100 + i2 / N2, (i2 % N2) / T2[0].w, i2 % T2[0].w, c);
  end


  always_ff @(posedge clk) begin
    if (rst_n) begin
      in1_valid  <= (i1 + (in1_valid && in1_ready ? 1 : 0)) < FRAMES * N1;
      in2_valid  <= (i2 + (in2_valid && in2_ready ? 1 : 0)) < FRAMES * N2;
      out1_ready <= ($urandom_range(0, 3) != 0);
      out2_ready <= ($urandom_range(0, 3) != 0);
      out3_ready <= ($urandom_range(0, 7) != 0);
      if (in1_valid && in1_ready) i1 <= i1 + 1;
      if (in2_valid && in2_ready) i2 <= i2 + 1;
      for (int u = 0; u < NU; u++) begin
        if (evt[u][0]) n_stall_in++;
        if (evt[u][1]) n_bias_wait++;
        if (evt[u][2]) n_slot_wait++;
        if (fdone[u]) frames_u[u]++;
      end
      if (fan_split) n_split++;
      if (out1_valid && out1_ready) begin
        int f, y, x;
        f = o1 / NO1; y = (o1 % NO1) / 32; x = o1 % 32;
        if (f != ref_frame) begin ref_branch1(f); ref_frame = f; end
        for (int c = 0; c < 3; c++) begin
          checks++;
          if ($signed(out1_data[c*8 +: 8]) !== fm[BR1_N][y][x][c]) begin
            failures++;
            if (failures < 10) $display("FAIL br1 f%0d y%0d x%0d c%0d", f, y, x, c);
          end
        end
        o1 <= o1 + 1;
      end
      if (out2_valid && out2_ready) o2 <= o2 + 1;
      if (out3_valid && out3_ready) o3 <= o3 + 1;
    end
  end

  // compute-cycle count per unit (the issue strobe of each unit)
  for (genvar u = 0; u < NU; u++) begin : g_cnt
    always_ff @(posedge clk) if (rst_n && dut.g_unit[u].u_bau.iss_go) iss[u] <= iss[u] + 1;
  end

  function automatic layer_cfg_t cfg_of(int u);
    if (u < BR1_N) return T1[u];
    if (u < BR1_N + BR2_N) return T2[u - BR1_N];
    return T3[0];
  endfunction

  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    in1_valid = 0; in2_valid = 0; out1_ready = 0; out2_ready = 0; out3_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (o1 == FRAMES * NO1 && o2 == FRAMES * NO2 && o3 == FRAMES * NO3);
    repeat (200) @(posedge clk);
    $display("done after %0d cycles", cyc);
    checks++;
    if (o1 != FRAMES * NO1 || o2 != FRAMES * NO2 || o3 != FRAMES * NO3) begin
      failures++; $display("FAIL output counts %0d %0d %0d", o1, o2, o3);
    end
    for (int u = 0; u < NU; u++) begin
      checks += 3;
      if (!loaded[u]) begin failures++; $display("FAIL unit %0d weights", u); end
      if (frames_u[u] != FRAMES) begin failures++; $display("FAIL unit %0d frames %0d", u, frames_u[u]); end
      if (iss[u] != FRAMES * lat(cfg_of(u))) begin
        failures++; $display("FAIL unit %0d compute cycles %0d exp %0d", u, iss[u], FRAMES * lat(cfg_of(u)));
      end
    end
    $display("mechanisms: input stalls %0d, bias waits %0d, slot waits %0d, fan-out splits %0d",
             n_stall_in, n_bias_wait, n_slot_wait, n_split);
    checks += 4;
    if (n_stall_in == 0)  begin failures++; $display("FAIL no input stall"); end
    if (n_bias_wait == 0) begin failures++; $display("FAIL no bias wait"); end
    if (n_slot_wait == 0) begin failures++; $display("FAIL no slot wait"); end
    if (n_split == 0)     begin failures++; $display("FAIL no fan-out split"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog o1=%0d o2=%0d o3=%0d", o1, o2, o3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
