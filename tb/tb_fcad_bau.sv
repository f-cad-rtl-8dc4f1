// tb_fcad_bau: self-checking test of one basic architecture unit.
//
// A 4-in/4-out 3x3 layer on an 8x6 feature map with cpf=kpf=hp=2, fused
// leaky ReLU and 2x up-sampling, runs two frames. The input is offered with
// random gaps, the output is taken with random back-pressure and the memory
// stalls at random. Every output beat (16x12 pixels per frame) is compared
// with a reference convolution computed here from the same memory contents
// (weights and untied biases decoded from fcad_tb_pkg::mem_word in the
// documented layout). The number of compute cycles per frame is checked
// against OUT_CH*IN_CH*H*W*K*K/(cpf*kpf*hp).
module tb_fcad_bau;
  import fcad_tb_pkg::*;

  localparam int IN_CH = 4, OUT_CH = 4, H = 8, W = 6, K = 3;
  localparam int CPF = 2, KPF = 2, HP = 2, UP = 1, ACT = 1, SHIFT = 4, LEAKY = 2;
  localparam int MW = 64, DW = 8, WW = 8;
  localparam int FRAMES = 2;
  localparam int CB = IN_CH / CPF, KB = OUT_CH / KPF, P = (K - 1) / 2;
  localparam int WBEATS = (KPF * CPF * WW + MW - 1) / MW;
  localparam int NWB = KB * K * K * CB * WBEATS;
  localparam int BBEATS = (HP * KPF * 16 + MW - 1) / MW;
  localparam int OH = 2 * H, OW = 2 * W;
  localparam int LAT_CYC = OUT_CH * IN_CH * H * W * K * K / (CPF * KPF * HP);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [IN_CH*DW-1:0]  in_data;
  logic [OUT_CH*DW-1:0] out_data;
  logic mreq_v, mreq_r, mrsp_v;
  logic [31:0] mreq_a;
  logic [MW-1:0] mrsp_d;
  logic loaded, fdone;
  logic [2:0] evt;

  fcad_bau #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .H(H), .W(W), .K(K), .CPF(CPF), .KPF(KPF),
             .HP(HP), .UP(UP), .ACT(ACT), .SHIFT(SHIFT), .LEAKY_SHIFT(LEAKY)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a),
    .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
    .weights_loaded(loaded), .frame_done(fdone), .evt(evt)
  );

  fcad_dram_model #(.UNIT(3), .LAT(5), .STALL(1)) u_mem (
    .clk, .rst_n, .req_valid(mreq_v), .req_ready(mreq_r), .req_addr(mreq_a),
    .rsp_valid(mrsp_v), .rsp_data(mrsp_d)
  );

  // ------------------------------------------------------ reference model
  function automatic int wgt(int oc, int ic, int ky, int kx);
    int kb, k, cb, c, a, off, beat;
    logic [63:0] wd;
    kb = oc / KPF; k = oc % KPF; cb = ic / CPF; c = ic % CPF;
    a = ((kb * K + ky) * K + kx) * CB + cb;
    off = (k * CPF + c) * WW;
    beat = a * WBEATS + off / MW;
    wd = mem_word(3, beat);
    return int'($signed(wd[off % MW +: 8]));
  endfunction

  function automatic int bias(int y, int x, int oc);
    int g, e, kb, k, n, off, beat;
    logic [63:0] wd;
    g = y / HP; e = y % HP; kb = oc / KPF; k = oc % KPF;
    n = (g * W + x) * KB + kb;
    off = (e * KPF + k) * 16;
    beat = NWB + n * BBEATS + off / MW;
    wd = mem_word(3, beat);
    return int'($signed(wd[off % MW +: 16]));
  endfunction

  function automatic logic [7:0] ref_out(int f, int y, int x, int oc);
    int v;
    v = 0;
    for (int ic = 0; ic < IN_CH; ic++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          int yy, xx;
          yy = y + ky - P; xx = x + kx - P;
          if (yy >= 0 && yy < H && xx >= 0 && xx < W)
            v += int'(feat(f, yy, xx, ic)) * wgt(oc, ic, ky, kx);
        end
    v += bias(y, x, oc);
    if (ACT != 0 && v < 0) v = v >>> LEAKY;
    v = v >>> SHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  // ------------------------------------------------------------ stimulus
  int checks = 0, failures = 0;
  int in_f = 0, in_y = 0, in_x = 0;
  int o_f = 0, o_y = 0, o_x = 0;
  int iss_cycles = 0, frames_done = 0;
  int stall_in = 0, stall_slot = 0;

  always_comb begin
    in_data = '0;
    for (int c = 0; c < IN_CH; c++) in_data[c*DW +: DW] = feat(in_f, in_y, in_x, c);
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      in_valid  <= (in_f < FRAMES) && ($urandom_range(0, 3) != 0);
      out_ready <= ($urandom_range(0, 3) != 0);
      if (dut.iss_go) iss_cycles <= iss_cycles + 1;
      if (evt[0]) stall_in <= stall_in + 1;
      if (evt[2]) stall_slot <= stall_slot + 1;
      if (fdone) begin
        frames_done <= frames_done + 1;
        checks++;
        if (iss_cycles + 1 != LAT_CYC * (frames_done + 1)) begin
          failures++;
          $display("FAIL compute cycles %0d, expected %0d", iss_cycles + 1, LAT_CYC * (frames_done + 1));
        end
      end
      if (in_valid && in_ready) begin
        if (in_x == W - 1) begin
          in_x <= 0;
          if (in_y == H - 1) begin in_y <= 0; in_f <= in_f + 1; end
          else in_y <= in_y + 1;
        end else in_x <= in_x + 1;
        if (in_x == W - 1 && in_y == H - 1 && in_f + 1 >= FRAMES) in_valid <= 1'b0;
      end
      if (out_valid && out_ready) begin
        for (int oc = 0; oc < OUT_CH; oc++) begin
          logic [7:0] exp_v;
          exp_v = ref_out(o_f, o_y / 2, o_x / 2, oc);
          checks++;
          if (out_data[oc*DW +: DW] !== exp_v) begin
            failures++;
            if (failures < 10)
              $display("FAIL f%0d y%0d x%0d oc%0d got %0d exp %0d", o_f, o_y, o_x, oc,
                       $signed(out_data[oc*DW +: DW]), $signed(exp_v));
          end
        end
        if (o_x == OW - 1) begin
          o_x <= 0;
          if (o_y == OH - 1) begin o_y <= 0; o_f <= o_f + 1; end
          else o_y <= o_y + 1;
        end else o_x <= o_x + 1;
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (o_f == FRAMES);
    repeat (5) @(posedge clk);
    checks++;
    if (stall_in == 0) begin failures++; $display("FAIL input never stalled"); end
    $display("compute cycles/frame %0d, input stalls %0d, slot waits %0d", LAT_CYC, stall_in, stall_slot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
