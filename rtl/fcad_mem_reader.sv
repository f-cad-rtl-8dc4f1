// fcad_mem_reader: external memory read port of a basic architecture unit.
//
// Every unit has its own external memory (Fig. 5(b)) reached over an MW-bit
// bus. The reader fetches, in this order, the NWB beats of the layer's
// weights (word addresses 0 .. NWB-1, once after reset) and then the NBB beats
// of the untied biases of one frame (addresses NWB .. NWB+NBB-1), again for
// every following frame. Beats come back in order into a DEPTH-beat response
// buffer; a request is issued only while outstanding requests plus buffered
// beats stay below DEPTH, so mem_rsp_valid never needs a ready. Weight beats
// leave on the w_* port, bias beats on the b_* port.
//
// The memory protocol (request valid/ready with a word address, in-order
// responses of any latency) and the address map are this design's own; the
// paper only names the bus width MW.
//
// The response FIFO's in_ready is left open: the credit check (requests in
// flight plus buffered words below DEPTH) already guarantees that every
// response finds room, so lint's empty-pin note on it is intended.
module fcad_mem_reader #(
  parameter int MW     = 64,
  parameter int ADDR_W = 32,
  parameter int NWB    = 2304,
  parameter int NBB    = 16384,
  parameter int DEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [MW-1:0]     mem_rsp_data,
  output logic              w_valid,
  input  logic              w_ready,
  output logic [MW-1:0]     w_data,
  output logic              b_valid,
  input  logic              b_ready,
  output logic [MW-1:0]     b_data
);

  localparam int CW = $clog2(DEPTH + 1);

  int            req_cnt;    // weight requests issued (saturates at NWB)
  int            bias_idx;   // next bias beat of the frame
  int            rsp_cnt;    // weight responses received (saturates at NWB)
  logic [CW-1:0] inflight;
  logic [CW-1:0] fcount;
  logic          f_valid, f_ready, f_is_w;
  logic [MW-1:0] f_data;
  logic          req_fire;

  assign mem_req_valid = (int'(inflight) + int'(fcount)) < DEPTH;
  assign mem_req_addr  = (req_cnt < NWB) ? ADDR_W'(req_cnt) : ADDR_W'(NWB + bias_idx);
  assign req_fire      = mem_req_valid && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_cnt  <= 0;
      bias_idx <= 0;
      rsp_cnt  <= 0;
      inflight <= '0;
    end else begin
      if (req_fire) begin
        if (req_cnt < NWB) req_cnt <= req_cnt + 1;
        else bias_idx <= (bias_idx == NBB - 1) ? 0 : bias_idx + 1;
      end
      if (mem_rsp_valid && rsp_cnt < NWB) rsp_cnt <= rsp_cnt + 1;
      inflight <= inflight + CW'(req_fire) - CW'(mem_rsp_valid);
    end
  end

  fcad_fifo #(.WIDTH(MW + 1), .DEPTH(DEPTH)) u_rsp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mem_rsp_valid),
    .in_ready (),
    .in_data  ({rsp_cnt < NWB, mem_rsp_data}),
    .out_valid(f_valid),
    .out_ready(f_ready),
    .out_data ({f_is_w, f_data}),
    .count    (fcount)
  );

  assign w_valid = f_valid && f_is_w;
  assign b_valid = f_valid && !f_is_w;
  assign w_data  = f_data;
  assign b_data  = f_data;
  assign f_ready = f_is_w ? w_ready : b_ready;

endmodule
