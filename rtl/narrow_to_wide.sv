// narrow_to_wide: forwards 64-bit narrow requests onto the 512-bit wide network.
//
// The 64-bit write data is replicated into all eight lanes of the wide beat and
// the byte strobes are shifted to the lane that address bits [5:3] select, so a
// wide slave writes exactly the bytes the narrow master wrote. On the way back
// the same lane is extracted from the wide read data. One request at a time is
// in flight (req_ready_o is low while a response is awaited). The paper only says
// that narrow requests can be forwarded onto the wide network; the single
// outstanding request is this design's choice.
module narrow_to_wide
  import occamy_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  n_req_valid_i,
  output logic  n_req_ready_o,
  input  nreq_t n_req_i,
  output logic  n_rsp_valid_o,
  output nrsp_t n_rsp_o,
  output logic  w_req_valid_o,
  input  logic  w_req_ready_i,
  output wreq_t w_req_o,
  input  logic  w_rsp_valid_i,
  input  wrsp_t w_rsp_i
);
  localparam int unsigned LANES = WIDE_W / NARROW_W;
  logic       busy_q;
  logic [2:0] lane_q;
  wire  [2:0] lane = n_req_i.addr[5:3];

  assign w_req_valid_o = n_req_valid_i && !busy_q;
  assign n_req_ready_o = w_req_ready_i && !busy_q;

  always_comb begin
    w_req_o.write = n_req_i.write;
    w_req_o.addr  = n_req_i.addr;
    w_req_o.mask  = n_req_i.mask;
    w_req_o.wdata = {LANES{n_req_i.wdata}};
    w_req_o.strb  = '0;
    w_req_o.strb[8*lane +: 8] = n_req_i.strb;
    n_rsp_o.rdata = w_rsp_i.rdata[64*lane_q +: 64];
    n_rsp_o.err   = w_rsp_i.err;
  end
  assign n_rsp_valid_o = w_rsp_valid_i && busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      lane_q <= '0;
    end else begin
      if (w_req_valid_o && w_req_ready_i) begin
        busy_q <= 1'b1;
        lane_q <= lane;
      end else if (w_rsp_valid_i) begin
        busy_q <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) w_rsp_valid_i |-> busy_q);
endmodule
