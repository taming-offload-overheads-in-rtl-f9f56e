// spm: on-chip scratchpad memory with a single port.
//
// SIZE bytes of DW-bit words (defaults: the 512 KB narrow SPM on the 64-bit
// network). The wide instance has DW = 512 and SIZE = 1 MB; having one port it
// serves one request per cycle, so DMA transfers from many clusters are
// serialised at its interface, as the paper describes. Always ready; read data or
// write acknowledge one cycle after the request. Byte strobes select the bytes
// written. Address bits above the memory size are ignored (the crossbar has
// already decoded them).
module spm
  import occamy_pkg::*;
#(
  parameter int unsigned DW    = NARROW_W,
  parameter int unsigned SIZE  = 512 * 1024,
  parameter type         req_t = nreq_t,
  parameter type         rsp_t = nrsp_t
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_valid_i,
  output logic  req_ready_o,
  input  req_t  req_i,
  output logic  rsp_valid_o,
  output rsp_t  rsp_o
);
  localparam int unsigned BYTES = DW / 8;
  localparam int unsigned WORDS = SIZE / BYTES;
  localparam int unsigned OW    = $clog2(BYTES);
  localparam int unsigned AW    = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];
  logic [DW-1:0] rdata_q;
  wire  [AW-1:0] idx = req_i.addr[OW +: AW];

  assign req_ready_o = 1'b1;

  always_ff @(posedge clk_i) begin
    if (req_valid_i) begin
      if (req_i.write) begin
        for (int k = 0; k < BYTES; k++)
          if (req_i.strb[k]) mem[idx][8*k +: 8] <= req_i.wdata[8*k +: 8];
      end
      rdata_q <= mem[idx];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_valid_o <= 1'b0;
    else         rsp_valid_o <= req_valid_i;
  end

  always_comb begin
    rsp_o       = '0;
    rsp_o.rdata = rdata_q;
  end
endmodule
