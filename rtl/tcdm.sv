// tcdm: tightly coupled data memory of a cluster with its shared crossbar.
//
// NR_BANKS banks of BANK_WORDS 64-bit words (default 32 banks of 4 KB = 128 KB,
// as in the paper), word-interleaved: byte address bits [7:3] pick the bank and
// bits [16:8] the row, so consecutive words fall in consecutive banks. NR_PORTS
// narrow 64-bit ports (the cores and the cluster's crossbar) and one 512-bit
// wide port (the DMA) share the banks. A wide access covers eight adjacent banks
// (one 64-byte row segment) and has priority on them; each bank arbitrates
// among the narrow ports that address it round-robin. Several ports that address
// different banks are served in the same cycle. Request handshake valid/ready,
// read data (and write acknowledge) one cycle after the request is granted; the
// wide port is always ready. The interleaving and arbitration policy are this
// design's choices; the paper gives the size, the bank count and the port widths.
module tcdm
  import occamy_pkg::*;
#(
  parameter int unsigned NR_PORTS   = 10,
  parameter int unsigned NR_BANKS   = 32,
  parameter int unsigned BANK_WORDS = 512
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NR_PORTS-1:0] n_req_valid_i,
  output logic [NR_PORTS-1:0] n_req_ready_o,
  input  nreq_t               n_req_i       [NR_PORTS],
  output logic [NR_PORTS-1:0] n_rsp_valid_o,
  output nrsp_t               n_rsp_o       [NR_PORTS],
  input  logic                w_req_valid_i,
  output logic                w_req_ready_o,
  input  wreq_t               w_req_i,
  output logic                w_rsp_valid_o,
  output wrsp_t               w_rsp_o
);
  localparam int unsigned BW  = $clog2(NR_BANKS);
  localparam int unsigned RW  = $clog2(BANK_WORDS);
  localparam int unsigned WPB = WIDE_W / NARROW_W;          // banks per wide beat
  localparam int unsigned GW  = $clog2(NR_BANKS / WPB);     // wide group index bits
  localparam int unsigned PW  = $clog2(NR_PORTS > 1 ? NR_PORTS : 2);

  logic [NR_BANKS-1:0][NR_PORTS-1:0] breq, bgnt;
  logic [NR_BANKS-1:0]               wide_hit;
  logic [NR_BANKS-1:0][PW-1:0]       bidx;
  logic [NR_BANKS-1:0][63:0]         bank_rdata;
  logic [NR_PORTS-1:0][BW-1:0]       pbank_q;

  wire [GW-1:0] wgrp = w_req_i.addr[3+BW-1 -: GW];
  wire [RW-1:0] wrow = w_req_i.addr[3+BW +: RW];

  assign w_req_ready_o = 1'b1;

  always_comb begin
    for (int b = 0; b < NR_BANKS; b++) begin
      wide_hit[b] = w_req_valid_i && (wgrp == GW'(b / WPB));
      for (int p = 0; p < NR_PORTS; p++)
        breq[b][p] = n_req_valid_i[p] && (n_req_i[p].addr[3 +: BW] == BW'(b)) && !wide_hit[b];
    end
    for (int p = 0; p < NR_PORTS; p++) begin
      n_req_ready_o[p] = 1'b0;
      for (int b = 0; b < NR_BANKS; b++) if (bgnt[b][p]) n_req_ready_o[p] = 1'b1;
    end
  end

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    logic [63:0]   mem [BANK_WORDS];
    logic [63:0]   rdata_q;
    logic          en, we;
    logic [RW-1:0] row;
    logic [63:0]   wdata;
    logic [7:0]    strb;

    rr_arb #(.N(NR_PORTS)) i_arb (
      .clk_i, .rst_ni,
      .req_i  (breq[b]),
      .take_i (1'b1),
      .gnt_o  (bgnt[b]),
      .idx_o  (bidx[b])
    );

    always_comb begin
      if (wide_hit[b]) begin
        en    = 1'b1;
        we    = w_req_i.write;
        row   = wrow;
        wdata = w_req_i.wdata[64*(b % WPB) +: 64];
        strb  = w_req_i.strb[8*(b % WPB) +: 8];
      end else begin
        en    = |breq[b];
        we    = n_req_i[bidx[b]].write;
        row   = n_req_i[bidx[b]].addr[3+BW +: RW];
        wdata = n_req_i[bidx[b]].wdata;
        strb  = n_req_i[bidx[b]].strb;
      end
    end

    always_ff @(posedge clk_i) begin
      if (en) begin
        if (we) begin
          for (int k = 0; k < 8; k++) if (strb[k]) mem[row][8*k +: 8] <= wdata[8*k +: 8];
        end
        rdata_q <= mem[row];
      end
    end
    assign bank_rdata[b] = rdata_q;
  end

  // responses
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      n_rsp_valid_o <= '0;
      w_rsp_valid_o <= 1'b0;
      pbank_q       <= '0;
    end else begin
      n_rsp_valid_o <= n_req_valid_i & n_req_ready_o;
      w_rsp_valid_o <= w_req_valid_i;
      for (int p = 0; p < NR_PORTS; p++) pbank_q[p] <= n_req_i[p].addr[3 +: BW];
    end
  end

  logic [GW-1:0] wgrp_q;
  always_ff @(posedge clk_i) wgrp_q <= wgrp;

  always_comb begin
    for (int p = 0; p < NR_PORTS; p++) begin
      n_rsp_o[p].rdata = bank_rdata[pbank_q[p]];
      n_rsp_o[p].err   = 1'b0;
    end
    for (int k = 0; k < WPB; k++) w_rsp_o.rdata[64*k +: 64] = bank_rdata[int'(wgrp_q) * WPB + k];
    w_rsp_o.err = 1'b0;
  end

  // The wide port always wins its banks.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   w_req_valid_i |-> w_req_ready_o);
endmodule
