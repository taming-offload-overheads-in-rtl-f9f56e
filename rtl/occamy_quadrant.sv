// occamy_quadrant: a group of NRC clusters joined by a narrow and a wide crossbar.
//
// Each crossbar has one slave port coming down from the top-level crossbar plus
// one per cluster, and one master port per cluster plus one going up (the
// default route for addresses outside the quadrant; requests that came down are
// never sent back up). The narrow crossbar forwards multicast writes to every
// cluster they name; the wide one carries DMA and refill traffic. QUADRANT is the
// quadrant index, fixing the cluster base addresses (CLUSTER_BASE + QUADRANT *
// 0x100000 + cluster * 0x40000, so the cluster index sits in address bits [19:18]
// and the quadrant index in [22:20] as in the paper). All cluster-side signals of
// not-modelled parts (cores, instruction caches) are passed through as arrays
// indexed by cluster.
module occamy_quadrant
  import occamy_pkg::*;
#(
  parameter int unsigned QUADRANT     = 0,
  parameter int unsigned NRC          = NR_CLUSTERS_PER_Q,
  parameter int unsigned WIDE_MAX_OUT = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // cluster-side ports, [cluster][core]
  input  logic [NR_CORES-1:0] core_req_valid_i [NRC],
  output logic [NR_CORES-1:0] core_req_ready_o [NRC],
  input  nreq_t               core_req_i       [NRC][NR_CORES],
  output logic [NR_CORES-1:0] core_rsp_valid_o [NRC],
  output nrsp_t               core_rsp_o       [NRC][NR_CORES],
  output logic [NR_CORES-1:0] mcip_o           [NRC],
  input  logic [NR_CORES-1:0] mcip_clr_i       [NRC],
  input  logic [NR_CORES-1:0] barrier_arrive_i [NRC],
  output logic [NRC-1:0]      barrier_release_o,
  input  logic [NRC-1:0]      dma_req_valid_i,
  output logic [NRC-1:0]      dma_req_ready_o,
  input  nreq_t               dma_req_i        [NRC],
  output logic [NRC-1:0]      dma_rsp_valid_o,
  output nrsp_t               dma_rsp_o        [NRC],
  input  logic [NRC-1:0]      ic_req_valid_i,
  output logic [NRC-1:0]      ic_req_ready_o,
  input  wreq_t               ic_req_i         [NRC],
  output logic [NRC-1:0]      ic_rsp_valid_o,
  output wrsp_t               ic_rsp_o         [NRC],
  // top-facing narrow ports
  input  logic                nw_in_req_valid_i,
  output logic                nw_in_req_ready_o,
  input  nreq_t               nw_in_req_i,
  output logic                nw_in_rsp_valid_o,
  output nrsp_t               nw_in_rsp_o,
  output logic                nw_out_req_valid_o,
  input  logic                nw_out_req_ready_i,
  output nreq_t               nw_out_req_o,
  input  logic                nw_out_rsp_valid_i,
  input  nrsp_t               nw_out_rsp_i,
  // top-facing wide ports
  input  logic                ww_in_req_valid_i,
  output logic                ww_in_req_ready_o,
  input  wreq_t               ww_in_req_i,
  output logic                ww_in_rsp_valid_o,
  output wrsp_t               ww_in_rsp_o,
  output logic                ww_out_req_valid_o,
  input  logic                ww_out_req_ready_i,
  output wreq_t               ww_out_req_o,
  input  logic                ww_out_rsp_valid_i,
  input  wrsp_t               ww_out_rsp_i
);
  localparam int unsigned NS = NRC + 1;   // 0: from top, 1..NRC: from clusters
  localparam int unsigned NM = NRC + 1;   // 0..NRC-1: clusters, NRC: up

  rule_t [NM-1:0] rules;
  logic  [NS-1:0] ns_req_valid, ns_req_ready, ns_rsp_valid;
  nreq_t          ns_req [NS];
  nrsp_t          ns_rsp [NS];
  logic  [NM-1:0] nm_req_valid, nm_req_ready, nm_rsp_valid;
  nreq_t          nm_req [NM];
  nrsp_t          nm_rsp [NM];
  logic  [NS-1:0] ws_req_valid, ws_req_ready, ws_rsp_valid;
  wreq_t          ws_req [NS];
  wrsp_t          ws_rsp [NS];
  logic  [NM-1:0] wm_req_valid, wm_req_ready, wm_rsp_valid;
  wreq_t          wm_req [NM];
  wrsp_t          wm_rsp [NM];

  for (genvar c = 0; c < NRC; c++) begin : g_rule
    assign rules[c] = region(cluster_base(QUADRANT, c), CLUSTER_SIZE);
  end
  assign rules[NRC] = '0;

  // top-facing ports
  assign ns_req_valid[0]    = nw_in_req_valid_i;
  assign nw_in_req_ready_o  = ns_req_ready[0];
  assign ns_req[0]          = nw_in_req_i;
  assign nw_in_rsp_valid_o  = ns_rsp_valid[0];
  assign nw_in_rsp_o        = ns_rsp[0];
  assign nw_out_req_valid_o = nm_req_valid[NRC];
  assign nm_req_ready[NRC]  = nw_out_req_ready_i;
  assign nw_out_req_o       = nm_req[NRC];
  assign nm_rsp_valid[NRC]  = nw_out_rsp_valid_i;
  assign nm_rsp[NRC]        = nw_out_rsp_i;

  assign ws_req_valid[0]    = ww_in_req_valid_i;
  assign ww_in_req_ready_o  = ws_req_ready[0];
  assign ws_req[0]          = ww_in_req_i;
  assign ww_in_rsp_valid_o  = ws_rsp_valid[0];
  assign ww_in_rsp_o        = ws_rsp[0];
  assign ww_out_req_valid_o = wm_req_valid[NRC];
  assign wm_req_ready[NRC]  = ww_out_req_ready_i;
  assign ww_out_req_o       = wm_req[NRC];
  assign wm_rsp_valid[NRC]  = ww_out_rsp_valid_i;
  assign wm_rsp[NRC]        = ww_out_rsp_i;

  mcast_xbar #(
    .NS(NS), .NM(NM), .req_t(nreq_t), .rsp_t(nrsp_t), .MCAST(1'b1),
    .DEFAULT_EN(1'b1), .DEFAULT_PORT(NRC), .NO_DEFAULT_SLV(0), .MAX_OUT(4)
  ) i_nxbar (
    .clk_i, .rst_ni,
    .rules_i (rules),
    .slv_req_valid_i (ns_req_valid), .slv_req_ready_o (ns_req_ready), .slv_req_i (ns_req),
    .slv_rsp_valid_o (ns_rsp_valid), .slv_rsp_o (ns_rsp),
    .mst_req_valid_o (nm_req_valid), .mst_req_ready_i (nm_req_ready), .mst_req_o (nm_req),
    .mst_rsp_valid_i (nm_rsp_valid), .mst_rsp_i (nm_rsp)
  );

  mcast_xbar #(
    .NS(NS), .NM(NM), .req_t(wreq_t), .rsp_t(wrsp_t), .MCAST(1'b0),
    .DEFAULT_EN(1'b1), .DEFAULT_PORT(NRC), .NO_DEFAULT_SLV(0), .MAX_OUT(WIDE_MAX_OUT)
  ) i_wxbar (
    .clk_i, .rst_ni,
    .rules_i (rules),
    .slv_req_valid_i (ws_req_valid), .slv_req_ready_o (ws_req_ready), .slv_req_i (ws_req),
    .slv_rsp_valid_o (ws_rsp_valid), .slv_rsp_o (ws_rsp),
    .mst_req_valid_o (wm_req_valid), .mst_req_ready_i (wm_req_ready), .mst_req_o (wm_req),
    .mst_rsp_valid_i (wm_rsp_valid), .mst_rsp_i (wm_rsp)
  );

  for (genvar c = 0; c < NRC; c++) begin : g_cluster
    snitch_cluster #(.WIDE_MAX_OUT(WIDE_MAX_OUT)) i_cluster (
      .clk_i, .rst_ni,
      .cluster_base_i     (cluster_base(QUADRANT, c)),
      .core_req_valid_i   (core_req_valid_i[c]),
      .core_req_ready_o   (core_req_ready_o[c]),
      .core_req_i         (core_req_i[c]),
      .core_rsp_valid_o   (core_rsp_valid_o[c]),
      .core_rsp_o         (core_rsp_o[c]),
      .mcip_o             (mcip_o[c]),
      .mcip_clr_i         (mcip_clr_i[c]),
      .barrier_arrive_i   (barrier_arrive_i[c]),
      .barrier_release_o  (barrier_release_o[c]),
      .dma_req_valid_i    (dma_req_valid_i[c]),
      .dma_req_ready_o    (dma_req_ready_o[c]),
      .dma_req_i          (dma_req_i[c]),
      .dma_rsp_valid_o    (dma_rsp_valid_o[c]),
      .dma_rsp_o          (dma_rsp_o[c]),
      .ic_req_valid_i     (ic_req_valid_i[c]),
      .ic_req_ready_o     (ic_req_ready_o[c]),
      .ic_req_i           (ic_req_i[c]),
      .ic_rsp_valid_o     (ic_rsp_valid_o[c]),
      .ic_rsp_o           (ic_rsp_o[c]),
      .nw_in_req_valid_i  (nm_req_valid[c]),
      .nw_in_req_ready_o  (nm_req_ready[c]),
      .nw_in_req_i        (nm_req[c]),
      .nw_in_rsp_valid_o  (nm_rsp_valid[c]),
      .nw_in_rsp_o        (nm_rsp[c]),
      .nw_out_req_valid_o (ns_req_valid[c+1]),
      .nw_out_req_ready_i (ns_req_ready[c+1]),
      .nw_out_req_o       (ns_req[c+1]),
      .nw_out_rsp_valid_i (ns_rsp_valid[c+1]),
      .nw_out_rsp_i       (ns_rsp[c+1]),
      .ww_in_req_valid_i  (wm_req_valid[c]),
      .ww_in_req_ready_o  (wm_req_ready[c]),
      .ww_in_req_i        (wm_req[c]),
      .ww_in_rsp_valid_o  (wm_rsp_valid[c]),
      .ww_in_rsp_o        (wm_rsp[c]),
      .ww_out_req_valid_o (ws_req_valid[c+1]),
      .ww_out_req_ready_i (ws_req_ready[c+1]),
      .ww_out_req_o       (ws_req[c+1]),
      .ww_out_rsp_valid_i (ws_rsp_valid[c+1]),
      .ww_out_rsp_i       (ws_rsp[c+1])
    );
  end
endmodule
