// occamy_top: the Occamy offload fabric with multicast and job completion support.
//
// NR_QUADRANTS quadrants of NR_CLUSTERS_PER_Q clusters (default 8 x 4 = 32
// clusters, 288 cores) hang off two top-level crossbars:
//   narrow (64b, multicast): slave ports host + one per quadrant; master ports one
//     per quadrant, the CLINT (with job completion units), the 512 KB narrow SPM,
//     the bridge to the wide network (for the wide SPM region) and the other
//     peripherals (an external port);
//   wide (512b): slave ports one per quadrant + the narrow-to-wide bridge; master
//     ports one per quadrant and the 1 MB wide SPM (single port).
// The host core (CVA6), the accelerator cores and the instruction caches are not
// part of this RTL: the host's narrow master port and software interrupt, and
// every core's memory port, interrupt and barrier signals, the data-mover cores'
// DMA register ports and the caches' refill ports are ports of this module,
// indexed [quadrant][cluster][core]. The host offloads by writing job data with
// one multicast store to many TCDMs, waking cores with one multicast store to
// their MCIP registers, and is notified through the CLINT's job completion unit.
module occamy_top
  import occamy_pkg::*;
#(
  parameter int unsigned NR_QUADRANTS      = occamy_pkg::NR_QUADRANTS,
  parameter int unsigned NR_CLUSTERS_PER_Q = occamy_pkg::NR_CLUSTERS_PER_Q,
  parameter int unsigned NR_JOBS           = 4,
  parameter int unsigned WIDE_MAX_OUT      = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // host (CVA6) narrow master port and interrupt
  input  logic                host_req_valid_i,
  output logic                host_req_ready_o,
  input  nreq_t               host_req_i,
  output logic                host_rsp_valid_o,
  output nrsp_t               host_rsp_o,
  output logic                host_msip_o,
  output logic [7:0]          host_cause_o,
  // software interrupt of every hart (index 0 is the host, then cores in order
  // quadrant, cluster, core)
  output logic [NR_QUADRANTS*NR_CLUSTERS_PER_Q*NR_CORES:0] msip_o,
  // accelerator cores, [quadrant][cluster][core]
  input  logic [NR_CORES-1:0] core_req_valid_i  [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  output logic [NR_CORES-1:0] core_req_ready_o  [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  input  nreq_t               core_req_i        [NR_QUADRANTS][NR_CLUSTERS_PER_Q][NR_CORES],
  output logic [NR_CORES-1:0] core_rsp_valid_o  [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  output nrsp_t               core_rsp_o        [NR_QUADRANTS][NR_CLUSTERS_PER_Q][NR_CORES],
  output logic [NR_CORES-1:0] mcip_o            [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  input  logic [NR_CORES-1:0] mcip_clr_i        [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  input  logic [NR_CORES-1:0] barrier_arrive_i  [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  output logic [NR_CLUSTERS_PER_Q-1:0] barrier_release_o [NR_QUADRANTS],
  // data-mover cores' DMA register ports, [quadrant][cluster]
  input  logic [NR_CLUSTERS_PER_Q-1:0] dma_req_valid_i [NR_QUADRANTS],
  output logic [NR_CLUSTERS_PER_Q-1:0] dma_req_ready_o [NR_QUADRANTS],
  input  nreq_t               dma_req_i         [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  output logic [NR_CLUSTERS_PER_Q-1:0] dma_rsp_valid_o [NR_QUADRANTS],
  output nrsp_t               dma_rsp_o         [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  // instruction cache refill ports, [quadrant][cluster]
  input  logic [NR_CLUSTERS_PER_Q-1:0] ic_req_valid_i [NR_QUADRANTS],
  output logic [NR_CLUSTERS_PER_Q-1:0] ic_req_ready_o [NR_QUADRANTS],
  input  wreq_t               ic_req_i          [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  output logic [NR_CLUSTERS_PER_Q-1:0] ic_rsp_valid_o [NR_QUADRANTS],
  output wrsp_t               ic_rsp_o          [NR_QUADRANTS][NR_CLUSTERS_PER_Q],
  // other peripherals (narrow master port)
  output logic                periph_req_valid_o,
  input  logic                periph_req_ready_i,
  output nreq_t               periph_req_o,
  input  logic                periph_rsp_valid_i,
  input  nrsp_t               periph_rsp_i
);
  localparam int unsigned NQ     = NR_QUADRANTS;
  localparam int unsigned NHARTS = NQ * NR_CLUSTERS_PER_Q * NR_CORES + 1;
  localparam int unsigned NS_N   = NQ + 1;
  localparam int unsigned NM_N   = NQ + 4;
  localparam int unsigned M_CLINT = NQ, M_NSPM = NQ + 1, M_BRIDGE = NQ + 2, M_PERIPH = NQ + 3;
  localparam int unsigned NS_W   = NQ + 1;
  localparam int unsigned NM_W   = NQ + 1;

  rule_t [NM_N-1:0] n_rules;
  rule_t [NM_W-1:0] w_rules;
  logic  [NS_N-1:0] ns_req_valid, ns_req_ready, ns_rsp_valid;
  nreq_t            ns_req [NS_N];
  nrsp_t            ns_rsp [NS_N];
  logic  [NM_N-1:0] nm_req_valid, nm_req_ready, nm_rsp_valid;
  nreq_t            nm_req [NM_N];
  nrsp_t            nm_rsp [NM_N];
  logic  [NS_W-1:0] ws_req_valid, ws_req_ready, ws_rsp_valid;
  wreq_t            ws_req [NS_W];
  wrsp_t            ws_rsp [NS_W];
  logic  [NM_W-1:0] wm_req_valid, wm_req_ready, wm_rsp_valid;
  wreq_t            wm_req [NM_W];
  wrsp_t            wm_rsp [NM_W];

  for (genvar q = 0; q < NQ; q++) begin : g_rules
    assign n_rules[q] = region(cluster_base(q, 0), QUADRANT_SIZE);
    assign w_rules[q] = region(cluster_base(q, 0), QUADRANT_SIZE);
  end
  assign n_rules[M_CLINT]  = region(CLINT_BASE, CLINT_SIZE);
  assign n_rules[M_NSPM]   = region(NSPM_BASE, NSPM_SIZE);
  assign n_rules[M_BRIDGE] = region(WSPM_BASE, WSPM_SIZE);
  assign n_rules[M_PERIPH] = region(PERIPH_BASE, PERIPH_SIZE);
  assign w_rules[NQ]       = region(WSPM_BASE, WSPM_SIZE);

  // host port
  assign ns_req_valid[0]  = host_req_valid_i;
  assign host_req_ready_o = ns_req_ready[0];
  assign ns_req[0]        = host_req_i;
  assign host_rsp_valid_o = ns_rsp_valid[0];
  assign host_rsp_o       = ns_rsp[0];

  mcast_xbar #(
    .NS(NS_N), .NM(NM_N), .req_t(nreq_t), .rsp_t(nrsp_t), .MCAST(1'b1),
    .DEFAULT_EN(1'b0), .MAX_OUT(4)
  ) i_nxbar (
    .clk_i, .rst_ni,
    .rules_i (n_rules),
    .slv_req_valid_i (ns_req_valid), .slv_req_ready_o (ns_req_ready), .slv_req_i (ns_req),
    .slv_rsp_valid_o (ns_rsp_valid), .slv_rsp_o (ns_rsp),
    .mst_req_valid_o (nm_req_valid), .mst_req_ready_i (nm_req_ready), .mst_req_o (nm_req),
    .mst_rsp_valid_i (nm_rsp_valid), .mst_rsp_i (nm_rsp)
  );

  mcast_xbar #(
    .NS(NS_W), .NM(NM_W), .req_t(wreq_t), .rsp_t(wrsp_t), .MCAST(1'b0),
    .DEFAULT_EN(1'b0), .MAX_OUT(WIDE_MAX_OUT)
  ) i_wxbar (
    .clk_i, .rst_ni,
    .rules_i (w_rules),
    .slv_req_valid_i (ws_req_valid), .slv_req_ready_o (ws_req_ready), .slv_req_i (ws_req),
    .slv_rsp_valid_o (ws_rsp_valid), .slv_rsp_o (ws_rsp),
    .mst_req_valid_o (wm_req_valid), .mst_req_ready_i (wm_req_ready), .mst_req_o (wm_req),
    .mst_rsp_valid_i (wm_rsp_valid), .mst_rsp_i (wm_rsp)
  );

  for (genvar q = 0; q < NQ; q++) begin : g_quadrant
    occamy_quadrant #(
      .QUADRANT(q), .NRC(NR_CLUSTERS_PER_Q), .WIDE_MAX_OUT(WIDE_MAX_OUT)
    ) i_quadrant (
      .clk_i, .rst_ni,
      .core_req_valid_i   (core_req_valid_i[q]),
      .core_req_ready_o   (core_req_ready_o[q]),
      .core_req_i         (core_req_i[q]),
      .core_rsp_valid_o   (core_rsp_valid_o[q]),
      .core_rsp_o         (core_rsp_o[q]),
      .mcip_o             (mcip_o[q]),
      .mcip_clr_i         (mcip_clr_i[q]),
      .barrier_arrive_i   (barrier_arrive_i[q]),
      .barrier_release_o  (barrier_release_o[q]),
      .dma_req_valid_i    (dma_req_valid_i[q]),
      .dma_req_ready_o    (dma_req_ready_o[q]),
      .dma_req_i          (dma_req_i[q]),
      .dma_rsp_valid_o    (dma_rsp_valid_o[q]),
      .dma_rsp_o          (dma_rsp_o[q]),
      .ic_req_valid_i     (ic_req_valid_i[q]),
      .ic_req_ready_o     (ic_req_ready_o[q]),
      .ic_req_i           (ic_req_i[q]),
      .ic_rsp_valid_o     (ic_rsp_valid_o[q]),
      .ic_rsp_o           (ic_rsp_o[q]),
      .nw_in_req_valid_i  (nm_req_valid[q]),
      .nw_in_req_ready_o  (nm_req_ready[q]),
      .nw_in_req_i        (nm_req[q]),
      .nw_in_rsp_valid_o  (nm_rsp_valid[q]),
      .nw_in_rsp_o        (nm_rsp[q]),
      .nw_out_req_valid_o (ns_req_valid[q+1]),
      .nw_out_req_ready_i (ns_req_ready[q+1]),
      .nw_out_req_o       (ns_req[q+1]),
      .nw_out_rsp_valid_i (ns_rsp_valid[q+1]),
      .nw_out_rsp_i       (ns_rsp[q+1]),
      .ww_in_req_valid_i  (wm_req_valid[q]),
      .ww_in_req_ready_o  (wm_req_ready[q]),
      .ww_in_req_i        (wm_req[q]),
      .ww_in_rsp_valid_o  (wm_rsp_valid[q]),
      .ww_in_rsp_o        (wm_rsp[q]),
      .ww_out_req_valid_o (ws_req_valid[q]),
      .ww_out_req_ready_i (ws_req_ready[q]),
      .ww_out_req_o       (ws_req[q]),
      .ww_out_rsp_valid_i (ws_rsp_valid[q]),
      .ww_out_rsp_i       (ws_rsp[q])
    );
  end

  clint #(.NR_HARTS(NHARTS), .NR_JOBS(NR_JOBS)) i_clint (
    .clk_i, .rst_ni,
    .req_valid_i (nm_req_valid[M_CLINT]),
    .req_ready_o (nm_req_ready[M_CLINT]),
    .req_i       (nm_req[M_CLINT]),
    .rsp_valid_o (nm_rsp_valid[M_CLINT]),
    .rsp_o       (nm_rsp[M_CLINT]),
    .msip_o      (msip_o),
    .cause_o     (host_cause_o)
  );
  assign host_msip_o = msip_o[0];

  spm #(.DW(NARROW_W), .SIZE(NSPM_SIZE), .req_t(nreq_t), .rsp_t(nrsp_t)) i_nspm (
    .clk_i, .rst_ni,
    .req_valid_i (nm_req_valid[M_NSPM]),
    .req_ready_o (nm_req_ready[M_NSPM]),
    .req_i       (nm_req[M_NSPM]),
    .rsp_valid_o (nm_rsp_valid[M_NSPM]),
    .rsp_o       (nm_rsp[M_NSPM])
  );

  narrow_to_wide i_bridge (
    .clk_i, .rst_ni,
    .n_req_valid_i (nm_req_valid[M_BRIDGE]),
    .n_req_ready_o (nm_req_ready[M_BRIDGE]),
    .n_req_i       (nm_req[M_BRIDGE]),
    .n_rsp_valid_o (nm_rsp_valid[M_BRIDGE]),
    .n_rsp_o       (nm_rsp[M_BRIDGE]),
    .w_req_valid_o (ws_req_valid[NQ]),
    .w_req_ready_i (ws_req_ready[NQ]),
    .w_req_o       (ws_req[NQ]),
    .w_rsp_valid_i (ws_rsp_valid[NQ]),
    .w_rsp_i       (ws_rsp[NQ])
  );

  assign periph_req_valid_o     = nm_req_valid[M_PERIPH];
  assign nm_req_ready[M_PERIPH] = periph_req_ready_i;
  assign periph_req_o           = nm_req[M_PERIPH];
  assign nm_rsp_valid[M_PERIPH] = periph_rsp_valid_i;
  assign nm_rsp[M_PERIPH]       = periph_rsp_i;

  spm #(.DW(WIDE_W), .SIZE(WSPM_SIZE), .req_t(wreq_t), .rsp_t(wrsp_t)) i_wspm (
    .clk_i, .rst_ni,
    .req_valid_i (wm_req_valid[NQ]),
    .req_ready_o (wm_req_ready[NQ]),
    .req_i       (wm_req[NQ]),
    .rsp_valid_o (wm_rsp_valid[NQ]),
    .rsp_o       (wm_rsp[NQ])
  );
endmodule
