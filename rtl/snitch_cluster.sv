// snitch_cluster: one accelerator cluster of the Occamy fabric, without its cores.
//
// Holds the 128 KB TCDM with its shared crossbar, the cluster's narrow (64b) and
// wide (512b) crossbars, the tightly coupled DMA engine, the MCIP interrupt
// register and the hardware barrier. The nine cores (eight compute cores and the
// data-mover core, index 8) and the instruction cache are outside: their memory
// ports, interrupt lines, barrier signals, the data-mover core's DMA register
// port and the instruction cache's refill port are ports of this module.
//
// Core accesses to the cluster's own TCDM go straight to the TCDM crossbar
// (single-cycle bank access); all others go through the cluster narrow crossbar,
// which also takes requests arriving from the quadrant (nw_in) and sends those
// for other addresses up (nw_out). Each core port has at most one request in
// flight. The wide crossbar joins the DMA read and write ports, the instruction
// cache refill port and wide requests arriving from the quadrant, and routes
// them to the TCDM wide port or up. cluster_base_i is the cluster's base address
// (a 0x40000-byte region: TCDM at offset 0, peripherals at CL_PERIPH_OFFS).
module snitch_cluster
  import occamy_pkg::*;
#(
  parameter int unsigned WIDE_MAX_OUT = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  addr_t               cluster_base_i,
  // cores
  input  logic [NR_CORES-1:0] core_req_valid_i,
  output logic [NR_CORES-1:0] core_req_ready_o,
  input  nreq_t               core_req_i       [NR_CORES],
  output logic [NR_CORES-1:0] core_rsp_valid_o,
  output nrsp_t               core_rsp_o       [NR_CORES],
  output logic [NR_CORES-1:0] mcip_o,
  input  logic [NR_CORES-1:0] mcip_clr_i,
  input  logic [NR_CORES-1:0] barrier_arrive_i,
  output logic                barrier_release_o,
  // data-mover core's DMA register port
  input  logic                dma_req_valid_i,
  output logic                dma_req_ready_o,
  input  nreq_t               dma_req_i,
  output logic                dma_rsp_valid_o,
  output nrsp_t               dma_rsp_o,
  // instruction cache refill port
  input  logic                ic_req_valid_i,
  output logic                ic_req_ready_o,
  input  wreq_t               ic_req_i,
  output logic                ic_rsp_valid_o,
  output wrsp_t               ic_rsp_o,
  // narrow network: from and to the quadrant
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
  // wide network: from and to the quadrant
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
  localparam int unsigned NTP = NR_CORES + 1;   // TCDM narrow ports

  // ---------------------------------------------------------------- core steering
  logic [NTP-1:0]      t_req_valid, t_req_ready, t_rsp_valid;
  nreq_t               t_req [NTP];
  nrsp_t               t_rsp [NTP];
  logic [NR_CORES:0]   x_req_valid, x_req_ready, x_rsp_valid;   // cluster narrow xbar slaves
  nreq_t               x_req [NR_CORES+1];
  nrsp_t               x_rsp [NR_CORES+1];
  logic [NR_CORES-1:0] busy_q, local_acc;

  for (genvar p = 0; p < NR_CORES; p++) begin : g_core
    assign local_acc[p]     = (core_req_i[p].addr[ADDR_W-1:17] == cluster_base_i[ADDR_W-1:17]);
    assign t_req_valid[p]   = core_req_valid_i[p] && !busy_q[p] && local_acc[p];
    assign x_req_valid[p]   = core_req_valid_i[p] && !busy_q[p] && !local_acc[p];
    assign t_req[p]         = core_req_i[p];
    assign x_req[p]         = core_req_i[p];
    assign core_req_ready_o[p] = !busy_q[p] && (local_acc[p] ? t_req_ready[p] : x_req_ready[p]);
    assign core_rsp_valid_o[p] = t_rsp_valid[p] || x_rsp_valid[p];
    assign core_rsp_o[p]       = t_rsp_valid[p] ? t_rsp[p] : x_rsp[p];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) busy_q[p] <= 1'b0;
      else if (core_req_valid_i[p] && core_req_ready_o[p]) busy_q[p] <= 1'b1;
      else if (core_rsp_valid_o[p]) busy_q[p] <= 1'b0;
    end
  end

  // ------------------------------------------------------- cluster narrow crossbar
  localparam int unsigned NM_N = 3;   // 0: TCDM, 1: peripherals, 2: up (default)
  rule_t [NM_N-1:0] n_rules;
  logic  [NM_N-1:0] nm_req_valid, nm_req_ready, nm_rsp_valid;
  nreq_t            nm_req [NM_N];
  nrsp_t            nm_rsp [NM_N];

  assign n_rules[0] = region(cluster_base_i, TCDM_SIZE);
  assign n_rules[1] = region(cluster_base_i + CL_PERIPH_OFFS, CL_PERIPH_SIZE);
  assign n_rules[2] = '0;

  assign x_req_valid[NR_CORES] = nw_in_req_valid_i;
  assign nw_in_req_ready_o     = x_req_ready[NR_CORES];
  assign x_req[NR_CORES]       = nw_in_req_i;
  assign nw_in_rsp_valid_o     = x_rsp_valid[NR_CORES];
  assign nw_in_rsp_o           = x_rsp[NR_CORES];

  mcast_xbar #(
    .NS(NR_CORES + 1), .NM(NM_N), .req_t(nreq_t), .rsp_t(nrsp_t), .MCAST(1'b1),
    .DEFAULT_EN(1'b1), .DEFAULT_PORT(2), .NO_DEFAULT_SLV(NR_CORES), .MAX_OUT(4)
  ) i_nxbar (
    .clk_i, .rst_ni,
    .rules_i         (n_rules),
    .slv_req_valid_i (x_req_valid),
    .slv_req_ready_o (x_req_ready),
    .slv_req_i       (x_req),
    .slv_rsp_valid_o (x_rsp_valid),
    .slv_rsp_o       (x_rsp),
    .mst_req_valid_o (nm_req_valid),
    .mst_req_ready_i (nm_req_ready),
    .mst_req_o       (nm_req),
    .mst_rsp_valid_i (nm_rsp_valid),
    .mst_rsp_i       (nm_rsp)
  );

  assign t_req_valid[NR_CORES] = nm_req_valid[0];
  assign nm_req_ready[0]       = t_req_ready[NR_CORES];
  assign t_req[NR_CORES]       = nm_req[0];
  assign nm_rsp_valid[0]       = t_rsp_valid[NR_CORES];
  assign nm_rsp[0]             = t_rsp[NR_CORES];

  cluster_periph i_periph (
    .clk_i, .rst_ni,
    .req_valid_i (nm_req_valid[1]),
    .req_ready_o (nm_req_ready[1]),
    .req_i       (nm_req[1]),
    .rsp_valid_o (nm_rsp_valid[1]),
    .rsp_o       (nm_rsp[1]),
    .clr_i       (mcip_clr_i),
    .irq_o       (mcip_o)
  );

  assign nw_out_req_valid_o = nm_req_valid[2];
  assign nm_req_ready[2]    = nw_out_req_ready_i;
  assign nw_out_req_o       = nm_req[2];
  assign nm_rsp_valid[2]    = nw_out_rsp_valid_i;
  assign nm_rsp[2]          = nw_out_rsp_i;

  // --------------------------------------------------------- cluster wide crossbar
  localparam int unsigned NS_W = 4;   // 0: DMA read, 1: DMA write, 2: I$ refill, 3: from quadrant
  localparam int unsigned NM_W = 2;   // 0: TCDM, 1: up (default)
  rule_t [NM_W-1:0] w_rules;
  logic  [NS_W-1:0] ws_req_valid, ws_req_ready, ws_rsp_valid;
  wreq_t            ws_req [NS_W];
  wrsp_t            ws_rsp [NS_W];
  logic  [NM_W-1:0] wm_req_valid, wm_req_ready, wm_rsp_valid;
  wreq_t            wm_req [NM_W];
  wrsp_t            wm_rsp [NM_W];
  logic             dma_busy;

  assign w_rules[0] = region(cluster_base_i, TCDM_SIZE);
  assign w_rules[1] = '0;

  cluster_dma i_dma (
    .clk_i, .rst_ni,
    .cfg_req_valid_i (dma_req_valid_i),
    .cfg_req_ready_o (dma_req_ready_o),
    .cfg_req_i       (dma_req_i),
    .cfg_rsp_valid_o (dma_rsp_valid_o),
    .cfg_rsp_o       (dma_rsp_o),
    .rd_req_valid_o  (ws_req_valid[0]),
    .rd_req_ready_i  (ws_req_ready[0]),
    .rd_req_o        (ws_req[0]),
    .rd_rsp_valid_i  (ws_rsp_valid[0]),
    .rd_rsp_i        (ws_rsp[0]),
    .wr_req_valid_o  (ws_req_valid[1]),
    .wr_req_ready_i  (ws_req_ready[1]),
    .wr_req_o        (ws_req[1]),
    .wr_rsp_valid_i  (ws_rsp_valid[1]),
    .wr_rsp_i        (ws_rsp[1]),
    .busy_o          (dma_busy)
  );

  assign ws_req_valid[2] = ic_req_valid_i;
  assign ic_req_ready_o  = ws_req_ready[2];
  assign ws_req[2]       = ic_req_i;
  assign ic_rsp_valid_o  = ws_rsp_valid[2];
  assign ic_rsp_o        = ws_rsp[2];

  assign ws_req_valid[3]   = ww_in_req_valid_i;
  assign ww_in_req_ready_o = ws_req_ready[3];
  assign ws_req[3]         = ww_in_req_i;
  assign ww_in_rsp_valid_o = ws_rsp_valid[3];
  assign ww_in_rsp_o       = ws_rsp[3];

  mcast_xbar #(
    .NS(NS_W), .NM(NM_W), .req_t(wreq_t), .rsp_t(wrsp_t), .MCAST(1'b0),
    .DEFAULT_EN(1'b1), .DEFAULT_PORT(1), .NO_DEFAULT_SLV(3), .MAX_OUT(WIDE_MAX_OUT)
  ) i_wxbar (
    .clk_i, .rst_ni,
    .rules_i         (w_rules),
    .slv_req_valid_i (ws_req_valid),
    .slv_req_ready_o (ws_req_ready),
    .slv_req_i       (ws_req),
    .slv_rsp_valid_o (ws_rsp_valid),
    .slv_rsp_o       (ws_rsp),
    .mst_req_valid_o (wm_req_valid),
    .mst_req_ready_i (wm_req_ready),
    .mst_req_o       (wm_req),
    .mst_rsp_valid_i (wm_rsp_valid),
    .mst_rsp_i       (wm_rsp)
  );

  assign ww_out_req_valid_o = wm_req_valid[1];
  assign wm_req_ready[1]    = ww_out_req_ready_i;
  assign ww_out_req_o       = wm_req[1];
  assign wm_rsp_valid[1]    = ww_out_rsp_valid_i;
  assign wm_rsp[1]          = ww_out_rsp_i;

  // ------------------------------------------------------------------------- TCDM
  tcdm #(.NR_PORTS(NTP)) i_tcdm (
    .clk_i, .rst_ni,
    .n_req_valid_i (t_req_valid),
    .n_req_ready_o (t_req_ready),
    .n_req_i       (t_req),
    .n_rsp_valid_o (t_rsp_valid),
    .n_rsp_o       (t_rsp),
    .w_req_valid_i (wm_req_valid[0]),
    .w_req_ready_o (wm_req_ready[0]),
    .w_req_i       (wm_req[0]),
    .w_rsp_valid_o (wm_rsp_valid[0]),
    .w_rsp_o       (wm_rsp[0])
  );

  // ---------------------------------------------------------------------- barrier
  cluster_barrier #(.N(NR_CORES)) i_barrier (
    .clk_i, .rst_ni,
    .mask_i    ('1),
    .arrive_i  (barrier_arrive_i),
    .release_o (barrier_release_o)
  );

  wire unused = dma_busy;
endmodule
