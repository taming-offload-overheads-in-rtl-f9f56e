// cluster_periph: per-cluster MCIP (machine cluster interrupt pending) register.
//
// One pending bit per core of the cluster, packed in one register so that one
// store, possibly a multicast store reaching many clusters, interrupts any set
// of cores. Narrow-network slave with 1-cycle response, always ready: a write to
// MCIP_SET sets the written bits, a write to MCIP_CLR clears them, a read of
// either returns the register. Each core also clears its own bit directly
// (clr_i), the low-latency local path the paper describes. irq_o drives the
// cores' interrupt inputs. The set/clear register split is this design's choice.
module cluster_periph
  import occamy_pkg::*;
#(
  parameter int unsigned NR_CORES_P = NR_CORES
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  req_valid_i,
  output logic                  req_ready_o,
  input  nreq_t                 req_i,
  output logic                  rsp_valid_o,
  output nrsp_t                 rsp_o,
  input  logic [NR_CORES_P-1:0] clr_i,
  output logic [NR_CORES_P-1:0] irq_o
);
  logic [NR_CORES_P-1:0] mcip_q;
  wire [11:0] offs = req_i.addr[11:0];
  wire set = req_valid_i && req_i.write && (offs == 12'(MCIP_SET_OFFS)) && req_i.strb[0];
  wire clr = req_valid_i && req_i.write && (offs == 12'(MCIP_CLR_OFFS)) && req_i.strb[0];

  assign req_ready_o = 1'b1;

  logic [NR_CORES_P-1:0] mcip_d;
  always_comb begin
    mcip_d = mcip_q & ~clr_i;
    if (set) mcip_d = mcip_d | req_i.wdata[NR_CORES_P-1:0];
    if (clr) mcip_d = mcip_d & ~req_i.wdata[NR_CORES_P-1:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mcip_q      <= '0;
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
    end else begin
      mcip_q      <= mcip_d;
      rsp_valid_o <= req_valid_i;
      rsp_o       <= '0;
      rsp_o.rdata[NR_CORES_P-1:0] <= mcip_q;
    end
  end

  assign irq_o = mcip_q;
  wire unused = ^{req_i.mask, req_i.addr[31:12], req_i.wdata[63:NR_CORES_P], req_i.strb[7:1]};
endmodule
