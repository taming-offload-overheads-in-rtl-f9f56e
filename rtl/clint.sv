// clint: core-local interruptor with job completion units.
//
// Memory-mapped narrow slave (1-cycle response, always ready). One MSIP
// (machine software interrupt pending) bit per hart at offset 4*hart: any hart
// raises an inter-processor interrupt by writing 1 and the target clears it by
// writing 0. Hart 0 is the host. NR_JOBS job completion units follow (offload at
// 0x8000 + 8*job, arrivals at 0x9000 + 8*job); when one completes it sets the
// host MSIP and its job ID becomes the interrupt cause, readable at 0xA000. If
// several jobs complete together the lowest ID fires first. The register offsets,
// NR_JOBS and the cause register layout are this design's choices; the paper
// gives the MSIP register, the unit's behaviour and that the job ID is the cause.
// Timers (mtime/mtimecmp) are not part of this model.
module clint
  import occamy_pkg::*;
#(
  parameter int unsigned NR_HARTS = 289,   // 1 host + 32 clusters x 9 cores
  parameter int unsigned NR_JOBS  = 4,
  parameter int unsigned CNT_W    = 6
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                req_valid_i,
  output logic                req_ready_o,
  input  nreq_t               req_i,
  output logic                rsp_valid_o,
  output nrsp_t               rsp_o,
  output logic [NR_HARTS-1:0] msip_o,
  output logic [7:0]          cause_o
);
  localparam int unsigned JW = $clog2(NR_JOBS > 1 ? NR_JOBS : 2);

  logic [NR_HARTS-1:0]          msip_q;
  logic [7:0]                   cause_q;
  logic [NR_JOBS-1:0]           off_we, arrive, done, fire, allow;
  logic [NR_JOBS-1:0][CNT_W-1:0] offload, arrivals;

  wire        wr   = req_valid_i && req_i.write;
  wire        rd   = req_valid_i && !req_i.write;
  wire [15:0] offs = req_i.addr[15:0];

  assign req_ready_o = 1'b1;

  for (genvar j = 0; j < NR_JOBS; j++) begin : g_job
    assign off_we[j] = wr && (offs == 16'(CLINT_OFFLOAD_OFFS + 8*j));
    assign arrive[j] = wr && (offs == 16'(CLINT_ARRIVALS_OFFS + 8*j));
    // Lower job IDs take precedence when several complete in the same cycle.
    if (j == 0) begin : g_first
      assign allow[j] = 1'b1;
    end else begin : g_rest
      assign allow[j] = !(|done[j-1:0]);
    end
    job_completion_unit #(.CNT_W(CNT_W)) i_jcu (
      .clk_i, .rst_ni,
      .offload_we_i    (off_we[j]),
      .offload_wdata_i (req_i.wdata[CNT_W-1:0]),
      .arrive_i        (arrive[j]),
      .msip_pending_i  (msip_q[0]),
      .fire_allow_i    (allow[j]),
      .offl_done_o     (done[j]),
      .fire_o          (fire[j]),
      .offload_o       (offload[j]),
      .arrivals_o      (arrivals[j])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      msip_q      <= '0;
      cause_q     <= '0;
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
    end else begin
      rsp_valid_o <= req_valid_i;
      rsp_o       <= '0;
      // software writes to MSIP: two harts per 64-bit word
      if (wr && (offs < 16'h8000)) begin
        for (int h = 0; h < NR_HARTS; h++) begin
          if ((offs[15:3] == 13'(h / 2)) && req_i.strb[4*(h%2)])
            msip_q[h] <= req_i.wdata[32*(h%2)];
        end
      end
      // job completion sets the host MSIP and the cause
      for (int j = 0; j < NR_JOBS; j++) begin
        if (fire[j]) begin
          msip_q[0] <= 1'b1;
          cause_q   <= 8'(j);
        end
      end
      if (rd) begin
        if (offs < 16'h8000) begin
          for (int h = 0; h < NR_HARTS; h++)
            if (offs[15:3] == 13'(h / 2)) rsp_o.rdata[32*(h%2)] <= msip_q[h];
        end
        for (int j = 0; j < NR_JOBS; j++) begin
          if (offs == 16'(CLINT_OFFLOAD_OFFS + 8*j))  rsp_o.rdata[CNT_W-1:0] <= offload[j];
          if (offs == 16'(CLINT_ARRIVALS_OFFS + 8*j)) rsp_o.rdata[CNT_W-1:0] <= arrivals[j];
        end
        if (offs == 16'(CLINT_CAUSE_OFFS)) rsp_o.rdata[7:0] <= cause_q;
      end
    end
  end

  assign msip_o  = msip_q;
  assign cause_o = cause_q;

  // At most one job fires per cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(fire));
  wire unused = ^{req_i.mask, JW};
endmodule
