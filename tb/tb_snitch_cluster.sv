// Testbench for snitch_cluster (cluster 1 of quadrant 0). The testbench plays
// the nine cores, the instruction cache and the quadrant: a behavioural narrow
// slave on the narrow up-port and a wide memory on the wide up-port. Checks
// core loads and stores to the local TCDM with their one-cycle latency, requests
// arriving from the quadrant (TCDM writes and a multicast-encoded MCIP store that
// wakes all cores), core requests leaving the cluster, the DMA bringing data from
// the wide memory into the TCDM and writing results back, the refill port, and
// the hardware barrier.
module tb_snitch_cluster;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam addr_t BASE = 32'h1004_0000;   // cluster 1 of quadrant 0

  logic [8:0] cv = '0, crdy, crv, mcip, mclr = '0, barr = '0;
  nreq_t cq [9]; nrsp_t cs [9];
  logic brel;
  logic dv = 0, drdy, drv; nreq_t dq = '0; nrsp_t ds;
  logic iv = 0, irdy, irv; wreq_t iq = '0; wrsp_t is_;
  logic niv = 0, nirdy, nirv; nreq_t niq = '0; nrsp_t nis;
  logic nov, nordy, norv; nreq_t noq; nrsp_t nos;
  logic wiv = 0, wirdy, wirv; wreq_t wiq = '0; wrsp_t wis;
  logic wov, wordy, worv; wreq_t woq; wrsp_t wos;
  int   nwrites;
  int checks = 0, failures = 0;

  snitch_cluster dut (.clk_i(clk), .rst_ni(rst_n), .cluster_base_i(BASE),
    .core_req_valid_i(cv), .core_req_ready_o(crdy), .core_req_i(cq), .core_rsp_valid_o(crv), .core_rsp_o(cs),
    .mcip_o(mcip), .mcip_clr_i(mclr), .barrier_arrive_i(barr), .barrier_release_o(brel),
    .dma_req_valid_i(dv), .dma_req_ready_o(drdy), .dma_req_i(dq), .dma_rsp_valid_o(drv), .dma_rsp_o(ds),
    .ic_req_valid_i(iv), .ic_req_ready_o(irdy), .ic_req_i(iq), .ic_rsp_valid_o(irv), .ic_rsp_o(is_),
    .nw_in_req_valid_i(niv), .nw_in_req_ready_o(nirdy), .nw_in_req_i(niq), .nw_in_rsp_valid_o(nirv), .nw_in_rsp_o(nis),
    .nw_out_req_valid_o(nov), .nw_out_req_ready_i(nordy), .nw_out_req_o(noq), .nw_out_rsp_valid_i(norv), .nw_out_rsp_i(nos),
    .ww_in_req_valid_i(wiv), .ww_in_req_ready_o(wirdy), .ww_in_req_i(wiq), .ww_in_rsp_valid_o(wirv), .ww_in_rsp_o(wis),
    .ww_out_req_valid_o(wov), .ww_out_req_ready_i(wordy), .ww_out_req_o(woq), .ww_out_rsp_valid_i(worv), .ww_out_rsp_i(wos));

  tb_nmem #(.STALL(1'b1)) i_up (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(nov), .req_ready_o(nordy), .req_i(noq),
    .rsp_valid_o(norv), .rsp_o(nos), .writes_o(nwrites));
  spm #(.DW(WIDE_W), .SIZE(65536), .req_t(wreq_t), .rsp_t(wrsp_t)) i_wmem (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(wov), .req_ready_o(wordy), .req_i(woq), .rsp_valid_o(worv), .rsp_o(wos));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // one core access; lat counts clock edges between the accepting edge and the edge
  // that returns the response (0 = response in the following cycle)
  task automatic core(int p, bit wr, addr_t a, logic [63:0] d, output logic [63:0] r, output int lat);
    @(negedge clk);
    cv[p] = 1; cq[p] = '{write: wr, addr: a, mask: '0, wdata: d, strb: '1};
    do @(posedge clk); while (!crdy[p]);
    #1 cv[p] = 0;
    lat = 0;
    while (!crv[p]) begin @(posedge clk); #1; lat++; end
    r = cs[p].rdata;
  endtask
  task automatic nin(bit wr, addr_t a, addr_t m, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    niv = 1; niq = '{write: wr, addr: a, mask: m, wdata: d, strb: '1};
    do @(posedge clk); while (!nirdy);
    #1 niv = 0;
    while (!nirv) @(posedge clk);
    r = nis.rdata;
  endtask
  task automatic dma(bit wr, addr_t offs, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    dv = 1; dq = '{write: wr, addr: offs, mask: '0, wdata: d, strb: '1};
    do @(posedge clk); while (!drdy);
    #1 dv = 0;
    while (!drv) @(posedge clk);
    r = ds.rdata;
  endtask
  task automatic dma_copy(addr_t src, addr_t dst, int bytes);
    logic [63:0] r;
    dma(1, DMA_SRC_OFFS, 64'(src), r);
    dma(1, DMA_DST_OFFS, 64'(dst), r);
    dma(1, DMA_LEN_OFFS, 64'(bytes), r);
    dma(1, DMA_START_OFFS, 0, r);
    do dma(0, DMA_START_OFFS, 0, r); while (r[0]);
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] r;
    int lat;
    for (int p = 0; p < 9; p++) cq[p] = '0;
    for (int i = 0; i < 64; i++) for (int k = 0; k < 8; k++) i_wmem.mem[i][64*k +: 64] = 64'(i * 8 + k + 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // local TCDM
    for (int p = 0; p < 9; p++) core(p, 1, BASE + 8 * p, 64'h100 + p, r, lat);
    for (int p = 0; p < 9; p++) begin
      core(p, 0, BASE + 8 * ((p + 1) % 9), '0, r, lat);
      chk(r == 64'h100 + (p + 1) % 9, $sformatf("core %0d TCDM read", p));
      chk(lat == 0, $sformatf("TCDM response in the cycle after the request (%0d)", lat));
    end
    // from the quadrant: TCDM and a multicast-encoded MCIP store
    nin(1, BASE + 32'h0, '0, 64'hFEED, r);
    core(3, 0, BASE, '0, r, lat);
    chk(r == 64'hFEED, "remote write seen by a core");
    nin(0, BASE + 8 * 2, '0, '0, r);
    chk(r == 64'h102, "remote read of TCDM");
    nin(1, cluster_base(2, 3) + CL_PERIPH_OFFS + MCIP_SET_OFFS, 32'h7C_0000, 64'h1FF, r);
    chk(mcip == 9'h1FF, "multicast MCIP store wakes all cores");
    @(negedge clk); mclr = '1; @(negedge clk); mclr = '0;
    chk(mcip == 0, "cores clear their MCIP bits locally");
    // core to outside the cluster
    core(8, 1, CLINT_BASE + 32'h9000, 64'h1, r, lat);
    chk(nwrites == 1 && i_up.peek(CLINT_BASE + 32'h9000) == 64'h1, "core store leaves the cluster");
    core(0, 1, BASE + CL_PERIPH_OFFS + MCIP_SET_OFFS, 64'h002, r, lat);
    chk(mcip == 9'h002, "core sets a cluster MCIP bit through the cluster crossbar");
    @(negedge clk); mclr = '1; @(negedge clk); mclr = '0;
    // DMA in: 4 beats from the wide memory into TCDM offset 0x1000
    dma_copy(WSPM_BASE + 64 * 4, BASE + 32'h1000, 256);
    for (int w = 0; w < 32; w++) begin
      core(w % 8, 0, BASE + 32'h1000 + 8 * w, '0, r, lat);
      chk(r == 64'(32 + w + 1), $sformatf("DMA data word %0d = %0d", w, r));
    end
    // compute cores modify the data, then barrier, then DMA writes back
    for (int w = 0; w < 32; w++) core(w % 8, 1, BASE + 32'h2000 + 8 * w, 64'(3 * w), r, lat);
    fork
      begin @(negedge clk); barr = 9'h0FF; @(negedge clk); barr = '0; end
      begin repeat (4) @(negedge clk); chk(!brel, "no release before the DM core"); barr[8] = 1; #1;
            chk(brel, "release on the last arrival"); @(negedge clk); barr[8] = 0; end
    join
    dma_copy(BASE + 32'h2000, WSPM_BASE + 64 * 32, 256);
    for (int w = 0; w < 32; w++) chk(i_wmem.mem[32 + w / 8][64 * (w % 8) +: 64] == 64'(3 * w), "writeback");
    // instruction cache refill from the wide memory
    @(negedge clk); iv = 1; iq = '{write: 0, addr: WSPM_BASE + 64 * 5, mask: '0, wdata: '0, strb: '0};
    do @(posedge clk); while (!irdy);
    #1 iv = 0;
    while (!irv) @(posedge clk);
    chk(is_.rdata[63:0] == 64'(41), "refill read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
