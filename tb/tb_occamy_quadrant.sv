// Testbench for occamy_quadrant (quadrant 2, four clusters). The testbench plays
// the cores and DMA register ports of every cluster, the top-level narrow
// crossbar (requests into nw_in, a behavioural slave on nw_out) and the wide
// system memory on ww_out. Checks that a multicast store from above reaches
// exactly the clusters named by its mask (Fig. 5 style encoding), that a
// multicast TCDM store lands in all four clusters, that a core reaches another
// cluster of the same quadrant and a target outside it, and that a DMA can copy
// between two clusters' TCDMs and from the wide memory.
module tb_occamy_quadrant;
  import occamy_pkg::*;
  localparam int NRC = 4, Q = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [8:0] cv [NRC], crdy [NRC], crv [NRC], mcip [NRC], mclr [NRC], barr [NRC];
  nreq_t cq [NRC][9]; nrsp_t cs [NRC][9];
  logic [NRC-1:0] brel, dv = '0, drdy, drv, iv = '0, irdy, irv;
  nreq_t dq [NRC]; nrsp_t ds [NRC];
  wreq_t iq [NRC]; wrsp_t is_ [NRC];
  logic niv = 0, nirdy, nirv; nreq_t niq = '0; nrsp_t nis;
  logic nov, nordy, norv; nreq_t noq; nrsp_t nos;
  logic wiv = 0, wirdy, wirv; wreq_t wiq = '0; wrsp_t wis;
  logic wov, wordy, worv; wreq_t woq; wrsp_t wos;
  int nwrites;
  int checks = 0, failures = 0;

  occamy_quadrant #(.QUADRANT(Q)) dut (.clk_i(clk), .rst_ni(rst_n),
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
  task automatic core(int c, int p, bit wr, addr_t a, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    cv[c][p] = 1; cq[c][p] = '{write: wr, addr: a, mask: '0, wdata: d, strb: '1};
    do @(posedge clk); while (!crdy[c][p]);
    #1 cv[c][p] = 0;
    while (!crv[c][p]) @(posedge clk);
    r = cs[c][p].rdata;
  endtask
  task automatic nin(bit wr, addr_t a, addr_t m, logic [63:0] d, output logic [63:0] r, output bit err);
    @(negedge clk);
    niv = 1; niq = '{write: wr, addr: a, mask: m, wdata: d, strb: '1};
    do @(posedge clk); while (!nirdy);
    #1 niv = 0;
    while (!nirv) @(posedge clk);
    r = nis.rdata; err = nis.err;
  endtask
  task automatic dma(int c, bit wr, addr_t offs, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    dv[c] = 1; dq[c] = '{write: wr, addr: offs, mask: '0, wdata: d, strb: '1};
    do @(posedge clk); while (!drdy[c]);
    #1 dv[c] = 0;
    while (!drv[c]) @(posedge clk);
    r = ds[c].rdata;
  endtask
  task automatic dma_copy(int c, addr_t src, addr_t dst, int bytes);
    logic [63:0] r;
    dma(c, 1, DMA_SRC_OFFS, 64'(src), r);
    dma(c, 1, DMA_DST_OFFS, 64'(dst), r);
    dma(c, 1, DMA_LEN_OFFS, 64'(bytes), r);
    dma(c, 1, DMA_START_OFFS, 0, r);
    do dma(c, 0, DMA_START_OFFS, 0, r); while (r[0]);
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] r;
    bit err;
    for (int c = 0; c < NRC; c++) begin
      cv[c] = '0; mclr[c] = '0; barr[c] = '0; dq[c] = '0; iq[c] = '0;
      for (int p = 0; p < 9; p++) cq[c][p] = '0;
    end
    for (int i = 0; i < 16; i++) for (int k = 0; k < 8; k++) i_wmem.mem[i][64*k +: 64] = 64'(1000 + i * 8 + k);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fig. 5: cluster 1 of quadrant 2 with bits 19 and 21 masked; in this
    // quadrant that names clusters 1 and 3
    nin(1, cluster_base(Q, 1) + CL_PERIPH_OFFS + MCIP_SET_OFFS, 32'h28_0000, 64'h1FF, r, err);
    chk(!err, "multicast MCIP store acknowledged without error");
    for (int c = 0; c < NRC; c++)
      chk(mcip[c] == ((c % 2 == 1) ? 9'h1FF : 9'h0), $sformatf("cluster %0d MCIP after multicast", c));
    // multicast TCDM store to all four clusters of the quadrant
    nin(1, cluster_base(Q, 0) + 32'h40, 32'h0C_0000, 64'hABCD, r, err);
    for (int c = 0; c < NRC; c++) begin
      core(c, 0, 1'b0, cluster_base(Q, c) + 32'h40, '0, r);
      chk(r == 64'hABCD, $sformatf("multicast TCDM store in cluster %0d", c));
    end
    // unicast read from the top
    nin(0, cluster_base(Q, 3) + 32'h40, '0, '0, r, err);
    chk(r == 64'hABCD && !err, "unicast read from above");
    // core of cluster 0 writes cluster 2's TCDM, core of cluster 2 reads it locally
    core(0, 5, 1'b1, cluster_base(Q, 2) + 32'h80, 64'h5555, r);
    core(2, 1, 1'b0, cluster_base(Q, 2) + 32'h80, '0, r);
    chk(r == 64'h5555, "cluster-to-cluster store inside the quadrant");
    // core going out of the quadrant
    core(3, 8, 1'b1, CLINT_BASE + 32'h9000, 64'h1, r);
    chk(nwrites == 1, "core store leaves the quadrant");
    // cluster 1 fills its TCDM from the wide memory, cluster 3 copies it over
    dma_copy(1, WSPM_BASE, cluster_base(Q, 1) + 32'h1000, 512);
    dma_copy(3, cluster_base(Q, 1) + 32'h1000, cluster_base(Q, 3) + 32'h2000, 512);
    for (int w = 0; w < 64; w += 7) begin
      core(3, w % 8, 1'b0, cluster_base(Q, 3) + 32'h2000 + 8 * w, '0, r);
      chk(r == 64'(1000 + w), $sformatf("DMA chain word %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
