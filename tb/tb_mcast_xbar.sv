// Testbench for mcast_xbar: 3 slave ports, 4 master ports with behavioural
// memories that stall at random. Checks unicast writes and reads through every
// path, multicast writes (every named memory receives exactly one copy and the
// master sees exactly one response), overlapping multicasts from all masters at
// once, decode errors and the default route.
module tb_mcast_xbar;
  import occamy_pkg::*;
  localparam int unsigned NS = 3, NM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rule_t [NM-1:0] rules;
  logic [NS-1:0] s_valid, s_ready, r_valid;
  nreq_t s_req [NS];
  nrsp_t r_rsp [NS];
  logic [NM-1:0] m_valid, m_ready, m_rvalid;
  nreq_t m_req [NM];
  nrsp_t m_rsp [NM];
  int    writes [NM];
  int checks = 0, failures = 0;

  mcast_xbar #(.NS(NS), .NM(NM), .MCAST(1'b1), .DEFAULT_EN(1'b1), .DEFAULT_PORT(3),
               .NO_DEFAULT_SLV(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .rules_i(rules),
    .slv_req_valid_i(s_valid), .slv_req_ready_o(s_ready), .slv_req_i(s_req),
    .slv_rsp_valid_o(r_valid), .slv_rsp_o(r_rsp),
    .mst_req_valid_o(m_valid), .mst_req_ready_i(m_ready), .mst_req_o(m_req),
    .mst_rsp_valid_i(m_rvalid), .mst_rsp_i(m_rsp));

  for (genvar m = 0; m < NM; m++) begin : g_mem
    tb_nmem i_mem (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(m_valid[m]), .req_ready_o(m_ready[m]),
                   .req_i(m_req[m]), .rsp_valid_o(m_rvalid[m]), .rsp_o(m_rsp[m]), .writes_o(writes[m]));
  end

  // responses per slave port
  int rsp_cnt [NS];
  always @(posedge clk) for (int i = 0; i < NS; i++) if (r_valid[i]) rsp_cnt[i]++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xfer(int s, bit wr, addr_t a, addr_t m, logic [63:0] d, output nrsp_t r);
    int n_before = rsp_cnt[s];
    s_req[s] = '{write: wr, addr: a, mask: m, wdata: d, strb: 8'hFF};
    s_valid[s] = 1'b1;
    do @(posedge clk); while (!s_ready[s]);
    #1 s_valid[s] = 1'b0;
    while (!r_valid[s]) @(posedge clk);
    r = r_rsp[s];
    @(posedge clk); #1;
    chk(rsp_cnt[s] == n_before + 1, $sformatf("one response on port %0d", s));
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nrsp_t r;
    int w0 [NM];
    for (int i = 0; i < NS; i++) begin s_valid[i] = 0; s_req[i] = '0; rsp_cnt[i] = 0; end
    // four clusters of one quadrant as the regions; port 3 is the default (up)
    for (int m = 0; m < 3; m++) rules[m] = region(cluster_base(0, m), CLUSTER_SIZE);
    rules[3] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // unicast write then read back, every slave to every cluster region
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < 3; m++) begin
        addr_t a;
        a = cluster_base(0, m) + 32'h100 + 8 * s;
        xfer(s, 1, a, '0, 64'hA000 + 16 * s + m, r);
        chk(!r.err, "write ok");
        xfer(s, 0, a, '0, '0, r);
        chk(r.rdata == 64'hA000 + 16 * s + m && !r.err, $sformatf("read back s%0d m%0d got %h", s, m, r.rdata));
      end
    // default route from ports 0 and 1, decode error from port 2
    xfer(0, 1, 32'h7000_0000, '0, 64'h55, r);
    chk(!r.err && g_mem[3].i_mem.peek(32'h7000_0000) == 64'h55, $sformatf("default route err=%0b d=%h", r.err, g_mem[3].i_mem.peek(32'h7000_0000)));
    xfer(2, 1, 32'h7000_0008, '0, 64'h66, r);
    chk(r.err, "decode error on the port that may not go up");
    chk(g_mem[3].i_mem.peek(32'h7000_0008) == 64'h0, "nothing written on decode error");

    // multicast to clusters 0 and 2 (bit 19 masked) and to 0..3 (bits 18, 19)
    for (int m = 0; m < NM; m++) w0[m] = writes[m];
    xfer(1, 1, cluster_base(0, 0) + 32'h200, 32'h1 << 19, 64'hBEEF, r);
    chk(!r.err, "multicast ok");
    chk(writes[0] == w0[0] + 1 && writes[2] == w0[2] + 1 && writes[1] == w0[1] && writes[3] == w0[3],
        "multicast copies");
    chk(g_mem[0].i_mem.peek(cluster_base(0, 0) + 32'h200) == 64'hBEEF &&
        g_mem[2].i_mem.peek(cluster_base(0, 2) + 32'h200) == 64'hBEEF, "multicast data");
    for (int m = 0; m < NM; m++) w0[m] = writes[m];
    xfer(0, 1, cluster_base(0, 1) + 32'h208, 32'h3 << 18, 64'hCAFE, r);
    chk(writes[0] == w0[0] + 1 && writes[1] == w0[1] + 1 && writes[2] == w0[2] + 1, "multicast to three rules");
    // a read ignores the mask
    xfer(0, 0, cluster_base(0, 1) + 32'h208, 32'h3 << 18, '0, r);
    chk(r.rdata == 64'hCAFE, "read with mask reads one target");

    // overlapping multicasts from all three slaves at once
    for (int m = 0; m < NM; m++) w0[m] = writes[m];
    fork
      for (int k = 0; k < 20; k++) xfer(0, 1, cluster_base(0, 0) + 32'h400 + 8*k, 32'h3 << 18, 64'h1000 + k, r);
      for (int k = 0; k < 20; k++) xfer(1, 1, cluster_base(0, 2) + 32'h600 + 8*k, 32'h1 << 19, 64'h2000 + k, r);
      for (int k = 0; k < 20; k++) xfer(2, 1, cluster_base(0, 1) + 32'h800 + 8*k, '0, 64'h3000 + k, r);
    join
    chk(writes[0] == w0[0] + 40 && writes[1] == w0[1] + 40 && writes[2] == w0[2] + 40 && writes[3] == w0[3], "concurrent multicast counts");
    for (int k = 0; k < 20; k++) begin
      chk(g_mem[1].i_mem.peek(cluster_base(0, 1) + 32'h400 + 8*k) == 64'h1000 + k, "concurrent data 0");
      chk(g_mem[2].i_mem.peek(cluster_base(0, 2) + 32'h600 + 8*k) == 64'h2000 + k, "concurrent data 1");
      chk(g_mem[1].i_mem.peek(cluster_base(0, 1) + 32'h800 + 8*k) == 64'h3000 + k, "concurrent data 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
