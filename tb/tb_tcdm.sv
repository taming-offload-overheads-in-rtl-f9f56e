// Testbench for tcdm: ten narrow ports and the wide port issue random reads and
// writes (random byte strobes) into a 1 KB window, so bank conflicts are
// frequent. A reference model of the window is updated at every granted write;
// every read response, one cycle after the grant, is compared with it. Also
// checks that conflicts stall (a port waits, then completes), that ports hitting
// different banks are served in the same cycle, and that the wide port is never
// stalled.
module tb_tcdm;
  import occamy_pkg::*;
  localparam int unsigned NP = 10;
  localparam int unsigned WIN = 128;  // words in the test window (1 KB)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0] nv = '0, nr, nrv;
  nreq_t nq [NP];
  nrsp_t ns [NP];
  logic wv = 0, wr_rdy, wrv;
  wreq_t wq = '0;
  wrsp_t ws;
  logic [63:0] model [WIN];
  logic [63:0] exp_n [NP];
  logic [NP-1:0] pend_n = '0;
  logic [511:0] exp_w;
  logic pend_w = 0, chk_en = 0;
  int checks = 0, failures = 0, stalls = 0, multi = 0;

  tcdm #(.NR_PORTS(NP)) dut (.clk_i(clk), .rst_ni(rst_n),
    .n_req_valid_i(nv), .n_req_ready_o(nr), .n_req_i(nq), .n_rsp_valid_o(nrv), .n_rsp_o(ns),
    .w_req_valid_i(wv), .w_req_ready_o(wr_rdy), .w_req_i(wq), .w_rsp_valid_o(wrv), .w_rsp_o(ws));

  function automatic logic [63:0] merge(logic [63:0] old, logic [63:0] d, logic [7:0] s);
    for (int k = 0; k < 8; k++) if (s[k]) old[8*k +: 8] = d[8*k +: 8];
    return old;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // grants: update the model, remember expected read data
  always @(posedge clk) if (rst_n) begin
    int g;
    g = 0;
    if (wv) begin
      int base;
      base = int'(wq.addr[9:6]) * 8;
      chk(wr_rdy, "wide port never stalls");
      for (int k = 0; k < 8; k++) exp_w[64*k +: 64] = model[base + k];
      pend_w <= !wq.write && chk_en;
      if (wq.write) for (int k = 0; k < 8; k++)
        model[base + k] = merge(model[base + k], wq.wdata[64*k +: 64], wq.strb[8*k +: 8]);
    end else pend_w <= 1'b0;
    for (int p = 0; p < NP; p++) begin
      if (nv[p] && nr[p]) begin
        int w;
        w = int'(nq[p].addr[9:3]);
        g++;
        exp_n[p] = model[w];
        pend_n[p] <= !nq[p].write;
        if (nq[p].write) model[w] = merge(model[w], nq[p].wdata, nq[p].strb);
      end else begin
        pend_n[p] <= 1'b0;
        if (nv[p]) stalls++;
      end
    end
    if (g > 1) multi++;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) nq[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill the window through the wide port
    for (int b = 0; b < WIN / 8; b++) begin
      @(negedge clk);
      wv = 1;
      wq = '{write: 1'b1, addr: addr_t'(b * 64), mask: '0,
             wdata: {16{$urandom}}, strb: '1};
    end
    @(negedge clk); wv = 0;
    chk_en = 1;
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check responses to last cycle's grants
      for (int p = 0; p < NP; p++) if (pend_n[p])
        chk(nrv[p] && ns[p].rdata == exp_n[p], $sformatf("port %0d read %h exp %h", p, ns[p].rdata, exp_n[p]));
      if (pend_w) chk(wrv && ws.rdata == exp_w, "wide read");
      // new requests (a stalled request is held)
      for (int p = 0; p < NP; p++) begin
        if (!nv[p] || nr[p]) begin
          nv[p] = ($urandom_range(0, 2) != 0);
          nq[p] = '{write: $urandom_range(0, 1), addr: addr_t'($urandom_range(0, WIN - 1) * 8),
                    mask: '0, wdata: {$urandom, $urandom}, strb: 8'($urandom)};
        end
      end
      wv = ($urandom_range(0, 3) == 0);
      wq = '{write: $urandom_range(0, 1), addr: addr_t'($urandom_range(0, WIN / 8 - 1) * 64), mask: '0,
             wdata: {16{$urandom}}, strb: {8{8'($urandom)}}};
      #1;
    end
    @(negedge clk); nv = '0; wv = 0;
    chk(stalls > 100, $sformatf("bank conflicts stalled ports (%0d)", stalls));
    chk(multi > 100, $sformatf("parallel grants to different banks (%0d)", multi));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
