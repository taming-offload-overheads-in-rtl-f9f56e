// End-to-end testbench for occamy_top at its default size (8 quadrants x 4
// clusters x 9 cores). The testbench plays the host and every core with small
// behavioural programs and runs the offload sequence of the paper's Fig. 3 for
// AXPY with N = 1024 (32 elements per cluster):
//   host: set the job completion unit to 32 clusters, multicast the job
//         arguments into every TCDM and multicast one MCIP store that wakes
//         all 288 cores, then sleep until the CLINT interrupt (MSIP);
//   DM core: clear its MCIP bit, read the arguments from its TCDM, queue two DMA
//         transfers (x and y slices from the wide SPM), barrier;
//   compute cores: clear MCIP, barrier, compute z = a*x + y over the TCDM,
//         barrier; DM core: DMA z back to the wide SPM and store to the arrivals
//         register of the job (Sec. 4.3);
//   host: read the cause (job ID), clear MSIP, check z through the narrow-to-wide
//         bridge and by looking into the wide SPM.
// A second phase runs two one-cluster jobs (IDs 1 and 2) whose completions
// coincide; the host leaves MSIP pending, so the second unit must wait and fire
// only after the host clears MSIP. Integer arithmetic stands in for the FPU.
// Every mechanism is counted by monitors (multicast wake-up, JCU fire,
// delayed fire, DMA queueing, TCDM bank conflicts, wide-network contention,
// barriers, bridge, narrow SPM, peripheral port); any count of zero is a
// failure. The delay from the last arrival store to MSIP is checked against
// the unit's one-cycle behaviour, and the phase durations are printed.
module tb_occamy_top;
  import occamy_pkg::*;
  localparam int NQ = NR_QUADRANTS, NRC = NR_CLUSTERS_PER_Q, NCL = NQ * NRC;
  localparam int N = 1024, NPC = N / NCL;
  localparam addr_t XA = WSPM_BASE, YA = WSPM_BASE + 32'h2000, ZA = WSPM_BASE + 32'h4000;
  localparam addr_t ALL_CLUSTERS = 32'h007C_0000;   // mask over quadrant and cluster bits
  localparam longint A = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic hv = 0, hrdy, hrv, hmsip; nreq_t hq = '0; nrsp_t hs; logic [7:0] hcause;
  logic [NCL*NR_CORES:0] msip;
  logic [8:0] cv [NQ][NRC], crdy [NQ][NRC], crv [NQ][NRC], mcip [NQ][NRC], mclr [NQ][NRC], barr [NQ][NRC];
  nreq_t cq [NQ][NRC][NR_CORES]; nrsp_t cs [NQ][NRC][NR_CORES];
  logic [NRC-1:0] brel [NQ], dv [NQ], drdy [NQ], drv [NQ], iv [NQ], irdy [NQ], irv [NQ];
  nreq_t dq [NQ][NRC]; nrsp_t ds [NQ][NRC];
  wreq_t iq [NQ][NRC]; wrsp_t is_ [NQ][NRC];
  logic pv, prdy, prv; nreq_t pq; nrsp_t ps; int pwrites;
  int checks = 0, failures = 0;

  occamy_top dut (.clk_i(clk), .rst_ni(rst_n),
    .host_req_valid_i(hv), .host_req_ready_o(hrdy), .host_req_i(hq), .host_rsp_valid_o(hrv), .host_rsp_o(hs),
    .host_msip_o(hmsip), .host_cause_o(hcause), .msip_o(msip),
    .core_req_valid_i(cv), .core_req_ready_o(crdy), .core_req_i(cq), .core_rsp_valid_o(crv), .core_rsp_o(cs),
    .mcip_o(mcip), .mcip_clr_i(mclr), .barrier_arrive_i(barr), .barrier_release_o(brel),
    .dma_req_valid_i(dv), .dma_req_ready_o(drdy), .dma_req_i(dq), .dma_rsp_valid_o(drv), .dma_rsp_o(ds),
    .ic_req_valid_i(iv), .ic_req_ready_o(irdy), .ic_req_i(iq), .ic_rsp_valid_o(irv), .ic_rsp_o(is_),
    .periph_req_valid_o(pv), .periph_req_ready_i(prdy), .periph_req_o(pq),
    .periph_rsp_valid_i(prv), .periph_rsp_i(ps));

  tb_nmem #(.STALL(1'b1)) i_periph (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(pv), .req_ready_o(prdy), .req_i(pq),
    .rsp_valid_o(prv), .rsp_o(ps), .writes_o(pwrites));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- monitors
  int n_mcast_wake [NQ][NRC];   // clusters woken (all 9 MCIP bits) per wake-up
  int n_cluster_done [NQ][NRC];
  int n_conflict [NQ][NRC];     // cycles with two or more requesters on a TCDM bank
  int n_release [NQ][NRC];      // barrier releases
  int n_dma_queued [NQ][NRC];   // DMA launched while the previous one was still busy
  int n_wide_contend = 0;       // cycles with two or more quadrants requesting the wide SPM
  int n_host_irq = 0, n_delayed_fire = 0, n_bridge = 0, n_nspm = 0, n_mcast_store = 0;
  longint last_arrival = 0, irq_delay = 0;
  logic hmsip_q = 0;

  always @(posedge clk) begin
    int k;
    k = 0;
    for (int q = 0; q < NQ; q++)
      if (dut.ws_req_valid[q] && dut.ws_req[q].addr >= WSPM_BASE) k++;
    if (k > 1) n_wide_contend++;
    if (dut.nm_req_valid[NQ] && dut.nm_req_ready[NQ] && dut.nm_req[NQ].write &&
        dut.nm_req[NQ].addr[15:12] == 4'h9) last_arrival = cyc;
    if (hv && hrdy && hq.mask != '0) n_mcast_store++;
    hmsip_q <= hmsip;
    if (rst_n && hmsip && !hmsip_q) begin
      if (n_host_irq == 0) irq_delay = cyc - last_arrival;   // phase 1: no pending MSIP
      n_host_irq++;
    end
  end

  // ---------------------------------------------------------------- host
  task automatic host(bit wr, addr_t a, addr_t m, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    hv = 1; hq = '{write: wr, addr: a, mask: m, wdata: d, strb: '1};
    do @(posedge clk); while (!hrdy);
    #1 hv = 0;
    while (!hrv) @(posedge clk);
    r = hs.rdata;
    chk(!hs.err, $sformatf("host access %h without error", a));
  endtask

  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] r;
    longint t0, t1, t2;
    int c1, c2, woken, done;
    for (int i = 0; i < N / 8; i++)
      for (int k = 0; k < 8; k++) begin
        dut.i_wspm.mem[i][64*k +: 64]        = 64'(i * 8 + k + 1);          // x
        dut.i_wspm.mem[128 + i][64*k +: 64]  = 64'(3 * (i * 8 + k) + 7);    // y
        dut.i_wspm.mem[256 + i][64*k +: 64]  = '0;                          // z
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // narrow SPM and the peripheral port
    host(1, NSPM_BASE + 32'h100, '0, 64'h1234_5678, r);
    host(0, NSPM_BASE + 32'h100, '0, '0, r);
    chk(r == 64'h1234_5678, "narrow SPM read-back"); n_nspm++;
    host(1, PERIPH_BASE + 32'h10, '0, 64'h77, r);
    chk(pwrites == 1, "peripheral store");

    // ---- phase 1: AXPY on all 32 clusters
    t0 = cyc;
    host(1, CLINT_BASE + CLINT_OFFLOAD_OFFS, '0, 64'(NCL), r);
    host(1, cluster_base(0, 0) + 32'h00, ALL_CLUSTERS, 64'd0, r);   // kind: AXPY
    host(1, cluster_base(0, 0) + 32'h08, ALL_CLUSTERS, 64'd0, r);   // job ID
    host(1, cluster_base(0, 0) + 32'h10, ALL_CLUSTERS, 64'(A), r);
    host(1, cluster_base(0, 0) + 32'h18, ALL_CLUSTERS, 64'(NPC), r);
    host(1, cluster_base(0, 0) + 32'h20, ALL_CLUSTERS, 64'(XA), r);
    host(1, cluster_base(0, 0) + 32'h28, ALL_CLUSTERS, 64'(YA), r);
    host(1, cluster_base(0, 0) + 32'h30, ALL_CLUSTERS, 64'(ZA), r);
    host(1, cluster_base(0, 0) + CL_PERIPH_OFFS + MCIP_SET_OFFS, ALL_CLUSTERS, 64'h1FF, r);
    t1 = cyc;
    while (!hmsip) @(posedge clk);
    t2 = cyc;
    host(0, CLINT_BASE + CLINT_CAUSE_OFFS, '0, '0, r);
    chk(r[7:0] == 8'd0, "cause is job 0");
    chk(hcause == 8'd0, "cause output is job 0");
    host(1, CLINT_BASE + CLINT_MSIP_OFFS, '0, 64'h0, r);
    chk(!hmsip, "host clears its MSIP");
    woken = 0; done = 0;
    for (int q = 0; q < NQ; q++) for (int c = 0; c < NRC; c++) begin
      woken += n_mcast_wake[q][c]; done += n_cluster_done[q][c];
    end
    chk(woken == NCL, $sformatf("one multicast store woke %0d clusters", woken));
    chk(done == NCL, $sformatf("%0d clusters finished before the interrupt", done));
    for (int i = 0; i < N; i++)
      chk(dut.i_wspm.mem[256 + i / 8][64 * (i % 8) +: 64] == 64'(A * (i + 1) + 3 * i + 7),
          $sformatf("z[%0d]", i));
    for (int i = 0; i < N; i += 97) begin
      host(0, ZA + 8 * i, '0, '0, r);
      chk(r == 64'(A * (i + 1) + 3 * i + 7), $sformatf("z[%0d] through the bridge", i));
      n_bridge++;
    end
    $display("phase 1: offload stores %0d cycles, wake-up to interrupt %0d cycles, total %0d cycles",
             t1 - t0, t2 - t1, t2 - t0);

    // ---- phase 2: two single-cluster jobs finish together; MSIP stays pending
    host(1, CLINT_BASE + CLINT_OFFLOAD_OFFS + 8, '0, 64'd1, r);
    host(1, CLINT_BASE + CLINT_OFFLOAD_OFFS + 16, '0, 64'd1, r);
    host(1, cluster_base(1, 0) + 32'h00, '0, 64'd1, r);   // kind: empty job
    host(1, cluster_base(1, 0) + 32'h08, '0, 64'd1, r);   // job 1
    host(1, cluster_base(6, 3) + 32'h00, '0, 64'd1, r);
    host(1, cluster_base(6, 3) + 32'h08, '0, 64'd2, r);   // job 2
    host(1, cluster_base(1, 0) + CL_PERIPH_OFFS + MCIP_SET_OFFS, '0, 64'h1FF, r);
    host(1, cluster_base(6, 3) + CL_PERIPH_OFFS + MCIP_SET_OFFS, '0, 64'h1FF, r);
    while (!(n_cluster_done[1][0] == 2 && n_cluster_done[6][3] == 2)) @(posedge clk);
    repeat (50) @(posedge clk);
    chk(hmsip, "first job interrupt pending");
    c1 = int'(hcause);
    host(1, CLINT_BASE + CLINT_MSIP_OFFS, '0, 64'h0, r);
    repeat (3) @(posedge clk);
    chk(hmsip, "second job fires once MSIP was cleared");
    c2 = int'(hcause);
    if (hmsip && c1 != c2) n_delayed_fire++;
    chk((c1 == 1 && c2 == 2) || (c1 == 2 && c2 == 1), $sformatf("causes %0d then %0d", c1, c2));
    host(1, CLINT_BASE + CLINT_MSIP_OFFS, '0, 64'h0, r);
    repeat (5) @(posedge clk);
    chk(!hmsip, "no further interrupt");
    chk(irq_delay <= 2, $sformatf("MSIP within two cycles of the last arrival store (%0d)", irq_delay));

    begin
      int conf, rel, dq_;
      conf = 0; rel = 0; dq_ = 0;
      for (int q = 0; q < NQ; q++) for (int c = 0; c < NRC; c++) begin
        conf += n_conflict[q][c]; rel += n_release[q][c]; dq_ += n_dma_queued[q][c];
      end
      chk(rel == 2 * NCL, $sformatf("barrier releases %0d", rel));
      $display("mechanisms: multicast stores %0d, clusters woken %0d, host interrupts %0d, delayed fires %0d,",
               n_mcast_store, woken, n_host_irq, n_delayed_fire);
      $display("  DMA queued %0d, TCDM conflict cycles %0d, wide SPM contention cycles %0d, barrier releases %0d,",
               dq_, conf, n_wide_contend, rel);
      $display("  bridge reads %0d, narrow SPM %0d, peripheral stores %0d", n_bridge, n_nspm, pwrites);
      chk(n_mcast_store > 0, "mechanism: multicast store");
      chk(woken > 0, "mechanism: multicast wake-up");
      chk(n_host_irq == 3, "mechanism: job completion interrupts");
      chk(n_delayed_fire > 0, "mechanism: delayed fire while MSIP pending");
      chk(dq_ > 0, "mechanism: DMA descriptor queue");
      chk(conf > 0, "mechanism: TCDM bank conflicts");
      chk(n_wide_contend > 0, "mechanism: wide network contention");
      chk(rel > 0, "mechanism: hardware barrier");
      chk(n_bridge > 0, "mechanism: narrow-to-wide bridge");
      chk(n_nspm > 0, "mechanism: narrow SPM");
      chk(pwrites > 0, "mechanism: peripheral port");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- clusters
  for (genvar q = 0; q < NQ; q++) begin : g_q
    for (genvar c = 0; c < NRC; c++) begin : g_c
      localparam addr_t BASE = cluster_base(q, c);
      localparam int K = q * NRC + c;
      int rel_cnt = 0;
      logic l_dv = 0; nreq_t l_dq = '0;
      assign dv[q][c] = l_dv;
      assign dq[q][c] = l_dq;
      assign iv[q][c] = 1'b0;
      assign iq[q][c] = '0;

      always @(posedge clk) begin
        int k;
        if (brel[q][c]) rel_cnt <= rel_cnt + 1;
        for (int b = 0; b < 32; b++) begin
          k = $countones(dut.g_quadrant[q].i_quadrant.g_cluster[c].i_cluster.i_tcdm.breq[b]);
          if (k > 1) n_conflict[q][c] <= n_conflict[q][c] + 1;
        end
      end
      initial begin
        n_mcast_wake[q][c] = 0; n_cluster_done[q][c] = 0; n_conflict[q][c] = 0;
        n_release[q][c] = 0; n_dma_queued[q][c] = 0;
      end
      always @(posedge clk) if (brel[q][c]) n_release[q][c] <= n_release[q][c] + 1;
      logic full_q = 0;   // all nine MCIP bits set: one wake-up of the cluster
      always @(posedge clk) begin
        full_q <= mcip[q][c] == 9'h1FF;
        if (mcip[q][c] == 9'h1FF && !full_q) n_mcast_wake[q][c] <= n_mcast_wake[q][c] + 1;
      end

      task automatic dma(bit wr, addr_t offs, logic [63:0] d, output logic [63:0] r);
        @(negedge clk);
        l_dv = 1; l_dq = '{write: wr, addr: offs, mask: '0, wdata: d, strb: '1};
        do @(posedge clk); while (!drdy[q][c]);
        #1 l_dv = 0;
        while (!drv[q][c]) @(posedge clk);
        r = ds[q][c].rdata;
      endtask
      task automatic dma_launch(addr_t src, addr_t dst, int bytes);
        logic [63:0] r;
        dma(1, DMA_SRC_OFFS, 64'(src), r);
        dma(1, DMA_DST_OFFS, 64'(dst), r);
        dma(1, DMA_LEN_OFFS, 64'(bytes), r);
        dma(0, DMA_START_OFFS, 0, r);
        if (r[0]) n_dma_queued[q][c]++;
        dma(1, DMA_START_OFFS, 0, r);
      endtask
      task automatic dma_wait(longint target);
        logic [63:0] r;
        do dma(0, DMA_STATUS_OFFS, 0, r); while (r < target);
      endtask

      for (genvar p = 0; p < NR_CORES; p++) begin : g_p
        logic v = 0, clr = 0, arr = 0;
        nreq_t rq = '0;
        assign cv[q][c][p]   = v;
        assign cq[q][c][p]   = rq;
        assign mclr[q][c][p] = clr;
        assign barr[q][c][p] = arr;

        task automatic acc(bit wr, addr_t a, logic [63:0] d, output logic [63:0] r);
          @(negedge clk);
          v = 1; rq = '{write: wr, addr: a, mask: '0, wdata: d, strb: '1};
          do @(posedge clk); while (!crdy[q][c][p]);
          #1 v = 0;
          while (!crv[q][c][p]) @(posedge clk);
          r = cs[q][c][p].rdata;
          chk(!cs[q][c][p].err, "core access without error");
        endtask
        task automatic barrier();
          int n0;
          n0 = rel_cnt;
          @(negedge clk); arr = 1;
          @(negedge clk); arr = 0;
          while (rel_cnt == n0) @(posedge clk);
        endtask

        initial begin
          logic [63:0] r, kind, job, a, n, xa, ya, za, x, y;
          longint ndone;
          ndone = 0;
          wait (rst_n);
          forever begin
            while (!mcip[q][c][p]) @(posedge clk);
            @(negedge clk); clr = 1; @(negedge clk); clr = 0;   // clear own MCIP bit
            acc(0, BASE + 32'h00, '0, kind);
            acc(0, BASE + 32'h08, '0, job);
            if (kind == 0) begin
              acc(0, BASE + 32'h10, '0, a);
              acc(0, BASE + 32'h18, '0, n);
              if (p == DM_CORE) begin
                acc(0, BASE + 32'h20, '0, xa);
                acc(0, BASE + 32'h28, '0, ya);
                dma_launch(addr_t'(xa) + addr_t'(K * n * 8), BASE + 32'h1000, int'(n * 8));
                dma_launch(addr_t'(ya) + addr_t'(K * n * 8), BASE + 32'h2000, int'(n * 8));
                ndone += 2;
                dma_wait(ndone);
                barrier();
                barrier();
                acc(0, BASE + 32'h30, '0, za);
                dma_launch(BASE + 32'h3000, addr_t'(za) + addr_t'(K * n * 8), int'(n * 8));
                ndone += 1;
                dma_wait(ndone);
              end else begin
                barrier();
                for (int j = 0; j < int'(n) / 8; j++) begin
                  int i;
                  i = p + 8 * j;
                  acc(0, BASE + 32'h1000 + addr_t'(8 * i), '0, x);
                  acc(0, BASE + 32'h2000 + addr_t'(8 * i), '0, y);
                  acc(1, BASE + 32'h3000 + addr_t'(8 * i), a * x + y, r);
                end
                barrier();
              end
            end
            if (p == DM_CORE) begin
              acc(1, CLINT_BASE + CLINT_ARRIVALS_OFFS + addr_t'(8 * job), 64'd1, r);
              n_cluster_done[q][c]++;
            end
          end
        end
      end
    end
  end
endmodule
