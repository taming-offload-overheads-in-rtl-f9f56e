// Testbench for cluster_dma: the read port reads a wide memory preloaded with
// known data, the write port writes a second wide memory. Checks copied data,
// the STATUS and busy registers, two transfers queued back to back, and the
// transfer rate: a transfer of n beats must take n cycles more than a constant,
// i.e. one cycle per 64-byte beat.
module tb_cluster_dma;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cv = 0, crdy, crv, rv, rrdy, rrv, wv, wrdy, wrv, busy;
  nreq_t cq = '0; nrsp_t cs;
  wreq_t rq, wq; wrsp_t rs, ws;
  int checks = 0, failures = 0;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n),
    .cfg_req_valid_i(cv), .cfg_req_ready_o(crdy), .cfg_req_i(cq), .cfg_rsp_valid_o(crv), .cfg_rsp_o(cs),
    .rd_req_valid_o(rv), .rd_req_ready_i(rrdy), .rd_req_o(rq), .rd_rsp_valid_i(rrv), .rd_rsp_i(rs),
    .wr_req_valid_o(wv), .wr_req_ready_i(wrdy), .wr_req_o(wq), .wr_rsp_valid_i(wrv), .wr_rsp_i(ws),
    .busy_o(busy));
  spm #(.DW(WIDE_W), .SIZE(16384), .req_t(wreq_t), .rsp_t(wrsp_t)) i_src (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(rv), .req_ready_o(rrdy), .req_i(rq),
    .rsp_valid_o(rrv), .rsp_o(rs));
  spm #(.DW(WIDE_W), .SIZE(16384), .req_t(wreq_t), .rsp_t(wrsp_t)) i_dst (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(wv), .req_ready_o(wrdy), .req_i(wq),
    .rsp_valid_o(wrv), .rsp_o(ws));

  function automatic logic [511:0] pattern(int i);
    logic [511:0] p;
    for (int k = 0; k < 16; k++) p[32*k +: 32] = 32'(i * 1000 + k);
    return p;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic cfg(bit wr, addr_t offs, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    cv = 1; cq = '{write: wr, addr: offs, mask: '0, wdata: d, strb: '1};
    do @(posedge clk); while (!crdy);
    #1 cv = 0;
    while (!crv) @(posedge clk);
    r = cs.rdata;
  endtask

  task automatic start(addr_t src, addr_t dst, int bytes);
    logic [63:0] r;
    cfg(1, DMA_SRC_OFFS, 64'(src), r);
    cfg(1, DMA_DST_OFFS, 64'(dst), r);
    cfg(1, DMA_LEN_OFFS, 64'(bytes), r);
    cfg(1, DMA_START_OFFS, 0, r);
  endtask

  task automatic wait_done(int n, output int cycles);
    logic [63:0] r;
    cycles = 0;
    do begin cfg(0, DMA_STATUS_OFFS, 0, r); end while (r < n);
  endtask

  // cycle count of one transfer: from the START write to the last write response
  task automatic timed(int beats, output int cyc);
    logic [63:0] r;
    int t0, n0;
    cfg(0, DMA_STATUS_OFFS, 0, r);
    n0 = int'(r);
    start(32'h0, 32'h2000, 64 * beats);
    t0 = $time / 10;
    while (busy) @(posedge clk);
    cyc = $time / 10 - t0;
    cfg(0, DMA_STATUS_OFFS, 0, r);
    chk(r == n0 + 1, "status counts one more transfer");
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] r;
    int c8, c40, dummy;
    for (int i = 0; i < 256; i++) i_src.mem[i] = pattern(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg(0, DMA_START_OFFS, 0, r);
    chk(r[0] == 0, "idle after reset");
    // simple copy of 4 beats
    start(32'h8000_0000 + 64 * 3, 32'h1000_0000 + 64 * 10, 256);
    cfg(0, DMA_START_OFFS, 0, r);
    chk(r[0] == 1, "busy while copying");
    wait_done(1, dummy);
    for (int k = 0; k < 4; k++) chk(i_dst.mem[10 + k] == pattern(3 + k), $sformatf("beat %0d", k));
    // two queued transfers (x and y vectors)
    start(32'h0, 32'h400, 64 * 16);
    start(32'h400, 32'h800, 64 * 16);
    wait_done(3, dummy);
    for (int k = 0; k < 16; k++) begin
      chk(i_dst.mem[16 + k] == pattern(k), "queued transfer 1");
      chk(i_dst.mem[32 + k] == pattern(16 + k), "queued transfer 2");
    end
    // rate: one cycle per beat
    timed(8, c8);
    timed(40, c40);
    chk(c40 - c8 == 32, $sformatf("one beat per cycle: %0d vs %0d cycles", c8, c40));
    for (int k = 0; k < 40; k++) chk(i_dst.mem[128 + k] == pattern(k), "timed copy data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
