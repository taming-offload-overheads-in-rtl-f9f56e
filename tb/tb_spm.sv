// Testbench for spm: the default 512 KB narrow instance and a wide (512-bit)
// instance. Random writes with random byte strobes and reads over a window are
// checked against a reference model, including the one-cycle read latency.
module tb_spm;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic nv = 0, nrdy, nrv, wv = 0, wrdy, wrv;
  nreq_t nq = '0; nrsp_t ns;
  wreq_t wq = '0; wrsp_t ws;
  logic [63:0]  nmodel [256];
  logic [511:0] wmodel [64];
  int checks = 0, failures = 0;

  spm dut_n (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(nv), .req_ready_o(nrdy), .req_i(nq),
             .rsp_valid_o(nrv), .rsp_o(ns));
  spm #(.DW(WIDE_W), .SIZE(64 * 1024), .req_t(wreq_t), .rsp_t(wrsp_t)) dut_w (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(wv), .req_ready_o(wrdy), .req_i(wq),
    .rsp_valid_o(wrv), .rsp_o(ws));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill (window at the top of the narrow SPM to exercise the full index)
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      nv = 1; nmodel[i] = {$urandom, $urandom};
      nq = '{write: 1, addr: NSPM_BASE + NSPM_SIZE - 2048 + 8 * i, mask: '0, wdata: nmodel[i], strb: '1};
      wv = (i < 64);
      if (i < 64) begin
        wmodel[i] = {16{$urandom}};
        wq = '{write: 1, addr: WSPM_BASE + 64 * i, mask: '0, wdata: wmodel[i], strb: '1};
      end
    end
    @(negedge clk); nv = 0; wv = 0;
    for (int t = 0; t < 2000; t++) begin
      int i, j;
      logic [7:0] s;
      logic [63:0] s64;
      logic [63:0] d;
      logic [511:0] dw;
      i = $urandom_range(0, 255); j = $urandom_range(0, 63);
      s = 8'($urandom); s64 = {$urandom, $urandom};
      d = {$urandom, $urandom}; dw = {16{$urandom}};
      @(negedge clk);
      nv = 1; wv = 1;
      if (t % 2 == 0) begin
        nq = '{write: 1, addr: NSPM_BASE + NSPM_SIZE - 2048 + 8 * i, mask: '0, wdata: d, strb: s};
        for (int k = 0; k < 8; k++) if (s[k]) nmodel[i][8*k +: 8] = d[8*k +: 8];
        wq = '{write: 1, addr: WSPM_BASE + 64 * j, mask: '0, wdata: dw, strb: s64};
        for (int k = 0; k < 64; k++) if (s64[k]) wmodel[j][8*k +: 8] = dw[8*k +: 8];
        @(negedge clk); nv = 0; wv = 0;
      end else begin
        nq = '{write: 0, addr: NSPM_BASE + NSPM_SIZE - 2048 + 8 * i, mask: '0, wdata: '0, strb: '0};
        wq = '{write: 0, addr: WSPM_BASE + 64 * j, mask: '0, wdata: '0, strb: '0};
        @(negedge clk); nv = 0; wv = 0;
        chk(nrv && ns.rdata == nmodel[i], $sformatf("narrow read %0d", i));
        chk(wrv && ws.rdata == wmodel[j], $sformatf("wide read %0d", j));
      end
    end
    chk(nrdy && wrdy, "always ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
