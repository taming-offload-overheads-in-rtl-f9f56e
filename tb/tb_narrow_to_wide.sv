// Testbench for narrow_to_wide: 64-bit writes with random strobes to random
// words of a wide (512-bit) memory, and 64-bit reads back, against a byte-level
// reference model. Checks that only the addressed lane is written and that the
// bridge holds one request at a time.
module tb_narrow_to_wide;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic nv = 0, nrdy, nrv, wv, wrdy, wrv;
  nreq_t nq = '0; nrsp_t ns;
  wreq_t wq; wrsp_t ws;
  logic [63:0] model [64];
  int checks = 0, failures = 0;

  narrow_to_wide dut (.clk_i(clk), .rst_ni(rst_n),
    .n_req_valid_i(nv), .n_req_ready_o(nrdy), .n_req_i(nq), .n_rsp_valid_o(nrv), .n_rsp_o(ns),
    .w_req_valid_o(wv), .w_req_ready_i(wrdy), .w_req_o(wq), .w_rsp_valid_i(wrv), .w_rsp_i(ws));
  spm #(.DW(WIDE_W), .SIZE(4096), .req_t(wreq_t), .rsp_t(wrsp_t)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(wv), .req_ready_o(wrdy), .req_i(wq),
    .rsp_valid_o(wrv), .rsp_o(ws));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic xfer(bit wr, int i, logic [63:0] d, logic [7:0] s, output logic [63:0] r);
    @(negedge clk);
    nv = 1;
    nq = '{write: wr, addr: WSPM_BASE + 8 * i, mask: '0, wdata: d, strb: s};
    do @(posedge clk); while (!nrdy);
    #1 nv = 0;
    while (!nrv) begin
      @(posedge clk); #1;
      chk(!(nv && nrdy), "one request at a time");
    end
    r = ns.rdata;
    @(posedge clk);
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] r;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      model[i] = {$urandom, $urandom};
      xfer(1, i, model[i], 8'hFF, r);
    end
    for (int t = 0; t < 400; t++) begin
      int i;
      logic [63:0] d;
      logic [7:0] s;
      i = $urandom_range(0, 63); d = {$urandom, $urandom}; s = 8'($urandom);
      if (t % 2 == 0) begin
        xfer(1, i, d, s, r);
        for (int k = 0; k < 8; k++) if (s[k]) model[i][8*k +: 8] = d[8*k +: 8];
      end else begin
        xfer(0, i, '0, '0, r);
        chk(r == model[i], $sformatf("read word %0d: %h exp %h", i, r, model[i]));
      end
    end
    for (int i = 0; i < 64; i++) begin
      xfer(0, i, '0, '0, r);
      chk(r == model[i], "final read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
