// Testbench for cluster_periph: MCIP set by a bus store of a bit mask, read
// back, cleared by a bus store and by each core's local clear line.
module tb_cluster_periph;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid;
  nreq_t req = '0;
  nrsp_t rsp;
  logic [8:0] clr = '0, irq;
  int checks = 0, failures = 0;

  cluster_periph dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .rsp_valid_o(rsp_valid), .rsp_o(rsp), .clr_i(clr), .irq_o(irq));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s irq=%b", what, irq); end
  endtask
  task automatic acc(bit wr, addr_t offs, logic [63:0] d);
    @(negedge clk);
    req = '{write: wr, addr: cluster_base(1, 2) + CL_PERIPH_OFFS + offs, mask: '0, wdata: d, strb: 8'hFF};
    req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    chk(rsp_valid && req_ready, "response");
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(irq == 0, "reset");
    acc(1, MCIP_SET_OFFS, 64'h1FF);
    chk(irq == 9'h1FF, "wake all nine cores with one store");
    @(negedge clk); clr = 9'b000000100; @(negedge clk); clr = '0;
    chk(irq == 9'h1FB, "core 2 clears its own bit");
    acc(1, MCIP_CLR_OFFS, 64'h0F0);
    chk(irq == 9'h10B, "bus clear of cores 4..7");
    acc(0, MCIP_SET_OFFS, '0);
    chk(rsp.rdata[8:0] == 9'h10B, "read back");
    acc(1, MCIP_SET_OFFS, 64'h004);
    chk(irq == 9'h10F, "set one bit, others kept");
    @(negedge clk); clr = '1; @(negedge clk); clr = '0;
    chk(irq == 0, "all cleared locally");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
