// Testbench for clint: MSIP set/clear/read over the bus for several harts, a job
// completion through the offload/arrivals registers setting the host MSIP with
// the job ID as cause, two jobs completing while MSIP is pending (the second
// fires only after the host clears MSIP) and read-back of the counters.
module tb_clint;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid;
  nreq_t req = '0;
  nrsp_t rsp;
  logic [16:0] msip;
  logic [7:0] cause;
  int checks = 0, failures = 0;

  clint #(.NR_HARTS(17), .NR_JOBS(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .msip_o(msip), .cause_o(cause));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic acc(bit wr, logic [15:0] offs, logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    req = '{write: wr, addr: CLINT_BASE + offs, mask: '0, wdata: d,
            strb: offs[2] ? 8'hF0 : 8'h0F};
    req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    chk(rsp_valid, "response one cycle later");
    r = rsp.rdata;
  endtask
  task automatic wr32(logic [15:0] offs, logic [31:0] d);
    logic [63:0] r;
    acc(1, offs, offs[2] ? {d, 32'h0} : {32'h0, d}, r);
  endtask
  task automatic rd32(logic [15:0] offs, output logic [31:0] d);
    logic [63:0] r;
    acc(0, {offs[15:3], 3'b0}, '0, r);
    d = offs[2] ? r[63:32] : r[31:0];
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // inter-processor interrupts through MSIP
    wr32(4 * 5, 1);
    chk(msip == 17'h1 << 5, "MSIP hart 5 set only");
    wr32(4 * 6, 1);
    chk(msip == (17'h1 << 5 | 17'h1 << 6), "MSIP hart 6 set, 5 kept");
    rd32(4 * 6, d); chk(d == 1, "read MSIP 6");
    rd32(4 * 7, d); chk(d == 0, "read MSIP 7");
    wr32(4 * 5, 0); wr32(4 * 6, 0);
    chk(msip == '0, "MSIP cleared");
    // job 1: three clusters
    wr32(16'h8000 + 8 * 1, 3);
    rd32(16'h8000 + 8 * 1, d); chk(d == 3, "offload register read");
    wr32(16'h9000 + 8 * 1, 32'hDEAD);   // data ignored
    wr32(16'h9000 + 8 * 1, 0);
    rd32(16'h9000 + 8 * 1, d); chk(d == 2, "arrivals counted");
    chk(!msip[0], "not yet complete");
    wr32(16'h9000 + 8 * 1, 0);
    @(negedge clk);
    chk(msip[0] && cause == 1, "host interrupted with cause 1");
    rd32(16'h9000 + 8 * 1, d); chk(d == 0, "arrivals reset");
    rd32(16'hA000, d); chk(d == 1, "cause register");
    // jobs 2 and 3 complete while MSIP is pending
    wr32(16'h8000 + 8 * 2, 1);
    wr32(16'h8000 + 8 * 3, 2);
    wr32(16'h9000 + 8 * 3, 0); wr32(16'h9000 + 8 * 3, 0);
    wr32(16'h9000 + 8 * 2, 0);
    repeat (3) @(negedge clk);
    chk(cause == 1, "no new cause while MSIP pending");
    wr32(0, 0);   // host clears MSIP
    @(negedge clk);
    chk(msip[0] && cause == 2, "job 2 fires first (lower ID)");
    wr32(0, 0);
    @(negedge clk);
    chk(msip[0] && cause == 3, "job 3 fires after the next clear");
    wr32(0, 0);
    repeat (3) @(negedge clk);
    chk(!msip[0], "nothing left to fire");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
