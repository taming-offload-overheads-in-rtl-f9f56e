// Testbench for job_completion_unit: counts arrivals against the offload
// register, fires in the cycle the last arrival is registered when MSIP is clear,
// waits while MSIP is pending and fires in the cycle after it is cleared, resets
// arrivals for the next job, and handles back-to-back arrivals and a 32-cluster job.
module tb_job_completion_unit;
  localparam int unsigned W = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, arrive = 0, msip = 0, done, fire;
  logic [W-1:0] wdata = '0, offload, arrivals;
  int checks = 0, failures = 0, fires = 0;

  job_completion_unit #(.CNT_W(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .offload_we_i(we), .offload_wdata_i(wdata), .arrive_i(arrive),
    .msip_pending_i(msip), .fire_allow_i(1'b1), .offl_done_o(done), .fire_o(fire),
    .offload_o(offload), .arrivals_o(arrivals));

  // the host's MSIP bit as the CLINT keeps it
  always @(posedge clk) if (fire) begin msip <= 1'b1; fires++; end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (arr=%0d off=%0d)", what, arrivals, offload); end
  endtask
  task automatic program_jcu(int n);
    @(negedge clk); we = 1; wdata = W'(n); @(negedge clk); we = 0;
  endtask
  task automatic arrive_once();
    @(negedge clk); arrive = 1; @(negedge clk); arrive = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int f0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!done && !fire, "idle after reset");
    // job of 3 clusters
    program_jcu(3);
    arrive_once(); arrive_once();
    chk(arrivals == 2 && !done, "two of three arrived");
    @(negedge clk); arrive = 1; @(negedge clk); arrive = 0;   // third arrival registered
    chk(done && fire, "complete and fires in the same cycle");
    f0 = fires;
    @(negedge clk);
    chk(fires == f0 + 1 && msip && arrivals == 0 && !done, "fired once, arrivals reset");
    // next job while MSIP is still pending: wait
    program_jcu(2);
    arrive_once(); arrive_once();
    chk(done && !fire, "done but MSIP pending, no fire");
    repeat (5) @(negedge clk);
    chk(done && !fire && arrivals == 2, "still waiting");
    msip = 0;   // host clears its interrupt
    #1;
    chk(fire, "fires once MSIP is clear");
    @(negedge clk);
    chk(arrivals == 0 && msip, "second job notified");
    msip = 0;
    // 32 clusters, back-to-back arrivals
    program_jcu(32);
    @(negedge clk); arrive = 1;
    repeat (31) @(negedge clk);
    chk(arrivals == 31 && !done, "31 of 32");
    @(negedge clk); arrive = 0;
    chk(arrivals == 32 && fire, "32 of 32, fires");
    @(negedge clk);
    chk(arrivals == 0 && msip, "32-cluster job fired");
    chk(fires == 3, "three fires in total");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
