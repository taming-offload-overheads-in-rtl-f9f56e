// Testbench for cluster_barrier: nine cores arrive in random order and at random
// times; release must pulse exactly once, in the cycle of the last arrival, and
// never before. Repeated for several rounds and with a partial mask.
module tb_cluster_barrier;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8:0] mask = '1, arrive = '0;
  logic rel;
  int checks = 0, failures = 0;

  cluster_barrier #(.N(9)) dut (.clk_i(clk), .rst_ni(rst_n), .mask_i(mask), .arrive_i(arrive), .release_o(rel));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      logic [8:0] seen;
      seen = '0;
      if (round == 9) mask = 9'h10F;
      while ((seen & mask) != mask) begin
        @(negedge clk);
        arrive = '0;
        for (int c = 0; c < 9; c++)
          if (mask[c] && !seen[c] && $urandom_range(0, 3) == 0) arrive[c] = 1'b1;
        seen |= arrive;
        #1;
        chk(rel == ((seen & mask) == mask && arrive != 0), $sformatf("release timing round %0d", round));
      end
      @(negedge clk); arrive = '0; #1;
      chk(!rel, "single pulse");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
