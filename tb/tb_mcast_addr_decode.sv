// Testbench for mcast_addr_decode: 32 cluster rules (the default address map),
// the paper's worked example (cluster 1 of quadrant 2 with address bits 19 and 21
// masked names clusters 1 and 3 of quadrants 0 and 2) and random multicast
// requests. The reference expands every request into its 2^n addresses and
// checks each rule's region by range comparison.
module tb_mcast_addr_decode;
  import occamy_pkg::*;
  localparam int unsigned NR = 34;
  addr_t addr, mask;
  rule_t [NR-1:0] rules;
  logic  [NR-1:0] match;
  logic  any;
  int checks = 0, failures = 0;

  mcast_addr_decode #(.NR_RULES(NR)) dut (
    .addr_i(addr), .mask_i(mask), .rules_i(rules), .match_o(match), .any_o(any));

  function automatic logic [NR-1:0] ref_match(addr_t a, addr_t m);
    logic [NR-1:0] r = '0;
    int unsigned bits[$];
    for (int b = 0; b < 32; b++) if (m[b]) bits.push_back(b);
    for (int k = 0; k < (1 << bits.size()); k++) begin
      addr_t x = a;
      for (int j = 0; j < bits.size(); j++) x[bits[j]] = k[j];
      for (int i = 0; i < NR; i++)
        if (rules[i].en && x >= rules[i].addr && {1'b0, x} < {1'b0, rules[i].addr} + {1'b0, rules[i].mask} + 33'd1)
          r[i] = 1'b1;
    end
    return r;
  endfunction

  task automatic check(string what);
    logic [NR-1:0] exp;
    #1;
    exp = ref_match(addr, mask);
    checks++;
    if (match !== exp || any !== (|exp)) begin
      failures++;
      $display("FAIL %s addr=%h mask=%h match=%h exp=%h", what, addr, mask, match, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < 8; q++)
      for (int c = 0; c < 4; c++) rules[q*4+c] = region(cluster_base(q, c), CLUSTER_SIZE);
    rules[32] = region(CLINT_BASE, CLINT_SIZE);
    rules[33] = '0;   // disabled rule

    // paper example
    addr = cluster_base(2, 1) + 32'h40;
    mask = (32'h1 << 19) | (32'h1 << 21);
    check("paper example");
    checks++;
    if (match[31:0] !== (32'h1 << (0*4+1)) + (32'h1 << (0*4+3)) + (32'h1 << (2*4+1)) + (32'h1 << (2*4+3))) begin
      failures++; $display("FAIL paper example clusters %h", match);
    end
    // unicast to each cluster
    for (int i = 0; i < 32; i++) begin
      addr = cluster_base(i / 4, i % 4) + addr_t'($urandom_range(0, 32'h3FFFF));
      mask = '0;
      check("unicast");
    end
    // broadcast to all 32 clusters
    addr = cluster_base(5, 2); mask = 32'h7C_0000; check("all clusters");
    checks++;
    if (match[31:0] !== '1) begin failures++; $display("FAIL broadcast"); end
    // random multicast over cluster and quadrant bits, plus random other bits
    for (int t = 0; t < 300; t++) begin
      addr = cluster_base($urandom_range(0, 7), $urandom_range(0, 3)) + addr_t'($urandom_range(0, 32'h3FFFF));
      mask = addr_t'($urandom_range(0, 31)) << 18;
      if (t % 5 == 0) mask[$urandom_range(0, 31)] = 1'b1;
      if (t % 7 == 0) addr = $urandom;
      check("random");
    end
    // nothing matches
    addr = 32'hF000_0000; mask = '0; check("no match");
    checks++;
    if (any !== 1'b0) begin failures++; $display("FAIL any"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
