// rr_arb: round-robin arbiter.
//
// Grants one of N requesters (one-hot gnt_o) combinationally. The priority
// pointer moves past the granted requester when take_i is high, so every
// requester that keeps requesting is served within N grants. This provides the
// fairness between clusters that the wide SPM port relies on.
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] req_i,
  input  logic         take_i,
  output logic [N-1:0] gnt_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    for (int k = N - 1; k >= 0; k--) begin
      // Scan from ptr_q upwards (wrapping); the last assignment wins, so scan
      // the candidates in reverse priority order.
      int unsigned j;
      j = (int'(ptr_q) + k) % N;
      if (req_i[j]) begin
        gnt_o = '0;
        gnt_o[j] = 1'b1;
        idx_o = IW'(j);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (take_i && |req_i) ptr_q <= (idx_o == IW'(N - 1)) ? '0 : idx_o + 1'b1;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
endmodule
