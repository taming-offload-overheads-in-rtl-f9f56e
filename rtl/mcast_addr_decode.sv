// mcast_addr_decode: multicast-capable address decoder.
//
// A request names a set of addresses as (addr, mask): every mask bit set to 1 is
// a don't-care, so n set bits name 2^n addresses. Each rule of the address map
// is an aligned power-of-two region in the same form. A rule matches when every
// bit either is masked by the request or by the rule, or agrees between the two
// addresses, which is the paper's condition
//   match = &((req.mask | am.mask) | ~(req.addr ^ am.addr)).
// Several rules may match one multicast request; match_o is therefore a
// multi-hot vector, one bit per rule. Disabled rules (en = 0) never match.
// Purely combinational.
module mcast_addr_decode
  import occamy_pkg::*;
#(
  parameter int unsigned NR_RULES = 4
) (
  input  addr_t                addr_i,
  input  addr_t                mask_i,
  input  rule_t [NR_RULES-1:0] rules_i,
  output logic  [NR_RULES-1:0] match_o,
  output logic                 any_o
);
  always_comb begin
    for (int r = 0; r < NR_RULES; r++) begin
      match_o[r] = rules_i[r].en &&
                   (&((mask_i | rules_i[r].mask) | ~(addr_i ^ rules_i[r].addr)));
    end
  end
  assign any_o = |match_o;
endmodule
