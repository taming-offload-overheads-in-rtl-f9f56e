// job_completion_unit: hardware global barrier for one outstanding offloaded job.
//
// The host writes the number of clusters it offloads to into the offload
// register. Each cluster, when done, writes to the arrivals register, which
// increments by one as a side effect of the write (the written data is ignored),
// so no atomic memory operation is needed. When arrivals equals offload the job
// is complete (offl_done_o). If the host software interrupt (MSIP) is not pending
// the unit fires it (fire_o, one cycle) and resets arrivals to zero for the next
// offload; if MSIP is still pending it waits until the host clears it. This
// follows the paper's description and its block diagram (offload, arrivals,
// adder, equality compare, MSIP, offl_done). Own choices: completion also needs at
// least one arrival, so the reset state (both registers zero) is not a completed
// job; an arrival in the same cycle as a fire counts towards the next job.
// CNT_W is 6 rather than the 5 bits drawn, so that all 32 clusters can be counted.
module job_completion_unit #(
  parameter int unsigned CNT_W = 6
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             offload_we_i,     // write to the offload register
  input  logic [CNT_W-1:0] offload_wdata_i,
  input  logic             arrive_i,         // write to the arrivals register
  input  logic             msip_pending_i,   // host MSIP currently set
  input  logic             fire_allow_i,     // no other job fires in this cycle
  output logic             offl_done_o,
  output logic             fire_o,           // set host MSIP this cycle
  output logic [CNT_W-1:0] offload_o,
  output logic [CNT_W-1:0] arrivals_o
);
  logic [CNT_W-1:0] offload_q, arrivals_q;

  assign offl_done_o = (arrivals_q == offload_q) && (arrivals_q != '0);
  assign fire_o      = offl_done_o && !msip_pending_i && fire_allow_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      offload_q  <= '0;
      arrivals_q <= '0;
    end else begin
      if (offload_we_i) offload_q <= offload_wdata_i;
      if (fire_o)        arrivals_q <= CNT_W'(arrive_i);
      else if (arrive_i) arrivals_q <= arrivals_q + 1'b1;
    end
  end

  assign offload_o  = offload_q;
  assign arrivals_o = arrivals_q;

  // Arrivals never run past the programmed count.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (offload_q != '0) |-> (arrivals_q <= offload_q));
endmodule
