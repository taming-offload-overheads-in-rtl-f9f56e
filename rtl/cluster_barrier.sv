// cluster_barrier: hardware barrier among the cores of one cluster.
//
// Each core pulses arrive_i[c] for one cycle when it reaches the barrier and then
// waits. Arrivals are remembered; in the cycle in which the last participating
// core arrives, release_o pulses for one cycle and all cores proceed. Only the
// cores set in mask_i take part (normally all nine: eight compute cores and the
// data-mover core). The paper names the hardware cluster barrier and its use
// (the data-mover core synchronising with the compute cores before and after the
// job); the pulse interface is this design's choice.
module cluster_barrier #(
  parameter int unsigned N = 9
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] mask_i,
  input  logic [N-1:0] arrive_i,
  output logic         release_o
);
  logic [N-1:0] arrived_q;
  wire  [N-1:0] arrived_d = arrived_q | arrive_i;

  assign release_o = (mask_i != '0) && ((arrived_d & mask_i) == mask_i) && (|arrive_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        arrived_q <= '0;
    else if (release_o) arrived_q <= '0;
    else                arrived_q <= arrived_d & mask_i;
  end
endmodule
