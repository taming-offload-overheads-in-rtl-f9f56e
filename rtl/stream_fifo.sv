// stream_fifo: small valid/ready FIFO used as a register slice on crossbar ports.
//
// DEPTH entries of type T. push_ready_o is high while the FIFO is not full and
// does not depend combinationally on pop_ready_i, so chains of crossbars have no
// combinational path from one level's ready to the next level's valid.
// Data written in cycle t is visible at the output in cycle t+1.
module stream_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_valid_i,
  output logic push_ready_o,
  input  T     push_data_i,
  output logic pop_valid_o,
  input  logic pop_ready_i,
  output T     pop_data_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem_q [DEPTH];
  logic [PW-1:0]   rd_q, wr_q;
  logic [PW:0]     cnt_q;

  wire push = push_valid_i && push_ready_o;
  wire pop  = pop_valid_o && pop_ready_i;

  assign push_ready_o = (cnt_q != (PW+1)'(DEPTH));
  assign pop_valid_o  = (cnt_q != '0);
  assign pop_data_o   = mem_q[rd_q];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    inc = (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= push_data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_valid_o |-> cnt_q <= (PW+1)'(DEPTH));
endmodule
