// tb_nmem: behavioural narrow slave for testbenches. Accepts requests with
// random back-pressure (when STALL is set), answers each one cycle later in order,
// stores written bytes in a sparse memory (unwritten bytes read as zero) and
// counts the writes it received. Like a real slave behind a crossbar it decodes
// only the offset bits [17:0] of the address.
module tb_nmem
  import occamy_pkg::*;
#(
  parameter bit STALL = 1'b1
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_valid_i,
  output logic  req_ready_o,
  input  nreq_t req_i,
  output logic  rsp_valid_o,
  output nrsp_t rsp_o,
  output int    writes_o
);
  logic [7:0] mem [addr_t];
  logic stall_q;
  assign req_ready_o = !stall_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
      writes_o    <= 0;
      stall_q     <= 1'b0;
    end else begin
      stall_q     <= STALL && ($urandom_range(0, 3) == 0);
      rsp_valid_o <= req_valid_i && req_ready_o;
      if (req_valid_i && req_ready_o) begin
        addr_t base;
        base = {14'b0, req_i.addr[17:3], 3'b0};   // slaves decode the offset only
        rsp_o <= '0;
        if (req_i.write) begin
          writes_o <= writes_o + 1;
          for (int k = 0; k < 8; k++) if (req_i.strb[k]) mem[base + k] = req_i.wdata[8*k +: 8];
        end else begin
          for (int k = 0; k < 8; k++) rsp_o.rdata[8*k +: 8] <= mem.exists(base + k) ? mem[base + k] : 8'h0;
        end
      end
    end
  end

  function automatic logic [63:0] peek(addr_t a);
    logic [63:0] d = '0;
    addr_t b;
    b = {14'b0, a[17:3], 3'b0};
    for (int k = 0; k < 8; k++) if (mem.exists(b + k)) d[8*k +: 8] = mem[b + k];
    return d;
  endfunction
endmodule
