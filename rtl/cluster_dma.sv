// cluster_dma: tightly coupled DMA engine of a cluster, driven by the data-mover core.
//
// The data-mover core programs it over a dedicated narrow register port: SRC,
// DST and LEN (bytes), then a write to START queues the transfer (up to two
// queued; the write stalls while the queue is full). A read of START returns 1
// while any transfer is queued or running; STATUS counts completed transfers, so
// the core can poll for completion, as in the paper's offload routine. The engine
// copies LEN bytes in 64-byte (512-bit) beats: a read port issues read requests
// ahead of the writes, up to BUF_DEPTH beats in flight, the returned data goes
// through a buffer and a separate write port writes it to the destination. With
// enough in-flight reads to cover the round trip the engine moves one beat per
// cycle, the paper's "one additional cycle per beat". Read and write ports are
// 512-bit single-beat requests into the cluster's wide crossbar, so either side
// can be the local TCDM or anything on the wide network. Addresses and LEN must be
// multiples of 64 bytes; the low six address bits are ignored. The register map,
// the queue depth and the buffer depth are this design's choices.
module cluster_dma
  import occamy_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  // register port from the data-mover core
  input  logic  cfg_req_valid_i,
  output logic  cfg_req_ready_o,
  input  nreq_t cfg_req_i,
  output logic  cfg_rsp_valid_o,
  output nrsp_t cfg_rsp_o,
  // wide read port
  output logic  rd_req_valid_o,
  input  logic  rd_req_ready_i,
  output wreq_t rd_req_o,
  input  logic  rd_rsp_valid_i,
  input  wrsp_t rd_rsp_i,
  // wide write port
  output logic  wr_req_valid_o,
  input  logic  wr_req_ready_i,
  output wreq_t wr_req_o,
  input  logic  wr_rsp_valid_i,
  input  wrsp_t wr_rsp_i,
  output logic  busy_o
);
  typedef struct packed {
    addr_t src;
    addr_t dst;
    addr_t len;
  } desc_t;
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  addr_t  src_q, dst_q, len_q;
  logic [31:0] done_cnt_q;
  desc_t  cur_q, dq_head;
  logic   active_q, dq_valid, dq_ready, dq_pop;
  addr_t  nbeats, rd_cnt_q, wr_cnt_q, ack_cnt_q;
  logic [CW-1:0] out_q;   // beats read but not yet handed to the write port
  logic   buf_valid, buf_ready_unused, err_q;
  logic [WIDE_W-1:0] buf_data;

  wire [11:0] offs     = cfg_req_i.addr[11:0];
  wire        cfg_wr   = cfg_req_valid_i && cfg_req_i.write;
  wire        is_start = (offs == 12'(DMA_START_OFFS));
  wire        push     = cfg_wr && is_start;

  assign cfg_req_ready_o = !(cfg_req_i.write && is_start) || dq_ready;

  stream_fifo #(.T(desc_t), .DEPTH(2)) i_queue (
    .clk_i, .rst_ni,
    .push_valid_i (push),
    .push_ready_o (dq_ready),
    .push_data_i  ('{src: src_q, dst: dst_q, len: len_q}),
    .pop_valid_o  (dq_valid),
    .pop_ready_i  (dq_pop),
    .pop_data_o   (dq_head)
  );

  assign nbeats = {6'b0, cur_q.len[ADDR_W-1:6]};
  assign dq_pop = !active_q && dq_valid;

  // read side
  assign rd_req_valid_o = active_q && (rd_cnt_q < nbeats) && (out_q < CW'(BUF_DEPTH));
  always_comb begin
    rd_req_o       = '0;
    rd_req_o.addr  = {cur_q.src[ADDR_W-1:6], 6'b0} + (rd_cnt_q << 6);
  end
  wire rd_take = rd_req_valid_o && rd_req_ready_i;

  stream_fifo #(.T(logic [WIDE_W-1:0]), .DEPTH(BUF_DEPTH)) i_buf (
    .clk_i, .rst_ni,
    .push_valid_i (rd_rsp_valid_i),
    .push_ready_o (buf_ready_unused),
    .push_data_i  (rd_rsp_i.rdata),
    .pop_valid_o  (buf_valid),
    .pop_ready_i  (wr_req_ready_i),
    .pop_data_o   (buf_data)
  );

  // write side
  assign wr_req_valid_o = buf_valid;
  always_comb begin
    wr_req_o       = '0;
    wr_req_o.write = 1'b1;
    wr_req_o.addr  = {cur_q.dst[ADDR_W-1:6], 6'b0} + (wr_cnt_q << 6);
    wr_req_o.wdata = buf_data;
    wr_req_o.strb  = '1;
  end
  wire wr_take = wr_req_valid_o && wr_req_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; len_q <= '0;
      done_cnt_q <= '0;
      cur_q <= '0; active_q <= 1'b0;
      rd_cnt_q <= '0; wr_cnt_q <= '0; ack_cnt_q <= '0; out_q <= '0;
      err_q <= 1'b0;
      cfg_rsp_valid_o <= 1'b0;
      cfg_rsp_o <= '0;
    end else begin
      // register port
      cfg_rsp_valid_o <= cfg_req_valid_i && cfg_req_ready_o;
      cfg_rsp_o       <= '0;
      if (cfg_wr) begin
        if (offs == 12'(DMA_SRC_OFFS)) src_q <= cfg_req_i.wdata[ADDR_W-1:0];
        if (offs == 12'(DMA_DST_OFFS)) dst_q <= cfg_req_i.wdata[ADDR_W-1:0];
        if (offs == 12'(DMA_LEN_OFFS)) len_q <= cfg_req_i.wdata[ADDR_W-1:0];
      end else if (cfg_req_valid_i) begin
        if (offs == 12'(DMA_START_OFFS))  cfg_rsp_o.rdata[0]    <= busy_o;
        if (offs == 12'(DMA_STATUS_OFFS)) cfg_rsp_o.rdata[31:0] <= done_cnt_q;
        if (offs == 12'(DMA_SRC_OFFS))    cfg_rsp_o.rdata[31:0] <= src_q;
        if (offs == 12'(DMA_DST_OFFS))    cfg_rsp_o.rdata[31:0] <= dst_q;
        if (offs == 12'(DMA_LEN_OFFS))    cfg_rsp_o.rdata[31:0] <= len_q;
      end
      // engine
      if (dq_pop) begin
        cur_q     <= dq_head;
        active_q  <= 1'b1;
        rd_cnt_q  <= '0;
        wr_cnt_q  <= '0;
        ack_cnt_q <= '0;
      end else if (active_q) begin
        if (rd_take) rd_cnt_q <= rd_cnt_q + 1;
        if (wr_take) wr_cnt_q <= wr_cnt_q + 1;
        if (wr_rsp_valid_i) ack_cnt_q <= ack_cnt_q + 1;
        if ((ack_cnt_q + addr_t'(wr_rsp_valid_i)) == nbeats) begin
          active_q   <= 1'b0;
          done_cnt_q <= done_cnt_q + 1;
        end
      end
      out_q <= out_q + CW'(rd_take) - CW'(wr_take);
      if ((rd_rsp_valid_i && rd_rsp_i.err) || (wr_rsp_valid_i && wr_rsp_i.err)) err_q <= 1'b1;
    end
  end

  assign busy_o = active_q || dq_valid;

  // The data buffer never overflows: reads in flight are bounded by BUF_DEPTH.
  assert property (@(posedge clk_i) disable iff (!rst_ni) rd_rsp_valid_i |-> buf_ready_unused);
  wire unused = ^{cfg_req_i.mask, cfg_req_i.strb, cfg_req_i.addr[31:12], cfg_req_i.wdata[63:32],
                  err_q};
endmodule
