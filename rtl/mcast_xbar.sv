// mcast_xbar: crossbar with multicast writes, for the narrow and wide networks.
//
// Structure (after the AXI crossbar the paper extends): every slave port (where
// a master connects) has an address decoder and a demux; every master port
// (where a slave connects) has a round-robin mux. The address map is an input
// (rules_i, one aligned region per master port, in the (addr, mask) form of
// mcast_addr_decode). Requests that match no rule take DEFAULT_PORT when
// DEFAULT_EN is set, except from slave port NO_DEFAULT_SLV (the port that comes
// down from the parent crossbar, so a request is never sent back up).
//
// Multicast (MCAST = 1): a write whose mask names several regions is forked to
// every matching master port in parallel. Each master port takes its copy when
// its own arbiter grants it, independently of the others, so two multicasts
// that overlap cannot deadlock. The slave port then joins the write responses of
// all copies and returns one response, with the error flags ORed. Reads and, for
// MCAST = 0, all requests ignore the request mask and go to one port.
//
// Transactions are single-beat. A slave port may keep up to MAX_OUT unicast
// transactions to the same master port in flight (so a DMA streams one beat per
// cycle); a multicast or a change of target master port waits until the port has
// no transaction in flight, which keeps responses in order without IDs. Master
// ports record the source slave port of each forwarded request in a FIFO and
// route the in-order responses back with it.
//
// Timing: each slave port has a 2-entry input FIFO and a response register, so a
// request crosses a crossbar in 1 cycle plus arbitration stalls and a response in
// 1 cycle. Responses are valid-only: a requester must accept them when shown.
// Requests that match nothing get an error response.
module mcast_xbar
  import occamy_pkg::*;
#(
  parameter int unsigned NS             = 2,
  parameter int unsigned NM             = 2,
  parameter type         req_t          = nreq_t,
  parameter type         rsp_t          = nrsp_t,
  parameter bit          MCAST          = 1'b1,
  parameter bit          DEFAULT_EN     = 1'b0,
  parameter int unsigned DEFAULT_PORT   = 0,
  parameter int          NO_DEFAULT_SLV = -1,
  parameter int unsigned MAX_OUT        = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  rule_t [NM-1:0]    rules_i,
  // slave ports
  input  logic [NS-1:0]     slv_req_valid_i,
  output logic [NS-1:0]     slv_req_ready_o,
  input  req_t              slv_req_i       [NS],
  output logic [NS-1:0]     slv_rsp_valid_o,
  output rsp_t              slv_rsp_o       [NS],
  // master ports
  output logic [NM-1:0]     mst_req_valid_o,
  input  logic [NM-1:0]     mst_req_ready_i,
  output req_t              mst_req_o       [NM],
  input  logic [NM-1:0]     mst_rsp_valid_i,
  input  rsp_t              mst_rsp_i       [NM]
);
  localparam int unsigned SW = $clog2(NS > 1 ? NS : 2);
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  req_t                    hreq      [NS];
  logic [NS-1:0]           hvalid, hpop;
  logic [NS-1:0][NM-1:0]   fwd_valid;   // slave i offers its head to master m
  logic [NM-1:0][NS-1:0]   mst_gnt;     // master m takes the head of slave i
  logic [NM-1:0][SW-1:0]   rsp_src;     // source slave port of master m's response

  // ------------------------------------------------------------------ slave side
  for (genvar i = 0; i < NS; i++) begin : g_slv
    logic [NM-1:0] match, sel, acc_q, got_q, cur_sel_q, accepted, rsp_hit;
    logic          any, mc, can_issue, done_fork, cur_mc_q, decerr_q, jerr_q, fork_mc;
    logic [CW-1:0] cnt_q;
    logic          rsp_valid_q;
    rsp_t          rsp_q;

    stream_fifo #(.T(req_t), .DEPTH(2)) i_in (
      .clk_i, .rst_ni,
      .push_valid_i (slv_req_valid_i[i]),
      .push_ready_o (slv_req_ready_o[i]),
      .push_data_i  (slv_req_i[i]),
      .pop_valid_o  (hvalid[i]),
      .pop_ready_i  (hpop[i]),
      .pop_data_o   (hreq[i])
    );

    mcast_addr_decode #(.NR_RULES(NM)) i_dec (
      .addr_i  (hreq[i].addr),
      .mask_i  ((MCAST && hreq[i].write) ? hreq[i].mask : addr_t'(0)),
      .rules_i (rules_i),
      .match_o (match),
      .any_o   (any)
    );

    always_comb begin
      sel = '0;
      if (any) begin
        if (MCAST && hreq[i].write) sel = match;
        else sel = match & (~match + 1'b1);           // lowest matching rule
      end else if (DEFAULT_EN && (i != NO_DEFAULT_SLV)) begin
        sel[DEFAULT_PORT] = 1'b1;
      end
      mc = (sel & (sel - 1'b1)) != '0;             // more than one target

      if (sel == '0)  can_issue = hvalid[i] && (cnt_q == '0) && !decerr_q;
      else if (mc)    can_issue = hvalid[i] && (cnt_q == '0);
      else            can_issue = hvalid[i] && (cnt_q < CW'(MAX_OUT)) &&
                                  ((cnt_q == '0) || (!cur_mc_q && (cur_sel_q == sel)));

      for (int m = 0; m < NM; m++) begin
        fwd_valid[i][m] = can_issue && sel[m] && !acc_q[m];
        accepted[m]     = mst_gnt[m][i];
        rsp_hit[m]      = mst_rsp_valid_i[m] && (rsp_src[m] == SW'(i));
      end
      done_fork = can_issue && ((sel == '0) || ((acc_q | accepted) == sel));
      fork_mc   = can_issue && mc;   // copies of a multicast are being handed out
      hpop[i]   = done_fork;
    end

    // a response leaves this port in this cycle (multicast joins count once)
    logic resp_done;
    always_comb begin
      if (decerr_q)                      resp_done = 1'b0;
      else if (cur_mc_q && cnt_q != '0)  resp_done = (got_q | rsp_hit) == cur_sel_q;
      else                               resp_done = !fork_mc && (rsp_hit != '0);
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        cnt_q       <= '0;
        acc_q       <= '0;
        got_q       <= '0;
        cur_sel_q   <= '0;
        cur_mc_q    <= 1'b0;
        decerr_q    <= 1'b0;
        jerr_q      <= 1'b0;
        rsp_valid_q <= 1'b0;
        rsp_q       <= '0;
      end else begin
        rsp_valid_q <= 1'b0;
        // responses
        if (decerr_q) begin
          rsp_valid_q <= 1'b1;
          rsp_q       <= '0;
          rsp_q.err   <= 1'b1;
          decerr_q    <= 1'b0;
        end else if (cur_mc_q && (cnt_q != '0)) begin
          if ((got_q | rsp_hit) == cur_sel_q) begin
            rsp_valid_q <= 1'b1;
            rsp_q       <= '0;
            rsp_q.err   <= jerr_q;
            for (int m = 0; m < NM; m++) if (rsp_hit[m] && mst_rsp_i[m].err) rsp_q.err <= 1'b1;
            got_q       <= '0;
            jerr_q      <= 1'b0;
          end else begin
            got_q <= got_q | rsp_hit;
            for (int m = 0; m < NM; m++) if (rsp_hit[m] && mst_rsp_i[m].err) jerr_q <= 1'b1;
          end
        end else if (fork_mc) begin
          // copies already accepted may answer before the fork is complete
          got_q <= got_q | rsp_hit;
          for (int m = 0; m < NM; m++) if (rsp_hit[m] && mst_rsp_i[m].err) jerr_q <= 1'b1;
        end else begin
          for (int m = 0; m < NM; m++) begin
            if (rsp_hit[m]) begin
              rsp_valid_q <= 1'b1;
              rsp_q       <= mst_rsp_i[m];
              end
          end
        end
        // fork / issue
        if (done_fork) begin
          acc_q <= '0;
          if (sel == '0) begin
            decerr_q <= 1'b1;
          end else begin
            cur_sel_q <= sel;
            cur_mc_q  <= mc;
          end
        end else begin
          acc_q <= acc_q | accepted;
        end
        cnt_q <= cnt_q + CW'(done_fork && (sel != '0)) - CW'(resp_done);
      end
    end

    assign slv_rsp_valid_o[i] = rsp_valid_q;
    assign slv_rsp_o[i]       = rsp_q;

    // A multicast is only issued with nothing else in flight.
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     (done_fork && mc) |-> (cnt_q == '0));
  end

  // ----------------------------------------------------------------- master side
  for (genvar m = 0; m < NM; m++) begin : g_mst
    logic [NS-1:0] req, gnt;
    logic [SW-1:0] idx;
    logic          src_ready, src_valid, take;

    always_comb for (int i = 0; i < NS; i++) req[i] = fwd_valid[i][m];

    rr_arb #(.N(NS)) i_arb (
      .clk_i, .rst_ni,
      .req_i  (req),
      .take_i (take),
      .gnt_o  (gnt),
      .idx_o  (idx)
    );

    assign mst_req_valid_o[m] = (|req) && src_ready;
    assign mst_req_o[m]       = hreq[idx];
    assign take               = mst_req_valid_o[m] && mst_req_ready_i[m];
    assign mst_gnt[m]         = take ? gnt : '0;

    stream_fifo #(.T(logic [SW-1:0]), .DEPTH(MAX_OUT)) i_src (
      .clk_i, .rst_ni,
      .push_valid_i (take),
      .push_ready_o (src_ready),
      .push_data_i  (idx),
      .pop_valid_o  (src_valid),
      .pop_ready_i  (mst_rsp_valid_i[m]),
      .pop_data_o   (rsp_src[m])
    );

    // Every response must belong to a request this port forwarded.
    assert property (@(posedge clk_i) disable iff (!rst_ni) mst_rsp_valid_i[m] |-> src_valid);
  end
endmodule
