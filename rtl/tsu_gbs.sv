// tsu_gbs: granular burst splitter, the first stage of the traffic shaper unit (TSU).
//
// It cuts every INCR burst longer than the configured granularity into fragments of at
// most gran_i beats, so that a long burst of a non-critical initiator (a DMA engine, say)
// holds a target only for one fragment and other initiators get their turn in between.
// Upstream the initiator still sees one burst: the R "last" flag of every fragment but the
// final one is cleared, and the B responses of all fragments are merged into one (the worst
// response wins). The first fragment is issued in the same cycle the burst arrives, so
// splitting adds no latency; the upstream AR/AW handshake completes with the first
// fragment (the initiator may then take R beats at once), and the remaining fragments are
// issued from a copy of the request while a new upstream AR/AW waits. FIXED and WRAP bursts, and every burst when en_i is low, pass whole.
//
// Interface: AXI slave port (upstream, from the initiator), AXI master port (downstream).
// gran_i is the fragment size in beats (1..256; 0 is read as 256). Up to QD fragments per
// direction may be outstanding downstream. The paper gives the function and that the size
// is configurable; the queue depth and merge rule are this design's.
module tsu_gbs import soc_pkg::*; #(
  parameter int unsigned QD = 4
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       en_i,
  input  logic [8:0] gran_i,
  input  axi_req_t   slv_req_i,
  output axi_rsp_t   slv_rsp_o,
  output axi_req_t   mst_req_o,
  input  axi_rsp_t   mst_rsp_i
);

  logic [8:0] gran;
  assign gran = (gran_i == 9'd0 || gran_i > 9'd256) ? 9'd256 : gran_i;

  // ---------------- read address: split ----------------
  logic       ar_act_q, aw_act_q;
  addr_t      ar_addr_q, aw_addr_q;
  logic [8:0] ar_rem_q, aw_rem_q;    // beats still to issue, minus one
  addr_t      ar_addr, aw_addr;
  logic [8:0] ar_rem, aw_rem, ar_flen, aw_flen;
  logic       ar_split, aw_split, ar_lastf, aw_lastf;
  logic       rq_full, rq_empty, rq_last, wq_full, wq_empty, bq_full, bq_empty, bq_last;
  logic [8:0] wq_len;
  logic       ar_fire, aw_fire;
  logic [8:0] wbeat_q;            // beat index inside the current W fragment
  logic [1:0] bresp_q;            // worst B response of the fragments so far

  ax_chan_t   ar_q, aw_q, ar_cur, aw_cur;   // copy of the burst being split
  assign ar_cur   = ar_act_q ? ar_q : slv_req_i.ar;
  assign aw_cur   = aw_act_q ? aw_q : slv_req_i.aw;
  assign ar_addr  = ar_act_q ? ar_addr_q : slv_req_i.ar.addr;
  assign aw_addr  = aw_act_q ? aw_addr_q : slv_req_i.aw.addr;
  assign ar_rem   = ar_act_q ? ar_rem_q : {1'b0, slv_req_i.ar.len};
  assign aw_rem   = aw_act_q ? aw_rem_q : {1'b0, slv_req_i.aw.len};
  assign ar_split = en_i && (ar_cur.burst == BURST_INCR);
  assign aw_split = en_i && (aw_cur.burst == BURST_INCR);
  assign ar_flen  = (!ar_split || ar_rem < gran) ? ar_rem : gran - 9'd1;
  assign aw_flen  = (!aw_split || aw_rem < gran) ? aw_rem : gran - 9'd1;
  assign ar_lastf = (ar_flen == ar_rem);
  assign aw_lastf = (aw_flen == aw_rem);

  always_comb begin
    mst_req_o              = slv_req_i;
    mst_req_o.ar           = ar_cur;
    mst_req_o.ar.addr      = ar_addr;
    mst_req_o.ar.len       = ar_flen[7:0];
    mst_req_o.ar_valid     = (ar_act_q || slv_req_i.ar_valid) && !rq_full;
    mst_req_o.aw           = aw_cur;
    mst_req_o.aw.addr      = aw_addr;
    mst_req_o.aw.len       = aw_flen[7:0];
    mst_req_o.aw_valid     = (aw_act_q || slv_req_i.aw_valid) && !wq_full && !bq_full;
    // W: last at each fragment end
    mst_req_o.w_valid      = slv_req_i.w_valid && !wq_empty;
    mst_req_o.w.last       = (wbeat_q == wq_len);
    mst_req_o.b_ready      = bq_last ? slv_req_i.b_ready : 1'b1;
  end

  assign ar_fire = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign aw_fire = mst_req_o.aw_valid && mst_rsp_i.aw_ready;


  always_comb begin
    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.ar_ready = ar_fire && !ar_act_q;
    slv_rsp_o.aw_ready = aw_fire && !aw_act_q;
    slv_rsp_o.w_ready  = mst_rsp_i.w_ready && !wq_empty;
    slv_rsp_o.r.last   = mst_rsp_i.r.last && rq_last;
    slv_rsp_o.b_valid  = mst_rsp_i.b_valid && !bq_empty && bq_last;
    // merged write response: worst of all fragments
    if (bresp_q > mst_rsp_i.b.resp) slv_rsp_o.b.resp = bresp_q;
  end

  // bookkeeping queues: per fragment, whether it is the final one (R, B) and its length (W)
  logic       r_pop, w_pop, b_pop;
  assign r_pop = mst_rsp_i.r_valid && slv_req_i.r_ready && mst_rsp_i.r.last;
  assign w_pop = mst_req_o.w_valid && mst_rsp_i.w_ready && mst_req_o.w.last;
  assign b_pop = mst_rsp_i.b_valid && mst_req_o.b_ready;

  sync_fifo #(.W(1), .DEPTH(QD)) i_rq (.clk_i, .rst_ni, .push_i(ar_fire), .data_i(ar_lastf),
    .pop_i(r_pop), .data_o(rq_last), .full_o(rq_full), .empty_o(rq_empty), .count_o());
  sync_fifo #(.W(9), .DEPTH(QD)) i_wq (.clk_i, .rst_ni, .push_i(aw_fire), .data_i(aw_flen),
    .pop_i(w_pop), .data_o(wq_len), .full_o(wq_full), .empty_o(wq_empty), .count_o());
  sync_fifo #(.W(1), .DEPTH(QD)) i_bq (.clk_i, .rst_ni, .push_i(aw_fire), .data_i(aw_lastf),
    .pop_i(b_pop), .data_o(bq_last), .full_o(bq_full), .empty_o(bq_empty), .count_o());


  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_act_q  <= 1'b0;
      aw_act_q  <= 1'b0;
      ar_q      <= '0;
      aw_q      <= '0;
      ar_addr_q <= '0;
      aw_addr_q <= '0;
      ar_rem_q  <= '0;
      aw_rem_q  <= '0;
      wbeat_q   <= '0;
      bresp_q   <= RESP_OKAY;
    end else begin
      if (ar_fire) begin
        if (!ar_act_q) ar_q <= slv_req_i.ar;
        ar_act_q  <= !ar_lastf;
        ar_addr_q <= ar_addr + (addr_t'({ar_flen} + 32'd1) << ar_cur.size);
        ar_rem_q  <= ar_rem - ar_flen - 9'd1;
      end
      if (aw_fire) begin
        if (!aw_act_q) aw_q <= slv_req_i.aw;
        aw_act_q  <= !aw_lastf;
        aw_addr_q <= aw_addr + (addr_t'({aw_flen} + 32'd1) << aw_cur.size);
        aw_rem_q  <= aw_rem - aw_flen - 9'd1;
      end
      if (mst_req_o.w_valid && mst_rsp_i.w_ready)
        wbeat_q <= mst_req_o.w.last ? 9'd0 : wbeat_q + 9'd1;
      if (b_pop) bresp_q <= bq_last ? RESP_OKAY : slv_rsp_o.b.resp;
    end
  end

  a_rq: assert property (@(posedge clk_i) disable iff (!rst_ni) mst_rsp_i.r_valid |-> !rq_empty);

endmodule
