// axi_demux2: routes one AXI initiator to one of two targets by address (helper).
//
// Bursts whose address falls in [BASE, BASE + SIZE) go to target 0, all others to
// target 1. The route of a read is chosen from the AR address and kept until the last R
// beat; the route of a write is chosen from the AW address and kept until B. One read and
// one write may be outstanding, which keeps responses in order. Used inside the clusters so
// that the cluster DMA reaches the cluster's own L1 directly and everything else through
// the cluster's master port on the system crossbar.
module axi_demux2 import soc_pkg::*; #(
  parameter addr_t BASE = 32'h0,
  parameter addr_t SIZE = 32'h0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o [2],
  input  axi_rsp_t mst_rsp_i [2]
);
  logic rbusy_q, wbusy_q, rsel_q, wsel_q, rsel, wsel;

  assign rsel = rbusy_q ? rsel_q : !(slv_req_i.ar.addr >= BASE && slv_req_i.ar.addr - BASE < SIZE);
  assign wsel = wbusy_q ? wsel_q : !(slv_req_i.aw.addr >= BASE && slv_req_i.aw.addr - BASE < SIZE);

  always_comb begin
    for (int unsigned t = 0; t < 2; t++) begin
      mst_req_o[t]          = slv_req_i;
      mst_req_o[t].ar_valid = slv_req_i.ar_valid && !rbusy_q && (rsel == 1'(t));
      mst_req_o[t].r_ready  = slv_req_i.r_ready && rbusy_q && (rsel == 1'(t));
      mst_req_o[t].aw_valid = slv_req_i.aw_valid && !wbusy_q && (wsel == 1'(t));
      mst_req_o[t].w_valid  = slv_req_i.w_valid && wbusy_q && (wsel == 1'(t));
      mst_req_o[t].b_ready  = slv_req_i.b_ready && wbusy_q && (wsel == 1'(t));
    end
    slv_rsp_o          = '0;
    slv_rsp_o.ar_ready = !rbusy_q && mst_rsp_i[rsel].ar_ready;
    slv_rsp_o.r        = mst_rsp_i[rsel].r;
    slv_rsp_o.r_valid  = rbusy_q && mst_rsp_i[rsel].r_valid;
    slv_rsp_o.aw_ready = !wbusy_q && mst_rsp_i[wsel].aw_ready;
    slv_rsp_o.w_ready  = wbusy_q && mst_rsp_i[wsel].w_ready;
    slv_rsp_o.b        = mst_rsp_i[wsel].b;
    slv_rsp_o.b_valid  = wbusy_q && mst_rsp_i[wsel].b_valid;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rbusy_q <= 1'b0; wbusy_q <= 1'b0; rsel_q <= 1'b0; wsel_q <= 1'b0;
    end else begin
      if (slv_req_i.ar_valid && slv_rsp_o.ar_ready) begin
        rbusy_q <= 1'b1;
        rsel_q  <= rsel;
      end else if (slv_rsp_o.r_valid && slv_req_i.r_ready && slv_rsp_o.r.last) rbusy_q <= 1'b0;
      if (slv_req_i.aw_valid && slv_rsp_o.aw_ready) begin
        wbusy_q <= 1'b1;
        wsel_q  <= wsel;
      end else if (slv_rsp_o.b_valid && slv_req_i.b_ready) wbusy_q <= 1'b0;
    end
  end
endmodule
