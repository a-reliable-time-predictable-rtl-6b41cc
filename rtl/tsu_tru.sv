// tsu_tru: traffic regulation unit, the third stage of the traffic shaper unit (TSU).
//
// It gives its initiator a fixed transfer budget, in bytes, for every communication period
// of period_i cycles, separately for reads and writes. Each AR or AW costs
// (len + 1) << size bytes. A request is let through only if the budget left in the period
// covers it; otherwise it waits until the next period refills the budget. A request larger
// than the whole budget is let through at the start of a period so that it cannot be
// blocked forever. With en_i low the unit only counts. The bytes granted in the current
// period are readable (bytes_r_o, bytes_w_o), which gives software the observability the
// paper calls for.
//
// The budget-per-period rule is the paper's; byte units and the oversize rule are this
// design's choice. The gate is combinational: it adds no latency.
module tsu_tru import soc_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [31:0] period_i,
  input  logic [31:0] budget_r_i,
  input  logic [31:0] budget_w_i,
  output logic [31:0] bytes_r_o,
  output logic [31:0] bytes_w_o,
  output logic        stall_o,      // a request is being held back this cycle
  input  axi_req_t    slv_req_i,
  output axi_rsp_t    slv_rsp_o,
  output axi_req_t    mst_req_o,
  input  axi_rsp_t    mst_rsp_i
);
  logic [31:0] cyc_q, used_r_q, used_w_q, cost_r, cost_w;
  logic        ok_r, ok_w, new_period;

  assign cost_r = 32'(slv_req_i.ar.len + 9'd1) << slv_req_i.ar.size;
  assign cost_w = 32'(slv_req_i.aw.len + 9'd1) << slv_req_i.aw.size;
  assign ok_r   = !en_i || (used_r_q == 0) || (used_r_q + cost_r <= budget_r_i);
  assign ok_w   = !en_i || (used_w_q == 0) || (used_w_q + cost_w <= budget_w_i);
  assign new_period = (cyc_q + 32'd1 >= period_i);

  always_comb begin
    mst_req_o          = slv_req_i;
    mst_req_o.ar_valid = slv_req_i.ar_valid && ok_r;
    mst_req_o.aw_valid = slv_req_i.aw_valid && ok_w;
    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.ar_ready = mst_rsp_i.ar_ready && ok_r;
    slv_rsp_o.aw_ready = mst_rsp_i.aw_ready && ok_w;
  end

  assign stall_o   = (slv_req_i.ar_valid && !ok_r) || (slv_req_i.aw_valid && !ok_w);
  assign bytes_r_o = used_r_q;
  assign bytes_w_o = used_w_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cyc_q    <= '0;
      used_r_q <= '0;
      used_w_q <= '0;
    end else if (new_period) begin
      cyc_q    <= '0;
      used_r_q <= '0;
      used_w_q <= '0;
    end else begin
      cyc_q <= cyc_q + 32'd1;
      if (mst_req_o.ar_valid && mst_rsp_i.ar_ready) used_r_q <= used_r_q + cost_r;
      if (mst_req_o.aw_valid && mst_rsp_i.aw_ready) used_w_q <= used_w_q + cost_w;
    end
  end
endmodule
