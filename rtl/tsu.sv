// tsu: traffic shaper unit in front of one initiator's port on the system crossbar.
//
// Every initiator of the SoC reaches the crossbar through one of these. It chains the
// three stages the paper lists, in its order: the granular burst splitter (tsu_gbs), the
// write buffer (tsu_wb) and the traffic regulation unit (tsu_tru). Software programs it
// through a small register bank (32-bit registers, byte offsets):
//   0x00 CTRL      bit0 splitter enable, bit1 regulation enable
//   0x04 GRAN      fragment size in beats (1..256)
//   0x08 PERIOD    regulation period in cycles
//   0x0C BUDGET_R  read budget per period, bytes
//   0x10 BUDGET_W  write budget per period, bytes
//   0x14 BYTES_R   (read only) read bytes granted in this period
//   0x18 BYTES_W   (read only) write bytes granted in this period
// After reset all stages are off and bursts pass unchanged (apart from the write buffer).
// The register map and reset values are this design's choice.
module tsu import soc_pkg::*; #(
  parameter int unsigned WB_DEPTH = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t cfg_req_i,
  output reg_rsp_t cfg_rsp_o,
  output logic     stall_o,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i
);
  logic [1:0]  ctrl_q;
  logic [8:0]  gran_q;
  logic [31:0] period_q, budget_r_q, budget_w_q, bytes_r, bytes_w;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q     <= '0;
      gran_q     <= 9'd256;
      period_q   <= 32'd1000;
      budget_r_q <= 32'hffff_ffff;
      budget_w_q <= 32'hffff_ffff;
    end else if (cfg_req_i.valid && cfg_req_i.write) begin
      unique case (cfg_req_i.addr[7:0])
        8'h00: ctrl_q     <= cfg_req_i.wdata[1:0];
        8'h04: gran_q     <= cfg_req_i.wdata[8:0];
        8'h08: period_q   <= cfg_req_i.wdata;
        8'h0C: budget_r_q <= cfg_req_i.wdata;
        8'h10: budget_w_q <= cfg_req_i.wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_rsp_o = '0;
    unique case (cfg_req_i.addr[7:0])
      8'h00: cfg_rsp_o.rdata = {30'd0, ctrl_q};
      8'h04: cfg_rsp_o.rdata = {23'd0, gran_q};
      8'h08: cfg_rsp_o.rdata = period_q;
      8'h0C: cfg_rsp_o.rdata = budget_r_q;
      8'h10: cfg_rsp_o.rdata = budget_w_q;
      8'h14: cfg_rsp_o.rdata = bytes_r;
      8'h18: cfg_rsp_o.rdata = bytes_w;
      default: cfg_rsp_o.error = cfg_req_i.valid;
    endcase
  end

  axi_req_t req_1, req_2;
  axi_rsp_t rsp_1, rsp_2;

  tsu_gbs i_gbs (.clk_i, .rst_ni, .en_i(ctrl_q[0]), .gran_i(gran_q),
    .slv_req_i, .slv_rsp_o, .mst_req_o(req_1), .mst_rsp_i(rsp_1));
  tsu_wb #(.DEPTH(WB_DEPTH)) i_wb (.clk_i, .rst_ni,
    .slv_req_i(req_1), .slv_rsp_o(rsp_1), .mst_req_o(req_2), .mst_rsp_i(rsp_2));
  tsu_tru i_tru (.clk_i, .rst_ni, .en_i(ctrl_q[1]), .period_i(period_q),
    .budget_r_i(budget_r_q), .budget_w_i(budget_w_q), .bytes_r_o(bytes_r), .bytes_w_o(bytes_w),
    .stall_o, .slv_req_i(req_2), .slv_rsp_o(rsp_2), .mst_req_o, .mst_rsp_i);
endmodule
