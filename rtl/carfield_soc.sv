// carfield_soc: top level of the mixed-criticality SoC (the parts this RTL provides).
//
// Eight initiators share a 64-bit AXI4 crossbar (axi_xbar), each through its own traffic
// shaper unit (tsu): the secure domain, the safe domain, the two host cores, the serial
// link, the system DMA, the vector cluster and the AMR cluster. The targets are the two
// ports of the 1 MiB L2 scratchpad (dcspm), the 128 KiB partitionable last-level cache
// (dpllc) in front of the HyperRAM, the L1 memories of the two clusters, and the
// peripheral port, which also takes every address no other target owns.
//
// Address map (this design's choice):
//   0x5000_0000  256 KiB  AMR cluster L1
//   0x5180_0000  128 KiB  vector cluster L1
//   0x7800_0000    2 MiB  L2 port 0: +0 interleaved view, +1 MiB contiguous view
//   0x7820_0000    2 MiB  L2 port 1: same layout
//   0x8000_0000    1 GiB  HyperRAM, cached by the DPLLC
//   elsewhere             peripheral port
// Configuration bus (cfg_req_i, 16-bit byte address), by addr[15:12]:
//   0..7 TSU of initiator 0..7, 8 DPLLC, 9 system DMA, 10 AMR cluster, 11 vector cluster.
//
// The secure and safe domains, the host cores, the serial link, the cluster cores and
// vector units, the HyperBus controller, the peripherals, PLLs and clock-domain crossings
// are not part of this RTL; their connections are ports of this module. Everything runs
// on one clock (the chip has three clock domains).
module carfield_soc import soc_pkg::*; #(
  parameter int unsigned NCSR = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  reg_req_t    cfg_req_i,
  output reg_rsp_t    cfg_rsp_o,
  // external initiators: 0 secure domain, 1 safe domain, 2/3 host cores, 4 serial link
  input  axi_req_t    ext_req_i [5],
  output axi_rsp_t    ext_rsp_o [5],
  // peripheral target port
  output axi_req_t    periph_req_o,
  input  axi_rsp_t    periph_rsp_i,
  // DPLLC memory side (to the HyperBus controller / HyperRAM)
  output axi_req_t    hyper_req_o,
  input  axi_rsp_t    hyper_rsp_i,
  // AMR cluster cores
  input  core_req_t   amr_core_req_i [12],
  output core_rsp_t   amr_core_rsp_o [12],
  input  logic        amr_core_halted_i [6],
  input  logic [1:0]  amr_bk_rf_we_i    [6],
  input  logic [4:0]  amr_bk_rf_waddr_i [6][2],
  input  logic [31:0] amr_bk_rf_wdata_i [6][2],
  input  logic        amr_bk_pc_we_i    [6],
  input  logic [31:0] amr_bk_pc_i       [6],
  input  logic        amr_bk_csr_we_i   [6],
  input  logic [$clog2(NCSR)-1:0] amr_bk_csr_addr_i [6],
  input  logic [31:0] amr_bk_csr_wdata_i [6],
  output logic        amr_core_rst_o    [6],
  output logic        amr_core_halt_o   [6],
  output logic [1:0]  amr_rec_rf_we_o   [6],
  output logic [4:0]  amr_rec_rf_waddr_o [6][2],
  output logic [31:0] amr_rec_rf_wdata_o [6][2],
  output logic        amr_rec_pc_we_o   [6],
  output logic [31:0] amr_rec_pc_o      [6],
  output logic        amr_rec_csr_we_o  [6],
  output logic [$clog2(NCSR)-1:0] amr_rec_csr_addr_o [6],
  output logic [31:0] amr_rec_csr_wdata_o [6],
  output amr_mode_e   amr_mode_o,
  output logic [31:0] amr_recoveries_o,
  // vector cluster VLSU and VRF ports
  input  logic        vlsu_req_i    [8],
  output logic        vlsu_gnt_o    [8],
  input  logic        vlsu_we_i     [8],
  input  logic [31:0] vlsu_addr_i   [8],
  input  logic [7:0]  vlsu_be_i     [8],
  input  logic [63:0] vlsu_wdata_i  [8],
  output logic        vlsu_rvalid_o [8],
  output logic [63:0] vlsu_rdata_o  [8],
  input  logic [3:0]   vrf_raddr_i [2][4][3],
  output logic [255:0] vrf_rdata_o [2][4][3],
  input  logic         vrf_we_i    [2][4],
  input  logic [3:0]   vrf_waddr_i [2][4],
  input  logic [31:0]  vrf_wbe_i   [2][4],
  input  logic [255:0] vrf_wdata_i [2][4],
  // status
  output logic [7:0]  tsu_stall_o,
  output logic [31:0] l2_err_corr_o,
  output logic [31:0] l2_err_unc_o
);
  localparam int unsigned NM = 8;
  localparam int unsigned NS = 6;
  localparam addr_t XBASE [NS] = '{32'h7800_0000, 32'h7820_0000, 32'h8000_0000,
                                   32'h5180_0000, 32'h5000_0000, 32'h0000_0000};
  localparam addr_t XSIZE [NS] = '{32'h0020_0000, 32'h0020_0000, 32'h4000_0000,
                                   32'h0002_0000, 32'h0004_0000, 32'h0000_0000};

  // ---------------- configuration bus ----------------
  reg_req_t cfg [12];
  reg_rsp_t rsp [12];
  always_comb begin
    for (int unsigned i = 0; i < 12; i++) begin
      cfg[i]       = cfg_req_i;
      cfg[i].valid = cfg_req_i.valid && (cfg_req_i.addr[15:12] == 4'(i));
    end
    cfg_rsp_o = '0;
    if (cfg_req_i.addr[15:12] < 4'd12) cfg_rsp_o = rsp[cfg_req_i.addr[15:12]];
    else cfg_rsp_o.error = cfg_req_i.valid;
  end

  // ---------------- initiators and their TSUs ----------------
  axi_req_t ini_req [NM], xm_req [NM], xs_req [NS];
  axi_rsp_t ini_rsp [NM], xm_rsp [NM], xs_rsp [NS];

  for (genvar i = 0; i < 5; i++) begin : g_ext
    assign ini_req[i]   = ext_req_i[i];
    assign ext_rsp_o[i] = ini_rsp[i];
  end

  dma i_sys_dma (.clk_i, .rst_ni, .cfg_req_i(cfg[9]), .cfg_rsp_o(rsp[9]), .busy_o(),
    .axi_req_o(ini_req[5]), .axi_rsp_i(ini_rsp[5]));

  for (genvar i = 0; i < NM; i++) begin : g_tsu
    tsu i_tsu (.clk_i, .rst_ni, .cfg_req_i(cfg[i]), .cfg_rsp_o(rsp[i]), .stall_o(tsu_stall_o[i]),
      .slv_req_i(ini_req[i]), .slv_rsp_o(ini_rsp[i]), .mst_req_o(xm_req[i]), .mst_rsp_i(xm_rsp[i]));
  end

  axi_xbar #(.NM(NM), .NS(NS), .BASE(XBASE), .SIZE(XSIZE)) i_xbar (.clk_i, .rst_ni,
    .m_req_i(xm_req), .m_rsp_o(xm_rsp), .s_req_o(xs_req), .s_rsp_i(xs_rsp));

  // ---------------- targets ----------------
  axi_req_t l2_req [2];
  axi_rsp_t l2_rsp [2];
  assign l2_req[0] = xs_req[0];
  assign l2_req[1] = xs_req[1];
  assign xs_rsp[0] = l2_rsp[0];
  assign xs_rsp[1] = l2_rsp[1];

  dcspm #(.BASE(32'h7800_0000)) i_l2 (.clk_i, .rst_ni, .axi_req_i(l2_req), .axi_rsp_o(l2_rsp),
    .err_corr_cnt_o(l2_err_corr_o), .err_unc_cnt_o(l2_err_unc_o));

  dpllc i_llc (.clk_i, .rst_ni, .cfg_req_i(cfg[8]), .cfg_rsp_o(rsp[8]),
    .slv_req_i(xs_req[2]), .slv_rsp_o(xs_rsp[2]), .mem_req_o(hyper_req_o), .mem_rsp_i(hyper_rsp_i));

  vector_cluster #(.L1_BASE(XBASE[3])) i_vec (.clk_i, .rst_ni, .cfg_req_i(cfg[11]),
    .cfg_rsp_o(rsp[11]), .slv_req_i(xs_req[3]), .slv_rsp_o(xs_rsp[3]),
    .mst_req_o(ini_req[6]), .mst_rsp_i(ini_rsp[6]),
    .vlsu_req_i, .vlsu_gnt_o, .vlsu_we_i, .vlsu_addr_i, .vlsu_be_i, .vlsu_wdata_i,
    .vlsu_rvalid_o, .vlsu_rdata_o, .vrf_raddr_i, .vrf_rdata_o, .vrf_we_i, .vrf_waddr_i,
    .vrf_wbe_i, .vrf_wdata_i, .dma_busy_o(), .conflicts_o());

  amr_cluster #(.L1_BASE(XBASE[4]), .NCSR(NCSR)) i_amr (.clk_i, .rst_ni, .cfg_req_i(cfg[10]),
    .cfg_rsp_o(rsp[10]), .slv_req_i(xs_req[4]), .slv_rsp_o(xs_rsp[4]),
    .mst_req_o(ini_req[7]), .mst_rsp_i(ini_rsp[7]),
    .core_req_i(amr_core_req_i), .core_rsp_o(amr_core_rsp_o),
    .core_halted_i(amr_core_halted_i), .bk_rf_we_i(amr_bk_rf_we_i),
    .bk_rf_waddr_i(amr_bk_rf_waddr_i), .bk_rf_wdata_i(amr_bk_rf_wdata_i),
    .bk_pc_we_i(amr_bk_pc_we_i), .bk_pc_i(amr_bk_pc_i), .bk_csr_we_i(amr_bk_csr_we_i),
    .bk_csr_addr_i(amr_bk_csr_addr_i), .bk_csr_wdata_i(amr_bk_csr_wdata_i),
    .core_rst_o(amr_core_rst_o), .core_halt_o(amr_core_halt_o),
    .rec_rf_we_o(amr_rec_rf_we_o), .rec_rf_waddr_o(amr_rec_rf_waddr_o),
    .rec_rf_wdata_o(amr_rec_rf_wdata_o), .rec_pc_we_o(amr_rec_pc_we_o), .rec_pc_o(amr_rec_pc_o),
    .rec_csr_we_o(amr_rec_csr_we_o), .rec_csr_addr_o(amr_rec_csr_addr_o),
    .rec_csr_wdata_o(amr_rec_csr_wdata_o), .mode_o(amr_mode_o),
    .recoveries_o(amr_recoveries_o), .dma_busy_o(), .conflicts_o());

  assign periph_req_o = xs_req[5];
  assign xs_rsp[5]    = periph_rsp_i;
endmodule
