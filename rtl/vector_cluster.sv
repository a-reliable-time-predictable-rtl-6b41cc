// vector_cluster: the floating-point vector cluster, without its cores and vector units.
//
// Two RISC-V vector units (RVVU), each driven by a 32-bit scalar core, share a 16-bank
// 128 KiB L1 scratchpad (1024 bits per cycle: 16 banks x 64 bits) through a low-latency
// interconnect. Each RVVU reaches the L1 through four independent 64-bit vector
// load-store (VLSU) ports and owns a private 2 KiB vector register file (vrf) with four
// banks of three read and one write 256-bit ports. The arithmetic units, sequencers and
// scalar cores are not part of this RTL: the VLSU ports and the VRF ports are this
// module's ports, where they would connect. A cluster DMA moves data between L2 and L1; as
// in the AMR cluster, the DMA reaches its own L1 through a local address demultiplexer and
// everything else through the cluster's AXI master port; other initiators reach the L1
// through the cluster's AXI slave port.
//
// L1 port map: 0..3 VLSU ports of unit 0, 4..7 of unit 1, 8 the AXI slave path, 9 the DMA.
// Configuration (reg bus): 0x100 DMA.
// From the paper: two RVVUs, 2 KiB VRF with 4 banks of 3R/1W 256-bit ports, four 64-bit
// VLSU ports each, 16-bank 1024 b/cycle L1, DMA. This design's choices: 64-bit banks, the
// address window; the DMA here moves 64 bits per cycle, not the paper's 512.
module vector_cluster import soc_pkg::*; #(
  parameter addr_t       L1_BASE = 32'h5180_0000,
  parameter int unsigned NB      = 16,
  parameter int unsigned L1_SIZE = 128 * 1024,
  localparam int unsigned NU     = 2,
  localparam int unsigned NL     = 4      // VLSU ports per unit
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  reg_req_t    cfg_req_i,
  output reg_rsp_t    cfg_rsp_o,
  input  axi_req_t    slv_req_i,
  output axi_rsp_t    slv_rsp_o,
  output axi_req_t    mst_req_o,
  input  axi_rsp_t    mst_rsp_i,
  // VLSU ports (byte addresses in the system map)
  input  logic        vlsu_req_i    [NU*NL],
  output logic        vlsu_gnt_o    [NU*NL],
  input  logic        vlsu_we_i     [NU*NL],
  input  logic [31:0] vlsu_addr_i   [NU*NL],
  input  logic [7:0]  vlsu_be_i     [NU*NL],
  input  logic [63:0] vlsu_wdata_i  [NU*NL],
  output logic        vlsu_rvalid_o [NU*NL],
  output logic [63:0] vlsu_rdata_o  [NU*NL],
  // VRF ports of each unit
  input  logic [3:0]   vrf_raddr_i [NU][4][3],
  output logic [255:0] vrf_rdata_o [NU][4][3],
  input  logic         vrf_we_i    [NU][4],
  input  logic [3:0]   vrf_waddr_i [NU][4],
  input  logic [31:0]  vrf_wbe_i   [NU][4],
  input  logic [255:0] vrf_wdata_i [NU][4],
  output logic         dma_busy_o,
  output logic [31:0]  conflicts_o
);
  localparam int unsigned NP = NU * NL + 2;

  for (genvar u = 0; u < NU; u++) begin : g_vrf
    vrf i_vrf (.clk_i, .raddr_i(vrf_raddr_i[u]), .rdata_o(vrf_rdata_o[u]), .we_i(vrf_we_i[u]),
      .waddr_i(vrf_waddr_i[u]), .wbe_i(vrf_wbe_i[u]), .wdata_i(vrf_wdata_i[u]));
  end

  reg_req_t dma_cfg;
  always_comb begin
    dma_cfg = cfg_req_i;
    dma_cfg.valid = cfg_req_i.valid && cfg_req_i.addr[11:8] == 4'h1;
  end

  axi_req_t dma_req, l1_req [2], dm_req [2];
  axi_rsp_t dma_rsp_axi, l1_rsp [2], dm_rsp [2];

  dma i_dma (.clk_i, .rst_ni, .cfg_req_i(dma_cfg), .cfg_rsp_o, .busy_o(dma_busy_o),
    .axi_req_o(dma_req), .axi_rsp_i(dma_rsp_axi));
  axi_demux2 #(.BASE(L1_BASE), .SIZE(L1_SIZE)) i_demux (.clk_i, .rst_ni, .slv_req_i(dma_req),
    .slv_rsp_o(dma_rsp_axi), .mst_req_o(dm_req), .mst_rsp_i(dm_rsp));

  assign l1_req[0] = slv_req_i;
  assign slv_rsp_o = l1_rsp[0];
  assign l1_req[1] = dm_req[0];
  assign dm_rsp[0] = l1_rsp[1];
  assign mst_req_o = dm_req[1];
  assign dm_rsp[1] = mst_rsp_i;

  logic        t_req [NP], t_gnt [NP], t_we [NP], t_rvalid [NP], t_err [NP];
  logic [31:0] t_addr [NP];
  logic [63:0] t_wdata [NP], t_rdata [NP];
  logic [7:0]  t_be [NP];

  for (genvar a = 0; a < 2; a++) begin : g_path
    addr_t a_addr;
    axi_to_mem i_axi2mem (.clk_i, .rst_ni, .axi_req_i(l1_req[a]), .axi_rsp_o(l1_rsp[a]),
      .mem_req_o(t_req[NU*NL+a]), .mem_gnt_i(t_gnt[NU*NL+a]), .mem_we_o(t_we[NU*NL+a]),
      .mem_addr_o(a_addr), .mem_be_o(t_be[NU*NL+a]), .mem_wdata_o(t_wdata[NU*NL+a]),
      .mem_rvalid_i(t_rvalid[NU*NL+a]), .mem_rdata_i(t_rdata[NU*NL+a]), .mem_err_i(t_err[NU*NL+a]));
    assign t_addr[NU*NL+a] = a_addr - L1_BASE;
  end

  always_comb
    for (int unsigned p = 0; p < NU*NL; p++) begin
      t_req[p]         = vlsu_req_i[p];
      t_we[p]          = vlsu_we_i[p];
      t_addr[p]        = vlsu_addr_i[p] - L1_BASE;
      t_be[p]          = vlsu_be_i[p];
      t_wdata[p]       = vlsu_wdata_i[p];
      vlsu_gnt_o[p]    = t_gnt[p];
      vlsu_rvalid_o[p] = t_rvalid[p];
      vlsu_rdata_o[p]  = t_rdata[p];
    end

  tcdm_spm #(.NP(NP), .NB(NB), .DW(64), .SIZE_BYTES(L1_SIZE), .ECC(1'b0)) i_l1 (.clk_i, .rst_ni,
    .req_i(t_req), .gnt_o(t_gnt), .we_i(t_we), .addr_i(t_addr), .be_i(t_be), .wdata_i(t_wdata),
    .rvalid_o(t_rvalid), .rdata_o(t_rdata), .err_o(t_err), .conflicts_o(conflicts_o));
endmodule
