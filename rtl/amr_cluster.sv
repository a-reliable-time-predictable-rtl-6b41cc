// amr_cluster: the adaptive-modular-redundancy (AMR) integer cluster, without its cores.
//
// Twelve RV32 cores (not part of this RTL: their ports are this module's core_* ports)
// share a 32-bank, 256 KiB, ECC-protected L1 scratchpad through a one-cycle interconnect
// (tcdm_spm). Between the cores and the interconnect sits the AMR logic (hmr_unit): in
// INDIP mode each core has its own port; in DLM six main cores are each checked against a
// shadow core, in TLM four main cores are voted with two shadows each. For each main core
// a fast-recovery unit (hfr_unit) keeps an ECC-protected copy of the last checked
// architectural state and restores the group after an error; its back-up and recovery
// buses are also ports (they connect to the cores' register files). A cluster DMA copies
// between L2/L3 and L1. The cluster has one AXI master port (used by the DMA) and one AXI
// slave port (through which other initiators reach the L1) on the system crossbar. The DMA
// reaches its own L1 directly through a local address demultiplexer.
//
// L1 port map: 0..11 cores, 12..13 the AXI slave path, 14..15 the DMA path (each a 64-bit
// path split into two 32-bit halves).
// Configuration (reg bus, byte offsets): 0x000 AMR manager (hmr_unit), 0x100 DMA.
// From the paper: 12 cores, 32 banks, 256 KiB, ECC, one-cycle interconnect, DMA, AMR with
// HFR. This design's choices: the address window, the DMA engine, the local crossbar,
// the grouping of errors (a group's HFR is triggered by its DLM mismatch or by any TLM
// fault in its triple).
module amr_cluster import soc_pkg::*; #(
  parameter addr_t       L1_BASE = 32'h5000_0000,
  parameter int unsigned NC      = 12,
  parameter int unsigned NB      = 32,
  parameter int unsigned L1_SIZE = 256 * 1024,
  parameter int unsigned NCSR    = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  reg_req_t  cfg_req_i,
  output reg_rsp_t  cfg_rsp_o,
  // system crossbar
  input  axi_req_t  slv_req_i,
  output axi_rsp_t  slv_rsp_o,
  output axi_req_t  mst_req_o,
  input  axi_rsp_t  mst_rsp_i,
  // cores
  input  core_req_t core_req_i [NC],
  output core_rsp_t core_rsp_o [NC],
  // fast recovery, one unit per possible main core (NC/2)
  input  logic        core_halted_i [NC/2],
  input  logic [1:0]  bk_rf_we_i    [NC/2],
  input  logic [4:0]  bk_rf_waddr_i [NC/2][2],
  input  logic [31:0] bk_rf_wdata_i [NC/2][2],
  input  logic        bk_pc_we_i    [NC/2],
  input  logic [31:0] bk_pc_i       [NC/2],
  input  logic        bk_csr_we_i   [NC/2],
  input  logic [$clog2(NCSR)-1:0] bk_csr_addr_i [NC/2],
  input  logic [31:0] bk_csr_wdata_i [NC/2],
  output logic        core_rst_o    [NC/2],
  output logic        core_halt_o   [NC/2],
  output logic [1:0]  rec_rf_we_o   [NC/2],
  output logic [4:0]  rec_rf_waddr_o [NC/2][2],
  output logic [31:0] rec_rf_wdata_o [NC/2][2],
  output logic        rec_pc_we_o   [NC/2],
  output logic [31:0] rec_pc_o      [NC/2],
  output logic        rec_csr_we_o  [NC/2],
  output logic [$clog2(NCSR)-1:0] rec_csr_addr_o [NC/2],
  output logic [31:0] rec_csr_wdata_o [NC/2],
  output amr_mode_e   mode_o,
  output logic [31:0] recoveries_o,
  output logic        dma_busy_o,
  output logic [31:0] conflicts_o
);
  localparam int unsigned NP = NC + 4;
  localparam int unsigned NG = NC / 2;
  localparam int unsigned OW = $bits(core_req_t);
  localparam int unsigned IW = $bits(core_rsp_t);

  // ---------------- configuration ----------------
  reg_req_t hmr_cfg, dma_cfg;
  reg_rsp_t hmr_rsp, dma_rsp;
  always_comb begin
    hmr_cfg = cfg_req_i;
    dma_cfg = cfg_req_i;
    hmr_cfg.valid = cfg_req_i.valid && cfg_req_i.addr[11:8] == 4'h0;
    dma_cfg.valid = cfg_req_i.valid && cfg_req_i.addr[11:8] == 4'h1;
    cfg_rsp_o = (cfg_req_i.addr[11:8] == 4'h1) ? dma_rsp : hmr_rsp;
  end

  // ---------------- AMR: bypass / checker / voter ----------------
  logic [OW-1:0] c_out [NC], s_out [NC];
  logic [IW-1:0] c_in  [NC], s_in  [NC];
  logic [NG-1:0] dlm_err;
  logic [NC-1:0] tlm_fault;
  amr_mode_e     mode;

  always_comb
    for (int unsigned c = 0; c < NC; c++) begin
      c_out[c]      = core_req_i[c];
      core_rsp_o[c] = core_rsp_t'(c_in[c]);
    end

  hmr_unit #(.NC(NC), .OUT_W(OW), .IN_W(IW)) i_hmr (.clk_i, .rst_ni, .cfg_req_i(hmr_cfg),
    .cfg_rsp_o(hmr_rsp), .mode_o(mode), .core_out_i(c_out), .core_in_o(c_in),
    .sys_out_o(s_out), .sys_in_i(s_in), .dlm_err_o(dlm_err), .tlm_fault_o(tlm_fault));
  assign mode_o = mode;

  // ---------------- fast recovery ----------------
  logic        g_err [NG];
  logic [31:0] g_rec [NG];
  always_comb
    for (int unsigned g = 0; g < NG; g++) begin
      g_err[g] = 1'b0;
      if (mode == MODE_DLM) g_err[g] = dlm_err[g];
      else if (mode == MODE_TLM && g < NC/3)
        g_err[g] = tlm_fault[g] || tlm_fault[g + NC/3] || tlm_fault[g + 2*(NC/3)];
    end

  for (genvar g = 0; g < NG; g++) begin : g_hfr
    hfr_unit #(.NCSR(NCSR)) i_hfr (.clk_i, .rst_ni, .error_i(g_err[g]),
      .core_halted_i(core_halted_i[g]), .bk_rf_we_i(bk_rf_we_i[g]),
      .bk_rf_waddr_i(bk_rf_waddr_i[g]), .bk_rf_wdata_i(bk_rf_wdata_i[g]),
      .bk_pc_we_i(bk_pc_we_i[g]), .bk_pc_i(bk_pc_i[g]), .bk_csr_we_i(bk_csr_we_i[g]),
      .bk_csr_addr_i(bk_csr_addr_i[g]), .bk_csr_wdata_i(bk_csr_wdata_i[g]),
      .rst_o(core_rst_o[g]), .halt_o(core_halt_o[g]), .rec_rf_we_o(rec_rf_we_o[g]),
      .rec_rf_waddr_o(rec_rf_waddr_o[g]), .rec_rf_wdata_o(rec_rf_wdata_o[g]),
      .rec_pc_we_o(rec_pc_we_o[g]), .rec_pc_o(rec_pc_o[g]), .rec_csr_we_o(rec_csr_we_o[g]),
      .rec_csr_addr_o(rec_csr_addr_o[g]), .rec_csr_wdata_o(rec_csr_wdata_o[g]),
      .busy_o(), .unc_o(), .recoveries_o(g_rec[g]));
  end
  always_comb begin
    recoveries_o = '0;
    for (int unsigned g = 0; g < NG; g++) recoveries_o += g_rec[g];
  end

  // ---------------- DMA, local routing, AXI paths into L1 ----------------
  axi_req_t dma_req, l1_req [2], dm_req [2];
  axi_rsp_t dma_rsp_axi, l1_rsp [2], dm_rsp [2];

  dma i_dma (.clk_i, .rst_ni, .cfg_req_i(dma_cfg), .cfg_rsp_o(dma_rsp), .busy_o(dma_busy_o),
    .axi_req_o(dma_req), .axi_rsp_i(dma_rsp_axi));
  axi_demux2 #(.BASE(L1_BASE), .SIZE(L1_SIZE)) i_demux (.clk_i, .rst_ni, .slv_req_i(dma_req),
    .slv_rsp_o(dma_rsp_axi), .mst_req_o(dm_req), .mst_rsp_i(dm_rsp));

  assign l1_req[0]  = slv_req_i;       // system initiators into L1
  assign slv_rsp_o  = l1_rsp[0];
  assign l1_req[1]  = dm_req[0];       // DMA into L1
  assign dm_rsp[0]  = l1_rsp[1];
  assign mst_req_o  = dm_req[1];       // DMA to the rest of the SoC
  assign dm_rsp[1]  = mst_rsp_i;

  logic        h_req [4], h_gnt [4], h_we [4], h_rvalid [4], h_err [4];
  logic [31:0] h_addr [4], h_wdata [4], h_rdata [4];
  logic [3:0]  h_be [4];

  for (genvar a = 0; a < 2; a++) begin : g_path
    logic  a_req, a_gnt, a_we, a_rvalid, a_err;
    addr_t a_addr;
    strb_t a_be;
    data_t a_wdata, a_rdata;
    axi_to_mem i_axi2mem (.clk_i, .rst_ni, .axi_req_i(l1_req[a]), .axi_rsp_o(l1_rsp[a]),
      .mem_req_o(a_req), .mem_gnt_i(a_gnt), .mem_we_o(a_we), .mem_addr_o(a_addr),
      .mem_be_o(a_be), .mem_wdata_o(a_wdata), .mem_rvalid_i(a_rvalid), .mem_rdata_i(a_rdata),
      .mem_err_i(a_err));
    mem_split64 i_split (.clk_i, .rst_ni, .req_i(a_req), .gnt_o(a_gnt), .we_i(a_we),
      .addr_i(a_addr - L1_BASE), .be_i(a_be), .wdata_i(a_wdata), .rvalid_o(a_rvalid),
      .rdata_o(a_rdata), .err_o(a_err), .h_req_o(h_req[2*a +: 2]), .h_gnt_i(h_gnt[2*a +: 2]),
      .h_we_o(h_we[2*a +: 2]), .h_addr_o(h_addr[2*a +: 2]), .h_be_o(h_be[2*a +: 2]),
      .h_wdata_o(h_wdata[2*a +: 2]), .h_rvalid_i(h_rvalid[2*a +: 2]),
      .h_rdata_i(h_rdata[2*a +: 2]), .h_err_i(h_err[2*a +: 2]));
  end

  // ---------------- L1 ----------------
  logic        t_req [NP], t_gnt [NP], t_we [NP], t_rvalid [NP], t_err [NP];
  logic [31:0] t_addr [NP], t_wdata [NP], t_rdata [NP];
  logic [3:0]  t_be [NP];

  always_comb begin
    for (int unsigned c = 0; c < NC; c++) begin
      core_req_t r;
      core_rsp_t q;
      r = core_req_t'(s_out[c]);
      t_req[c]   = r.req;
      t_we[c]    = r.we;
      t_addr[c]  = r.addr - L1_BASE;
      t_be[c]    = r.be;
      t_wdata[c] = r.wdata;
      q.gnt      = t_gnt[c];
      q.rvalid   = t_rvalid[c];
      q.rdata    = t_rdata[c];
      q.err      = t_err[c];
      s_in[c]    = q;
    end
    for (int unsigned h = 0; h < 4; h++) begin
      t_req[NC+h]   = h_req[h];
      t_we[NC+h]    = h_we[h];
      t_addr[NC+h]  = h_addr[h];
      t_be[NC+h]    = h_be[h];
      t_wdata[NC+h] = h_wdata[h];
      h_gnt[h]      = t_gnt[NC+h];
      h_rvalid[h]   = t_rvalid[NC+h];
      h_rdata[h]    = t_rdata[NC+h];
      h_err[h]      = t_err[NC+h];
    end
  end

  tcdm_spm #(.NP(NP), .NB(NB), .DW(32), .SIZE_BYTES(L1_SIZE), .ECC(1'b1)) i_l1 (.clk_i, .rst_ni,
    .req_i(t_req), .gnt_o(t_gnt), .we_i(t_we), .addr_i(t_addr), .be_i(t_be), .wdata_i(t_wdata),
    .rvalid_o(t_rvalid), .rdata_o(t_rdata), .err_o(t_err), .conflicts_o(conflicts_o));

endmodule
