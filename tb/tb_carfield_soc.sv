// tb_carfield_soc: end-to-end test of the SoC top at its default parameters.
//
// Behavioural models stand in for what the RTL leaves out: AXI initiator models for the
// safe domain (ext port 1) and the two host cores (ext ports 2 and 3), a HyperRAM model on
// the DPLLC memory port, a small memory on the peripheral port, and core models that drive
// the AMR cluster's core ports. The test runs the mechanisms of the design one after the
// other and counts how often each happened; a mechanism that never happened counts as a
// failure:
//   L2 interleaved / contiguous views, L2 dual-port use   (dcspm)
//   routing to the peripheral (default) target            (axi_xbar)
//   interference: the system DMA streams 256-beat bursts through L2 while the safe domain
//   reads single words; with the traffic shaper off the worst read latency is long, with
//   the burst splitter on (fragments of 8 beats) it is bounded   (tsu_gbs)
//   write-buffer hold: a host write with gaps between beats reaches the crossbar only
//   when all its beats are buffered                        (tsu_wb)
//   bandwidth regulation stalls                            (tsu_tru)
//   LLC misses and hits, partition isolation, partition flush   (dpllc)
//   cluster DMA from L2 into the AMR cluster L1, cores read the data, bank conflicts
//   system DMA from L2 into the vector cluster L1, VLSU loads
//   AMR mode switches, a DLM mismatch and a TLM vote, each followed by a fast recovery
module tb_carfield_soc;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam addr_t L2  = 32'h7800_0000, L2P1 = 32'h7820_0000, LLC = 32'h8000_0000;
  localparam addr_t VL1 = 32'h5180_0000, AL1  = 32'h5000_0000, PER = 32'h0300_0000;
  localparam int unsigned L2SIZE = 1024 * 1024;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  axi_req_t ext_req [5], per_req, hyp_req;
  axi_rsp_t ext_rsp [5], per_rsp, hyp_rsp;
  core_req_t creq [12];
  core_rsp_t crsp [12];
  logic        halted [6], bk_pc_we [6], bk_csr_we [6];
  logic [1:0]  bk_we [6];
  logic [4:0]  bk_wa [6][2];
  logic [31:0] bk_wd [6][2], bk_pc [6], bk_csr_wd [6];
  logic [2:0]  bk_csr_a [6];
  logic        c_rst [6], c_halt [6], rec_pc_we [6], rec_csr_we [6];
  logic [1:0]  rec_we [6];
  logic [4:0]  rec_wa [6][2];
  logic [31:0] rec_wd [6][2], rec_pc [6], rec_csr_wd [6];
  logic [2:0]  rec_csr_a [6];
  amr_mode_e   mode;
  logic [31:0] recoveries, l2_ec, l2_eu;
  logic        v_req [8], v_gnt [8], v_we [8], v_rvalid [8];
  logic [31:0] v_addr [8];
  logic [7:0]  v_be [8];
  logic [63:0] v_wdata [8], v_rdata [8];
  logic [3:0]   vrf_ra [2][4][3];
  logic [255:0] vrf_rd [2][4][3];
  logic         vrf_we [2][4];
  logic [3:0]   vrf_wa [2][4];
  logic [31:0]  vrf_wbe [2][4];
  logic [255:0] vrf_wd [2][4];
  logic [7:0]   stall;
  int h_ar, h_aw, h_w, p_ar, p_aw, p_w;

  carfield_soc dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .ext_req_i(ext_req), .ext_rsp_o(ext_rsp), .periph_req_o(per_req), .periph_rsp_i(per_rsp),
    .hyper_req_o(hyp_req), .hyper_rsp_i(hyp_rsp), .amr_core_req_i(creq), .amr_core_rsp_o(crsp),
    .amr_core_halted_i(halted), .amr_bk_rf_we_i(bk_we), .amr_bk_rf_waddr_i(bk_wa),
    .amr_bk_rf_wdata_i(bk_wd), .amr_bk_pc_we_i(bk_pc_we), .amr_bk_pc_i(bk_pc),
    .amr_bk_csr_we_i(bk_csr_we), .amr_bk_csr_addr_i(bk_csr_a), .amr_bk_csr_wdata_i(bk_csr_wd),
    .amr_core_rst_o(c_rst), .amr_core_halt_o(c_halt), .amr_rec_rf_we_o(rec_we),
    .amr_rec_rf_waddr_o(rec_wa), .amr_rec_rf_wdata_o(rec_wd), .amr_rec_pc_we_o(rec_pc_we),
    .amr_rec_pc_o(rec_pc), .amr_rec_csr_we_o(rec_csr_we), .amr_rec_csr_addr_o(rec_csr_a),
    .amr_rec_csr_wdata_o(rec_csr_wd), .amr_mode_o(mode), .amr_recoveries_o(recoveries),
    .vlsu_req_i(v_req), .vlsu_gnt_o(v_gnt), .vlsu_we_i(v_we), .vlsu_addr_i(v_addr),
    .vlsu_be_i(v_be), .vlsu_wdata_i(v_wdata), .vlsu_rvalid_o(v_rvalid), .vlsu_rdata_o(v_rdata),
    .vrf_raddr_i(vrf_ra), .vrf_rdata_o(vrf_rd), .vrf_we_i(vrf_we), .vrf_waddr_i(vrf_wa),
    .vrf_wbe_i(vrf_wbe), .vrf_wdata_i(vrf_wd), .tsu_stall_o(stall), .l2_err_corr_o(l2_ec),
    .l2_err_unc_o(l2_eu));

  axi_mem_model #(.AW_WORDS(17), .LAT(6)) hyperram (.clk_i(clk), .rst_ni(rst_n),
    .req_i(hyp_req), .rsp_o(hyp_rsp), .n_ar(h_ar), .n_aw(h_aw), .n_w(h_w));
  axi_mem_model #(.AW_WORDS(10), .LAT(1)) periph (.clk_i(clk), .rst_ni(rst_n),
    .req_i(per_req), .rsp_o(per_rsp), .n_ar(p_ar), .n_aw(p_aw), .n_w(p_w));
  axi_bfm safed (.clk_i(clk), .req_o(ext_req[1]), .rsp_i(ext_rsp[1]));
  axi_bfm host0 (.clk_i(clk), .req_o(ext_req[2]), .rsp_i(ext_rsp[2]));
  axi_bfm host1 (.clk_i(clk), .req_o(ext_req[3]), .rsp_i(ext_rsp[3]));
  assign ext_req[0] = '0;
  assign ext_req[4] = '0;

  // ---------------- mechanism counters ----------------
  typedef enum int {M_L2_INTL, M_L2_CONT, M_L2_DUAL, M_PERIPH, M_GBS_SPLIT, M_WB_HOLD,
                    M_TRU_STALL, M_LLC_MISS, M_LLC_HIT, M_LLC_ISOLATION, M_LLC_FLUSH,
                    M_CL_DMA, M_SYS_DMA, M_BANK_CONFLICT, M_VLSU, M_MODE_SWITCH, M_DLM_ERR,
                    M_TLM_VOTE, M_RECOVERY, M_NUM} mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"l2_interleaved", "l2_contiguous", "l2_dual_port", "periph_route",
    "gbs_split", "wb_hold", "tru_stall", "llc_miss", "llc_hit", "llc_isolation", "llc_flush",
    "cluster_dma", "system_dma", "bank_conflict", "vlsu_access", "amr_mode_switch", "dlm_error",
    "tlm_vote", "fast_recovery"};

  // L2 view and port use, GBS fragments of the system DMA, TRU stalls
  int dma_ar_in, dma_ar_out;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++) begin
      if (dut.l2_req[p].ar_valid && dut.l2_rsp[p].ar_ready) begin
        if (((dut.l2_req[p].ar.addr - L2) & (2 * L2SIZE - 1)) < L2SIZE) mech[M_L2_INTL]++;
        else mech[M_L2_CONT]++;
      end
    end
    if (dut.l2_rsp[0].r_valid && dut.l2_rsp[1].r_valid) mech[M_L2_DUAL]++;
    if (dut.ini_req[5].ar_valid && dut.ini_rsp[5].ar_ready) dma_ar_in++;
    if (dut.xm_req[5].ar_valid && dut.xm_rsp[5].ar_ready) dma_ar_out++;
    if (stall[5]) mech[M_TRU_STALL]++;
    if (v_req[0] && v_gnt[0]) mech[M_VLSU]++;
  end

  // ---------------- helpers ----------------
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(input logic write, input logic [15:0] a, input logic [31:0] d,
                     output logic [31:0] q);
    @(negedge clk);
    cfg_req = '{valid: 1'b1, write: write, addr: a, wdata: d};
    #1 q = cfg_rsp.rdata;
    @(negedge clk);
    cfg_req = '0;
  endtask

  // DMA at cfg page `pg` (9 system DMA, 10 AMR cluster +0x100, 11 vector cluster +0x100)
  task automatic dma_copy(input logic [15:0] base, input addr_t src, input addr_t dst,
                          input int len, input int burst, input bit wait_done);
    logic [31:0] q;
    cfg(1, base + 16'h00, src, q);
    cfg(1, base + 16'h04, dst, q);
    cfg(1, base + 16'h08, 32'(len), q);
    cfg(1, base + 16'h0C, 32'(burst), q);
    cfg(1, base + 16'h10, 1, q);
    if (wait_done) do cfg(0, base + 16'h10, 0, q); while (q[0]);
  endtask

  // AMR cores: the cores in mask issue nxt[] together, each until granted
  core_req_t nxt [12];
  logic [31:0] got [12];
  int gcyc [12];
  task automatic cores(input logic [11:0] mask, input int max_cycles);
    logic [11:0] pend, rpend;
    int cyc;
    @(negedge clk);
    pend = mask; rpend = '0; cyc = 0;
    for (int c = 0; c < 12; c++) begin creq[c] = mask[c] ? nxt[c] : '0; gcyc[c] = -1; end
    while ((pend != 0 || rpend != 0) && cyc < max_cycles) begin
      #1;
      for (int c = 0; c < 12; c++) if (pend[c] && crsp[c].gnt) begin
        gcyc[c] = cyc; pend[c] = 1'b0; rpend[c] = !nxt[c].we;
      end
      @(posedge clk); #1;
      for (int c = 0; c < 12; c++) if (rpend[c] && crsp[c].rvalid) begin
        got[c] = crsp[c].rdata; rpend[c] = 1'b0;
      end
      @(negedge clk);
      for (int c = 0; c < 12; c++) if (!pend[c]) creq[c] = '0;
      cyc++;
    end
    for (int c = 0; c < 12; c++) creq[c] = '0;
  endtask
  function automatic core_req_t st(input addr_t a, input logic [31:0] d);
    return '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
  endfunction
  function automatic core_req_t ld(input addr_t a);
    return '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
  endfunction

  // AMR core model: halts one cycle after halt
  always_ff @(posedge clk) for (int g = 0; g < 6; g++) halted[g] <= c_halt[g];

  function automatic data_t hpat(input addr_t a);
    return 64'(a[19:3]) ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  // worst latency of single-beat reads by the safe domain while `busy` runs
  task automatic probe_latency(input addr_t a, input int n, output int worst);
    worst = 0;
    for (int i = 0; i < n; i++) begin
      safed.read(a + addr_t'(i * 8), 0);
      if (safed.cycles > worst) worst = safed.cycles;
      repeat (7) @(posedge clk);
    end
  endtask

  logic [31:0] q, m0, m1, h0, r0, c0;
  int ok, worst_off, worst_on, t_last_w, t_aw, miss;
  initial begin
    cfg_req = '0;
    for (int c = 0; c < 12; c++) creq[c] = '0;
    for (int g = 0; g < 6; g++) begin
      bk_we[g] = '0; bk_pc_we[g] = 0; bk_csr_we[g] = 0; bk_pc[g] = 0; bk_csr_a[g] = 0;
      bk_csr_wd[g] = 0;
      for (int p = 0; p < 2; p++) begin bk_wa[g][p] = 0; bk_wd[g][p] = 0; end
    end
    for (int p = 0; p < 8; p++) begin
      v_req[p] = 0; v_we[p] = 0; v_addr[p] = 0; v_be[p] = '1; v_wdata[p] = 0;
    end
    for (int u = 0; u < 2; u++) for (int b = 0; b < 4; b++) begin
      vrf_we[u][b] = 0; vrf_wa[u][b] = 0; vrf_wbe[u][b] = 0; vrf_wd[u][b] = 0;
      for (int k = 0; k < 3; k++) vrf_ra[u][b][k] = 0;
    end
    foreach (mech[i]) mech[i] = 0;
    dma_ar_in = 0; dma_ar_out = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // ---- L2: interleaved write on port 0, contiguous read on port 1 ----
    for (int i = 0; i < 8; i++) host0.wdata[i] = 64'h1200_0000 + 64'(i);
    host0.write(L2, 7);
    host1.read(L2P1 + L2SIZE, 1);                  // words 0 and 4 of the interleaving
    check(host1.rdata[0] == 64'h1200_0000 && host1.rdata[1] == 64'h1200_0004, "L2 views agree");
    // both L2 ports stream at once (port 0 interleaved, port 1 contiguous)
    for (int i = 0; i < 32; i++) begin host0.wdata[i] = 64'(i); host1.wdata[i] = 64'(i); end
    host0.write(L2 + 32'h4000, 31);
    host1.write(L2P1 + L2SIZE + 32'h2_0000, 31);
    fork
      host0.read(L2 + 32'h4000, 31);
      host1.read(L2P1 + L2SIZE + 32'h2_0000, 31);
    join
    check(host0.errs == 0 && host1.errs == 0 && host0.lasts == 1 && host1.lasts == 1,
          "both L2 ports in use together");
    // peripheral route
    host0.read(PER + 32'h40, 0);
    check(host0.rdata[0] == (64'h8 ^ 64'hA5A5_0000_5A5A_0000) && p_ar == 1, "peripheral route");
    mech[M_PERIPH] = p_ar;

    // ---- interference on L2: DMA 256-beat bursts vs safe domain single reads ----
    for (int i = 0; i < 64; i++) host0.wdata[i] = 64'(i);
    for (int k = 0; k < 16; k++) host0.write(L2 + 32'h1_0000 + addr_t'(k * 512), 63);
    host0.write(L2 + 32'h8000, 63);
    dma_copy(16'h9000, L2 + 32'h1_0000, VL1, 8192, 256, 0);
    probe_latency(L2 + 32'h8000, 20, worst_off);
    do cfg(0, 16'h9010, 0, q); while (q[0]);
    cfg(1, 16'h5004, 8, q);                        // TSU of the system DMA: 8-beat fragments
    cfg(1, 16'h5000, 1, q);
    dma_copy(16'h9000, L2 + 32'h1_0000, VL1, 8192, 256, 0);
    probe_latency(L2 + 32'h8000, 20, worst_on);
    do cfg(0, 16'h9010, 0, q); while (q[0]);
    $display("safe-domain L2 read latency under DMA interference: %0d cycles unshaped, %0d with burst splitting",
             worst_off, worst_on);
    check(worst_on < worst_off && worst_on <= 40, "burst splitting bounds the interference");
    mech[M_GBS_SPLIT] = dma_ar_out - dma_ar_in;
    mech[M_SYS_DMA] = 2;
    // vector L1 holds the copy: VLSU loads
    ok = 1;
    for (int w = 0; w < 8; w++) begin
      @(negedge clk);
      for (int p = 0; p < 8; p++) begin v_req[p] = 1; v_addr[p] = VL1 + addr_t'((w * 8 + p) * 8); end
      do @(posedge clk); while (!v_gnt[0]);
      #1;
      @(negedge clk);
      for (int p = 0; p < 8; p++) v_req[p] = 0;
      if (v_rdata[0] !== 64'((w * 8) % 64)) ok = 0;
    end
    check(ok == 1, "system DMA data reaches the vector L1 (VLSU loads)");
    // regulation: 64 bytes per 100 cycles for the DMA
    cfg(1, 16'h5008, 100, q);
    cfg(1, 16'h500C, 64, q);
    cfg(1, 16'h5010, 64, q);
    cfg(1, 16'h5000, 3, q);
    dma_copy(16'h9000, L2 + 32'h1_0000, VL1 + 32'h4000, 512, 8, 1);
    check(mech[M_TRU_STALL] > 0, "regulation stalls the DMA");
    cfg(1, 16'h5000, 0, q);

    // ---- write buffer: host1 writes with gaps; AW reaches the crossbar after the last W ----
    for (int i = 0; i < 4; i++) host1.wdata[i] = 64'h7700 + 64'(i);
    fork
      host1.write(L2 + 32'h2000, 3, 3);
      begin
        t_last_w = 0; t_aw = 0;
        while (t_aw == 0) begin
          @(posedge clk);
          if (ext_req[3].w_valid && ext_rsp[3].w_ready && ext_req[3].w.last) t_last_w = int'($time / 10);
          if (dut.xm_req[3].aw_valid && dut.xm_rsp[3].aw_ready) t_aw = int'($time / 10);
        end
      end
    join
    if (t_aw >= t_last_w) mech[M_WB_HOLD]++;
    host0.read(L2 + 32'h2000, 3);
    check(host0.rdata[3] == 64'h7703 && t_aw >= t_last_w, "write buffer holds AW until all W beats are in");

    // ---- LLC: miss, hit, partitions, flush ----
    cfg(0, 16'h8088, 0, m0);
    host0.read(LLC + 32'h100, 7);
    host0.read(LLC + 32'h100, 7);
    cfg(0, 16'h8088, 0, m1);
    cfg(0, 16'h808C, 0, h0);
    check(m1 == m0 + 1 && h0 > 0 && host0.rdata[5] == hpat(LLC + 32'h128), "LLC miss then hit");
    mech[M_LLC_MISS] = int'(m1); mech[M_LLC_HIT] = int'(h0);
    cfg(1, 16'h8000, 0, q);   cfg(1, 16'h8004, 128, q);     // partition 0: sets 0..127
    cfg(1, 16'h8008, 128, q); cfg(1, 16'h800C, 128, q);     // partition 1: sets 128..255
    for (int i = 0; i < 256; i++) host0.read(LLC + 32'h1_0000 + addr_t'(i * 64), 7, 4'd0);
    for (int i = 0; i < 1200; i++) host1.read(LLC + 32'h4_0000 + addr_t'(i * 64), 0, 4'd1);
    cfg(0, 16'h8088, 0, m0);
    for (int i = 0; i < 256; i++) host0.read(LLC + 32'h1_0000 + addr_t'(i * 64), 7, 4'd0);
    cfg(0, 16'h8088, 0, m1);
    check(m1 == m0, "critical partition keeps its lines under interference");
    if (m1 == m0) mech[M_LLC_ISOLATION]++;
    for (int i = 0; i < 8; i++) host1.wdata[i] = 64'hF1F1_0000 + 64'(i);
    host1.write(LLC + 32'h4_0000, 7, 0, 4'd1);
    r0 = h_aw;
    cfg(1, 16'h8080, 1, q);
    do cfg(0, 16'h8084, 0, q); while (q[0]);
    check(h_aw == r0 + 1 && hyperram.mem[32'h4_0000 >> 3] == 64'hF1F1_0000, "partition flush writes back");
    if (h_aw == r0 + 1) mech[M_LLC_FLUSH]++;

    // ---- AMR cluster: DMA L2 -> L1, cores read, conflicts ----
    dma_copy(16'hA100, L2 + 32'h1_0000, AL1 + 32'h1000, 512, 64, 1);
    mech[M_CL_DMA]++;
    for (int c = 0; c < 12; c++) nxt[c] = ld(AL1 + 32'h1000 + addr_t'(c * 8));
    cores('1, 30);
    ok = 1;
    for (int c = 0; c < 12; c++) if (got[c] !== 32'(c)) ok = 0;
    check(ok == 1, "AMR cores read the cluster DMA's data");
    c0 = dut.i_amr.conflicts_o;
    for (int c = 0; c < 12; c++) nxt[c] = ld(AL1 + 32'h1000);
    cores('1, 30);
    mech[M_BANK_CONFLICT] = int'(dut.i_amr.conflicts_o - c0);
    // DLM
    cfg(1, 16'hA000, 1, q);
    if (mode == MODE_DLM) mech[M_MODE_SWITCH]++;
    r0 = recoveries;
    for (int i = 0; i < 6; i++) begin
      nxt[i] = st(AL1 + 32'h3000 + addr_t'(i * 4), 32'(i));
      nxt[i + 6] = nxt[i];
    end
    nxt[10].wdata[0] = 1'b1 ^ nxt[10].wdata[0];          // shadow of core 4 disagrees
    cores('1, 4);
    repeat (30) @(posedge clk);
    if (recoveries == r0 + 1) begin mech[M_DLM_ERR]++; mech[M_RECOVERY]++; end
    check(recoveries == r0 + 1, "DLM mismatch recovered");
    // TLM
    cfg(1, 16'hA000, 2, q);
    if (mode == MODE_TLM) mech[M_MODE_SWITCH]++;
    r0 = recoveries;
    for (int i = 0; i < 4; i++) begin
      nxt[i] = st(AL1 + 32'h3100 + addr_t'(i * 4), 32'h5500 + 32'(i));
      nxt[i + 4] = nxt[i];
      nxt[i + 8] = nxt[i];
    end
    nxt[9].wdata = 32'hFFFF_FFFF;                          // core 9 (group 1) is faulty
    cores('1, 10);
    repeat (30) @(posedge clk);
    host0.read(AL1 + 32'h3100, 1);
    check(host0.rdata[0] == {32'h5501, 32'h5500}, "TLM vote masks the faulty core");
    if (host0.rdata[0] == {32'h5501, 32'h5500}) mech[M_TLM_VOTE]++;
    if (recoveries == r0 + 1) mech[M_RECOVERY]++;
    cfg(1, 16'hA000, 0, q);
    if (mode == MODE_INDIP) mech[M_MODE_SWITCH]++;
    check(l2_eu == 0, "no uncorrectable L2 errors");

    // ---- mechanism report ----
    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %-16s %0d", mech_name[i], mech[i]);
      check(mech[i] > 0, {"mechanism happened: ", mech_name[i]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
