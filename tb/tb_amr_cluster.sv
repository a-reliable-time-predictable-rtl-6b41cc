// tb_amr_cluster: self-checking test of the AMR cluster (its 12 cores are modelled by the
// testbench on the core ports).
//
// Checks, in order:
//   INDIP: 12 cores store to 12 different banks in one cycle (all granted at once) and
//   load back with one-cycle latency; the AXI slave port reads the same words as 64-bit
//   beats; 12 cores hitting one bank are serialised and counted as conflicts.
//   DMA: the cluster DMA copies 512 bytes from an external memory (on the master port)
//   into L1 and back out to another external address; data checked on both sides.
//   DLM: pairs i / i+6 store in lockstep and the stores land once; a fault in a shadow
//   core (one flipped address bit) blocks the store, triggers the group's fast recovery
//   (core reset pulse, halt, register restore) and the recovery counter advances.
//   TLM: triples i / i+4 / i+8; a fault in one core is outvoted (the store lands with the
//   right data) and the group's recovery runs as well.
module tb_amr_cluster;
  import soc_pkg::*;
  localparam int NC = 12, NG = 6;
  localparam addr_t L1 = 32'h5000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  axi_req_t s_req, m_req;
  axi_rsp_t s_rsp, m_rsp;
  core_req_t creq [NC];
  core_rsp_t crsp [NC];
  logic        halted [NG], bk_pc_we [NG], bk_csr_we [NG];
  logic [1:0]  bk_we [NG];
  logic [4:0]  bk_wa [NG][2];
  logic [31:0] bk_wd [NG][2], bk_pc [NG], bk_csr_wd [NG];
  logic [2:0]  bk_csr_a [NG];
  logic        c_rst [NG], c_halt [NG], rec_pc_we [NG], rec_csr_we [NG];
  logic [1:0]  rec_we [NG];
  logic [4:0]  rec_wa [NG][2];
  logic [31:0] rec_wd [NG][2], rec_pc [NG], rec_csr_wd [NG];
  logic [2:0]  rec_csr_a [NG];
  amr_mode_e   mode;
  logic [31:0] recoveries, conflicts;
  logic        dma_busy;
  int n_ar, n_aw, n_w;

  amr_cluster dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .slv_req_i(s_req), .slv_rsp_o(s_rsp), .mst_req_o(m_req), .mst_rsp_i(m_rsp),
    .core_req_i(creq), .core_rsp_o(crsp), .core_halted_i(halted), .bk_rf_we_i(bk_we),
    .bk_rf_waddr_i(bk_wa), .bk_rf_wdata_i(bk_wd), .bk_pc_we_i(bk_pc_we), .bk_pc_i(bk_pc),
    .bk_csr_we_i(bk_csr_we), .bk_csr_addr_i(bk_csr_a), .bk_csr_wdata_i(bk_csr_wd),
    .core_rst_o(c_rst), .core_halt_o(c_halt), .rec_rf_we_o(rec_we), .rec_rf_waddr_o(rec_wa),
    .rec_rf_wdata_o(rec_wd), .rec_pc_we_o(rec_pc_we), .rec_pc_o(rec_pc),
    .rec_csr_we_o(rec_csr_we), .rec_csr_addr_o(rec_csr_a), .rec_csr_wdata_o(rec_csr_wd),
    .mode_o(mode), .recoveries_o(recoveries), .dma_busy_o(dma_busy), .conflicts_o(conflicts));
  axi_mem_model #(.AW_WORDS(14), .LAT(3)) ext (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req),
    .rsp_o(m_rsp), .n_ar(n_ar), .n_aw(n_aw), .n_w(n_w));
  axi_bfm sys (.clk_i(clk), .req_o(s_req), .rsp_i(s_rsp));

  // cores halt one cycle after being told to; the back-up buses carry a PC stream
  int rst_pulses;
  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) halted[g] <= c_halt[g];
    for (int g = 0; g < NG; g++) if (c_rst[g]) rst_pulses++;
  end
  always_comb
    for (int g = 0; g < NG; g++) begin
      bk_we[g] = '0; bk_wa[g][0] = '0; bk_wa[g][1] = '0; bk_wd[g][0] = '0; bk_wd[g][1] = '0;
      bk_pc_we[g] = 1'b0; bk_pc[g] = '0; bk_csr_we[g] = 1'b0; bk_csr_a[g] = '0;
      bk_csr_wd[g] = '0;
    end

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

  // the cores in `mask` issue creq_next[] together; each holds its request until granted.
  // Returns the read data and the cycle (from issue) of each grant and rvalid.
  core_req_t nxt [NC];
  logic [31:0] got [NC];
  int gcyc [NC], vcyc [NC];
  task automatic access(input logic [NC-1:0] mask, input int max_cycles);
    logic [NC-1:0] pend, rpend;
    int cyc;
    @(negedge clk);
    pend = mask; rpend = '0; cyc = 0;
    for (int c = 0; c < NC; c++) begin
      creq[c] = mask[c] ? nxt[c] : '0;
      gcyc[c] = -1; vcyc[c] = -1;
    end
    while ((pend != 0 || rpend != 0) && cyc < max_cycles) begin
      #1;
      for (int c = 0; c < NC; c++) if (pend[c] && crsp[c].gnt) begin
        gcyc[c] = cyc; pend[c] = 1'b0; rpend[c] = !nxt[c].we;
      end
      @(posedge clk); #1;
      for (int c = 0; c < NC; c++) if (rpend[c] && crsp[c].rvalid) begin
        got[c] = crsp[c].rdata; vcyc[c] = cyc + 1; rpend[c] = 1'b0;
      end
      @(negedge clk);
      for (int c = 0; c < NC; c++) if (!pend[c]) creq[c] = '0;
      cyc++;
    end
  endtask

  function automatic core_req_t st(input addr_t a, input logic [31:0] d);
    return '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
  endfunction
  function automatic core_req_t ld(input addr_t a);
    return '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
  endfunction

  logic [31:0] q, c0, r0;
  int ok, p0;
  initial begin
    cfg_req = '0; rst_pulses = 0;
    for (int c = 0; c < NC; c++) creq[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- INDIP ----------------
    for (int c = 0; c < NC; c++) nxt[c] = st(L1 + addr_t'(c * 4), 32'hC0DE_0000 + 32'(c));
    c0 = conflicts;
    access('1, 20);
    ok = 1;
    for (int c = 0; c < NC; c++) if (gcyc[c] != 0) ok = 0;
    check(ok == 1 && conflicts == c0, "12 stores to 12 banks granted in one cycle");
    for (int c = 0; c < NC; c++) nxt[c] = ld(L1 + addr_t'(c * 4));
    access('1, 20);
    ok = 1;
    for (int c = 0; c < NC; c++) if (got[c] !== 32'hC0DE_0000 + 32'(c) || vcyc[c] != 1) ok = 0;
    check(ok == 1, "12 loads return after one cycle");
    sys.read(L1, 5);
    check(sys.rdata[0] == {32'hC0DE_0001, 32'hC0DE_0000} &&
          sys.rdata[5] == {32'hC0DE_000B, 32'hC0DE_000A}, "AXI slave port reads L1");
    for (int c = 0; c < NC; c++) nxt[c] = st(L1 + addr_t'(c * 128 + 256), 32'(c));  // all bank 0
    c0 = conflicts;
    access('1, 40);
    ok = 1;
    for (int c = 0; c < NC; c++) if (gcyc[c] < 0 || gcyc[c] > 11) ok = 0;
    check(ok == 1, "same bank: all 12 served within 12 cycles");
    check(conflicts - c0 == 11, "11 conflict cycles counted");
    // ---------------- DMA ----------------
    cfg(1, 16'h100, 32'h8000_0000, q);     // SRC external
    cfg(1, 16'h104, L1 + 32'h1000, q);      // DST L1
    cfg(1, 16'h108, 512, q);
    cfg(1, 16'h10C, 16, q);
    cfg(1, 16'h110, 1, q);
    do cfg(0, 16'h110, 0, q); while (q[0]);
    sys.read(L1 + 32'h1000, 63);
    ok = 1;
    for (int i = 0; i < 64; i++) if (sys.rdata[i] !== (64'(i) ^ 64'hA5A5_0000_5A5A_0000)) ok = 0;
    check(ok == 1, "DMA copy external -> L1");
    cfg(1, 16'h100, L1 + 32'h1000, q);
    cfg(1, 16'h104, 32'h8000_4000, q);
    cfg(1, 16'h110, 1, q);
    do cfg(0, 16'h110, 0, q); while (q[0]);
    ok = 1;
    for (int i = 0; i < 64; i++) if (ext.mem[32'h800 + i] !== (64'(i) ^ 64'hA5A5_0000_5A5A_0000)) ok = 0;
    check(ok == 1, "DMA copy L1 -> external");
    // ---------------- DLM ----------------
    cfg(1, 16'h000, 1, q);
    check(mode == MODE_DLM, "DLM mode");
    for (int i = 0; i < 6; i++) begin
      nxt[i] = st(L1 + 32'h2000 + addr_t'(i * 4), 32'hD0D0_0000 + 32'(i));
      nxt[i + 6] = nxt[i];
    end
    access('1, 20);
    ok = 1;
    for (int c = 0; c < NC; c++) if (gcyc[c] != 0) ok = 0;
    check(ok == 1, "DLM: main and shadow see the same grant");
    sys.read(L1 + 32'h2000, 2);
    check(sys.rdata[0] == {32'hD0D0_0001, 32'hD0D0_0000} && sys.rdata[2] == {32'hD0D0_0005, 32'hD0D0_0004},
          "DLM stores landed");
    r0 = recoveries; p0 = rst_pulses;
    nxt[3] = st(L1 + 32'h2100, 32'hAAAA_AAAA);
    nxt[9] = st(L1 + 32'h2100 ^ 32'h40, 32'hAAAA_AAAA);   // faulty shadow
    access(NC'(1) << 3 | NC'(1) << 9, 3);
    creq[3] = '0; creq[9] = '0;
    repeat (30) @(posedge clk);
    check(recoveries == r0 + 1 && rst_pulses == p0 + 1, "DLM mismatch triggers one recovery");
    nxt[0] = ld(L1 + 32'h2100);                          // lockstep load on pair 0
    nxt[6] = nxt[0];
    access(NC'(1) | NC'(1) << 6, 5);
    check(got[0] !== 32'hAAAA_AAAA && got[6] === got[0], "mismatching store was not committed");
    check(recoveries == r0 + 1, "lockstep loads raise no error");
    // ---------------- TLM ----------------
    cfg(1, 16'h000, 2, q);
    check(mode == MODE_TLM, "TLM mode");
    r0 = recoveries;
    for (int i = 0; i < 4; i++) begin
      nxt[i] = st(L1 + 32'h3000 + addr_t'(i * 4), 32'h7770_0000 + 32'(i));
      nxt[i + 4] = nxt[i];
      nxt[i + 8] = nxt[i];
    end
    nxt[6].wdata = nxt[6].wdata ^ 32'h0001_0000;           // faulty core in group 2
    access('1, 20);
    repeat (30) @(posedge clk);
    sys.read(L1 + 32'h3000, 1);
    check(sys.rdata[1] == {32'h7770_0003, 32'h7770_0002}, "TLM: faulty core outvoted, store correct");
    check(recoveries == r0 + 1, "TLM fault triggers the group's recovery");
    cfg(0, 16'h004, 0, q);
    check(q >= 2, "AMR manager counted the errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
