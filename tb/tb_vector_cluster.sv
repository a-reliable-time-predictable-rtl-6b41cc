// tb_vector_cluster: self-checking test of the vector cluster (vector units and scalar
// cores modelled by the testbench on the VLSU and VRF ports).
//
// Checks: the cluster DMA copies 1 KiB from an external memory into L1; the eight VLSU
// ports load 8 consecutive 64-bit words in one cycle (eight banks, 512 bit per cycle, no
// conflict) with the DMA'd data, and stream the rest; VLSU stores are visible through the
// AXI slave port; eight ports on one bank are served one per cycle with 7 conflicts
// counted; the two vector register files are private (a write to one unit's VRF does not
// show in the other) and deliver 12 operands of 256 bit per unit in one cycle.
module tb_vector_cluster;
  import soc_pkg::*;
  localparam int NP = 8;
  localparam addr_t L1 = 32'h5180_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  axi_req_t s_req, m_req;
  axi_rsp_t s_rsp, m_rsp;
  logic        v_req [NP], v_gnt [NP], v_we [NP], v_rvalid [NP];
  logic [31:0] v_addr [NP];
  logic [7:0]  v_be [NP];
  logic [63:0] v_wdata [NP], v_rdata [NP];
  logic [3:0]   raddr [2][4][3];
  logic [255:0] rdata [2][4][3];
  logic         we [2][4];
  logic [3:0]   waddr [2][4];
  logic [31:0]  wbe [2][4];
  logic [255:0] wdata [2][4];
  logic dma_busy;
  logic [31:0] conflicts;
  int n_ar, n_aw, n_w;

  vector_cluster dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .slv_req_i(s_req), .slv_rsp_o(s_rsp), .mst_req_o(m_req), .mst_rsp_i(m_rsp),
    .vlsu_req_i(v_req), .vlsu_gnt_o(v_gnt), .vlsu_we_i(v_we), .vlsu_addr_i(v_addr),
    .vlsu_be_i(v_be), .vlsu_wdata_i(v_wdata), .vlsu_rvalid_o(v_rvalid), .vlsu_rdata_o(v_rdata),
    .vrf_raddr_i(raddr), .vrf_rdata_o(rdata), .vrf_we_i(we), .vrf_waddr_i(waddr),
    .vrf_wbe_i(wbe), .vrf_wdata_i(wdata), .dma_busy_o(dma_busy), .conflicts_o(conflicts));
  axi_mem_model #(.AW_WORDS(14), .LAT(3)) ext (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req),
    .rsp_o(m_rsp), .n_ar(n_ar), .n_aw(n_aw), .n_w(n_w));
  axi_bfm sys (.clk_i(clk), .req_o(s_req), .rsp_i(s_rsp));

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

  // all 8 ports issue; returns grant cycle and read data per port
  logic [63:0] got [NP];
  int gcyc [NP];
  task automatic vlsu_all(input logic w, input addr_t a [NP], input logic [63:0] d [NP]);
    logic [NP-1:0] pend, rpend;
    int cyc;
    @(negedge clk);
    pend = '1; rpend = '0; cyc = 0;
    for (int p = 0; p < NP; p++) begin
      v_req[p] = 1; v_we[p] = w; v_addr[p] = a[p]; v_wdata[p] = d[p]; v_be[p] = '1;
    end
    while (pend != 0 || rpend != 0) begin
      #1;
      for (int p = 0; p < NP; p++) if (pend[p] && v_gnt[p]) begin
        gcyc[p] = cyc; pend[p] = 0; rpend[p] = !w;
      end
      @(posedge clk); #1;
      for (int p = 0; p < NP; p++) if (rpend[p] && v_rvalid[p]) begin got[p] = v_rdata[p]; rpend[p] = 0; end
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (!pend[p]) v_req[p] = 0;
      cyc++;
    end
  endtask

  addr_t a [NP];
  logic [63:0] d [NP];
  logic [31:0] q, c0;
  int ok, t0;
  initial begin
    cfg_req = '0;
    for (int p = 0; p < NP; p++) begin
      v_req[p] = 0; v_we[p] = 0; v_addr[p] = 0; v_be[p] = 0; v_wdata[p] = 0; d[p] = 0;
    end
    for (int u = 0; u < 2; u++) for (int b = 0; b < 4; b++) begin
      we[u][b] = 0; waddr[u][b] = 0; wbe[u][b] = 0; wdata[u][b] = 0;
      for (int k = 0; k < 3; k++) raddr[u][b][k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // DMA 1 KiB external -> L1
    cfg(1, 16'h100, 32'h8000_0000, q);
    cfg(1, 16'h104, L1 + 32'h400, q);
    cfg(1, 16'h108, 1024, q);
    cfg(1, 16'h10C, 128, q);
    cfg(1, 16'h110, 1, q);
    do cfg(0, 16'h110, 0, q); while (q[0]);
    // VLSU: 8 words per cycle
    c0 = conflicts;
    ok = 1; t0 = 0;
    for (int row = 0; row < 16; row++) begin
      for (int p = 0; p < NP; p++) a[p] = L1 + 32'h400 + addr_t'((row * 8 + p) * 8);
      vlsu_all(0, a, d);
      for (int p = 0; p < NP; p++) begin
        if (got[p] !== (64'(row * 8 + p) ^ 64'hA5A5_0000_5A5A_0000)) ok = 0;
        if (gcyc[p] != 0) t0++;
      end
    end
    check(ok == 1, "VLSU loads return the DMA'd data");
    check(t0 == 0 && conflicts == c0, "8 VLSU ports to 8 banks: all granted in one cycle");
    // VLSU stores, read through the AXI slave port
    for (int p = 0; p < NP; p++) begin a[p] = L1 + 32'h8000 + addr_t'(p * 8); d[p] = 64'hFACE_0000 + 64'(p); end
    vlsu_all(1, a, d);
    sys.read(L1 + 32'h8000, 7);
    ok = 1;
    for (int p = 0; p < NP; p++) if (sys.rdata[p] !== 64'hFACE_0000 + 64'(p)) ok = 0;
    check(ok == 1 && sys.lasts == 1, "VLSU stores visible on the AXI slave port");
    // same bank
    for (int p = 0; p < NP; p++) a[p] = L1 + addr_t'(p * 16 * 8);
    c0 = conflicts;
    vlsu_all(0, a, d);
    ok = 1;
    for (int p = 0; p < NP; p++) if (gcyc[p] > 7) ok = 0;
    check(ok == 1 && conflicts - c0 == 7, "8 ports on one bank: serialised, 7 conflicts");
    // VRF privacy and bandwidth
    @(negedge clk);
    for (int b = 0; b < 4; b++) begin
      we[0][b] = 1; waddr[0][b] = 4'd3; wbe[0][b] = '1; wdata[0][b] = {8{32'h1111_0000 + 32'(b)}};
      we[1][b] = 1; waddr[1][b] = 4'd3; wbe[1][b] = '1; wdata[1][b] = {8{32'h2222_0000 + 32'(b)}};
    end
    @(negedge clk);
    for (int u = 0; u < 2; u++) for (int b = 0; b < 4; b++) begin
      we[u][b] = 0;
      for (int k = 0; k < 3; k++) raddr[u][b][k] = 4'd3;
    end
    #1;
    ok = 1;
    for (int b = 0; b < 4; b++) for (int k = 0; k < 3; k++) begin
      if (rdata[0][b][k] !== {8{32'h1111_0000 + 32'(b)}}) ok = 0;
      if (rdata[1][b][k] !== {8{32'h2222_0000 + 32'(b)}}) ok = 0;
    end
    check(ok == 1, "private VRFs, 12 x 256-bit operands per unit per cycle");
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
