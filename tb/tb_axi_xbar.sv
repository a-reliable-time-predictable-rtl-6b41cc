// tb_axi_xbar: self-checking test of the AXI crossbar with 3 initiators and 3 targets.
//
// Targets: two address windows (0x1000_0000 and 0x2000_0000, 64 KiB each) and a default
// target (everything else), each a behavioural AXI memory. Checks that every initiator
// reaches every target with the right data and that the request landed in the right
// memory; that three initiators writing bursts to one target at the same time are all
// served (round robin, bursts not interleaved: every burst's data arrives intact); that
// three initiators using three different targets proceed in parallel (no slower than
// about one burst time); and that a read and a write of one initiator to two targets can
// be outstanding together.
module tb_axi_xbar;
  import soc_pkg::*;
  localparam int NM = 3, NS = 3;
  localparam addr_t BASE [NS] = '{32'h1000_0000, 32'h2000_0000, 32'h0};
  localparam addr_t SIZE [NS] = '{32'h1_0000, 32'h1_0000, 32'h0};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t m_req [NM], s_req [NS];
  axi_rsp_t m_rsp [NM], s_rsp [NS];
  int n_ar [NS], n_aw [NS], n_w [NS];

  axi_xbar #(.NM(NM), .NS(NS), .BASE(BASE), .SIZE(SIZE)) dut (.clk_i(clk), .rst_ni(rst_n),
    .m_req_i(m_req), .m_rsp_o(m_rsp), .s_req_o(s_req), .s_rsp_i(s_rsp));
  for (genvar s = 0; s < NS; s++) begin : g_mem
    axi_mem_model #(.AW_WORDS(13), .LAT(2)) mem (.clk_i(clk), .rst_ni(rst_n),
      .req_i(s_req[s]), .rsp_o(s_rsp[s]), .n_ar(n_ar[s]), .n_aw(n_aw[s]), .n_w(n_w[s]));
  end
  axi_bfm m0 (.clk_i(clk), .req_o(m_req[0]), .rsp_i(m_rsp[0]));
  axi_bfm m1 (.clk_i(clk), .req_o(m_req[1]), .rsp_i(m_rsp[1]));
  axi_bfm m2 (.clk_i(clk), .req_o(m_req[2]), .rsp_i(m_rsp[2]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic data_t pat(input addr_t a);
    return 64'(a[15:3]) ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  localparam addr_t TGT [NS] = '{32'h1000_0000, 32'h2000_0000, 32'h3000_0000};
  int ok, ar0 [NS], t_par;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // every initiator to every target
    ok = 1;
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < NS; i++) ar0[i] = n_ar[i];
      m0.read(TGT[s] + 32'h40, 3);
      if (m0.rdata[2] !== pat(TGT[s] + 32'h50) || m0.lasts != 1) ok = 0;
      m1.read(TGT[s] + 32'h80, 0);
      if (m1.rdata[0] !== pat(TGT[s] + 32'h80)) ok = 0;
      m2.read(TGT[s] + 32'hC0, 1);
      if (m2.rdata[1] !== pat(TGT[s] + 32'hC8)) ok = 0;
      for (int i = 0; i < NS; i++) if (n_ar[i] != ar0[i] + (i == s ? 3 : 0)) ok = 0;
    end
    check(ok == 1, "all initiators reach all targets, decoded to the right target");
    // three writers, one target
    for (int b = 0; b < 16; b++) begin
      m0.wdata[b] = 64'h1000 + 64'(b);
      m1.wdata[b] = 64'h2000 + 64'(b);
      m2.wdata[b] = 64'h3000 + 64'(b);
    end
    fork
      m0.write(32'h2000_1000, 15);
      m1.write(32'h2000_2000, 15, 1);
      m2.write(32'h2000_3000, 15);
    join
    ok = 1;
    for (int b = 0; b < 16; b++) begin
      if (g_mem[1].mem.mem[(32'h1000 >> 3) + b] !== 64'h1000 + 64'(b)) ok = 0;
      if (g_mem[1].mem.mem[(32'h2000 >> 3) + b] !== 64'h2000 + 64'(b)) ok = 0;
      if (g_mem[1].mem.mem[(32'h3000 >> 3) + b] !== 64'h3000 + 64'(b)) ok = 0;
    end
    check(ok == 1, "concurrent bursts to one target arrive intact");
    // three readers, three targets in parallel
    fork
      m0.read(32'h1000_0000, 63);
      m1.read(32'h2000_0000, 63);
      m2.read(32'h3000_0000, 63);
    join
    t_par = m0.cycles;
    if (m1.cycles > t_par) t_par = m1.cycles;
    if (m2.cycles > t_par) t_par = m2.cycles;
    $display("three 64-beat reads to three targets: %0d cycles", t_par);
    check(t_par < 64 + 10, "different targets are served in parallel");
    check(m0.rdata[63] === pat(32'h1000_01F8) && m2.rdata[0] === pat(32'h3000_0000), "parallel data");
    // three readers, one target: served one after the other
    fork
      m0.read(32'h1000_0000, 31);
      m1.read(32'h1000_1000, 31);
      m2.read(32'h1000_2000, 31);
    join
    t_par = m0.cycles;
    if (m1.cycles > t_par) t_par = m1.cycles;
    if (m2.cycles > t_par) t_par = m2.cycles;
    check(t_par >= 3 * 32, "one target: bursts are serialised");
    check(m1.rdata[31] === pat(32'h1000_10F8), "serialised data");
    // read and write of one initiator outstanding together
    m0.wdata[0] = 64'hFEED;
    fork
      m0.read(32'h3000_0100, 7);
      m0.write(32'h1000_0100, 0);
    join
    check(g_mem[0].mem.mem[32'h100 >> 3] === 64'hFEED && m0.rdata[7] === pat(32'h3000_0138),
          "concurrent read and write of one initiator");
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
