// tb_dpllc: self-checking test of the partitionable last-level cache.
//
// The cache sits between an AXI initiator model and a behavioural HyperRAM model
// (axi_mem_model, whose word i holds i ^ A5A5_0000_5A5A_0000). The test checks:
// miss then hit on a line with the right data; write hit and read back; write-back of a
// dirty line on eviction; the partition experiment of the paper: a "critical" task (part
// id 0) keeps a 32 KiB working set while an "interfering" task (part id 1) streams 128 KiB
// through the cache. Without partitions the critical task loses its lines; with two
// partitions of 128 sets each it keeps every line (no misses on re-read). Finally a flush
// of partition 1 writes back its dirty lines while partition 0 still hits.
module tb_dpllc;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam addr_t BASE = 32'h8000_0000;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  axi_req_t s_req, m_req;
  axi_rsp_t s_rsp, m_rsp;
  int n_ar, n_aw, n_w;

  dpllc dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .slv_req_i(s_req), .slv_rsp_o(s_rsp), .mem_req_o(m_req), .mem_rsp_i(m_rsp));
  axi_mem_model #(.AW_WORDS(17), .LAT(4)) hyper (.clk_i(clk), .rst_ni(rst_n),
    .req_i(m_req), .rsp_o(m_rsp), .n_ar(n_ar), .n_aw(n_aw), .n_w(n_w));
  axi_bfm ini (.clk_i(clk), .req_o(s_req), .rsp_i(s_rsp));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    cfg_req = '0;
  endtask

  task automatic cfg_rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    #1 d = cfg_rsp.rdata;
    @(negedge clk);
    cfg_req = '0;
  endtask

  function automatic data_t pat(input addr_t a);
    return 64'(a[19:3]) ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  // read n lines starting at a with partition id p; returns the misses it caused
  task automatic sweep(input addr_t a, input int n, input user_t p, output int misses, output int bad);
    logic [31:0] m0, m1;
    cfg_rd(16'h88, m0);
    bad = 0;
    for (int i = 0; i < n; i++) begin
      ini.read(a + addr_t'(i * 64), 7, p);
      for (int w = 0; w < 8; w++)
        if (ini.rdata[w] !== pat(a + addr_t'(i * 64 + w * 8)) && a < BASE + 32'h40000) bad++;
    end
    cfg_rd(16'h88, m1);
    misses = int'(m1 - m0);
  endtask

  logic [31:0] r, m0, m1, h0, h1;
  int miss_shared, miss_part, bad, aw0;
  initial begin
    cfg_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. miss, then hit
    cfg_rd(16'h88, m0); cfg_rd(16'h8C, h0);
    ini.read(BASE + 32'h200, 7);
    check(ini.rdata[0] == pat(BASE + 32'h200) && ini.rdata[7] == pat(BASE + 32'h238), "refill data");
    check(ini.lasts == 1 && ini.errs == 0, "one last flag, OKAY");
    cfg_rd(16'h88, m1);
    check(m1 == m0 + 1, "first access misses");
    ini.read(BASE + 32'h208, 3);
    cfg_rd(16'h88, m1); cfg_rd(16'h8C, h1);
    check(m1 == m0 + 1 && h1 > h0, "second access hits");
    check(ini.rdata[0] == pat(BASE + 32'h208), "hit data");
    $display("hit read of 4 beats: %0d cycles", ini.cycles);
    // 2. write hit, read back
    ini.wdata[0] = 64'h1111_2222_3333_4444;
    ini.wdata[1] = 64'h5555_6666_7777_8888;
    ini.write(BASE + 32'h210, 1);
    ini.read(BASE + 32'h210, 1);
    check(ini.rdata[0] == 64'h1111_2222_3333_4444 && ini.rdata[1] == 64'h5555_6666_7777_8888,
          "write hit read back");
    // 3. evict the dirty line: 8 more lines that map to the same set (stride SETS*64)
    aw0 = n_aw;
    for (int i = 1; i <= 8; i++) ini.read(BASE + 32'h200 + addr_t'(i * 256 * 64), 0);
    check(n_aw == aw0 + 1, "dirty victim written back once");
    ini.read(BASE + 32'h210, 0);
    check(ini.rdata[0] == 64'h1111_2222_3333_4444, "evicted data comes back from memory");
    // 4. shared cache: critical set (32 KiB, part 0), interference 128 KiB (part 1)
    sweep(BASE + 32'h10000, 512, 4'd0, miss_shared, bad);
    check(bad == 0, "critical working set data");
    sweep(BASE + 32'h40000, 2048, 4'd1, miss_shared, bad);
    sweep(BASE + 32'h10000, 512, 4'd0, miss_shared, bad);
    $display("no partitions: critical task re-read misses %0d of 512 lines", miss_shared);
    check(miss_shared > 256, "without partitions the interference evicts the critical lines");
    // 5. two partitions of 128 sets
    cfg_wr(16'h00, 0);   cfg_wr(16'h04, 128);
    cfg_wr(16'h08, 128); cfg_wr(16'h0C, 128);
    cfg_rd(16'h0C, r);
    check(r == 128, "NSETS register reads back");
    sweep(BASE + 32'h10000, 512, 4'd0, miss_part, bad);
    sweep(BASE + 32'h40000, 2048, 4'd1, miss_part, bad);
    sweep(BASE + 32'h10000, 512, 4'd0, miss_part, bad);
    $display("two partitions: critical task re-read misses %0d of 512 lines", miss_part);
    check(miss_part == 0 && bad == 0, "with partitions the critical lines survive");
    // 6. dirty lines in partition 1, then flush it
    for (int i = 0; i < 8; i++) ini.wdata[i] = 64'hD1D1_0000 + 64'(i);
    for (int i = 0; i < 4; i++) ini.write(BASE + 32'h40000 + addr_t'(i * 64), 7, 0, 4'd1);
    aw0 = n_aw;
    cfg_wr(16'h80, 1);
    do cfg_rd(16'h84, r); while (r[0]);
    check(n_aw == aw0 + 4, "flush writes back the four dirty lines of partition 1");
    sweep(BASE + 32'h10000, 512, 4'd0, miss_part, bad);
    check(miss_part == 0, "flush of partition 1 leaves partition 0 intact");
    cfg_rd(16'h88, m0);
    ini.read(BASE + 32'h40000, 7, 4'd1);
    cfg_rd(16'h88, m1);
    check(m1 == m0 + 1 && ini.rdata[3] == 64'hD1D1_0003, "flushed line misses and returns written data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
