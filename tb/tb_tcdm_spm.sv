// tb_tcdm_spm: self-checking test of the banked cluster L1 (AMR configuration: 32 banks of
// 32-bit words with ECC, 256 KiB) with 4 initiator ports.
//
// Checks: a write then read on every port with read data exactly one cycle after the
// grant; four ports hitting four different banks in the same cycle are all granted
// (no conflict counted); four ports hitting the same bank are served one per cycle in
// round-robin order within four cycles, with three conflicts counted in the first cycle;
// word interleaving: word i lands in bank i mod 32 (neighbouring words never conflict);
// a byte-enabled write merges bytes.
module tb_tcdm_spm;
  import soc_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        req [NP], gnt [NP], we [NP], rvalid [NP], err [NP];
  logic [31:0] addr [NP], wdata [NP], rdata [NP], conflicts;
  logic [3:0]  be [NP];

  tcdm_spm #(.NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .we_i(we),
    .addr_i(addr), .be_i(be), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata),
    .err_o(err), .conflicts_o(conflicts));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle();
    for (int p = 0; p < NP; p++) begin
      req[p] = 0; we[p] = 0; addr[p] = 0; wdata[p] = 0; be[p] = '1;
    end
  endtask

  // all ports issue at once; waits until every port is granted, records grant cycles and data
  int gcyc [NP];
  logic [31:0] got [NP];
  task automatic issue_all(input logic w);
    bit done [NP];
    int cyc;
    for (int p = 0; p < NP; p++) begin done[p] = 0; req[p] = 1; we[p] = w; end
    cyc = 0;
    while (1) begin
      @(posedge clk);
      for (int p = 0; p < NP; p++) if (req[p] && gnt[p] && !done[p]) begin
        done[p] = 1; gcyc[p] = cyc;
      end
      #1;
      for (int p = 0; p < NP; p++) if (rvalid[p]) got[p] = rdata[p];
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (done[p]) req[p] = 0;
      cyc++;
      if (done[0] && done[1] && done[2] && done[3]) break;
    end
    @(posedge clk); #1;
    for (int p = 0; p < NP; p++) if (rvalid[p]) got[p] = rdata[p];
    @(negedge clk);
    idle();
  endtask

  int ok;
  logic [31:0] c0;
  initial begin
    idle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // different banks: words 0..3
    for (int p = 0; p < NP; p++) begin addr[p] = 32'(p * 4); wdata[p] = 32'hA000 + 32'(p); end
    c0 = conflicts;
    issue_all(1);
    check(gcyc[0] == 0 && gcyc[1] == 0 && gcyc[2] == 0 && gcyc[3] == 0, "4 banks: all granted at once");
    check(conflicts == c0, "no conflict counted");
    for (int p = 0; p < NP; p++) addr[p] = 32'(p * 4);
    issue_all(0);
    ok = 1;
    for (int p = 0; p < NP; p++) if (got[p] !== 32'hA000 + 32'(p)) ok = 0;
    check(ok == 1, "read back, one cycle latency");
    // one-cycle latency explicitly
    @(negedge clk);
    req[2] = 1; addr[2] = 32'h40;
    #1;
    check(gnt[2] == 1 && rvalid[2] == 0, "granted in the request cycle");
    @(posedge clk); #1;
    req[2] = 0;
    check(rvalid[2] == 1, "read data one cycle after the grant");
    idle();
    // same bank (bank 5: words 5, 37, 69, 101)
    for (int p = 0; p < NP; p++) begin addr[p] = 32'((5 + 32 * p) * 4); wdata[p] = 32'hB000 + 32'(p); end
    c0 = conflicts;
    issue_all(1);
    ok = 1;
    for (int p = 0; p < NP; p++) for (int q = 0; q < NP; q++) if (p != q && gcyc[p] == gcyc[q]) ok = 0;
    for (int p = 0; p < NP; p++) if (gcyc[p] > 3) ok = 0;
    check(ok == 1, "same bank: one grant per cycle, all within four cycles");
    check(conflicts - c0 == 3, "conflict cycles counted");
    for (int p = 0; p < NP; p++) addr[p] = 32'((5 + 32 * p) * 4);
    issue_all(0);
    ok = 1;
    for (int p = 0; p < NP; p++) if (got[p] !== 32'hB000 + 32'(p)) ok = 0;
    check(ok == 1, "same-bank data correct");
    // byte enables
    @(negedge clk);
    req[0] = 1; we[0] = 1; addr[0] = 32'h200; wdata[0] = 32'h1122_3344; be[0] = 4'hF;
    do @(posedge clk); while (!gnt[0]);
    @(negedge clk);
    wdata[0] = 32'hEEEE_EEEE; be[0] = 4'b0010;
    do @(posedge clk); while (!gnt[0]);
    @(negedge clk);
    we[0] = 0;
    do @(posedge clk); while (!gnt[0]);
    @(negedge clk);
    req[0] = 0;
    #1;
    check(rvalid[0] && rdata[0] == 32'h1122_EE44 && !err[0], "byte-enabled write merges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
