// tb_ecc_sram: self-checking test of the SECDED-protected SRAM bank.
//
// Writes random 64-bit words and reads them back (one-cycle read latency, no error flags);
// stores words with one flipped bit (through the fault-injection mask, at every one of
// the 72 code bit positions in turn) and checks that the read returns the original data
// with err_corr set; stores words with two flipped bits and checks err_unc; checks a
// byte-enabled write (read-modify-write: the grant comes one cycle late) merges the bytes.
module tb_ecc_sram;
  import soc_pkg::*;
  localparam int SW = 64 + 7 + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, gnt, we, rvalid, ecor, eunc;
  logic [7:0] be;
  logic [9:0] addr;
  logic [63:0] wdata, rdata;
  logic [SW-1:0] inject;

  ecc_sram dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .we_i(we), .be_i(be),
    .addr_i(addr), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata), .err_corr_o(ecor),
    .err_unc_o(eunc), .inject_i(inject));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // returns the number of cycles until the grant
  task automatic wr(input logic [9:0] a, input logic [63:0] d, input logic [7:0] b,
                    input logic [SW-1:0] inj, output int waits);
    @(negedge clk);
    req = 1; we = 1; addr = a; wdata = d; be = b; inject = inj; waits = 0;
    @(posedge clk);
    while (!gnt) begin waits++; @(posedge clk); end
    @(negedge clk);
    req = 0; we = 0; inject = '0;
  endtask

  task automatic rd(input logic [9:0] a, output logic [63:0] d, output logic c, output logic u,
                    output bit one_cycle);
    @(negedge clk);
    req = 1; we = 0; addr = a; be = '1;
    @(negedge clk);
    req = 0;
    one_cycle = rvalid;
    d = rdata; c = ecor; u = eunc;
  endtask

  logic [63:0] d, q;
  logic c, u;
  bit oc;
  int waits, ok_data, ok_flag, ok_lat;
  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0; inject = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // clean write / read
    ok_data = 1; ok_flag = 1; ok_lat = 1;
    for (int i = 0; i < 50; i++) begin
      d = {$urandom, $urandom};
      wr(10'(i), d, '1, '0, waits);
      rd(10'(i), q, c, u, oc);
      if (q !== d) ok_data = 0;
      if (c || u) ok_flag = 0;
      if (!oc || waits != 0) ok_lat = 0;
    end
    check(ok_data == 1, "clean data read back");
    check(ok_flag == 1, "no error flags on clean data");
    check(ok_lat == 1, "full write granted at once, read data after one cycle");
    // single-bit errors at every position
    ok_data = 1; ok_flag = 1;
    for (int b = 0; b < SW; b++) begin
      d = {$urandom, $urandom};
      wr(10'(100 + b), d, '1, SW'(1) << b, waits);
      rd(10'(100 + b), q, c, u, oc);
      if (q !== d) ok_data = 0;
      if (!c || u) ok_flag = 0;
    end
    check(ok_data == 1, "single-bit errors corrected at all 72 positions");
    check(ok_flag == 1, "single-bit errors reported as corrected");
    // double-bit errors
    ok_flag = 1;
    for (int n = 0; n < 40; n++) begin
      int b1, b2;
      b1 = $urandom_range(SW - 1);
      b2 = (b1 + 1 + $urandom_range(SW - 2)) % SW;
      wr(10'(300 + n), {$urandom, $urandom}, '1, (SW'(1) << b1) | (SW'(1) << b2), waits);
      rd(10'(300 + n), q, c, u, oc);
      if (!u || c) ok_flag = 0;
    end
    check(ok_flag == 1, "double-bit errors detected as uncorrectable");
    // byte-enabled write: read-modify-write
    wr(10'd500, 64'h0011_2233_4455_6677, '1, '0, waits);
    wr(10'd500, 64'hAAAA_AAAA_AAAA_AAAA, 8'b0000_0101, '0, waits);
    check(waits == 1, "partial write takes one extra cycle");
    rd(10'd500, q, c, u, oc);
    check(q == 64'h0011_2233_44AA_66AA && !c && !u, "partial write merges bytes with valid ECC");
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
