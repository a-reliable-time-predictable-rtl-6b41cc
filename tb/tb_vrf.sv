// tb_vrf: self-checking test of the banked vector register file.
//
// Keeps a reference copy of all 64 rows. Writes every row (one bank write port each,
// all four banks in the same cycle), then does random cycles with three reads and one
// byte-enabled write per bank and compares every read port against the reference
// (reads are combinational, writes visible from the next cycle). Also checks the total
// port bandwidth of one cycle: 12 x 256 bit read and 4 x 256 bit written.
module tb_vrf;
  localparam int NB = 4, PW = 256, BROWS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]    raddr [NB][3];
  logic [PW-1:0] rdata [NB][3];
  logic          we [NB];
  logic [3:0]    waddr [NB];
  logic [31:0]   wbe [NB];
  logic [PW-1:0] wdata [NB];
  logic [PW-1:0] ref_mem [NB][BROWS];

  vrf dut (.clk_i(clk), .raddr_i(raddr), .rdata_o(rdata), .we_i(we), .waddr_i(waddr),
    .wbe_i(wbe), .wdata_i(wdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [PW-1:0] rnd();
    logic [PW-1:0] v;
    for (int i = 0; i < PW / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  int ok, reads, writes;
  initial begin
    for (int b = 0; b < NB; b++) begin
      we[b] = 0; waddr[b] = 0; wbe[b] = 0; wdata[b] = 0;
      for (int p = 0; p < 3; p++) raddr[b][p] = 0;
    end
    // fill
    for (int r = 0; r < BROWS; r++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        we[b] = 1; waddr[b] = 4'(r); wbe[b] = '1; wdata[b] = rnd();
        ref_mem[b][r] = wdata[b];
      end
    end
    @(negedge clk);
    for (int b = 0; b < NB; b++) we[b] = 0;
    // random traffic
    ok = 1; reads = 0; writes = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        for (int p = 0; p < 3; p++) raddr[b][p] = 4'($urandom);
        we[b] = 1; waddr[b] = 4'($urandom); wbe[b] = $urandom; wdata[b] = rnd();
      end
      #1;
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < 3; p++) begin
          if (rdata[b][p] !== ref_mem[b][raddr[b][p]]) ok = 0;
          reads++;
        end
      @(posedge clk);
      for (int b = 0; b < NB; b++) begin
        for (int y = 0; y < 32; y++) if (wbe[b][y]) ref_mem[b][waddr[b]][8*y +: 8] = wdata[b][8*y +: 8];
        writes++;
      end
    end
    check(ok == 1, "all reads match the reference register file");
    check(reads == 500 * 12 && writes == 500 * 4, "12 reads and 4 writes of 256 bit per cycle");
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
