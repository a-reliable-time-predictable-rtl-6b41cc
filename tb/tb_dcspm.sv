// tb_dcspm: self-checking test of the L2 scratchpad with its two AXI ports.
//
// Writes through the interleaved view and reads the same words back through the
// contiguous view at the address the bank mapping predicts (and the other way round),
// from both ports; checks that a 16-beat read streams one beat per cycle; measures the
// time two ports need when both stream from one bank (they take turns) and when each
// reads its own bank in the contiguous view (no conflicts, both at full rate, 128 bits
// per cycle), and runs concurrent interleaved reads.
module tb_dcspm;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam addr_t BASE = 32'h7800_0000;
  localparam int unsigned SIZE = 1024 * 1024, NB = 4, WORDS = SIZE / 8 / NB;

  axi_req_t req [2];
  axi_rsp_t rsp [2];
  logic [31:0] ec, eu;
  dcspm dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
    .err_corr_cnt_o(ec), .err_unc_cnt_o(eu));
  axi_bfm p0 (.clk_i(clk), .req_o(req[0]), .rsp_i(rsp[0]));
  axi_bfm p1 (.clk_i(clk), .req_o(req[1]), .rsp_i(rsp[1]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // word w of the interleaved view sits in bank w%NB, row w/NB;
  // in the contiguous view that is word (w%NB)*WORDS + w/NB
  function automatic addr_t contig_of(input int unsigned w);
    return BASE + SIZE + addr_t'(((w % NB) * WORDS + w / NB) * 8);
  endfunction

  int ok, t_conf, t_free;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. write 16 words interleaved on port 0, read each back contiguous on port 1
    for (int i = 0; i < 16; i++) p0.wdata[i] = 64'hC0DE_0000_0000_0000 + 64'(i * 3);
    p0.write(BASE + 32'h100, 15);
    ok = 1;
    for (int i = 0; i < 16; i++) begin
      p1.read(contig_of(32 + i) + 2 * SIZE, 0);   // port 1 windows are at +2*SIZE
      if (p1.rdata[0] !== 64'hC0DE_0000_0000_0000 + 64'(i * 3)) ok = 0;
    end
    check(ok == 1, "interleaved write seen at the predicted contiguous address");
    // 2. burst read back on port 0, one beat per cycle
    p0.read(BASE + 32'h100, 15);
    ok = 1;
    for (int i = 0; i < 16; i++) if (p0.rdata[i] !== 64'hC0DE_0000_0000_0000 + 64'(i * 3)) ok = 0;
    check(ok == 1 && p0.lasts == 1 && p0.errs == 0, "interleaved burst read back");
    check(p0.cycles <= 16 + 4, "burst streams at one beat per cycle");
    $display("16-beat read: %0d cycles", p0.cycles);
    // 3. contiguous write on port 1 into bank 3, read interleaved on port 0
    for (int i = 0; i < 8; i++) p1.wdata[i] = 64'hBEEF_0000 + 64'(i);
    p1.write(2 * SIZE + BASE + SIZE + addr_t'(3 * WORDS * 8), 7);
    ok = 1;
    for (int i = 0; i < 8; i++) begin
      p0.read(BASE + addr_t'((i * NB + 3) * 8), 0);
      if (p0.rdata[0] !== 64'hBEEF_0000 + 64'(i)) ok = 0;
    end
    check(ok == 1, "contiguous write seen at the predicted interleaved address");
    // initialise the regions used below so that ECC sees valid code words
    for (int i = 0; i < 64; i++) p0.wdata[i] = 64'(i);
    p0.write(BASE + 32'h1000, 63);
    p0.write(BASE + SIZE, 63);
    p0.write(BASE + SIZE + 32'h800, 63);
    p0.write(BASE + SIZE + addr_t'(2 * WORDS * 8), 63);
    // 4. both ports stream 64 beats from the same bank (contiguous view) at the same time
    fork
      p0.read(BASE + SIZE, 63);
      p1.read(2 * SIZE + BASE + SIZE + 32'h800, 63);
    join
    t_conf = p0.cycles > p1.cycles ? p0.cycles : p1.cycles;
    // 4b. and from interleaved addresses at the same time
    fork
      p0.read(BASE + 32'h1000, 31);
      p1.read(2 * SIZE + BASE + 32'h1100, 31);
    join
    check(p0.errs == 0 && p1.errs == 0 && p0.lasts == 1 && p1.lasts == 1, "concurrent interleaved reads");
    // 5. both ports stream 64 beats from private banks (contiguous view)
    fork
      p0.read(BASE + SIZE, 63);
      p1.read(2 * SIZE + BASE + SIZE + addr_t'(2 * WORDS * 8), 63);
    join
    t_free = p0.cycles > p1.cycles ? p0.cycles : p1.cycles;
    $display("two ports, shared banks: %0d cycles, private banks: %0d cycles", t_conf, t_free);
    check(t_free <= 64 + 4, "private banks: both ports at full rate (128 bit/cycle)");
    check(t_conf >= 120, "same bank: the two ports are served in turn");
    check(eu == 0 && ec == 0, "no ECC events");
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
