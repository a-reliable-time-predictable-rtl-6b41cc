// tb_dma: self-checking test of the AXI copy engine.
//
// The engine copies from and to a behavioural AXI memory (word i initially holds
// i ^ A5A5_0000_5A5A_0000). Three copies: 2 KiB with 16-beat bursts, 6 KiB starting just
// below a 4 KiB boundary with 256-beat bursts, and a single word. After each copy the
// destination is compared word by word with the source pattern, the words just past the
// destination end must be untouched, and a monitor checks that no burst crossed a 4 KiB
// boundary and that no burst was longer than the BURST register.
module tb_dma;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  logic busy;
  axi_req_t req;
  axi_rsp_t rsp;
  int n_ar, n_aw, n_w;

  dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .busy_o(busy), .axi_req_o(req), .axi_rsp_i(rsp));
  axi_mem_model #(.AW_WORDS(16), .LAT(3)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(req),
    .rsp_o(rsp), .n_ar(n_ar), .n_aw(n_aw), .n_w(n_w));

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

  // burst monitor
  int n_cross, too_long, max_beats;
  logic [8:0] burst_reg;
  always @(posedge clk) begin
    if (req.ar_valid && rsp.ar_ready) begin
      if ((req.ar.addr & 32'hFFF) + (32'(req.ar.len) + 1) * 8 > 4096) n_cross++;
      if (32'(req.ar.len) + 1 > 32'(burst_reg)) too_long++;
      if (int'(req.ar.len) + 1 > max_beats) max_beats = int'(req.ar.len) + 1;
    end
    if (req.aw_valid && rsp.aw_ready) begin
      if ((req.aw.addr & 32'hFFF) + (32'(req.aw.len) + 1) * 8 > 4096) n_cross++;
      if (32'(req.aw.len) + 1 > 32'(burst_reg)) too_long++;
    end
  end

  function automatic data_t pat(input int unsigned byte_addr);
    return 64'(byte_addr / 8) ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  task automatic copy(input int unsigned src, input int unsigned dst, input int unsigned len,
                      input int unsigned burst);
    logic [31:0] q, d0;
    int ok, t0;
    data_t after;
    after = mem.mem[(dst + len) / 8];
    burst_reg = 9'(burst);
    cfg(1, 16'h14, 0, d0);
    d0 = cfg_rsp.rdata;
    cfg(0, 16'h14, 0, d0);
    cfg(1, 16'h00, src, q);
    cfg(1, 16'h04, dst, q);
    cfg(1, 16'h08, len, q);
    cfg(1, 16'h0C, burst, q);
    t0 = int'($time / 10);
    cfg(1, 16'h10, 1, q);
    do cfg(0, 16'h10, 0, q); while (q[0]);
    $display("copy of %0d bytes, %0d-beat bursts: %0d cycles", len, burst, int'($time / 10) - t0);
    ok = 1;
    for (int unsigned a = 0; a < len; a += 8) if (mem.mem[(dst + a) / 8] !== pat(src + a)) ok = 0;
    check(ok == 1, "destination holds the source data");
    check(mem.mem[(dst + len) / 8] === after, "nothing written past the end");
    cfg(0, 16'h14, 0, q);
    check(q == d0 + 1, "completed copies counted");
  endtask

  initial begin
    cfg_req = '0; n_cross = 0; too_long = 0; max_beats = 0; burst_reg = 9'd256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    copy(32'h0000_0000, 32'h0004_0000, 2048, 16);
    copy(32'h0000_0F80, 32'h0006_0000, 6144, 256);
    copy(32'h0000_0100, 32'h0007_0008, 8, 64);
    check(n_cross == 0, "no burst crosses a 4 KiB boundary");
    check(too_long == 0 && max_beats == 256, "bursts bounded by BURST, up to 256 beats used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
