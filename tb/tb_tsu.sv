// tb_tsu: self-checking test of the traffic shaper unit (splitter, write buffer, regulator).
//
// A task-driven AXI initiator talks through the TSU to a behavioural memory. Checks:
// reads and writes return/store the right data with the stages off and on; with a
// granularity of 4 beats a 16-beat burst becomes four 4-beat bursts downstream while the
// initiator sees one burst with one last beat and one write response; a slowly fed write
// burst leaves the write buffer only when complete, as back-to-back beats; the regulator
// lets only one 64-byte read per period through when the budget is 64 bytes; reads pass
// the TSU without added latency.
module tb_tsu;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t up_req, dn_req;
  axi_rsp_t up_rsp, dn_rsp;
  reg_req_t cfg;
  reg_rsp_t cfg_rsp;
  logic stall;
  int n_ar, n_aw, n_w;

  tsu dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg), .cfg_rsp_o(cfg_rsp), .stall_o(stall),
    .slv_req_i(up_req), .slv_rsp_o(up_rsp), .mst_req_o(dn_req), .mst_rsp_i(dn_rsp));
  axi_mem_model #(.AW_WORDS(12), .LAT(1)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(dn_req),
    .rsp_o(dn_rsp), .n_ar(n_ar), .n_aw(n_aw), .n_w(n_w));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic data_t pat(input addr_t a);
    return 64'(a[14:3]) ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  task automatic cfg_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    cfg = '0;
  endtask

  // read burst; returns number of last flags seen and data errors
  task automatic axi_read(input addr_t a, input int len, input bit check_pat, output int lasts,
                          output int errs, input data_t exp_base = '0);
    int beats;
    lasts = 0; errs = 0; beats = 0;
    @(negedge clk);
    up_req.ar = '{id: 4'd1, addr: a, len: 8'(len), size: 3'd3, burst: BURST_INCR, user: '0};
    up_req.ar_valid = 1'b1;
    up_req.r_ready  = 1'b1;
    fork
      begin
        while (1) begin
          @(posedge clk);
          if (up_rsp.ar_ready) break;
        end
        @(negedge clk);
        up_req.ar_valid = 1'b0;
      end
      begin
        while (beats <= len) begin
          @(posedge clk);
          if (up_rsp.r_valid) begin
            if (check_pat && up_rsp.r.data !== pat(a + addr_t'(beats * 8))) errs++;
            if (!check_pat && up_rsp.r.data !== exp_base + data_t'(beats)) errs++;
            if (up_rsp.r.last) lasts++;
            beats++;
          end
        end
      end
    join
    @(negedge clk);
    up_req.r_ready = 1'b0;
  endtask

  // write burst of data base+i; gap idle cycles between W beats; returns B count
  task automatic axi_write(input addr_t a, input int len, input data_t base, input int gap,
                           output int bs);
    int beat;
    bs = 0; beat = 0;
    @(negedge clk);
    up_req.aw = '{id: 4'd2, addr: a, len: 8'(len), size: 3'd3, burst: BURST_INCR, user: '0};
    up_req.aw_valid = 1'b1;
    up_req.b_ready  = 1'b1;
    fork
      begin
        while (1) begin
          @(posedge clk);
          if (up_rsp.aw_ready) break;
        end
        @(negedge clk);
        up_req.aw_valid = 1'b0;
      end
      begin
        while (beat <= len) begin
          up_req.w = '{data: base + data_t'(beat), strb: '1, last: (beat == len)};
          up_req.w_valid = 1'b1;
          @(posedge clk);
          if (up_rsp.w_ready) begin
            beat++;
            @(negedge clk);
            up_req.w_valid = 1'b0;
            repeat (gap) @(negedge clk);
          end else @(negedge clk);
        end
      end
    join
    up_req.w_valid = 1'b0;
    while (1) begin
      @(posedge clk);
      if (up_rsp.b_valid) begin
        bs++;
        break;
      end
    end
    repeat (5) @(posedge clk);
    if (up_rsp.b_valid) bs++;
    @(negedge clk);
    up_req.b_ready = 1'b0;
  endtask

  // monitors
  int dn_ar_lens[$];
  int dn_w_gap_err, dn_aw_early;
  logic dn_w_active;
  int up_w_count;
  always @(posedge clk) begin
    if (dn_req.ar_valid && dn_rsp.ar_ready) dn_ar_lens.push_back(int'(dn_req.ar.len));
    // a forwarded write burst must flow without bubbles (memory is always ready)
    if (dn_w_active && !dn_req.w_valid && dn_rsp.w_ready) dn_w_gap_err++;
    if (dn_req.w_valid && dn_rsp.w_ready) dn_w_active <= !dn_req.w.last;
    if (dn_req.aw_valid && dn_rsp.aw_ready) dn_w_active <= 1'b1;
  end

  int over_budget = 0, stalls = 0;
  bit mon_budget = 0;
  always @(posedge clk) begin
    if (stall) stalls++;
    if (mon_budget && dut.bytes_r > 64) over_budget++;
  end

  int lasts, errs, bs, t0, lat, ar_before, per_cnt;
  initial begin
    up_req = '0; cfg = '0; dn_w_gap_err = 0; dn_w_active = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. pass-through read, latency
    fork
      begin
        @(negedge clk); t0 = $time;
        wait (dn_req.ar_valid);
        lat = ($time - t0) / 10;
      end
      axi_read(32'h100, 15, 1'b1, lasts, errs);
    join
    check(errs == 0 && lasts == 1, "pass-through read data");
    check(dn_ar_lens.size() == 1 && dn_ar_lens[0] == 15, "pass-through read is one burst");
    check(lat == 0, "no added read latency");

    // 2. splitting reads at 4 beats
    cfg_wr(16'h04, 32'd4);
    cfg_wr(16'h00, 32'd1);
    dn_ar_lens.delete();
    axi_read(32'h400, 15, 1'b1, lasts, errs);
    check(errs == 0, "split read data");
    check(lasts == 1, "split read: one last beat upstream");
    check(dn_ar_lens.size() == 4, "split read: four fragments downstream");
    foreach (dn_ar_lens[i]) check(dn_ar_lens[i] == 3, "fragment length 4 beats");

    // 3. splitting writes, slow data: write buffer forwards whole fragments
    ar_before = n_aw;
    axi_write(32'h800, 15, 64'h1000, 2, bs);
    check(bs == 1, "split write: one B upstream");
    check(n_aw - ar_before == 4, "split write: four AW fragments downstream");
    check(dn_w_gap_err == 0, "write buffer: forwarded W beats back to back");
    axi_read(32'h800, 15, 1'b0, lasts, errs, 64'h1000);
    check(errs == 0, "written data read back");

    // 4. regulation: 64 bytes per 200-cycle period
    cfg_wr(16'h08, 32'd200);
    cfg_wr(16'h0C, 32'd64);
    cfg_wr(16'h00, 32'd2);
    repeat (200) @(posedge clk);
    t0 = $time;
    mon_budget = 1;
    ar_before = n_ar;
    axi_read(32'h000, 7, 1'b1, lasts, errs);
    axi_read(32'h040, 7, 1'b1, lasts, errs);
    axi_read(32'h080, 7, 1'b1, lasts, errs);
    lat = ($time - t0) / 10;
    check(errs == 0, "regulated read data");
    check(lat > 200, "three 64-byte reads needed more than two periods");
    check(n_ar - ar_before == 3, "regulated reads went through");
    check(over_budget == 0, "never more than the budget granted in one period");
    check(stalls > 0, "regulator held requests back");
    $display("regulated pair took %0d cycles", lat);

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
