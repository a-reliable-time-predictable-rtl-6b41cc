// tb_hmr_unit: self-checking test of the AMR checker/voter.
//
// Drives random 70-bit output bundles for the 12 cores and random input bundles from the
// interconnect, and compares the unit against the expected routing in each mode:
// INDIP (straight through), DLM (pairs i / i+6: equal outputs pass, a single flipped bit
// in a shadow blocks the main port and raises dlm_err), TLM (groups i / i+4 / i+8: a
// flipped bit in any one core is outvoted and that core is flagged). Also checks the
// error counter and that an invalid mode value is ignored.
module tb_hmr_unit;
  import soc_pkg::*;
  localparam int NC = 12, OW = 70, IW = 34;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t cfg_req;
  reg_rsp_t cfg_rsp;
  amr_mode_e mode;
  logic [OW-1:0] c_out [NC], s_out [NC];
  logic [IW-1:0] c_in [NC], s_in [NC];
  logic [NC/2-1:0] dlm_err;
  logic [NC-1:0] tlm_fault;

  hmr_unit dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .mode_o(mode), .core_out_i(c_out), .core_in_o(c_in), .sys_out_o(s_out), .sys_in_i(s_in),
    .dlm_err_o(dlm_err), .tlm_fault_o(tlm_fault));

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

  function automatic logic [OW-1:0] rnd_out();
    return {$urandom, $urandom, $urandom};
  endfunction

  task automatic randomize_ports();
    for (int c = 0; c < NC; c++) begin
      c_out[c] = rnd_out();
      s_in[c]  = {$urandom, $urandom};
    end
  endtask

  logic [31:0] q, e0;
  int ok;
  initial begin
    cfg_req = '0;
    for (int c = 0; c < NC; c++) begin c_out[c] = '0; s_in[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // INDIP
    ok = 1;
    for (int n = 0; n < 20; n++) begin
      randomize_ports();
      #1;
      for (int c = 0; c < NC; c++) if (s_out[c] !== c_out[c] || c_in[c] !== s_in[c]) ok = 0;
      if (dlm_err != 0 || tlm_fault != 0) ok = 0;
    end
    check(ok == 1 && mode == MODE_INDIP, "INDIP routes every core to its own port");
    // DLM
    cfg(1'b1, 16'h0, 32'd1, q);
    check(mode == MODE_DLM, "switch to DLM");
    ok = 1;
    for (int n = 0; n < 20; n++) begin
      randomize_ports();
      for (int i = 0; i < 6; i++) c_out[i + 6] = c_out[i];
      #1;
      for (int i = 0; i < 6; i++) begin
        if (s_out[i] !== c_out[i] || s_out[i + 6] !== '0) ok = 0;
        if (c_in[i] !== s_in[i] || c_in[i + 6] !== s_in[i]) ok = 0;
      end
      if (dlm_err != 0) ok = 0;
    end
    check(ok == 1, "DLM: matching pairs pass, shadows get the main core's inputs");
    cfg(1'b0, 16'h4, 0, e0);
    @(negedge clk);
    c_out[8][17] = ~c_out[8][17];   // shadow of core 2
    #1;
    check(dlm_err == 6'b000100, "DLM mismatch flagged on pair 2 only");
    check(s_out[2] === '0, "DLM mismatch blocks the output");
    check(s_out[1] === c_out[1], "other pairs unaffected");
    @(negedge clk);
    c_out[8] = c_out[2];
    cfg(1'b0, 16'h4, 0, q);
    check(q == e0 + 1, "mismatch counted once");
    // invalid mode value is ignored
    cfg(1'b1, 16'h0, 32'd3, q);
    check(mode == MODE_DLM, "mode 3 ignored");
    // TLM
    cfg(1'b1, 16'h0, 32'd2, q);
    check(mode == MODE_TLM, "switch to TLM");
    ok = 1;
    for (int n = 0; n < 30; n++) begin
      int g, k, bitpos;
      logic [OW-1:0] good [4];
      randomize_ports();
      for (int i = 0; i < 4; i++) begin
        good[i] = c_out[i];
        c_out[i + 4] = c_out[i];
        c_out[i + 8] = c_out[i];
      end
      g = n % 4; k = (n / 4) % 3; bitpos = $urandom_range(OW - 1);
      c_out[g + 4 * k][bitpos] = ~c_out[g + 4 * k][bitpos];
      #1;
      for (int i = 0; i < 4; i++) begin
        if (s_out[i] !== good[i] || s_out[i + 4] !== '0 || s_out[i + 8] !== '0) ok = 0;
        if (c_in[i + 4] !== s_in[i] || c_in[i + 8] !== s_in[i]) ok = 0;
      end
      if (tlm_fault !== NC'(1) << (g + 4 * k)) ok = 0;
      @(negedge clk);
    end
    check(ok == 1, "TLM: one faulty core of any group is outvoted and flagged");
    // back to INDIP
    cfg(1'b1, 16'h0, 32'd0, q);
    randomize_ports();
    #1;
    check(mode == MODE_INDIP && s_out[7] === c_out[7] && tlm_fault == 0, "back to INDIP");
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
