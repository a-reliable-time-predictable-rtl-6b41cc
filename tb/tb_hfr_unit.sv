// tb_hfr_unit: self-checking test of the hardware fast-recovery unit.
//
// A small core model keeps a 32-entry register file, a PC and 8 CSRs. For a few hundred
// cycles it makes random writes (two RF ports, PC every cycle, occasional CSR writes) and
// mirrors them on the back-up bus; a golden copy keeps the same state. Then a fault hits:
// error_i rises while the core issues a corrupted write (which must not reach the back-up),
// and the reset from the unit wipes the core's state. The core halts one cycle after
// halt_o. The test applies the recovery buses to the core and checks that afterwards its
// whole state equals the golden copy, that the recovery took at most 24 cycles from the
// error (the figure reported in the paper), and that the recovery counter advanced. The
// sequence is repeated three times.
module tb_hfr_unit;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        error, halted, rst_c, halt, busy, unc;
  logic [1:0]  bk_we, rec_we;
  logic [4:0]  bk_wa [2], rec_wa [2];
  logic [31:0] bk_wd [2], rec_wd [2];
  logic        bk_pc_we, rec_pc_we, bk_csr_we, rec_csr_we;
  logic [31:0] bk_pc, rec_pc, bk_csr_wd, rec_csr_wd, recoveries;
  logic [2:0]  bk_csr_a, rec_csr_a;

  hfr_unit dut (.clk_i(clk), .rst_ni(rst_n), .error_i(error), .core_halted_i(halted),
    .bk_rf_we_i(bk_we), .bk_rf_waddr_i(bk_wa), .bk_rf_wdata_i(bk_wd), .bk_pc_we_i(bk_pc_we),
    .bk_pc_i(bk_pc), .bk_csr_we_i(bk_csr_we), .bk_csr_addr_i(bk_csr_a),
    .bk_csr_wdata_i(bk_csr_wd), .rst_o(rst_c), .halt_o(halt), .rec_rf_we_o(rec_we),
    .rec_rf_waddr_o(rec_wa), .rec_rf_wdata_o(rec_wd), .rec_pc_we_o(rec_pc_we),
    .rec_pc_o(rec_pc), .rec_csr_we_o(rec_csr_we), .rec_csr_addr_o(rec_csr_a),
    .rec_csr_wdata_o(rec_csr_wd), .busy_o(busy), .unc_o(unc), .recoveries_o(recoveries));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // core model and golden state
  logic [31:0] rf [32], gold_rf [32], csr [8], gold_csr [8], pc, gold_pc;

  // core model: applies the recovery buses; reset wipes it; halts a cycle after halt_o
  always_ff @(posedge clk) begin
    halted <= halt;
    if (rst_c) begin
      for (int r = 0; r < 32; r++) rf[r] <= 32'hDEAD_0000 + 32'(r);
      for (int r = 0; r < 8; r++) csr[r] <= '1;
      pc <= 32'h0000_0080;
    end else begin
      for (int p = 0; p < 2; p++) if (rec_we[p]) rf[rec_wa[p]] <= rec_wd[p];
      if (rec_csr_we) csr[rec_csr_a] <= rec_csr_wd;
      if (rec_pc_we) pc <= rec_pc;
      // normal execution: the testbench drives the writes below
      for (int p = 0; p < 2; p++) if (bk_we[p] && !halt && bk_wa[p] != 0) rf[bk_wa[p]] <= bk_wd[p];
      if (bk_csr_we && !halt) csr[bk_csr_a] <= bk_csr_wd;
      if (bk_pc_we && !halt) pc <= bk_pc;
    end
  end

  task automatic run_cycles(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      bk_we = 2'($urandom);
      for (int p = 0; p < 2; p++) begin
        bk_wa[p] = 5'($urandom);
        bk_wd[p] = $urandom;
      end
      if (bk_we == 2'b11 && bk_wa[0] == bk_wa[1]) bk_wa[1] = bk_wa[0] + 5'd1;
      bk_pc_we = 1'b1;
      bk_pc = $urandom & ~32'h3;
      bk_csr_we = ($urandom_range(3) == 0);
      bk_csr_a = 3'($urandom);
      bk_csr_wd = $urandom;
      for (int p = 0; p < 2; p++) if (bk_we[p] && bk_wa[p] != 0) gold_rf[bk_wa[p]] = bk_wd[p];
      if (bk_csr_we) gold_csr[bk_csr_a] = bk_csr_wd;
      gold_pc = bk_pc;
    end
  endtask

  int t0, lat, ok;
  initial begin
    error = 0; bk_we = 0; bk_pc_we = 0; bk_csr_we = 0; bk_pc = 0; bk_csr_a = 0; bk_csr_wd = 0;
    for (int p = 0; p < 2; p++) begin bk_wa[p] = 0; bk_wd[p] = 0; end
    for (int r = 0; r < 32; r++) begin rf[r] = 0; gold_rf[r] = 0; end
    for (int r = 0; r < 8; r++) begin csr[r] = 0; gold_csr[r] = 0; end
    pc = 0; gold_pc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      run_cycles(300);
      // the fault: a corrupted write in the error cycle
      @(negedge clk);
      error = 1;
      bk_we = 2'b01; bk_wa[0] = 5'd5; bk_wd[0] = 32'hBAD0_BAD0;
      bk_pc = 32'hFFFF_FFF0; bk_csr_we = 1; bk_csr_a = 3'd1; bk_csr_wd = 32'hBAD1;
      t0 = int'($time / 10);
      @(negedge clk);
      error = 0; bk_we = 0; bk_pc_we = 0; bk_csr_we = 0;
      check(busy == 1 && halt == 1, "error starts the recovery");
      while (busy) @(negedge clk);
      lat = int'($time / 10) - t0;
      $display("round %0d: recovery %0d cycles", round, lat);
      check(lat <= 24, "recovery within 24 cycles");
      ok = 1;
      for (int r = 1; r < 32; r++) if (rf[r] !== gold_rf[r]) ok = 0;
      check(ok == 1, "register file restored to the last checked state");
      ok = 1;
      for (int r = 0; r < 8; r++) if (csr[r] !== gold_csr[r]) ok = 0;
      check(ok == 1 && pc === gold_pc, "CSRs and PC restored");
      check(recoveries == 32'(round + 1) && unc == 0, "recovery counted, no uncorrectable error");
    end
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
