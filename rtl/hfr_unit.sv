// hfr_unit: hardware fast recovery for one redundant core group of the AMR cluster.
//
// Recovery region: ECC-protected copies of the core's register file (32 x 32 bit), its
// program counter and NCSR control/status registers. Every cycle in which the group's
// checker or voter reports no error, the writes the core makes to its register file (up to
// two per cycle, the core's two write ports), a new PC and CSR writes are copied into the
// recovery region through the back-up bus, so the region always holds the last state that
// passed the check - at no cost in core cycles.
//
// Fast recovery controller (states named after the paper's figure): IDLE while no error.
// On error_i it enters RESET for one cycle (rst_o pulses: the group's cores are reset and
// told to halt), then HALT, where it waits for core_halted_i; then RESTORE, where the
// register file is written back two registers per cycle (16 cycles) over the RF recovery
// bus, the CSRs one per cycle alongside, and the PC in the last cycle; then it returns to
// IDLE and drops halt_o, and the cores resume from the restored state. From error to
// resume this takes 18 cycles plus the time the cores need to halt (the paper reports 24
// cycles for the whole recovery including the core). A double-bit error in the recovery
// region is flagged on unc_o.
//
// From the paper and its figure: ECC-protected recovery RF/PC/CSR, the back-up bus
// {we, waddr, wdata}, the RF address generator, the IDLE/RESET/HALT/RESTORE controller.
// This design's choices: two RF ports each way, NCSR = 8, the timing of each state.
module hfr_unit import soc_pkg::*; #(
  parameter int unsigned NCSR = 8,
  localparam int unsigned CA  = $clog2(NCSR)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          error_i,          // uncorrectable error in the group (checker/voter)
  input  logic          core_halted_i,
  // back-up bus from the (checked) core
  input  logic [1:0]    bk_rf_we_i,
  input  logic [4:0]    bk_rf_waddr_i [2],
  input  logic [31:0]   bk_rf_wdata_i [2],
  input  logic          bk_pc_we_i,
  input  logic [31:0]   bk_pc_i,
  input  logic          bk_csr_we_i,
  input  logic [CA-1:0] bk_csr_addr_i,
  input  logic [31:0]   bk_csr_wdata_i,
  // control of the cores
  output logic          rst_o,
  output logic          halt_o,
  // recovery buses to the cores
  output logic [1:0]    rec_rf_we_o,
  output logic [4:0]    rec_rf_waddr_o [2],
  output logic [31:0]   rec_rf_wdata_o [2],
  output logic          rec_pc_we_o,
  output logic [31:0]   rec_pc_o,
  output logic          rec_csr_we_o,
  output logic [CA-1:0] rec_csr_addr_o,
  output logic [31:0]   rec_csr_wdata_o,
  output logic          busy_o,
  output logic          unc_o,
  output logic [31:0]   recoveries_o
);
  localparam int unsigned EW = 32 + secded_p(32) + 1;   // 39-bit protected word

  typedef enum logic [1:0] {IDLE, RESET, HALT, RESTORE} state_e;
  state_e state_q;
  logic [3:0] step_q;           // RF address generator: registers 2*step and 2*step+1

  logic [EW-1:0] rf_q  [32];
  logic [EW-1:0] csr_q [NCSR];
  logic [EW-1:0] pc_q;

  function automatic logic [EW-1:0] enc(input logic [31:0] d);
    logic [79:0] e;
    e = secded_encode({32'd0, d}, 32);
    return e[EW-1:0];
  endfunction

  // back-up: only states that passed the check
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned r = 0; r < 32; r++) rf_q[r] <= enc(32'd0);
      for (int unsigned r = 0; r < NCSR; r++) csr_q[r] <= enc(32'd0);
      pc_q <= enc(32'd0);
    end else if (!error_i && state_q == IDLE) begin
      for (int unsigned p = 0; p < 2; p++)
        if (bk_rf_we_i[p] && bk_rf_waddr_i[p] != 5'd0) rf_q[bk_rf_waddr_i[p]] <= enc(bk_rf_wdata_i[p]);
      if (bk_pc_we_i) pc_q <= enc(bk_pc_i);
      if (bk_csr_we_i) csr_q[bk_csr_addr_i] <= enc(bk_csr_wdata_i);
    end
  end

  // recovery: read, correct, write back
  secded_res_t d_rf [2];
  secded_res_t d_pc, d_csr;
  always_comb begin
    for (int unsigned p = 0; p < 2; p++)
      d_rf[p] = secded_decode({{(80-EW){1'b0}}, rf_q[{step_q, 1'(p)}]}, 32);
    d_pc  = secded_decode({{(80-EW){1'b0}}, pc_q}, 32);
    d_csr = secded_decode({{(80-EW){1'b0}}, csr_q[step_q[CA-1:0]]}, 32);
  end

  always_comb begin
    rec_rf_we_o     = '0;
    rec_pc_we_o     = 1'b0;
    rec_csr_we_o    = 1'b0;
    for (int unsigned p = 0; p < 2; p++) begin
      rec_rf_waddr_o[p] = {step_q, 1'(p)};
      rec_rf_wdata_o[p] = d_rf[p].data[31:0];
    end
    rec_pc_o        = d_pc.data[31:0];
    rec_csr_addr_o  = step_q[CA-1:0];
    rec_csr_wdata_o = d_csr.data[31:0];
    unc_o           = 1'b0;
    if (state_q == RESTORE) begin
      rec_rf_we_o  = 2'b11;
      rec_csr_we_o = (32'(step_q) < NCSR);
      rec_pc_we_o  = (step_q == 4'hf);
      unc_o        = d_rf[0].uncorrectable || d_rf[1].uncorrectable || d_pc.uncorrectable ||
                     (rec_csr_we_o && d_csr.uncorrectable);
    end
  end

  assign rst_o  = (state_q == RESET);
  assign halt_o = (state_q != IDLE);
  assign busy_o = (state_q != IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= IDLE;
      step_q       <= '0;
      recoveries_o <= '0;
    end else begin
      unique case (state_q)
        IDLE:  if (error_i) state_q <= RESET;
        RESET: state_q <= HALT;
        HALT:  if (core_halted_i) begin
          state_q <= RESTORE;
          step_q  <= '0;
        end
        RESTORE: begin
          step_q <= step_q + 4'd1;
          if (step_q == 4'hf) begin
            state_q      <= IDLE;
            recoveries_o <= recoveries_o + 32'd1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
