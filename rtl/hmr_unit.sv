// hmr_unit: adaptive modular redundancy (AMR) bypass / checker / voter of the AMR cluster.
//
// The cluster's NC cores can run in one of three modes, chosen by software at run time:
//   INDIP  independent: every core drives its own interconnect port (NC-way MIMD).
//   DLM    dual lockstep: core i (i < NC/2) is a main core and core i + NC/2 its shadow.
//          Both get the main core's inputs; their outputs are compared bit by bit every
//          cycle. Only the main core's port is used; on a mismatch the output is blocked
//          for that cycle (nothing wrong is committed) and dlm_err_o[i] is raised.
//   TLM    triple lockstep: core i (i < NC/3) with shadows i + NC/3 and i + 2NC/3. All
//          three get the same inputs; the port carries the bitwise majority of their
//          outputs, which masks one faulty core; tlm_fault_o flags the core that disagreed.
// The checked or voted outputs also drive the state back-up of the fast-recovery units.
// Ports of the shadow cores are idle (all zero) in DLM/TLM.
//
// A core's interface is abstracted to an OUT_W-bit output bundle (its instruction and data
// requests) and an IN_W-bit input bundle (grants and read data). The AMR manager register
// (cfg bus, offset 0x00) holds the mode; 0x04 counts detected mismatches. A new mode acts
// from the next cycle; software is expected to bring the cores to a common state first
// (through the fast-recovery units) - this is where the paper's 82-183 cycle switching time
// goes. From the paper: 12 cores, INDIP/DLM/TLM with six/four main cores, checker/voter
// before commit. This design's choices: the core pairing, the bundle abstraction, blocking
// on DLM mismatch, the register map.
module hmr_unit import soc_pkg::*; #(
  parameter int unsigned NC    = 12,
  parameter int unsigned OUT_W = 70,
  parameter int unsigned IN_W  = 34
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  reg_req_t         cfg_req_i,
  output reg_rsp_t         cfg_rsp_o,
  output amr_mode_e        mode_o,
  // cores
  input  logic [OUT_W-1:0] core_out_i [NC],
  output logic [IN_W-1:0]  core_in_o  [NC],
  // interconnect side
  output logic [OUT_W-1:0] sys_out_o  [NC],
  input  logic [IN_W-1:0]  sys_in_i   [NC],
  // errors
  output logic [NC/2-1:0]  dlm_err_o,
  output logic [NC-1:0]    tlm_fault_o
);
  localparam int unsigned ND = NC / 2;
  localparam int unsigned NT = NC / 3;

  amr_mode_e   mode_q;
  logic [31:0] err_cnt_q;

  logic [OUT_W-1:0] va, vb, vc, vv;

  always_comb begin
    va = '0;
    vb = '0;
    vc = '0;
    vv = '0;
    for (int unsigned c = 0; c < NC; c++) begin
      sys_out_o[c] = core_out_i[c];
      core_in_o[c] = sys_in_i[c];
    end
    dlm_err_o   = '0;
    tlm_fault_o = '0;
    if (mode_q == MODE_DLM) begin
      for (int unsigned i = 0; i < ND; i++) begin
        dlm_err_o[i]      = (core_out_i[i] != core_out_i[i + ND]);
        sys_out_o[i]      = dlm_err_o[i] ? '0 : core_out_i[i];
        sys_out_o[i + ND] = '0;
        core_in_o[i + ND] = sys_in_i[i];
      end
    end else if (mode_q == MODE_TLM) begin
      for (int unsigned i = 0; i < NT; i++) begin
        va = core_out_i[i];
        vb = core_out_i[i + NT];
        vc = core_out_i[i + 2*NT];
        vv = (va & vb) | (va & vc) | (vb & vc);
        sys_out_o[i]          = vv;
        sys_out_o[i + NT]     = '0;
        sys_out_o[i + 2*NT]   = '0;
        core_in_o[i + NT]     = sys_in_i[i];
        core_in_o[i + 2*NT]   = sys_in_i[i];
        tlm_fault_o[i]        = (va != vv);
        tlm_fault_o[i + NT]   = (vb != vv);
        tlm_fault_o[i + 2*NT] = (vc != vv);
      end
    end
  end

  always_comb begin
    cfg_rsp_o = '0;
    unique case (cfg_req_i.addr[3:0])
      4'h0: cfg_rsp_o.rdata = {30'd0, mode_q};
      4'h4: cfg_rsp_o.rdata = err_cnt_q;
      default: cfg_rsp_o.error = cfg_req_i.valid;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q    <= MODE_INDIP;
      err_cnt_q <= '0;
    end else begin
      if (cfg_req_i.valid && cfg_req_i.write && cfg_req_i.addr[3:0] == 4'h0 &&
          cfg_req_i.wdata[1:0] != 2'd3)
        mode_q <= amr_mode_e'(cfg_req_i.wdata[1:0]);
      if (dlm_err_o != '0 || tlm_fault_o != '0) err_cnt_q <= err_cnt_q + 32'd1;
    end
  end

  assign mode_o = mode_q;
endmodule
