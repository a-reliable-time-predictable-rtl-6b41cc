// dcspm: dynamically configurable L2 scratchpad memory (1 MiB, two AXI4 ports).
//
// The memory is split into NUM_GROUPS bank groups of BANKS_PER_GROUP ECC-protected 64-bit
// SRAM banks each. It is reached through two AXI ports, and each port sees the same
// physical memory twice, at two aliased address windows of SIZE bytes each:
//   BASE          .. BASE+SIZE-1    interleaved view: consecutive 64-bit words rotate over
//                                    all banks, which spreads shared data and statistically
//                                    lowers conflicts between the ports;
//   BASE+SIZE     .. BASE+2*SIZE-1  contiguous view: each bank holds one contiguous block
//                                    of SIZE/NB bytes, so two tasks that place their data in
//                                    different banks (e.g. different bank groups) never meet
//                                    in a bank and get private, interference-free paths.
// Port 1's two windows follow port 0's (BASE + 2*SIZE ...), so the crossbar can route to
// either port by address. The view is chosen per access by the address alone, so switching costs nothing in
// latency. Each bank serves one access per cycle; when both ports want the same bank in
// the same cycle, a round-robin arbiter chooses and the other port waits. Each port moves
// one 64-bit beat per cycle, 128 bits per cycle for the two. Read latency from the AXI
// address handshake is a few cycles (bridge plus one SRAM cycle).
//
// From the paper: 1 MiB, two AXI ports, ECC-protected banks in two bank groups,
// interleaved and contiguous modes selected through aliased addresses, 128 b/cycle. This
// design's choices: 2 banks per group (as drawn), the alias layout, base address and the
// round-robin arbiter.
module dcspm import soc_pkg::*; #(
  parameter addr_t       BASE            = 32'h7800_0000,
  parameter int unsigned SIZE            = 1024 * 1024,
  parameter int unsigned NUM_GROUPS      = 2,
  parameter int unsigned BANKS_PER_GROUP = 2,
  localparam int unsigned NB    = NUM_GROUPS * BANKS_PER_GROUP,
  localparam int unsigned WORDS = SIZE / 8 / NB,
  localparam int unsigned RW    = $clog2(WORDS),
  localparam int unsigned BSEL  = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  axi_req_t    axi_req_i [2],
  output axi_rsp_t    axi_rsp_o [2],
  output logic [31:0] err_corr_cnt_o,   // corrected single-bit errors
  output logic [31:0] err_unc_cnt_o     // detected double-bit errors
);

  // ---------------- port side ----------------
  logic          p_req [2], p_gnt [2], p_we [2], p_rvalid [2], p_err [2];
  addr_t         p_addr [2];
  strb_t         p_be [2];
  data_t         p_wdata [2], p_rdata [2];
  logic [BSEL-1:0] p_bank [2];
  logic [RW-1:0]   p_row [2];

  for (genvar p = 0; p < 2; p++) begin : g_port
    axi_to_mem i_bridge (.clk_i, .rst_ni, .axi_req_i(axi_req_i[p]), .axi_rsp_o(axi_rsp_o[p]),
      .mem_req_o(p_req[p]), .mem_gnt_i(p_gnt[p]), .mem_we_o(p_we[p]), .mem_addr_o(p_addr[p]),
      .mem_be_o(p_be[p]), .mem_wdata_o(p_wdata[p]), .mem_rvalid_i(p_rvalid[p]),
      .mem_rdata_i(p_rdata[p]), .mem_err_i(p_err[p]));

    // address to (bank, row): interleaved or contiguous alias
    always_comb begin
      logic [31:0] off, w;
      off = (p_addr[p] - BASE) & (2 * SIZE - 1);   // port p's windows start at BASE + p*2*SIZE
      if (off < SIZE) begin
        w = off >> 3;
        p_bank[p] = BSEL'(w % NB);
        p_row[p]  = RW'(w / NB);
      end else begin
        w = (off - SIZE) >> 3;
        p_bank[p] = BSEL'(w / WORDS);
        p_row[p]  = RW'(w % WORDS);
      end
    end
  end

  // ---------------- bank side ----------------
  logic [NB-1:0] b_req, b_gnt, b_we, b_rvalid, b_corr, b_unc, b_sel, b_sel_q, b_ptr_q;
  logic [RW-1:0] b_row [NB];
  strb_t         b_be [NB];
  data_t         b_wdata [NB], b_rdata [NB];

  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      logic r0, r1;
      r0 = p_req[0] && (p_bank[0] == BSEL'(b));
      r1 = p_req[1] && (p_bank[1] == BSEL'(b));
      // round robin between the two ports: ptr = port that wins a tie
      b_sel[b] = (r0 && r1) ? b_ptr_q[b] : r1;
      b_req[b] = r0 || r1;
      b_we[b]    = p_we[b_sel[b]];
      b_row[b]   = p_row[b_sel[b]];
      b_be[b]    = p_be[b_sel[b]];
      b_wdata[b] = p_wdata[b_sel[b]];
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < 2; p++) begin
      p_gnt[p]    = 1'b0;
      p_rvalid[p] = 1'b0;
      p_rdata[p]  = '0;
      p_err[p]    = 1'b0;
      for (int unsigned b = 0; b < NB; b++) begin
        if (b_req[b] && b_sel[b] == 1'(p) && p_bank[p] == BSEL'(b) && p_req[p]) p_gnt[p] = b_gnt[b];
        if (b_rvalid[b] && b_sel_q[b] == 1'(p)) begin
          p_rvalid[p] = 1'b1;
          p_rdata[p]  = b_rdata[b];
          p_err[p]    = b_unc[b];
        end
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    ecc_sram #(.DW(64), .WORDS(WORDS), .ECC(1'b1)) i_bank (.clk_i, .rst_ni,
      .req_i(b_req[b]), .gnt_o(b_gnt[b]), .we_i(b_we[b]), .be_i(b_be[b]), .addr_i(b_row[b]),
      .wdata_i(b_wdata[b]), .rvalid_o(b_rvalid[b]), .rdata_o(b_rdata[b]),
      .err_corr_o(b_corr[b]), .err_unc_o(b_unc[b]), .inject_i('0));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      b_sel_q        <= '0;
      b_ptr_q        <= '0;
      err_corr_cnt_o <= '0;
      err_unc_cnt_o  <= '0;
    end else begin
      for (int unsigned b = 0; b < NB; b++) begin
        if (b_req[b] && b_gnt[b]) begin
          b_sel_q[b] <= b_sel[b];
          b_ptr_q[b] <= ~b_sel[b];
        end
      end
      err_corr_cnt_o <= err_corr_cnt_o + 32'($countones(b_corr));
      err_unc_cnt_o  <= err_unc_cnt_o + 32'($countones(b_unc));
    end
  end

endmodule
