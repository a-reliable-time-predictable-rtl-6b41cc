// tcdm_spm: multi-banked cluster L1 scratchpad with its low-latency interconnect.
//
// NP initiator ports (cluster cores, the vector load-store ports, the cluster DMA and the
// AXI slave port) share NB single-ported SRAM banks. Words are interleaved over the banks
// (word i lives in bank i mod NB), so streams of consecutive words spread over all banks.
// Each bank has a round-robin arbiter; a request is granted in the cycle it is made if it
// wins its bank, and its read data returns exactly one cycle later (one-cycle latency).
// The losers retry in the following cycle. With ECC on every bank is SECDED protected
// (partial-word writes then take a second cycle, see ecc_sram).
//
// AMR cluster: 32 banks, 256 KiB, ECC, 32-bit words (the paper: 32 banks, 256 KiB, ECC,
// one-cycle interconnect). Vector cluster: 16 banks, 128 KiB, 64-bit words (the paper: 16
// banks, 1024 b/cycle, 128 KiB in Fig. 1). Word widths and the round-robin policy are this
// design's choice.
module tcdm_spm import soc_pkg::*; #(
  parameter int unsigned NP         = 4,
  parameter int unsigned NB         = 32,
  parameter int unsigned DW         = 32,
  parameter int unsigned SIZE_BYTES = 256 * 1024,
  parameter bit          ECC        = 1'b1,
  localparam int unsigned BW    = DW / 8,
  localparam int unsigned WORDS = SIZE_BYTES / BW / NB,
  localparam int unsigned RW    = $clog2(WORDS),
  localparam int unsigned BSEL  = $clog2(NB),
  localparam int unsigned PSEL  = (NP > 1) ? $clog2(NP) : 1,
  localparam int unsigned OFS   = $clog2(BW)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          req_i    [NP],
  output logic          gnt_o    [NP],
  input  logic          we_i     [NP],
  input  logic [31:0]   addr_i   [NP],   // byte address, offset inside the SPM
  input  logic [BW-1:0] be_i     [NP],
  input  logic [DW-1:0] wdata_i  [NP],
  output logic          rvalid_o [NP],
  output logic [DW-1:0] rdata_o  [NP],
  output logic          err_o    [NP],   // uncorrectable error on this read
  output logic [31:0]   conflicts_o      // cycles in which some request lost arbitration
);

  logic [BSEL-1:0] bank [NP];
  logic [RW-1:0]   row  [NP];
  always_comb
    for (int unsigned p = 0; p < NP; p++) begin
      bank[p] = addr_i[p][OFS +: BSEL];
      row[p]  = addr_i[p][OFS + BSEL +: RW];
    end

  logic [NB-1:0]   b_req, b_gnt, b_rvalid, b_unc, b_corr;
  logic [PSEL-1:0] b_sel [NB], b_sel_q [NB], b_ptr_q [NB];
  logic [DW-1:0]   b_rdata [NB];

  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      b_req[b] = 1'b0;
      b_sel[b] = '0;
      for (int unsigned k = 0; k < NP; k++) begin
        int unsigned p;
        p = (32'(b_ptr_q[b]) + k) % NP;
        if (!b_req[b] && req_i[p] && bank[p] == BSEL'(b)) begin
          b_req[b] = 1'b1;
          b_sel[b] = PSEL'(p);
        end
      end
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < NP; p++) begin
      gnt_o[p]    = req_i[p] && b_sel[bank[p]] == PSEL'(p) && b_gnt[bank[p]];
      rvalid_o[p] = 1'b0;
      rdata_o[p]  = '0;
      err_o[p]    = 1'b0;
      for (int unsigned b = 0; b < NB; b++)
        if (b_rvalid[b] && b_sel_q[b] == PSEL'(p)) begin
          rvalid_o[p] = 1'b1;
          rdata_o[p]  = b_rdata[b];
          err_o[p]    = b_unc[b];
        end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    ecc_sram #(.DW(DW), .WORDS(WORDS), .ECC(ECC)) i_bank (.clk_i, .rst_ni,
      .req_i(b_req[b]), .gnt_o(b_gnt[b]), .we_i(we_i[b_sel[b]]), .be_i(be_i[b_sel[b]]),
      .addr_i(row[b_sel[b]]), .wdata_i(wdata_i[b_sel[b]]), .rvalid_o(b_rvalid[b]),
      .rdata_o(b_rdata[b]), .err_corr_o(b_corr[b]), .err_unc_o(b_unc[b]), .inject_i('0));
  end

  logic lost;
  always_comb begin
    lost = 1'b0;
    for (int unsigned p = 0; p < NP; p++) if (req_i[p] && !gnt_o[p]) lost = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      conflicts_o <= '0;
      for (int unsigned b = 0; b < NB; b++) begin
        b_sel_q[b] <= '0;
        b_ptr_q[b] <= '0;
      end
    end else begin
      if (lost) conflicts_o <= conflicts_o + 32'd1;
      for (int unsigned b = 0; b < NB; b++)
        if (b_req[b] && b_gnt[b]) begin
          b_sel_q[b] <= b_sel[b];
          b_ptr_q[b] <= PSEL'((32'(b_sel[b]) + 1) % NP);
        end
    end
  end
endmodule
