// ecc_sram: one single-ported SRAM bank, optionally protected by a SECDED code.
//
// Every on-chip memory bank of the SoC (the L2 DCSPM banks, the AMR cluster L1 banks and
// the vector cluster L1 banks) is one of these. A request is accepted when req && gnt;
// read data, with its error flags, appears one cycle later with rvalid. With ECC on, each
// word is stored with SECDED check bits: a single flipped bit is corrected on read and
// reported on err_corr, a double error is reported on err_unc. A write that does not cover
// the whole word (be not all ones) must re-encode the word, so it is done as a
// read-modify-write: gnt stays low for one cycle while the old word is read, and the merged
// word is written in the second cycle. Full-word writes and reads take one cycle.
// Without ECC the bank is a plain byte-enabled SRAM and always grants.
//
// The paper gives the ECC protection and the bank counts; the SECDED code, the one-cycle
// latency and the read-modify-write are this design's choices. Corrected data is not
// written back (no scrubbing).
module ecc_sram import soc_pkg::*; #(
  parameter int unsigned DW    = 64,     // data bits (a multiple of 8, at most 64)
  parameter int unsigned WORDS = 1024,
  parameter bit          ECC   = 1'b1,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned BW   = DW / 8,
  localparam int unsigned SW   = ECC ? DW + secded_p(DW) + 1 : DW
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          req_i,
  output logic          gnt_o,
  input  logic          we_i,
  input  logic [BW-1:0] be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [DW-1:0] wdata_i,
  output logic          rvalid_o,
  output logic [DW-1:0] rdata_o,
  output logic          err_corr_o,
  output logic          err_unc_o,
  // fault injection for tests: XOR mask applied to the stored word on the next write
  input  logic [SW-1:0] inject_i
);

  logic [SW-1:0] mem [WORDS];
  logic [SW-1:0] rd_q;
  logic          rvalid_q, rmw_q;
  logic          partial;
  logic [DW-1:0] old_data, merged;
  logic [SW-1:0] wword;
  secded_res_t   dec;

  assign partial = ECC && we_i && (be_i != '1);
  assign gnt_o   = req_i && (!partial || rmw_q);

  always_comb begin
    if (ECC) dec = secded_decode({{(80-SW){1'b0}}, rd_q}, DW);
    else begin
      dec = '0;
      dec.data[DW-1:0] = rd_q[DW-1:0];
    end
  end
  assign old_data = dec.data[DW-1:0];

  always_comb begin
    for (int unsigned b = 0; b < BW; b++)
      merged[8*b +: 8] = be_i[b] ? wdata_i[8*b +: 8] : old_data[8*b +: 8];
  end

  always_comb begin
    logic [79:0] enc;
    if (ECC) enc = secded_encode({{(64-DW){1'b0}}, merged}, DW);
    else     enc = {{(80-DW){1'b0}}, wdata_i};
    wword = enc[SW-1:0] ^ inject_i;
  end

  always_ff @(posedge clk_i) begin
    if (req_i && we_i && gnt_o) begin
      if (ECC) mem[addr_i] <= wword;
      else begin
        for (int unsigned b = 0; b < BW; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wword[8*b +: 8];
      end
    end
    if (req_i && (!we_i || (partial && !rmw_q))) rd_q <= mem[addr_i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rmw_q    <= 1'b0;
    end else begin
      rvalid_q <= req_i && !we_i && gnt_o;
      rmw_q    <= partial && req_i && !rmw_q;
    end
  end

  assign rvalid_o   = rvalid_q;
  assign rdata_o    = old_data;
  assign err_corr_o = rvalid_q && ECC && dec.corrected;
  assign err_unc_o  = rvalid_q && ECC && dec.uncorrectable;

endmodule
