// vrf: vector register file of one RISC-V vector unit (RVVU) of the vector cluster.
//
// 32 vector registers of VLEN = 512 bits, 2 KiB in all, split into NBANKS = 4 banks of
// 256-bit rows. Each bank has three read ports and one write port, all 256 bits wide, so a
// vfmacc can read its three operands (3 x 256 b per cycle) and write its result (256 b per
// cycle) every cycle when its operands sit in different banks. Row r of the register file
// (register r / 2, half r mod 2) lives in bank r mod 4 at bank row r / 4, so the two
// halves of a register and neighbouring registers fall into different banks. Reads are
// combinational (the paper's VRF is latch based); writes take effect at the clock edge and
// are byte-enabled. Two writes to one bank in one cycle cannot happen: each bank has one
// write port.
//
// From the paper: 2 KiB, VLEN = 512, four banks with 3 read and 1 write 256-bit ports.
// This design's choices: the row-to-bank mapping and flip-flops instead of latches.
module vrf #(
  parameter int unsigned VLEN   = 512,
  parameter int unsigned NREGS  = 32,
  parameter int unsigned NBANKS = 4,
  parameter int unsigned PW     = 256,
  localparam int unsigned ROWS  = NREGS * VLEN / PW,    // 64 rows of 256 bit
  localparam int unsigned BROWS = ROWS / NBANKS,        // 16 rows per bank
  localparam int unsigned RA    = $clog2(BROWS)
) (
  input  logic              clk_i,
  input  logic [RA-1:0]     raddr_i [NBANKS][3],
  output logic [PW-1:0]     rdata_o [NBANKS][3],
  input  logic              we_i    [NBANKS],
  input  logic [RA-1:0]     waddr_i [NBANKS],
  input  logic [PW/8-1:0]   wbe_i   [NBANKS],
  input  logic [PW-1:0]     wdata_i [NBANKS]
);
  logic [PW-1:0] mem [NBANKS][BROWS];

  always_comb
    for (int unsigned b = 0; b < NBANKS; b++)
      for (int unsigned p = 0; p < 3; p++)
        rdata_o[b][p] = mem[b][raddr_i[b][p]];

  always_ff @(posedge clk_i)
    for (int unsigned b = 0; b < NBANKS; b++)
      if (we_i[b])
        for (int unsigned y = 0; y < PW/8; y++)
          if (wbe_i[b][y]) mem[b][waddr_i[b]][8*y +: 8] <= wdata_i[b][8*y +: 8];
endmodule
