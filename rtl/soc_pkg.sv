// soc_pkg: types and constants shared by the whole SoC.
//
// The system interconnect is a 64-bit AXI4 bus. Every AXI port in this design carries the
// same request/response structs: one AW, W, B, AR and R channel each, with valid/ready.
// The AXI user field carries the cache partition identifier (part_id) that the
// dynamically partitionable last-level cache uses to choose a partition. Address width,
// ID width and user width are not given by the paper and are this design's choice.
//
// The package also holds the SECDED (single-error-correct, double-error-detect) Hamming
// code used by every ECC-protected memory: 64 data bits take 8 check bits, 32 take 7.
package soc_pkg;

  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;
  localparam int unsigned AXI_USER_W = 4;   // part_id of the DPLLC

  typedef logic [AXI_ADDR_W-1:0] addr_t;
  typedef logic [AXI_DATA_W-1:0] data_t;
  typedef logic [AXI_STRB_W-1:0] strb_t;
  typedef logic [AXI_ID_W-1:0]   id_t;
  typedef logic [AXI_USER_W-1:0] user_t;

  typedef enum logic [1:0] {BURST_FIXED = 2'b00, BURST_INCR = 2'b01, BURST_WRAP = 2'b10} burst_e;
  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10, RESP_DECERR = 2'b11;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    burst_e     burst;
    user_t      user;
  } ax_chan_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_chan_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_chan_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } r_chan_t;

  typedef struct packed {
    ax_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ax_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    b_chan_t b;
    logic    b_valid;
    logic    ar_ready;
    r_chan_t r;
    logic    r_valid;
  } axi_rsp_t;

  // Simple register bus used for configuration (one access per cycle, answered at once).
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [15:0] addr;
    logic [31:0] wdata;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        error;
  } reg_rsp_t;

  // A cluster core's data port to the L1 scratchpad (request and response bundles).
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } core_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
    logic        err;
  } core_rsp_t;

  // AMR cluster redundancy modes.
  typedef enum logic [1:0] {MODE_INDIP = 2'd0, MODE_DLM = 2'd1, MODE_TLM = 2'd2} amr_mode_e;

  // ---------------------------------------------------------------------------------
  // SECDED Hamming code. Codeword bit positions 1..N (N = K + P), check bits at powers
  // of two, data bits elsewhere in order; an overall parity bit is stored on top.
  // Stored layout: {overall_parity, codeword[N:1]}.
  // ---------------------------------------------------------------------------------
  function automatic int unsigned secded_p(input int unsigned k);
    int unsigned p = 0;
    while ((1 << p) < k + p + 1) p++;
    return p;
  endfunction

  // Encode up to 64 data bits; the result is right-aligned, width k + secded_p(k) + 1.
  function automatic logic [79:0] secded_encode(input logic [63:0] d, input int unsigned k);
    logic [79:0] cw;
    int unsigned p, n, di;
    logic par;
    p  = secded_p(k);
    n  = k + p;
    cw = '0;
    di = 0;
    for (int unsigned pos = 1; pos <= 79; pos++) begin
      if (pos <= n && (pos & (pos - 1)) != 0) begin
        cw[pos] = d[di];
        di++;
      end
    end
    for (int unsigned j = 0; j < 7; j++) begin
      if (j < p) begin
        par = 1'b0;
        for (int unsigned pos = 1; pos <= 79; pos++)
          if (pos <= n && ((pos >> j) & 1) == 1) par ^= cw[pos];
        cw[1 << j] = par;
      end
    end
    par = 1'b0;
    for (int unsigned pos = 1; pos <= 79; pos++) if (pos <= n) par ^= cw[pos];
    // shift down so that bit 0 holds position 1, overall parity sits at bit n
    cw = cw >> 1;
    cw[n] = par;
    return cw;
  endfunction

  typedef struct packed {
    logic [63:0] data;
    logic        corrected;   // single error found and corrected
    logic        uncorrectable; // double error detected
  } secded_res_t;

  function automatic secded_res_t secded_decode(input logic [79:0] stored, input int unsigned k);
    logic [79:0] cw;
    int unsigned p, n, di, syn;
    logic par;
    secded_res_t res;
    p  = secded_p(k);
    n  = k + p;
    cw = '0;
    for (int unsigned pos = 1; pos <= 79; pos++) if (pos <= n) cw[pos] = stored[pos-1];
    syn = 0;
    for (int unsigned pos = 1; pos <= 79; pos++) if (pos <= n && cw[pos]) syn ^= pos;
    par = stored[n];
    for (int unsigned pos = 1; pos <= 79; pos++) if (pos <= n) par ^= cw[pos];
    res.corrected     = 1'b0;
    res.uncorrectable = 1'b0;
    if (syn != 0 && par) begin
      if (syn <= n) cw[syn] = ~cw[syn];
      res.corrected = 1'b1;
    end else if (syn != 0 && !par) begin
      res.uncorrectable = 1'b1;
    end else if (syn == 0 && par) begin
      res.corrected = 1'b1;  // the overall parity bit itself flipped
    end
    res.data = '0;
    di = 0;
    for (int unsigned pos = 1; pos <= 79; pos++) begin
      if (pos <= n && (pos & (pos - 1)) != 0) begin
        res.data[di] = cw[pos];
        di++;
      end
    end
    return res;
  endfunction

endpackage
