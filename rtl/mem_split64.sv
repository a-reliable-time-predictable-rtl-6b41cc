// mem_split64: joins two 32-bit L1 ports into one 64-bit memory port (helper).
//
// The AMR cluster's L1 banks are 32 bits wide while the system bus is 64 bits. A 64-bit
// access is sent as two 32-bit requests, to the word at addr and at addr + 4 (these sit in
// neighbouring banks, so both usually win in the same cycle). The 64-bit request is granted
// once both halves have been granted, in the same or in different cycles, and its read data
// is returned once both halves have come back.
module mem_split64 (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  output logic        gnt_o,
  input  logic        we_i,
  input  logic [31:0] addr_i,
  input  logic [7:0]  be_i,
  input  logic [63:0] wdata_i,
  output logic        rvalid_o,
  output logic [63:0] rdata_o,
  output logic        err_o,
  // two 32-bit ports: [0] low word, [1] high word
  output logic        h_req_o    [2],
  input  logic        h_gnt_i    [2],
  output logic        h_we_o     [2],
  output logic [31:0] h_addr_o   [2],
  output logic [3:0]  h_be_o     [2],
  output logic [31:0] h_wdata_o  [2],
  input  logic        h_rvalid_i [2],
  input  logic [31:0] h_rdata_i  [2],
  input  logic        h_err_i    [2]
);
  logic [1:0]  got_q, have_q, err_q;
  logic [31:0] data_q [2];
  logic [1:0]  have;

  always_comb begin
    for (int unsigned h = 0; h < 2; h++) begin
      h_req_o[h]   = req_i && !got_q[h];
      h_we_o[h]    = we_i;
      h_addr_o[h]  = {addr_i[31:3], 3'b000} + 32'(4 * h);
      h_be_o[h]    = be_i[4*h +: 4];
      h_wdata_o[h] = wdata_i[32*h +: 32];
      have[h]      = have_q[h] || h_rvalid_i[h];
    end
    gnt_o    = req_i && (got_q[0] || h_gnt_i[0]) && (got_q[1] || h_gnt_i[1]);
    rvalid_o = have[0] && have[1];
    rdata_o  = {h_rvalid_i[1] ? h_rdata_i[1] : data_q[1], h_rvalid_i[0] ? h_rdata_i[0] : data_q[0]};
    err_o    = rvalid_o && ((h_rvalid_i[0] ? h_err_i[0] : err_q[0]) || (h_rvalid_i[1] ? h_err_i[1] : err_q[1]));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      got_q <= '0; have_q <= '0; err_q <= '0;
      data_q[0] <= '0; data_q[1] <= '0;
    end else begin
      for (int unsigned h = 0; h < 2; h++) begin
        if (gnt_o) got_q[h] <= 1'b0;
        else if (h_req_o[h] && h_gnt_i[h]) got_q[h] <= 1'b1;
        if (rvalid_o) have_q[h] <= 1'b0;
        else if (h_rvalid_i[h]) begin
          have_q[h] <= 1'b1;
          data_q[h] <= h_rdata_i[h];
          err_q[h]  <= h_err_i[h];
        end
      end
    end
  end
endmodule
