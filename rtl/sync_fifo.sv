// sync_fifo: small synchronous first-in first-out buffer (helper).
//
// DEPTH entries of W bits. push when not full, pop when not empty; data_o shows the oldest
// entry. Pushing and popping in the same cycle is allowed. Used for the bookkeeping queues
// of the traffic shaper and as data buffers.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         push_i,
  input  logic [W-1:0] data_i,
  input  logic         pop_i,
  output logic [W-1:0] data_o,
  output logic         full_o,
  output logic         empty_o,
  output logic [AW:0]  count_o
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   cnt_q;

  assign full_o  = (cnt_q == (AW+1)'(DEPTH));
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;
  assign data_o  = mem[rp_q];

  always_ff @(posedge clk_i) if (push_i && !full_o) mem[wp_q] <= data_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i && !full_o) wp_q <= (wp_q == AW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      if (pop_i && !empty_o) rp_q <= (rp_q == AW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push_i && !full_o) - (AW+1)'(pop_i && !empty_o);
    end
  end
endmodule
