// tsu_wb: write buffer, the second stage of the traffic shaper unit (TSU).
//
// It holds back a write burst's AW request until all of the burst's W data sits in the
// buffer, and only then forwards the AW and streams the W beats back to back. An initiator
// that issues AW and then produces its data slowly can therefore never hold the W channel
// of a target (and through it the crossbar) while it waits for its own data. If a burst
// is longer than the buffer, the AW is forwarded as soon as the buffer is full.
//
// One AW is held at a time; W beats are accepted for the held AW only. The downstream W
// channel is opened for a burst once its AW has been forwarded. AW leaves one cycle after
// the last W beat entered the buffer; reads pass straight through. DEPTH (beats) is this
// design's choice: the paper gives the buffering rule, not the size.
module tsu_wb import soc_pkg::*; #(
  parameter int unsigned DEPTH = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic        aw_held_q;
  ax_chan_t    aw_q;
  logic [8:0]  beats_q;          // W beats of the held AW taken in
  logic [3:0]  credit_q;         // bursts whose AW went out and whose W is not all out
  logic        f_full, f_empty, w_in, w_out, aw_out;
  w_chan_t     f_head;
  logic [CW-1:0] f_cnt;  // occupancy, unused

  logic [8:0]  tail_q;           // beats still to come of a burst forwarded early (buffer full)
  assign w_in   = slv_req_i.w_valid && !f_full &&
                  ((aw_held_q && beats_q <= {1'b0, aw_q.len}) || tail_q != 0);
  assign aw_out = aw_held_q && ((beats_q == {1'b0, aw_q.len} + 9'd1) || f_full) && mst_rsp_i.aw_ready
                  && (credit_q != 4'hf);
  assign w_out  = !f_empty && (credit_q != 0) && mst_rsp_i.w_ready;

  sync_fifo #(.W($bits(w_chan_t)), .DEPTH(DEPTH)) i_buf (.clk_i, .rst_ni,
    .push_i(w_in), .data_i(slv_req_i.w), .pop_i(w_out), .data_o(f_head),
    .full_o(f_full), .empty_o(f_empty), .count_o(f_cnt));

  always_comb begin
    mst_req_o          = slv_req_i;
    mst_req_o.aw       = aw_q;
    mst_req_o.aw_valid = aw_held_q && ((beats_q == {1'b0, aw_q.len} + 9'd1) || f_full) && (credit_q != 4'hf);
    mst_req_o.w        = f_head;
    mst_req_o.w_valid  = !f_empty && (credit_q != 0);
    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.aw_ready = !aw_held_q && (tail_q == 0);
    slv_rsp_o.w_ready  = w_in;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_held_q <= 1'b0;
      aw_q      <= '0;
      beats_q   <= '0;
      credit_q  <= '0;
      tail_q    <= '0;
    end else begin
      if (tail_q != 0 && w_in) tail_q <= tail_q - 9'd1;
      if (!aw_held_q && tail_q == 0 && slv_req_i.aw_valid) begin
        aw_held_q <= 1'b1;
        aw_q      <= slv_req_i.aw;
        beats_q   <= '0;
      end else begin
        if (w_in) beats_q <= beats_q + 9'd1;
        if (aw_out) begin
          aw_held_q <= 1'b0;
          tail_q    <= {1'b0, aw_q.len} + 9'd1 - beats_q - (w_in ? 9'd1 : 9'd0);
        end
      end
      credit_q <= credit_q + (aw_out ? 4'd1 : 4'd0) - ((w_out && f_head.last) ? 4'd1 : 4'd0);
    end
  end

  a_no_early_w: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mst_req_o.w_valid |-> credit_q != 0);

endmodule
