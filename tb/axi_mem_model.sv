// axi_mem_model: behavioural AXI4 target memory for testbenches (not synthesizable intent).
//
// Stands in for memories outside the chip (the HyperRAM behind the last-level cache) and
// for targets in unit tests. It serves one read and one write burst at a time, INCR bursts
// only; read data starts LAT cycles after the AR handshake and then flows one beat per
// cycle. Memory is 2**AW_WORDS 64-bit words, indexed by address bits [AW_WORDS+2:3], and
// is filled with a known pattern (word address XOR a constant) at time zero. It counts AR,
// AW and W handshakes for the testbench.
module axi_mem_model import soc_pkg::*; #(
  parameter int unsigned AW_WORDS = 16,
  parameter int unsigned LAT      = 2
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o,
  output int       n_ar,
  output int       n_aw,
  output int       n_w
);
  data_t      mem [2**AW_WORDS];
  logic       rbusy, wbusy, bpend;
  ax_chan_t   ar, aw;
  int         rbeat, wbeat, wait_cnt;

  initial for (int i = 0; i < 2**AW_WORDS; i++) mem[i] = 64'(i) ^ 64'hA5A5_0000_5A5A_0000;

  function automatic int unsigned widx(input addr_t a);
    return int'(a[AW_WORDS+2:3]);
  endfunction

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = !rbusy;
    rsp_o.aw_ready = !wbusy;
    rsp_o.w_ready  = wbusy && !bpend;
    rsp_o.r_valid  = rbusy && wait_cnt == 0;
    rsp_o.r.id     = ar.id;
    rsp_o.r.data   = mem[widx(ar.addr + addr_t'(rbeat * 8))];
    rsp_o.r.last   = (rbeat == int'(ar.len));
    rsp_o.b_valid  = bpend;
    rsp_o.b.id     = aw.id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rbusy <= 1'b0; wbusy <= 1'b0; bpend <= 1'b0; rbeat <= 0; wbeat <= 0; wait_cnt <= 0;
      n_ar <= 0; n_aw <= 0; n_w <= 0; ar <= '0; aw <= '0;
    end else begin
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        rbusy <= 1'b1; ar <= req_i.ar; rbeat <= 0; wait_cnt <= LAT; n_ar <= n_ar + 1;
      end else if (rbusy) begin
        if (wait_cnt != 0) wait_cnt <= wait_cnt - 1;
        else if (req_i.r_ready) begin
          rbeat <= rbeat + 1;
          if (rbeat == int'(ar.len)) rbusy <= 1'b0;
        end
      end
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        wbusy <= 1'b1; aw <= req_i.aw; wbeat <= 0; n_aw <= n_aw + 1;
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        for (int b = 0; b < 8; b++)
          if (req_i.w.strb[b]) mem[widx(aw.addr + addr_t'(wbeat * 8))][8*b +: 8] <= req_i.w.data[8*b +: 8];
        wbeat <= wbeat + 1;
        n_w   <= n_w + 1;
        if (req_i.w.last) bpend <= 1'b1;
      end
      if (bpend && req_i.b_ready) begin
        bpend <= 1'b0; wbusy <= 1'b0;
      end
    end
  end
endmodule
