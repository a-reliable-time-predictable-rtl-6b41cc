// axi_to_mem: AXI4 slave port that turns bursts into single-word memory requests.
//
// Used wherever an AXI port ends in SRAM banks: the two ports of the L2 DCSPM and the AXI
// slave ports through which the system reaches the cluster L1 memories. One burst is
// handled at a time (reads and writes take turns when both are waiting). Each beat becomes
// one request on a req/gnt memory port carrying the byte address of the beat; read data
// returns with rvalid some cycles later (any fixed or variable latency). Read beats are
// queued in a two-entry buffer and a new read is issued only when the buffer has room for
// everything in flight (counting a beat leaving on R in the same cycle), so one beat per cycle is sustained while R is ready. INCR and
// FIXED bursts are supported; WRAP is handled as INCR. An uncorrectable memory error
// returns SLVERR on that read beat.
//
// The paper does not describe this converter; it is the simplest bridge the SRAM-backed
// endpoints need.
module axi_to_mem import soc_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output logic     mem_req_o,
  input  logic     mem_gnt_i,
  output logic     mem_we_o,
  output addr_t    mem_addr_o,
  output strb_t    mem_be_o,
  output data_t    mem_wdata_o,
  input  logic     mem_rvalid_i,
  input  data_t    mem_rdata_i,
  input  logic     mem_err_i
);

  typedef enum logic [1:0] {IDLE, READ, WRITE, WRESP} state_e;
  state_e     state_q;
  ax_chan_t   ax_q;
  logic [8:0] issued_q;        // beats issued to memory
  logic       prio_w_q;        // writes win the next tie
  logic [1:0] inflight_q;      // reads granted, data not yet returned
  // two-entry R buffer
  r_chan_t    rbuf_q [2];
  logic [1:0] rcnt_q;
  logic       rwr_q, rrd_q;
  logic [8:0] returned_q;      // read beats returned by the memory
  logic       take_ar, take_aw, mem_fire, r_fire;
  addr_t      beat_addr;

  always_comb begin
    beat_addr = ax_q.addr;
    if (ax_q.burst != BURST_FIXED)
      beat_addr = (ax_q.addr & ~addr_t'((1 << ax_q.size) - 1)) + (addr_t'(issued_q) << ax_q.size);
  end

  assign take_ar = (state_q == IDLE) && axi_req_i.ar_valid && (!axi_req_i.aw_valid || !prio_w_q);
  assign take_aw = (state_q == IDLE) && axi_req_i.aw_valid && !take_ar;

  always_comb begin
    mem_req_o   = 1'b0;
    mem_we_o    = 1'b0;
    mem_addr_o  = beat_addr;
    mem_be_o    = axi_req_i.w.strb;
    mem_wdata_o = axi_req_i.w.data;
    if (state_q == READ)
      mem_req_o = (issued_q <= {1'b0, ax_q.len}) &&
                  (({1'b0, inflight_q} + {1'b0, rcnt_q}) < (r_fire ? 3'd3 : 3'd2));
    else if (state_q == WRITE) begin
      mem_req_o = axi_req_i.w_valid;
      mem_we_o  = 1'b1;
    end
  end
  assign mem_fire = mem_req_o && mem_gnt_i;

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.ar_ready = take_ar;
    axi_rsp_o.aw_ready = take_aw;
    axi_rsp_o.w_ready  = (state_q == WRITE) && mem_gnt_i;
    axi_rsp_o.b_valid  = (state_q == WRESP);
    axi_rsp_o.b.id     = ax_q.id;
    axi_rsp_o.b.resp   = RESP_OKAY;
    axi_rsp_o.r_valid  = (rcnt_q != 0);
    axi_rsp_o.r        = rbuf_q[rrd_q];
  end
  assign r_fire = axi_rsp_o.r_valid && axi_req_i.r_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= IDLE;
      ax_q       <= '0;
      issued_q   <= '0;
      prio_w_q   <= 1'b0;
      inflight_q <= '0;
      rcnt_q     <= '0;
      rwr_q      <= 1'b0;
      rrd_q      <= 1'b0;
      returned_q <= '0;
      rbuf_q[0]  <= '0;
      rbuf_q[1]  <= '0;
    end else begin
      if (mem_fire) issued_q <= issued_q + 9'd1;
      inflight_q <= inflight_q + ((mem_fire && !mem_we_o) ? 2'd1 : 2'd0) - (mem_rvalid_i ? 2'd1 : 2'd0);
      rcnt_q     <= rcnt_q + (mem_rvalid_i ? 2'd1 : 2'd0) - (r_fire ? 2'd1 : 2'd0);
      if (mem_rvalid_i) begin
        rbuf_q[rwr_q].id   <= ax_q.id;
        rbuf_q[rwr_q].data <= mem_rdata_i;
        rbuf_q[rwr_q].resp <= mem_err_i ? RESP_SLVERR : RESP_OKAY;
        rbuf_q[rwr_q].last <= (returned_q == {1'b0, ax_q.len});
        rwr_q              <= ~rwr_q;
        returned_q         <= returned_q + 9'd1;
      end
      if (r_fire) rrd_q <= ~rrd_q;
      unique case (state_q)
        IDLE: begin
          issued_q   <= '0;
          returned_q <= '0;
          if (take_ar) begin
            ax_q     <= axi_req_i.ar;
            state_q  <= READ;
            prio_w_q <= 1'b1;
          end else if (take_aw) begin
            ax_q     <= axi_req_i.aw;
            state_q  <= WRITE;
            prio_w_q <= 1'b0;
          end
        end
        READ:  if (r_fire && axi_rsp_o.r.last) state_q <= IDLE;
        WRITE: if (mem_fire && axi_req_i.w.last) state_q <= WRESP;
        WRESP: if (axi_req_i.b_ready) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  a_wlast: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (mem_fire && mem_we_o) |-> (axi_req_i.w.last == (issued_q == {1'b0, ax_q.len})));

endmodule
