// dma: one-dimensional AXI4 copy engine (system DMA and the cluster DMAs).
//
// Software writes the source and destination byte addresses and the length, then starts
// the copy. The engine moves the data in bursts of up to BURST beats of 64 bits: it reads
// one burst into its buffer (AR, then the R beats), then writes it out (AW, the W beats,
// then waits for B), and repeats until the length is done. No burst crosses a 4 KiB
// boundary, as AXI requires. Addresses and length must be multiples of 8 bytes.
// Registers (32-bit, byte offsets): 0x00 SRC, 0x04 DST, 0x08 LEN (bytes), 0x0C BURST
// (beats, 1..MAX_BURST), 0x10 write: start / read: busy, 0x14 copies completed.
// Long bursts are the point: they are what makes a DMA a heavy interferer on the
// crossbar, and what the traffic shaper's burst splitter cuts up.
//
// The paper gives only the DMAs' function and bandwidth (64 b/cycle read and write for
// the AMR cluster); this engine is the simplest one that does the job, and all its details
// are this design's choice. It does not overlap reads and writes.
module dma import soc_pkg::*; #(
  parameter int unsigned MAX_BURST = 256
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t cfg_req_i,
  output reg_rsp_t cfg_rsp_o,
  output logic     busy_o,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i
);
  typedef enum logic [2:0] {IDLE, AR, R, AW, W, B} state_e;
  state_e      state_q;
  logic [31:0] src_q, dst_q, len_q, cur_src_q, cur_dst_q, left_q, done_q;
  logic [8:0]  burst_q, n_q, cnt_q;
  data_t       buf_q [MAX_BURST];
  logic [8:0]  nb;

  // beats of the next burst: burst size, bytes left, 4 KiB boundaries of source and dest
  always_comb begin
    logic [31:0] s4, d4;
    s4 = (32'd4096 - {20'd0, cur_src_q[11:0]}) >> 3;
    d4 = (32'd4096 - {20'd0, cur_dst_q[11:0]}) >> 3;
    nb = burst_q;
    if (32'(nb) > (left_q >> 3)) nb = 9'(left_q >> 3);
    if (32'(nb) > s4) nb = 9'(s4);
    if (32'(nb) > d4) nb = 9'(d4);
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar.addr  = cur_src_q;
    axi_req_o.ar.len   = 8'(nb - 9'd1);
    axi_req_o.ar.size  = 3'd3;
    axi_req_o.ar.burst = BURST_INCR;
    axi_req_o.ar_valid = (state_q == AR);
    axi_req_o.r_ready  = (state_q == R);
    axi_req_o.aw.addr  = cur_dst_q;
    axi_req_o.aw.len   = 8'(n_q - 9'd1);
    axi_req_o.aw.size  = 3'd3;
    axi_req_o.aw.burst = BURST_INCR;
    axi_req_o.aw_valid = (state_q == AW);
    axi_req_o.w.data   = buf_q[cnt_q[$clog2(MAX_BURST)-1:0]];
    axi_req_o.w.strb   = '1;
    axi_req_o.w.last   = (cnt_q == n_q - 9'd1);
    axi_req_o.w_valid  = (state_q == W);
    axi_req_o.b_ready  = (state_q == B);
  end

  always_comb begin
    cfg_rsp_o = '0;
    unique case (cfg_req_i.addr[7:0])
      8'h00: cfg_rsp_o.rdata = src_q;
      8'h04: cfg_rsp_o.rdata = dst_q;
      8'h08: cfg_rsp_o.rdata = len_q;
      8'h0C: cfg_rsp_o.rdata = {23'd0, burst_q};
      8'h10: cfg_rsp_o.rdata = {31'd0, busy_o};
      8'h14: cfg_rsp_o.rdata = done_q;
      default: cfg_rsp_o.error = cfg_req_i.valid;
    endcase
  end
  assign busy_o = (state_q != IDLE);

  always_ff @(posedge clk_i)
    if (state_q == R && axi_rsp_i.r_valid) buf_q[cnt_q[$clog2(MAX_BURST)-1:0]] <= axi_rsp_i.r.data;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      src_q <= '0; dst_q <= '0; len_q <= '0; burst_q <= 9'(MAX_BURST);
      cur_src_q <= '0; cur_dst_q <= '0; left_q <= '0; done_q <= '0;
      n_q <= '0; cnt_q <= '0;
    end else begin
      if (cfg_req_i.valid && cfg_req_i.write && state_q == IDLE) begin
        unique case (cfg_req_i.addr[7:0])
          8'h00: src_q <= cfg_req_i.wdata;
          8'h04: dst_q <= cfg_req_i.wdata;
          8'h08: len_q <= cfg_req_i.wdata;
          8'h0C: burst_q <= (cfg_req_i.wdata == 0 || cfg_req_i.wdata > MAX_BURST) ?
                            9'(MAX_BURST) : cfg_req_i.wdata[8:0];
          8'h10: if (len_q >= 8) begin
            cur_src_q <= src_q;
            cur_dst_q <= dst_q;
            left_q    <= len_q;
            state_q   <= AR;
          end
          default: ;
        endcase
      end
      unique case (state_q)
        IDLE: ;
        AR: begin
          if (axi_rsp_i.ar_ready) begin
            n_q     <= nb;
            state_q <= R;
            cnt_q   <= '0;
          end
        end
        R: if (axi_rsp_i.r_valid) begin
          cnt_q <= cnt_q + 9'd1;
          if (axi_rsp_i.r.last) state_q <= AW;
        end
        AW: if (axi_rsp_i.aw_ready) begin
          state_q <= W;
          cnt_q   <= '0;
        end
        W: if (axi_rsp_i.w_ready) begin
          cnt_q <= cnt_q + 9'd1;
          if (axi_req_o.w.last) state_q <= B;
        end
        B: if (axi_rsp_i.b_valid) begin
          cur_src_q <= cur_src_q + {n_q, 3'd0};
          cur_dst_q <= cur_dst_q + {n_q, 3'd0};
          left_q    <= left_q - {n_q, 3'd0};
          if (left_q == {20'd0, n_q, 3'd0}) begin
            state_q <= IDLE;
            done_q  <= done_q + 32'd1;
          end else state_q <= AR;
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
