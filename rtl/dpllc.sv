// dpllc: dynamically partitionable last-level cache (128 KiB) in front of the HyperRAM.
//
// A write-back, write-allocate, set-associative cache with WAYS ways of SETS sets and
// LINE_WORDS 64-bit words per line. Its special feature is set-based partitioning: every
// AXI request carries a partition identifier (part_id) in its AXI user field, and each
// partition p owns the sets [START[p], START[p] + NSETS[p]). A line of partition p can only
// be placed in, and evict from, the partition's own sets, so tasks in different partitions
// cannot evict each other's lines and their hit rates no longer depend on one another.
// A partition whose NSETS is 0 uses the whole cache (the reset state: no partitioning).
// Tags hold the full line address, so changing the partition layout never returns wrong
// data. Software can flush a single partition: its dirty lines are written back and its
// lines invalidated, while every other partition keeps its contents.
//
// Operation: one AXI burst is served at a time, beat by beat. A hit returns or takes one
// 64-bit beat per cycle. On a miss the victim way (round robin per set) is written back if
// dirty (one LINE_WORDS-beat burst on the memory port) and the line is refilled (one burst),
// then the beat is served. Registers (32-bit, byte offsets):
//   0x00 + 8p  START[p]   first set of partition p
//   0x04 + 8p  NSETS[p]   number of sets of partition p (0: whole cache)
//   0x80       FLUSH      write p to flush partition p
//   0x84       STATUS     bit0 flush busy
//   0x88       MISSES     miss counter;   0x8C HITS hit counter
// From the paper: 128 KiB, set-based partitions of configurable size selected by part_id
// from the AXI user signals, selective partition flushing. This design's choices: 8 ways,
// 256 sets, 64-byte lines, 4 partitions, round-robin replacement, the register map, and a
// blocking (one miss at a time) organisation.
module dpllc import soc_pkg::*; #(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned SETS       = 256,
  parameter int unsigned LINE_WORDS = 8,
  parameter int unsigned NPART      = 4,
  localparam int unsigned SW  = $clog2(SETS),
  localparam int unsigned WW  = $clog2(WAYS),
  localparam int unsigned OW  = $clog2(LINE_WORDS),
  localparam int unsigned PW  = (NPART > 1) ? $clog2(NPART) : 1,
  localparam int unsigned TW  = AXI_ADDR_W - 3 - OW       // line address bits
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t cfg_req_i,
  output reg_rsp_t cfg_rsp_o,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mem_req_o,
  input  axi_rsp_t mem_rsp_i
);

  typedef enum logic [3:0] {IDLE, LOOKUP, BRESP, WB_AW, WB_W, WB_B, RF_AR, RF_R,
                            FL_SCAN, FL_DONE} state_e;
  state_e state_q;

  // tag store and data store
  logic [WAYS-1:0] valid_q [SETS];
  logic [WAYS-1:0] dirty_q [SETS];
  logic [TW-1:0]   tag_q   [SETS][WAYS];
  logic [WW-1:0]   rr_q    [SETS];
  data_t           data_q  [SETS*WAYS*LINE_WORDS];

  // partition configuration
  logic [SW:0]     pstart_q [NPART];
  logic [SW:0]     psets_q  [NPART];
  logic [31:0]     miss_q, hit_q;

  // current burst
  ax_chan_t   ax_q;
  logic       is_wr_q, prio_w_q;
  logic [8:0] beat_q;
  addr_t      beat_addr;
  logic [TW-1:0] line;
  logic [SW-1:0] set;
  logic       hit;
  logic [WW-1:0] hway, vway_q;
  logic [OW-1:0] word, cnt_q;
  logic [$clog2(NPART)-1:0] pid;

  function automatic logic [SW-1:0] set_of(input logic [TW-1:0] ln, input logic [SW:0] st,
                                           input logic [SW:0] n);
    if (n == 0) return SW'(ln % SETS);
    return SW'(st + (SW+1)'(ln % n));
  endfunction

  always_comb begin
    beat_addr = ax_q.addr;
    if (ax_q.burst != BURST_FIXED)
      beat_addr = (ax_q.addr & ~addr_t'(7)) + (addr_t'(beat_q) << 3);
  end
  assign line = beat_addr[AXI_ADDR_W-1 -: TW];
  assign word = beat_addr[3 +: OW];
  assign pid  = ax_q.user[$clog2(NPART)-1:0];
  assign set  = set_of(line, pstart_q[pid], psets_q[pid]);

  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (valid_q[set][w] && tag_q[set][w] == line) begin
        hit  = 1'b1;
        hway = WW'(w);
      end
  end

  // flush walk
  logic fl_wb_q;   // the write-back in progress belongs to a flush
  logic fl_req_q;  // a flush was requested and waits for the current burst to end
  logic [$clog2(NPART)-1:0] fpid_q;
  logic [SW:0]  fset_q, fend_q;     // current set and end set of the flush
  logic [WW:0]  fway_q;
  logic [SW-1:0] fset;
  assign fset = fset_q[SW-1:0];

  // the set/way a write-back uses
  logic [SW-1:0] wb_set;
  logic [WW-1:0] wb_way;
  assign wb_set = (state_q == FL_SCAN || fl_wb_q) ? fset : set;
  assign wb_way = (state_q == FL_SCAN || fl_wb_q) ? fway_q[WW-1:0] : vway_q;

  function automatic int unsigned didx(input logic [SW-1:0] s, input logic [WW-1:0] w,
                                       input logic [OW-1:0] o);
    return (int'(s) * WAYS + int'(w)) * LINE_WORDS + int'(o);
  endfunction

  logic r_fire, w_fire, last_beat;
  assign last_beat = (beat_q == {1'b0, ax_q.len});

  always_comb begin
    slv_rsp_o = '0;
    mem_req_o = '0;
    slv_rsp_o.ar_ready = (state_q == IDLE) && !fl_req_q && slv_req_i.ar_valid && (!slv_req_i.aw_valid || !prio_w_q);
    slv_rsp_o.aw_ready = (state_q == IDLE) && !fl_req_q && slv_req_i.aw_valid && !slv_rsp_o.ar_ready;
    slv_rsp_o.r.id     = ax_q.id;
    slv_rsp_o.r.data   = data_q[didx(set, hway, word)];
    slv_rsp_o.r.last   = last_beat;
    slv_rsp_o.r_valid  = (state_q == LOOKUP) && hit && !is_wr_q;
    slv_rsp_o.w_ready  = (state_q == LOOKUP) && hit && is_wr_q;
    slv_rsp_o.b.id     = ax_q.id;
    slv_rsp_o.b_valid  = (state_q == BRESP);
    // memory side: line bursts
    mem_req_o.aw.addr  = {tag_q[wb_set][wb_way], {(3+OW){1'b0}}};
    mem_req_o.aw.len   = 8'(LINE_WORDS - 1);
    mem_req_o.aw.size  = 3'd3;
    mem_req_o.aw.burst = BURST_INCR;
    mem_req_o.aw_valid = (state_q == WB_AW);
    mem_req_o.w.data   = data_q[didx(wb_set, wb_way, cnt_q)];
    mem_req_o.w.strb   = '1;
    mem_req_o.w.last   = (cnt_q == OW'(LINE_WORDS - 1));
    mem_req_o.w_valid  = (state_q == WB_W);
    mem_req_o.b_ready  = (state_q == WB_B);
    mem_req_o.ar.addr  = {line, {(3+OW){1'b0}}};
    mem_req_o.ar.len   = 8'(LINE_WORDS - 1);
    mem_req_o.ar.size  = 3'd3;
    mem_req_o.ar.burst = BURST_INCR;
    mem_req_o.ar_valid = (state_q == RF_AR);
    mem_req_o.r_ready  = (state_q == RF_R);
  end
  assign r_fire = slv_rsp_o.r_valid && slv_req_i.r_ready;
  assign w_fire = slv_rsp_o.w_ready && slv_req_i.w_valid;

  // configuration registers
  logic flush_start;
  assign flush_start = cfg_req_i.valid && cfg_req_i.write && cfg_req_i.addr[7:0] == 8'h80;
  always_comb begin
    cfg_rsp_o = '0;
    if (cfg_req_i.addr[7] == 1'b0 && int'(cfg_req_i.addr[6:3]) < NPART)
      cfg_rsp_o.rdata = 32'(cfg_req_i.addr[2] ? psets_q[PW'(cfg_req_i.addr[6:3])] : pstart_q[PW'(cfg_req_i.addr[6:3])]);
    else if (cfg_req_i.addr[7:0] == 8'h84) cfg_rsp_o.rdata = {31'd0, state_q inside {FL_SCAN, FL_DONE} || fl_wb_q || fl_req_q};
    else if (cfg_req_i.addr[7:0] == 8'h88) cfg_rsp_o.rdata = miss_q;
    else if (cfg_req_i.addr[7:0] == 8'h8C) cfg_rsp_o.rdata = hit_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned p = 0; p < NPART; p++) begin
        pstart_q[p] <= '0;
        psets_q[p]  <= '0;
      end
    end else if (cfg_req_i.valid && cfg_req_i.write && cfg_req_i.addr[7] == 1'b0 &&
                 int'(cfg_req_i.addr[6:3]) < NPART) begin
      if (cfg_req_i.addr[2]) psets_q[PW'(cfg_req_i.addr[6:3])]  <= cfg_req_i.wdata[SW:0];
      else                   pstart_q[PW'(cfg_req_i.addr[6:3])] <= cfg_req_i.wdata[SW:0];
    end
  end

  // data store writes
  always_ff @(posedge clk_i) begin
    if (w_fire) begin
      for (int unsigned b = 0; b < AXI_STRB_W; b++)
        if (slv_req_i.w.strb[b]) data_q[didx(set, hway, word)][8*b +: 8] <= slv_req_i.w.data[8*b +: 8];
    end
    if (state_q == RF_R && mem_rsp_i.r_valid) data_q[didx(set, vway_q, cnt_q)] <= mem_rsp_i.r.data;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= IDLE;
      ax_q     <= '0;
      is_wr_q  <= 1'b0;
      prio_w_q <= 1'b0;
      beat_q   <= '0;
      cnt_q    <= '0;
      vway_q   <= '0;
      miss_q   <= '0;
      hit_q    <= '0;
      fpid_q   <= '0;
      fset_q   <= '0;
      fend_q   <= '0;
      fway_q   <= '0;
      fl_wb_q  <= 1'b0;
      fl_req_q <= 1'b0;
      for (int unsigned s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        rr_q[s]    <= '0;
        for (int unsigned w = 0; w < WAYS; w++) tag_q[s][w] <= '0;
      end
    end else begin
      if (flush_start) begin
        fl_req_q <= 1'b1;
        fpid_q   <= cfg_req_i.wdata[$clog2(NPART)-1:0];
      end
      unique case (state_q)
        IDLE: begin
          beat_q <= '0;
          if (fl_req_q) begin
            fl_req_q <= 1'b0;
            if (psets_q[fpid_q] == 0) begin
              fset_q <= '0;
              fend_q <= (SW+1)'(SETS);
            end else begin
              fset_q <= pstart_q[fpid_q];
              fend_q <= pstart_q[fpid_q] + psets_q[fpid_q];
            end
            fway_q  <= '0;
            state_q <= FL_SCAN;
          end else if (slv_rsp_o.ar_ready) begin
            ax_q <= slv_req_i.ar; is_wr_q <= 1'b0; prio_w_q <= 1'b1; state_q <= LOOKUP;
          end else if (slv_rsp_o.aw_ready) begin
            ax_q <= slv_req_i.aw; is_wr_q <= 1'b1; prio_w_q <= 1'b0; state_q <= LOOKUP;
          end
        end
        LOOKUP: begin
          if (hit) begin
            if (r_fire || w_fire) begin
              hit_q  <= hit_q + 32'd1;
              beat_q <= beat_q + 9'd1;
              if (w_fire) dirty_q[set][hway] <= 1'b1;
              if (last_beat) state_q <= is_wr_q ? BRESP : IDLE;
            end
          end else begin
            miss_q <= miss_q + 32'd1;
            vway_q <= rr_q[set];
            rr_q[set] <= rr_q[set] + 1'b1;
            cnt_q  <= '0;
            state_q <= (valid_q[set][rr_q[set]] && dirty_q[set][rr_q[set]]) ? WB_AW : RF_AR;
          end
        end
        BRESP: if (slv_req_i.b_ready) state_q <= IDLE;
        WB_AW: if (mem_rsp_i.aw_ready) state_q <= WB_W;
        WB_W: if (mem_rsp_i.w_ready) begin
          cnt_q <= cnt_q + 1'b1;
          if (mem_req_o.w.last) state_q <= WB_B;
        end
        WB_B: if (mem_rsp_i.b_valid) begin
          dirty_q[wb_set][wb_way] <= 1'b0;
          cnt_q <= '0;
          if (fl_wb_q) begin
            fl_wb_q <= 1'b0;
            state_q <= FL_SCAN;
          end else state_q <= RF_AR;
        end
        RF_AR: if (mem_rsp_i.ar_ready) state_q <= RF_R;
        RF_R: if (mem_rsp_i.r_valid) begin
          cnt_q <= cnt_q + 1'b1;
          if (mem_rsp_i.r.last) begin
            valid_q[set][vway_q] <= 1'b1;
            dirty_q[set][vway_q] <= 1'b0;
            tag_q[set][vway_q]   <= line;
            state_q <= LOOKUP;
          end
        end
        FL_SCAN: begin
          if (fset_q >= fend_q) state_q <= FL_DONE;
          else if (valid_q[fset][fway_q[WW-1:0]] && dirty_q[fset][fway_q[WW-1:0]]) begin
            fl_wb_q <= 1'b1;            // write back first, come back to invalidate
            cnt_q   <= '0;
            state_q <= WB_AW;
          end else begin
            valid_q[fset][fway_q[WW-1:0]] <= 1'b0;
            if (fway_q == (WW+1)'(WAYS - 1)) begin
              fway_q <= '0;
              fset_q <= fset_q + 1'b1;
            end else fway_q <= fway_q + 1'b1;
          end
        end
        FL_DONE: state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
