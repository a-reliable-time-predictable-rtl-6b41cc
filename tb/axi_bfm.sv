// axi_bfm: AXI4 initiator model for testbenches.
//
// Drives one AXI port with INCR bursts of 64-bit beats. read() collects the beats into
// rdata[] and reports how many last flags and error responses it saw; write() sends
// wdata[] with `gap` idle cycles between beats and waits for the response. Signals change
// on the falling clock edge and are sampled on the rising edge. The user field carries
// the cache partition id.
module axi_bfm import soc_pkg::*; (
  input  logic     clk_i,
  output axi_req_t req_o,
  input  axi_rsp_t rsp_i
);
  data_t rdata [256];
  data_t wdata [256];
  int    lasts, errs, cycles;

  initial req_o = '0;

  task automatic read(input addr_t a, input int len, input user_t user = '0);
    int beats, t0;
    beats = 0; lasts = 0; errs = 0;
    @(negedge clk_i);
    t0 = 0;
    req_o.ar = '{id: 4'd1, addr: a, len: 8'(len), size: 3'd3, burst: BURST_INCR, user: user};
    req_o.ar_valid = 1'b1;
    req_o.r_ready  = 1'b1;
    fork
      begin
        while (1) begin
          @(posedge clk_i);
          if (rsp_i.ar_ready) break;
        end
        @(negedge clk_i);
        req_o.ar_valid = 1'b0;
      end
      begin
        while (beats <= len) begin
          @(posedge clk_i);
          t0++;
          if (rsp_i.r_valid) begin
            rdata[beats] = rsp_i.r.data;
            if (rsp_i.r.last) lasts++;
            if (rsp_i.r.resp != RESP_OKAY) errs++;
            beats++;
          end
        end
      end
    join
    cycles = t0;
    @(negedge clk_i);
    req_o.r_ready = 1'b0;
  endtask

  task automatic write(input addr_t a, input int len, input int gap = 0, input user_t user = '0);
    int beat, t0;
    beat = 0; t0 = 0;
    @(negedge clk_i);
    req_o.aw = '{id: 4'd2, addr: a, len: 8'(len), size: 3'd3, burst: BURST_INCR, user: user};
    req_o.aw_valid = 1'b1;
    req_o.b_ready  = 1'b1;
    fork
      begin
        while (1) begin
          @(posedge clk_i);
          if (rsp_i.aw_ready) break;
        end
        @(negedge clk_i);
        req_o.aw_valid = 1'b0;
      end
      begin
        while (beat <= len) begin
          req_o.w = '{data: wdata[beat], strb: '1, last: (beat == len)};
          req_o.w_valid = 1'b1;
          @(posedge clk_i);
          if (rsp_i.w_ready) begin
            beat++;
            @(negedge clk_i);
            req_o.w_valid = 1'b0;
            repeat (gap) @(negedge clk_i);
          end else @(negedge clk_i);
        end
        req_o.w_valid = 1'b0;
      end
      begin
        while (1) begin
          @(posedge clk_i);
          t0++;
          if (rsp_i.b_valid) break;
        end
      end
    join
    cycles = t0;
    @(negedge clk_i);
    req_o.b_ready = 1'b0;
  endtask
endmodule
