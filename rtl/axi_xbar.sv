// axi_xbar: the 64-bit AXI4 crossbar of the system interconnect.
//
// NM initiator ports connect to NS target ports. Each target is chosen by address: target
// s owns [BASE[s], BASE[s] + SIZE[s]); an address no target owns goes to the last target
// (the peripheral port, the default route). Each target has a read arbiter and a write
// arbiter. An arbiter grants one initiator in round-robin order and stays locked to it
// until the burst completes (R last for reads, B for writes), so different targets work in
// parallel while each target serves one burst per direction at a time. Each initiator may
// have one read and one write burst outstanding, which keeps responses in order without
// ID remapping.
//
// Because a target is held for the full length of a burst, one long burst of a
// non-critical initiator delays every other initiator on that target: this is the
// interference that the traffic shaper units in front of the initiator ports bound by
// cutting bursts into fragments and limiting bandwidth. The paper gives the bus width and
// that it is a crossbar; the arbitration policy and the locking rule are this design's
// choice.
module axi_xbar import soc_pkg::*; #(
  parameter int unsigned NM = 8,
  parameter int unsigned NS = 6,
  parameter addr_t       BASE [NS] = '{default: '0},
  parameter addr_t       SIZE [NS] = '{default: '0}
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t m_req_i [NM],
  output axi_rsp_t m_rsp_o [NM],
  output axi_req_t s_req_o [NS],
  input  axi_rsp_t s_rsp_i [NS]
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  function automatic logic [SW-1:0] decode(input addr_t a);
    logic [SW-1:0] s = SW'(NS - 1);
    for (int unsigned i = 0; i < NS; i++)
      if (a >= BASE[i] && (a - BASE[i]) < SIZE[i]) s = SW'(i);
    return s;
  endfunction

  // per-initiator outstanding state
  logic [NM-1:0] m_rbusy_q, m_wbusy_q;
  // per-target lock state
  logic [NS-1:0] s_rbusy_q, s_wbusy_q;
  logic [MW-1:0] s_rown_q [NS], s_wown_q [NS];
  logic [MW-1:0] s_rptr_q [NS], s_wptr_q [NS];
  // combinational grants
  logic [NS-1:0] ar_gnt_v, aw_gnt_v;
  logic [MW-1:0] ar_gnt_m [NS], aw_gnt_m [NS];

  always_comb begin
    for (int unsigned s = 0; s < NS; s++) begin
      ar_gnt_v[s] = 1'b0;
      aw_gnt_v[s] = 1'b0;
      ar_gnt_m[s] = '0;
      aw_gnt_m[s] = '0;
      for (int unsigned k = 0; k < NM; k++) begin
        int unsigned m;
        m = (32'(s_rptr_q[s]) + k) % NM;
        if (!ar_gnt_v[s] && !s_rbusy_q[s] && !m_rbusy_q[m] && m_req_i[m].ar_valid &&
            decode(m_req_i[m].ar.addr) == SW'(s)) begin
          ar_gnt_v[s] = 1'b1;
          ar_gnt_m[s] = MW'(m);
        end
        m = (32'(s_wptr_q[s]) + k) % NM;
        if (!aw_gnt_v[s] && !s_wbusy_q[s] && !m_wbusy_q[m] && m_req_i[m].aw_valid &&
            decode(m_req_i[m].aw.addr) == SW'(s)) begin
          aw_gnt_v[s] = 1'b1;
          aw_gnt_m[s] = MW'(m);
        end
      end
    end
  end

  // request and response routing
  always_comb begin
    for (int unsigned m = 0; m < NM; m++) m_rsp_o[m] = '0;
    for (int unsigned s = 0; s < NS; s++) begin
      s_req_o[s] = '0;
      // AR
      s_req_o[s].ar       = m_req_i[ar_gnt_m[s]].ar;
      s_req_o[s].ar_valid = ar_gnt_v[s];
      if (ar_gnt_v[s]) m_rsp_o[ar_gnt_m[s]].ar_ready = s_rsp_i[s].ar_ready;
      // AW
      s_req_o[s].aw       = m_req_i[aw_gnt_m[s]].aw;
      s_req_o[s].aw_valid = aw_gnt_v[s];
      if (aw_gnt_v[s]) m_rsp_o[aw_gnt_m[s]].aw_ready = s_rsp_i[s].aw_ready;
      // R to the owner
      if (s_rbusy_q[s]) begin
        s_req_o[s].r_ready            = m_req_i[s_rown_q[s]].r_ready;
        m_rsp_o[s_rown_q[s]].r        = s_rsp_i[s].r;
        m_rsp_o[s_rown_q[s]].r_valid  = s_rsp_i[s].r_valid;
      end
      // W and B with the owner
      if (s_wbusy_q[s]) begin
        s_req_o[s].w                  = m_req_i[s_wown_q[s]].w;
        s_req_o[s].w_valid            = m_req_i[s_wown_q[s]].w_valid;
        m_rsp_o[s_wown_q[s]].w_ready  = s_rsp_i[s].w_ready;
        s_req_o[s].b_ready            = m_req_i[s_wown_q[s]].b_ready;
        m_rsp_o[s_wown_q[s]].b        = s_rsp_i[s].b;
        m_rsp_o[s_wown_q[s]].b_valid  = s_rsp_i[s].b_valid;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      m_rbusy_q <= '0;
      m_wbusy_q <= '0;
      s_rbusy_q <= '0;
      s_wbusy_q <= '0;
      for (int unsigned s = 0; s < NS; s++) begin
        s_rown_q[s] <= '0;
        s_wown_q[s] <= '0;
        s_rptr_q[s] <= '0;
        s_wptr_q[s] <= '0;
      end
    end else begin
      for (int unsigned s = 0; s < NS; s++) begin
        if (ar_gnt_v[s] && s_rsp_i[s].ar_ready) begin
          s_rbusy_q[s]           <= 1'b1;
          s_rown_q[s]            <= ar_gnt_m[s];
          m_rbusy_q[ar_gnt_m[s]] <= 1'b1;
          s_rptr_q[s]            <= MW'((32'(ar_gnt_m[s]) + 1) % NM);
        end
        if (s_rbusy_q[s] && s_rsp_i[s].r_valid && s_req_o[s].r_ready && s_rsp_i[s].r.last) begin
          s_rbusy_q[s]           <= 1'b0;
          m_rbusy_q[s_rown_q[s]] <= 1'b0;
        end
        if (aw_gnt_v[s] && s_rsp_i[s].aw_ready) begin
          s_wbusy_q[s]           <= 1'b1;
          s_wown_q[s]            <= aw_gnt_m[s];
          m_wbusy_q[aw_gnt_m[s]] <= 1'b1;
          s_wptr_q[s]            <= MW'((32'(aw_gnt_m[s]) + 1) % NM);
        end
        if (s_wbusy_q[s] && s_rsp_i[s].b_valid && s_req_o[s].b_ready) begin
          s_wbusy_q[s]           <= 1'b0;
          m_wbusy_q[s_wown_q[s]] <= 1'b0;
        end
      end
    end
  end

endmodule
