// bus_xbar: bus matrix connecting NM masters to NS slaves.
//
// Each master's address is decoded against the slaves' BASE/MASK pairs
// (slave s is chosen when (addr & MASK[s]) == BASE[s]; the lowest matching s
// wins). Each slave has its own round-robin arbiter, so masters that target
// different slaves proceed in the same cycle. A grant passes combinationally
// from the slave to the winning master; the response one cycle later is
// routed back by a registered record of which slave each master was granted.
// An address that matches no slave is granted at once and answered with
// rdata 0 (writes are dropped). Protocol as in wbp_pkg. The architecture
// shows buses in each cluster and in the design top; their topology and
// arbitration are this design's choice.
module bus_xbar import wbp_pkg::*; #(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 2,
  parameter logic [NS-1:0][31:0] BASE = '0,
  parameter logic [NS-1:0][31:0] MASK = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [NS],
  input  bus_rsp_t s_rsp [NS]
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [SW-1:0] dec   [NM];
  logic          miss  [NM];
  logic [MW-1:0] win   [NS];
  logic          found [NS];
  logic [MW-1:0] rr    [NS];
  logic          pend_v [NM], pend_e [NM];
  logic [SW-1:0] pend_s [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      dec[m]  = '0;
      miss[m] = 1'b1;
      for (int s = NS - 1; s >= 0; s--)
        if ((m_req[m].addr & MASK[s]) == BASE[s]) begin
          dec[m]  = SW'(s);
          miss[m] = 1'b0;
        end
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      win[s]   = '0;
      found[s] = 1'b0;
      for (int i = NM - 1; i >= 0; i--) begin
        int unsigned m;
        m = (32'(rr[s]) + 32'(i)) % NM;
        if (m_req[m].valid && !miss[m] && dec[m] == SW'(s)) begin
          win[s]   = MW'(m);
          found[s] = 1'b1;
        end
      end
      s_req[s] = found[s] ? m_req[win[s]] : '0;
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].gnt = m_req[m].valid &&
                     (miss[m] || (found[dec[m]] && win[dec[m]] == MW'(m) &&
                                  s_rsp[dec[m]].gnt));
      m_rsp[m].rvalid = pend_v[m] && (pend_e[m] || s_rsp[pend_s[m]].rvalid);
      m_rsp[m].rdata  = pend_e[m] ? 32'h0 : s_rsp[pend_s[m]].rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NM; m++) begin
        pend_v[m] <= 1'b0;
        pend_e[m] <= 1'b0;
        pend_s[m] <= '0;
      end
      for (int s = 0; s < NS; s++) rr[s] <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        pend_v[m] <= m_rsp[m].gnt;
        pend_e[m] <= miss[m];
        pend_s[m] <= dec[m];
      end
      for (int s = 0; s < NS; s++)
        if (found[s] && s_rsp[s].gnt)
          rr[s] <= MW'((32'(win[s]) + 1) % NM);
    end
  end
endmodule
