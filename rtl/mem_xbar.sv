// Fully connected crossbar for the host-bus protocol of shaheen_pkg.
//
// NM masters reach NS slaves; slave s owns the addresses a with
// (a & MASK[s]) == BASE[s]. Each slave has a round-robin arbiter. To keep the
// response path simple, a slave port carries one transaction at a time: after
// it grants a master it is locked to that master until the slave's rvalid
// returns, and the response is routed to the owner. Masters addressing
// different slaves proceed in parallel. A master that wins arbitration but is
// not yet granted by the slave keeps the slave port until it is, so the
// request seen by the slave never changes while it waits. An address that hits no slave is
// granted at once and answered in the next cycle with err = 1 and rdata = 0.
// The chip's crossbars are AXI4 (separate read and write channels, bursts,
// several outstanding transactions); this single-channel, one-outstanding
// form is this design's simplification.
module mem_xbar
  import shaheen_pkg::*;
#(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 4,
  parameter logic [NS-1:0][HADDR_W-1:0] BASE = {HYCFG_BASE, IOTLB_BASE, HYPER_BASE, L2_BASE},
  parameter logic [NS-1:0][HADDR_W-1:0] MASK = {CFG_MASK, CFG_MASK, HYPER_MASK, L2_MASK}
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  hreq_t [NM-1:0] m_req_i,
  output hrsp_t [NM-1:0] m_rsp_o,
  output hreq_t [NS-1:0] s_req_o,
  input  hrsp_t [NS-1:0] s_rsp_i,
  output logic  [NM-1:0] stall_o     // master requests but is not granted this cycle
);
  localparam int unsigned MIW = $clog2(NM > 1 ? NM : 2);

  logic [NM-1:0][NS-1:0] hit;
  logic [NM-1:0]         miss;
  logic [NS-1:0][NM-1:0] cand, win;
  logic [NS-1:0][MIW-1:0] widx;
  logic [NS-1:0]         busy_q;
  logic [NS-1:0][MIW-1:0] owner_q;
  logic [NM-1:0]         miss_q;
  logic [NS-1:0]         hold_q;     // last cycle's winner was not granted
  logic [NS-1:0][MIW-1:0] hidx_q;

  for (genvar m = 0; m < NM; m++) begin : g_dec
    for (genvar s = 0; s < NS; s++) begin : g_s
      assign hit[m][s] = (m_req_i[m].addr & MASK[s]) == BASE[s];
    end
    assign miss[m] = m_req_i[m].req && !(|hit[m]);
  end

  for (genvar s = 0; s < NS; s++) begin : g_slv
    for (genvar m = 0; m < NM; m++) begin : g_c
      assign cand[s][m] = m_req_i[m].req && hit[m][s] && !busy_q[s] &&
                          (!hold_q[s] || hidx_q[s] == MIW'(m));
    end
    rr_arbiter #(.N(NM)) u_arb (
      .clk_i, .rst_ni, .req_i(cand[s]), .advance_i(s_rsp_i[s].gnt),
      .gnt_o(win[s]), .idx_o(widx[s])
    );
    always_comb begin
      s_req_o[s]     = m_req_i[widx[s]];
      s_req_o[s].req = |win[s];
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        hold_q[s] <= 1'b0;
        hidx_q[s] <= '0;
      end else begin
        hold_q[s] <= |win[s] && !s_rsp_i[s].gnt;
        hidx_q[s] <= widx[s];
      end
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        busy_q[s]  <= 1'b0;
        owner_q[s] <= '0;
      end else if (busy_q[s]) begin
        if (s_rsp_i[s].rvalid) busy_q[s] <= 1'b0;
      end else if (|win[s] && s_rsp_i[s].gnt) begin
        busy_q[s]  <= 1'b1;
        owner_q[s] <= widx[s];
      end
    end
    // a slave must not answer in the cycle of its grant, nor answer unasked
    assert property (@(posedge clk_i) disable iff (!rst_ni) s_rsp_i[s].rvalid |-> busy_q[s]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) miss_q <= '0;
    else         miss_q <= miss;
  end

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      m_rsp_o[m] = '0;
      if (miss[m]) m_rsp_o[m].gnt = 1'b1;
      if (miss_q[m]) begin
        m_rsp_o[m].rvalid = 1'b1;
        m_rsp_o[m].err    = 1'b1;
      end
      for (int unsigned s = 0; s < NS; s++) begin
        if (win[s][m]) m_rsp_o[m].gnt = s_rsp_i[s].gnt;
        if (busy_q[s] && owner_q[s] == MIW'(m) && s_rsp_i[s].rvalid) begin
          m_rsp_o[m].rvalid = 1'b1;
          m_rsp_o[m].err    = s_rsp_i[s].err;
          m_rsp_o[m].rdata  = s_rsp_i[s].rdata;
        end
      end
      stall_o[m] = m_req_i[m].req && !m_rsp_o[m].gnt;
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_chk
    // a waiting master keeps its request stable
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      (m_req_i[m].req && !m_rsp_o[m].gnt) |=> (m_req_i[m].req && $stable(m_req_i[m].addr)));
  end
endmodule
