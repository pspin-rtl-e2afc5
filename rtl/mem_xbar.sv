// mem_xbar: 512-bit request/grant crossbar (NHI and DMA interconnects).
//
// The paper's interconnects are AXI4 crossbars taken from an existing
// library; it gives their width (512 bit), their masters and slaves and
// their purpose. This is a minimal stand-in with the same connectivity:
// NM masters, NS slaves selected by address ((addr & MASK) == BASE), one
// round-robin arbiter per slave, and read data routed back to the master
// that was granted. All slaves must answer a read exactly one cycle after
// the grant (true for l2_mem), so the route is a registered master index per
// slave and responses stay in order without further bookkeeping.
//
// Interface: the same request/grant, rvalid/rdata port on both sides.
// An address that matches no slave is never granted (an assertion flags it).
module mem_xbar
  import pspin_pkg::*;
#(
  parameter int unsigned NM = 4,
  parameter int unsigned NS = 2,
  parameter logic [NS-1:0][31:0] BASE = {L2_HND_BASE, L2_PKT_BASE},
  parameter logic [NS-1:0][31:0] MASK = {32'hFFC0_0000, 32'hFFC0_0000},
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // masters
  input  logic [NM-1:0]             m_req_i,
  input  logic [NM-1:0]             m_we_i,
  input  logic [NM-1:0][WIDE_W/8-1:0] m_be_i,
  input  logic [NM-1:0][31:0]       m_addr_i,
  input  logic [NM-1:0][WIDE_W-1:0] m_wdata_i,
  output logic [NM-1:0]             m_gnt_o,
  output logic [NM-1:0]             m_rvalid_o,
  output logic [NM-1:0][WIDE_W-1:0] m_rdata_o,
  // slaves
  output logic [NS-1:0]             s_req_o,
  output logic [NS-1:0]             s_we_o,
  output logic [NS-1:0][WIDE_W/8-1:0] s_be_o,
  output logic [NS-1:0][31:0]       s_addr_o,
  output logic [NS-1:0][WIDE_W-1:0] s_wdata_o,
  input  logic [NS-1:0]             s_gnt_i,
  input  logic [NS-1:0]             s_rvalid_i,
  input  logic [NS-1:0][WIDE_W-1:0] s_rdata_i
);
  logic [NS-1:0][NM-1:0] sreq, sgnt;
  logic [NS-1:0][MW-1:0] sidx;
  logic [NS-1:0]         svalid;
  logic [NM-1:0]         mapped;

  always_comb begin
    mapped = '0;
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < NM; m++) begin
        sreq[s][m] = m_req_i[m] && ((m_addr_i[m] & MASK[s]) == BASE[s]);
        mapped[m]  = mapped[m] | ((m_addr_i[m] & MASK[s]) == BASE[s]);
      end
  end

  for (genvar s = 0; s < NS; s++) begin : g_slv
    rr_arb #(.N(NM)) u_arb (
      .clk_i, .rst_ni, .req_i(sreq[s]), .advance_i(s_gnt_i[s]),
      .gnt_o(sgnt[s]), .idx_o(sidx[s]), .valid_o(svalid[s])
    );
    assign s_req_o[s]   = svalid[s];
    assign s_we_o[s]    = m_we_i[sidx[s]];
    assign s_be_o[s]    = m_be_i[sidx[s]];
    assign s_addr_o[s]  = m_addr_i[sidx[s]];
    assign s_wdata_o[s] = m_wdata_i[sidx[s]];
  end

  always_comb begin
    m_gnt_o = '0;
    for (int s = 0; s < NS; s++)
      if (s_gnt_i[s]) m_gnt_o |= sgnt[s];
  end

  // response routing
  logic [NS-1:0][MW-1:0] ridx_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ridx_q <= '0;
    else for (int s = 0; s < NS; s++) if (svalid[s] && s_gnt_i[s]) ridx_q[s] <= sidx[s];
  end

  always_comb begin
    m_rvalid_o = '0;
    m_rdata_o  = '0;
    for (int s = 0; s < NS; s++)
      if (s_rvalid_i[s]) begin
        m_rvalid_o[ridx_q[s]] = 1'b1;
        m_rdata_o[ridx_q[s]]  = s_rdata_i[s];
      end
  end

  for (genvar m = 0; m < NM; m++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) m_req_i[m] |-> mapped[m]);
  end
endmodule
