// host_arb: two-master arbiter in front of the host-domain memory targets.
//
// Two masters reach the host's memory: the host core (through the host
// crossbar) and the secure subsystem, which owns a bridge onto the host bus
// so that its core can inspect host and cluster memory for signs of an
// attack. This block merges the two request streams into the single target
// port that the top level decodes (L2 scratchpad, mailbox). When both
// masters request in the same cycle the one that was not served last wins
// (two-way round robin); the other sees gnt low and must hold its request.
// Interface per master m (0 = host, 1 = secure bridge): req/we/addr/be/wdata
// in, gnt out in the same cycle, rvalid/rdata out one cycle after a granted
// read (the target answers one cycle after the request). Writes get no
// response.
// That the secure subsystem is a master on the host bus follows the source
// design; the arbitration policy and this simple request/grant protocol in
// place of the AXI crossbar are this design's own.
module host_arb #(
  parameter int unsigned AW = 32,
  parameter int unsigned DW = 64
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // masters
  input  logic [1:0]            m_req_i,
  output logic [1:0]            m_gnt_o,
  input  logic [1:0]            m_we_i,
  input  logic [1:0][AW-1:0]    m_addr_i,
  input  logic [1:0][DW/8-1:0]  m_be_i,
  input  logic [1:0][DW-1:0]    m_wdata_i,
  output logic [1:0]            m_rvalid_o,
  output logic [1:0][DW-1:0]    m_rdata_o,
  // target
  output logic                  t_req_o,
  output logic                  t_we_o,
  output logic [AW-1:0]         t_addr_o,
  output logic [DW/8-1:0]       t_be_o,
  output logic [DW-1:0]         t_wdata_o,
  input  logic [DW-1:0]         t_rdata_i
);

  logic last_q;      // master served last
  logic sel;         // master served this cycle
  logic [1:0] rd_q;  // which master waits for read data

  always_comb begin
    if (m_req_i == 2'b11) sel = ~last_q;
    else                  sel = m_req_i[1];
  end

  assign m_gnt_o   = {m_req_i[1] & sel, m_req_i[0] & ~sel};
  assign t_req_o   = |m_req_i;
  assign t_we_o    = m_we_i[sel];
  assign t_addr_o  = m_addr_i[sel];
  assign t_be_o    = m_be_i[sel];
  assign t_wdata_o = m_wdata_i[sel];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q <= 1'b0;
      rd_q   <= '0;
    end else begin
      if (|m_req_i) last_q <= sel;
      rd_q <= m_gnt_o & ~m_we_i;
    end
  end

  assign m_rvalid_o = rd_q;
  assign m_rdata_o  = {t_rdata_i, t_rdata_i};

  // A request must be held until it is granted.
  for (genvar m = 0; m < 2; m++) begin : g_hold
    assert property (@(posedge clk_i) rst_ni && m_req_i[m] && !m_gnt_o[m] |=> m_req_i[m])
      else $error("host_arb: master %0d dropped a request before its grant", m);
  end

endmodule
