// soc_xbar: the 256-bit system crossbar joining the network input port, the
// four cluster ports (two channels each, after their width converters), the
// two L2 banks and the host PCIe port. Master 0 is the NI, masters 1..8 the
// cluster channels.
//
// Decode: addresses with bit 31 set go to the host port; all others go to L2,
// where address bit 5 picks the bank (32-byte lines alternate between the two
// banks, so a stream spreads evenly over both ports) and bits [22:6] the row.
// Each of the three slaves arbitrates round-robin on its own, so the NI can
// fill one L2 bank while clusters read the other and a third cluster writes
// to the host in the same cycle. Requests and grants are combinational;
// responses come back in order through mem_xbar. Width, the masters and
// three slaves are from the paper; decode and arbitration are this design's.
module soc_xbar
  import spin_pkg::*;
#(
  parameter int unsigned  NMST       = 9,
  parameter int unsigned  L2_WORDS   = 131072,
  localparam int unsigned L2AW       = $clog2(L2_WORDS)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  req256_t [NMST-1:0]          mst_req_i,
  output rsp256_t [NMST-1:0]          mst_rsp_o,
  // L2 banks
  output logic    [1:0]               l2_req_o,
  output logic    [1:0]               l2_we_o,
  output logic    [1:0][L2AW-1:0]     l2_addr_o,
  output logic    [1:0][255:0]        l2_wdata_o,
  output logic    [1:0][31:0]         l2_be_o,
  input  logic    [1:0]               l2_gnt_i,
  input  logic    [1:0]               l2_rvalid_i,
  input  logic    [1:0][255:0]        l2_rdata_i,
  // host port
  output req256_t                     host_req_o,
  input  rsp256_t                     host_rsp_i
);
  logic [NMST-1:0]        m_req, m_we, m_gnt, m_rvalid;
  logic [NMST-1:0][1:0]   m_sel;
  logic [NMST-1:0][31:0]  m_addr, m_be;
  logic [NMST-1:0][255:0] m_wdata, m_rdata;
  logic [2:0]             s_req, s_we, s_gnt, s_rvalid;
  logic [2:0][31:0]       s_addr, s_be;
  logic [2:0][255:0]      s_wdata, s_rdata;

  always_comb
    for (int unsigned m = 0; m < NMST; m++) begin
      m_req[m]   = mst_req_i[m].req;
      m_we[m]    = mst_req_i[m].we;
      m_addr[m]  = mst_req_i[m].addr;
      m_wdata[m] = mst_req_i[m].wdata;
      m_be[m]    = mst_req_i[m].be;
      m_sel[m]   = mst_req_i[m].addr[31] ? 2'd2 : {1'b0, mst_req_i[m].addr[5]};
      mst_rsp_o[m].gnt    = m_gnt[m];
      mst_rsp_o[m].rvalid = m_rvalid[m];
      mst_rsp_o[m].rdata  = m_rdata[m];
    end

  mem_xbar #(.NM(NMST), .NS(3), .DW(256), .OUTST(8)) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_sel_i(m_sel), .m_we_i(m_we), .m_addr_i(m_addr),
    .m_wdata_i(m_wdata), .m_be_i(m_be), .m_gnt_o(m_gnt), .m_rvalid_o(m_rvalid),
    .m_rdata_o(m_rdata),
    .s_req_o(s_req), .s_we_o(s_we), .s_addr_o(s_addr), .s_wdata_o(s_wdata),
    .s_be_o(s_be), .s_gnt_i(s_gnt), .s_rvalid_i(s_rvalid), .s_rdata_i(s_rdata)
  );

  always_comb begin
    for (int unsigned b = 0; b < 2; b++) begin
      l2_req_o[b]   = s_req[b];
      l2_we_o[b]    = s_we[b];
      l2_addr_o[b]  = s_addr[b][6 +: L2AW];
      l2_wdata_o[b] = s_wdata[b];
      l2_be_o[b]    = s_be[b];
      s_gnt[b]      = l2_gnt_i[b];
      s_rvalid[b]   = l2_rvalid_i[b];
      s_rdata[b]    = l2_rdata_i[b];
    end
    host_req_o = '{req: s_req[2], we: s_we[2], addr: s_addr[2], wdata: s_wdata[2], be: s_be[2]};
    s_gnt[2]    = host_rsp_i.gnt;
    s_rvalid[2] = host_rsp_i.rvalid;
    s_rdata[2]  = host_rsp_i.rdata;
  end
endmodule
