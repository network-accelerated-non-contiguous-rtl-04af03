// cluster_ext_xbar: the crossbar on the edge of a cluster that merges the
// cores' accesses leaving the cluster and the DMA engine's system-side ports
// onto the 64-bit cluster port. The paper draws that port as full-duplex; it
// is built here as two request channels: channel 0 carries the DMA's reads
// and every core access, channel 1 the DMA's writes, so the DMA can read
// and write 64 bit per cycle each at the same time. Channel 1 has only the
// DMA on it and is wired straight through.
//
// The cores' 32-bit requests are placed on the half of the 64-bit bus given
// by address bit 2 (data duplicated, byte enables shifted); for a granted read
// the half is remembered per core (core_demux allows one read in flight) and
// the matching 32 bits are returned. All nine masters share the port
// round-robin through mem_xbar, which also returns read data in order to the
// master that asked, whatever the latency behind the port. The paper shows
// this crossbar and its 64-bit port; the lane mapping and round-robin
// sharing are this design's choices.
module cluster_ext_xbar
  import spin_pkg::*;
#(
  parameter int unsigned NCORES = 8,
  parameter int unsigned OUTST  = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  req32_t [NCORES-1:0] core_req_i,
  output rsp32_t [NCORES-1:0] core_rsp_o,
  input  req64_t              dma_rd_req_i,
  output rsp64_t              dma_rd_rsp_o,
  input  req64_t              dma_wr_req_i,
  output rsp64_t              dma_wr_rsp_o,
  output req64_t [1:0]        port_req_o,
  input  rsp64_t [1:0]        port_rsp_i
);
  localparam int unsigned NM = NCORES + 1;

  logic [NM-1:0]       m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][0:0]  m_sel;
  logic [NM-1:0][31:0] m_addr;
  logic [NM-1:0][63:0] m_wdata, m_rdata;
  logic [NM-1:0][7:0]  m_be;
  logic [NCORES-1:0]   lane_q;

  always_comb begin
    for (int unsigned c = 0; c < NCORES; c++) begin
      m_req[c]   = core_req_i[c].req;
      m_we[c]    = core_req_i[c].we;
      m_addr[c]  = core_req_i[c].addr;
      m_wdata[c] = {2{core_req_i[c].wdata}};
      m_be[c]    = core_req_i[c].addr[2] ? {core_req_i[c].be, 4'b0} : {4'b0, core_req_i[c].be};
    end
    m_req[NCORES]   = dma_rd_req_i.req;
    m_we[NCORES]    = dma_rd_req_i.we;
    m_addr[NCORES]  = dma_rd_req_i.addr;
    m_wdata[NCORES] = dma_rd_req_i.wdata;
    m_be[NCORES]    = dma_rd_req_i.be;
    m_sel           = '0;
  end

  mem_xbar #(.NM(NM), .NS(1), .DW(64), .OUTST(OUTST)) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_sel_i(m_sel), .m_we_i(m_we), .m_addr_i(m_addr),
    .m_wdata_i(m_wdata), .m_be_i(m_be), .m_gnt_o(m_gnt), .m_rvalid_o(m_rvalid),
    .m_rdata_o(m_rdata),
    .s_req_o(port_req_o[0].req), .s_we_o(port_req_o[0].we), .s_addr_o(port_req_o[0].addr),
    .s_wdata_o(port_req_o[0].wdata), .s_be_o(port_req_o[0].be), .s_gnt_i(port_rsp_i[0].gnt),
    .s_rvalid_i(port_rsp_i[0].rvalid), .s_rdata_i(port_rsp_i[0].rdata)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) lane_q <= '0;
    else
      for (int unsigned c = 0; c < NCORES; c++)
        if (m_gnt[c] && !m_we[c]) lane_q[c] <= m_addr[c][2];
  end

  always_comb begin
    for (int unsigned c = 0; c < NCORES; c++) begin
      core_rsp_o[c].gnt    = m_gnt[c];
      core_rsp_o[c].rvalid = m_rvalid[c];
      core_rsp_o[c].rdata  = lane_q[c] ? m_rdata[c][63:32] : m_rdata[c][31:0];
    end
    dma_rd_rsp_o.gnt    = m_gnt[NCORES];
    dma_rd_rsp_o.rvalid = m_rvalid[NCORES];
    dma_rd_rsp_o.rdata  = m_rdata[NCORES];
  end

  assign port_req_o[1] = dma_wr_req_i;
  assign dma_wr_rsp_o  = port_rsp_i[1];
endmodule
