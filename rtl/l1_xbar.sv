// l1_xbar: the cluster's L1 crossbar, from the eight cores and the DMA engine
// to the sixteen L1 SPM banks.
//
// Banks are word-interleaved: address bits [5:2] pick the bank and bits
// [19:6] the row, so consecutive 32-bit words fall in consecutive banks and
// eight cores walking through memory rarely collide (the paper gives twice as
// many banks as cores for that reason). Each of the DMA engine's two 64-bit
// ports (one reading, one writing) is split into two 32-bit requests to two
// neighbouring banks; the DMA has fixed priority over the cores, so a pair is
// always granted together in the cycle it is raised and the DMA reads and
// writes 64 bit per cycle each. If the read and the write pair want the same
// two banks the read waits a cycle. Cores share each bank round-robin. Requests are combinational, read data returns one cycle after
// the grant. Bank count, widths and the one-cycle access are the paper's; the
// interleaving and the arbitration are this design's choices. The paper's
// diagram draws the DMA-to-L1 link as one half-duplex 64-bit arrow, while
// its text gives the DMA 64 bit/cycle in each direction; this crossbar
// follows the text, which the paper's streaming bandwidth result needs.
module l1_xbar
  import spin_pkg::*;
#(
  parameter int unsigned  NCORES     = 8,
  parameter int unsigned  NBANKS     = 16,
  parameter int unsigned  BANK_WORDS = 16384,
  localparam int unsigned BSW        = $clog2(NBANKS),
  localparam int unsigned BAW        = $clog2(BANK_WORDS)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  req32_t [NCORES-1:0]           core_req_i,
  output rsp32_t [NCORES-1:0]           core_rsp_o,
  input  req64_t                        dma_rd_req_i,
  output rsp64_t                        dma_rd_rsp_o,
  input  req64_t                        dma_wr_req_i,
  output rsp64_t                        dma_wr_rsp_o,
  output logic   [NBANKS-1:0]           bank_req_o,
  output logic   [NBANKS-1:0]           bank_we_o,
  output logic   [NBANKS-1:0][BAW-1:0]  bank_addr_o,
  output logic   [NBANKS-1:0][31:0]     bank_wdata_o,
  output logic   [NBANKS-1:0][3:0]      bank_be_o,
  input  logic   [NBANKS-1:0]           bank_gnt_i,
  input  logic   [NBANKS-1:0]           bank_rvalid_i,
  input  logic   [NBANKS-1:0][31:0]     bank_rdata_i
);
  localparam int unsigned NM = NCORES + 4;

  logic [NM-1:0]          m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][BSW-1:0] m_sel;
  logic [NM-1:0][31:0]    m_addr, m_wdata, m_rdata;
  logic [NM-1:0][3:0]     m_be;
  logic [NBANKS-1:0][31:0] s_addr;
  logic                    rd_clash;

  always_comb begin
    for (int unsigned c = 0; c < NCORES; c++) begin
      m_req[c]   = core_req_i[c].req;
      m_we[c]    = core_req_i[c].we;
      m_addr[c]  = core_req_i[c].addr;
      m_wdata[c] = core_req_i[c].wdata;
      m_be[c]    = core_req_i[c].be;
    end
    // DMA write pair (masters NCORES, NCORES+1) and read pair (NCORES+2, +3),
    // low and high word each. Both pairs are 8-byte aligned, so they hit the
    // same two banks or disjoint ones; on a clash the read pair waits.
    rd_clash = dma_wr_req_i.req && dma_rd_req_i.req &&
               dma_wr_req_i.addr[2+BSW-1:3] == dma_rd_req_i.addr[2+BSW-1:3];
    for (int unsigned h = 0; h < 2; h++) begin
      m_req[NCORES+h]     = dma_wr_req_i.req;
      m_we[NCORES+h]      = 1'b1;
      m_addr[NCORES+h]    = {dma_wr_req_i.addr[31:3], 1'(h), 2'b00};
      m_wdata[NCORES+h]   = dma_wr_req_i.wdata[32*h +: 32];
      m_be[NCORES+h]      = dma_wr_req_i.be[4*h +: 4];
      m_req[NCORES+2+h]   = dma_rd_req_i.req && !rd_clash;
      m_we[NCORES+2+h]    = 1'b0;
      m_addr[NCORES+2+h]  = {dma_rd_req_i.addr[31:3], 1'(h), 2'b00};
      m_wdata[NCORES+2+h] = '0;
      m_be[NCORES+2+h]    = dma_rd_req_i.be[4*h +: 4];
    end
    for (int unsigned m = 0; m < NM; m++) m_sel[m] = m_addr[m][2 +: BSW];
  end

  mem_xbar #(
    .NM(NM), .NS(NBANKS), .DW(32), .OUTST(2), .PRIO({4'b1111, {NCORES{1'b0}}})
  ) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_sel_i(m_sel), .m_we_i(m_we), .m_addr_i(m_addr),
    .m_wdata_i(m_wdata), .m_be_i(m_be), .m_gnt_o(m_gnt), .m_rvalid_o(m_rvalid),
    .m_rdata_o(m_rdata),
    .s_req_o(bank_req_o), .s_we_o(bank_we_o), .s_addr_o(s_addr),
    .s_wdata_o(bank_wdata_o), .s_be_o(bank_be_o), .s_gnt_i(bank_gnt_i),
    .s_rvalid_i(bank_rvalid_i), .s_rdata_i(bank_rdata_i)
  );

  always_comb begin
    for (int unsigned b = 0; b < NBANKS; b++) bank_addr_o[b] = s_addr[b][2+BSW +: BAW];
    for (int unsigned c = 0; c < NCORES; c++) begin
      core_rsp_o[c].gnt    = m_gnt[c];
      core_rsp_o[c].rvalid = m_rvalid[c];
      core_rsp_o[c].rdata  = m_rdata[c];
    end
    dma_wr_rsp_o.gnt    = m_gnt[NCORES] && m_gnt[NCORES+1];
    dma_wr_rsp_o.rvalid = 1'b0;
    dma_wr_rsp_o.rdata  = '0;
    dma_rd_rsp_o.gnt    = m_gnt[NCORES+2] && m_gnt[NCORES+3];
    dma_rd_rsp_o.rvalid = m_rvalid[NCORES+2];
    dma_rd_rsp_o.rdata  = {m_rdata[NCORES+3], m_rdata[NCORES+2]};
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   m_gnt[NCORES] == m_gnt[NCORES+1] && m_gnt[NCORES+2] == m_gnt[NCORES+3])
    else $error("l1_xbar: DMA halves granted apart");
endmodule
