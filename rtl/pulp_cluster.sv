// pulp_cluster: one processing cluster of the accelerator, without its cores.
//
// Eight core data ports (the RV32 cores themselves are not part of this RTL
// and connect at core_req_i/core_rsp_o) each pass a core_demux, which sends
// the access to the cluster's L1, to the cluster's DMA registers, or out of
// the cluster. The L1 is 16 single-cycle 64 KiB banks behind l1_xbar, shared
// by the cores and by the DMA engine's 64-bit L1 read and write ports.
// Accesses leaving the cluster and the DMA engine's system-side ports meet
// in cluster_ext_xbar, whose port is the cluster's only link to the rest of
// the chip (port_req_o/port_rsp_i): channel 0 carries core accesses and DMA
// reads, channel 1 DMA writes, 64 bit each, together the paper's full-duplex
// 64-bit port. cluster_id_i places the cluster's window in the address map.
// Structure, bank count and widths follow the paper's cluster diagram; the
// instruction cache and the cores are outside this RTL.
module pulp_cluster
  import spin_pkg::*;
#(
  parameter int unsigned  NCORES     = 8,
  parameter int unsigned  NBANKS     = 16,
  parameter int unsigned  BANK_WORDS = 16384,
  parameter int unsigned  NCH        = 4,
  localparam int unsigned BAW        = $clog2(BANK_WORDS)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [1:0]          cluster_id_i,
  input  req32_t [NCORES-1:0] core_req_i,
  output rsp32_t [NCORES-1:0] core_rsp_o,
  output req64_t [1:0]        port_req_o,
  input  rsp64_t [1:0]        port_rsp_i,
  output logic [NCH-1:0]      dma_busy_o
);
  req32_t [NCORES-1:0] l1_req, dma_req, ext_req;
  rsp32_t [NCORES-1:0] l1_rsp, dma_rsp, ext_rsp;
  req64_t              dl1r_req, dl1w_req, dextr_req, dextw_req;
  rsp64_t              dl1r_rsp, dl1w_rsp, dextr_rsp, dextw_rsp;

  logic [NBANKS-1:0]           b_req, b_we, b_gnt, b_rvalid;
  logic [NBANKS-1:0][BAW-1:0]  b_addr;
  logic [NBANKS-1:0][31:0]     b_wdata, b_rdata;
  logic [NBANKS-1:0][3:0]      b_be;

  for (genvar c = 0; c < NCORES; c++) begin : g_demux
    core_demux u_demux (
      .clk_i, .rst_ni, .cluster_id_i,
      .core_req_i(core_req_i[c]), .core_rsp_o(core_rsp_o[c]),
      .l1_req_o(l1_req[c]),   .l1_rsp_i(l1_rsp[c]),
      .dma_req_o(dma_req[c]), .dma_rsp_i(dma_rsp[c]),
      .ext_req_o(ext_req[c]), .ext_rsp_i(ext_rsp[c])
    );
  end

  l1_xbar #(.NCORES(NCORES), .NBANKS(NBANKS), .BANK_WORDS(BANK_WORDS)) u_l1_xbar (
    .clk_i, .rst_ni,
    .core_req_i(l1_req), .core_rsp_o(l1_rsp),
    .dma_rd_req_i(dl1r_req), .dma_rd_rsp_o(dl1r_rsp),
    .dma_wr_req_i(dl1w_req), .dma_wr_rsp_o(dl1w_rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_wdata_o(b_wdata),
    .bank_be_o(b_be), .bank_gnt_i(b_gnt), .bank_rvalid_i(b_rvalid), .bank_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    l1_spm_bank #(.DW(32), .DEPTH(BANK_WORDS)) u_bank (
      .clk_i, .rst_ni, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .be_i(b_be[b]), .gnt_o(b_gnt[b]),
      .rvalid_o(b_rvalid[b]), .rdata_o(b_rdata[b])
    );
  end

  dma_engine #(.NCORES(NCORES), .NCH(NCH)) u_dma (
    .clk_i, .rst_ni, .cluster_id_i,
    .cfg_req_i(dma_req), .cfg_rsp_o(dma_rsp),
    .l1_rd_req_o(dl1r_req), .l1_rd_rsp_i(dl1r_rsp),
    .l1_wr_req_o(dl1w_req), .l1_wr_rsp_i(dl1w_rsp),
    .ext_rd_req_o(dextr_req), .ext_rd_rsp_i(dextr_rsp),
    .ext_wr_req_o(dextw_req), .ext_wr_rsp_i(dextw_rsp),
    .busy_o(dma_busy_o)
  );

  cluster_ext_xbar #(.NCORES(NCORES)) u_ext_xbar (
    .clk_i, .rst_ni,
    .core_req_i(ext_req), .core_rsp_o(ext_rsp),
    .dma_rd_req_i(dextr_req), .dma_rd_rsp_o(dextr_rsp),
    .dma_wr_req_i(dextw_req), .dma_wr_rsp_o(dextw_rsp),
    .port_req_o, .port_rsp_i
  );
endmodule
