// spin_accel: the sPIN packet-processing accelerator, meant to sit on the NIC
// die between the network and the host's PCIe link.
//
// Four processing clusters (pulp_cluster, eight core ports each) reach the
// system through their full-duplex 64-bit ports (two request channels each,
// each widened by a dwc_buf) onto the 256-bit soc_xbar. The crossbar's other
// master is the network input port ni_port, which writes arriving packets into a ring buffer in L2; its
// slaves are the two 4 MiB L2 banks and the host output port host_port.
// The intended flow: a packet arrives over the NI into L2, a notice appears
// on pkt_*, a handler on some core has its cluster's DMA copy the packet
// from L2 to L1, works out where the data belongs in host memory and has the
// DMA write it straight from L1 to the host window, from which it leaves on
// host_*. The 32 RV32 cores are not included: their data ports are the
// core_* ports of this module. Cluster count, memory sizes and bus widths are
// the paper's; everything about protocol and address map is described in
// spin_pkg.
module spin_accel
  import spin_pkg::*;
#(
  parameter int unsigned NCLUSTERS  = 4,
  parameter int unsigned NCORES     = 8,
  parameter int unsigned NBANKS     = 16,
  parameter int unsigned L1_WORDS   = 16384,
  parameter int unsigned L2_WORDS   = 131072,
  parameter int unsigned NCH        = 4,
  parameter int unsigned RING_BYTES = 1 << 20,
  localparam int unsigned L2AW      = $clog2(L2_WORDS)
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  // core data ports
  input  req32_t [NCLUSTERS-1:0][NCORES-1:0]  core_req_i,
  output rsp32_t [NCLUSTERS-1:0][NCORES-1:0]  core_rsp_o,
  output logic   [NCLUSTERS-1:0][NCH-1:0]     dma_busy_o,
  // network input
  input  logic                                ni_valid_i,
  output logic                                ni_ready_o,
  input  logic [255:0]                        ni_data_i,
  input  logic                                ni_last_i,
  output logic                                pkt_valid_o,
  input  logic                                pkt_ready_i,
  output logic [31:0]                         pkt_addr_o,
  output logic [31:0]                         pkt_len_o,
  // host output
  output logic                                host_valid_o,
  input  logic                                host_ready_i,
  output logic [31:0]                         host_addr_o,
  output logic [255:0]                        host_data_o,
  output logic [31:0]                         host_be_o
);
  localparam int unsigned NMST = 1 + 2 * NCLUSTERS;
  req256_t [NMST-1:0] m_req;
  rsp256_t [NMST-1:0] m_rsp;
  req64_t  [NCLUSTERS-1:0][1:0] cl_req;
  rsp64_t  [NCLUSTERS-1:0][1:0] cl_rsp;
  req256_t host_req;
  rsp256_t host_rsp;

  logic [1:0]             l2_req, l2_we, l2_gnt, l2_rvalid;
  logic [1:0][L2AW-1:0]   l2_addr;
  logic [1:0][255:0]      l2_wdata, l2_rdata;
  logic [1:0][31:0]       l2_be;

  ni_port #(.RING_BASE(L2_BASE), .RING_BYTES(RING_BYTES)) u_ni (
    .clk_i, .rst_ni,
    .in_valid_i(ni_valid_i), .in_ready_o(ni_ready_o), .in_data_i(ni_data_i),
    .in_last_i(ni_last_i),
    .pkt_valid_o, .pkt_ready_i, .pkt_addr_o, .pkt_len_o,
    .mst_req_o(m_req[0]), .mst_rsp_i(m_rsp[0])
  );

  for (genvar k = 0; k < NCLUSTERS; k++) begin : g_cluster
    pulp_cluster #(.NCORES(NCORES), .NBANKS(NBANKS), .BANK_WORDS(L1_WORDS), .NCH(NCH)) u_cluster (
      .clk_i, .rst_ni, .cluster_id_i(2'(k)),
      .core_req_i(core_req_i[k]), .core_rsp_o(core_rsp_o[k]),
      .port_req_o(cl_req[k]), .port_rsp_i(cl_rsp[k]),
      .dma_busy_o(dma_busy_o[k])
    );
    for (genvar ch = 0; ch < 2; ch++) begin : g_dwc
      dwc_buf u_dwc (
        .clk_i, .rst_ni,
        .slv_req_i(cl_req[k][ch]), .slv_rsp_o(cl_rsp[k][ch]),
        .mst_req_o(m_req[1+2*k+ch]), .mst_rsp_i(m_rsp[1+2*k+ch])
      );
    end
  end

  soc_xbar #(.NMST(NMST), .L2_WORDS(L2_WORDS)) u_xbar (
    .clk_i, .rst_ni,
    .mst_req_i(m_req), .mst_rsp_o(m_rsp),
    .l2_req_o(l2_req), .l2_we_o(l2_we), .l2_addr_o(l2_addr), .l2_wdata_o(l2_wdata),
    .l2_be_o(l2_be), .l2_gnt_i(l2_gnt), .l2_rvalid_i(l2_rvalid), .l2_rdata_i(l2_rdata),
    .host_req_o(host_req), .host_rsp_i(host_rsp)
  );

  for (genvar b = 0; b < 2; b++) begin : g_l2
    l2_spm_bank #(.DW(256), .DEPTH(L2_WORDS)) u_bank (
      .clk_i, .rst_ni, .req_i(l2_req[b]), .we_i(l2_we[b]), .addr_i(l2_addr[b]),
      .wdata_i(l2_wdata[b]), .be_i(l2_be[b]), .gnt_o(l2_gnt[b]),
      .rvalid_o(l2_rvalid[b]), .rdata_o(l2_rdata[b])
    );
  end

  host_port u_host (
    .clk_i, .rst_ni, .slv_req_i(host_req), .slv_rsp_o(host_rsp),
    .out_valid_o(host_valid_o), .out_ready_i(host_ready_i), .out_addr_o(host_addr_o),
    .out_data_o(host_data_o), .out_be_o(host_be_o)
  );
endmodule
