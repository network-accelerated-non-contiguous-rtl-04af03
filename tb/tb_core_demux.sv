// tb_core_demux: one core port in front of three behavioural targets with
// different latencies (L1: 1 cycle, DMA registers: 1 cycle, outside: 4
// cycles). Checks that each address reaches only its target, that read data
// comes from the target the read went to, and that a request to another
// target waits while a read is in flight.
`include "tb/tb_check.svh"
module tb_core_demux;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam logic [1:0] CID = 2'd2;
  req32_t creq, l1q, dmq, exq;
  rsp32_t crsp, l1p, dmp, exp_;
  int n_wait = 0;

  core_demux u_dut (.clk_i(clk), .rst_ni(rst_n), .cluster_id_i(CID),
    .core_req_i(creq), .core_rsp_o(crsp), .l1_req_o(l1q), .l1_rsp_i(l1p),
    .dma_req_o(dmq), .dma_rsp_i(dmp), .ext_req_o(exq), .ext_rsp_i(exp_));

  tb_mem_slave #(.DW(32), .LAT(1), .GNT_PCT(70)) u_l1 (.clk_i(clk), .rst_ni(rst_n),
    .req_i(l1q.req), .we_i(l1q.we), .addr_i(l1q.addr), .wdata_i(l1q.wdata), .be_i(l1q.be),
    .gnt_o(l1p.gnt), .rvalid_o(l1p.rvalid), .rdata_o(l1p.rdata));
  tb_mem_slave #(.DW(32), .LAT(1), .GNT_PCT(100)) u_dma (.clk_i(clk), .rst_ni(rst_n),
    .req_i(dmq.req), .we_i(dmq.we), .addr_i(dmq.addr), .wdata_i(dmq.wdata), .be_i(dmq.be),
    .gnt_o(dmp.gnt), .rvalid_o(dmp.rvalid), .rdata_o(dmp.rdata));
  tb_mem_slave #(.DW(32), .LAT(4), .GNT_PCT(50)) u_ext (.clk_i(clk), .rst_ni(rst_n),
    .req_i(exq.req), .we_i(exq.we), .addr_i(exq.addr), .wdata_i(exq.wdata), .be_i(exq.be),
    .gnt_o(exp_.gnt), .rvalid_o(exp_.rvalid), .rdata_o(exp_.rdata));

  `WATCHDOG(50000)

  // at most one target sees a request, and it is the decoded one
  always @(posedge clk) if (rst_n && creq.req) begin
    automatic logic [31:0] off = creq.addr - cluster_base(CID);
    automatic int tgt = off < L1_SIZE ? 0 : (off >= DMA_OFFSET && off < DMA_OFFSET + 256) ? 1 : 2;
    `CHECK((32'(l1q.req) + 32'(dmq.req) + 32'(exq.req)) <= 1, "request sent to one target only")
    if (l1q.req) `CHECK(tgt == 0, "L1 request decoded")
    if (dmq.req) `CHECK(tgt == 1, "DMA request decoded")
    if (exq.req) `CHECK(tgt == 2, "outside request decoded")
    if (!(l1q.req || dmq.req || exq.req)) n_wait++;
  end

  function automatic logic [31:0] pick(input int t);
    logic [31:0] b = cluster_base(CID);
    case (t)
      0: return b + ($urandom_range(1023) << 2);
      1: return b + DMA_OFFSET + ($urandom_range(63) << 2);
      2: return L2_BASE + ($urandom_range(1023) << 2);
      default: return cluster_base(CID + 2'd1) + ($urandom_range(1023) << 2); // another cluster's L1
    endcase
  endfunction

  logic [31:0] exp_q[$];
  always @(posedge clk) if (rst_n && crsp.rvalid) begin
    `CHECK(exp_q.size() > 0 && crsp.rdata == exp_q[0], "read data from the right target")
    void'(exp_q.pop_front());
  end

  initial begin
    creq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      automatic int t = $urandom_range(3);
      automatic logic [31:0] a = pick(t);
      automatic logic we = $urandom_range(1);
      @(negedge clk);
      creq = '{req: 1, we: we, addr: a, wdata: $urandom, be: 4'hF};
      #1;
      while (!crsp.gnt) begin @(negedge clk); #1; end
      if (!we) exp_q.push_back(t == 0 ? u_l1.peek(a) : t == 1 ? u_dma.peek(a) : u_ext.peek(a));
    end
    @(negedge clk) creq = '0;
    repeat (20) @(negedge clk);
    `CHECK(exp_q.size() == 0, "every read answered")
    `CHECK(n_wait > 0, "a request waited for a read in flight")
    `CHECK(u_ext.n_writes + u_ext.n_reads > 100 && u_l1.n_reads > 20 && u_dma.n_writes > 20, "all targets used")
    `REPORT
  end
endmodule
