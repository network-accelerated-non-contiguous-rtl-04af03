// tb_cluster_ext_xbar: eight cores (32-bit, one read at a time) and the DMA
// port (64-bit, pipelined reads) share the cluster port, behind which sits a
// memory with 3 cycles of latency that grants at random. Each master works
// on its own addresses; checks data, lane placement of 32-bit accesses and
// that every master is served (round-robin, no starvation).
`include "tb/tb_check.svh"
module tb_cluster_ext_xbar;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 8;
  req32_t cq [NC];
  req32_t [NC-1:0] cqp;
  rsp32_t [NC-1:0] cp;
  req64_t dq, pq, wq;
  rsp64_t dp, pp, wp;
  req64_t [1:0] pqa;
  rsp64_t [1:0] ppa;
  int n_w = 0;
  int served [NC+1];

  always_comb for (int c = 0; c < NC; c++) cqp[c] = cq[c];

  cluster_ext_xbar u_dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(cqp), .core_rsp_o(cp),
    .dma_rd_req_i(dq), .dma_rd_rsp_o(dp), .dma_wr_req_i(wq), .dma_wr_rsp_o(wp),
    .port_req_o(pqa), .port_rsp_i(ppa));
  assign pq = pqa[0];
  assign ppa[0] = pp;
  assign ppa[1] = '{gnt: pqa[1].req, rvalid: 1'b0, rdata: '0};
  // channel 1 carries the DMA write port unchanged
  always @(posedge clk) if (rst_n && wq.req) begin
    `CHECK(pqa[1] == wq && wp.gnt, "DMA write channel passes straight through")
    n_w++;
  end
  tb_mem_slave #(.DW(64), .LAT(3), .GNT_PCT(70)) u_mem (.clk_i(clk), .rst_ni(rst_n),
    .req_i(pq.req), .we_i(pq.we), .addr_i(pq.addr), .wdata_i(pq.wdata), .be_i(pq.be),
    .gnt_o(pp.gnt), .rvalid_o(pp.rvalid), .rdata_o(pp.rdata));

  `WATCHDOG(100000)

  logic [63:0] dexp[$];
  always @(posedge clk) if (rst_n && dp.rvalid) begin
    `CHECK(dexp.size() > 0 && dp.rdata == dexp[0], "DMA read data in order")
    void'(dexp.pop_front());
  end

  task automatic core(input int c);
    logic [31:0] model [int];
    for (int i = 0; i < 150; i++) begin
      automatic logic [31:0] a = L2_BASE + 32'(c) * 32'h1000 + ($urandom_range(31) << 2);
      automatic logic we = $urandom_range(1);
      automatic logic [31:0] d = $urandom;
      @(negedge clk);
      cq[c] = '{req: 1, we: we, addr: a, wdata: d, be: 4'hF};
      #1;
      while (!cp[c].gnt) begin @(negedge clk); #1; end
      served[c]++;
      @(negedge clk) cq[c] = '0;
      if (we) model[a] = d;
      else begin
        automatic logic [63:0] w = u_mem.peek(a);
        automatic logic [31:0] e = model.exists(a) ? model[a] : (a[2] ? w[63:32] : w[31:0]);
        #1;
        while (!cp[c].rvalid) begin @(negedge clk); #1; end
        `CHECK(cp[c].rdata == e, $sformatf("core %0d read %h", c, a))
      end
    end
  endtask

  task automatic dmaw();
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); wq = '{req: 1, we: 1, addr: HOST_BASE + 32'(i * 8), wdata: {$urandom, $urandom}, be: 8'hFF};
    end
    @(negedge clk) wq = '0;
  endtask

  task automatic dma();
    for (int i = 0; i < 600; i++) begin
      automatic logic [31:0] a = L2_BASE + 32'h10000 + ($urandom_range(63) << 3);
      automatic logic we = (i < 64) || $urandom_range(1);
      @(negedge clk);
      dq = '{req: 1, we: we, addr: a, wdata: {$urandom, $urandom}, be: 8'hFF};
      #1;
      while (!dp.gnt) begin @(negedge clk); #1; end
      served[NC]++;
      if (!we) dexp.push_back(u_mem.peek(a));
    end
    @(negedge clk) dq = '0;
  endtask

  initial begin
    foreach (cq[c]) cq[c] = '0;
    dq = '0; wq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int c = 0; c < NC; c++) begin
        automatic int cc = c;
        fork core(cc); join_none
      end
      dma();
      dmaw();
    join_none
    wait fork;
    repeat (20) @(negedge clk);
    for (int c = 0; c <= NC; c++) `CHECK(served[c] > 0, $sformatf("master %0d served", c))
    `CHECK(dexp.size() == 0, "all DMA reads answered")
    `CHECK(n_w == 50, "all DMA writes passed")
    `REPORT
  end
endmodule
