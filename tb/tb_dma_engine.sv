// tb_dma_engine: the cluster DMA between a behavioural L1 (1-cycle, always
// grants, as the L1 crossbar does for the DMA) and a behavioural system
// port (3-cycle latency, random grants when enabled). Checks, through the
// cores' register interface: an L2-to-L1 copy of one 2 KiB packet at one
// 64-bit beat per cycle (256 beats plus a few cycles of latency), an
// L1-to-system copy, four copies in flight on all four channels with a fifth
// START held back until a channel frees, a zero-length copy, and the busy
// and pending registers. Destination contents are compared word by word.
`include "tb/tb_check.svh"
module tb_dma_engine;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 8;
  req32_t cq [NC];
  req32_t [NC-1:0] cqp;
  rsp32_t [NC-1:0] cp;
  req64_t lrq, lwq, erq, ewq, lq, eq;
  rsp64_t lrp, lwp, erp, ewp, lp, ep;
  int n_duplex = 0;
  logic [3:0] busy;
  logic ext_en;
  int ext_pct = 100;
  int n_start_stall = 0, n_allbusy = 0;

  always_comb for (int c = 0; c < NC; c++) cqp[c] = cq[c];
  always @(negedge clk) ext_en <= $urandom_range(99) < ext_pct;

  dma_engine u_dut (.clk_i(clk), .rst_ni(rst_n), .cluster_id_i(2'd0), .cfg_req_i(cqp), .cfg_rsp_o(cp),
    .l1_rd_req_o(lrq), .l1_rd_rsp_i(lrp), .l1_wr_req_o(lwq), .l1_wr_rsp_i(lwp),
    .ext_rd_req_o(erq), .ext_rd_rsp_i(erp), .ext_wr_req_o(ewq), .ext_wr_rsp_i(ewp), .busy_o(busy));
  // The behavioural memories have one port each: the write side is served in
  // the same cycle as the read side by letting writes bypass the grant
  // (poke), which models the separate write ports of the real system.
  assign lq = lrq;
  assign eq = erq;
  assign lrp = lp;
  assign erp = ep;
  assign lwp = '{gnt: lwq.req, rvalid: 1'b0, rdata: '0};
  assign ewp = '{gnt: ewq.req && ext_en, rvalid: 1'b0, rdata: '0};
  always @(posedge clk) if (rst_n) begin
    if (lwq.req) u_l1.poke(lwq.addr, lwq.wdata);
    if (ewq.req && ext_en) u_ext.poke(ewq.addr, ewq.wdata);
    if ((lwq.req || (ewq.req && ext_en)) && (lrq.req || erq.req)) n_duplex++;
  end
  tb_mem_slave #(.DW(64), .LAT(1)) u_l1 (.clk_i(clk), .rst_ni(rst_n),
    .req_i(lq.req), .we_i(lq.we), .addr_i(lq.addr), .wdata_i(lq.wdata), .be_i(lq.be),
    .gnt_o(lp.gnt), .rvalid_o(lp.rvalid), .rdata_o(lp.rdata));
  logic eg;
  tb_mem_slave #(.DW(64), .LAT(3)) u_ext (.clk_i(clk), .rst_ni(rst_n),
    .req_i(eq.req && ext_en), .we_i(eq.we), .addr_i(eq.addr), .wdata_i(eq.wdata), .be_i(eq.be),
    .gnt_o(eg), .rvalid_o(ep.rvalid), .rdata_o(ep.rdata));
  assign ep.gnt = eg && ext_en;

  `WATCHDOG(200000)

  always @(posedge clk) if (rst_n) begin
    if (busy == 4'hF) n_allbusy++;
    for (int c = 0; c < NC; c++)
      if (cq[c].req && cq[c].we && cq[c].addr[7:0] == 8'h0C && !cp[c].gnt) n_start_stall++;
  end

  localparam logic [31:0] DMA = CLUSTER_BASE + DMA_OFFSET;

  task automatic wr(input int c, input logic [7:0] off, input logic [31:0] d);
    @(negedge clk); cq[c] = '{req: 1, we: 1, addr: DMA + 32'(off), wdata: d, be: 4'hF};
    #1; while (!cp[c].gnt) begin @(negedge clk); #1; end
    @(negedge clk) cq[c] = '0;
  endtask
  task automatic rd(input int c, input logic [7:0] off, output logic [31:0] d);
    @(negedge clk); cq[c] = '{req: 1, we: 0, addr: DMA + 32'(off), wdata: 0, be: 4'hF};
    #1; while (!cp[c].gnt) begin @(negedge clk); #1; end
    @(negedge clk) cq[c] = '0;
    d = cp[c].rdata;
    `CHECK(cp[c].rvalid, "register read answers after one cycle")
  endtask
  task automatic copy(input int c, input logic [31:0] s, input logic [31:0] d, input logic [31:0] n);
    wr(c, 8'h00, s); wr(c, 8'h04, d); wr(c, 8'h08, n); wr(c, 8'h0C, 0);
  endtask
  task automatic wait_done(input int c);
    logic [31:0] p;
    do rd(c, 8'h10, p); while (p != 0);
  endtask
  // compare destination with source, reading from whichever model holds each
  function automatic logic [63:0] word(input logic [31:0] a);
    return is_local_l1(a, 2'd0) ? u_l1.peek(a) : u_ext.peek(a);
  endfunction
  task automatic compare(input logic [31:0] s, input logic [31:0] d, input logic [31:0] n,
                         input logic [63:0] src_copy [int], input string what);
    int bad = 0;
    for (int i = 0; i < int'(n / 8); i++) if (word(d + 32'(i * 8)) != src_copy[i]) bad++;
    `CHECK(bad == 0, $sformatf("%s: %0d words differ", what, bad))
  endtask
  task automatic snap(input logic [31:0] s, input logic [31:0] n, output logic [63:0] cpy [int]);
    for (int i = 0; i < int'(n / 8); i++) cpy[i] = word(s + 32'(i * 8));
  endtask

  initial begin
    logic [63:0] s0 [int], s1 [int];
    logic [63:0] sx [4][int];
    logic [31:0] r;
    int t0, t1;
    foreach (cq[c]) cq[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1) one 2 KiB packet from L2 into L1, at full rate
    snap(L2_BASE + 32'h1000, 2048, s0);
    wr(0, 8'h00, L2_BASE + 32'h1000); wr(0, 8'h04, CLUSTER_BASE + 32'h100); wr(0, 8'h08, 2048);
    t0 = $time / 10;
    wr(0, 8'h0C, 0);
    rd(0, 8'h10, r);
    `CHECK(r == 1, "one copy pending after START")
    rd(0, 8'h0C, r);
    `CHECK(r[3:0] != 0, "a channel is busy")
    while (u_dut.pend_q[0] != 0) @(negedge clk);
    t1 = $time / 10;
    `CHECK(t1 - t0 <= 256 + 12, $sformatf("2 KiB L2->L1 took %0d cycles (64 bit/cycle expected)", t1 - t0))
    $display("2 KiB L2->L1 copy: %0d cycles", t1 - t0);
    compare(L2_BASE + 32'h1000, CLUSTER_BASE + 32'h100, 2048, s0, "L2->L1");

    // 2) from L1 out to the host window, with random stalls on the system side
    ext_pct = 60;
    snap(CLUSTER_BASE + 32'h100, 1024, s1);
    copy(1, CLUSTER_BASE + 32'h100, HOST_BASE + 32'h40, 1024);
    wait_done(1);
    compare(CLUSTER_BASE + 32'h100, HOST_BASE + 32'h40, 1024, s1, "L1->host");

    // 3) four cores, four channels, and a fifth START that must wait
    for (int k = 0; k < 4; k++) snap(L2_BASE + 32'h10000 + 32'(k * 4096), 512, sx[k]);
    fork
      for (int k = 0; k < 4; k++) begin
        automatic int kk = k;
        fork copy(2 + kk, L2_BASE + 32'h10000 + 32'(kk * 4096), CLUSTER_BASE + 32'h8000 + 32'(kk * 4096), 512);
        join_none
      end
    join
    wait fork;
    copy(6, L2_BASE + 32'h20000, CLUSTER_BASE + 32'h20000, 64);
    for (int k = 0; k < 4; k++) wait_done(2 + k);
    wait_done(6);
    for (int k = 0; k < 4; k++)
      compare(L2_BASE + 32'h10000 + 32'(k * 4096), CLUSTER_BASE + 32'h8000 + 32'(k * 4096), 512, sx[k],
              $sformatf("channel copy %0d", k));
    `CHECK(n_allbusy > 0, "all four channels busy at once")
    `CHECK(n_duplex > 0, "reads and writes in the same cycle")
    `CHECK(n_start_stall > 0, "START held back while no channel was free")

    // 4) zero-length copy completes at once and touches nothing
    copy(7, L2_BASE, CLUSTER_BASE, 0);
    rd(7, 8'h10, r);
    `CHECK(r == 0, "zero-length copy leaves nothing pending")
    rd(0, 8'h0C, r);
    `CHECK(r[3:0] == 0, "all channels idle at the end")
    rd(3, 8'h04, r);
    `CHECK(r == CLUSTER_BASE + 32'h8000 + 32'h1000, "DST register reads back")
    $display("START stalls: %0d, all-busy cycles: %0d", n_start_stall, n_allbusy);
    `REPORT
  end
endmodule
