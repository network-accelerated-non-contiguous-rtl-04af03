// tb_pulp_cluster: one full-size cluster with a behavioural system memory
// (3-cycle latency, random grants) on its 64-bit port. Core 0 plays a
// handler: it has the DMA copy 512 B from system memory into L1, waits for
// the pending count to drop, reads the words back through its own port and
// has the DMA write them out again to the host window. Cores 1..7 meanwhile
// read and write their own L1 words and read system memory directly. Checks
// all data, the routing of the three kinds of access and that L1 bank
// conflicts between cores and DMA happened.
`include "tb/tb_check.svh"
module tb_pulp_cluster;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 8;
  localparam logic [1:0] CID = 2'd1;
  req32_t cq [NC];
  req32_t [NC-1:0] cqp;
  rsp32_t [NC-1:0] cp;
  req64_t pq;
  rsp64_t pp;
  req64_t [1:0] pqa;
  rsp64_t [1:0] ppa;
  logic w_en;
  logic [3:0] busy;
  int n_stall = 0;

  always_comb for (int c = 0; c < NC; c++) cqp[c] = cq[c];

  pulp_cluster u_dut (.clk_i(clk), .rst_ni(rst_n), .cluster_id_i(CID), .core_req_i(cqp),
    .core_rsp_o(cp), .port_req_o(pqa), .port_rsp_i(ppa), .dma_busy_o(busy));
  // channel 0 goes to the behavioural memory; channel 1 (DMA writes) is
  // written into the same memory directly, granted at random
  assign pq = pqa[0];
  assign ppa[0] = pp;
  always @(negedge clk) w_en <= $urandom_range(3) != 0;
  assign ppa[1] = '{gnt: pqa[1].req && w_en, rvalid: 1'b0, rdata: '0};
  always @(posedge clk) if (rst_n && pqa[1].req && w_en) begin
    automatic logic [63:0] w = u_mem.peek(pqa[1].addr);
    for (int b = 0; b < 8; b++) if (pqa[1].be[b]) w[8*b +: 8] = pqa[1].wdata[8*b +: 8];
    u_mem.poke(pqa[1].addr, w);
  end
  tb_mem_slave #(.DW(64), .LAT(3), .GNT_PCT(80)) u_mem (.clk_i(clk), .rst_ni(rst_n),
    .req_i(pq.req), .we_i(pq.we), .addr_i(pq.addr), .wdata_i(pq.wdata), .be_i(pq.be),
    .gnt_o(pp.gnt), .rvalid_o(pp.rvalid), .rdata_o(pp.rdata));

  `WATCHDOG(200000)

  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) if (cq[c].req && !cp[c].gnt) n_stall++;

  localparam logic [31:0] L1B = CLUSTER_BASE + (32'(CID) << CLUSTER_SHIFT);
  localparam logic [31:0] DMA = L1B + DMA_OFFSET;

  task automatic acc(input int c, input logic we, input logic [31:0] a, input logic [31:0] d,
                     output logic [31:0] r);
    @(negedge clk); cq[c] = '{req: 1, we: we, addr: a, wdata: d, be: 4'hF};
    #1; while (!cp[c].gnt) begin @(negedge clk); #1; end
    @(negedge clk) cq[c] = '0;
    if (!we) begin
      #1; while (!cp[c].rvalid) begin @(negedge clk); #1; end
      r = cp[c].rdata;
    end
  endtask

  task automatic handler();
    logic [31:0] r;
    logic [63:0] src [64];
    for (int i = 0; i < 64; i++) src[i] = u_mem.peek(L2_BASE + 32'h4000 + 32'(i * 8));
    acc(0, 1, DMA + 0, L2_BASE + 32'h4000, r);
    acc(0, 1, DMA + 4, L1B + 32'h2000, r);
    acc(0, 1, DMA + 8, 512, r);
    acc(0, 1, DMA + 12, 0, r);
    do acc(0, 0, DMA + 16, 0, r); while (r != 0);
    for (int i = 0; i < 128; i++) begin
      acc(0, 0, L1B + 32'h2000 + 32'(i * 4), 0, r);
      `CHECK(r == src[i / 2][32 * (i % 2) +: 32], $sformatf("L1 word %0d after DMA in", i))
    end
    acc(0, 1, DMA + 0, L1B + 32'h2000, r);
    acc(0, 1, DMA + 4, HOST_BASE + 32'h100, r);
    acc(0, 1, DMA + 8, 512, r);
    acc(0, 1, DMA + 12, 0, r);
    do acc(0, 0, DMA + 16, 0, r); while (r != 0);
    for (int i = 0; i < 64; i++)
      `CHECK(u_mem.peek(HOST_BASE + 32'h100 + 32'(i * 8)) == src[i], $sformatf("host word %0d", i))
  endtask

  task automatic worker(input int c);
    logic [31:0] model [int];
    logic [31:0] r;
    for (int i = 0; i < 200; i++) begin
      automatic int k = $urandom_range(2);
      automatic logic [31:0] a = (k == 2) ? L2_BASE + 32'h8000 + 32'(($urandom_range(255)) * 4)
                                          : L1B + 32'h1_0000 + 32'(c * 1024 + $urandom_range(63) * 4);
      automatic logic we = (k == 0) || (k == 1 && !model.exists(a));
      automatic logic [31:0] d = $urandom;
      if (k == 2) we = 0;
      acc(c, we, a, d, r);
      if (we) model[a] = d;
      else if (k == 2) begin
        automatic logic [63:0] w = u_mem.peek(a);
        `CHECK(r == (a[2] ? w[63:32] : w[31:0]), "core read of system memory")
      end else `CHECK(r == model[a], "core read of own L1 word")
    end
  endtask

  initial begin
    foreach (cq[c]) cq[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      handler();
      for (int c = 1; c < NC; c++) begin
        automatic int cc = c;
        fork worker(cc); join_none
      end
    join_none
    wait fork;
    `CHECK(n_stall > 0, "cores stalled on shared resources")
    `REPORT
  end
endmodule
