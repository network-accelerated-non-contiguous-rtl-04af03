// tb_dwc_buf: a 64-bit master writes and reads through the converter into a
// 256-bit memory. Phase 1 streams 64 sequential writes and then 64
// sequential reads with the wide side always granting: checks that they are
// packed into 16 wide writes and 16 wide reads and that the reads stream at
// one per cycle. Phase 2 issues random reads and writes (random addresses
// in a small window so lines are hit again, random byte enables, random
// gaps) against a memory that grants at random. Every read is checked
// against a reference copy of memory, in order, and at the end the whole
// memory is compared with the reference.
`include "tb/tb_check.svh"
module tb_dwc_buf;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  req64_t  sreq;
  rsp64_t  srsp;
  req256_t mreq;
  rsp256_t mrsp;
  int gnt_pct = 100;
  logic mgnt;

  dwc_buf u_dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_rsp_o(srsp),
                 .mst_req_o(mreq), .mst_rsp_i(mrsp));
  tb_mem_slave #(.DW(256), .LAT(1), .GNT_PCT(100)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mreq.req && mgnt),
    .we_i(mreq.we), .addr_i(mreq.addr), .wdata_i(mreq.wdata), .be_i(mreq.be),
    .gnt_o(), .rvalid_o(mrsp.rvalid), .rdata_o(mrsp.rdata));
  assign mrsp.gnt = mgnt;
  always @(negedge clk) mgnt <= $urandom_range(99) < gnt_pct;

  `WATCHDOG(40000)

  localparam logic [31:0] BASE = 32'h1C00_0000;
  logic [63:0] ref_m [int unsigned];
  logic [63:0] exp_q[$];
  int nrd = 0, nwide_wr = 0, nwide_rd = 0;

  function automatic logic [63:0] ref_rd(input logic [31:0] a);
    logic [255:0] w;
    if (ref_m.exists(a >> 3)) return ref_m[a >> 3];
    w = u_mem.peek(a);
    return w[64*a[4:3] +: 64];
  endfunction

  always @(posedge clk) if (rst_n && srsp.rvalid) begin
    `CHECK(exp_q.size() > 0 && srsp.rdata == exp_q[0], "read data lane/order")
    void'(exp_q.pop_front());
    nrd++;
  end
  always @(posedge clk) if (rst_n && mreq.req && mrsp.gnt) begin
    if (mreq.we) nwide_wr++; else nwide_rd++;
    `CHECK(mreq.addr[4:0] == 0, "wide access is line aligned")
  end

  task automatic acc(input logic we, input logic [31:0] a, input logic [63:0] d, input logic [7:0] be);
    @(negedge clk);
    sreq = '{req: 1, we: we, addr: a, wdata: d, be: be};
    #1;
    while (!srsp.gnt) begin @(negedge clk); #1; end
    if (we) begin
      logic [63:0] o = ref_rd(a);
      for (int b = 0; b < 8; b++) if (be[b]) o[8*b +: 8] = d[8*b +: 8];
      ref_m[a >> 3] = o;
    end else exp_q.push_back(ref_rd(a));
  endtask

  initial begin
    int t0;
    sreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) acc(1, BASE + 32'(i) * 8, {$urandom, $urandom}, 8'hFF);
    @(negedge clk) sreq = '0;
    repeat (10) @(negedge clk);
    `CHECK(nwide_wr == 16, $sformatf("64 writes packed into %0d wide writes", nwide_wr))
    t0 = $time;
    for (int i = 0; i < 64; i++) acc(0, BASE + 32'(i) * 8, '0, 8'hFF);
    `CHECK(($time - t0) / 10 <= 64 + 1, $sformatf("64 reads took %0d cycles", ($time - t0) / 10))
    @(negedge clk) sreq = '0;
    repeat (10) @(negedge clk);
    `CHECK(nwide_rd == 16, $sformatf("64 reads packed into %0d wide reads", nwide_rd))
    `CHECK(nrd == 64, "all reads answered")
    // random traffic, random grants
    gnt_pct = 60;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] a;
      a = BASE + 32'($urandom_range(63)) * 8;
      if ($urandom_range(99) < 30) begin @(negedge clk) sreq = '0; end
      acc($urandom_range(1), a, {$urandom, $urandom}, 8'($urandom_range(255)));
    end
    @(negedge clk) sreq = '0;
    repeat (30) @(negedge clk);
    `CHECK(exp_q.size() == 0, "all random reads answered")
    for (int i = 0; i < 64; i++) begin
      logic [255:0] w;
      w = u_mem.peek(BASE + 32'(i) * 8);
      `CHECK(w[64*(i%4) +: 64] == ref_rd(BASE + 32'(i) * 8), $sformatf("final word %0d", i))
    end
    `REPORT
  end
endmodule
