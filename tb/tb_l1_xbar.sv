// tb_l1_xbar: the L1 crossbar with sixteen real l1_spm_bank instances (of
// reduced depth). Eight cores and the DMA port access their own address
// ranges at random; checks all data against a software copy, that the DMA is
// granted in the same cycle every time (both halves together, priority over
// the cores), and that bank conflicts between cores did happen and were
// resolved.
`include "tb/tb_check.svh"
module tb_l1_xbar;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 8, NB = 16, BW = 256;
  req32_t cq [NC];
  req32_t [NC-1:0] cqp;
  rsp32_t [NC-1:0] cp;
  req64_t dq, rq, wq;
  rsp64_t dp, rp, wp;
  int n_clash = 0;
  logic [NB-1:0] b_req, b_we, b_gnt, b_rv;
  logic [NB-1:0][7:0] b_addr;
  logic [NB-1:0][31:0] b_wd, b_rd;
  logic [NB-1:0][3:0] b_be;
  int n_conflict = 0, n_dma = 0;

  always_comb for (int c = 0; c < NC; c++) cqp[c] = cq[c];

  l1_xbar #(.BANK_WORDS(BW)) u_dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(cqp), .core_rsp_o(cp),
    .dma_rd_req_i(rq), .dma_rd_rsp_o(rp), .dma_wr_req_i(wq), .dma_wr_rsp_o(wp), .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wd), .bank_be_o(b_be), .bank_gnt_i(b_gnt), .bank_rvalid_i(b_rv), .bank_rdata_i(b_rd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    l1_spm_bank #(.DEPTH(BW)) u_b (.clk_i(clk), .rst_ni(rst_n), .req_i(b_req[b]), .we_i(b_we[b]),
      .addr_i(b_addr[b]), .wdata_i(b_wd[b]), .be_i(b_be[b]), .gnt_o(b_gnt[b]), .rvalid_o(b_rv[b]),
      .rdata_o(b_rd[b]));
  end

  `WATCHDOG(100000)

  // the DMA task drives one 64-bit stream; reads go to the read port and
  // writes to the write port, so both ports are exercised
  always_comb begin
    rq = dq; wq = dq;
    rq.req = dq.req && !dq.we;
    wq.req = dq.req && dq.we;
    dp.gnt = dq.we ? wp.gnt : rp.gnt;
    dp.rvalid = rp.rvalid;
    dp.rdata = rp.rdata;
  end
  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) if (cq[c].req && !cp[c].gnt) n_conflict++;

  // core c owns rows 4c..4c+3 of every bank; the DMA owns rows 64..127
  task automatic core(input int c);
    logic [31:0] model [int];
    for (int i = 0; i < 64; i++) begin   // initialise own words
      automatic logic [31:0] a = cluster_base(0) + 32'((4 * c) * 64 + i * 4);
      @(negedge clk); cq[c] = '{req: 1, we: 1, addr: a, wdata: $urandom, be: 4'hF};
      model[a] = cq[c].wdata;
      #1; while (!cp[c].gnt) begin @(negedge clk); #1; end
    end
    for (int i = 0; i < 300; i++) begin
      automatic logic [31:0] a = cluster_base(0) + 32'((4 * c) * 64 + $urandom_range(63) * 4);
      automatic logic we = $urandom_range(1);
      automatic logic [3:0] be = 4'($urandom_range(1, 15));
      automatic logic [31:0] d = $urandom;
      @(negedge clk); cq[c] = '{req: 1, we: we, addr: a, wdata: d, be: be};
      #1; while (!cp[c].gnt) begin @(negedge clk); #1; end
      if (we) begin
        for (int k = 0; k < 4; k++) if (be[k]) model[a][8*k +: 8] = d[8*k +: 8];
      end else begin
        @(negedge clk) cq[c] = '0;
        `CHECK(cp[c].rvalid && cp[c].rdata == model[a], $sformatf("core %0d word %h", c, a))
      end
    end
    @(negedge clk) cq[c] = '0;
  endtask

  task automatic dma();
    logic [63:0] model [int];
    logic [31:0] pend_a[$];
    for (int i = 0; i < 600; i++) begin
      automatic logic [31:0] a = cluster_base(0) + 32'(64 * 64 + $urandom_range(255) * 8);
      automatic logic we = !model.exists(a) || $urandom_range(1);
      @(negedge clk); dq = '{req: 1, we: we, addr: a, wdata: {$urandom, $urandom}, be: 8'hFF};
      #1 `CHECK(dp.gnt, "DMA granted in the cycle it asks")
      n_dma++;
      if (we) model[a] = dq.wdata;
      @(negedge clk) dq = '0;
      if (!we) `CHECK(dp.rvalid && dp.rdata == model[a], $sformatf("DMA word %h", a))
    end
  endtask

  initial begin
    foreach (cq[c]) cq[c] = '0;
    dq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int c = 0; c < NC; c++) begin
        automatic int cc = c;
        fork core(cc); join_none
      end
      dma();
    join_none
    wait fork;
    `CHECK(n_conflict > 0, "bank conflicts occurred")
    $display("bank conflict stalls: %0d, DMA beats: %0d", n_conflict, n_dma);
    `REPORT
  end
endmodule
