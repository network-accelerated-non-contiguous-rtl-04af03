// tb_soc_xbar: five 256-bit masters on the system crossbar, with two real
// l2_spm_bank instances (reduced depth) and a behavioural host sink. Checks
// the decode (bit 31 to the host, bit 5 choosing the L2 bank, bits [22:6]
// the row), read data against a software copy, that host writes arrive with
// their address, and that accesses to both banks and the host proceed in
// the same cycle.
`include "tb/tb_check.svh"
module tb_soc_xbar;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NM = 5, L2W = 1024;
  req256_t mq [NM];
  req256_t [NM-1:0] mqp;
  rsp256_t [NM-1:0] mp;
  logic [1:0] l2_req, l2_we, l2_gnt, l2_rv;
  logic [1:0][9:0] l2_addr;
  logic [1:0][255:0] l2_wd, l2_rd;
  logic [1:0][31:0] l2_be;
  req256_t hq;
  rsp256_t hp;
  int n_parallel = 0, n_host = 0;
  logic [255:0] host_seen [int];

  always_comb for (int m = 0; m < NM; m++) mqp[m] = mq[m];

  soc_xbar #(.NMST(NM), .L2_WORDS(L2W)) u_dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mqp), .mst_rsp_o(mp),
    .l2_req_o(l2_req), .l2_we_o(l2_we), .l2_addr_o(l2_addr), .l2_wdata_o(l2_wd), .l2_be_o(l2_be),
    .l2_gnt_i(l2_gnt), .l2_rvalid_i(l2_rv), .l2_rdata_i(l2_rd), .host_req_o(hq), .host_rsp_i(hp));
  for (genvar b = 0; b < 2; b++) begin : g_b
    l2_spm_bank #(.DEPTH(L2W)) u_b (.clk_i(clk), .rst_ni(rst_n), .req_i(l2_req[b]), .we_i(l2_we[b]),
      .addr_i(l2_addr[b]), .wdata_i(l2_wd[b]), .be_i(l2_be[b]), .gnt_o(l2_gnt[b]),
      .rvalid_o(l2_rv[b]), .rdata_o(l2_rd[b]));
  end
  assign hp.gnt = hq.req;
  assign hp.rvalid = 1'b0;
  assign hp.rdata = '0;

  `WATCHDOG(100000)

  always @(posedge clk) if (rst_n) begin
    if (l2_req[0] && l2_req[1] && hq.req) n_parallel++;
    if (hq.req) begin
      `CHECK(hq.addr[31] && hq.we, "only host-window writes reach the host port")
      host_seen[hq.addr] = hq.wdata;
      n_host++;
    end
    for (int b = 0; b < 2; b++) if (l2_req[b]) begin
      // find the granted master and check the decode
      for (int m = 0; m < NM; m++)
        if (mq[m].req && mp[m].gnt && !mq[m].addr[31] && mq[m].addr[5] == 1'(b))
          `CHECK(l2_addr[b] == mq[m].addr[15:6], "L2 bank and row decode")
    end
  end

  function automatic logic [255:0] rnd();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  // master m owns L2 lines m*128 .. m*128+127 (both banks) and a host range
  task automatic mst(input int m);
    logic [255:0] model [int];
    for (int i = 0; i < 128; i++) begin
      automatic logic [31:0] a = L2_BASE + 32'((m * 128 + i) * 32);
      @(negedge clk); mq[m] = '{req: 1, we: 1, addr: a, wdata: rnd(), be: '1};
      model[a] = mq[m].wdata;
      #1; while (!mp[m].gnt) begin @(negedge clk); #1; end
    end
    for (int i = 0; i < 300; i++) begin
      automatic int kind = $urandom_range(2);
      automatic logic [31:0] a = (kind == 2) ? HOST_BASE + 32'((m * 1024 + i) * 32)
                                             : L2_BASE + 32'((m * 128 + $urandom_range(127)) * 32);
      automatic logic we = kind != 0;
      automatic logic [255:0] d = rnd();
      @(negedge clk); mq[m] = '{req: 1, we: we, addr: a, wdata: d, be: '1};
      #1; while (!mp[m].gnt) begin @(negedge clk); #1; end
      if (we && !a[31]) model[a] = d;
      if (we && a[31]) begin
        @(negedge clk) mq[m] = '0;
        `CHECK(host_seen.exists(a) && host_seen[a] == d, "host write arrived with its address")
      end
      if (!we) begin
        @(negedge clk) mq[m] = '0;
        `CHECK(mp[m].rvalid && mp[m].rdata == model[a], $sformatf("master %0d line %h", m, a))
      end
    end
    @(negedge clk) mq[m] = '0;
  endtask

  initial begin
    foreach (mq[m]) mq[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < NM; m++) begin
      automatic int mm = m;
      fork mst(mm); join_none
    end
    wait fork;
    `CHECK(n_parallel > 0, "both L2 banks and the host were busy in one cycle")
    $display("cycles with both banks and host active: %0d, host writes: %0d", n_parallel, n_host);
    `REPORT
  end
endmodule
