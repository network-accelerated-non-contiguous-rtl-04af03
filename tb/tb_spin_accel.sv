// tb_spin_accel: end-to-end test of the whole accelerator at its full size
// (four clusters, 12 MiB of scratchpad, no parameter overridden).
//
// Workload: receiving one message described by a vector datatype, the case
// the paper benchmarks. The message of NPKT packets of 2 KiB arrives over the
// network port; its bytes belong in host memory in blocks of BLK bytes that
// start STRIDE bytes apart (stride twice the block size, as in the paper's
// vector benchmark). The 32 cores are behavioural models running the
// vector payload handler: packets are handed out in runs of DP consecutive
// packets per core (a static blocked round-robin assignment, as the paper's
// own cycle-accurate microbenchmark does), and for each packet the handler
// has its cluster's DMA copy the packet from L2 to L1 and then issues one
// DMA write per block from L1 to host_base + (pkt_offset / BLK) * STRIDE.
// The host side is a memory model fed from the host port.
//
// Checks: every host word of every block holds the right payload byte, no
// byte outside the blocks is written, every notice from the NI is correct,
// the message throughput in a run with the host always ready (at least 150
// bit/cycle, against the paper's 192 Gbit/s at 1 GHz for 256-byte blocks),
// and that the mechanisms of the design all occurred: NI backpressure, host backpressure,
// DMA START held back, all channels of a cluster busy, a DMA reading for
// inbound and outbound copies in the same cycle, and that in every cluster.
`include "tb/tb_check.svh"
module tb_spin_accel;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NCL = 4, NC = 8, NCORE = NCL * NC;
  localparam int PKT = 2048, BEATS = PKT / 32;
  localparam int BLK = 256, STRIDE = 2 * BLK, DP = 4;
  int NPKT;
  localparam logic [31:0] HOST_BUF = HOST_BASE + 32'h0100_0000;

  req32_t cq [NCL][NC];
  req32_t [NCL-1:0][NC-1:0] cqp;
  rsp32_t [NCL-1:0][NC-1:0] cp;
  logic [NCL-1:0][3:0] busy;
  logic ni_v, ni_r, ni_l, pv, pr, hv, hr;
  logic [255:0] ni_d, hd;
  logic [31:0] pa, pl, ha, hb;

  always_comb for (int k = 0; k < NCL; k++) for (int c = 0; c < NC; c++) cqp[k][c] = cq[k][c];

  spin_accel u_dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(cqp), .core_rsp_o(cp), .dma_busy_o(busy),
    .ni_valid_i(ni_v), .ni_ready_o(ni_r), .ni_data_i(ni_d), .ni_last_i(ni_l),
    .pkt_valid_o(pv), .pkt_ready_i(pr), .pkt_addr_o(pa), .pkt_len_o(pl),
    .host_valid_o(hv), .host_ready_i(hr), .host_addr_o(ha), .host_data_o(hd), .host_be_o(hb));

  `WATCHDOG(400000)

  // ---------------- payload and host memory model ----------------
  function automatic logic [31:0] payload_word(input int msg, input int off);
    return 32'(off) * 32'h9E37_79B1 ^ 32'(msg) << 28 ^ 32'h5A5A_0000;
  endfunction

  logic [31:0] host_mem [int unsigned];
  int host_bytes = 0;
  int hostp = 100;
  int n_host_stall = 0, n_ni_stall = 0, n_start_stall = 0, n_allbusy = 0, n_duplex = 0;
  int cl_used [NCL];
  int last_host_cycle = 0;

  logic [NCL-1:0] dup;
  for (genvar k = 0; k < NCL; k++) begin : g_mon
    assign dup[k] = u_dut.g_cluster[k].u_cluster.u_dma.rd_go[0] && u_dut.g_cluster[k].u_cluster.u_dma.rd_go[1];
  end

  always @(negedge clk) hr <= $urandom_range(99) < hostp;
  always @(posedge clk) if (rst_n) begin
    if (hv && hr) begin
      for (int w = 0; w < 8; w++) if (hb[4*w +: 4] != 0) begin
        `CHECK(hb[4*w +: 4] == 4'hF, "host writes whole words")
        host_mem[(ha >> 2) + 32'(w)] = hd[32*w +: 32];
        host_bytes += 4;
      end
      last_host_cycle = $time / 10;
    end
    if (hv && !hr) n_host_stall++;
    if (ni_v && !ni_r) n_ni_stall++;
    for (int k = 0; k < NCL; k++) begin
      if (busy[k] == 4'hF) n_allbusy++;
      if (dup[k]) begin
        n_duplex++;
        cl_used[k]++;
      end
      for (int c = 0; c < NC; c++)
        if (cq[k][c].req && cq[k][c].we && cq[k][c].addr[7:0] == 8'h0C &&
            cq[k][c].addr[23:16] == 8'h20 && !cp[k][c].gnt) n_start_stall++;
    end
  end

  // ---------------- core models ----------------
  task automatic acc(input int k, input int c, input logic we, input logic [31:0] a,
                     input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); cq[k][c] = '{req: 1, we: we, addr: a, wdata: d, be: 4'hF};
    #1; while (!cp[k][c].gnt) begin @(negedge clk); #1; end
    @(negedge clk) cq[k][c] = '0;
    if (!we) begin
      #1; while (!cp[k][c].rvalid) begin @(negedge clk); #1; end
      r = cp[k][c].rdata;
    end
  endtask

  task automatic dma_copy(input int k, input int c, input logic [31:0] s, input logic [31:0] d,
                          input int n);
    logic [31:0] base = cluster_base(2'(k)) + DMA_OFFSET, r;
    acc(k, c, 1, base + 0, s, r);
    acc(k, c, 1, base + 4, d, r);
    acc(k, c, 1, base + 8, 32'(n), r);
    acc(k, c, 1, base + 12, 0, r);
  endtask

  task automatic dma_wait(input int k, input int c);
    logic [31:0] r;
    do acc(k, c, 0, cluster_base(2'(k)) + DMA_OFFSET + 16, 0, r); while (r != 0);
  endtask

  typedef struct {int idx; logic [31:0] addr;} job_t;
  job_t jobs [NCORE][$];
  int   njobs [NCORE];
  int   done_pkts = 0;

  // vector payload handler (the paper's Listing 1 with DMA writes)
  task automatic hpu(input int g, input int npk);
    int k = g % NCL, c = g / NCL, buf_sel = 0;
    for (int j = 0; j < npk; j++) begin
      job_t jb;
      logic [31:0] l1buf, host;
      while (jobs[g].size() == 0) @(negedge clk);
      jb = jobs[g].pop_front();
      l1buf = cluster_base(2'(k)) + 32'(c * 32'h4000 + buf_sel * PKT);
      buf_sel ^= 1;
      dma_copy(k, c, jb.addr, l1buf, PKT);
      dma_wait(k, c);
      host = HOST_BUF + 32'((jb.idx * PKT / BLK) * STRIDE);
      for (int b = 0; b < PKT / BLK; b++) begin
        dma_copy(k, c, l1buf + 32'(b * BLK), host, BLK);
        host += STRIDE;
      end
      done_pkts++;
    end
    dma_wait(k, c);
  endtask

  // ---------------- one message ----------------
  int pkt_seen = 0, ring_pkt = 0;
  always @(posedge clk) if (rst_n && pv && pr) begin
    automatic int g = (pkt_seen / DP) % NCORE;
    `CHECK(pl == PKT, "packet notice length")
    `CHECK(pa == L2_BASE + 32'((ring_pkt * PKT) % (1 << 20)), "packet notice address")
    jobs[g].push_back('{idx: pkt_seen, addr: pa});
    pkt_seen++;
    ring_pkt++;
  end

  task automatic send_msg(input int msg, input int gap_pct);
    for (int p = 0; p < NPKT; p++)
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        while ($urandom_range(99) < gap_pct) begin ni_v = 0; @(negedge clk); end
        ni_v = 1; ni_l = (b == BEATS - 1);
        for (int w = 0; w < 8; w++) ni_d[32*w +: 32] = payload_word(msg, p * PKT + b * 32 + w * 4);
        #1; while (!ni_r) begin @(negedge clk); #1; end
      end
    @(negedge clk) ni_v = 0;
  endtask

  task automatic run_msg(input int msg, input int npkt, input int gap_pct, output int cycles);
    int t0;
    int bad = 0;
    NPKT = npkt;
    host_mem.delete();
    host_bytes = 0;
    pkt_seen = 0;
    done_pkts = 0;
    foreach (njobs[g]) njobs[g] = 0;
    for (int p = 0; p < NPKT; p++) njobs[(p / DP) % NCORE]++;
    t0 = $time / 10;
    for (int g = 0; g < NCORE; g++) begin
      automatic int gg = g;
      if (njobs[gg] > 0) fork hpu(gg, njobs[gg]); join_none
    end
    send_msg(msg, gap_pct);
    wait fork;
    // the last writes may still be on their way to the host
    for (int i = 0; i < 2000 && host_bytes < NPKT * PKT; i++) @(negedge clk);
    cycles = last_host_cycle - t0;
    // every block lands where the vector type says; nothing else is written
    for (int o = 0; o < NPKT * PKT; o += 4) begin
      automatic int unsigned ad = (HOST_BUF + 32'((o / BLK) * STRIDE + o % BLK)) >> 2;
      if (!host_mem.exists(ad) || host_mem[ad] != payload_word(msg, o)) bad++;
    end
    `CHECK(bad == 0, $sformatf("message %0d: %0d host words wrong", msg, bad))
    `CHECK(host_bytes == NPKT * PKT, $sformatf("message %0d: %0d bytes written to host", msg, host_bytes))
  endtask

  initial begin
    int cyc;
    foreach (cq[k, c]) cq[k][c] = '0;
    ni_v = 0; ni_l = 0; ni_d = '0; pr = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // message 0: host always ready, network at full rate: throughput
    hostp = 100;
    run_msg(0, 256, 0, cyc);
    $display("message 0: %0d bytes in %0d cycles = %0d bit/cycle", NPKT * PKT, cyc, NPKT * PKT * 8 / cyc);
    `CHECK(NPKT * PKT * 8 / cyc >= 150, "message throughput at least 150 bit/cycle")
    // message 1: host stalls at random, network with gaps
    hostp = 40;
    run_msg(1, 320, 10, cyc);
    $display("message 1: %0d cycles", cyc);
    `CHECK(n_ni_stall > 0, "NI backpressure happened")
    `CHECK(n_host_stall > 0, "host backpressure happened")
    `CHECK(n_start_stall > 0, "DMA START held back")
    `CHECK(n_allbusy > 0, "all DMA channels of a cluster busy")
    `CHECK(n_duplex > 0, "DMA read and write in one cycle")
    for (int k = 0; k < NCL; k++) `CHECK(cl_used[k] > 0, $sformatf("cluster %0d streamed", k))
    $display("NI stalls %0d, host stalls %0d, START stalls %0d, all-busy %0d, duplex %0d",
             n_ni_stall, n_host_stall, n_start_stall, n_allbusy, n_duplex);
    `REPORT
  end
endmodule
