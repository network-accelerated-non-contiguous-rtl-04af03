// tb_ni_port: streams packets of random length into the network port of a
// small ring (4 KiB) over a memory that grants at random, with the notice
// consumer sometimes stalled. Checks every beat's L2 address and data, each
// notice's start address and length, the wrap of the ring and that the port
// holds the network back when the notice FIFO is full.
`include "tb/tb_check.svh"
module tb_ni_port;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int RING = 4096;
  logic iv, ir, il, pv, pr;
  logic [255:0] id;
  logic [31:0] pa, pl;
  req256_t mq;
  rsp256_t mp;
  int n_full_stall = 0, n_wrap = 0;
  logic cons_en = 0;

  ni_port #(.RING_BASE(L2_BASE), .RING_BYTES(RING), .NQ(4)) u_dut (.clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(iv), .in_ready_o(ir), .in_data_i(id), .in_last_i(il),
    .pkt_valid_o(pv), .pkt_ready_i(pr), .pkt_addr_o(pa), .pkt_len_o(pl),
    .mst_req_o(mq), .mst_rsp_i(mp));
  tb_mem_slave #(.DW(256), .LAT(1), .GNT_PCT(70)) u_mem (.clk_i(clk), .rst_ni(rst_n),
    .req_i(mq.req), .we_i(mq.we), .addr_i(mq.addr), .wdata_i(mq.wdata), .be_i(mq.be),
    .gnt_o(mp.gnt), .rvalid_o(mp.rvalid), .rdata_o(mp.rdata));

  `WATCHDOG(100000)

  typedef struct {logic [31:0] a; logic [31:0] l;} note_t;
  note_t notes[$];
  always @(negedge clk) pr <= cons_en && $urandom_range(1);
  always @(posedge clk) if (rst_n) begin
    if (pv && pr) begin
      `CHECK(notes.size() > 0 && pa == notes[0].a && pl == notes[0].l, "packet notice address/length")
      void'(notes.pop_front());
    end
    if (iv && !ir && u_dut.nc_q == 4) n_full_stall++;
    if (n_full_stall > 10) cons_en <= 1;
    if (mq.req && mp.gnt) `CHECK(mq.wdata == id && mq.be == '1, "beat data written unchanged")
  end

  function automatic logic [255:0] beat(input int p, input int k);
    return {8{32'(p) << 16 | 32'(k)}};
  endfunction

  initial begin
    int off = 0;
    iv = 0; il = 0; id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      automatic int nb = $urandom_range(1, 12);
      automatic int start = off;
      for (int k = 0; k < nb; k++) begin
        @(negedge clk); iv = 1; id = beat(p, k); il = (k == nb - 1);
        #1 `CHECK(mq.addr == L2_BASE + 32'(off), "beat written at the ring position")
        while (!ir) begin @(negedge clk); #1; end
        off += 32;
        if (off == RING) begin off = 0; n_wrap++; end
      end
      notes.push_back('{a: L2_BASE + 32'(start), l: 32'(nb * 32)});
    end
    @(negedge clk) iv = 0;
    repeat (50) @(negedge clk);
    `CHECK(notes.size() == 0, "all notices delivered")
    // the last ring contents must hold the most recent beats
    `CHECK(u_mem.peek(L2_BASE + 32'(off) - 32) != '0, "ring written")
    `CHECK(n_wrap > 0, "ring wrapped")
    `CHECK(n_full_stall > 0, "notice FIFO full held the network back")
    `REPORT
  end
endmodule
