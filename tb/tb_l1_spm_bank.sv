// tb_l1_spm_bank: checks the l1 scratchpad bank at its full size against a
// software copy: random writes with random byte enables over the whole
// address range, then reads checked for data and for the one-cycle latency.
`include "tb/tb_check.svh"
module tb_l1_spm_bank;
  localparam int unsigned DW = 32, DEPTH = 16384, AW = $clog2(DEPTH), BW = DW / 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic          req = 0, we = 0, gnt, rvalid;
  logic [AW-1:0] addr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [BW-1:0] be = '0;
  logic [DW-1:0] model [int];

  l1_spm_bank u_dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr),
                     .wdata_i(wdata), .be_i(be), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata));

  `WATCHDOG(20000)

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] r;
    for (int i = 0; i < DW / 32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  int unsigned a [256];
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) a[i] = (i < 2) ? (i == 0 ? 0 : DEPTH - 1) : $urandom_range(DEPTH - 1);
    // full-word writes so every tested row has a known value
    foreach (a[i]) begin
      @(negedge clk); req = 1; we = 1; addr = AW'(a[i]); wdata = rnd(); be = '1;
      model[a[i]] = wdata;
      #1 `CHECK(gnt, "bank must always grant")
    end
    // partial writes
    for (int i = 0; i < 256; i++) begin
      automatic int unsigned k = a[$urandom_range(255)];
      @(negedge clk); req = 1; we = 1; addr = AW'(k); wdata = rnd(); be = BW'(rnd());
      for (int b = 0; b < BW; b++) if (be[b]) model[k][8*b +: 8] = wdata[8*b +: 8];
    end
    // reads, one per cycle, data due in the next cycle
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); req = 1; we = 0; addr = AW'(a[i]);
      @(negedge clk); req = 0;
      `CHECK(rvalid, "rvalid one cycle after a read")
      `CHECK(rdata == model[a[i]], $sformatf("row %0d data", a[i]))
    end
    @(negedge clk);
    `CHECK(!rvalid, "no rvalid without a read")
    `REPORT
  end
endmodule
