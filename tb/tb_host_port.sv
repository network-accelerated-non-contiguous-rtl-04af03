// tb_host_port: writes a sequence of beats into the host port while the host
// side accepts at random, and checks that they leave in order with address,
// data and byte enables intact, that a full FIFO refuses writes, and that a
// read answers zero one cycle later.
`include "tb/tb_check.svh"
module tb_host_port;
  import spin_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  req256_t req;
  rsp256_t rsp;
  logic ov, ordy;
  logic [31:0] oa, ob;
  logic [255:0] od;
  int n_full = 0;

  host_port #(.DEPTH(16)) u_dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_rsp_o(rsp),
    .out_valid_o(ov), .out_ready_i(ordy), .out_addr_o(oa), .out_data_o(od), .out_be_o(ob));

  `WATCHDOG(20000)

  localparam int N = 200;
  int sent = 0, recv = 0;
  logic ready_en = 0;

  always @(negedge clk) ordy <= ready_en && ($urandom_range(3) == 0);

  // receiver: checks order and content
  always @(posedge clk) if (rst_n && ov && ordy) begin
    `CHECK(oa == HOST_BASE + 32'(recv) * 32 && od == {8{32'(recv) ^ 32'hA5A5_0000}} && ob == 32'(recv) * 7,
           $sformatf("beat %0d out of order or corrupt", recv))
    recv++;
  end

  initial begin
    req = '0; ordy = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill while the host is stalled: exactly DEPTH writes must be taken
    while (sent < N) begin
      @(negedge clk);
      if (n_full > 20) ready_en = 1;
      req = '{req: 1, we: 1, addr: HOST_BASE + 32'(sent) * 32, wdata: {8{32'(sent) ^ 32'hA5A5_0000}},
              be: 32'(sent) * 7};
      #1;
      if (rsp.gnt) sent++;
      else begin
        if (n_full++ < 5) `CHECK(sent - recv >= 16, "write refused although the FIFO has room")
      end
    end
    @(negedge clk) req = '{req: 1, we: 0, addr: HOST_BASE, wdata: '0, be: '0};
    #1 `CHECK(rsp.gnt, "read granted")
    @(negedge clk) req = '0;
    `CHECK(rsp.rvalid && rsp.rdata == '0, "read answers zero")
    while (recv < N) @(negedge clk);
    `CHECK(n_full > 0, "FIFO-full backpressure was exercised")
    `REPORT
  end
endmodule
