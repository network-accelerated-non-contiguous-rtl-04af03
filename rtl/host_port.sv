// host_port: the accelerator's 256-bit output port on the PCIe side. It is a
// slave of the system crossbar: every write into the host window is pushed,
// with its address and byte enables, into a FIFO of DEPTH entries and leaves
// as a valid/ready stream towards the host interface, one 256-bit beat per
// cycle. A write is granted only while the FIFO has room, so a slow host
// stalls the writers. The window is write-only: a read is granted and answers
// zero one cycle later. The paper's own testbed models the PCIe side as a
// FIFO as well; the depth and the read behaviour are this design's choices.
module host_port
  import spin_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  req256_t      slv_req_i,
  output rsp256_t      slv_rsp_o,
  output logic         out_valid_o,
  input  logic         out_ready_i,
  output logic [31:0]  out_addr_o,
  output logic [255:0] out_data_o,
  output logic [31:0]  out_be_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DEPTH-1:0][31:0]  a_q, b_q;
  logic [DEPTH-1:0][255:0] d_q;
  logic [AW-1:0]           wp_q, rp_q;
  logic [AW:0]             cnt_q;
  logic                    push, pop, rd_q;

  assign slv_rsp_o.gnt    = slv_req_i.req && (!slv_req_i.we || cnt_q != (AW+1)'(DEPTH));
  assign slv_rsp_o.rvalid = rd_q;
  assign slv_rsp_o.rdata  = '0;
  assign push        = slv_rsp_o.gnt && slv_req_i.we;
  assign pop         = out_valid_o && out_ready_i;
  assign out_valid_o = cnt_q != 0;
  assign out_addr_o  = a_q[rp_q];
  assign out_data_o  = d_q[rp_q];
  assign out_be_o    = b_q[rp_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
      rd_q  <= 1'b0;
    end else begin
      rd_q <= slv_rsp_o.gnt && !slv_req_i.we;
      if (push) begin
        a_q[wp_q] <= slv_req_i.addr;
        d_q[wp_q] <= slv_req_i.wdata;
        b_q[wp_q] <= slv_req_i.be;
        wp_q      <= wp_q + 1'b1;
      end
      if (pop) rp_q <= rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
