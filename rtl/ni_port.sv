// ni_port: the accelerator's 256-bit input port on the network side. Packets
// arrive as a stream of 256-bit beats (valid/ready, `last` on the final beat
// of a packet) and are written, one beat per cycle, into a ring buffer in L2
// of RING_BYTES starting at RING_BASE. When the last beat of a packet has
// been written, a notice {start address, length in bytes} is put into a
// small FIFO and offered on the pkt_* handshake: this is what a handler
// scheduler or runtime uses to start the payload handler for that packet.
//
// A beat is accepted (in_ready_o) in the cycle the crossbar grants its write
// and only while the notice FIFO has room. The ring simply wraps; the
// consumer must have released old packets before the ring comes round (the
// paper says nothing of packet-buffer flow control). The paper gives the
// port width and that new packets are first placed in L2; the stream
// handshake, the ring and the notices are this design's choices.
module ni_port
  import spin_pkg::*;
#(
  parameter logic [31:0] RING_BASE  = 32'h1C00_0000,
  parameter int unsigned RING_BYTES = 1 << 20,
  parameter int unsigned NQ         = 8
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // network stream
  input  logic         in_valid_i,
  output logic         in_ready_o,
  input  logic [255:0] in_data_i,
  input  logic         in_last_i,
  // packet notices
  output logic         pkt_valid_o,
  input  logic         pkt_ready_i,
  output logic [31:0]  pkt_addr_o,
  output logic [31:0]  pkt_len_o,
  // system crossbar master (writes only)
  output req256_t      mst_req_o,
  input  rsp256_t      mst_rsp_i
);
  localparam int unsigned QW = $clog2(NQ);

  logic [31:0]          off_q, start_q;
  logic [NQ-1:0][63:0]  nq_q;
  logic [QW-1:0]        nw_q, nr_q;
  logic [QW:0]          nc_q;
  logic                 room, beat, npush, npop;
  logic [31:0]          next_off;

  assign room        = nc_q != (QW+1)'(NQ);
  assign mst_req_o   = '{req: in_valid_i && room, we: 1'b1, addr: RING_BASE + off_q,
                         wdata: in_data_i, be: '1};
  assign beat        = mst_req_o.req && mst_rsp_i.gnt;
  assign in_ready_o  = beat;
  assign npush       = beat && in_last_i;
  assign npop        = pkt_valid_o && pkt_ready_i;
  assign pkt_valid_o = nc_q != 0;
  assign pkt_addr_o  = nq_q[nr_q][63:32];
  assign pkt_len_o   = nq_q[nr_q][31:0];
  assign next_off    = (off_q + 32'd32 >= 32'(RING_BYTES)) ? 32'd0 : off_q + 32'd32;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      off_q   <= '0;
      start_q <= '0;
      nw_q    <= '0;
      nr_q    <= '0;
      nc_q    <= '0;
    end else begin
      if (beat) begin
        off_q <= next_off;
        if (in_last_i) start_q <= next_off;
      end
      if (npush) begin
        // length counts the beats since the packet started, ring wrap included
        nq_q[nw_q] <= {RING_BASE + start_q,
                       (off_q >= start_q ? off_q - start_q : off_q + 32'(RING_BYTES) - start_q) + 32'd32};
        nw_q <= nw_q + 1'b1;
      end
      if (npop) nr_q <= nr_q + 1'b1;
      nc_q <= nc_q + (QW+1)'(npush) - (QW+1)'(npop);
    end
  end
endmodule
