// dwc_buf: data-width converter and buffer between one 64-bit cluster
// channel and the 256-bit system crossbar ("DWC + Buf" in the paper's
// diagram).
//
// The paper's interconnect is AXI, where an upsizer packs the 64-bit beats
// of a burst into 256-bit beats, so that four clusters at 64 bit/cycle fill
// one 256-bit crossbar port. This protocol has no bursts, so the converter
// packs consecutive accesses to the same 32-byte line itself:
//  - Writes. Requests enter a FIFO of BUF entries, each holding a whole
//    line (256-bit data, 32 byte enables). A write to the same line as the
//    newest FIFO entry, if that entry is a write not being sent this cycle,
//    is merged into it. The oldest entry is sent once its line is complete,
//    once a newer entry stands behind it, or in a cycle with no new request,
//    so a lone write waits at most until the stream pauses.
//  - Reads. A read to the same line as the read accepted in the previous
//    cycle is marked "reuse" and never goes downstream; it is answered from
//    the line fetched for the earlier read. The chain breaks after any cycle
//    without a read, so a reused line is at most a few cycles old (the same
//    window an AXI burst gives).
// Returned lines wait in a FIFO of OUTST lines; responses go back in order,
// one per cycle, each cut down to its 64-bit lane (address bits [4:3]).
// Upstream grant is "FIFO not full", one cycle after the request at the
// earliest the request is on the 256-bit bus, and read data comes back one
// cycle after the line arrives. The paper gives the block's name and its
// two widths; the packing rules and sizes are this design's.
module dwc_buf
  import spin_pkg::*;
#(
  parameter int unsigned BUF   = 4,
  parameter int unsigned OUTST = 4
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  req64_t  slv_req_i,
  output rsp64_t  slv_rsp_o,
  output req256_t mst_req_o,
  input  rsp256_t mst_rsp_i
);
  localparam int unsigned BW = $clog2(BUF);
  localparam int unsigned OW = $clog2(OUTST);

  typedef struct packed {
    logic         we;
    logic         reuse;
    logic [31:0]  addr;
    logic [255:0] wdata;
    logic [31:0]  be;
  } ent_t;

  typedef struct packed {
    logic       reuse;
    logic [1:0] lane;
  } lane_t;

  ent_t  [BUF-1:0]         q_q;
  logic  [BW-1:0]          qw_q, qr_q, tl;
  logic  [BW:0]            qc_q;
  lane_t [OUTST-1:0]       lane_q;
  logic  [OW-1:0]          lw_q, lr_q;
  logic  [OW:0]            lc_q;
  logic  [OUTST-1:0][255:0] line_q;
  logic  [OW-1:0]          fw_q, fr_q;
  logic  [OW:0]            fc_q;
  logic  [255:0]           cur_q;
  logic                    rd_chain_q;
  logic  [26:0]            rd_line_q;

  logic                    acc, merge, push, pop, send, lpush, lpop, fpop;
  logic  [31:0]            wbe;
  logic  [255:0]           wdat, mdat;
  ent_t                    hd;
  lane_t                   lh;

  assign hd   = q_q[qr_q];
  assign tl   = qw_q - 1'b1;
  assign lh   = lane_q[lr_q];
  assign acc  = slv_req_i.req && slv_rsp_o.gnt;
  assign wbe  = 32'(slv_req_i.be) << (8 * slv_req_i.addr[4:3]);
  assign wdat = {4{slv_req_i.wdata}};
  assign slv_rsp_o.gnt = qc_q != (BW+1)'(BUF);

  always_comb
    for (int b = 0; b < 32; b++)
      mdat[8*b +: 8] = wbe[b] ? wdat[8*b +: 8] : q_q[tl].wdata[8*b +: 8];

  // downstream side
  always_comb begin
    send = 1'b0;
    if (qc_q != 0) begin
      if (hd.we)         send = (&hd.be) || qc_q > 1 || !slv_req_i.req;
      else if (!hd.reuse) send = lc_q != (OW+1)'(OUTST);
    end
    mst_req_o.req   = send;
    mst_req_o.we    = hd.we;
    mst_req_o.addr  = {hd.addr[31:5], 5'b0};
    mst_req_o.wdata = hd.wdata;
    mst_req_o.be    = hd.we ? hd.be : '1;
  end
  assign pop   = (send && mst_rsp_i.gnt) ||
                 (qc_q != 0 && !hd.we && hd.reuse && lc_q != (OW+1)'(OUTST));
  assign lpush = pop && !hd.we;
  assign merge = acc && slv_req_i.we && qc_q != 0 && q_q[tl].we &&
                 q_q[tl].addr[31:5] == slv_req_i.addr[31:5] && !(qc_q == 1 && pop);
  assign push  = acc && !merge;

  // response side
  assign fpop = lc_q != 0 && !lh.reuse && fc_q != 0;
  assign lpop = lc_q != 0 && (lh.reuse || fc_q != 0);
  assign slv_rsp_o.rvalid = lpop;
  assign slv_rsp_o.rdata  = lh.reuse ? cur_q[64*lh.lane +: 64] : line_q[fr_q][64*lh.lane +: 64];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      qw_q <= '0; qr_q <= '0; qc_q <= '0;
      lw_q <= '0; lr_q <= '0; lc_q <= '0;
      fw_q <= '0; fr_q <= '0; fc_q <= '0;
      rd_chain_q <= 1'b0;
      rd_line_q  <= '0;
    end else begin
      if (merge) begin
        q_q[tl].wdata <= mdat;
        q_q[tl].be    <= q_q[tl].be | wbe;
      end
      if (push) begin
        q_q[qw_q] <= '{we: slv_req_i.we,
                       reuse: !slv_req_i.we && rd_chain_q && rd_line_q == slv_req_i.addr[31:5],
                       addr: slv_req_i.addr, wdata: wdat,
                       be: slv_req_i.we ? wbe : 32'hFFFF_FFFF};
        qw_q <= qw_q + 1'b1;
      end
      rd_chain_q <= acc && !slv_req_i.we;
      if (acc && !slv_req_i.we) rd_line_q <= slv_req_i.addr[31:5];
      if (pop) qr_q <= qr_q + 1'b1;
      qc_q <= qc_q + (BW+1)'(push) - (BW+1)'(pop);

      if (lpush) begin
        lane_q[lw_q] <= '{reuse: hd.reuse, lane: hd.addr[4:3]};
        lw_q         <= lw_q + 1'b1;
      end
      if (lpop) lr_q <= lr_q + 1'b1;
      lc_q <= lc_q + (OW+1)'(lpush) - (OW+1)'(lpop);

      if (mst_rsp_i.rvalid) begin
        line_q[fw_q] <= mst_rsp_i.rdata;
        fw_q         <= fw_q + 1'b1;
      end
      if (fpop) begin
        cur_q <= line_q[fr_q];
        fr_q  <= fr_q + 1'b1;
      end
      fc_q <= fc_q + (OW+1)'(mst_rsp_i.rvalid) - (OW+1)'(fpop);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) mst_rsp_i.rvalid |-> fc_q != (OW+1)'(OUTST))
    else $error("dwc_buf: line FIFO overflow");
endmodule
