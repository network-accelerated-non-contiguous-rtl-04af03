// core_demux: sits on the data port of one core and sends each access to one
// of three places: the cluster's own L1 (through l1_xbar), the cluster's DMA
// engine registers, or everything else (through cluster_ext_xbar to the
// system crossbar, i.e. L2 and the host window).
//
// The decode uses the address map of spin_pkg and the cluster's index. The
// three paths have different latencies, so the demux lets a core have only one
// read in flight: while a read waits for its data no new request is passed on,
// except in the cycle its data returns. Read data is taken from the path the
// read went to. Request and grant are combinational. The paper names this
// block only ("Demux" in its cluster diagram); the decode and the
// one-outstanding-read rule are this design's choices.
module core_demux
  import spin_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [1:0] cluster_id_i,
  input  req32_t     core_req_i,
  output rsp32_t     core_rsp_o,
  output req32_t     l1_req_o,
  input  rsp32_t     l1_rsp_i,
  output req32_t     dma_req_o,
  input  rsp32_t     dma_rsp_i,
  output req32_t     ext_req_o,
  input  rsp32_t     ext_rsp_i
);
  target_e tgt, pend_tgt_q;
  logic    pend_q, allowed, resp;

  always_comb begin
    if (is_local_l1(core_req_i.addr, cluster_id_i))       tgt = TGT_L1;
    else if (is_local_dma(core_req_i.addr, cluster_id_i)) tgt = TGT_DMA;
    else                                                  tgt = TGT_EXT;
  end

  always_comb begin
    unique case (pend_tgt_q)
      TGT_L1:  begin resp = l1_rsp_i.rvalid;  core_rsp_o.rdata = l1_rsp_i.rdata;  end
      TGT_DMA: begin resp = dma_rsp_i.rvalid; core_rsp_o.rdata = dma_rsp_i.rdata; end
      default: begin resp = ext_rsp_i.rvalid; core_rsp_o.rdata = ext_rsp_i.rdata; end
    endcase
    core_rsp_o.rvalid = pend_q && resp;
    allowed = !pend_q || resp;

    l1_req_o      = core_req_i;
    dma_req_o     = core_req_i;
    ext_req_o     = core_req_i;
    l1_req_o.req  = core_req_i.req && allowed && (tgt == TGT_L1);
    dma_req_o.req = core_req_i.req && allowed && (tgt == TGT_DMA);
    ext_req_o.req = core_req_i.req && allowed && (tgt == TGT_EXT);
    unique case (tgt)
      TGT_L1:  core_rsp_o.gnt = l1_rsp_i.gnt  && l1_req_o.req;
      TGT_DMA: core_rsp_o.gnt = dma_rsp_i.gnt && dma_req_o.req;
      default: core_rsp_o.gnt = ext_rsp_i.gnt && ext_req_o.req;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q     <= 1'b0;
      pend_tgt_q <= TGT_L1;
    end else if (core_rsp_o.gnt && !core_req_i.we) begin
      pend_q     <= 1'b1;
      pend_tgt_q <= tgt;
    end else if (core_rsp_o.rvalid) begin
      pend_q     <= 1'b0;
    end
  end
endmodule
