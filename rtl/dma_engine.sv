// dma_engine: the multi-channel DMA of one cluster. It copies data between
// the cluster's L1 and the rest of the system (L2, the host window) at one
// 64-bit beat per cycle, which is the per-cluster share of the 256-bit line
// rate in the paper (four clusters x 64 bit).
//
// Programming. Every core has its own register set in the cluster's DMA
// window (offsets from DMA_OFFSET): 0x00 SRC, 0x04 DST, 0x08 LEN in bytes,
// and a write to 0x0C START launches the copy. A read of 0x0C returns the
// busy bit of every channel; a read of 0x10 returns how many of this core's
// copies are not yet complete, which a handler polls before it ends. START
// is granted when a channel is free (lowest free one, cores served
// round-robin), so a core simply stalls while all NCH channels are busy.
// A zero-length copy completes at once. Addresses must be 8-byte aligned and
// LEN a multiple of 8 (a shorter last beat is written in full).
//
// Operation. The engine has two issue pipelines, one per source: pipeline 0
// serves channels whose source lies outside this cluster's L1 (reads on the
// system port), pipeline 1 channels whose source is this cluster's L1 (reads
// on the L1 port). Each pipeline issues one 8-byte read per cycle, so data
// can come in and go out of the cluster at 64 bit/cycle each at the same
// time. Within a pipeline the channels take turns (round-robin); a channel
// keeps its turn until it reaches the end of a 32-byte line (or of its
// copy), so that system-side accesses come in runs that the width converter
// packs into whole 256-bit lines, as AXI bursts would be. Each read takes an
// entry in its pipeline's in-order tracker of DEPTH entries, which holds the
// destination; data fills the entries in order and the oldest filled entry
// is written to its destination, on the L1 port if the destination is this
// cluster's L1 and on the system port otherwise. When both pipelines want
// the same write port they alternate. A copy is complete when its last beat
// has been written. The paper states only that each cluster has a
// multi-channel DMA moving 64 bit/cycle in each direction; the two
// pipelines and separate read and write ports follow from that, the
// register map, channel count and tracker are this design's.
module dma_engine
  import spin_pkg::*;
#(
  parameter int unsigned  NCORES = 8,
  parameter int unsigned  NCH    = 4,
  parameter int unsigned  DEPTH  = 8,   // power of two
  localparam int unsigned CW     = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned HW     = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned DPW    = $clog2(DEPTH)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [1:0]          cluster_id_i,
  input  req32_t [NCORES-1:0] cfg_req_i,
  output rsp32_t [NCORES-1:0] cfg_rsp_o,
  output req64_t              l1_rd_req_o,
  input  rsp64_t              l1_rd_rsp_i,
  output req64_t              l1_wr_req_o,
  input  rsp64_t              l1_wr_rsp_i,
  output req64_t              ext_rd_req_o,
  input  rsp64_t              ext_rd_rsp_i,
  output req64_t              ext_wr_req_o,
  input  rsp64_t              ext_wr_rsp_i,
  output logic [NCH-1:0]      busy_o
);
  typedef struct packed {
    logic [31:0]   dst;
    logic          dst_l1;
    logic          last;
    logic [CW-1:0] owner;
  } trk_t;

  // ---------------- per-core registers ----------------
  logic [NCORES-1:0][31:0] src_q, dst_q, len_q;
  logic [NCORES-1:0][7:0]  pend_q;
  logic [NCORES-1:0]       cfg_rvalid_q;
  logic [NCORES-1:0][31:0] cfg_rdata_q;
  logic [NCORES-1:0]       start_req;
  logic [CW-1:0]           l_win;
  logic                    l_any, have_free, launch;
  logic [HW-1:0]           free_ch;

  // ---------------- channels ----------------
  logic [NCH-1:0]          ch_act_q, ch_l1_q;
  logic [NCH-1:0][31:0]    ch_src_q, ch_dst_q, ch_rem_q;
  logic [NCH-1:0][CW-1:0]  ch_own_q;

  // ---------------- per pipeline (0: system source, 1: L1 source) ----------------
  logic [1:0][NCH-1:0]     p_req;
  logic [1:0][HW-1:0]      p_ch;
  logic [1:0]              p_any, rd_want, rd_go, line_end, last_beat;
  logic [1:0][31:0]        p_src, p_dst, p_rem;
  trk_t [1:0][DEPTH-1:0]   trk_q;
  logic [1:0][DEPTH-1:0][63:0] dat_q;
  logic [1:0][DEPTH-1:0]   full_q;
  logic [1:0][DPW-1:0]     wp_q, fp_q, rp_q;
  logic [1:0][DPW:0]       cnt_q;
  logic [1:0]              resp, wr_want, wr_go;
  trk_t [1:0]              head;
  // write ports (0: system, 1: L1): which pipeline wins, alternation state
  logic [1:0]              w_sel, w_turn_q;

  always_comb
    for (int unsigned c = 0; c < NCORES; c++)
      start_req[c] = cfg_req_i[c].req && cfg_req_i[c].we && cfg_req_i[c].addr[7:0] == 8'h0C;

  rr_arb #(.N(NCORES)) u_larb (
    .clk_i, .rst_ni, .req_i(start_req), .ack_i(launch), .idx_o(l_win), .valid_o(l_any)
  );

  always_comb begin
    have_free = 1'b0;
    free_ch   = '0;
    for (int i = NCH - 1; i >= 0; i--)
      if (!ch_act_q[i]) begin
        have_free = 1'b1;
        free_ch   = HW'(i);
      end
  end
  // a zero-length copy needs no channel
  assign launch = l_any && (have_free || len_q[l_win] == 0);

  always_comb
    for (int unsigned c = 0; c < NCORES; c++) begin
      cfg_rsp_o[c].gnt    = cfg_req_i[c].req && (!start_req[c] || (launch && l_win == CW'(c)));
      cfg_rsp_o[c].rvalid = cfg_rvalid_q[c];
      cfg_rsp_o[c].rdata  = cfg_rdata_q[c];
    end

  // ---------------- read issue ----------------
  for (genvar p = 0; p < 2; p++) begin : g_pipe
    assign p_req[p] = ch_act_q & (p == 1 ? ch_l1_q : ~ch_l1_q);
    rr_arb #(.N(NCH)) u_carb (
      .clk_i, .rst_ni, .req_i(p_req[p]), .ack_i(line_end[p]), .idx_o(p_ch[p]), .valid_o(p_any[p])
    );
    assign p_src[p]     = ch_src_q[p_ch[p]];
    assign p_dst[p]     = ch_dst_q[p_ch[p]];
    assign p_rem[p]     = ch_rem_q[p_ch[p]];
    assign last_beat[p] = p_rem[p] <= 32'd8;
    assign rd_want[p]   = p_any[p] && (cnt_q[p] < (DPW+1)'(DEPTH));
    assign head[p]      = trk_q[p][rp_q[p]];
    assign wr_want[p]   = (cnt_q[p] != 0) && full_q[p][rp_q[p]];
  end

  always_comb begin
    l1_rd_req_o  = '0;
    ext_rd_req_o = '0;
    if (rd_want[1]) l1_rd_req_o  = '{req: 1'b1, we: 1'b0, addr: p_src[1], wdata: '0, be: 8'hFF};
    if (rd_want[0]) ext_rd_req_o = '{req: 1'b1, we: 1'b0, addr: p_src[0], wdata: '0, be: 8'hFF};
  end

  // grants are looked at apart from the requests they answer
  always_comb begin
    rd_go[1]    = rd_want[1] && l1_rd_rsp_i.gnt;
    rd_go[0]    = rd_want[0] && ext_rd_rsp_i.gnt;
    line_end[0] = rd_go[0] && (last_beat[0] || p_src[0][4:3] == 2'b11);
    line_end[1] = rd_go[1] && (last_beat[1] || p_src[1][4:3] == 2'b11);
    resp        = {l1_rd_rsp_i.rvalid, ext_rd_rsp_i.rvalid};
  end

  // ---------------- write-back ----------------
  always_comb begin
    l1_wr_req_o  = '0;
    ext_wr_req_o = '0;
    for (int unsigned w = 0; w < 2; w++) begin
      logic a0, a1;
      a0 = wr_want[0] && head[0].dst_l1 == w[0];
      a1 = wr_want[1] && head[1].dst_l1 == w[0];
      w_sel[w] = a1 && (!a0 || w_turn_q[w]);
      if (a0 || a1) begin
        if (w == 1) l1_wr_req_o  = '{req: 1'b1, we: 1'b1, addr: head[w_sel[w]].dst,
                                     wdata: dat_q[w_sel[w]][rp_q[w_sel[w]]], be: 8'hFF};
        else        ext_wr_req_o = '{req: 1'b1, we: 1'b1, addr: head[w_sel[w]].dst,
                                     wdata: dat_q[w_sel[w]][rp_q[w_sel[w]]], be: 8'hFF};
      end
    end
  end

  always_comb begin
    wr_go = '0;
    for (int unsigned w = 0; w < 2; w++)
      if ((wr_want[0] && head[0].dst_l1 == w[0]) || (wr_want[1] && head[1].dst_l1 == w[0]))
        if (w == 1 ? l1_wr_rsp_i.gnt : ext_wr_rsp_i.gnt) wr_go[w_sel[w]] = 1'b1;
  end

  assign busy_o = ch_act_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ch_act_q     <= '0;
      pend_q       <= '0;
      cfg_rvalid_q <= '0;
      full_q       <= '0;
      wp_q         <= '0;
      fp_q         <= '0;
      rp_q         <= '0;
      cnt_q        <= '0;
      w_turn_q     <= '0;
    end else begin
      // register writes and reads
      for (int unsigned c = 0; c < NCORES; c++) begin
        cfg_rvalid_q[c] <= cfg_rsp_o[c].gnt && !cfg_req_i[c].we;
        if (cfg_rsp_o[c].gnt) begin
          if (cfg_req_i[c].we) begin
            unique case (cfg_req_i[c].addr[7:0])
              8'h00:   src_q[c] <= cfg_req_i[c].wdata;
              8'h04:   dst_q[c] <= cfg_req_i[c].wdata;
              8'h08:   len_q[c] <= cfg_req_i[c].wdata;
              default: ;
            endcase
          end else begin
            unique case (cfg_req_i[c].addr[7:0])
              8'h00:   cfg_rdata_q[c] <= src_q[c];
              8'h04:   cfg_rdata_q[c] <= dst_q[c];
              8'h08:   cfg_rdata_q[c] <= len_q[c];
              8'h0C:   cfg_rdata_q[c] <= 32'(ch_act_q);
              8'h10:   cfg_rdata_q[c] <= 32'(pend_q[c]);
              default: cfg_rdata_q[c] <= '0;
            endcase
          end
        end
      end

      // pending copies per core
      for (int unsigned c = 0; c < NCORES; c++)
        pend_q[c] <= pend_q[c]
                   + 8'(launch && l_win == CW'(c) && len_q[c] != 0)
                   - 8'(wr_go[0] && head[0].last && head[0].owner == CW'(c))
                   - 8'(wr_go[1] && head[1].last && head[1].owner == CW'(c));

      // launch into a free channel
      if (launch && len_q[l_win] != 0) begin
        ch_act_q[free_ch] <= 1'b1;
        ch_l1_q[free_ch]  <= is_local_l1(src_q[l_win], cluster_id_i);
        ch_src_q[free_ch] <= src_q[l_win];
        ch_dst_q[free_ch] <= dst_q[l_win];
        ch_rem_q[free_ch] <= len_q[l_win];
        ch_own_q[free_ch] <= l_win;
      end

      for (int unsigned w = 0; w < 2; w++)
        if (wr_want[0] && wr_want[1] && head[0].dst_l1 == w[0] && head[1].dst_l1 == w[0] &&
            (w == 1 ? l1_wr_rsp_i.gnt : ext_wr_rsp_i.gnt))
          w_turn_q[w] <= !w_sel[w];

      for (int unsigned p = 0; p < 2; p++) begin
        // read issue (the two pipelines never serve the same channel)
        if (rd_go[p]) begin
          trk_q[p][wp_q[p]]  <= '{dst: p_dst[p], dst_l1: is_local_l1(p_dst[p], cluster_id_i),
                                  last: last_beat[p], owner: ch_own_q[p_ch[p]]};
          full_q[p][wp_q[p]] <= 1'b0;
          wp_q[p]            <= wp_q[p] + 1'b1;
          ch_src_q[p_ch[p]]  <= p_src[p] + 32'd8;
          ch_dst_q[p_ch[p]]  <= p_dst[p] + 32'd8;
          ch_rem_q[p_ch[p]]  <= last_beat[p] ? 32'd0 : p_rem[p] - 32'd8;
          if (last_beat[p]) ch_act_q[p_ch[p]] <= 1'b0;
        end
        // read data, in order per port
        if (resp[p]) begin
          dat_q[p][fp_q[p]]  <= p == 1 ? l1_rd_rsp_i.rdata : ext_rd_rsp_i.rdata;
          full_q[p][fp_q[p]] <= 1'b1;
          fp_q[p]            <= fp_q[p] + 1'b1;
        end
        if (wr_go[p]) rp_q[p] <= rp_q[p] + 1'b1;
        cnt_q[p] <= cnt_q[p] + (DPW+1)'(rd_go[p]) - (DPW+1)'(wr_go[p]);
      end
    end
  end

  // a read response must belong to an issued read
  assert property (@(posedge clk_i) disable iff (!rst_ni) resp[0] |-> cnt_q[0] != 0)
    else $error("dma_engine: unexpected system read data");
  assert property (@(posedge clk_i) disable iff (!rst_ni) resp[1] |-> cnt_q[1] != 0)
    else $error("dma_engine: unexpected L1 read data");
endmodule
