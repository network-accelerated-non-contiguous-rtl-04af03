// mem_xbar: generic NM-master, NS-slave crossbar for the request/grant bus of
// spin_pkg, at any data width.
//
// Each master presents, with its request, the index of the slave it targets
// (the wrappers l1_xbar, cluster_ext_xbar and soc_xbar decode addresses into
// that index). Every slave has its own rr_arb, so masters aimed at different
// slaves proceed in the same cycle; the request path is combinational, the
// grant goes back in the same cycle. For every granted read the winner's index
// is pushed into a per-slave FIFO of OUTST entries, and each `rvalid` of that
// slave is returned to the master at the FIFO's head, so slaves may have any
// latency of at least one cycle as long as they answer in order. A slave stops
// taking requests while its FIFO is full. Masters must not have reads to two
// slaves of different latency outstanding at once (an assertion checks that
// two slaves never answer the same master together).
module mem_xbar #(
  parameter int unsigned  NM    = 2,
  parameter int unsigned  NS    = 2,
  parameter int unsigned  DW    = 32,
  parameter int unsigned  OUTST = 8,
  parameter logic [NM-1:0] PRIO = '0,
  localparam int unsigned SW    = (NS > 1) ? $clog2(NS) : 1,
  localparam int unsigned MW    = (NM > 1) ? $clog2(NM) : 1,
  localparam int unsigned BW    = DW / 8
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // masters
  input  logic [NM-1:0]          m_req_i,
  input  logic [NM-1:0][SW-1:0]  m_sel_i,
  input  logic [NM-1:0]          m_we_i,
  input  logic [NM-1:0][31:0]    m_addr_i,
  input  logic [NM-1:0][DW-1:0]  m_wdata_i,
  input  logic [NM-1:0][BW-1:0]  m_be_i,
  output logic [NM-1:0]          m_gnt_o,
  output logic [NM-1:0]          m_rvalid_o,
  output logic [NM-1:0][DW-1:0]  m_rdata_o,
  // slaves
  output logic [NS-1:0]          s_req_o,
  output logic [NS-1:0]          s_we_o,
  output logic [NS-1:0][31:0]    s_addr_o,
  output logic [NS-1:0][DW-1:0]  s_wdata_o,
  output logic [NS-1:0][BW-1:0]  s_be_o,
  input  logic [NS-1:0]          s_gnt_i,
  input  logic [NS-1:0]          s_rvalid_i,
  input  logic [NS-1:0][DW-1:0]  s_rdata_i
);
  localparam int unsigned OW = (OUTST > 1) ? $clog2(OUTST) : 1;

  logic [NS-1:0][MW-1:0] win;
  logic [NS-1:0]         any;
  logic [NS-1:0][NM-1:0] sreq;
  logic [NS-1:0]         full;
  logic [NS-1:0][MW-1:0] head;

  for (genvar s = 0; s < NS; s++) begin : g_slave
    logic [OUTST-1:0][MW-1:0] fifo_q;
    logic [OW-1:0]            wp_q, rp_q;
    logic [OW:0]              cnt_q;
    logic                     push, pop;

    always_comb
      for (int unsigned m = 0; m < NM; m++)
        sreq[s][m] = m_req_i[m] && (m_sel_i[m] == SW'(s));

    rr_arb #(.N(NM), .PRIO(PRIO)) u_arb (
      .clk_i, .rst_ni, .req_i(sreq[s]), .ack_i(s_gnt_i[s] && s_req_o[s]),
      .idx_o(win[s]), .valid_o(any[s])
    );

    assign full[s]      = (cnt_q == (OW+1)'(OUTST));
    assign s_req_o[s]   = any[s] && !full[s];
    assign s_we_o[s]    = m_we_i[win[s]];
    assign s_addr_o[s]  = m_addr_i[win[s]];
    assign s_wdata_o[s] = m_wdata_i[win[s]];
    assign s_be_o[s]    = m_be_i[win[s]];
    assign push         = s_req_o[s] && s_gnt_i[s] && !s_we_o[s];
    assign pop          = s_rvalid_i[s];
    assign head[s]      = fifo_q[rp_q];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        wp_q  <= '0;
        rp_q  <= '0;
        cnt_q <= '0;
      end else begin
        if (push) begin
          fifo_q[wp_q] <= win[s];
          wp_q <= (int'(wp_q) == OUTST - 1) ? '0 : wp_q + 1'b1;
        end
        if (pop) rp_q <= (int'(rp_q) == OUTST - 1) ? '0 : rp_q + 1'b1;
        cnt_q <= cnt_q + (OW+1)'(push) - (OW+1)'(pop);
      end
    end

    // A slave may only answer reads it was granted.
    assert property (@(posedge clk_i) disable iff (!rst_ni) pop |-> cnt_q != 0)
      else $error("mem_xbar: rvalid from slave %0d without outstanding read", s);
  end

  always_comb begin
    m_gnt_o    = '0;
    m_rvalid_o = '0;
    m_rdata_o  = '0;
    for (int unsigned s = 0; s < NS; s++) begin
      if (s_req_o[s] && s_gnt_i[s]) m_gnt_o[win[s]] = 1'b1;
      if (s_rvalid_i[s]) begin
        m_rvalid_o[head[s]] = 1'b1;
        m_rdata_o[head[s]]  = s_rdata_i[s];
      end
    end
  end

  // Two slaves must never answer the same master in one cycle.
  for (genvar a = 0; a < NS; a++) begin : g_col_a
    for (genvar b = a + 1; b < NS; b++) begin : g_col_b
      assert property (@(posedge clk_i) disable iff (!rst_ni)
                       !(s_rvalid_i[a] && s_rvalid_i[b] && head[a] == head[b]))
        else $error("mem_xbar: response collision between slaves %0d and %0d", a, b);
    end
  end
endmodule
