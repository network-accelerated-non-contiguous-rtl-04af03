// rr_arb: round-robin arbiter with an optional fixed-priority class.
//
// Requesters whose bit is set in PRIO win over all others (lowest index
// first); among the rest the grant rotates, starting after the last
// requester that was served. `idx_o` is the winner and `valid_o` says there
// is one; the combinational result depends on `req_i` and the pointer only.
// The pointer moves when `ack_i` is high in a cycle where a non-priority
// requester won. Used by every crossbar in the design; the arbitration
// policy is this design's choice, the paper does not describe one.
module rr_arb #(
  parameter int unsigned   N    = 4,
  parameter logic [N-1:0]  PRIO = '0,
  localparam int unsigned  IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  input  logic          ack_i,
  output logic [IW-1:0] idx_o,
  output logic          valid_o
);
  logic [IW-1:0] ptr_q;
  logic          found;
  logic          won_prio;

  always_comb begin
    idx_o    = '0;
    found    = 1'b0;
    won_prio = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      if (!found && req_i[i] && PRIO[i]) begin
        idx_o    = IW'(i);
        found    = 1'b1;
        won_prio = 1'b1;
      end
    end
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned j;
      j = int'(ptr_q) + k;
      if (j >= N) j = j - N;
      if (!found && req_i[j]) begin
        idx_o = IW'(j);
        found = 1'b1;
      end
    end
    valid_o = found;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (ack_i && found && !won_prio)
      ptr_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
  end
endmodule
