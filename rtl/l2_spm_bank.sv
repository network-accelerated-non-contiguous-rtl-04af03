// l2_spm_bank: one 4 MiB bank of the level-2 scratchpad. The paper splits the 8 MiB L2 into two such banks, each with its own 256-bit port into the system crossbar, so that packets written by the network and data read by the cluster DMAs can stream at the same time.
//
// Single-port synchronous SRAM written as an array: the bank is always ready
// (gnt_o is tied to req_i), a write with byte enables takes effect at the clock
// edge, and a read returns rdata_o with rvalid_o one cycle after the request.
// addr_i is the word (row) index, already stripped of bank-select bits by
// the crossbar in front. Size and width are the paper's; the one-cycle
// latency follows the paper's single-cycle L1 access, and for L2 is this
// design's choice. In silicon this array would be an SRAM macro.
module l2_spm_bank #(
  parameter int unsigned DW    = 256,
  parameter int unsigned DEPTH = 131072,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = DW / 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [DW-1:0] wdata_i,
  input  logic [BW-1:0] be_i,
  output logic          gnt_o,
  output logic          rvalid_o,
  output logic [DW-1:0] rdata_o
);
  logic [DW-1:0] mem [DEPTH];

  assign gnt_o = req_i;

  always_ff @(posedge clk_i) begin
    if (req_i && we_i) begin
      for (int unsigned b = 0; b < BW; b++)
        if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
    end
    if (req_i && !we_i) rdata_o <= mem[addr_i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_o <= 1'b0;
    else         rvalid_o <= req_i && !we_i;
  end
endmodule
