// tb_mem_slave: behavioural memory that answers the request/grant bus of
// spin_pkg at any width, for testbenches only.
//
// Storage is sparse (an associative array of DW-bit words indexed by
// addr / (DW/8)); a word never written reads as init_word(index), so a test
// can predict it. Each cycle the grant is given with probability GNT_PCT
// percent (chosen at the falling clock edge), and read data returns in order
// exactly LAT cycles after the grant. peek/poke give the test direct access.
module tb_mem_slave #(
  parameter int unsigned DW      = 64,
  parameter int unsigned LAT     = 1,
  parameter int unsigned GNT_PCT = 100
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            req_i,
  input  logic            we_i,
  input  logic [31:0]     addr_i,
  input  logic [DW-1:0]   wdata_i,
  input  logic [DW/8-1:0] be_i,
  output logic            gnt_o,
  output logic            rvalid_o,
  output logic [DW-1:0]   rdata_o
);
  localparam int unsigned BYTES = DW / 8;
  logic [DW-1:0] mem [longint unsigned];
  logic          gnt_en;
  logic [LAT-1:0]         vpipe;
  logic [LAT-1:0][DW-1:0] dpipe;
  int unsigned   n_writes = 0, n_reads = 0, n_stalls = 0;

  function automatic logic [DW-1:0] init_word(input longint unsigned idx);
    logic [DW-1:0] w;
    for (int unsigned i = 0; i < DW / 32; i++) w[32*i +: 32] = 32'(idx) * 32'h9E37_79B1 + i;
    return w;
  endfunction

  function automatic logic [DW-1:0] peek(input logic [31:0] addr);
    longint unsigned idx = longint'(addr) / BYTES;
    return mem.exists(idx) ? mem[idx] : init_word(idx);
  endfunction

  function automatic void poke(input logic [31:0] addr, input logic [DW-1:0] d);
    mem[longint'(addr) / BYTES] = d;
  endfunction

  initial gnt_en = 1'b1;
  always @(negedge clk_i) gnt_en <= ($urandom_range(99) < GNT_PCT);
  assign gnt_o    = req_i && gnt_en;
  assign rvalid_o = vpipe[LAT-1];
  assign rdata_o  = dpipe[LAT-1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) vpipe <= '0;
    else begin
      logic [DW-1:0] d;
      d = '0;
      if (req_i && gnt_o) begin
        if (we_i) begin
          logic [DW-1:0] w;
          w = peek(addr_i);
          for (int unsigned b = 0; b < BYTES; b++) if (be_i[b]) w[8*b +: 8] = wdata_i[8*b +: 8];
          poke(addr_i, w);
          n_writes++;
        end else begin
          d = peek(addr_i);
          n_reads++;
        end
      end else if (req_i) n_stalls++;
      vpipe[0] <= req_i && gnt_o && !we_i;
      dpipe[0] <= d;
      for (int unsigned i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        dpipe[i] <= dpipe[i-1];
      end
    end
  end
endmodule
