// spin_pkg: types and constants shared by the sPIN accelerator RTL.
//
// All on-chip buses use one request/grant protocol, in three widths: 32 bit
// (core data ports, L1 banks), 64 bit (cluster port, DMA) and 256 bit (system
// crossbar, L2, NI and host ports). A master raises `req` with `we`, `addr`,
// `wdata` and byte enables `be` and holds them until the slave returns `gnt`
// in the same cycle; the request is then taken. A read returns `rvalid` with
// `rdata` one or more cycles later, in order per slave; writes return nothing.
// A master must always accept `rvalid`. The widths (32/64/256) are the ones
// printed in the architecture diagram of the paper; the protocol itself, the
// address map below and all encodings are this design's own choices.
package spin_pkg;

  // ---- sizes from the paper ----
  localparam int unsigned CFG_NCLUSTERS     = 4;      // four clusters
  localparam int unsigned CFG_NCORES        = 8;      // eight RV32 cores per cluster
  localparam int unsigned CFG_NL1BANKS      = 16;     // 16 x 64 KiB L1 banks per cluster
  localparam int unsigned L1_BANK_WORDS = 16384;  // 64 KiB / 4 B
  localparam int unsigned CFG_NL2BANKS      = 2;      // 2 x 4 MiB L2 banks
  localparam int unsigned L2_BANK_WORDS = 131072; // 4 MiB / 32 B
  localparam int unsigned SYS_DW        = 256;    // system crossbar width
  localparam int unsigned CL_DW         = 64;     // cluster port / DMA width
  localparam int unsigned CORE_DW       = 32;     // core and L1 bank width

  // ---- address map (own choice) ----
  // 0x1000_0000 + c * 0x0040_0000 : window of cluster c
  //     +0x0000_0000 .. 0x000F_FFFF : its 1 MiB L1, word-interleaved over 16 banks
  //     +0x0020_0000 .. 0x0020_00FF : its DMA engine registers
  // 0x1C00_0000 .. 0x1C7F_FFFF     : 8 MiB L2, 32-byte lines interleaved over 2 banks
  // 0x8000_0000 .. 0xFFFF_FFFF     : host window, write-only, leaves via the host port
  localparam logic [31:0] CLUSTER_BASE  = 32'h1000_0000;
  localparam int unsigned CLUSTER_SHIFT = 22;
  localparam logic [31:0] L1_SIZE       = 32'h0010_0000;
  localparam logic [31:0] DMA_OFFSET    = 32'h0020_0000;
  localparam logic [31:0] L2_BASE       = 32'h1C00_0000;
  localparam logic [31:0] HOST_BASE     = 32'h8000_0000;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  be;
  } req32_t;
  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } rsp32_t;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [63:0] wdata;
    logic [7:0]  be;
  } req64_t;
  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [63:0] rdata;
  } rsp64_t;

  typedef struct packed {
    logic         req;
    logic         we;
    logic [31:0]  addr;
    logic [255:0] wdata;
    logic [31:0]  be;
  } req256_t;
  typedef struct packed {
    logic         gnt;
    logic         rvalid;
    logic [255:0] rdata;
  } rsp256_t;

  // Targets a core's data access can have, as decoded by core_demux.
  typedef enum logic [1:0] {TGT_L1 = 2'd0, TGT_DMA = 2'd1, TGT_EXT = 2'd2} target_e;

  // Window of cluster `cid` in the global map.
  function automatic logic [31:0] cluster_base(input logic [1:0] cid);
    return CLUSTER_BASE + (32'(cid) << CLUSTER_SHIFT);
  endfunction

  function automatic logic is_local_l1(input logic [31:0] addr, input logic [1:0] cid);
    return (addr - cluster_base(cid)) < L1_SIZE;
  endfunction

  function automatic logic is_local_dma(input logic [31:0] addr, input logic [1:0] cid);
    logic [31:0] off;
    off = addr - cluster_base(cid);
    return off >= DMA_OFFSET && off < DMA_OFFSET + 32'h100;
  endfunction

endpackage
