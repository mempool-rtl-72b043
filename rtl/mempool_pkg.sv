// mempool_pkg: configuration constants and shared types of the MemPool cluster.
//
// The default configuration is the large one: 4 groups of 16 tiles, each tile with
// 4 cores and 16 scratchpad (SPM) banks of 1 KiB, i.e. 256 cores and 1 MiB of shared
// L1 memory; 512-bit AXI; 256-bit instruction cache lines.  These numbers follow the
// paper.  The L1 address map (SPM at address 0, word-interleaved across all banks),
// the request/response bundles and the AXI subset used here are this design's own
// choices: AXI beats are always full bus width (no size field) and bursts are INCR.
package mempool_pkg;

  // ---------------------------------------------------------------- hierarchy
  localparam int unsigned NumGroups        = 4;
  localparam int unsigned NumTilesPerGroup = 16;
  localparam int unsigned NumCoresPerTile  = 4;
  localparam int unsigned NumBanksPerTile  = 16;
  localparam int unsigned NumTiles         = NumGroups * NumTilesPerGroup;   // 64
  localparam int unsigned NumCores         = NumTiles * NumCoresPerTile;     // 256
  localparam int unsigned BankWords        = 256;                            // 1 KiB banks

  // ---------------------------------------------------------------- L1 address map
  localparam int unsigned ByteOffset = 2;
  localparam int unsigned BankBits   = $clog2(NumBanksPerTile);              // b = 4
  localparam int unsigned TileBits   = $clog2(NumTiles);                     // t = 6
  localparam int unsigned GroupBits  = $clog2(NumGroups);                    // 2
  localparam int unsigned RowBits    = $clog2(BankWords);                    // 8
  localparam int unsigned L1Bits     = ByteOffset + BankBits + TileBits + RowBits; // 20
  localparam int unsigned L1LineBytes = NumTiles * NumBanksPerTile * 4;      // 4 KiB

  // ---------------------------------------------------------------- core data port
  localparam int unsigned CoreIdWidth = $clog2(NumCores);                    // 8
  localparam int unsigned TidWidth    = 3;                                   // 8 outstanding

  typedef enum logic [3:0] {
    AmoNone = 4'd0, AmoSwap = 4'd1, AmoAdd = 4'd2, AmoXor = 4'd3, AmoAnd = 4'd4,
    AmoOr   = 4'd5, AmoMin  = 4'd6, AmoMax = 4'd7, AmoMinu = 4'd8, AmoMaxu = 4'd9,
    AmoLR   = 4'd10, AmoSC  = 4'd11
  } amo_e;

  // Request of a core towards the L1 memory (or, outside the SPM range, the AXI port).
  typedef struct packed {
    logic [31:0]            addr;
    logic                   wen;
    logic [3:0]             be;
    logic [31:0]            wdata;
    amo_e                   amo;
    logic [CoreIdWidth-1:0] core_id;   // initiating core, routes the response home
    logic [TidWidth-1:0]    tid;       // core's transaction id (responses are unordered)
  } tcdm_req_t;

  typedef struct packed {
    logic [31:0]            rdata;
    logic [CoreIdWidth-1:0] core_id;
    logic [TidWidth-1:0]    tid;
  } tcdm_resp_t;

  // ---------------------------------------------------------------- instruction path
  localparam int unsigned ICacheLineWidth = 256;

  // ---------------------------------------------------------------- AXI subset
  localparam int unsigned AxiAddrWidth = 32;
  localparam int unsigned AxiDataWidth = 512;
  localparam int unsigned AxiStrbWidth = AxiDataWidth / 8;
  localparam int unsigned AxiIdWidth   = 16;
  localparam int unsigned AxiBeatBytes = AxiDataWidth / 8;                   // 64

  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
    logic [AxiAddrWidth-1:0] addr;
    logic [7:0]              len;      // beats - 1
  } axi_ax_t;

  typedef struct packed {
    logic [AxiDataWidth-1:0] data;
    logic [AxiStrbWidth-1:0] strb;
    logic                    last;
  } axi_w_t;

  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
  } axi_b_t;

  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
    logic [AxiDataWidth-1:0] data;
    logic                    last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    axi_b_t  b;
    logic    b_valid;
    logic    ar_ready;
    axi_r_t  r;
    logic    r_valid;
  } axi_resp_t;

  // ---------------------------------------------------------------- DMA
  typedef struct packed {
    logic [31:0] src;
    logic [31:0] dst;
    logic [31:0] num_bytes;
  } dma_req_t;

  // Wide port of a DMA backend into one tile: one full row of the tile's 16 banks.
  typedef struct packed {
    logic [RowBits-1:0]      row;
    logic                    wen;
    logic [AxiDataWidth-1:0] wdata;
    logic [AxiStrbWidth-1:0] strb;
  } dma_tile_req_t;

  // True for addresses that fall into the L1 scratchpad.
  function automatic logic is_l1(input logic [31:0] addr);
    return addr[31:L1Bits] == '0;
  endfunction

endpackage
