// mempool_cluster: top level of MemPool - 256 cores' ports sharing 1 MiB of L1.
// Lint note: Verilator reports UNOPTFLAT on the AXI bundles here because one packed struct
// carries handshakes of both directions; the loop is between different fields, not a real one.
//
// Four groups (each 16 tiles of 4 cores and 16 banks) are connected point to point:
// every pair of groups has its own set of 16 lanes, one per target tile, in each
// direction.  With the groups placed on a 2x2 grid (0 bottom left, 1 bottom right,
// 2 top left, 3 top right), group g reaches group g^2 through its north link, g^3
// through its northeast link and g^1 through its east link, and a request leaving
// through link d arrives on the target tiles' incoming port d.  Any core reaches any
// bank: 1 cycle inside its tile, 3 cycles inside its group, 5 cycles in another group
// (round trip, without contention).
//
// The cores themselves are not part of this RTL: each core's data port (request and
// response, valid/ready, responses possibly out of order and tagged with the core's
// transaction id) and instruction fetch port are ports of the cluster.
//
// The DMA is programmed through one frontend (cfg_* register port, see dma_frontend);
// a splitter cuts transfers at 4 KiB L1 line boundaries and a distributor hands each
// piece to the four groups, whose own distributors feed the backends.  Each group has
// one 512-bit AXI master port (axi_req_o[g]) towards the system (L2 memory,
// peripherals); the read-only caches of all groups share one configuration
// (ro_start_i, ro_end_i, ro_flush_i), which in a system comes from control registers.
//
// Sizes and topology follow the paper; protocol details are documented in the blocks.
module mempool_cluster
  import mempool_pkg::*;
#(
  parameter int unsigned NumGroups_ = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // cores' data ports
  input  logic [NumCores-1:0] core_req_valid_i,
  output logic [NumCores-1:0] core_req_ready_o,
  input  tcdm_req_t           core_req_i [NumCores],
  output logic [NumCores-1:0] core_resp_valid_o,
  input  logic [NumCores-1:0] core_resp_ready_i,
  output tcdm_resp_t          core_resp_o [NumCores],
  // cores' instruction fetch ports
  input  logic [31:0]         fetch_addr_i [NumCores],
  input  logic [NumCores-1:0] fetch_valid_i,
  output logic [NumCores-1:0] fetch_ready_o,
  output logic [31:0]         fetch_data_o [NumCores],
  // DMA programming port
  input  logic                cfg_valid_i,
  input  logic                cfg_write_i,
  input  logic [4:0]          cfg_addr_i,
  input  logic [31:0]         cfg_wdata_i,
  output logic [31:0]         cfg_rdata_o,
  // read-only cache configuration
  input  logic [31:0]         ro_start_i,
  input  logic [31:0]         ro_end_i,
  input  logic                ro_flush_i,
  // AXI master ports, one per group
  output axi_req_t            axi_req_o  [NumGroups_],
  input  axi_resp_t           axi_resp_i [NumGroups_]
);
  localparam int unsigned CPG = NumCores / NumGroups_;
  localparam int unsigned TPG = NumTiles / NumGroups_;

  // links, [group][direction 0 N, 1 NE, 2 E]
  logic [TPG-1:0] o_valid [NumGroups_][3], o_ready [NumGroups_][3];
  logic [TPG-1:0] o_rvalid[NumGroups_][3], o_rready[NumGroups_][3];
  tcdm_req_t      o_req   [NumGroups_][3][TPG];
  tcdm_resp_t     o_resp  [NumGroups_][3][TPG];
  logic [TPG-1:0] i_valid [NumGroups_][3], i_ready [NumGroups_][3];
  logic [TPG-1:0] i_rvalid[NumGroups_][3], i_rready[NumGroups_][3];
  tcdm_req_t      i_req   [NumGroups_][3][TPG];
  tcdm_resp_t     i_resp  [NumGroups_][3][TPG];

  // neighbour of group g over link d: N = g^2, NE = g^3, E = g^1
  function automatic int unsigned peer(input int unsigned g, input int unsigned d);
    return g ^ (d == 0 ? 2 : d == 1 ? 3 : 1);
  endfunction

  for (genvar g = 0; g < NumGroups_; g++) begin : g_link
    for (genvar d = 0; d < 3; d++) begin : g_dir
      localparam int unsigned P = peer(g, d);
      assign i_valid[P][d]  = o_valid[g][d];
      assign o_ready[g][d]  = i_ready[P][d];
      assign i_req[P][d]    = o_req[g][d];
      assign o_rvalid[g][d] = i_rvalid[P][d];
      assign i_rready[P][d] = o_rready[g][d];
      assign o_resp[g][d]   = i_resp[P][d];
    end
  end

  // ================================================================ DMA control
  logic     fe_valid, fe_ready, sp_valid, sp_ready, sp_done, fe_done, fe_busy;
  dma_req_t fe_req, sp_req;
  logic [NumGroups_-1:0] gd_valid, gd_ready, gd_done;
  dma_req_t gd_req [NumGroups_];

  dma_frontend i_dma_frontend (
    .clk_i, .rst_ni, .cfg_valid_i, .cfg_write_i, .cfg_addr_i, .cfg_wdata_i, .cfg_rdata_o,
    .req_valid_o(fe_valid), .req_ready_i(fe_ready), .req_o(fe_req), .done_i(fe_done),
    .busy_o(fe_busy));

  dma_splitter #(.LineBytes(L1LineBytes)) i_dma_splitter (
    .clk_i, .rst_ni, .req_valid_i(fe_valid), .req_ready_o(fe_ready), .req_i(fe_req),
    .done_o(fe_done), .req_valid_o(sp_valid), .req_ready_i(sp_ready), .req_o(sp_req),
    .done_i(sp_done));

  dma_distributor #(.NumOut(NumGroups_), .RegionBytes(L1LineBytes / NumGroups_))
  i_dma_distributor (
    .clk_i, .rst_ni, .req_valid_i(sp_valid), .req_ready_o(sp_ready), .req_i(sp_req),
    .done_o(sp_done), .req_valid_o(gd_valid), .req_ready_i(gd_ready), .req_o(gd_req),
    .done_i(gd_done));

  // ================================================================ groups
  for (genvar g = 0; g < NumGroups_; g++) begin : g_group
    logic [TPG-1:0] pf, co;
    logic           rh, rm;
    group #(.NumTiles_(TPG)) i_group (
      .clk_i, .rst_ni,
      .group_id_i           (GroupBits'(g)),
      .core_req_valid_i     (core_req_valid_i[g*CPG +: CPG]),
      .core_req_ready_o     (core_req_ready_o[g*CPG +: CPG]),
      .core_req_i           (core_req_i[g*CPG +: CPG]),
      .core_resp_valid_o    (core_resp_valid_o[g*CPG +: CPG]),
      .core_resp_ready_i    (core_resp_ready_i[g*CPG +: CPG]),
      .core_resp_o          (core_resp_o[g*CPG +: CPG]),
      .fetch_addr_i         (fetch_addr_i[g*CPG +: CPG]),
      .fetch_valid_i        (fetch_valid_i[g*CPG +: CPG]),
      .fetch_ready_o        (fetch_ready_o[g*CPG +: CPG]),
      .fetch_data_o         (fetch_data_o[g*CPG +: CPG]),
      .grp_out_req_valid_o  (o_valid[g]),
      .grp_out_req_ready_i  (o_ready[g]),
      .grp_out_req_o        (o_req[g]),
      .grp_out_resp_valid_i (o_rvalid[g]),
      .grp_out_resp_ready_o (o_rready[g]),
      .grp_out_resp_i       (o_resp[g]),
      .grp_in_req_valid_i   (i_valid[g]),
      .grp_in_req_ready_o   (i_ready[g]),
      .grp_in_req_i         (i_req[g]),
      .grp_in_resp_valid_o  (i_rvalid[g]),
      .grp_in_resp_ready_i  (i_rready[g]),
      .grp_in_resp_o        (i_resp[g]),
      .dma_req_valid_i      (gd_valid[g]),
      .dma_req_ready_o      (gd_ready[g]),
      .dma_req_i            (gd_req[g]),
      .dma_done_o           (gd_done[g]),
      .axi_req_o            (axi_req_o[g]),
      .axi_resp_i           (axi_resp_i[g]),
      .ro_start_i, .ro_end_i, .ro_flush_i,
      .prefetch_o           (pf),
      .coalesced_o          (co),
      .ro_hit_o             (rh),
      .ro_miss_o            (rm)
    );
  end
endmodule
