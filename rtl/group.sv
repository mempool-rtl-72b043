// group: 16 tiles with the group-level L1 interconnects, AXI tree and DMA backends.
// Lint note: Verilator reports UNOPTFLAT on the AXI bundles here because one packed struct
// carries handshakes of both directions; the loop is between different fields, not a real one.
//
// L1 interconnect.  Each tile has four outgoing remote ports (L, N, NE, E).  Port L of
// all 16 tiles feeds the local 16x16 crossbar whose outputs are the incoming L ports
// of the same tiles; with the tiles' port registers this gives a 3-cycle round trip.
// Ports N, NE and E feed three more 16x16 crossbars whose outputs leave the group
// towards the north, northeast and east neighbour groups; there they enter the target
// tiles' incoming port of the same name.  These links carry one extra register on the
// request and on the response side, giving the paper's 5-cycle round trip between
// groups.  Crossbar targets are selected by the tile bits of the (physical) address,
// responses are returned by the tile bits of the core id.
//
// AXI.  The 16 tiles' AXI ports are merged by one radix-16 node followed by the
// group's read-only cache; a second node merges that with the four DMA backends into
// the group's single 512-bit AXI master port (DMA traffic thus bypasses the RO cache).
//
// DMA.  A distributor splits each request from the cluster into the four backends'
// 256-byte slices; backend k moves data for tiles 4k..4k+3 through their DMA ports.
//
// Structure and sizes follow the paper.  Where exactly the pipeline registers sit,
// and that the DMA backends join the tree above the RO cache, are this design's
// choices.  group_id_i is the group's index.
module group
  import mempool_pkg::*;
#(
  parameter int unsigned NumTiles_       = 16,
  parameter int unsigned NumDmaBackends  = 4,
  localparam int unsigned NC = NumTiles_ * NumCoresPerTile
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [GroupBits-1:0] group_id_i,
  // cores
  input  logic [NC-1:0]        core_req_valid_i,
  output logic [NC-1:0]        core_req_ready_o,
  input  tcdm_req_t            core_req_i [NC],
  output logic [NC-1:0]        core_resp_valid_o,
  input  logic [NC-1:0]        core_resp_ready_i,
  output tcdm_resp_t           core_resp_o [NC],
  input  logic [31:0]          fetch_addr_i [NC],
  input  logic [NC-1:0]        fetch_valid_i,
  output logic [NC-1:0]        fetch_ready_o,
  output logic [31:0]          fetch_data_o [NC],
  // links to the other groups, index 0 N, 1 NE, 2 E; one lane per target tile
  output logic [NumTiles_-1:0] grp_out_req_valid_o  [3],
  input  logic [NumTiles_-1:0] grp_out_req_ready_i  [3],
  output tcdm_req_t            grp_out_req_o        [3][NumTiles_],
  input  logic [NumTiles_-1:0] grp_out_resp_valid_i [3],
  output logic [NumTiles_-1:0] grp_out_resp_ready_o [3],
  input  tcdm_resp_t           grp_out_resp_i       [3][NumTiles_],
  input  logic [NumTiles_-1:0] grp_in_req_valid_i   [3],
  output logic [NumTiles_-1:0] grp_in_req_ready_o   [3],
  input  tcdm_req_t            grp_in_req_i         [3][NumTiles_],
  output logic [NumTiles_-1:0] grp_in_resp_valid_o  [3],
  input  logic [NumTiles_-1:0] grp_in_resp_ready_i  [3],
  output tcdm_resp_t           grp_in_resp_o        [3][NumTiles_],
  // DMA
  input  logic                 dma_req_valid_i,
  output logic                 dma_req_ready_o,
  input  dma_req_t             dma_req_i,
  output logic                 dma_done_o,
  // AXI master port and RO cache configuration
  output axi_req_t             axi_req_o,
  input  axi_resp_t            axi_resp_i,
  input  logic [31:0]          ro_start_i,
  input  logic [31:0]          ro_end_i,
  input  logic                 ro_flush_i,
  // events for statistics
  output logic [NumTiles_-1:0] prefetch_o,
  output logic [NumTiles_-1:0] coalesced_o,
  output logic                 ro_hit_o,
  output logic                 ro_miss_o
);
  localparam int unsigned TIW = $clog2(NumTiles_);
  localparam int unsigned TPB = NumTiles_ / NumDmaBackends;

  // tile-side remote ports, [direction][tile]
  logic [NumTiles_-1:0] t_out_valid [4], t_out_ready [4], t_out_rvalid [4], t_out_rready [4];
  tcdm_req_t            t_out_req   [4][NumTiles_];
  tcdm_resp_t           t_out_resp  [4][NumTiles_];
  logic [NumTiles_-1:0] t_in_valid  [4], t_in_ready  [4], t_in_rvalid  [4], t_in_rready  [4];
  tcdm_req_t            t_in_req    [4][NumTiles_];
  tcdm_resp_t           t_in_resp   [4][NumTiles_];

  // DMA ports of the tiles
  logic [NumTiles_-1:0]    t_dma_valid, t_dma_ready, t_dma_rvalid;
  dma_tile_req_t           t_dma_req   [NumTiles_];
  logic [AxiDataWidth-1:0] t_dma_rdata [NumTiles_];

  axi_req_t  t_axi_req  [NumTiles_];
  axi_resp_t t_axi_resp [NumTiles_];

  // ================================================================ tiles
  for (genvar t = 0; t < NumTiles_; t++) begin : g_tile
    localparam int unsigned C0 = t * NumCoresPerTile;
    tcdm_req_t   o_req  [4];
    tcdm_resp_t  o_resp [4];
    tcdm_req_t   i_req  [4];
    tcdm_resp_t  i_resp [4];
    logic [3:0]  o_valid, o_ready, o_rvalid, o_rready, i_valid, i_ready, i_rvalid, i_rready;
    for (genvar d = 0; d < 4; d++) begin : g_dir
      assign t_out_valid[d][t] = o_valid[d];
      assign o_ready[d]        = t_out_ready[d][t];
      assign t_out_req[d][t]   = o_req[d];
      assign o_rvalid[d]       = t_out_rvalid[d][t];
      assign t_out_rready[d][t]= o_rready[d];
      assign o_resp[d]         = t_out_resp[d][t];
      assign i_valid[d]        = t_in_valid[d][t];
      assign t_in_ready[d][t]  = i_ready[d];
      assign i_req[d]          = t_in_req[d][t];
      assign t_in_rvalid[d][t] = i_rvalid[d];
      assign i_rready[d]       = t_in_rready[d][t];
      assign t_in_resp[d][t]   = i_resp[d];
    end
    tile i_tile (
      .clk_i, .rst_ni,
      .tile_id_i            ({group_id_i, TIW'(t)}),
      .core_req_valid_i     (core_req_valid_i[C0 +: NumCoresPerTile]),
      .core_req_ready_o     (core_req_ready_o[C0 +: NumCoresPerTile]),
      .core_req_i           (core_req_i[C0 +: NumCoresPerTile]),
      .core_resp_valid_o    (core_resp_valid_o[C0 +: NumCoresPerTile]),
      .core_resp_ready_i    (core_resp_ready_i[C0 +: NumCoresPerTile]),
      .core_resp_o          (core_resp_o[C0 +: NumCoresPerTile]),
      .fetch_addr_i         (fetch_addr_i[C0 +: NumCoresPerTile]),
      .fetch_valid_i        (fetch_valid_i[C0 +: NumCoresPerTile]),
      .fetch_ready_o        (fetch_ready_o[C0 +: NumCoresPerTile]),
      .fetch_data_o         (fetch_data_o[C0 +: NumCoresPerTile]),
      .rmt_out_req_valid_o  (o_valid),
      .rmt_out_req_ready_i  (o_ready),
      .rmt_out_req_o        (o_req),
      .rmt_out_resp_valid_i (o_rvalid),
      .rmt_out_resp_ready_o (o_rready),
      .rmt_out_resp_i       (o_resp),
      .rmt_in_req_valid_i   (i_valid),
      .rmt_in_req_ready_o   (i_ready),
      .rmt_in_req_i         (i_req),
      .rmt_in_resp_valid_o  (i_rvalid),
      .rmt_in_resp_ready_i  (i_rready),
      .rmt_in_resp_o        (i_resp),
      .dma_req_valid_i      (t_dma_valid[t]),
      .dma_req_ready_o      (t_dma_ready[t]),
      .dma_req_i            (t_dma_req[t]),
      .dma_rsp_valid_o      (t_dma_rvalid[t]),
      .dma_rsp_data_o       (t_dma_rdata[t]),
      .axi_req_o            (t_axi_req[t]),
      .axi_resp_i           (t_axi_resp[t]),
      .prefetch_o           (prefetch_o[t]),
      .coalesced_o          (coalesced_o[t])
    );
  end

  // ================================================================ group crossbars
  for (genvar d = 0; d < 4; d++) begin : g_xbar
    logic [TIW-1:0]       tgt   [NumTiles_];
    logic [TIW-1:0]       src   [NumTiles_];
    logic [TIW-1:0]       rdst  [NumTiles_];
    logic [NumTiles_-1:0] x_valid, x_ready, x_rvalid, x_rready;
    tcdm_req_t            x_req  [NumTiles_];
    tcdm_resp_t           x_resp [NumTiles_];
    for (genvar t = 0; t < NumTiles_; t++) begin : g_idx
      assign tgt[t]  = t_out_req[d][t].addr[ByteOffset + BankBits +: TIW];
      assign rdst[t] = x_resp[t].core_id[$clog2(NumCoresPerTile) +: TIW];
    end
    crossbar #(.NumIn(NumTiles_), .NumOut(NumTiles_), .req_t(tcdm_req_t), .resp_t(tcdm_resp_t))
    i_xbar (
      .clk_i, .rst_ni,
      .in_valid_i(t_out_valid[d]), .in_ready_o(t_out_ready[d]), .in_tgt_i(tgt),
      .in_req_i(t_out_req[d]), .in_resp_valid_o(t_out_rvalid[d]),
      .in_resp_ready_i(t_out_rready[d]), .in_resp_o(t_out_resp[d]),
      .out_valid_o(x_valid), .out_ready_i(x_ready), .out_src_o(src), .out_req_o(x_req),
      .out_resp_valid_i(x_rvalid), .out_resp_ready_o(x_rready), .out_resp_dst_i(rdst),
      .out_resp_i(x_resp)
    );
    if (d == 0) begin : g_local
      assign t_in_valid[0] = x_valid;
      assign x_ready       = t_in_ready[0];
      assign t_in_req[0]   = x_req;
      assign x_rvalid      = t_in_rvalid[0];
      assign t_in_rready[0]= x_rready;
      assign x_resp        = t_in_resp[0];
    end else begin : g_remote
      for (genvar t = 0; t < NumTiles_; t++) begin : g_lane
        pipe_reg #(.T(tcdm_req_t)) i_req_reg (
          .clk_i, .rst_ni,
          .valid_i(x_valid[t]), .ready_o(x_ready[t]), .data_i(x_req[t]),
          .valid_o(grp_out_req_valid_o[d-1][t]), .ready_i(grp_out_req_ready_i[d-1][t]),
          .data_o(grp_out_req_o[d-1][t]));
        pipe_reg #(.T(tcdm_resp_t)) i_resp_reg (
          .clk_i, .rst_ni,
          .valid_i(grp_out_resp_valid_i[d-1][t]), .ready_o(grp_out_resp_ready_o[d-1][t]),
          .data_i(grp_out_resp_i[d-1][t]),
          .valid_o(x_rvalid[t]), .ready_i(x_rready[t]), .data_o(x_resp[t]));
      end
      // requests from the neighbour group enter the tiles' incoming port d
      assign t_in_valid[d]          = grp_in_req_valid_i[d-1];
      assign grp_in_req_ready_o[d-1]= t_in_ready[d];
      assign t_in_req[d]            = grp_in_req_i[d-1];
      assign grp_in_resp_valid_o[d-1] = t_in_rvalid[d];
      assign t_in_rready[d]         = grp_in_resp_ready_i[d-1];
      assign grp_in_resp_o[d-1]     = t_in_resp[d];
    end
  end

  // ================================================================ AXI tree
  axi_req_t  tiles_req,  ro_req;
  axi_resp_t tiles_resp, ro_resp;
  axi_req_t  top_req  [NumDmaBackends + 1];
  axi_resp_t top_resp [NumDmaBackends + 1];

  axi_node #(.NumIn(NumTiles_)) i_tile_node (
    .clk_i, .rst_ni, .slv_req_i(t_axi_req), .slv_resp_o(t_axi_resp),
    .mst_req_o(tiles_req), .mst_resp_i(tiles_resp));

  ro_cache #(.CacheBytes(8192), .LineWidth(AxiDataWidth)) i_ro_cache (
    .clk_i, .rst_ni, .cached_start_i(ro_start_i), .cached_end_i(ro_end_i),
    .flush_i(ro_flush_i), .slv_req_i(tiles_req), .slv_resp_o(tiles_resp),
    .mst_req_o(ro_req), .mst_resp_i(ro_resp), .hit_o(ro_hit_o), .miss_o(ro_miss_o));

  assign top_req[0] = ro_req;
  assign ro_resp    = top_resp[0];

  axi_node #(.NumIn(NumDmaBackends + 1)) i_group_node (
    .clk_i, .rst_ni, .slv_req_i(top_req), .slv_resp_o(top_resp),
    .mst_req_o(axi_req_o), .mst_resp_i(axi_resp_i));

  // ================================================================ DMA
  logic [NumDmaBackends-1:0] be_valid, be_ready, be_done;
  dma_req_t                  be_req [NumDmaBackends];

  dma_distributor #(.NumOut(NumDmaBackends), .RegionBytes(TPB * AxiBeatBytes)) i_dist (
    .clk_i, .rst_ni, .req_valid_i(dma_req_valid_i), .req_ready_o(dma_req_ready_o),
    .req_i(dma_req_i), .done_o(dma_done_o), .req_valid_o(be_valid), .req_ready_i(be_ready),
    .req_o(be_req), .done_i(be_done));

  for (genvar k = 0; k < NumDmaBackends; k++) begin : g_backend
    axi_req_t  a_req;
    axi_resp_t a_resp;
    dma_tile_req_t tr;
    logic [TPB-1:0] tv;
    dma_backend #(.TilesPerBackend(TPB)) i_backend (
      .clk_i, .rst_ni,
      .req_valid_i(be_valid[k]), .req_ready_o(be_ready[k]), .req_i(be_req[k]),
      .done_o(be_done[k]), .axi_req_o(a_req), .axi_resp_i(a_resp),
      .tile_req_valid_o(tv), .tile_req_ready_i(t_dma_ready[k*TPB +: TPB]),
      .tile_req_o(tr), .tile_rsp_valid_i(t_dma_rvalid[k*TPB +: TPB]),
      .tile_rsp_data_i(t_dma_rdata[k*TPB +: TPB]));
    assign top_req[k+1] = a_req;
    assign a_resp       = top_resp[k+1];
    for (genvar j = 0; j < TPB; j++) begin : g_port
      assign t_dma_valid[k*TPB + j] = tv[j];
      assign t_dma_req[k*TPB + j]   = tr;
    end
  end
endmodule
