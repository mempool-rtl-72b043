// tile: MemPool's basic building block - four cores' ports, 16 SPM banks, the
// Lint note: Verilator reports UNOPTFLAT on the AXI bundles here because one packed struct
// carries handshakes of both directions; the loop is between different fields, not a real one.
// instruction caches and the tile's share of the L1 interconnect.
//
// Data path.  Each core request is first passed through the address scrambler
// (hybrid addressing), then routed by its physical address:
//   * to this tile's banks: through the tile interconnect, a fully connected crossbar
//     from 8 initiators (4 cores + 4 incoming remote ports) to the 16 banks; the
//     answer comes one cycle later (1-cycle L1 access);
//   * to another tile: through the remote interconnect (a 4x4 crossbar) to one of the
//     four outgoing ports L (same group), N, NE or E (the other groups), each with a
//     pipeline register on the request and on the response path;
//   * outside the L1 range: to the tile's AXI port (one such access at a time, a
//     single-beat read or a write answered after its B response).
// Requests arriving on the four incoming ports enter the tile interconnect directly.
// Answers to a core are merged with fixed priority: local, remote, AXI.
//
// DMA.  The wide DMA port reads or writes one row of all 16 banks (512 bit) in one
// cycle; it has priority over the crossbar at the banks, and its read data comes back
// on dma_rsp_* one cycle later.
//
// Instruction path.  Every core has a private L0 cache; the four share the L1
// instruction cache, whose refills and the cores' AXI accesses share the tile's AXI
// port through a 2-input AXI node.
//
// The structure (ports, crossbars, banks, caches, pipelined remote ports, AXI port,
// DMA port into the crossbar) follows the paper.  The group to direction mapping
// (group index XOR 2 = north, XOR 3 = northeast, XOR 1 = east) is read from the
// placement of the groups in the paper's cluster figure.  The merge priorities, the
// DMA priority and the single outstanding AXI access are this design's choices.
// tile_id_i is the tile's global index (group in the upper two bits); the tile stamps
// {tile_id_i, core index} into the core_id field of every request, which routes the
// answer home.
module tile
  import mempool_pkg::*;
#(
  parameter int unsigned NumCoresPerTile_ = 4,
  parameter int unsigned NumBanks         = 16
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [TileBits-1:0]         tile_id_i,
  // cores' data ports
  input  logic [NumCoresPerTile_-1:0] core_req_valid_i,
  output logic [NumCoresPerTile_-1:0] core_req_ready_o,
  input  tcdm_req_t                   core_req_i [NumCoresPerTile_],
  output logic [NumCoresPerTile_-1:0] core_resp_valid_o,
  input  logic [NumCoresPerTile_-1:0] core_resp_ready_i,
  output tcdm_resp_t                  core_resp_o [NumCoresPerTile_],
  // cores' instruction fetch
  input  logic [31:0]                 fetch_addr_i  [NumCoresPerTile_],
  input  logic [NumCoresPerTile_-1:0] fetch_valid_i,
  output logic [NumCoresPerTile_-1:0] fetch_ready_o,
  output logic [31:0]                 fetch_data_o  [NumCoresPerTile_],
  // outgoing remote ports: 0 L, 1 N, 2 NE, 3 E
  output logic [3:0]                  rmt_out_req_valid_o,
  input  logic [3:0]                  rmt_out_req_ready_i,
  output tcdm_req_t                   rmt_out_req_o [4],
  input  logic [3:0]                  rmt_out_resp_valid_i,
  output logic [3:0]                  rmt_out_resp_ready_o,
  input  tcdm_resp_t                  rmt_out_resp_i [4],
  // incoming remote ports: 0 L, 1 N, 2 NE, 3 E
  input  logic [3:0]                  rmt_in_req_valid_i,
  output logic [3:0]                  rmt_in_req_ready_o,
  input  tcdm_req_t                   rmt_in_req_i [4],
  output logic [3:0]                  rmt_in_resp_valid_o,
  input  logic [3:0]                  rmt_in_resp_ready_i,
  output tcdm_resp_t                  rmt_in_resp_o [4],
  // wide DMA port
  input  logic                        dma_req_valid_i,
  output logic                        dma_req_ready_o,
  input  dma_tile_req_t               dma_req_i,
  output logic                        dma_rsp_valid_o,
  output logic [AxiDataWidth-1:0]     dma_rsp_data_o,
  // AXI port
  output axi_req_t                    axi_req_o,
  input  axi_resp_t                   axi_resp_i,
  // events for statistics
  output logic                        prefetch_o,
  output logic                        coalesced_o
);
  localparam int unsigned NC     = NumCoresPerTile_;
  localparam int unsigned NIn    = NC + 4;
  localparam int unsigned InW    = $clog2(NIn);
  localparam int unsigned CW     = NC > 1 ? $clog2(NC) : 1;

  typedef struct packed {
    logic                   dma;
    logic [InW-1:0]         src;
    logic [CoreIdWidth-1:0] core_id;
    logic [TidWidth-1:0]    tid;
  } meta_t;

  logic [GroupBits-1:0] my_group;
  assign my_group = tile_id_i[TileBits-1 -: GroupBits];

  // ================================================================ core routing
  tcdm_req_t             phys_req [NC];
  logic [NC-1:0]         to_local, to_remote, to_axi;
  logic [BankBits-1:0]   bank_sel [NC];
  logic [1:0]            dir_sel  [NC];

  for (genvar c = 0; c < NC; c++) begin : g_route
    logic [31:0]          paddr;
    logic [TileBits-1:0]  tgt_tile;
    logic [GroupBits-1:0] gx;
    address_scrambler #(.NumTiles(NumTiles), .BanksPerTile(NumBanks)) i_scr (
      .addr_i(core_req_i[c].addr), .addr_o(paddr));
    always_comb begin
      phys_req[c]      = core_req_i[c];
      phys_req[c].addr = paddr;
      phys_req[c].core_id = {tile_id_i, CW'(c)};
    end
    assign tgt_tile     = paddr[ByteOffset + BankBits +: TileBits];
    assign gx           = tgt_tile[TileBits-1 -: GroupBits] ^ my_group;
    assign bank_sel[c]  = paddr[ByteOffset +: BankBits];
    assign to_axi[c]    = core_req_valid_i[c] && !is_l1(paddr);
    assign to_local[c]  = core_req_valid_i[c] && is_l1(paddr) && tgt_tile == tile_id_i;
    assign to_remote[c] = core_req_valid_i[c] && is_l1(paddr) && tgt_tile != tile_id_i;
    always_comb begin
      unique case (gx)
        2'd0:    dir_sel[c] = 2'd0;   // same group: local interconnect
        2'd2:    dir_sel[c] = 2'd1;   // north
        2'd3:    dir_sel[c] = 2'd2;   // northeast
        default: dir_sel[c] = 2'd3;   // east
      endcase
    end
  end

  // ================================================================ tile interconnect
  logic [NIn-1:0]       tx_in_valid, tx_in_ready, tx_in_rvalid, tx_in_rready;
  logic [BankBits-1:0]  tx_in_tgt  [NIn];
  tcdm_req_t            tx_in_req  [NIn];
  tcdm_resp_t           tx_in_resp [NIn];
  logic [NumBanks-1:0]  tx_out_valid, tx_out_ready, tx_out_rvalid, tx_out_rready;
  logic [InW-1:0]       tx_out_src [NumBanks];
  logic [InW-1:0]       tx_out_rdst[NumBanks];
  tcdm_req_t            tx_out_req [NumBanks];
  tcdm_resp_t           tx_out_resp[NumBanks];

  for (genvar c = 0; c < NC; c++) begin : g_tx_core
    assign tx_in_valid[c]  = to_local[c];
    assign tx_in_tgt[c]    = bank_sel[c];
    assign tx_in_req[c]    = phys_req[c];
  end
  for (genvar p = 0; p < 4; p++) begin : g_tx_rmt
    assign tx_in_valid[NC+p]   = rmt_in_req_valid_i[p];
    assign tx_in_tgt[NC+p]     = rmt_in_req_i[p].addr[ByteOffset +: BankBits];
    assign tx_in_req[NC+p]     = rmt_in_req_i[p];
    assign rmt_in_req_ready_o[p]  = tx_in_ready[NC+p];
    assign rmt_in_resp_valid_o[p] = tx_in_rvalid[NC+p];
    assign rmt_in_resp_o[p]       = tx_in_resp[NC+p];
    assign tx_in_rready[NC+p]     = rmt_in_resp_ready_i[p];
  end

  crossbar #(.NumIn(NIn), .NumOut(NumBanks), .req_t(tcdm_req_t), .resp_t(tcdm_resp_t))
  i_tile_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(tx_in_valid), .in_ready_o(tx_in_ready), .in_tgt_i(tx_in_tgt),
    .in_req_i(tx_in_req), .in_resp_valid_o(tx_in_rvalid), .in_resp_ready_i(tx_in_rready),
    .in_resp_o(tx_in_resp),
    .out_valid_o(tx_out_valid), .out_ready_i(tx_out_ready), .out_src_o(tx_out_src),
    .out_req_o(tx_out_req), .out_resp_valid_i(tx_out_rvalid), .out_resp_ready_o(tx_out_rready),
    .out_resp_dst_i(tx_out_rdst), .out_resp_i(tx_out_resp)
  );

  // ================================================================ banks
  logic [NumBanks-1:0] bank_ready, bank_rvalid, bank_rready;
  logic                dma_go;
  assign dma_go          = dma_req_valid_i && &bank_ready;
  assign dma_req_ready_o = &bank_ready;

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    meta_t       meta_in, meta_out;
    logic [31:0] rdata;
    always_comb begin
      meta_in         = '0;
      meta_in.dma     = dma_req_valid_i;
      meta_in.src     = tx_out_src[b];
      meta_in.core_id = tx_out_req[b].core_id;
      meta_in.tid     = tx_out_req[b].tid;
    end
    spm_bank #(.NumWords(BankWords), .MetaWidth($bits(meta_t))) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i (dma_req_valid_i ? dma_go : tx_out_valid[b]),
      .req_ready_o (bank_ready[b]),
      .req_addr_i  (dma_req_valid_i ? dma_req_i.row
                                    : tx_out_req[b].addr[ByteOffset+BankBits+TileBits +: RowBits]),
      .req_wen_i   (dma_req_valid_i ? dma_req_i.wen : tx_out_req[b].wen),
      .req_be_i    (dma_req_valid_i ? dma_req_i.strb[4*b +: 4] : tx_out_req[b].be),
      .req_wdata_i (dma_req_valid_i ? dma_req_i.wdata[32*b +: 32] : tx_out_req[b].wdata),
      .req_amo_i   (dma_req_valid_i ? AmoNone : tx_out_req[b].amo),
      .req_core_i  (tx_out_req[b].core_id),
      .meta_i      (meta_in),
      .resp_valid_o(bank_rvalid[b]),
      .resp_ready_i(bank_rready[b]),
      .resp_rdata_o(rdata),
      .meta_o      (meta_out)
    );
    assign tx_out_ready[b]         = bank_ready[b] && !dma_req_valid_i;
    assign tx_out_rvalid[b]        = bank_rvalid[b] && !meta_out.dma;
    assign tx_out_rdst[b]          = meta_out.src;
    assign tx_out_resp[b].rdata    = rdata;
    assign tx_out_resp[b].core_id  = meta_out.core_id;
    assign tx_out_resp[b].tid      = meta_out.tid;
    assign bank_rready[b]          = meta_out.dma ? 1'b1 : tx_out_rready[b];
    assign dma_rsp_data_o[32*b +: 32] = rdata;
  end
  assign dma_rsp_valid_o = bank_rvalid[0] && g_bank[0].meta_out.dma;

  // ================================================================ remote interconnect
  logic [NC-1:0]  rx_in_ready, rx_in_rvalid;
  tcdm_resp_t     rx_in_resp [NC];
  logic [NC-1:0]  rx_in_rready;
  logic [3:0]     rx_out_valid, rx_out_ready, rx_out_rvalid, rx_out_rready;
  logic [CW-1:0]  rx_out_src  [4];
  logic [CW-1:0]  rx_out_rdst [4];
  tcdm_req_t      rx_out_req  [4];
  tcdm_resp_t     rx_out_resp [4];

  crossbar #(.NumIn(NC), .NumOut(4), .req_t(tcdm_req_t), .resp_t(tcdm_resp_t))
  i_remote_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(to_remote), .in_ready_o(rx_in_ready), .in_tgt_i(dir_sel),
    .in_req_i(phys_req), .in_resp_valid_o(rx_in_rvalid), .in_resp_ready_i(rx_in_rready),
    .in_resp_o(rx_in_resp),
    .out_valid_o(rx_out_valid), .out_ready_i(rx_out_ready), .out_src_o(rx_out_src),
    .out_req_o(rx_out_req), .out_resp_valid_i(rx_out_rvalid), .out_resp_ready_o(rx_out_rready),
    .out_resp_dst_i(rx_out_rdst), .out_resp_i(rx_out_resp)
  );

  for (genvar p = 0; p < 4; p++) begin : g_port
    pipe_reg #(.T(tcdm_req_t)) i_req_reg (
      .clk_i, .rst_ni,
      .valid_i(rx_out_valid[p]), .ready_o(rx_out_ready[p]), .data_i(rx_out_req[p]),
      .valid_o(rmt_out_req_valid_o[p]), .ready_i(rmt_out_req_ready_i[p]),
      .data_o(rmt_out_req_o[p]));
    pipe_reg #(.T(tcdm_resp_t)) i_resp_reg (
      .clk_i, .rst_ni,
      .valid_i(rmt_out_resp_valid_i[p]), .ready_o(rmt_out_resp_ready_o[p]),
      .data_i(rmt_out_resp_i[p]),
      .valid_o(rx_out_rvalid[p]), .ready_i(rx_out_rready[p]), .data_o(rx_out_resp[p]));
    assign rx_out_rdst[p] = CW'(rx_out_resp[p].core_id);
  end

  // ================================================================ core AXI accesses
  typedef enum logic [2:0] {AxIdle, AxAr, AxR, AxAw, AxW, AxB, AxResp} ax_state_e;
  ax_state_e   ax_state_q;
  tcdm_req_t   ax_req_q;
  logic [CW-1:0] ax_core_q;
  logic [31:0] ax_rdata_q;
  logic [NC-1:0] ax_gnt;
  logic [CW-1:0] ax_idx;
  logic [NC-1:0] ax_ready, ax_rvalid;
  axi_req_t    core_axi_req;
  axi_resp_t   core_axi_resp;
  localparam int unsigned LaneBits = $clog2(AxiDataWidth / 32);

  rr_arbiter #(.N(NC)) i_ax_arb (
    .clk_i, .rst_ni, .req_i(to_axi & {NC{ax_state_q == AxIdle}}), .ack_i(1'b1),
    .gnt_o(ax_gnt), .idx_o(ax_idx));
  assign ax_ready = ax_gnt;

  always_comb begin
    core_axi_req          = '0;
    core_axi_req.ar_valid = ax_state_q == AxAr;
    core_axi_req.ar.addr  = {ax_req_q.addr[31:$clog2(AxiBeatBytes)], $clog2(AxiBeatBytes)'(0)};
    core_axi_req.aw_valid = ax_state_q == AxAw;
    core_axi_req.aw.addr  = core_axi_req.ar.addr;
    core_axi_req.w_valid  = ax_state_q == AxW;
    core_axi_req.w.data   = {(AxiDataWidth/32){ax_req_q.wdata}};
    core_axi_req.w.strb   = AxiStrbWidth'(ax_req_q.be) << (4 * ax_req_q.addr[2 +: LaneBits]);
    core_axi_req.w.last   = 1'b1;
    core_axi_req.r_ready  = ax_state_q == AxR;
    core_axi_req.b_ready  = ax_state_q == AxB;
    for (int unsigned c = 0; c < NC; c++)
      ax_rvalid[c] = ax_state_q == AxResp && ax_core_q == CW'(c);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ax_state_q <= AxIdle;
      ax_req_q   <= '0;
      ax_core_q  <= '0;
      ax_rdata_q <= '0;
    end else begin
      unique case (ax_state_q)
        AxIdle: if (|ax_gnt) begin
          ax_req_q   <= phys_req[ax_idx];
          ax_core_q  <= ax_idx;
          ax_state_q <= phys_req[ax_idx].wen ? AxAw : AxAr;
        end
        AxAr: if (core_axi_resp.ar_ready) ax_state_q <= AxR;
        AxR: if (core_axi_resp.r_valid) begin
          ax_rdata_q <= core_axi_resp.r.data[32 * ax_req_q.addr[2 +: LaneBits] +: 32];
          ax_state_q <= AxResp;
        end
        AxAw: if (core_axi_resp.aw_ready) ax_state_q <= AxW;
        AxW:  if (core_axi_resp.w_ready) ax_state_q <= AxB;
        AxB:  if (core_axi_resp.b_valid) begin
          ax_rdata_q <= '0;
          ax_state_q <= AxResp;
        end
        AxResp: if (core_resp_ready_i[ax_core_q] && !tx_in_rvalid[InW'(ax_core_q)] &&
                    !rx_in_rvalid[ax_core_q]) ax_state_q <= AxIdle;
        default: ax_state_q <= AxIdle;
      endcase
    end
  end

  // ================================================================ core handshakes
  for (genvar c = 0; c < NC; c++) begin : g_core
    assign core_req_ready_o[c] = (to_local[c] && tx_in_ready[c]) ||
                                 (to_remote[c] && rx_in_ready[c]) ||
                                 (to_axi[c] && ax_ready[c]);
    always_comb begin
      tx_in_rready[c]      = core_resp_ready_i[c];
      rx_in_rready[c]      = core_resp_ready_i[c] && !tx_in_rvalid[c];
      core_resp_valid_o[c] = tx_in_rvalid[c] || rx_in_rvalid[c] || ax_rvalid[c];
      if (tx_in_rvalid[c])      core_resp_o[c] = tx_in_resp[c];
      else if (rx_in_rvalid[c]) core_resp_o[c] = rx_in_resp[c];
      else                      core_resp_o[c] = '{rdata: ax_rdata_q,
                                                   core_id: ax_req_q.core_id,
                                                   tid: ax_req_q.tid};
    end
  end

  // ================================================================ instruction path
  logic [NC-1:0]               l0_rf_valid, l0_rf_ready, l0_rf_rvalid, l0_pf;
  logic [31:0]                 l0_rf_addr  [NC];
  logic [ICacheLineWidth-1:0]  l0_rf_rdata [NC];
  axi_req_t                    icache_axi_req;
  axi_resp_t                   icache_axi_resp;

  for (genvar c = 0; c < NC; c++) begin : g_l0
    l0_icache #(.NumLines(4), .LineWidth(ICacheLineWidth)) i_l0 (
      .clk_i, .rst_ni,
      .fetch_addr_i(fetch_addr_i[c]), .fetch_valid_i(fetch_valid_i[c]),
      .fetch_ready_o(fetch_ready_o[c]), .fetch_data_o(fetch_data_o[c]),
      .refill_valid_o(l0_rf_valid[c]), .refill_ready_i(l0_rf_ready[c]),
      .refill_addr_o(l0_rf_addr[c]), .refill_rvalid_i(l0_rf_rvalid[c]),
      .refill_rdata_i(l0_rf_rdata[c]), .prefetch_o(l0_pf[c]));
  end
  assign prefetch_o = |l0_pf;

  l1_icache #(.NumL0(NC), .CacheBytes(2048), .NumWays(2), .LineWidth(ICacheLineWidth)) i_l1 (
    .clk_i, .rst_ni,
    .l0_req_valid_i(l0_rf_valid), .l0_req_ready_o(l0_rf_ready), .l0_req_addr_i(l0_rf_addr),
    .l0_rsp_valid_o(l0_rf_rvalid), .l0_rsp_data_o(l0_rf_rdata),
    .axi_req_o(icache_axi_req), .axi_resp_i(icache_axi_resp), .coalesced_o(coalesced_o));

  axi_req_t  tile_axi_req  [2];
  axi_resp_t tile_axi_resp [2];
  assign tile_axi_req[0] = icache_axi_req;
  assign tile_axi_req[1] = core_axi_req;
  assign icache_axi_resp = tile_axi_resp[0];
  assign core_axi_resp   = tile_axi_resp[1];

  axi_node #(.NumIn(2)) i_axi_mux (
    .clk_i, .rst_ni, .slv_req_i(tile_axi_req), .slv_resp_o(tile_axi_resp),
    .mst_req_o(axi_req_o), .mst_resp_i(axi_resp_i));
endmodule
