// l1_icache: the tile's shared L1 instruction cache (serial lookup, coalescing refill).
//
// Serves the NumL0 private L0 caches of a tile.  Default: 2 KiB, 2-way set
// associative, 256-bit lines (32 sets), as in the paper.  The tags sit in flip-flops
// (the paper's latch-based SCM) and are checked for all L0 requests in parallel; one
// request per cycle (round-robin) wins.  The lookup is serial and fully pipelined:
//   cycle 0  tag check, way selected
//   cycle 1  one read of the single data array at {set, way}
//   cycle 2  line returned to the L0
// so a hit costs two cycles and only one data array is read per lookup.
//
// Misses are coalesced: one refill is outstanding at a time and every L0 that misses on
// the same line joins it; when the AXI read beat returns, the line is written into the
// cache and handed to all waiting L0s in the same cycle.  A request that misses on a
// different line is not accepted until the refill is done.  Refills are single-beat
// AXI reads on the tile's 512-bit AXI port (the line is the matching half of the beat);
// lookups pause in the cycle a refill is written.  Victim: an invalid way, else a
// per-set round-robin bit.  The serial lookup, the parallel answer to all waiting L0s
// and the coalescing follow the paper; one refill in flight, the victim policy and the
// 1-read/1-write data array are this design's choices.
module l1_icache
  import mempool_pkg::*;
#(
  parameter int unsigned NumL0      = 4,
  parameter int unsigned CacheBytes = 2048,
  parameter int unsigned NumWays    = 2,
  parameter int unsigned LineWidth  = 256
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [NumL0-1:0]     l0_req_valid_i,
  output logic [NumL0-1:0]     l0_req_ready_o,
  input  logic [31:0]          l0_req_addr_i [NumL0],
  output logic [NumL0-1:0]     l0_rsp_valid_o,
  output logic [LineWidth-1:0] l0_rsp_data_o [NumL0],
  output axi_req_t             axi_req_o,
  input  axi_resp_t            axi_resp_i,
  output logic                 coalesced_o     // a miss joined an outstanding refill
);
  localparam int unsigned LineBytes = LineWidth / 8;
  localparam int unsigned NumSets   = CacheBytes / LineBytes / NumWays;
  localparam int unsigned OffBits   = $clog2(LineBytes);
  localparam int unsigned SetBits   = $clog2(NumSets);
  localparam int unsigned TagBits   = 32 - OffBits - SetBits;
  localparam int unsigned WayBits   = NumWays > 1 ? $clog2(NumWays) : 1;
  localparam int unsigned SrcBits   = NumL0 > 1 ? $clog2(NumL0) : 1;
  localparam int unsigned HalfBits  = $clog2(AxiDataWidth / LineWidth);

  logic [TagBits-1:0]   tag_q   [NumWays][NumSets];
  logic [NumSets-1:0]   valid_q [NumWays];
  logic [NumSets-1:0]   rr_q;
  logic [LineWidth-1:0] data_mem [NumSets * NumWays];

  // ------------------------------------------------------------ refill state
  logic                 rf_busy_q, rf_issued_q;
  logic [31:0]          rf_addr_q;
  logic [NumL0-1:0]     rf_wait_q;

  // ------------------------------------------------------------ stage 0: tag check
  logic [NumL0-1:0]     hit, eligible, gnt;
  logic [WayBits-1:0]   hit_way [NumL0];
  logic [SrcBits-1:0]   win;
  logic                 refill_write;

  assign refill_write = rf_busy_q && rf_issued_q && axi_resp_i.r_valid;

  for (genvar i = 0; i < NumL0; i++) begin : g_tag
    logic [SetBits-1:0] set;
    logic [TagBits-1:0] tag;
    assign set = l0_req_addr_i[i][OffBits +: SetBits];
    assign tag = l0_req_addr_i[i][31 -: TagBits];
    always_comb begin
      hit[i]     = 1'b0;
      hit_way[i] = '0;
      for (int unsigned w = 0; w < NumWays; w++) begin
        if (valid_q[w][set] && tag_q[w][set] == tag) begin
          hit[i]     = 1'b1;
          hit_way[i] = WayBits'(w);
        end
      end
    end
    assign eligible[i] = l0_req_valid_i[i] && !refill_write &&
        (hit[i] || !rf_busy_q ||
         (l0_req_addr_i[i][31:OffBits] == rf_addr_q[31:OffBits]));
  end

  rr_arbiter #(.N(NumL0)) i_arb (
    .clk_i, .rst_ni, .req_i(eligible), .ack_i(1'b1), .gnt_o(gnt), .idx_o(win)
  );

  assign l0_req_ready_o = gnt;

  logic                      acc, acc_hit;
  logic [31:0]               acc_addr;
  logic [SetBits-1:0]        acc_set;
  assign acc      = |gnt;
  assign acc_hit  = hit[win];
  assign acc_addr = l0_req_addr_i[win];
  assign acc_set  = acc_addr[OffBits +: SetBits];

  // ------------------------------------------------------------ stage 1 / 2: data
  logic                 s1_valid_q, s2_valid_q;
  logic [SrcBits-1:0]   s1_src_q, s2_src_q;
  logic [SetBits+WayBits-1:0] s1_idx_q;
  logic [LineWidth-1:0] s2_data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid_q <= 1'b0;
      s2_valid_q <= 1'b0;
      s1_src_q   <= '0;
      s2_src_q   <= '0;
      s1_idx_q   <= '0;
    end else begin
      s1_valid_q <= acc && acc_hit;
      if (acc && acc_hit) begin
        s1_src_q <= win;
        s1_idx_q <= {acc_set, hit_way[win]};
      end
      s2_valid_q <= s1_valid_q;
      s2_src_q   <= s1_src_q;
    end
  end

  always_ff @(posedge clk_i) begin
    if (s1_valid_q) s2_data_q <= data_mem[s1_idx_q];
  end

  // ------------------------------------------------------------ refill
  logic [SetBits-1:0]   rf_set;
  logic [WayBits-1:0]   rf_way;
  logic [LineWidth-1:0] rf_line;
  logic [HalfBits > 0 ? HalfBits-1 : 0:0] rf_half;

  assign rf_set = rf_addr_q[OffBits +: SetBits];
  if (HalfBits > 0) begin : g_half
    assign rf_half = rf_addr_q[OffBits +: HalfBits];
  end else begin : g_nohalf
    assign rf_half = '0;
  end
  assign rf_line = axi_resp_i.r.data[LineWidth * rf_half +: LineWidth];

  always_comb begin
    rf_way = WayBits'(rr_q[rf_set]);
    for (int w = NumWays - 1; w >= 0; w--) if (!valid_q[w][rf_set]) rf_way = WayBits'(w);
  end

  assign coalesced_o = acc && !acc_hit && rf_busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rf_busy_q   <= 1'b0;
      rf_issued_q <= 1'b0;
      rf_addr_q   <= '0;
      rf_wait_q   <= '0;
      rr_q        <= '0;
      for (int unsigned w = 0; w < NumWays; w++) begin
        valid_q[w] <= '0;
        for (int unsigned s = 0; s < NumSets; s++) tag_q[w][s] <= '0;
      end
    end else begin
      if (acc && !acc_hit) begin
        rf_wait_q[win] <= 1'b1;
        if (!rf_busy_q) begin
          rf_busy_q   <= 1'b1;
          rf_issued_q <= 1'b0;
          rf_addr_q   <= {acc_addr[31:OffBits], OffBits'(0)};
        end
      end
      if (rf_busy_q && !rf_issued_q && axi_resp_i.ar_ready) rf_issued_q <= 1'b1;
      if (refill_write) begin
        rf_busy_q             <= 1'b0;
        rf_issued_q           <= 1'b0;
        rf_wait_q             <= '0;
        valid_q[rf_way][rf_set] <= 1'b1;
        tag_q[rf_way][rf_set]   <= rf_addr_q[31 -: TagBits];
        rr_q[rf_set]          <= ~rr_q[rf_set];
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (refill_write) data_mem[{rf_set, rf_way}] <= rf_line;
  end

  // ------------------------------------------------------------ responses
  always_comb begin
    for (int unsigned i = 0; i < NumL0; i++) begin
      l0_rsp_valid_o[i] = (s2_valid_q && s2_src_q == SrcBits'(i)) ||
                          (refill_write && rf_wait_q[i]);
      l0_rsp_data_o[i]  = (refill_write && rf_wait_q[i]) ? rf_line : s2_data_q;
    end
  end

  // ------------------------------------------------------------ AXI (read only)
  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar_valid = rf_busy_q && !rf_issued_q;
    axi_req_o.ar.addr  = {rf_addr_q[31:$clog2(AxiBeatBytes)], $clog2(AxiBeatBytes)'(0)};
    axi_req_o.ar.len   = '0;
    axi_req_o.ar.id    = '0;
    axi_req_o.r_ready  = 1'b1;
    axi_req_o.b_ready  = 1'b1;
  end

  // An L0 keeps at most one request in flight, so a hit and a refill never answer
  // the same L0 in the same cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(s2_valid_q && refill_write && rf_wait_q[s2_src_q]));
endmodule
