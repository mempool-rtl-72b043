// ro_cache: software-managed read-only cache on the hierarchical AXI tree.
// Lint note: Verilator reports UNOPTFLAT on the AXI bundles here because one packed struct
// carries handshakes of both directions; the loop is between different fields, not a real one.
//
// Sits between a node's children and its parent port.  Reads whose address lies in
// the configured region [cached_start_i, cached_end_i) are served from a cache of
// CacheBytes (default 8 KiB, the paper's size) with LineWidth-bit lines (default one
// 512-bit AXI beat); all other reads and every write bypass it unchanged.  The cache
// never holds written data (no write support, so no coherence problem); software
// invalidates it with flush_i.
//
// Operation: an AXI read burst to the cached region is broken into one lookup per
// beat.  A hit returns the beat at once; a miss issues a single-beat refill read on
// the parent port, stores the line and then returns the beat.  Refill reads carry an
// extra low ID bit set to 1 (bypassed reads have it 0), which steers the returning
// data.  To keep AXI's same-ID ordering, cached bursts and bypassed reads are never
// in flight at the same time.
//
// The split into burst-to-request conversion, lookup and miss handling follows the
// paper, as do the read-only, software-managed design and the 8 KiB size.  This
// version handles one cached burst at a time and blocks during a miss; the paper's
// cache is fully pipelined with several outstanding misses.  Direct mapping and the
// line width are this design's choices.
module ro_cache
  import mempool_pkg::*;
#(
  parameter int unsigned CacheBytes = 8192,
  parameter int unsigned LineWidth  = 512
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] cached_start_i,
  input  logic [31:0] cached_end_i,
  input  logic        flush_i,
  input  axi_req_t    slv_req_i,
  output axi_resp_t   slv_resp_o,
  output axi_req_t    mst_req_o,
  input  axi_resp_t   mst_resp_i,
  output logic        hit_o,          // a cached beat was a hit (statistics)
  output logic        miss_o          // a cached beat missed (statistics)
);
  localparam int unsigned LineBytes = LineWidth / 8;
  localparam int unsigned NumLines  = CacheBytes / LineBytes;
  localparam int unsigned OffBits   = $clog2(LineBytes);
  localparam int unsigned IdxBits   = $clog2(NumLines);
  localparam int unsigned TagBits   = 32 - OffBits - IdxBits;

  typedef enum logic [2:0] {Idle, Lookup, RefillAr, RefillR, Resp} state_e;
  state_e state_q;

  logic [TagBits-1:0]   tag_q [NumLines];
  logic [NumLines-1:0]  valid_q;
  logic [LineWidth-1:0] data_q [NumLines];

  axi_ax_t              ar_q;        // current cached burst, addr advanced per beat
  logic [7:0]           left_q;      // beats left after the current one
  logic [LineWidth-1:0] beat_q;
  logic [7:0]           byp_cnt_q;   // bypassed reads in flight

  logic in_region, cache_ar, byp_ar, refill_r;
  logic [IdxBits-1:0] idx;
  logic [TagBits-1:0] tag;
  logic               hit;

  assign in_region = slv_req_i.ar.addr >= cached_start_i && slv_req_i.ar.addr < cached_end_i;
  assign cache_ar  = slv_req_i.ar_valid && in_region && state_q == Idle && byp_cnt_q == '0
                     && !flush_i;
  assign byp_ar    = slv_req_i.ar_valid && !in_region && state_q == Idle;
  assign refill_r  = mst_resp_i.r_valid && mst_resp_i.r.id[0];

  assign idx = ar_q.addr[OffBits +: IdxBits];
  assign tag = ar_q.addr[31 -: TagBits];
  assign hit = valid_q[idx] && tag_q[idx] == tag;

  assign hit_o  = state_q == Lookup && hit;
  assign miss_o = state_q == Lookup && !hit;

  always_comb begin
    // writes: straight through
    mst_req_o          = '0;
    mst_req_o.aw_valid = slv_req_i.aw_valid;
    mst_req_o.aw       = slv_req_i.aw;
    mst_req_o.w_valid  = slv_req_i.w_valid;
    mst_req_o.w        = slv_req_i.w;
    mst_req_o.b_ready  = slv_req_i.b_ready;
    slv_resp_o          = '0;
    slv_resp_o.aw_ready = mst_resp_i.aw_ready;
    slv_resp_o.w_ready  = mst_resp_i.w_ready;
    slv_resp_o.b        = mst_resp_i.b;
    slv_resp_o.b_valid  = mst_resp_i.b_valid;
    // reads
    if (state_q == RefillAr) begin
      mst_req_o.ar_valid = 1'b1;
      mst_req_o.ar.addr  = {ar_q.addr[31:OffBits], OffBits'(0)};
      mst_req_o.ar.len   = '0;
      mst_req_o.ar.id    = AxiIdWidth'(1);
    end else begin
      mst_req_o.ar_valid = byp_ar;
      mst_req_o.ar       = slv_req_i.ar;
      mst_req_o.ar.id    = slv_req_i.ar.id << 1;
    end
    slv_resp_o.ar_ready = cache_ar || (byp_ar && mst_resp_i.ar_ready);
    if (refill_r) begin
      mst_req_o.r_ready = 1'b1;
    end else begin
      mst_req_o.r_ready    = slv_req_i.r_ready;
      slv_resp_o.r_valid   = mst_resp_i.r_valid;
      slv_resp_o.r         = mst_resp_i.r;
      slv_resp_o.r.id      = mst_resp_i.r.id >> 1;
    end
    if (state_q == Resp) begin
      slv_resp_o.r_valid = 1'b1;
      slv_resp_o.r.id    = ar_q.id;
      slv_resp_o.r.data  = AxiDataWidth'(beat_q);
      slv_resp_o.r.last  = left_q == '0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= Idle;
      ar_q      <= '0;
      left_q    <= '0;
      beat_q    <= '0;
      valid_q   <= '0;
      byp_cnt_q <= '0;
      for (int unsigned i = 0; i < NumLines; i++) begin
        tag_q[i]  <= '0;
        data_q[i] <= '0;
      end
    end else begin
      if (flush_i && state_q == Idle) valid_q <= '0;
      // bypassed reads in flight
      byp_cnt_q <= byp_cnt_q
                   + 8'((byp_ar && mst_resp_i.ar_ready) ? 1 : 0)
                   - 8'((mst_resp_i.r_valid && !mst_resp_i.r.id[0] && slv_req_i.r_ready &&
                         mst_resp_i.r.last) ? 1 : 0);
      unique case (state_q)
        Idle: if (cache_ar) begin
          ar_q    <= slv_req_i.ar;
          left_q  <= slv_req_i.ar.len;
          state_q <= Lookup;
        end
        Lookup: begin
          if (hit) begin
            beat_q  <= data_q[idx];
            state_q <= Resp;
          end else begin
            state_q <= RefillAr;
          end
        end
        RefillAr: if (mst_resp_i.ar_ready) state_q <= RefillR;
        RefillR: if (refill_r) begin
          valid_q[idx] <= 1'b1;
          tag_q[idx]   <= tag;
          data_q[idx]  <= mst_resp_i.r.data[LineWidth-1:0];
          beat_q       <= mst_resp_i.r.data[LineWidth-1:0];
          state_q      <= Resp;
        end
        Resp: if (slv_req_i.r_ready) begin
          if (left_q == '0) begin
            state_q <= Idle;
          end else begin
            left_q      <= left_q - 1'b1;
            ar_q.addr   <= ar_q.addr + 32'(LineBytes);
            state_q     <= Lookup;
          end
        end
        default: state_q <= Idle;
      endcase
    end
  end
endmodule
