// axi_node: one node of MemPool's hierarchical AXI tree.
// Lint note: Verilator reports UNOPTFLAT on the AXI bundles here because one packed struct
// carries handshakes of both directions; the loop is between different fields, not a real one.
//
// Merges NumIn AXI masters (tiles, DMA backends or lower nodes) into one master port.
// Read and write address channels each have a round-robin arbiter.  The index of the
// winning child is appended below the ID (id_out = id_in << SelBits | child), and
// read data and write responses are routed back by those low ID bits, with the ID
// shifted back.  Write data follows its address: after an AW handshake the node
// forwards only that child's W beats until the last one, and takes no new AW before.
// Everything is combinational (no added latency).  The paper describes a configurable
// tree of such nodes; the ID scheme and the W locking are this design's choices.
// The AXI ID width is fixed (AxiIdWidth), so the tree depth times SelBits plus the
// leaves' ID bits must fit in it.
module axi_node
  import mempool_pkg::*;
#(
  parameter int unsigned NumIn = 16,
  localparam int unsigned SelBits = NumIn > 1 ? $clog2(NumIn) : 1
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  slv_req_i  [NumIn],
  output axi_resp_t slv_resp_o [NumIn],
  output axi_req_t  mst_req_o,
  input  axi_resp_t mst_resp_i
);
  logic [NumIn-1:0]   ar_req, aw_req, ar_gnt, aw_gnt;
  logic [SelBits-1:0] ar_idx, aw_idx, r_idx, b_idx;
  logic               w_busy_q;
  logic [SelBits-1:0] w_sel_q;

  for (genvar i = 0; i < NumIn; i++) begin : g_req
    assign ar_req[i] = slv_req_i[i].ar_valid;
    assign aw_req[i] = slv_req_i[i].aw_valid && !w_busy_q;
  end

  rr_arbiter #(.N(NumIn)) i_ar_arb (
    .clk_i, .rst_ni, .req_i(ar_req), .ack_i(mst_resp_i.ar_ready),
    .gnt_o(ar_gnt), .idx_o(ar_idx));
  rr_arbiter #(.N(NumIn)) i_aw_arb (
    .clk_i, .rst_ni, .req_i(aw_req), .ack_i(mst_resp_i.aw_ready),
    .gnt_o(aw_gnt), .idx_o(aw_idx));

  assign r_idx = mst_resp_i.r.id[SelBits-1:0];
  assign b_idx = mst_resp_i.b.id[SelBits-1:0];

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.ar_valid = |ar_req;
    mst_req_o.ar       = slv_req_i[ar_idx].ar;
    mst_req_o.ar.id    = (slv_req_i[ar_idx].ar.id << SelBits) | AxiIdWidth'(ar_idx);
    mst_req_o.aw_valid = |aw_req;
    mst_req_o.aw       = slv_req_i[aw_idx].aw;
    mst_req_o.aw.id    = (slv_req_i[aw_idx].aw.id << SelBits) | AxiIdWidth'(aw_idx);
    mst_req_o.w_valid  = w_busy_q && slv_req_i[w_sel_q].w_valid;
    mst_req_o.w        = slv_req_i[w_sel_q].w;
    mst_req_o.r_ready  = slv_req_i[r_idx].r_ready;
    mst_req_o.b_ready  = slv_req_i[b_idx].b_ready;
    for (int unsigned i = 0; i < NumIn; i++) begin
      slv_resp_o[i]          = '0;
      slv_resp_o[i].ar_ready = ar_gnt[i] && mst_resp_i.ar_ready;
      slv_resp_o[i].aw_ready = aw_gnt[i] && mst_resp_i.aw_ready;
      slv_resp_o[i].w_ready  = w_busy_q && (w_sel_q == SelBits'(i)) && mst_resp_i.w_ready;
      slv_resp_o[i].r        = mst_resp_i.r;
      slv_resp_o[i].r.id     = mst_resp_i.r.id >> SelBits;
      slv_resp_o[i].r_valid  = mst_resp_i.r_valid && (r_idx == SelBits'(i));
      slv_resp_o[i].b        = mst_resp_i.b;
      slv_resp_o[i].b.id     = mst_resp_i.b.id >> SelBits;
      slv_resp_o[i].b_valid  = mst_resp_i.b_valid && (b_idx == SelBits'(i));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_busy_q <= 1'b0;
      w_sel_q  <= '0;
    end else begin
      if (mst_req_o.aw_valid && mst_resp_i.aw_ready) begin
        w_busy_q <= 1'b1;
        w_sel_q  <= aw_idx;
      end else if (mst_req_o.w_valid && mst_resp_i.w_ready && mst_req_o.w.last) begin
        w_busy_q <= 1'b0;
      end
    end
  end
endmodule
