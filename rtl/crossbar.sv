// crossbar: fully connected request/response crossbar.
//
// NumIn initiators send requests, each naming a target index (in_tgt_i).  Every
// target has its own round-robin arbiter, so requests to different targets pass in
// the same cycle and only requests to the same target serialise.  The target sees
// the index of the winning initiator (out_src_o); it must return that index with its
// response (out_resp_dst_i), and responses are routed back by it, again through a
// round-robin arbiter per initiator.  Both directions are combinational (zero
// latency) with valid/ready handshakes; pipeline stages are added around it.
//
// In MemPool this one block serves as the tile interconnect (cores and incoming
// remote ports to the 16 banks), the tile's remote interconnect (cores to the L, N,
// NE and E ports) and the four 16x16 group interconnects.  The paper gives these as
// fully connected crossbars; arbitration policy and handshake are this design's.
module crossbar #(
  parameter int unsigned NumIn  = 4,
  parameter int unsigned NumOut = 4,
  parameter type req_t  = logic [31:0],
  parameter type resp_t = logic [31:0],
  localparam int unsigned InW  = NumIn  > 1 ? $clog2(NumIn)  : 1,
  localparam int unsigned OutW = NumOut > 1 ? $clog2(NumOut) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // initiator side
  input  logic  [NumIn-1:0]     in_valid_i,
  output logic  [NumIn-1:0]     in_ready_o,
  input  logic  [OutW-1:0]      in_tgt_i  [NumIn],
  input  req_t                  in_req_i  [NumIn],
  output logic  [NumIn-1:0]     in_resp_valid_o,
  input  logic  [NumIn-1:0]     in_resp_ready_i,
  output resp_t                 in_resp_o [NumIn],
  // target side
  output logic  [NumOut-1:0]    out_valid_o,
  input  logic  [NumOut-1:0]    out_ready_i,
  output logic  [InW-1:0]       out_src_o [NumOut],
  output req_t                  out_req_o [NumOut],
  input  logic  [NumOut-1:0]    out_resp_valid_i,
  output logic  [NumOut-1:0]    out_resp_ready_o,
  input  logic  [InW-1:0]       out_resp_dst_i [NumOut],
  input  resp_t                 out_resp_i [NumOut]
);
  logic [NumIn-1:0]  req_gnt  [NumOut];
  logic [NumOut-1:0] resp_gnt [NumIn];

  // ------------------------------------------------------------ requests
  for (genvar o = 0; o < NumOut; o++) begin : g_out
    logic [NumIn-1:0] req;
    logic [InW-1:0]   idx;
    for (genvar i = 0; i < NumIn; i++) begin : g_req
      assign req[i] = in_valid_i[i] && (in_tgt_i[i] == OutW'(o));
    end
    rr_arbiter #(.N(NumIn)) i_arb (
      .clk_i, .rst_ni, .req_i(req), .ack_i(out_ready_i[o]),
      .gnt_o(req_gnt[o]), .idx_o(idx)
    );
    assign out_valid_o[o] = |req;
    assign out_src_o[o]   = idx;
    assign out_req_o[o]   = in_req_i[idx];
  end

  always_comb begin
    in_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++)
      for (int unsigned i = 0; i < NumIn; i++)
        if (req_gnt[o][i] && out_ready_i[o]) in_ready_o[i] = 1'b1;
  end

  // ------------------------------------------------------------ responses
  for (genvar i = 0; i < NumIn; i++) begin : g_in
    logic [NumOut-1:0] req;
    logic [OutW-1:0]   idx;
    for (genvar o = 0; o < NumOut; o++) begin : g_rsp
      assign req[o] = out_resp_valid_i[o] && (out_resp_dst_i[o] == InW'(i));
    end
    rr_arbiter #(.N(NumOut)) i_arb (
      .clk_i, .rst_ni, .req_i(req), .ack_i(in_resp_ready_i[i]),
      .gnt_o(resp_gnt[i]), .idx_o(idx)
    );
    assign in_resp_valid_o[i] = |req;
    assign in_resp_o[i]       = out_resp_i[idx];
  end

  always_comb begin
    out_resp_ready_o = '0;
    for (int unsigned i = 0; i < NumIn; i++)
      for (int unsigned o = 0; o < NumOut; o++)
        if (resp_gnt[i][o] && in_resp_ready_i[i]) out_resp_ready_o[o] = 1'b1;
  end

  // A request may only name an existing target.
  for (genvar i = 0; i < NumIn; i++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid_i[i] |-> int'(in_tgt_i[i]) < NumOut);
  end
endmodule
