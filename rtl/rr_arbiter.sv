// rr_arbiter: round-robin arbiter over N requesters.
//
// Grants (one-hot) the first requester at or after the priority pointer.  The
// pointer moves one past the winner when the grant is accepted (ack_i), so every
// requester is served within N handshakes.  Combinational from req_i to gnt_o.
// Helper of this design; the paper does not state the arbitration policy.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] req_i,
  input  logic         ack_i,
  output logic [N-1:0] gnt_o,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] idx_o
);
  localparam int unsigned W = N > 1 ? $clog2(N) : 1;
  logic [W-1:0] ptr_q;

  always_comb begin
    int unsigned k;
    gnt_o = '0;
    idx_o = '0;
    for (int unsigned i = 0; i < N; i++) begin
      k = (int'(ptr_q) + i) % N;
      if (req_i[k] && gnt_o == '0) begin
        gnt_o[k] = 1'b1;
        idx_o    = W'(k);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (ack_i && |gnt_o) ptr_q <= (idx_o == W'(N - 1)) ? '0 : idx_o + 1'b1;
  end
endmodule
