// dma_splitter: cuts a DMA transfer into pieces that each stay inside one L1 line.
//
// An L1 "line" is one row across all banks of the cluster (LineBytes, 4 KiB by
// default: 1024 banks x 4 bytes); because the L1 is word-interleaved, a line spans
// every tile once.  The splitter walks the transfer and emits, one after the other,
// requests that end at the next line boundary of the L1-side address (the
// destination for L2->L1, else the source), advancing source and destination
// together.  It then waits until every piece has reported done and pulses done_o.
// One transfer is handled at a time (req_ready_o low meanwhile).  Function as in the
// paper; the handshake is this design's.
module dma_splitter
  import mempool_pkg::*;
#(
  parameter int unsigned LineBytes = 4096
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  dma_req_t req_i,
  output logic     done_o,
  output logic     req_valid_o,
  input  logic     req_ready_i,
  output dma_req_t req_o,
  input  logic     done_i
);
  dma_req_t    cur_q;          // what is left to emit
  logic        active_q;
  logic [31:0] outstanding_q;

  logic [31:0] l1_addr, room, chunk;
  assign l1_addr = is_l1(cur_q.dst) ? cur_q.dst : cur_q.src;
  assign room    = LineBytes - (l1_addr % LineBytes);
  assign chunk   = cur_q.num_bytes < room ? cur_q.num_bytes : room;

  assign req_ready_o = !active_q;
  assign req_valid_o = active_q && cur_q.num_bytes != '0;
  assign req_o       = '{src: cur_q.src, dst: cur_q.dst, num_bytes: chunk};

  logic issue;
  assign issue = req_valid_o && req_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_q         <= '0;
      active_q      <= 1'b0;
      outstanding_q <= '0;
      done_o        <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        cur_q    <= req_i;
        active_q <= 1'b1;
      end
      if (issue) begin
        cur_q.src       <= cur_q.src + chunk;
        cur_q.dst       <= cur_q.dst + chunk;
        cur_q.num_bytes <= cur_q.num_bytes - chunk;
      end
      outstanding_q <= outstanding_q + 32'(issue) - 32'(done_i);
      if (active_q && cur_q.num_bytes == '0 && outstanding_q == '0 && !done_i) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
    end
  end
endmodule
