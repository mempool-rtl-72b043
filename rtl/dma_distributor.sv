// dma_distributor: fans a DMA request out to NumOut parallel children.
//
// The L1 side of a request is divided into NumOut consecutive regions of RegionBytes
// (at cluster level: the four groups' 1 KiB slices of an L1 line; inside a group: the
// four backends' 256-byte slices, each the memory of four tiles).  The distributor
// intersects the request with every region and issues the non-empty parts to the
// matching children at the same time, source and destination shifted alike.  When
// all issued parts report done it pulses done_o.  One request is in flight at a time.
// The incoming request must not cross a NumOut*RegionBytes boundary; the splitter and
// an upper distributor guarantee this.  Function as in the paper; handshake, and one
// request in flight, are this design's choices.
module dma_distributor
  import mempool_pkg::*;
#(
  parameter int unsigned NumOut      = 4,
  parameter int unsigned RegionBytes = 1024
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  dma_req_t          req_i,
  output logic              done_o,
  output logic [NumOut-1:0] req_valid_o,
  input  logic [NumOut-1:0] req_ready_i,
  output dma_req_t          req_o [NumOut],
  input  logic [NumOut-1:0] done_i
);
  dma_req_t          cur_q;
  logic              active_q;
  logic [NumOut-1:0] to_issue_q, to_finish_q;

  logic [31:0] l1_addr, base, lo, hi, r_lo, r_hi, s, e;
  logic [NumOut-1:0] nonempty;
  dma_req_t    part [NumOut];

  always_comb begin
    l1_addr = is_l1(req_i.dst) ? req_i.dst : req_i.src;
    base    = l1_addr - (l1_addr % (NumOut * RegionBytes));
    lo      = l1_addr;
    hi      = l1_addr + req_i.num_bytes;
    for (int unsigned r = 0; r < NumOut; r++) begin
      r_lo = base + r * RegionBytes;
      r_hi = r_lo + RegionBytes;
      s    = lo > r_lo ? lo : r_lo;
      e    = hi < r_hi ? hi : r_hi;
      nonempty[r]       = s < e;
      part[r].num_bytes = nonempty[r] ? e - s : '0;
      part[r].src       = req_i.src + (s - lo);
      part[r].dst       = req_i.dst + (s - lo);
    end
  end

  assign req_ready_o = !active_q;
  assign req_valid_o = to_issue_q;

  dma_req_t held [NumOut];
  for (genvar r = 0; r < NumOut; r++) begin : g_out
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) held[r] <= '0;
      else if (req_valid_i && req_ready_o) held[r] <= part[r];
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < NumOut; r++) req_o[r] = held[r];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_q       <= '0;
      active_q    <= 1'b0;
      to_issue_q  <= '0;
      to_finish_q <= '0;
      done_o      <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        cur_q       <= req_i;
        active_q    <= 1'b1;
        to_issue_q  <= nonempty;
        to_finish_q <= nonempty;
      end else if (active_q) begin
        to_issue_q  <= to_issue_q & ~req_ready_i;
        to_finish_q <= to_finish_q & ~done_i;
        if ((to_finish_q & ~done_i) == '0) begin
          active_q <= 1'b0;
          done_o   <= 1'b1;
        end
      end
    end
  end
endmodule
