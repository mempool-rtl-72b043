// l0_icache: private, fully associative L0 instruction cache of one core.
//
// Holds NumLines lines of LineWidth bits (default 4 x 256 bit = 32 instructions, as
// in the paper's final configuration).  A fetch that hits is answered in the same
// cycle (fetch_ready_o with the instruction), because the single-stage core puts this
// lookup on its critical path.  A miss requests the line from the tile's shared L1
// instruction cache and stalls until it arrives.  Lines are replaced in FIFO order.
//
// Prefetcher: while no refill is outstanding, the line holding the current fetch
// address is scanned for a predictable control transfer - a JAL, or a conditional
// branch with a negative (backward, loop-closing) offset.  If the target line of the
// first one found is missing, it is prefetched; otherwise the next sequential line is
// prefetched if missing.  The paper states that the L0 prefetches by scanning the
// current line for backward branches and predictable jumps; the order of the
// candidates, one outstanding refill and FIFO replacement are this design's choices.
// The paper's latch-based storage is modelled with flip-flops.
//
// Refill interface: refill_valid_o/refill_ready_i carry a line address; the L1 answers
// later with refill_rvalid_i and the line (always accepted).
module l0_icache #(
  parameter int unsigned NumLines  = 4,
  parameter int unsigned LineWidth = 256
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [31:0]          fetch_addr_i,
  input  logic                 fetch_valid_i,
  output logic                 fetch_ready_o,
  output logic [31:0]          fetch_data_o,
  output logic                 refill_valid_o,
  input  logic                 refill_ready_i,
  output logic [31:0]          refill_addr_o,
  input  logic                 refill_rvalid_i,
  input  logic [LineWidth-1:0] refill_rdata_i,
  output logic                 prefetch_o      // a prefetch was issued (statistics)
);
  localparam int unsigned LineBytes = LineWidth / 8;
  localparam int unsigned OffBits   = $clog2(LineBytes);
  localparam int unsigned TagBits   = 32 - OffBits;
  localparam int unsigned Insts     = LineWidth / 32;
  localparam int unsigned PtrW      = NumLines > 1 ? $clog2(NumLines) : 1;

  logic [TagBits-1:0]   tag_q   [NumLines];
  logic [LineWidth-1:0] data_q  [NumLines];
  logic [NumLines-1:0]  valid_q;
  logic [PtrW-1:0]      victim_q;
  logic                 busy_q;              // a refill is outstanding
  logic [TagBits-1:0]   busy_tag_q;

  // ------------------------------------------------------------ lookup
  function automatic logic present(input logic [TagBits-1:0] t,
                                   input logic [TagBits-1:0] tags [NumLines],
                                   input logic [NumLines-1:0] v);
    logic p = 1'b0;
    for (int unsigned i = 0; i < NumLines; i++) if (v[i] && tags[i] == t) p = 1'b1;
    return p;
  endfunction

  logic [TagBits-1:0]   fetch_tag;
  logic                 hit;
  logic [LineWidth-1:0] hit_line;
  logic [OffBits-3:0]   word;

  assign fetch_tag = fetch_addr_i[31:OffBits];
  assign word      = fetch_addr_i[OffBits-1:2];

  always_comb begin
    hit      = 1'b0;
    hit_line = '0;
    for (int unsigned i = 0; i < NumLines; i++) begin
      if (valid_q[i] && tag_q[i] == fetch_tag) begin
        hit      = 1'b1;
        hit_line = data_q[i];
      end
    end
  end

  assign fetch_ready_o = fetch_valid_i && hit;
  assign fetch_data_o  = hit_line[32*word +: 32];

  // ------------------------------------------------------------ prefetch target
  logic                 pf_found;
  logic [31:0]          pf_target;

  always_comb begin
    logic [31:0] inst, pc, imm;
    pf_found  = 1'b0;
    pf_target = '0;
    for (int unsigned k = 0; k < Insts; k++) begin
      inst = hit_line[32*k +: 32];
      pc   = {fetch_tag, OffBits'(4 * k)};
      imm  = '0;
      if (!pf_found && inst[6:0] == 7'b1101111) begin               // JAL
        imm = {{12{inst[31]}}, inst[19:12], inst[20], inst[30:21], 1'b0};
        pf_found  = 1'b1;
        pf_target = pc + imm;
      end else if (!pf_found && inst[6:0] == 7'b1100011 && inst[31]) begin // backward branch
        imm = {{20{inst[31]}}, inst[7], inst[30:25], inst[11:8], 1'b0};
        pf_found  = 1'b1;
        pf_target = pc + imm;
      end
    end
  end

  // ------------------------------------------------------------ refill request
  logic               demand;
  logic [TagBits-1:0] jump_tag, next_tag, pf_tag;
  logic               pf_want;

  assign demand   = fetch_valid_i && !hit;
  assign jump_tag = pf_target[31:OffBits];
  assign next_tag = fetch_tag + 1'b1;

  always_comb begin
    pf_want = 1'b0;
    pf_tag  = next_tag;
    if (fetch_valid_i && hit) begin
      if (pf_found && !present(jump_tag, tag_q, valid_q)) begin
        pf_want = 1'b1;
        pf_tag  = jump_tag;
      end else if (!present(next_tag, tag_q, valid_q)) begin
        pf_want = 1'b1;
        pf_tag  = next_tag;
      end
    end
  end

  assign refill_valid_o = !busy_q && (demand || pf_want);
  assign refill_addr_o  = {(demand ? fetch_tag : pf_tag), OffBits'(0)};
  assign prefetch_o     = refill_valid_o && refill_ready_i && !demand;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q    <= '0;
      victim_q   <= '0;
      busy_q     <= 1'b0;
      busy_tag_q <= '0;
      for (int unsigned i = 0; i < NumLines; i++) begin
        tag_q[i]  <= '0;
        data_q[i] <= '0;
      end
    end else begin
      if (refill_valid_o && refill_ready_i) begin
        busy_q     <= 1'b1;
        busy_tag_q <= refill_addr_o[31:OffBits];
      end
      if (busy_q && refill_rvalid_i) begin
        busy_q            <= 1'b0;
        valid_q[victim_q] <= 1'b1;
        tag_q[victim_q]   <= busy_tag_q;
        data_q[victim_q]  <= refill_rdata_i;
        victim_q          <= (victim_q == PtrW'(NumLines - 1)) ? '0 : victim_q + 1'b1;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) refill_rvalid_i |-> busy_q);
endmodule
