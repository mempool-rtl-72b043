// dma_backend: data mover of the distributed DMA, serving TilesPerBackend tiles.
//
// Executes one request at a time whose L1 side lies in its tiles' slice of an L1 line
// (default 4 tiles x 64 bytes).  Every AXI beat (512 bit) is exactly one row of one
// tile's 16 banks, so the backend moves whole rows through each tile's wide DMA port
// into the tile crossbar:
//   L2 -> L1: one AXI read burst from the source; each returning beat is written into
//             row addr[19:12] of tile addr[11:6] (modulo TilesPerBackend).
//   L1 -> L2: one AXI write burst to the destination; for each beat the row is read
//             from the tile, then sent as a W beat; done after the B response.
// done_o pulses when the request is complete.  The L1 address of the request must be
// 64-byte aligned and its length a multiple of 64 bytes.  The paper takes the data
// mover from a modular DMA engine and describes what it connects to; this simple
// mover, the alignment rule and the row-wide tile port are this design's choices.
module dma_backend
  import mempool_pkg::*;
#(
  parameter int unsigned TilesPerBackend = 4,
  parameter logic [AxiIdWidth-1:0] AxiId = '0,
  localparam int unsigned TW = TilesPerBackend > 1 ? $clog2(TilesPerBackend) : 1
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       req_valid_i,
  output logic                       req_ready_o,
  input  dma_req_t                   req_i,
  output logic                       done_o,
  output axi_req_t                   axi_req_o,
  input  axi_resp_t                  axi_resp_i,
  output logic [TilesPerBackend-1:0] tile_req_valid_o,
  input  logic [TilesPerBackend-1:0] tile_req_ready_i,
  output dma_tile_req_t              tile_req_o,
  input  logic [TilesPerBackend-1:0] tile_rsp_valid_i,
  input  logic [AxiDataWidth-1:0]    tile_rsp_data_i [TilesPerBackend]
);
  localparam int unsigned BeatBits = $clog2(AxiBeatBytes);

  typedef enum logic [2:0] {Idle, RdAr, RdData, WrAw, WrRead, WrWait, WrW, WrB} state_e;
  state_e state_q;

  dma_req_t                cur_q;
  logic [31:0]             l1_q;       // L1 address of the current beat
  logic [7:0]              left_q;     // beats left after the current one
  logic [AxiDataWidth-1:0] buf_q;
  logic                    done_q;

  logic [TW-1:0]      tile;
  logic [RowBits-1:0] row;
  assign tile = TW'(l1_q[BeatBits +: TW]);
  assign row  = l1_q[ByteOffset + BankBits + TileBits +: RowBits];

  logic [7:0] beats_m1;
  assign beats_m1 = 8'((req_i.num_bytes >> BeatBits) - 1);

  assign req_ready_o = state_q == Idle;
  assign done_o      = done_q;

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar_valid = state_q == RdAr;
    axi_req_o.ar.id    = AxiId;
    axi_req_o.ar.addr  = cur_q.src;
    axi_req_o.ar.len   = 8'((cur_q.num_bytes >> BeatBits) - 1);
    axi_req_o.aw_valid = state_q == WrAw;
    axi_req_o.aw.id    = AxiId;
    axi_req_o.aw.addr  = cur_q.dst;
    axi_req_o.aw.len   = 8'((cur_q.num_bytes >> BeatBits) - 1);
    axi_req_o.w_valid  = state_q == WrW;
    axi_req_o.w.data   = buf_q;
    axi_req_o.w.strb   = '1;
    axi_req_o.w.last   = left_q == '0;
    axi_req_o.b_ready  = state_q == WrB;
    axi_req_o.r_ready  = state_q == RdData && tile_req_ready_i[tile];

    tile_req_valid_o       = '0;
    tile_req_o             = '0;
    tile_req_o.row         = row;
    if (state_q == RdData) begin
      tile_req_valid_o[tile] = axi_resp_i.r_valid;
      tile_req_o.wen         = 1'b1;
      tile_req_o.wdata       = axi_resp_i.r.data;
      tile_req_o.strb        = '1;
    end else if (state_q == WrRead) begin
      tile_req_valid_o[tile] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle;
      cur_q   <= '0;
      l1_q    <= '0;
      left_q  <= '0;
      buf_q   <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        Idle: if (req_valid_i) begin
          cur_q  <= req_i;
          left_q <= beats_m1;
          if (is_l1(req_i.dst)) begin
            l1_q    <= req_i.dst;
            state_q <= RdAr;
          end else begin
            l1_q    <= req_i.src;
            state_q <= WrAw;
          end
        end
        RdAr: if (axi_resp_i.ar_ready) state_q <= RdData;
        RdData: if (axi_resp_i.r_valid && tile_req_ready_i[tile]) begin
          l1_q <= l1_q + AxiBeatBytes;
          if (left_q == '0) begin
            state_q <= Idle;
            done_q  <= 1'b1;
          end else begin
            left_q <= left_q - 1'b1;
          end
        end
        WrAw: if (axi_resp_i.aw_ready) state_q <= WrRead;
        WrRead: if (tile_req_ready_i[tile]) state_q <= WrWait;
        WrWait: if (tile_rsp_valid_i[tile]) begin
          buf_q   <= tile_rsp_data_i[tile];
          state_q <= WrW;
        end
        WrW: if (axi_resp_i.w_ready) begin
          l1_q <= l1_q + AxiBeatBytes;
          if (left_q == '0) begin
            state_q <= WrB;
          end else begin
            left_q  <= left_q - 1'b1;
            state_q <= WrRead;
          end
        end
        WrB: if (axi_resp_i.b_valid) begin
          state_q <= Idle;
          done_q  <= 1'b1;
        end
        default: state_q <= Idle;
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    req_valid_i && req_ready_o |-> req_i.num_bytes[BeatBits-1:0] == '0);
endmodule
