// dma_frontend: programming interface of MemPool's distributed DMA.
//
// A single frontend for the whole cluster.  Software writes the source address, the
// destination address and the length in bytes, then writes the launch register; the
// frontend hands the transfer to the splitter and reports it busy until the
// distributed backends signal completion (done_i).  Registers (32 bit, byte offset):
//   0x00 SRC  (rw)   0x04 DST  (rw)   0x08 NUM_BYTES (rw)
//   0x0C LAUNCH (w: start the transfer; ignored while busy)
//   0x10 STATUS (r: bit 0 busy)       0x14 DONE (r: transfers completed)
// The direction follows from the addresses: a destination in L1 means L2 -> L1.
// Register port: cfg_valid_i with cfg_write_i, cfg_addr_i, cfg_wdata_i; always ready,
// read data in the same cycle.  The paper names the frontend and its role; the
// register map is this design's.
module dma_frontend
  import mempool_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cfg_valid_i,
  input  logic        cfg_write_i,
  input  logic [4:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i,
  output logic [31:0] cfg_rdata_o,
  output logic        req_valid_o,
  input  logic        req_ready_i,
  output dma_req_t    req_o,
  input  logic        done_i,
  output logic        busy_o
);
  dma_req_t    regs_q;
  logic        pending_q, busy_q;
  logic [31:0] done_cnt_q;

  always_comb begin
    unique case (cfg_addr_i)
      5'h00:   cfg_rdata_o = regs_q.src;
      5'h04:   cfg_rdata_o = regs_q.dst;
      5'h08:   cfg_rdata_o = regs_q.num_bytes;
      5'h10:   cfg_rdata_o = {31'd0, busy_q};
      5'h14:   cfg_rdata_o = done_cnt_q;
      default: cfg_rdata_o = '0;
    endcase
  end

  assign req_valid_o = pending_q;
  assign req_o       = regs_q;
  assign busy_o      = busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_q     <= '0;
      pending_q  <= 1'b0;
      busy_q     <= 1'b0;
      done_cnt_q <= '0;
    end else begin
      if (cfg_valid_i && cfg_write_i && !busy_q) begin
        unique case (cfg_addr_i)
          5'h00: regs_q.src       <= cfg_wdata_i;
          5'h04: regs_q.dst       <= cfg_wdata_i;
          5'h08: regs_q.num_bytes <= cfg_wdata_i;
          5'h0C: if (regs_q.num_bytes != '0) begin
            pending_q <= 1'b1;
            busy_q    <= 1'b1;
          end
          default: ;
        endcase
      end
      if (pending_q && req_ready_i) pending_q <= 1'b0;
      if (done_i) begin
        busy_q     <= 1'b0;
        done_cnt_q <= done_cnt_q + 1'b1;
      end
    end
  end
endmodule
