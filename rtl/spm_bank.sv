// spm_bank: one 1 KiB bank of the shared L1 scratchpad with its controller.
//
// A word array (BankWords x 32 bit) that answers every accepted request one cycle
// later (single-cycle access as seen by the tile's cores).  Writes honour the byte
// enables.  The controller carries a small ALU for the RISC-V atomic memory
// operations (swap, add, xor, and, or, min, max, minu, maxu): it reads the old word,
// writes the combined value in the same cycle and returns the old word.  For LR/SC it
// keeps one reservation register (address and core): LR places it, any write to the
// reserved word clears it, and SC succeeds (writes, returns 0) only while the
// reservation is valid for the same core and word, returning 1 otherwise; SC always
// clears the reservation.  These behaviours follow the paper's description of the
// bank controller; doing the read-modify-write in one cycle on a combinationally read
// array, and a single reservation per bank, are this design's choices.
//
// Handshake: req_valid_i/req_ready_o; the response (rdata, plus meta_o, which echoes
// meta_i) waits in an output register until resp_ready_i.  A new request is taken
// while the register is empty or being emptied.  The owning tile multiplexes the
// cores' and the DMA's accesses onto this one port; meta_i tells them apart.
module spm_bank
  import mempool_pkg::*;
#(
  parameter int unsigned NumWords  = 256,
  parameter int unsigned MetaWidth = 8,
  localparam int unsigned AW = $clog2(NumWords)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  logic [AW-1:0]        req_addr_i,
  input  logic                 req_wen_i,
  input  logic [3:0]           req_be_i,
  input  logic [31:0]          req_wdata_i,
  input  amo_e                 req_amo_i,
  input  logic [CoreIdWidth-1:0] req_core_i,
  input  logic [MetaWidth-1:0] meta_i,
  output logic                 resp_valid_o,
  input  logic                 resp_ready_i,
  output logic [31:0]          resp_rdata_o,
  output logic [MetaWidth-1:0] meta_o
);
  logic [31:0] mem [NumWords];

  logic                   resp_valid_q;
  logic [31:0]            rdata_q;
  logic [MetaWidth-1:0]   meta_q;
  logic                   rsv_valid_q;
  logic [AW-1:0]          rsv_addr_q;
  logic [CoreIdWidth-1:0] rsv_core_q;

  logic        fire, do_write;
  logic [31:0] old_w, new_w, bemask, rdata_d;

  assign req_ready_o = !resp_valid_q || resp_ready_i;
  assign fire        = req_valid_i && req_ready_o;

  for (genvar k = 0; k < 4; k++) begin : g_be
    assign bemask[8*k +: 8] = {8{req_be_i[k]}};
  end

  assign old_w = mem[req_addr_i];

  always_comb begin
    new_w    = old_w;
    do_write = 1'b0;
    rdata_d  = old_w;
    unique case (req_amo_i)
      AmoNone: begin
        do_write = req_wen_i;
        new_w    = (req_wdata_i & bemask) | (old_w & ~bemask);
      end
      AmoSwap: begin do_write = 1'b1; new_w = req_wdata_i;           end
      AmoAdd:  begin do_write = 1'b1; new_w = old_w + req_wdata_i;   end
      AmoXor:  begin do_write = 1'b1; new_w = old_w ^ req_wdata_i;   end
      AmoAnd:  begin do_write = 1'b1; new_w = old_w & req_wdata_i;   end
      AmoOr:   begin do_write = 1'b1; new_w = old_w | req_wdata_i;   end
      AmoMin:  begin do_write = 1'b1;
        new_w = ($signed(old_w) < $signed(req_wdata_i)) ? old_w : req_wdata_i; end
      AmoMax:  begin do_write = 1'b1;
        new_w = ($signed(old_w) > $signed(req_wdata_i)) ? old_w : req_wdata_i; end
      AmoMinu: begin do_write = 1'b1; new_w = (old_w < req_wdata_i) ? old_w : req_wdata_i; end
      AmoMaxu: begin do_write = 1'b1; new_w = (old_w > req_wdata_i) ? old_w : req_wdata_i; end
      AmoLR:   begin do_write = 1'b0; end
      AmoSC: begin
        if (rsv_valid_q && rsv_addr_q == req_addr_i && rsv_core_q == req_core_i) begin
          do_write = 1'b1;
          new_w    = req_wdata_i;
          rdata_d  = 32'd0;
        end else begin
          rdata_d  = 32'd1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i) begin
    if (fire && do_write) mem[req_addr_i] <= new_w;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      resp_valid_q <= 1'b0;
      rdata_q      <= '0;
      meta_q       <= '0;
      rsv_valid_q  <= 1'b0;
      rsv_addr_q   <= '0;
      rsv_core_q   <= '0;
    end else begin
      if (fire) begin
        resp_valid_q <= 1'b1;
        rdata_q      <= rdata_d;
        meta_q       <= meta_i;
      end else if (resp_ready_i) begin
        resp_valid_q <= 1'b0;
      end
      if (fire) begin
        if (req_amo_i == AmoLR) begin
          rsv_valid_q <= 1'b1;
          rsv_addr_q  <= req_addr_i;
          rsv_core_q  <= req_core_i;
        end else if (req_amo_i == AmoSC) begin
          rsv_valid_q <= 1'b0;
        end else if (do_write && req_addr_i == rsv_addr_q) begin
          rsv_valid_q <= 1'b0;
        end
      end
    end
  end

  assign resp_valid_o = resp_valid_q;
  assign resp_rdata_o = rdata_q;
  assign meta_o       = meta_q;
endmodule
