// Testbench for tile: four cores' ports, 16 SPM banks, tile and remote crossbars, wide DMA port,
// instruction caches and the AXI port of one tile (tile 5 of group 0).
// How: the testbench plays the four cores, the three neighbouring interconnects and L2
// (tb_axi_mem). A reference model of the tile's banks is kept for the non-interleaved address
// region (byte addresses >= 128 KiB, where tile = addr[11:6], bank = addr[5:2], row = addr[19:12]).
// Checked:
//  - local load/store: response exactly 1 cycle after the request is accepted (paper: "1 cycle"),
//    data equal to the model; random traffic from all four cores, with bank-conflict stalls counted;
//  - atomic add, LR/SC;
//  - remote requests leave on the right direction port (L for same group, E for group 1,
//    N for group 2, NE for group 3) with the core id stamped, and their responses return;
//  - incoming remote requests are served by the banks and answered on the same port;
//  - the DMA port writes and reads whole rows (16 banks) that the cores then see;
//  - instruction fetches return L2 contents through the L0/L1 caches, with prefetches;
//  - a core load outside L1 goes out on the AXI port.
module tb_tile;
  import mempool_pkg::*;
  localparam logic [5:0] Me = 6'd5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] c_valid, c_ready, c_rvalid, c_rready;
  tcdm_req_t c_req [4]; tcdm_resp_t c_resp [4];
  logic [31:0] f_addr [4], f_data [4]; logic [3:0] f_valid, f_ready;
  logic [3:0] ro_valid, ro_ready, ro_rvalid, ro_rready; tcdm_req_t ro_req [4]; tcdm_resp_t ro_resp [4];
  logic [3:0] ri_valid, ri_ready, ri_rvalid, ri_rready; tcdm_req_t ri_req [4]; tcdm_resp_t ri_resp [4];
  logic d_valid, d_ready, d_rvalid; dma_tile_req_t d_req; logic [AxiDataWidth-1:0] d_rdata;
  axi_req_t a_req; axi_resp_t a_resp;
  logic pf, co;
  int reads, writes, checks = 0, failures = 0, conflicts = 0, prefetches = 0;
  logic [31:0] model [256][16];

  tile dut (.clk_i(clk), .rst_ni(rst_n), .tile_id_i(Me),
    .core_req_valid_i(c_valid), .core_req_ready_o(c_ready), .core_req_i(c_req),
    .core_resp_valid_o(c_rvalid), .core_resp_ready_i(c_rready), .core_resp_o(c_resp),
    .fetch_addr_i(f_addr), .fetch_valid_i(f_valid), .fetch_ready_o(f_ready), .fetch_data_o(f_data),
    .rmt_out_req_valid_o(ro_valid), .rmt_out_req_ready_i(ro_ready), .rmt_out_req_o(ro_req),
    .rmt_out_resp_valid_i(ro_rvalid), .rmt_out_resp_ready_o(ro_rready), .rmt_out_resp_i(ro_resp),
    .rmt_in_req_valid_i(ri_valid), .rmt_in_req_ready_o(ri_ready), .rmt_in_req_i(ri_req),
    .rmt_in_resp_valid_o(ri_rvalid), .rmt_in_resp_ready_i(ri_rready), .rmt_in_resp_o(ri_resp),
    .dma_req_valid_i(d_valid), .dma_req_ready_o(d_ready), .dma_req_i(d_req),
    .dma_rsp_valid_o(d_rvalid), .dma_rsp_data_o(d_rdata),
    .axi_req_o(a_req), .axi_resp_i(a_resp), .prefetch_o(pf), .coalesced_o(co));
  tb_axi_mem #(.Latency(10)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(a_req), .resp_o(a_resp),
    .reads_o(reads), .writes_o(writes));

  always @(posedge clk) begin
    prefetches += int'(pf);
    if (rst_n && $countones(c_valid) > 1 && $countones(c_valid & c_ready) < $countones(c_valid)) conflicts++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] laddr(input int row, input int bank, input logic [5:0] t);
    return 32'(row) << 12 | 32'(t) << 6 | 32'(bank) << 2;
  endfunction

  // one access from core c; returns the read data and the cycles from acceptance to response
  task automatic access(input int c, input logic [31:0] a, input bit wen, input logic [31:0] d,
                        input amo_e amo, output logic [31:0] rdata, output int lat);
    @(negedge clk);
    c_valid[c] = 1; c_req[c] = '0; c_req[c].addr = a; c_req[c].wen = wen; c_req[c].be = 4'hF;
    c_req[c].wdata = d; c_req[c].amo = amo; c_req[c].tid = 3'(c);
    #1 while (!c_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk); c_valid[c] = 0; lat = 1;
    #1 while (!c_rvalid[c]) begin @(negedge clk); lat++; #1; if (lat > 200) break; end
    rdata = c_resp[c].rdata;
    check(c_resp[c].tid == 3'(c) && c_resp[c].core_id == {Me, 2'(c)}, "response tid/core id");
    @(negedge clk);
  endtask

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, a, exp;
    int lat, row, bank, c;
    c_valid = 0; c_rready = '1; f_valid = 0; ro_ready = 0; ro_rvalid = 0; ri_valid = 0;
    ri_rready = '1; d_valid = 0; d_req = '0;
    for (int k = 0; k < 4; k++) begin c_req[k] = '0; f_addr[k] = 0; ri_req[k] = '0; ro_resp[k] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // initialise rows 32..63 through the cores, checking the local latency
    for (row = 32; row < 64; row++) for (bank = 0; bank < 16; bank++) begin
      model[row][bank] = $urandom();
      access(bank % 4, laddr(row, bank, Me), 1, model[row][bank], AmoNone, r, lat);
      check(lat == 1, $sformatf("local store latency %0d", lat));
    end
    for (int it = 0; it < 200; it++) begin
      row = $urandom_range(32, 63); bank = $urandom_range(0, 15); c = $urandom_range(0, 3);
      access(c, laddr(row, bank, Me), 0, 0, AmoNone, r, lat);
      check(lat == 1 && r == model[row][bank], "local load latency and data");
    end
    // four cores at once on random banks: conflicts stall, all complete
    for (int it = 0; it < 100; it++) begin
      logic [3:0] pend, got; int rw [4], bk [4];
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        rw[k] = $urandom_range(32, 63); bk[k] = $urandom_range(0, 3);
        c_valid[k] = 1; c_req[k] = '0; c_req[k].addr = laddr(rw[k], bk[k], Me); c_req[k].tid = 3'(k);
      end
      pend = '1; got = '0;
      for (int cyc = 0; cyc < 20 && got != 4'hF; cyc++) begin
        #1;
        for (int k = 0; k < 4; k++) if (c_rvalid[k]) begin
          got[k] = 1; check(c_resp[k].rdata == model[rw[k]][bk[k]], "parallel load data");
        end
        for (int k = 0; k < 4; k++) if (pend[k] && c_ready[k]) pend[k] = 0;
        @(negedge clk);
        for (int k = 0; k < 4; k++) if (!pend[k]) c_valid[k] = 0;
      end
      check(got == 4'hF, "all parallel loads answered");
    end
    check(conflicts > 0, "bank conflicts happened");
    // atomics
    a = laddr(40, 3, Me);
    access(0, a, 0, 0, AmoNone, exp, lat);
    access(1, a, 1, 32'd7, AmoAdd, r, lat);
    check(r == exp, "AMO add returns the old value");
    access(2, a, 0, 0, AmoNone, r, lat);
    check(r == exp + 7, "AMO add stored the sum");
    model[40][3] = exp + 7;
    access(3, a, 0, 0, AmoLR, r, lat);
    access(3, a, 1, 32'd99, AmoSC, r, lat);
    check(r == 0, "SC after LR succeeds");
    access(3, a, 1, 32'd98, AmoSC, r, lat);
    check(r != 0, "SC without reservation fails");
    access(0, a, 0, 0, AmoNone, r, lat);
    check(r == 99, "SC stored");
    model[40][3] = 99;
    // DMA port: write a row, then read it back through a core and the DMA port
    @(negedge clk);
    d_valid = 1; d_req.row = 8'd50; d_req.wen = 1; d_req.strb = '1;
    for (int k = 0; k < 16; k++) begin model[50][k] = $urandom(); d_req.wdata[32*k +: 32] = model[50][k]; end
    #1 while (!d_ready) begin @(negedge clk); #1; end
    @(negedge clk); d_valid = 0;
    for (int k = 0; k < 16; k++) begin
      access(k % 4, laddr(50, k, Me), 0, 0, AmoNone, r, lat);
      check(r == model[50][k], "core sees DMA-written row");
    end
    @(negedge clk); d_valid = 1; d_req.row = 8'd33; d_req.wen = 0;
    #1 while (!d_ready) begin @(negedge clk); #1; end
    @(negedge clk); d_valid = 0;
    #1 while (!d_rvalid) begin @(negedge clk); #1; end
    for (int k = 0; k < 16; k++) check(d_rdata[32*k +: 32] == model[33][k], "DMA row read");
    // outgoing remote requests: direction by destination group (this tile is in group 0)
    for (int g = 0; g < 4; g++) begin
      int dir; logic [5:0] t;
      dir = g == 0 ? 0 : g == 1 ? 3 : g == 2 ? 1 : 2;
      t = g == 0 ? 6'd9 : 6'(16 * g + 2);
      @(negedge clk);
      c_valid[1] = 1; c_req[1] = '0; c_req[1].addr = laddr(60, 1, t); c_req[1].tid = 3'd5;
      #1 while (!c_ready[1]) begin @(negedge clk); #1; end
      @(negedge clk); c_valid[1] = 0;
      lat = 0;
      #1 while (!ro_valid[dir]) begin @(negedge clk); lat++; #1; if (lat > 10) break; end
      check(ro_valid[dir] && ro_req[dir].addr == laddr(60, 1, t) && ro_req[dir].core_id == {Me, 2'd1},
            $sformatf("remote request to group %0d on port %0d", g, dir));
      check(lat <= 1, "one register on the outgoing path");
      ro_ready[dir] = 1; @(negedge clk); ro_ready[dir] = 0;
      ro_rvalid[dir] = 1; ro_resp[dir] = '{rdata: 32'hABCD_0000 + g, core_id: {Me, 2'd1}, tid: 3'd5};
      #1 while (!ro_rready[dir]) begin @(negedge clk); #1; end
      @(negedge clk); ro_rvalid[dir] = 0;
      lat = 0;
      #1 while (!c_rvalid[1]) begin @(negedge clk); lat++; #1; if (lat > 10) break; end
      check(c_rvalid[1] && c_resp[1].rdata == 32'hABCD_0000 + g && c_resp[1].tid == 3'd5, "remote response");
      @(negedge clk);
    end
    // incoming remote requests on every port
    for (int p = 0; p < 4; p++) begin
      row = $urandom_range(32, 63); bank = $urandom_range(0, 15);
      @(negedge clk);
      ri_valid[p] = 1; ri_req[p] = '0; ri_req[p].addr = laddr(row, bank, Me);
      ri_req[p].core_id = 8'(16 * p + 1); ri_req[p].tid = 3'd2;
      #1 while (!ri_ready[p]) begin @(negedge clk); #1; end
      @(negedge clk); ri_valid[p] = 0;
      lat = 1;
      #1 while (!ri_rvalid[p]) begin @(negedge clk); lat++; #1; if (lat > 10) break; end
      check(ri_rvalid[p] && ri_resp[p].rdata == model[row][bank] && ri_resp[p].core_id == 8'(16 * p + 1),
            "incoming remote request answered");
      check(lat <= 2, $sformatf("incoming remote latency %0d", lat));
      @(negedge clk);
    end
    // core load outside L1 goes over AXI
    a = 32'h8000_1234 & ~32'h3;
    access(2, a, 0, 0, AmoNone, r, lat);
    check(r == (a ^ 32'h5EED_0000), "core AXI load");
    // instruction fetch: straight-line code from L2
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < 40; i++) begin
        @(negedge clk);
        f_valid[k] = 1; f_addr[k] = 32'h8010_0000 + 32'(4 * i);
        lat = 0;
        #1 while (!f_ready[k]) begin @(negedge clk); lat++; #1; if (lat > 200) break; end
        check(f_data[k] == (f_addr[k] ^ 32'h5EED_0000), "fetched instruction");
      end
      @(negedge clk); f_valid[k] = 0;
    end
    check(prefetches > 0, "L0 prefetches happened");
    $display("conflicts=%0d prefetches=%0d", conflicts, prefetches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
