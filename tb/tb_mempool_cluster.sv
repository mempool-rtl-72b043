// End-to-end testbench for mempool_cluster at its default (full) size: 256 cores in 4 groups of
// 16 tiles, 1 MiB of L1 in 1024 banks, the DMA and four AXI ports. Also the full-size test.
// How: the testbench plays the 256 cores' data and fetch ports, the cores' writes to the DMA
// registers, and L2 behind each group's AXI port (tb_axi_mem). Every load is compared with a
// value the testbench stored or with the L2 contents. Each mechanism is counted and must occur:
//  - L1 access from a tile to itself (1 cycle), to another tile of the group (3 cycles) and to
//    another group (5 cycles); paper: "latency of 1, 3 or 5 cycles";
//  - the hybrid address scrambling: a core's sequential region lies in its own tile;
//  - bank conflicts (stalls) when many cores hit one bank;
//  - atomic add and LR/SC;
//  - DMA L2->L1 and L1->L2 over a 4 KiB L1 line, programmed through the register interface;
//  - instruction fetch through L0/L1 caches with prefetches and coalesced refills;
//  - read-only cache hit and miss; a core load from L2 over the AXI tree.
module tb_mempool_cluster;
  import mempool_pkg::*;
  localparam int NC = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NC-1:0] c_valid, c_ready, c_rvalid, c_rready;
  tcdm_req_t c_req [NC]; tcdm_resp_t c_resp [NC];
  logic [31:0] f_addr [NC], f_data [NC]; logic [NC-1:0] f_valid, f_ready;
  logic cfg_valid, cfg_write; logic [4:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  axi_req_t a_req [4]; axi_resp_t a_resp [4];
  int reads [4], writes [4];
  int checks = 0, failures = 0;
  int n_local = 0, n_group = 0, n_remote = 0, n_conflict = 0, n_amo = 0, n_lrsc = 0, n_seq = 0;
  int n_dma_in = 0, n_dma_out = 0, n_prefetch = 0, n_coalesce = 0, n_ro_hit = 0, n_ro_miss = 0;
  int n_axi = 0, n_fetch = 0;

  mempool_cluster dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(c_valid), .core_req_ready_o(c_ready), .core_req_i(c_req),
    .core_resp_valid_o(c_rvalid), .core_resp_ready_i(c_rready), .core_resp_o(c_resp),
    .fetch_addr_i(f_addr), .fetch_valid_i(f_valid), .fetch_ready_o(f_ready), .fetch_data_o(f_data),
    .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .ro_start_i(32'h8000_0000), .ro_end_i(32'h8010_0000), .ro_flush_i(1'b0),
    .axi_req_o(a_req), .axi_resp_i(a_resp));
  for (genvar g = 0; g < 4; g++) begin : g_mem
    tb_axi_mem #(.Latency(10)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(a_req[g]),
      .resp_o(a_resp[g]), .reads_o(reads[g]), .writes_o(writes[g]));
  end

  always @(posedge clk) if (rst_n) begin
    n_prefetch += $countones(dut.g_group[0].pf) + $countones(dut.g_group[1].pf)
                + $countones(dut.g_group[2].pf) + $countones(dut.g_group[3].pf);
    n_coalesce += $countones(dut.g_group[0].co) + $countones(dut.g_group[1].co)
                + $countones(dut.g_group[2].co) + $countones(dut.g_group[3].co);
    n_ro_hit  += int'(dut.g_group[0].rh) + int'(dut.g_group[1].rh) + int'(dut.g_group[2].rh) + int'(dut.g_group[3].rh);
    n_ro_miss += int'(dut.g_group[0].rm) + int'(dut.g_group[1].rm) + int'(dut.g_group[2].rm) + int'(dut.g_group[3].rm);
    if ($countones(c_valid & ~c_ready) > 0) n_conflict++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // physical L1 address in the interleaved region (>= 128 KiB): row, tile (0..63), bank
  function automatic logic [31:0] laddr(input int row, input int bank, input int t);
    return 32'(row) << 12 | 32'(t) << 6 | 32'(bank) << 2;
  endfunction

  task automatic access(input int c, input logic [31:0] a, input bit wen, input logic [31:0] d,
                        input amo_e amo, output logic [31:0] rdata, output int lat);
    @(negedge clk);
    c_valid[c] = 1; c_req[c] = '0; c_req[c].addr = a; c_req[c].wen = wen; c_req[c].be = 4'hF;
    c_req[c].wdata = d; c_req[c].amo = amo; c_req[c].tid = 3'd2;
    #1 while (!c_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk); c_valid[c] = 0; lat = 1;
    #1 while (!c_rvalid[c]) begin @(negedge clk); lat++; #1; if (lat > 400) break; end
    rdata = c_resp[c].rdata;
    check(c_rvalid[c] && c_resp[c].tid == 3'd2, "response returns to the core");
    @(negedge clk);
  endtask

  task automatic cfg_wr(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk); cfg_valid = 1; cfg_write = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_valid = 0; cfg_write = 0;
  endtask

  task automatic dma(input logic [31:0] src, input logic [31:0] dst, input logic [31:0] n, output int cyc);
    cfg_wr(5'h00, src); cfg_wr(5'h04, dst); cfg_wr(5'h08, n); cfg_wr(5'h0C, 1);
    cyc = 0;
    @(negedge clk); cfg_addr = 5'h10;
    #1 while (cfg_rdata[0]) begin @(negedge clk); cyc++; #1; if (cyc > 5000) break; end
    check(!cfg_rdata[0], "DMA finished");
  endtask

  initial begin
    #50000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, v, a, b;
    int lat, c, t, row, cyc, n;
    logic [31:0] expv [NC];
    c_valid = 0; c_rready = '1; f_valid = 0; cfg_valid = 0; cfg_write = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int k = 0; k < NC; k++) begin c_req[k] = '0; f_addr[k] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // latencies: own tile 1, same group 3, other group 5
    for (int it = 0; it < 60; it++) begin
      c = $urandom_range(0, NC - 1); t = $urandom_range(0, 63); row = $urandom_range(32, 255);
      v = $urandom();
      access(c, laddr(row, it % 16, t), 1, v, AmoNone, r, lat);
      access((c * 7 + 3) % NC, laddr(row, it % 16, t), 0, 0, AmoNone, r, lat);
      check(r == v, "load returns the stored value");
      c = (c * 7 + 3) % NC;
      if (t == c / 4) begin check(lat == 1, $sformatf("own-tile latency %0d", lat)); n_local++; end
      else if (t / 16 == c / 64) begin check(lat == 3, $sformatf("in-group latency %0d", lat)); n_group++; end
      else begin check(lat == 5, $sformatf("inter-group latency %0d", lat)); n_remote++; end
    end
    // force each latency class once more
    access(8, laddr(40, 1, 2), 0, 0, AmoNone, r, lat);  check(lat == 1, "own tile"); n_local++;
    access(8, laddr(40, 1, 9), 0, 0, AmoNone, r, lat);  check(lat == 3, "same group"); n_group++;
    access(8, laddr(40, 1, 50), 0, 0, AmoNone, r, lat); check(lat == 5, "other group"); n_remote++;
    // sequential (scrambled) region: core c's first 2 KiB-per-tile region is in its own tile
    for (int k = 0; k < 16; k++) begin
      c = $urandom_range(0, NC - 1);
      a = 32'((c / 4) * 2048 + $urandom_range(0, 511) * 4);
      access(c, a, 1, a ^ 32'h1357, AmoNone, r, lat);
      check(lat == 1, "sequential region is local");
      access(c, a, 0, 0, AmoNone, r, lat);
      check(r == (a ^ 32'h1357), "sequential region data");
      n_seq++;
    end
    // 64 cores of group 1 hit tile 40, banks 0..3: conflicts, all answered
    for (int k = 0; k < 64; k++) begin
      expv[k] = $urandom(); access(64 + k, laddr(60 + k / 4, k % 4, 40), 1, expv[k], AmoNone, r, lat);
    end
    @(negedge clk);
    for (int k = 0; k < 64; k++) begin
      c_valid[64 + k] = 1; c_req[64 + k] = '0; c_req[64 + k].addr = laddr(60 + k / 4, k % 4, 40);
    end
    n = 0;
    for (int cyc2 = 0; cyc2 < 300 && n < 64; cyc2++) begin
      #1;
      for (int k = 0; k < 64; k++) if (c_rvalid[64 + k]) begin
        n++; check(c_resp[64 + k].rdata == expv[k], "contended load data");
      end
      for (int k = 0; k < 64; k++) if (c_valid[64 + k] && c_ready[64 + k]) c_req[64 + k].tid = 3'd7;
      @(negedge clk);
      for (int k = 0; k < 64; k++) if (c_req[64 + k].tid == 3'd7) c_valid[64 + k] = 0;
    end
    check(n == 64, "all contended loads answered");
    // atomics from cores in different groups
    a = laddr(70, 5, 21);
    access(0, a, 1, 32'd100, AmoNone, r, lat);
    for (int k = 0; k < 8; k++) begin
      access(32 * k, a, 1, 32'd3, AmoAdd, r, lat);
      check(r == 100 + 3 * k, "AMO add old value"); n_amo++;
    end
    access(200, a, 0, 0, AmoLR, r, lat);
    check(r == 124, "LR value");
    access(200, a, 1, r + 1, AmoSC, r, lat);
    check(r == 0, "SC succeeds"); n_lrsc++;
    access(201, a, 1, 32'd0, AmoSC, r, lat);
    check(r != 0, "SC without reservation fails"); n_lrsc++;
    access(5, a, 0, 0, AmoNone, r, lat);
    check(r == 125, "SC stored");
    // DMA L2 -> L1: a whole 4 KiB line (row 150), then L1 -> L2 and back into row 151
    dma(32'h8030_0000, 32'(150 * 4096), 32'd4096, cyc);
    n_dma_in++;
    for (int k = 0; k < 64; k++) begin
      int off; off = $urandom_range(0, 1023) * 4;
      access(4 * k, 32'(150 * 4096 + off), 0, 0, AmoNone, r, lat);
      check(r == ((32'h8030_0000 + 32'(off)) ^ 32'h5EED_0000), "DMA L2->L1 data");
    end
    for (int k = 0; k < 16; k++) access(k, laddr(150, k, k), 1, 32'hD0D0_0000 + k, AmoNone, r, lat);
    dma(32'(150 * 4096), 32'h8050_0000, 32'd4096, cyc);
    n_dma_out++;
    dma(32'h8050_0000, 32'(151 * 4096), 32'd4096, cyc);
    n_dma_in++;
    for (int k = 0; k < 64; k++) begin
      int off; off = $urandom_range(0, 1023) * 4;
      access(4 * k + 1, 32'(150 * 4096 + off), 0, 0, AmoNone, v, lat);
      access(4 * k + 2, 32'(151 * 4096 + off), 0, 0, AmoNone, r, lat);
      check(r == v, "DMA L1->L2->L1 round trip");
    end
    for (int k = 0; k < 16; k++) begin
      access(100, laddr(151, k, k), 0, 0, AmoNone, r, lat);
      check(r == 32'hD0D0_0000 + k, "stored words survive the round trip");
    end
    // core loads over AXI: first through the RO cache (miss, then hit), then uncached
    access(3, 32'h8000_2000, 0, 0, AmoNone, r, lat);
    check(r == (32'h8000_2000 ^ 32'h5EED_0000), "cached L2 load"); n_axi++;
    access(2, 32'h8000_2004, 0, 0, AmoNone, r, lat);
    check(r == (32'h8000_2004 ^ 32'h5EED_0000), "cached L2 load hit"); n_axi++;
    access(130, 32'h9000_0010, 0, 0, AmoNone, r, lat);
    check(r == (32'h9000_0010 ^ 32'h5EED_0000), "uncached L2 load"); n_axi++;
    // instruction fetch: the four cores of tiles 0 and 17 run the same code at once
    @(negedge clk);
    for (int i = 0; i < 48; i++) begin
      int cs [8];
      cs = '{0, 1, 2, 3, 68, 69, 70, 71};
      for (int k = 0; k < 8; k++) begin f_valid[cs[k]] = 1; f_addr[cs[k]] = 32'h8070_0000 + 32'(4 * i); end
      n = 0;
      for (int w = 0; w < 400 && n < 8; w++) begin
        #1;
        for (int k = 0; k < 8; k++) if (f_valid[cs[k]] && f_ready[cs[k]]) begin
          check(f_data[cs[k]] == (f_addr[cs[k]] ^ 32'h5EED_0000), "fetched instruction"); n++; n_fetch++;
        end
        @(negedge clk);
        for (int k = 0; k < 8; k++) if (f_ready[cs[k]]) f_valid[cs[k]] = 0;
      end
      for (int k = 0; k < 8; k++) f_valid[cs[k]] = 0;
    end
    repeat (5) @(negedge clk);
    $display("own-tile=%0d in-group=%0d inter-group=%0d sequential=%0d conflict-cycles=%0d amo=%0d lrsc=%0d",
             n_local, n_group, n_remote, n_seq, n_conflict, n_amo, n_lrsc);
    $display("dma-in=%0d dma-out=%0d fetch=%0d prefetch=%0d coalesced=%0d ro-hit=%0d ro-miss=%0d axi=%0d",
             n_dma_in, n_dma_out, n_fetch, n_prefetch, n_coalesce, n_ro_hit, n_ro_miss, n_axi);
    check(n_local > 0, "own-tile access happened");
    check(n_group > 0, "in-group access happened");
    check(n_remote > 0, "inter-group access happened");
    check(n_seq > 0, "sequential-region access happened");
    check(n_conflict > 0, "bank conflict happened");
    check(n_amo > 0, "AMO happened");
    check(n_lrsc > 0, "LR/SC happened");
    check(n_dma_in > 0, "DMA L2->L1 happened");
    check(n_dma_out > 0, "DMA L1->L2 happened");
    check(n_fetch > 0, "instruction fetch happened");
    check(n_prefetch > 0, "prefetch happened");
    check(n_coalesce > 0, "coalesced refill happened");
    check(n_ro_hit > 0, "RO cache hit happened");
    check(n_ro_miss > 0, "RO cache miss happened");
    check(n_axi > 0, "core AXI access happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
