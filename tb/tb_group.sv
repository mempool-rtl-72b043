// Testbench for group: 16 tiles (64 cores), the group-level crossbars for the local, north,
// northeast and east directions, the group's AXI tree with read-only cache, and its DMA
// distributor and four backends. The group under test is group 0; the testbench plays the other
// three groups on the inter-group links and L2 (tb_axi_mem) on the AXI port.
// Checked:
//  - a load to another tile of the same group answers 3 cycles after acceptance, a load to the
//    own tile after 1 (paper: "1 cycle ... 3 cycles");
//  - many cores loading from one tile at once: all answered with the right data;
//  - a request to group 1/2/3 leaves on link E/N/NE in the lane of its target tile, its response
//    returns to the core; requests arriving on every link are served by the addressed tile;
//  - a DMA transfer L2->L1 of the group's 1 KiB slice of an L1 line, checked by core loads,
//    and L1->L2, checked in the memory model;
//  - core loads through the read-only cache: first a miss, then a hit.
module tb_group;
  import mempool_pkg::*;
  localparam int NC = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NC-1:0] c_valid, c_ready, c_rvalid, c_rready;
  tcdm_req_t c_req [NC]; tcdm_resp_t c_resp [NC];
  logic [31:0] f_addr [NC], f_data [NC]; logic [NC-1:0] f_valid, f_ready;
  logic [15:0] go_valid [3], go_ready [3], go_rvalid [3], go_rready [3];
  tcdm_req_t go_req [3][16]; tcdm_resp_t go_resp [3][16];
  logic [15:0] gi_valid [3], gi_ready [3], gi_rvalid [3], gi_rready [3];
  tcdm_req_t gi_req [3][16]; tcdm_resp_t gi_resp [3][16];
  logic d_valid, d_ready, d_done; dma_req_t d_req;
  axi_req_t a_req; axi_resp_t a_resp;
  logic [15:0] pf, co; logic ro_hit, ro_miss;
  int reads, writes, checks = 0, failures = 0, hits = 0, misses = 0;

  group dut (.clk_i(clk), .rst_ni(rst_n), .group_id_i(2'd0),
    .core_req_valid_i(c_valid), .core_req_ready_o(c_ready), .core_req_i(c_req),
    .core_resp_valid_o(c_rvalid), .core_resp_ready_i(c_rready), .core_resp_o(c_resp),
    .fetch_addr_i(f_addr), .fetch_valid_i(f_valid), .fetch_ready_o(f_ready), .fetch_data_o(f_data),
    .grp_out_req_valid_o(go_valid), .grp_out_req_ready_i(go_ready), .grp_out_req_o(go_req),
    .grp_out_resp_valid_i(go_rvalid), .grp_out_resp_ready_o(go_rready), .grp_out_resp_i(go_resp),
    .grp_in_req_valid_i(gi_valid), .grp_in_req_ready_o(gi_ready), .grp_in_req_i(gi_req),
    .grp_in_resp_valid_o(gi_rvalid), .grp_in_resp_ready_i(gi_rready), .grp_in_resp_o(gi_resp),
    .dma_req_valid_i(d_valid), .dma_req_ready_o(d_ready), .dma_req_i(d_req), .dma_done_o(d_done),
    .axi_req_o(a_req), .axi_resp_i(a_resp), .ro_start_i(32'h8000_0000), .ro_end_i(32'h8010_0000),
    .ro_flush_i(1'b0), .prefetch_o(pf), .coalesced_o(co), .ro_hit_o(ro_hit), .ro_miss_o(ro_miss));
  tb_axi_mem #(.Latency(10)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(a_req), .resp_o(a_resp),
    .reads_o(reads), .writes_o(writes));

  always @(posedge clk) begin hits += int'(ro_hit); misses += int'(ro_miss); end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] laddr(input int row, input int bank, input int t);
    return 32'(row) << 12 | 32'(t) << 6 | 32'(bank) << 2;
  endfunction

  task automatic access(input int c, input logic [31:0] a, input bit wen, input logic [31:0] d,
                        output logic [31:0] rdata, output int lat);
    @(negedge clk);
    c_valid[c] = 1; c_req[c] = '0; c_req[c].addr = a; c_req[c].wen = wen; c_req[c].be = 4'hF;
    c_req[c].wdata = d; c_req[c].tid = 3'd1;
    #1 while (!c_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk); c_valid[c] = 0; lat = 1;
    #1 while (!c_rvalid[c]) begin @(negedge clk); lat++; #1; if (lat > 300) break; end
    rdata = c_resp[c].rdata;
    check(c_rvalid[c] && c_resp[c].core_id == 8'(c), "response reaches the requesting core");
    @(negedge clk);
  endtask

  initial begin
    #400000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, v;
    int lat, t, c, row, n;
    logic [31:0] expv [64];
    c_valid = 0; c_rready = '1; f_valid = 0; d_valid = 0; d_req = '0;
    for (int k = 0; k < NC; k++) begin c_req[k] = '0; f_addr[k] = 0; end
    for (int d = 0; d < 3; d++) begin
      go_ready[d] = 0; go_rvalid[d] = 0; gi_valid[d] = 0; gi_rready[d] = '1;
      for (int k = 0; k < 16; k++) begin go_resp[d][k] = '0; gi_req[d][k] = '0; end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    $display("reset done at %0t", $time);
    // local and same-group latency
    for (int it = 0; it < 60; it++) begin
      c = $urandom_range(0, NC - 1); t = $urandom_range(0, 15); row = $urandom_range(32, 255);
      v = $urandom();
      access(c, laddr(row, it % 16, t), 1, v, r, lat);
      check(lat == (t == c / 4 ? 1 : 3), $sformatf("store latency %0d (tile %0d from core %0d)", lat, t, c));
      access((c + 5) % NC, laddr(row, it % 16, t), 0, 0, r, lat);
      check(r == v, "load sees the store");
      check(lat == (t == ((c + 5) % NC) / 4 ? 1 : 3), "load latency");
    end
    $display("step: %s at %0t", "all 64 cores load", $time);
    // all 64 cores load from tile 3 at once (different banks/rows)
    for (int k = 0; k < NC; k++) begin
      expv[k] = $urandom(); access(k, laddr(100 + k / 16, k % 16, 3), 1, expv[k], r, lat);
    end
    @(negedge clk);
    for (int k = 0; k < NC; k++) begin c_valid[k] = 1; c_req[k] = '0; c_req[k].addr = laddr(100 + k / 16, k % 16, 3); end
    n = 0;
    for (int cyc = 0; cyc < 200 && n < NC; cyc++) begin
      #1;
      for (int k = 0; k < NC; k++) if (c_rvalid[k]) begin n++; check(c_resp[k].rdata == expv[k], "contended load data"); end
      for (int k = 0; k < NC; k++) if (c_valid[k] && c_ready[k]) c_req[k].tid = 3'd7;   // mark sent
      @(negedge clk);
      for (int k = 0; k < NC; k++) if (c_req[k].tid == 3'd7) c_valid[k] = 0;
    end
    check(n == NC, "all contended loads answered");
    $display("step: %s at %0t", "outgoing to the o", $time);
    // outgoing to the other groups: link 0 N (group 2), 1 NE (group 3), 2 E (group 1)
    for (int d = 0; d < 3; d++) begin
      int g, lane;
      g = d == 0 ? 2 : d == 1 ? 3 : 1; lane = $urandom_range(0, 15);
      c = $urandom_range(0, NC - 1);
      @(negedge clk);
      c_valid[c] = 1; c_req[c] = '0; c_req[c].addr = laddr(90, 2, 16 * g + lane); c_req[c].tid = 3'd3;
      #1 while (!c_ready[c]) begin @(negedge clk); #1; end
      @(negedge clk); c_valid[c] = 0;
      lat = 1;
      #1 while (!go_valid[d][lane]) begin @(negedge clk); lat++; #1; if (lat > 20) break; end
      check(go_valid[d][lane] && go_req[d][lane].addr == laddr(90, 2, 16 * g + lane) &&
            go_req[d][lane].core_id == 8'(c), $sformatf("request to group %0d on link %0d lane %0d", g, d, lane));
      go_ready[d][lane] = 1; @(negedge clk); go_ready[d][lane] = 0;
      go_rvalid[d][lane] = 1; go_resp[d][lane] = '{rdata: 32'h1234_5600 + d, core_id: 8'(c), tid: 3'd3};
      #1 while (!go_rready[d][lane]) begin @(negedge clk); #1; end
      @(negedge clk); go_rvalid[d][lane] = 0;
      lat = 0;
      #1 while (!c_rvalid[c]) begin @(negedge clk); lat++; #1; if (lat > 20) break; end
      check(c_rvalid[c] && c_resp[c].rdata == 32'h1234_5600 + d, "inter-group response returns");
      @(negedge clk);
    end
    $display("step: %s at %0t", "incoming on every", $time);
    // incoming on every link and lane: lane t goes to tile t
    for (int d = 0; d < 3; d++) for (int lane = 0; lane < 16; lane++) begin
      v = $urandom();
      access(4 * lane, laddr(200, 5, lane), 1, v, r, lat);
      @(negedge clk);
      gi_valid[d][lane] = 1; gi_req[d][lane] = '0; gi_req[d][lane].addr = laddr(200, 5, lane);
      gi_req[d][lane].core_id = 8'(64 * (d + 1) + 1);
      #1 while (!gi_ready[d][lane]) begin @(negedge clk); #1; end
      @(negedge clk); gi_valid[d][lane] = 0;
      lat = 1;
      #1 while (!gi_rvalid[d][lane]) begin @(negedge clk); lat++; #1; if (lat > 20) break; end
      check(gi_rvalid[d][lane] && gi_resp[d][lane].rdata == v && gi_resp[d][lane].core_id == 8'(64 * (d + 1) + 1),
            "incoming inter-group request served");
      @(negedge clk);
    end
    $display("step: %s at %0t", "DMA L2 -> L1", $time);
    // DMA L2 -> L1: the group's 1 KiB of L1 line 120
    @(negedge clk);
    d_valid = 1; d_req = '{src: 32'h8020_0000, dst: 32'(120 * 4096), num_bytes: 32'd1024};
    #1 while (!d_ready) begin @(negedge clk); #1; end
    @(negedge clk); d_valid = 0;
    lat = 0;
    while (!d_done && lat < 2000) begin @(negedge clk); lat++; end
    check(d_done, "DMA L2->L1 done");
    for (int k = 0; k < 64; k++) begin
      int off; off = $urandom_range(0, 255) * 4;
      access(k, 32'(120 * 4096) + 32'(off), 0, 0, r, lat);
      check(r == ((32'h8020_0000 + 32'(off)) ^ 32'h5EED_0000), "core reads DMA data");
    end
    $display("step: %s at %0t", "DMA L1 -> L2", $time);
    // DMA L1 -> L2
    @(negedge clk);
    d_valid = 1; d_req = '{src: 32'(120 * 4096), dst: 32'h8040_0000, num_bytes: 32'd1024};
    #1 while (!d_ready) begin @(negedge clk); #1; end
    @(negedge clk); d_valid = 0;
    lat = 0;
    while (!d_done && lat < 2000) begin @(negedge clk); lat++; end
    check(d_done, "DMA L1->L2 done");
    repeat (2) @(negedge clk);
    for (int b = 0; b < 16; b++)
      check(i_mem.read_beat(32'h8040_0000 + 64 * b) == i_mem.read_beat(32'h8020_0000 + 64 * b), "DMA L1->L2 data");
    $display("step: %s at %0t", "core loads throug", $time);
    // core loads through the read-only cache
    access(7, 32'h8000_4000, 0, 0, r, lat);
    check(r == (32'h8000_4000 ^ 32'h5EED_0000) && misses > 0, "RO cache miss");
    access(9, 32'h8000_4004, 0, 0, r, lat);
    check(r == (32'h8000_4004 ^ 32'h5EED_0000) && hits > 0, "RO cache hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
