// Testbench for ro_cache: the read-only cache on the group's AXI port.
// How: tb_axi_mem plays L2 behind the cache; the testbench issues AXI read bursts (1-4 beats,
// random IDs) to the cached region and outside it, and single-beat writes. Every returned beat is
// compared with the memory model, and the returned ID with the request's ID. Mechanisms checked:
// a first read of a line misses and causes one refill read; a repeat read hits without any L2
// read and returns its first beat within 3 cycles of the address handshake; reads outside the
// region are bypassed as one burst; writes bypass the cache; flush_i makes the next read miss.
// Paper: "read-only caches ... software-managed ... 8 KiB"; the direct mapping is this design's.
module tb_ro_cache;
  import mempool_pkg::*;
  localparam int Lat = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axi_req_t s_req, m_req; axi_resp_t s_resp, m_resp;
  logic hit, miss, flush;
  logic [31:0] cstart, cend;
  int reads, writes, checks = 0, failures = 0, hits = 0, misses = 0;

  ro_cache dut (.clk_i(clk), .rst_ni(rst_n), .cached_start_i(cstart), .cached_end_i(cend),
    .flush_i(flush), .slv_req_i(s_req), .slv_resp_o(s_resp), .mst_req_o(m_req),
    .mst_resp_i(m_resp), .hit_o(hit), .miss_o(miss));
  tb_axi_mem #(.Latency(Lat)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .resp_o(m_resp),
    .reads_o(reads), .writes_o(writes));

  always @(posedge clk) begin hits += int'(hit); misses += int'(miss); end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one read burst; returns the cycles from address handshake to first beat
  task automatic rd(input logic [31:0] a, input int beats, output int first);
    logic [15:0] id;
    int b, cyc;
    id = 16'($urandom_range(0, 255));
    @(negedge clk);
    s_req.ar_valid = 1; s_req.ar.addr = a; s_req.ar.len = 8'(beats - 1); s_req.ar.id = id;
    #1 while (!s_resp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_req.ar_valid = 0; s_req.r_ready = 1;
    b = 0; cyc = 1; first = -1;
    while (b < beats) begin
      #1;
      if (s_resp.r_valid) begin
        if (first < 0) first = cyc;
        check(s_resp.r.data == i_mem.read_beat(a + 64 * b), "read data");
        check(s_resp.r.id == id, "read id");
        check(s_resp.r.last == (b == beats - 1), "read last");
        b++;
      end
      @(negedge clk); cyc++;
      if (cyc > 500) begin check(0, "read timeout"); break; end
    end
    s_req.r_ready = 0;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_req.aw_valid = 1; s_req.aw.addr = a; s_req.aw.len = 0; s_req.aw.id = 16'd7;
    #1 while (!s_resp.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_req.aw_valid = 0;
    s_req.w_valid = 1; s_req.w.data = {16{d}}; s_req.w.strb = '1; s_req.w.last = 1;
    #1 while (!s_resp.w_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_req.w_valid = 0; s_req.b_ready = 1;
    #1 while (!s_resp.b_valid) begin @(negedge clk); #1; end
    check(s_resp.b.id == 16'd7, "write response id");
    @(negedge clk); s_req.b_ready = 0;
  endtask

  initial begin
    #5000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] a;
    int first, r0, h0, m0, beats;
    s_req = '0; flush = 0;
    cstart = 32'h8000_0000; cend = 32'h8001_0000;      // 64 KiB region
    repeat (3) @(negedge clk); rst_n = 1;
    // first access misses, the second hits
    a = 32'h8000_1000;
    r0 = reads; m0 = misses;
    rd(a, 1, first);
    check(reads == r0 + 1 && misses == m0 + 1, "cold read misses and refills");
    r0 = reads; h0 = hits;
    rd(a, 1, first);
    check(reads == r0 && hits == h0 + 1, "repeat read hits without an L2 read");
    check(first <= 3, $sformatf("hit latency %0d cycles", first));
    // bypassed burst: one L2 read, no cache statistics
    r0 = reads; h0 = hits; m0 = misses;
    rd(32'h9000_0000, 4, first);
    check(reads == r0 + 1 && hits == h0 && misses == m0, "uncached burst bypasses");
    // write bypasses the cache
    r0 = writes;
    wr(32'h9000_0040, 32'hCAFE_F00D);
    check(writes == r0 + 1, "write forwarded");
    rd(32'h9000_0040, 1, first);
    // flush makes the line miss again
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    m0 = misses;
    rd(a, 1, first);
    check(misses == m0 + 1, "flush invalidates");
    // random traffic; a second identical burst must be all hits
    for (int it = 0; it < 300; it++) begin
      beats = $urandom_range(1, 4);
      a = (it % 3 == 0) ? 32'hA000_0000 + 32'($urandom_range(0, 1023)) * 64
                        : cstart + 32'($urandom_range(0, 255)) * 64;
      rd(a, beats, first);
      if (a < cend) begin
        r0 = reads; h0 = hits;
        rd(a, beats, first);
        check(reads == r0 && hits == h0 + beats, "repeated burst hits");
      end
    end
    check(hits > 0 && misses > 0, "both hits and misses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
