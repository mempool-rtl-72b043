// Testbench of l1_icache: an AXI memory model answers refill reads after 12 cycles
// with data computed from the address.  Checks the returned lines, the 2-cycle hit
// latency of the serial lookup, that four L0s missing on one line cause a single
// AXI read and are all answered in the same cycle (coalescing), and random traffic
// including conflicts in one set (two ways, eviction).
module tb_l1_icache;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]   req_valid, req_ready, rsp_valid;
  logic [31:0]  req_addr [4];
  logic [255:0] rsp_data [4];
  axi_req_t     axi_req;
  axi_resp_t    axi_resp;
  logic         coalesced;

  l1_icache dut (
    .clk_i(clk), .rst_ni(rst_n), .l0_req_valid_i(req_valid), .l0_req_ready_o(req_ready),
    .l0_req_addr_i(req_addr), .l0_rsp_valid_o(rsp_valid), .l0_rsp_data_o(rsp_data),
    .axi_req_o(axi_req), .axi_resp_i(axi_resp), .coalesced_o(coalesced));

  function automatic logic [511:0] beat(input logic [31:0] a);
    logic [511:0] d;
    for (int k = 0; k < 16; k++) d[32*k +: 32] = (a & ~32'h3F) + 4 * k ^ 32'hA5A5_0000;
    return d;
  endfunction
  function automatic logic [255:0] line(input logic [31:0] a);
    logic [511:0] b = beat(a);
    return a[5] ? b[511:256] : b[255:0];
  endfunction

  // AXI read model, 12 cycles
  int ar_count = 0;
  logic [31:0] pend_addr [$];
  int          pend_time [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  always_comb begin
    axi_resp = '0;
    axi_resp.ar_ready = 1'b1;
    if (pend_time.size() > 0 && pend_time[0] <= cyc) begin
      axi_resp.r_valid = 1'b1;
      axi_resp.r.data  = beat(pend_addr[0]);
      axi_resp.r.last  = 1'b1;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (axi_resp.r_valid && axi_req.r_ready) begin void'(pend_addr.pop_front()); void'(pend_time.pop_front()); end
    if (axi_req.ar_valid) begin
      ar_count++; pend_addr.push_back(axi_req.ar.addr); pend_time.push_back(cyc + 12);
    end
  end

  // per-L0 driver: one outstanding request
  int outstanding [4];
  logic [31:0] want [4];
  int coal = 0, max_par = 0;
  logic [3:0] req_ready_q;
  always @(posedge clk) req_ready_q <= req_ready & req_valid;
  always @(posedge clk) if (rst_n) begin
    if (coalesced) coal++;
    if ($countones(rsp_valid) > max_par) max_par = $countones(rsp_valid);
    for (int i = 0; i < 4; i++) if (rsp_valid[i]) begin
      checks++;
      if (rsp_data[i] != line(want[i])) begin failures++; $display("L0 %0d line %h wrong", i, want[i]); end
      outstanding[i] = 0;
    end
  end

  task automatic issue(input int i, input logic [31:0] a);
    @(negedge clk);
    req_valid[i] = 1; req_addr[i] = a; want[i] = a; outstanding[i] = 1;
    do @(posedge clk); while (!req_ready[i]);
    #1 req_valid[i] = 0;
  endtask

  initial begin
    int t0, ars;
    req_valid = 0;
    for (int i = 0; i < 4; i++) begin req_addr[i] = 0; outstanding[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // coalescing: all four L0s miss on the same line in the same cycle
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin req_valid[i] = 1; req_addr[i] = 32'h8000_0040; want[i] = 32'h8000_0040; outstanding[i] = 1; end
    ars = ar_count;
    for (int c = 0; c < 30; c++) begin
      @(posedge clk); #1;
      for (int i = 0; i < 4; i++) if (req_ready_q[i]) req_valid[i] = 0;
    end
    checks++; if (max_par != 4) begin failures++; $display("coalesced refill answered to %0d L0s at once", max_par); end
    @(posedge clk);
    checks++; if (ar_count - ars != 1) begin failures++; $display("%0d AXI reads for one line", ar_count - ars); end
    checks++; if (coal < 3) begin failures++; $display("only %0d coalesced misses", coal); end
    // hit latency: accepted in cycle 0, answered in cycle 2
    @(negedge clk);
    req_valid[1] = 1; req_addr[1] = 32'h8000_0040; want[1] = 32'h8000_0040;
    @(posedge clk); #1; req_valid[1] = 0;
    checks++; if (rsp_valid[1]) begin failures++; $display("hit answered after one cycle"); end
    @(posedge clk); #1;
    checks++; if (!rsp_valid[1]) begin failures++; $display("hit not answered after two cycles"); end
    // three lines in one set: 0x0000, 0x0400, 0x0800 (set 0), two ways
    issue(0, 32'h0000_0000); wait (outstanding[0] == 0);
    issue(0, 32'h0000_0400); wait (outstanding[0] == 0);
    ars = ar_count;
    issue(0, 32'h0000_0000); wait (outstanding[0] == 0);
    issue(0, 32'h0000_0400); wait (outstanding[0] == 0);
    checks++; if (ar_count != ars) begin failures++; $display("two ways of a set did not both hit"); end
    issue(0, 32'h0000_0800); wait (outstanding[0] == 0);
    checks++; if (ar_count != ars + 1) begin failures++; $display("third line in a set did not miss"); end
    // random traffic from all four L0s over 128 lines (twice the cache)
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        req_valid[i] = 1; req_addr[i] = 32'h0001_0000 + 32 * $urandom_range(0, 127);
        want[i] = req_addr[i]; outstanding[i] = 1;
      end
      while (req_valid != 0 || outstanding[0] + outstanding[1] + outstanding[2] + outstanding[3] != 0) begin
        @(posedge clk); #1;
        for (int i = 0; i < 4; i++) if (req_ready_q[i]) req_valid[i] = 0;
      end
    end
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
