// Testbench for dma_splitter: cuts a DMA request into pieces that never cross an L1 line
// (4 KiB: one row across all 64 tiles), so each piece maps onto the cluster's distributor.
// How: random requests between L2 (address >= 1 MiB) and L1 in both directions. A model walks the
// request and predicts every piece (src, dst, length); the piece stream is compared one by one,
// with random back-pressure and random completion delays. done_o must come exactly once, after
// the last piece's done_i. Rate: with the downstream always ready one piece issues per cycle.
// Paper: "the DMA frontend splits transfers ... at L1 line boundaries"; alignment is not mentioned.
module tb_dma_splitter;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, done_o, out_valid, out_ready, done_i;
  dma_req_t in_req, out_req;
  int checks = 0, failures = 0;

  dma_splitter dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(in_valid), .req_ready_o(in_ready),
    .req_i(in_req), .done_o(done_o), .req_valid_o(out_valid), .req_ready_i(out_ready),
    .req_o(out_req), .done_i(done_i));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] l1, l2, n, s, d, rem, exp_len, room;
    bit to_l1, stall;
    int pieces, cyc, dones, seen_done;
    in_valid = 0; out_ready = 0; done_i = 0; in_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      stall = it >= 20;
      l1 = {12'd0, 20'($urandom())} & ~32'h3F;
      l2 = 32'h8000_0000 + ($urandom() & 32'h00FF_FFC0);
      n  = 32'($urandom_range(1, 600)) * 64;
      if (l1 + n > 32'h10_0000) n = 32'h10_0000 - l1;
      to_l1 = $urandom_range(0, 1);
      s = to_l1 ? l2 : l1; d = to_l1 ? l1 : l2;
      @(negedge clk); check(in_ready, "idle splitter ready");
      in_valid = 1; in_req = '{src: s, dst: d, num_bytes: n};
      @(negedge clk); in_valid = 0;
      rem = n; pieces = 0; cyc = 0; dones = 0; seen_done = 0;
      while (rem != 0) begin
        out_ready = stall ? $urandom_range(0, 1) : 1;
        #1;
        check(out_valid, "piece valid while bytes remain");
        if (out_valid && out_ready) begin
          room = 4096 - (l1 % 4096);
          exp_len = rem < room ? rem : room;
          check(out_req.num_bytes == exp_len, "piece length stops at the line boundary");
          check(out_req.src == s && out_req.dst == d, "piece addresses");
          s += exp_len; d += exp_len; l1 += exp_len; rem -= exp_len; pieces++;
        end
        cyc++;
        @(negedge clk);
        if (done_o) seen_done++;
      end
      out_ready = 0;
      if (!stall) check(cyc == pieces, "one piece per cycle without back-pressure");
      #1 check(!out_valid, "no extra piece");
      // complete pieces with random gaps
      while (dones < pieces) begin
        check(!done_o && seen_done == 0, "done only after the last piece completes");
        done_i = $urandom_range(0, 1);
        if (done_i) dones++;
        @(negedge clk); done_i = 0;
      end
      for (int k = 0; k < 3; k++) begin if (done_o) seen_done++; @(negedge clk); end
      check(seen_done == 1, "exactly one done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
