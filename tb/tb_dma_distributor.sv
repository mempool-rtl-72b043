// Testbench for dma_distributor: splits one DMA piece (at most one 4 KiB L1 line) over NumOut
// downstream engines, each of which owns a fixed region of RegionBytes in that line.
// How: random aligned pieces in both directions. A model intersects the piece with every region
// and predicts which outputs fire and with what src/dst/length; outputs accept at random times
// and complete in random order. done_o must come once, only after every used output is done.
// Timing: the parts are valid the cycle after the piece is accepted.
// Paper: "the distributor ... forwards the request to the backends that own the addressed tiles";
// the region sizes (1024 B per group, 256 B per backend) follow from the address map.
module tb_dma_distributor;
  import mempool_pkg::*;
  localparam int unsigned N = 4, R = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, done_o;
  logic [N-1:0] out_valid, out_ready, done_i;
  dma_req_t in_req, out_req [N];
  int checks = 0, failures = 0;

  dma_distributor #(.NumOut(N), .RegionBytes(R)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(in_valid), .req_ready_o(in_ready), .req_i(in_req), .done_o(done_o),
    .req_valid_o(out_valid), .req_ready_i(out_ready), .req_o(out_req), .done_i(done_i));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] l1, l2, n, s, d, lo, hi, rl, rh, a, e;
    logic [N-1:0] exp_used, taken, finished;
    logic [31:0] exp_len [N], exp_src [N], exp_dst [N];
    bit to_l1; int seen;
    in_valid = 0; out_ready = 0; done_i = 0; in_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      l1 = 32'($urandom_range(0, 255)) * 4096 + 32'($urandom_range(0, 63)) * 64;
      n  = 32'($urandom_range(1, 64 - (l1 % 4096) / 64)) * 64;
      l2 = 32'h8000_0000 + ($urandom() & 32'h00FF_FFC0);
      to_l1 = $urandom_range(0, 1);
      s = to_l1 ? l2 : l1; d = to_l1 ? l1 : l2;
      lo = l1; hi = l1 + n;
      for (int r = 0; r < N; r++) begin
        rl = (l1 & ~32'(N * R - 1)) + r * R; rh = rl + R;
        a = lo > rl ? lo : rl; e = hi < rh ? hi : rh;
        exp_used[r] = a < e;
        exp_len[r] = a < e ? e - a : 0;
        exp_src[r] = s + (a - lo); exp_dst[r] = d + (a - lo);
      end
      @(negedge clk); check(in_ready, "idle distributor ready");
      in_valid = 1; in_req = '{src: s, dst: d, num_bytes: n};
      @(negedge clk); in_valid = 0;
      #1 check(out_valid == exp_used, "parts valid the cycle after acceptance, on the right outputs");
      taken = '0; finished = '0; seen = 0;
      while (taken != exp_used || finished != exp_used) begin
        out_ready = N'($urandom());
        #1;
        for (int r = 0; r < N; r++) if (out_valid[r]) begin
          check(exp_used[r] && !taken[r], "each used output fires once");
          check(out_req[r].num_bytes == exp_len[r] && out_req[r].src == exp_src[r]
                && out_req[r].dst == exp_dst[r], "part fields");
        end
        done_i = N'($urandom()) & taken & ~finished;
        check(!done_o, "done not before all parts are done");
        taken |= out_valid & out_ready;
        finished |= done_i;
        @(negedge clk);
        done_i = '0; out_ready = '0;
      end
      for (int k = 0; k < 3; k++) begin if (done_o) seen++; @(negedge clk); end
      check(seen == 1, "exactly one done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
