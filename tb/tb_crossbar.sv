// Testbench of crossbar (4 initiators x 4 targets, 32-bit payloads): random traffic
// with random target back-pressure; every request must reach the named target with
// the right initiator index and every answer must come back to its initiator.  Also
// checks that four requests to four targets pass in one cycle and that four
// requests to one target are served one per cycle, each initiator in turn.
module tb_crossbar;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 4, NO = 4;
  logic [NI-1:0] in_valid, in_ready, in_rvalid, in_rready;
  logic [1:0]    in_tgt [NI];
  logic [31:0]   in_req [NI], in_resp [NI];
  logic [NO-1:0] out_valid, out_ready, out_rvalid, out_rready;
  logic [1:0]    out_src [NO], out_rdst [NO];
  logic [31:0]   out_req [NO], out_resp [NO];

  crossbar #(.NumIn(NI), .NumOut(NO)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_tgt_i(in_tgt), .in_req_i(in_req),
    .in_resp_valid_o(in_rvalid), .in_resp_ready_i(in_rready), .in_resp_o(in_resp),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_src_o(out_src),
    .out_req_o(out_req), .out_resp_valid_i(out_rvalid), .out_resp_ready_o(out_rready),
    .out_resp_dst_i(out_rdst), .out_resp_i(out_resp));

  // target model: FIFO of accepted requests, answers with payload + 1
  logic [33:0] tq [NO][$];
  int sent [NI], recv [NI];
  int expected_sum [NI], got_sum [NI];
  logic random_mode;
  logic [NI-1:0] hs;

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      out_rvalid[o] = tq[o].size() > 0;
      out_rdst[o]   = out_rvalid[o] ? tq[o][0][33:32] : '0;
      out_resp[o]   = out_rvalid[o] ? tq[o][0][31:0] + 1 : '0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NO; o++) begin
      if (out_rvalid[o] && out_rready[o]) void'(tq[o].pop_front());
      if (out_valid[o] && out_ready[o]) begin
        checks++;
        if (out_req[o][9:8] != 2'(o) || out_req[o][11:10] != out_src[o]) begin
          failures++; $display("request at target %0d from %0d mislabeled: %h", o, out_src[o], out_req[o]);
        end
        tq[o].push_back({out_src[o], out_req[o]});
      end
    end
    for (int i = 0; i < NI; i++) begin
      hs[i] = in_valid[i] && in_ready[i];
      if (hs[i]) begin expected_sum[i] += in_req[i] + 1; sent[i]++; end
      if (in_rvalid[i] && in_rready[i]) begin
        recv[i]++;
        got_sum[i] += in_resp[i];
        checks++;
        if (2'((in_resp[i] - 1) >> 10) != 2'(i)) begin failures++; $display("response to wrong initiator"); end
      end
    end
  end

  initial begin
    int cnt;
    in_valid = 0; out_ready = '1; in_rready = '1; random_mode = 0; hs = '0;
    for (int i = 0; i < NI; i++) begin in_tgt[i] = 0; in_req[i] = 0; sent[i] = 0; recv[i] = 0;
      expected_sum[i] = 0; got_sum[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // four initiators to four distinct targets: all pass in one cycle
    @(negedge clk);
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = 1; in_tgt[i] = 2'(3 - i); in_req[i] = {20'd0, 2'(i), 2'(3 - i), 8'(i)};
    end
    #1; checks++;
    if (in_ready != '1) begin failures++; $display("parallel requests not all accepted"); end
    @(negedge clk);
    // four initiators to target 2: one per cycle, round robin
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = 1; in_tgt[i] = 2; in_req[i] = {20'd1, 2'(i), 2'd2, 8'(i)};
    end
    cnt = 0;
    for (int c = 0; c < NI; c++) begin
      #1; checks++;
      if ($countones(in_ready & in_valid) != 1) begin failures++; $display("conflict not serialised"); end
      cnt += $countones(in_ready & in_valid);
      @(negedge clk);
      for (int i = 0; i < NI; i++) if (sent[i] == 2) in_valid[i] = 0;
    end
    checks++; if (cnt != NI || in_valid != 0) begin failures++; $display("not every initiator served"); end
    // random traffic
    random_mode = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      out_ready = 4'($urandom());
      in_rready = 4'($urandom());
      for (int i = 0; i < NI; i++) begin
        if (!in_valid[i] && $urandom_range(0, 1)) begin
          in_valid[i] = 1;
          in_tgt[i]   = 2'($urandom());
          in_req[i]   = {4'd0, 16'($urandom()), 2'(i), in_tgt[i], 8'($urandom())};
        end
      end
      @(posedge clk); #1;
      for (int i = 0; i < NI; i++) if (hs[i]) in_valid[i] = 0;
    end
    in_valid = 0; out_ready = '1; in_rready = '1;
    repeat (50) @(posedge clk);
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (sent[i] != recv[i] || expected_sum[i] != got_sum[i]) begin
        failures++; $display("initiator %0d: sent %0d received %0d", i, sent[i], recv[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
