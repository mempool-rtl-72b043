// Testbench of axi_node (4 children): every child writes bursts into its own region
// of a behavioural AXI memory and reads them back, all concurrently.  Checks data,
// that every child gets back its own ID on R and B, and that all children are served.
module tb_axi_node;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t  sreq [4];
  axi_resp_t sresp [4];
  axi_req_t  mreq;
  axi_resp_t mresp;
  int reads, writes;

  axi_node #(.NumIn(4)) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_resp_o(sresp),
    .mst_req_o(mreq), .mst_resp_i(mresp));
  tb_axi_mem #(.Latency(5)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .resp_o(mresp),
    .reads_o(reads), .writes_o(writes));

  int done_cnt = 0;

  task automatic child(input int i);
    for (int n = 0; n < 20; n++) begin
      logic [31:0] a = 32'h1000_0000 + i * 32'h10000 + n * 256;
      logic [7:0]  len = 8'($urandom_range(0, 3));
      logic [AxiIdWidth-1:0] id = AxiIdWidth'($urandom_range(0, 7));
      logic [511:0] d [4];
      for (int b = 0; b <= len; b++) d[b] = {16{32'($urandom())}};
      // write burst
      @(negedge clk);
      sreq[i].aw_valid = 1; sreq[i].aw.addr = a; sreq[i].aw.len = len; sreq[i].aw.id = id;
      #1; while (!sresp[i].aw_ready) begin @(negedge clk); #1; end
      @(negedge clk); sreq[i].aw_valid = 0;
      for (int b = 0; b <= len; b++) begin
        sreq[i].w_valid = 1; sreq[i].w.data = d[b]; sreq[i].w.strb = '1; sreq[i].w.last = b == len;
        #1; while (!sresp[i].w_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      sreq[i].w_valid = 0;
      sreq[i].b_ready = 1;
      #1; while (!sresp[i].b_valid) begin @(negedge clk); #1; end
      checks++; if (sresp[i].b.id != id) begin failures++; $display("child %0d: B id %h exp %h", i, sresp[i].b.id, id); end
      @(negedge clk); sreq[i].b_ready = 0;
      // read back
      sreq[i].ar_valid = 1; sreq[i].ar.addr = a; sreq[i].ar.len = len; sreq[i].ar.id = id;
      #1; while (!sresp[i].ar_ready) begin @(negedge clk); #1; end
      @(negedge clk); sreq[i].ar_valid = 0;
      sreq[i].r_ready = 1;
      for (int b = 0; b <= len; b++) begin
        #1; while (!sresp[i].r_valid) begin @(negedge clk); #1; end
        checks++;
        if (sresp[i].r.data != d[b] || sresp[i].r.id != id || sresp[i].r.last != (b == len)) begin
          failures++; $display("child %0d: read beat %0d wrong id %h/%h last %b data %h exp %h a %h", i, b, sresp[i].r.id, id, sresp[i].r.last, sresp[i].r.data[31:0], d[b][31:0], a);
        end
        @(negedge clk);
      end
      sreq[i].r_ready = 0;
    end
    done_cnt++;
  endtask

  initial begin
    for (int i = 0; i < 4; i++) sreq[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      child(0); child(1); child(2); child(3);
    join
    checks++; if (done_cnt != 4 || reads != 80 || writes != 80) begin failures++; $display("counts %0d %0d %0d", done_cnt, reads, writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
