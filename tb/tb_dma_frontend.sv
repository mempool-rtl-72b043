// Testbench for dma_frontend: the register file that cores write to start a cluster DMA transfer.
// How: writes random SRC/DST/NUM_BYTES through the configuration port, reads them back, launches
// the transfer and checks that exactly one request with those fields leaves, that it is held
// while the downstream is not ready, that BUSY is set until done_i and that the DONE counter
// counts completions. Writes while busy must be ignored; a launch with zero bytes must not issue.
// Timing checked: the request is valid the cycle after the LAUNCH write.
// Paper: "the DMA frontend ... programmed by the cores". Register offsets are this design's choice.
module tb_dma_frontend;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid, cfg_write; logic [4:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  logic req_valid, req_ready, done, busy; dma_req_t req;
  int checks = 0, failures = 0;

  dma_frontend dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .req_valid_o(req_valid),
    .req_ready_i(req_ready), .req_o(req), .done_i(done), .busy_o(busy));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk); cfg_valid = 1; cfg_write = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_valid = 0; cfg_write = 0;
  endtask

  task automatic rd(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk); cfg_addr = a; #1 d = cfg_rdata;
  endtask

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] s, d, n, v;
    int wait_cycles;
    cfg_valid = 0; cfg_write = 0; cfg_addr = 0; cfg_wdata = 0; req_ready = 0; done = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // zero-length launch does nothing
    wr(5'h0C, 1);
    check(!req_valid && !busy, "zero-length launch must not start");
    for (int it = 0; it < 100; it++) begin
      s = $urandom(); d = $urandom(); n = $urandom_range(1, 65536);
      wr(5'h00, s); wr(5'h04, d); wr(5'h08, n);
      rd(5'h00, v); check(v == s, "SRC readback");
      rd(5'h04, v); check(v == d, "DST readback");
      rd(5'h08, v); check(v == n, "NUM_BYTES readback");
      @(negedge clk); cfg_valid = 1; cfg_write = 1; cfg_addr = 5'h0C; cfg_wdata = 1;
      @(negedge clk); cfg_valid = 0; cfg_write = 0;
      check(req_valid, "request valid one cycle after LAUNCH");
      check(req.src == s && req.dst == d && req.num_bytes == n, "request fields");
      rd(5'h10, v); check(v == 1 && busy, "BUSY set");
      // write while busy is ignored
      wr(5'h00, ~s);
      rd(5'h00, v); check(v == s, "write while busy ignored");
      wait_cycles = $urandom_range(0, 5);
      repeat (wait_cycles) begin @(negedge clk); check(req_valid, "request held until ready"); end
      req_ready = 1; @(negedge clk); req_ready = 0;
      check(!req_valid, "request issued exactly once");
      repeat ($urandom_range(0, 5)) @(negedge clk);
      check(busy, "busy until done");
      done = 1; @(negedge clk); done = 0;
      check(!busy, "busy cleared by done");
      rd(5'h14, v); check(v == it + 1, "DONE counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
