// Testbench of l0_icache: a model of the L1 answers line requests after 3 cycles
// with instructions computed from their address.  Checks every fetched instruction,
// that hits are answered in the fetch cycle, that a straight-line run is prefetched
// so that only the first line stalls, and that a JAL's target line and a backward
// branch's target line are prefetched before the core jumps there.
module tb_l0_icache;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0]  fetch_addr, fetch_data, refill_addr;
  logic         fetch_valid, fetch_ready, refill_valid, refill_ready, refill_rvalid, pf;
  logic [255:0] refill_rdata;

  l0_icache dut (
    .clk_i(clk), .rst_ni(rst_n), .fetch_addr_i(fetch_addr), .fetch_valid_i(fetch_valid),
    .fetch_ready_o(fetch_ready), .fetch_data_o(fetch_data), .refill_valid_o(refill_valid),
    .refill_ready_i(refill_ready), .refill_addr_o(refill_addr), .refill_rvalid_i(refill_rvalid),
    .refill_rdata_i(refill_rdata), .prefetch_o(pf));

  // instruction memory: addi-like words, a JAL at 0x3004 to 0x3400 and a backward
  // branch at 0x501C to 0x4F00 (offset -0x11C)
  function automatic logic [31:0] imem(input logic [31:0] a);
    if (a == 32'h3004) return {1'b0, 10'h1FE, 1'b0, 8'h00, 5'd1, 7'b1101111};  // jal +0x3FC
    if (a == 32'h501C) begin
      logic [12:0] off = -13'sd284;   // 0x4F00 - 0x501C
      return {off[12], off[10:5], 5'd2, 5'd1, 3'b001, off[4:1], off[11], 7'b1100011};
    end
    return {a[31:7], 7'b0010011};
  endfunction

  // L1 model: 3-cycle latency
  int          lat;
  logic        busy;
  logic [31:0] line_addr;
  assign refill_ready = !busy;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin busy <= 0; lat <= 0; refill_rvalid <= 0; end
    else begin
      refill_rvalid <= 0;
      if (refill_valid && refill_ready) begin busy <= 1; lat <= 3; line_addr <= refill_addr; end
      else if (busy) begin
        if (lat == 1) begin
          busy <= 0; refill_rvalid <= 1;
          for (int k = 0; k < 8; k++) refill_rdata[32*k +: 32] <= imem(line_addr + 4*k);
        end
        lat <= lat - 1;
      end
    end
  end

  int pf_count = 0;
  always @(posedge clk) if (pf) pf_count++;

  // fetch one instruction, return the number of stall cycles
  task automatic fetch(input logic [31:0] a, output int stalls);
    stalls = 0;
    @(negedge clk);
    fetch_valid = 1; fetch_addr = a;
    #1;
    while (!fetch_ready) begin
      @(negedge clk); #1; stalls++;
      if (stalls > 50) break;
    end
    checks++;
    if (fetch_data != imem(a)) begin
      failures++; $display("fetch %h: got %h exp %h", a, fetch_data, imem(a));
    end
  endtask

  initial begin
    int st, total;
    fetch_valid = 0; fetch_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // straight line code: 64 instructions
    total = 0;
    for (int i = 0; i < 64; i++) begin
      fetch(32'h1000 + 4 * i, st);
      if (i == 0) begin checks++; if (st == 0) begin failures++; $display("cold miss did not stall"); end end
      else total += st;
    end
    checks++;
    if (total != 0) begin failures++; $display("sequential run stalled %0d cycles after the first line", total); end
    // hit answered in the fetch cycle
    fetch(32'h10F0, st);
    checks++; if (st != 0) begin failures++; $display("hit was not single cycle"); end
    // JAL target prefetch: fetch line 0x3000 (miss), wait, then jump to 0x3400
    fetch(32'h3000, st);
    fetch(32'h3004, st);
    repeat (8) @(negedge clk);
    fetch(32'h3400, st);
    checks++; if (st != 0) begin failures++; $display("JAL target was not prefetched (%0d stalls)", st); end
    // backward branch: loop body 0x4F00..0x501C
    fetch(32'h5000, st);
    repeat (8) @(negedge clk);
    fetch(32'h4F00, st);
    checks++; if (st != 0) begin failures++; $display("loop head was not prefetched (%0d stalls)", st); end
    checks++; if (pf_count == 0) begin failures++; $display("no prefetch seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
