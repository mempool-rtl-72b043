// Testbench for dma_backend: the data mover that moves whole 64-byte tile rows between an AXI
// memory and the wide DMA ports of its tiles.
// How: tb_axi_mem plays L2; four behavioural tiles hold 256 rows of 512 bits each, accept rows at
// random (or always, for the rate test) and answer a row read one cycle after accepting it.
// L2->L1 requests must land each AXI beat in row addr[19:12] of tile addr[7:6]; L1->L2 requests
// must write the tile rows into L2 (read back from the memory model). Rates: with the tiles
// always ready, an L2->L1 transfer of B beats finishes within Latency+B+4 cycles (one beat per
// cycle once data flows).
// Paper: the backend is "a modular DMA engine"; the row-wide tile port is this design's choice.
module tb_dma_backend;
  import mempool_pkg::*;
  localparam int Lat = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, done;
  dma_req_t req;
  axi_req_t axi_req; axi_resp_t axi_resp;
  logic [3:0] t_valid, t_ready, t_rsp_valid;
  dma_tile_req_t t_req;
  logic [AxiDataWidth-1:0] t_rsp_data [4];
  logic [AxiDataWidth-1:0] tmem [4][256];
  int reads, writes, checks = 0, failures = 0;
  bit always_ready;

  dma_backend #(.TilesPerBackend(4), .AxiId(16'd3)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req), .done_o(done),
    .axi_req_o(axi_req), .axi_resp_i(axi_resp), .tile_req_valid_o(t_valid),
    .tile_req_ready_i(t_ready), .tile_req_o(t_req), .tile_rsp_valid_i(t_rsp_valid),
    .tile_rsp_data_i(t_rsp_data));
  tb_axi_mem #(.Latency(Lat)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .resp_o(axi_resp),
    .reads_o(reads), .writes_o(writes));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // behavioural tiles
  always @(negedge clk) t_ready <= always_ready ? 4'hF : 4'($urandom());
  always @(posedge clk) begin
    t_rsp_valid <= '0;
    for (int t = 0; t < 4; t++) if (t_valid[t] && t_ready[t]) begin
      if (t_req.wen) tmem[t][t_req.row] <= t_req.wdata;
      else begin t_rsp_valid[t] <= 1'b1; t_rsp_data[t] <= tmem[t][t_req.row]; end
    end
    if ($countones(t_valid) > 1) begin failures++; $display("FAIL: two tiles addressed at once"); end
  end

  initial begin
    #5000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] l1, l2, n, a;
    int beats, cyc, t0;
    bit to_l1;
    req_valid = 0; req = '0; always_ready = 1; t_rsp_valid = '0;
    for (int t = 0; t < 4; t++) begin
      t_rsp_data[t] = '0;
      for (int r = 0; r < 256; r++)
        for (int k = 0; k < 16; k++) tmem[t][r][32*k +: 32] = $urandom();
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      always_ready = it < 40;
      // one backend owns 4 tiles x 64 B = 256 B of each 1 KiB group region
      l1 = 32'($urandom_range(0, 255)) * 4096 + 32'($urandom_range(0, 15)) * 256
           + 32'($urandom_range(0, 3)) * 64;
      beats = $urandom_range(1, 4 - (l1 % 256) / 64);
      n = beats * 64;
      l2 = 32'h8000_0000 + 32'($urandom_range(0, 4095)) * 64;
      to_l1 = (it % 2) == 0;
      @(negedge clk); check(req_ready, "idle backend ready");
      req_valid = 1; req = to_l1 ? '{src: l2, dst: l1, num_bytes: n} : '{src: l1, dst: l2, num_bytes: n};
      t0 = $time;
      @(negedge clk); req_valid = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (always_ready && to_l1) check(cyc <= Lat + beats + 4, $sformatf("L2->L1 rate: %0d beats took %0d cycles", beats, cyc));
      @(negedge clk);
      for (int b = 0; b < beats; b++) begin
        a = l1 + 64 * b;
        if (to_l1) check(tmem[a[7:6]][a[19:12]] == i_mem.read_beat(l2 + 64 * b), "L2->L1 row data");
        else       check(i_mem.read_beat(l2 + 64 * b) == tmem[a[7:6]][a[19:12]], "L1->L2 beat data");
      end
    end
    check(reads == 150 && writes == 150, "one AXI burst per request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
