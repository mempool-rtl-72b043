// Testbench of spm_bank: random reads, byte-enabled writes and atomics against a
// reference array; LR/SC success and failure cases; checks the one-cycle latency
// and that a stalled response holds the bank.
module tb_spm_bank;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        req_valid, req_ready, resp_valid, resp_ready;
  logic [7:0]  addr;
  logic        wen;
  logic [3:0]  be;
  logic [31:0] wdata, rdata;
  amo_e        amo;
  logic [7:0]  core, meta_i, meta_o;

  spm_bank #(.NumWords(256), .MetaWidth(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_addr_i(addr), .req_wen_i(wen), .req_be_i(be), .req_wdata_i(wdata),
    .req_amo_i(amo), .req_core_i(core), .meta_i(meta_i), .resp_valid_o(resp_valid),
    .resp_ready_i(resp_ready), .resp_rdata_o(rdata), .meta_o(meta_o));

  logic [31:0] ref_mem [256];

  function automatic logic [31:0] amo_model(amo_e op, logic [31:0] o, logic [31:0] w);
    case (op)
      AmoSwap: return w;
      AmoAdd:  return o + w;
      AmoXor:  return o ^ w;
      AmoAnd:  return o & w;
      AmoOr:   return o | w;
      AmoMin:  return $signed(o) < $signed(w) ? o : w;
      AmoMax:  return $signed(o) > $signed(w) ? o : w;
      AmoMinu: return o < w ? o : w;
      AmoMaxu: return o > w ? o : w;
      default: return o;
    endcase
  endfunction

  // one access; returns read data; checks latency of one cycle
  task automatic access(input logic [7:0] a, input logic w, input logic [3:0] b,
                        input logic [31:0] d, input amo_e op, input logic [7:0] c,
                        output logic [31:0] r);
    @(negedge clk);
    req_valid = 1; addr = a; wen = w; be = b; wdata = d; amo = op; core = c; meta_i = a ^ 8'h5A;
    @(posedge clk); #1;
    checks++;
    if (!resp_valid || meta_o != (a ^ 8'h5A)) begin
      failures++; $display("no response one cycle after request (addr %0d)", a);
    end
    r = rdata;
    req_valid = 0;
  endtask

  initial begin
    logic [31:0] r, expv, m;
    req_valid = 0; resp_ready = 1; addr = 0; wen = 0; be = 0; wdata = 0; amo = AmoNone;
    core = 0; meta_i = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      ref_mem[i] = $urandom();
      access(8'(i), 1, 4'hF, ref_mem[i], AmoNone, 0, r);
    end
    for (int i = 0; i < 1500; i++) begin
      int kind;
      logic [7:0] a;
      logic [31:0] d;
      kind = $urandom_range(0, 2);
      a = 8'($urandom());
      d = $urandom();
      if (kind == 0) begin
        access(a, 0, 4'h0, 0, AmoNone, 0, r);
        checks++; if (r != ref_mem[a]) begin failures++; $display("read %0d: %h vs %h", a, r, ref_mem[a]); end
      end else if (kind == 1) begin
        logic [3:0] b;
        b = 4'($urandom());
        access(a, 1, b, d, AmoNone, 0, r);
        for (int k = 0; k < 4; k++) if (b[k]) ref_mem[a][8*k +: 8] = d[8*k +: 8];
      end else begin
        amo_e op;
        op = amo_e'($urandom_range(1, 9));
        access(a, 0, 4'hF, d, op, 0, r);
        checks++; if (r != ref_mem[a]) begin failures++; $display("amo %s old %h vs %h", op.name(), r, ref_mem[a]); end
        ref_mem[a] = amo_model(op, ref_mem[a], d);
      end
    end
    // LR/SC: success
    access(8'd7, 0, 4'hF, 0, AmoLR, 8'd3, r);
    checks++; if (r != ref_mem[7]) failures++;
    access(8'd7, 0, 4'hF, 32'hCAFE, AmoSC, 8'd3, r);
    checks++; if (r != 0) begin failures++; $display("SC should succeed"); end
    ref_mem[7] = 32'hCAFE;
    // SC without reservation fails
    access(8'd7, 0, 4'hF, 32'hBEEF, AmoSC, 8'd3, r);
    checks++; if (r != 1) begin failures++; $display("SC without reservation should fail"); end
    // reservation lost by an intervening store
    access(8'd9, 0, 4'hF, 0, AmoLR, 8'd4, r);
    access(8'd9, 1, 4'hF, 32'h1234, AmoNone, 8'd5, r);
    ref_mem[9] = 32'h1234;
    access(8'd9, 0, 4'hF, 32'h9999, AmoSC, 8'd4, r);
    checks++; if (r != 1) begin failures++; $display("SC after store should fail"); end
    // other core's SC fails
    access(8'd10, 0, 4'hF, 0, AmoLR, 8'd1, r);
    access(8'd10, 0, 4'hF, 32'h7, AmoSC, 8'd2, r);
    checks++; if (r != 1) begin failures++; $display("SC of another core should fail"); end
    for (int i = 0; i < 256; i++) begin
      access(8'(i), 0, 0, 0, AmoNone, 0, r);
      checks++; if (r != ref_mem[i]) begin failures++; $display("final %0d", i); end
    end
    // back-pressure: response held, bank not ready
    resp_ready = 0;
    @(negedge clk); req_valid = 1; addr = 1; wen = 0; amo = AmoNone;
    @(posedge clk); #1; req_valid = 0;
    m = rdata;
    repeat (3) @(posedge clk);
    #1;
    checks++; if (req_ready || !resp_valid || rdata != m) begin failures++; $display("backpressure"); end
    resp_ready = 1;
    @(posedge clk); #1;
    checks++; if (resp_valid) begin failures++; $display("response not drained"); end
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
