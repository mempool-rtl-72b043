// Testbench of address_scrambler: compares against an arithmetic model of the hybrid
// map (2 KiB sequential region per tile, 64 tiles, 16 banks) and checks that every
// word of tile k's sequential region lands in tile k while addresses above the
// sequential regions are unchanged.
module tb_address_scrambler;
  int checks = 0, failures = 0;
  logic [31:0] a, y, exp_y;

  address_scrambler dut (.addr_i(a), .addr_o(y));

  function automatic logic [31:0] model(input logic [31:0] x);
    int unsigned byte_off, bank, s, t;
    if (x >= 32'h2_0000) return x;               // 64 tiles x 2 KiB
    byte_off = x % 4;
    bank     = (x / 4) % 16;
    s        = (x / 64) % 32;                    // row inside the tile's region
    t        = (x / 2048) % 64;                  // which tile's region
    return (((s * 64 + t) * 16 + bank) * 4) + byte_off;
  endfunction

  initial begin
    for (int i = 0; i < 2000; i++) begin
      a = (i % 2 == 0) ? ($urandom() & 32'h1_FFFF) : $urandom();
      #1;
      exp_y = model(a);
      checks++;
      if (y !== exp_y) begin
        failures++;
        $display("mismatch addr %h got %h exp %h", a, y, exp_y);
      end
    end
    // each tile's sequential region maps to that tile (tile bits [11:6])
    for (int k = 0; k < 64; k += 9) begin
      for (int w = 0; w < 512; w += 37) begin
        a = k * 2048 + w * 4;
        #1;
        checks++;
        if (y[11:6] != 6'(k)) begin
          failures++;
          $display("region of tile %0d: addr %h went to tile %0d", k, a, y[11:6]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
