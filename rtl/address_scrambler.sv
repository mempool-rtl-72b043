// address_scrambler: hybrid addressing scheme of the L1 scratchpad.
//
// The L1 memory is word-interleaved across all banks: an address reads, from the
// bottom, 2 byte bits, b bank bits, t tile bits and then the row inside the bank.
// Inside the first 2^(t+s+b+2) bytes this module swaps two bit fields so that every
// tile owns a contiguous "sequential region" of 2^(s+b+2) bytes (its stack, private
// data): the s bits just above the bank offset move up to the bottom of the row
// offset, and the t bits above them move down into the tile offset.  Byte and bank
// offsets are untouched, so accesses inside one tile stay interleaved over its banks.
// Outside the sequential regions the address passes unchanged.  The logic is a wire
// crossing and one multiplexer, as the paper describes; it is purely combinational.
//
// Interface: addr_i is the address a core issues, addr_o the physical interleaved
// address used to route the request.  The bit layout follows the paper's figure of
// the scheme.  The size of a tile's sequential region (SeqMemSizePerTile, 2 KiB,
// s = 5) is this design's choice; the paper leaves it a parameter.
module address_scrambler #(
  parameter int unsigned NumTiles          = 64,
  parameter int unsigned BanksPerTile      = 16,
  parameter int unsigned SeqMemSizePerTile = 2048
) (
  input  logic [31:0] addr_i,
  output logic [31:0] addr_o
);
  localparam int unsigned B = $clog2(BanksPerTile);
  localparam int unsigned T = $clog2(NumTiles);
  localparam int unsigned S = $clog2(SeqMemSizePerTile) - B - 2;
  localparam int unsigned Lo = B + 2;          // first bit above the bank offset

  logic in_seq;
  logic [31:0] scrambled;

  assign in_seq = (addr_i >> (T + S + Lo)) == '0;

  always_comb begin
    scrambled = addr_i;
    // tile offset <- the t bits that sit above the s bits
    scrambled[Lo +: T]     = addr_i[Lo + S +: T];
    // bottom of the row offset <- the s bits
    scrambled[Lo + T +: S] = addr_i[Lo +: S];
  end

  assign addr_o = in_seq ? scrambled : addr_i;

  initial assert (S <= T) else $error("sequential region larger than a tile offset allows");
endmodule
