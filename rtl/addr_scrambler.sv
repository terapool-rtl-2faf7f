// Hybrid L1 address mapping (sequential + interleaved regions).
//
// The L1 starts at byte address 0. The lowest NumTiles * SeqBytesPerTile bytes
// (512 KiB by default) form the sequential region: there, each consecutive
// SeqBytesPerTile chunk (4 KiB) belongs to one Tile, so a core can keep its stack
// and private data in its own Tile's banks. Everything above is word-interleaved
// over all banks of the cluster. Both views are reached with one bank/row
// layout: the interleaved layout splits a word address into
//   {row, group, subgroup, tile, bank, byte}
// and a sequential address, laid out as {tile_global, seq_row, bank, byte}, is
// turned into it by swapping the Tile-index bits with the low row bits. This is
// the wire crossing plus one multiplexer the text mentions; the exact bit swap
// is this design's reading of the memory-map figure. Addresses at or above the
// sequential region pass unchanged. Purely combinational.
module addr_scrambler #(
  parameter int unsigned AddrWidth       = 32,
  parameter int unsigned NumBanksPerTile = 32,
  parameter int unsigned NumTiles        = 128,
  parameter int unsigned SeqBytesPerTile = 4096
) (
  input  logic [AddrWidth-1:0] addr_i,
  output logic [AddrWidth-1:0] addr_o
);

  localparam int unsigned ByteOff   = 2;
  localparam int unsigned BankBits  = $clog2(NumBanksPerTile);
  localparam int unsigned TileBits  = $clog2(NumTiles);
  localparam int unsigned SeqRowBits = $clog2(SeqBytesPerTile) - BankBits - ByteOff;
  localparam int unsigned LowBits   = ByteOff + BankBits;
  localparam int unsigned SeqBits   = $clog2(SeqBytesPerTile) + TileBits;  // size of the region

  logic [SeqRowBits-1:0] seq_row;
  logic [TileBits-1:0]   tile;

  assign seq_row = addr_i[LowBits +: SeqRowBits];
  assign tile    = addr_i[LowBits + SeqRowBits +: TileBits];

  always_comb begin
    addr_o = addr_i;
    if (addr_i[AddrWidth-1:SeqBits] == '0) begin
      addr_o[LowBits +: TileBits]              = tile;
      addr_o[LowBits + TileBits +: SeqRowBits] = seq_row;
    end
  end

endmodule
