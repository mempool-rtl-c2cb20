// Hybrid addressing scheme ("scrambling logic").
//
// The L1 is interleaved word by word over the banks of a tile and then over
// the tiles. Below address SeqMemSizePerTile * NumTiles, this block swaps two
// fields of the address so that each tile owns one contiguous region of
// SeqMemSizePerTile bytes (a sequential region, e.g. for its cores' stacks):
// the s bits just above the bank offset move up by t places into the row
// offset, and the t bits they displaced move down into the tile offset.
// Byte and bank offsets are untouched, so a sequential region is still
// interleaved over the 16 banks of its tile. Addresses above the regions
// pass unchanged. It is a wire crossing and one multiplexer, purely
// combinational, as the paper describes. The region size is this design's
// choice; the paper gives none.
module mempool_scrambler #(
  parameter int unsigned AddrWidth         = 32,
  parameter int unsigned ByteOffset        = 2,
  parameter int unsigned NumBanksPerTile   = 16,
  parameter int unsigned NumTiles          = 64,
  parameter int unsigned SeqMemSizePerTile = 4096
) (
  input  logic [AddrWidth-1:0] addr_i,
  output logic [AddrWidth-1:0] addr_o,
  output logic                 seq_o   // address lies in a sequential region
);
  localparam int unsigned B     = $clog2(NumBanksPerTile);
  localparam int unsigned T     = $clog2(NumTiles);
  localparam int unsigned SBig  = $clog2(SeqMemSizePerTile);     // S
  localparam int unsigned S     = SBig - ByteOffset - B;          // s
  localparam int unsigned Lsb   = ByteOffset + B;

  assign seq_o = (addr_i >> (SBig + T)) == '0;

  always_comb begin
    addr_o = addr_i;
    if (seq_o) begin
      addr_o[Lsb +: T]     = addr_i[Lsb + S +: T];
      addr_o[Lsb + T +: S] = addr_i[Lsb +: S];
    end
  end

endmodule
