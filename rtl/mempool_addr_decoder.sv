// Static address decoder at the output of a core.
//
// From a (scrambled) L1 address and the tile's own index it decides where a
// request goes: to a bank of the own tile (local_o, bank_o), or to one of the
// tile's remote ports. Port 0 (L) reaches the other tiles of the same local
// group; ports 1 (E), 2 (N) and 3 (NE) reach the local group whose index is
// the own group index XOR the port number, so group 0's E, N and NE
// neighbours are groups 1, 2 and 3 as in the paper's cluster figure, and
// the relation is symmetric for the other groups (this design's reading).
// tile_o is the destination tile inside its group. Purely combinational.
module mempool_addr_decoder
  import mempool_pkg::*;
(
  input  addr_t                        addr_i,
  input  tile_id_t                     tile_id_i,
  output logic                         local_o,
  output port_t                        port_o,
  output logic [BankOffsetBits-1:0]    bank_o,
  output logic [TileInGroupBits-1:0]   tile_o
);
  tile_id_t  dst;
  group_id_t dst_group, own_group;

  assign dst       = addr_i[TileBitsLsb +: TileOffsetBits];
  assign dst_group = dst[TileOffsetBits-1 -: GroupBits];
  assign own_group = tile_id_i[TileOffsetBits-1 -: GroupBits];
  assign local_o   = (dst == tile_id_i);
  assign port_o    = port_t'(dst_group ^ own_group);
  assign bank_o    = addr_i[ByteOffsetBits +: BankOffsetBits];
  assign tile_o    = dst[TileInGroupBits-1:0];

endmodule
