// MemPool shared types and constants.
//
// The cluster is the paper's hierarchical "TopH" configuration: 256 cores in
// 64 tiles of 4 cores, tiles grouped into 4 local groups of 16 tiles. Each
// tile holds 16 SRAM banks of 1 KiB, so the cluster has 1024 banks and 1 MiB
// of shared L1 scratchpad. Every count below is the paper's number except
// where a comment marks it as this design's own choice.
//
// Address map of the L1 (interleaved, before scrambling), 20 bits:
//   [1:0]   byte offset
//   [5:2]   bank in tile         (b = 4 bits)
//   [11:6]  tile                 (t = 6 bits, [11:10] is the local group)
//   [19:12] row inside the bank  (256 rows of 32 bits)
// Higher address bits are ignored by the L1 (the cluster sees only L1 traffic).
package mempool_pkg;

  // ---------------- sizes from the paper ----------------
  localparam int unsigned NumCores         = 256;
  localparam int unsigned NumCoresPerTile  = 4;
  localparam int unsigned NumTiles         = NumCores / NumCoresPerTile;   // 64
  localparam int unsigned NumGroups        = 4;
  localparam int unsigned NumTilesPerGroup = NumTiles / NumGroups;        // 16
  localparam int unsigned NumBanksPerTile  = 16;
  localparam int unsigned BankSizeBytes    = 1024;  // 16 KiB of SPM per tile
  localparam int unsigned DataWidth        = 32;
  localparam int unsigned AddrWidth        = 32;
  // K: remote ports per tile (L, E, N, NE in TopH)
  localparam int unsigned NumTilePorts     = 4;
  // remote directions of a group: E, N, NE (port index 1..3)
  localparam int unsigned NumDirs          = NumTilePorts - 1;
  localparam int unsigned ICacheSizeBytes  = 2048;
  localparam int unsigned ICacheWays       = 4;

  // ---------------- this design's own choices ----------------
  // Outstanding loads per core (the paper: "a configurable number").
  localparam int unsigned RobDepth          = 8;
  // Sequential region per tile in bytes (2^S); the paper gives no size.
  localparam int unsigned SeqMemSizePerTile = 4096;
  // Instruction cache line, in 32-bit words.
  localparam int unsigned ICacheLineWords   = 4;

  // ---------------- derived ----------------
  localparam int unsigned ByteOffsetBits = 2;
  localparam int unsigned BankOffsetBits = $clog2(NumBanksPerTile);        // b
  localparam int unsigned TileOffsetBits = $clog2(NumTiles);               // t
  localparam int unsigned GroupBits      = $clog2(NumGroups);
  localparam int unsigned TileInGroupBits= $clog2(NumTilesPerGroup);
  localparam int unsigned BankNumWords   = BankSizeBytes / (DataWidth / 8); // 256
  localparam int unsigned RowBits        = $clog2(BankNumWords);
  localparam int unsigned L1AddrBits     = ByteOffsetBits + BankOffsetBits + TileOffsetBits + RowBits;
  localparam int unsigned TileBitsLsb    = ByteOffsetBits + BankOffsetBits;
  localparam int unsigned RowBitsLsb     = TileBitsLsb + TileOffsetBits;
  localparam int unsigned CoreIdBits     = $clog2(NumCoresPerTile);
  localparam int unsigned RobIdBits      = $clog2(RobDepth);
  localparam int unsigned PortBits       = $clog2(NumTilePorts);

  // Tile port indices. Port d of group g leads to group g XOR d.
  localparam int unsigned PortL  = 0;
  localparam int unsigned PortE  = 1;
  localparam int unsigned PortN  = 2;
  localparam int unsigned PortNE = 3;

  typedef logic [AddrWidth-1:0]     addr_t;
  typedef logic [DataWidth-1:0]     data_t;
  typedef logic [DataWidth/8-1:0]   strb_t;
  typedef logic [TileOffsetBits-1:0] tile_id_t;
  typedef logic [GroupBits-1:0]     group_id_t;
  typedef logic [CoreIdBits-1:0]    core_id_t;
  typedef logic [RobIdBits-1:0]     rob_id_t;
  typedef logic [PortBits-1:0]      port_t;

  // Memory request as issued by a core (before the ROB).
  typedef struct packed {
    addr_t addr;
    logic  wen;   // 1: store, 0: load
    strb_t be;    // byte enables of a store
    data_t data;  // store data
  } core_req_t;

  // Request as issued by the ROB: the core request plus its ROB slot.
  typedef struct packed {
    core_req_t req;
    rob_id_t   id;
  } rob_req_t;

  // Response as returned to the ROB.
  typedef struct packed {
    data_t   data;
    rob_id_t id;
  } rob_rsp_t;

  // Routing metadata carried by every request and returned with its response.
  typedef struct packed {
    tile_id_t tile;  // initiating tile
    core_id_t core;  // initiating core inside that tile
    rob_id_t  id;    // ROB slot of the initiating core
  } meta_t;

  // Request on the tile and group interconnects (address already scrambled).
  typedef struct packed {
    addr_t addr;
    logic  wen;
    strb_t be;
    data_t data;
    meta_t meta;
  } tcdm_req_t;

  // Read response on the tile and group interconnects.
  typedef struct packed {
    data_t data;
    meta_t meta;
  } tcdm_rsp_t;

  // AXI4 read address and read data channel payloads of the instruction
  // cache refill port (the cache is read-only, so it has no write channels).
  typedef struct packed {
    addr_t       addr;
    logic [7:0]  len;
    logic [2:0]  size;
    logic [1:0]  burst;
  } axi_ar_t;

  typedef struct packed {
    data_t       data;
    logic [1:0]  resp;
    logic        last;
  } axi_r_t;

endpackage
