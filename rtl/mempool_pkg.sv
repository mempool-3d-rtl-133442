// MemPool shared types and constants.
//
// The cluster has 4 groups of 16 tiles; each tile has 4 cores and 16 banks of
// shared-L1 scratchpad memory (SPM), giving 256 cores and 1024 banks. These
// counts follow the paper. The SPM capacity default is 4 MiB (the 3D
// configuration the paper highlights), i.e. 1024 32-bit words per bank.
//
// Address map (this design's choice, the paper does not give one): the SPM is
// word-interleaved over all 1024 banks.
//   addr[1:0]   byte in word
//   addr[5:2]   bank in tile
//   addr[9:6]   tile in group
//   addr[11:10] group
//   addr[12+:]  row in bank (upper bits beyond the capacity alias)
//
// Groups are numbered as in the cluster figure: group 1 is east of group 0,
// group 2 north of it, group 3 north-east. The group reached from group g in
// direction d is g XOR d, which is why the direction codes below are 1, 2, 3.
package mempool_pkg;

  localparam int unsigned NumGroups        = 4;
  localparam int unsigned NumTilesPerGroup = 16;
  localparam int unsigned NumTiles         = NumGroups * NumTilesPerGroup;
  localparam int unsigned NumCoresPerTile  = 4;
  localparam int unsigned NumCores         = NumTiles * NumCoresPerTile;
  localparam int unsigned NumBanksPerTile  = 16;
  localparam int unsigned NumBanks         = NumTiles * NumBanksPerTile;
  // One port per group-level network: local, east, north, northeast.
  localparam int unsigned NumRemotePorts   = 4;

  localparam int unsigned DataWidth = 32;
  localparam int unsigned AddrWidth = 32;
  localparam int unsigned BeWidth   = DataWidth / 8;
  localparam int unsigned MetaIdWidth = 4;

  localparam int unsigned SpmCapacityBytes = 4 * 1024 * 1024;
  localparam int unsigned SpmBankWords     = SpmCapacityBytes / (NumBanks * BeWidth);

  localparam int unsigned ByteOffW   = 2;
  localparam int unsigned BankSelW   = 4;
  localparam int unsigned TileSelW   = 6;
  localparam int unsigned TileOffset = ByteOffW + BankSelW;   // 6
  localparam int unsigned RowOffset  = TileOffset + TileSelW; // 12

  // Instruction cache: 2 KiB per tile (paper); 16-byte lines, direct mapped
  // (this design's choice).
  localparam int unsigned ICacheBytes     = 2048;
  localparam int unsigned ICacheLineBytes = 16;
  localparam int unsigned ICacheLines     = ICacheBytes / ICacheLineBytes;
  localparam int unsigned ICacheIdxW      = $clog2(ICacheLines);
  localparam int unsigned ICacheOffW      = $clog2(ICacheLineBytes);
  localparam int unsigned ICacheTagW      = AddrWidth - ICacheIdxW - ICacheOffW;
  localparam int unsigned ICacheLineW     = ICacheLineBytes * 8;

  typedef logic [TileSelW-1:0]    tile_id_t;   // tile in cluster
  typedef logic [3:0]             tile_idx_t;  // tile in group
  typedef logic [1:0]             group_id_t;
  typedef logic [1:0]             core_idx_t;  // core in tile
  typedef logic [BankSelW-1:0]    bank_idx_t;  // bank in tile
  typedef logic [MetaIdWidth-1:0] meta_id_t;
  typedef logic [ICacheLineW-1:0] icache_line_t;

  typedef enum logic [1:0] {
    DirLocal     = 2'd0,
    DirEast      = 2'd1,
    DirNorth     = 2'd2,
    DirNortheast = 2'd3
  } dir_e;

  // Core-side memory request and response.
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    logic                 wen;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
    meta_id_t             id;
  } tcdm_req_t;

  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    logic                 wen;   // echoed: set for a store acknowledgement
    meta_id_t             id;
  } tcdm_rsp_t;

  // Request and response as carried by the tile and group interconnects.
  typedef struct packed {
    tcdm_req_t req;
    tile_id_t  src_tile;
    core_idx_t src_core;
  } net_req_t;

  typedef struct packed {
    tcdm_rsp_t rsp;
    tile_id_t  src_tile;
    core_idx_t src_core;
  } net_rsp_t;

  function automatic tile_id_t addr_tile(logic [AddrWidth-1:0] addr);
    return addr[TileOffset +: TileSelW];
  endfunction

  function automatic bank_idx_t addr_bank(logic [AddrWidth-1:0] addr);
    return addr[ByteOffW +: BankSelW];
  endfunction

endpackage
