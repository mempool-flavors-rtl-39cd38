// mempool_pkg: sizes, address map and request/response types shared by the
// L1 memory system of the MemPool cluster.
//
// The cluster is a three-level hierarchy: 4 cores and 16 scratchpad banks form
// a tile, 16 tiles form a group, 4 groups form the cluster (256 cores, 1024
// banks, 1 MiB). These counts are the paper's. The bank depth (256 words of
// 32 bits) follows from them. The address map, the tag width and the struct
// layouts are this design's own choices:
//
//   byte address [1:0]    byte in word
//                [5:2]    bank within the tile
//                [9:6]    tile within the group
//                [11:10]  group
//                [19:12]  row within the bank
//
// Consecutive words therefore fall in consecutive banks across the whole
// cluster (word interleaving). Address bits above bit 19 are ignored.
//
// Every request carries the global id of the core that issued it
// (group, tile, core) and a free tag that comes back unchanged in the
// response; the interconnect routes responses by the id, the core matches
// them by the tag.
package mempool_pkg;

  localparam int unsigned NumGroups        = 4;
  localparam int unsigned NumTilesPerGroup = 16;
  localparam int unsigned NumCoresPerTile  = 4;
  localparam int unsigned NumBanksPerTile  = 16;
  localparam int unsigned BankWords        = 256;
  localparam int unsigned DataWidth        = 32;
  localparam int unsigned AddrWidth        = 32;
  localparam int unsigned BeWidth          = DataWidth / 8;
  localparam int unsigned TagWidth         = 4;

  localparam int unsigned NumCores   = NumGroups * NumTilesPerGroup * NumCoresPerTile;
  localparam int unsigned NumTiles   = NumGroups * NumTilesPerGroup;
  localparam int unsigned CoreIdWidth = $clog2(NumCores);
  localparam int unsigned RowWidth    = $clog2(BankWords);

  // Ports of a tile towards other tiles: one for the own group, three for
  // the other groups. The encoding equals (destination group XOR own group).
  localparam int unsigned NumRemotePorts = 4;
  typedef enum logic [1:0] {
    DirLocal     = 2'd0,
    DirNorth     = 2'd1,
    DirEast      = 2'd2,
    DirNortheast = 2'd3
  } dir_e;

  // Tile interconnect inputs: cores, then the four remote ports, then DMA.
  localparam int unsigned TilePorts     = NumCoresPerTile + NumRemotePorts + 1;
  localparam int unsigned TilePortWidth = $clog2(TilePorts);

  typedef logic [CoreIdWidth-1:0] core_id_t;
  typedef logic [TagWidth-1:0]    tag_t;

  // Request of a core (or DMA) into the memory system.
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    logic                 we;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
    core_id_t             src;
    tag_t                 tag;
  } tcdm_req_t;

  // Response: read data (zero for a write) and the request's id and tag.
  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    core_id_t             src;
    tag_t                 tag;
  } tcdm_resp_t;

  // What a bank keeps of a request to build its response.
  typedef struct packed {
    core_id_t                 src;
    tag_t                     tag;
    logic [TilePortWidth-1:0] port;
  } bank_meta_t;

  typedef struct packed {
    logic [RowWidth-1:0]  row;
    logic                 we;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
    bank_meta_t           meta;
  } bank_req_t;

  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    bank_meta_t           meta;
  } bank_resp_t;

endpackage
