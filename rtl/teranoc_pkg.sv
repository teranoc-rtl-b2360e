// Shared types and constants of the TeraNoC cluster interconnect.
//
// The interconnect carries single-word (32-bit) core-to-L1 transactions. A request holds a byte
// address, a write flag with byte enables and write data, and the identity of the initiator
// (group, tile, core and a transaction id of the core's load/store unit). A response returns the
// read data (or the acknowledgment of a store) to that initiator. Read-only request channels use a
// narrower request type without the write fields. Mesh flits wrap a request or response with a
// header holding the destination group's mesh coordinates.
//
// The default sizes are those of the 1024-core cluster: 16 groups in a 4x4 mesh, 16 tiles per
// group, 4 cores and 16 banks of 1 KiB per tile, K = 2 router ports per tile (one read-write, one
// read-only), one router remapper per 4 tiles, 8 outstanding transactions per core. The widths of
// the identity fields are fixed by these full sizes, so smaller configurations of the modules fit.
//
// Address map (a choice of this design): words are interleaved over all banks of the cluster,
// bank bits first, then tile, then group, then the row inside the bank. With the default sizes:
// addr[1:0] byte, [5:2] bank in tile, [9:6] tile in group, [13:10] group, [21:14] row.
//
// From the TeraNoC paper: 32-bit words, 16 groups in a 4x4 mesh, 16 tiles of 4 cores and 16 1 KiB
// banks, K = 2 router ports per tile (one read-only), 2-entry router FIFOs, one remapper per
// q = 4 tiles, 8 outstanding transactions per core. Design choices: the address map and the flit
// and initiator-id formats.
package teranoc_pkg;

  localparam int unsigned DataWidth        = 32;
  localparam int unsigned AddrWidth        = 32;
  localparam int unsigned StrbWidth        = DataWidth / 8;

  // Cluster dimensions of the main configuration.
  localparam int unsigned NumGroups        = 16;  // Hier-L1 blocks
  localparam int unsigned MeshDimX         = 4;
  localparam int unsigned MeshDimY         = 4;
  localparam int unsigned NumTilesPerGroup = 16;  // Q
  localparam int unsigned NumCoresPerTile  = 4;   // M
  localparam int unsigned NumBanksPerTile  = 16;  // N
  localparam int unsigned NumRouterPorts   = 2;   // K
  localparam int unsigned NumRoPorts       = 1;   // of the K, read-only ones
  localparam int unsigned RemapGroupSize   = 4;   // q
  localparam int unsigned BankWords        = 256; // 1 KiB of 32-bit words
  localparam int unsigned MaxOutstanding   = 8;   // LSU transaction table entries
  localparam int unsigned RouterFifoDepth  = 2;

  localparam int unsigned GroupIdWidth     = 4;
  localparam int unsigned TileIdWidth      = 4;
  localparam int unsigned CoreIdWidth      = 2;
  localparam int unsigned TransIdWidth     = $clog2(MaxOutstanding);
  localparam int unsigned CoordWidth       = 2;

  // Router port numbering.
  typedef enum logic [2:0] {
    DirNorth = 3'd0,
    DirEast  = 3'd1,
    DirSouth = 3'd2,
    DirWest  = 3'd3,
    DirLocal = 3'd4
  } dir_e;
  localparam int unsigned NumRouterDirs = 5;

  typedef struct packed {
    logic [CoordWidth-1:0] x;
    logic [CoordWidth-1:0] y;
  } coord_t;

  // Identity of the initiator of a transaction; a response is routed back with it.
  typedef struct packed {
    logic [GroupIdWidth-1:0] group;
    logic [TileIdWidth-1:0]  tile;
    logic [CoreIdWidth-1:0]  core;
    logic [TransIdWidth-1:0] id;
  } ini_t;

  // Request of a read-write channel.
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    logic                 wen;
    logic [StrbWidth-1:0] be;
    logic [DataWidth-1:0] wdata;
    ini_t                 ini;
  } tcdm_req_t;

  // Request of a read-only channel: no write fields.
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    ini_t                 ini;
  } tcdm_ro_req_t;

  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    logic                 wen;   // 1: acknowledgment of a store
    ini_t                 ini;
  } tcdm_rsp_t;

  // Mesh flits: header (destination coordinates) and payload.
  typedef struct packed {
    coord_t    dst;
    tcdm_req_t payload;
  } req_flit_t;

  typedef struct packed {
    coord_t       dst;
    tcdm_ro_req_t payload;
  } ro_req_flit_t;

  typedef struct packed {
    coord_t    dst;
    tcdm_rsp_t payload;
  } rsp_flit_t;

  function automatic tcdm_ro_req_t to_ro(logic [AddrWidth-1:0] addr, ini_t ini);
    to_ro.addr = addr;
    to_ro.ini  = ini;
  endfunction

  function automatic tcdm_req_t from_ro(tcdm_ro_req_t r);
    from_ro       = '0;
    from_ro.addr  = r.addr;
    from_ro.ini   = r.ini;
  endfunction

  // Mesh coordinates of a group: groups are numbered column by column, y fastest.
  function automatic coord_t group_coord(int unsigned group, int unsigned dim_y);
    group_coord.x = CoordWidth'(group / dim_y);
    group_coord.y = CoordWidth'(group % dim_y);
  endfunction

endpackage
