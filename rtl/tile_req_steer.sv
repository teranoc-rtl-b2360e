// Request steering at the core boundary of a tile (Hier-L0).
//
// Decodes the target of every core request from its address and sends it one of two ways:
// to the tile's own core-to-bank crossbar when the bank is in this tile, or to one of the tile's
// 1+K outgoing remote ports otherwise. Port 0 leads to the other tiles of the same group (the
// tile-to-tile crossbar); ports 1..K lead to the K mesh routers for other groups, so these
// requests bypass the tile-to-tile crossbar. Of the K router ports the first K-NumRo are
// read-write channels and the last NumRo read-only channels: a store to another group takes a
// read-write port (core index modulo the number of read-write ports), a load takes port
// 1 + (core index modulo K), which spreads the loads of the M cores over all K router channels.
// Every port has a round-robin arbiter over the cores that want it. Combinational: a request
// leaves in the cycle it arrives; a core's ready is the ready of the path it takes, gated by
// its grant.
//
// Address decoding follows the word interleaving of the package (bank, tile, group, row). The
// split of loads and stores over read-write and read-only channels is this design's choice.
//
// From the TeraNoC paper: 1 + K remote ports per tile, one to the other tiles of the group and K
// to routers, one read-write and one read-only. Design choices: the address map and the rule that
// spreads loads over the router ports by core index.
module tile_req_steer import teranoc_pkg::*; #(
  parameter int unsigned NumCores  = NumCoresPerTile,
  parameter int unsigned NumBanks  = NumBanksPerTile,
  parameter int unsigned NumTiles  = NumTilesPerGroup,
  parameter int unsigned NumGrps   = NumGroups,
  parameter int unsigned NumRouter = NumRouterPorts,
  parameter int unsigned NumRo     = NumRoPorts,
  localparam int unsigned NumPorts = 1 + NumRouter
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [GroupIdWidth-1:0] group_id_i,
  input  logic [TileIdWidth-1:0]  tile_id_i,
  // Core requests
  input  logic [NumCores-1:0]     core_valid_i,
  output logic [NumCores-1:0]     core_ready_o,
  input  tcdm_req_t               core_req_i   [NumCores],
  // To the local core-to-bank crossbar (payload unchanged)
  output logic [NumCores-1:0]     local_valid_o,
  input  logic [NumCores-1:0]     local_ready_i,
  // To the remote ports
  output logic [NumPorts-1:0]     port_valid_o,
  input  logic [NumPorts-1:0]     port_ready_i,
  output tcdm_req_t               port_req_o   [NumPorts]
);

  localparam int unsigned TileOff  = 2 + $clog2(NumBanks);
  localparam int unsigned GroupOff = TileOff + $clog2(NumTiles);
  localparam int unsigned NumRw    = NumRouter - NumRo;
  localparam int unsigned PortW    = $clog2(NumPorts);
  localparam int unsigned CoreW    = (NumCores > 1) ? $clog2(NumCores) : 1;

  logic [PortW-1:0]    port_sel [NumCores];
  logic [NumCores-1:0] is_local;
  logic [NumCores-1:0] port_req [NumPorts];
  logic [NumCores-1:0] port_gnt [NumPorts];
  logic [CoreW-1:0]    port_idx [NumPorts];

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    int unsigned tgt_tile, tgt_group;
    logic        same_group;
    assign tgt_tile   = (core_req_i[c].addr >> TileOff) % NumTiles;
    assign tgt_group  = (core_req_i[c].addr >> GroupOff) % NumGrps;
    assign same_group = (tgt_group == int'(group_id_i));
    assign is_local[c] = same_group && (tgt_tile == int'(tile_id_i));

    always_comb begin
      if (same_group)             port_sel[c] = '0;
      else if (core_req_i[c].wen) port_sel[c] = PortW'(1 + (c % NumRw));
      else                        port_sel[c] = PortW'(1 + (c % NumRouter));
    end

    assign local_valid_o[c] = core_valid_i[c] && is_local[c];
    assign core_ready_o[c]  = is_local[c] ? local_ready_i[c]
                                          : (port_ready_i[port_sel[c]] && port_gnt[port_sel[c]][c]);
  end

  for (genvar p = 0; p < NumPorts; p++) begin : gen_port
    for (genvar c = 0; c < NumCores; c++) begin : gen_req
      assign port_req[p][c] = core_valid_i[c] && !is_local[c] && (port_sel[c] == PortW'(p));
    end

    rr_arbiter #(.NumReq(NumCores)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (port_req[p]),
      .advance_i (port_ready_i[p]),
      .gnt_o     (port_gnt[p]),
      .idx_o     (port_idx[p]),
      .valid_o   (port_valid_o[p])
    );

    assign port_req_o[p] = core_req_i[port_idx[p]];
  end

  // Read-only channels never carry a store.
  for (genvar p = 1 + NumRw; p < NumPorts; p++) begin : gen_ro_check
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     port_valid_o[p] |-> !port_req_o[p].wen)
      else $error("tile_req_steer: store on read-only port %0d", p);
  end

endmodule
