// Group (Hier-L1): Q tiles joined by crossbars inside the group and by multi-channel mesh
// routers to the other groups.
//
// Inside the group, port 0 of every tile goes to a QxQ tile-to-tile request crossbar (selected
// by the tile bits of the address) and a QxQ response crossbar (selected by the initiator tile).
// Ports 1..K of every tile go to the mesh, one mesh plane per (tile, port) pair, K*Q planes in
// all, each with its own request router and its own response router in every group. Between the
// tiles and the routers sit router remappers: for port k, the tiles are taken q at a time and a
// remapper maps their q port-k channels onto q routers of plane index k*Q + j*q + i (remapper j,
// output i), a separate remapper for requests and for responses. With RemapStride set, remapper j
// takes the tiles j, j+Q/q, j+2Q/q, ... (spatially distant tiles) instead of q neighbouring tiles.
// Before the remapper, a header with the destination group's mesh coordinates is added to each
// request (from the group bits of the address) and each response (from the initiator's group).
// On the receiving side, the local output of every plane-k router feeds one of K QxQ router-to-
// tile crossbars per direction, which deliver to port k+1 of the target tile.
// Planes of the last NumRo ports carry read-only requests (narrow flits without write fields);
// all response planes are full width.
//
// Mesh ports are per plane and per direction (0 north, 1 east, 2 south, 3 west); the group's
// mesh coordinates follow from group_id_i (column by column, y fastest).
//
// From the TeraNoC paper: 16x16 tile-to-tile crossbars, K routers per tile, remappers between
// tiles and routers (one per q = 4 tiles), K router-to-tile crossbars per direction, read-only
// and read-write planes. Design choices: the plane numbering and the placement of the groups in
// the mesh. The crossbars' winner indices (rq_src, rs_src, xq_src, xs_src) are not needed because
// every flit carries its own destination and return information; they are left unused on
// purpose.
module group import teranoc_pkg::*; #(
  parameter int unsigned NumTiles    = NumTilesPerGroup,
  parameter int unsigned NumCores    = NumCoresPerTile,
  parameter int unsigned NumBanks    = NumBanksPerTile,
  parameter int unsigned NumGrps     = NumGroups,
  parameter int unsigned DimY        = MeshDimY,
  parameter int unsigned NumRouter   = NumRouterPorts,
  parameter int unsigned NumRo       = NumRoPorts,
  parameter int unsigned RemapSize   = RemapGroupSize,
  parameter bit          RemapStride = 1'b0,
  parameter int unsigned NumWords    = BankWords,
  parameter int unsigned FifoDepth   = RouterFifoDepth,
  localparam int unsigned NumGrpCores = NumTiles * NumCores,
  localparam int unsigned NumRw       = NumRouter - NumRo,
  localparam int unsigned NumRwPl     = NumRw * NumTiles,
  localparam int unsigned NumRoPl     = (NumRo > 0) ? NumRo * NumTiles : 1,
  localparam int unsigned NumPl       = NumRouter * NumTiles
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [GroupIdWidth-1:0] group_id_i,
  // Core ports
  input  logic [NumGrpCores-1:0]  core_req_valid_i,
  output logic [NumGrpCores-1:0]  core_req_ready_o,
  input  tcdm_req_t               core_req_i        [NumGrpCores],
  output logic [NumGrpCores-1:0]  core_rsp_valid_o,
  input  logic [NumGrpCores-1:0]  core_rsp_ready_i,
  output tcdm_rsp_t               core_rsp_o        [NumGrpCores],
  // Read-write request mesh planes
  input  logic [3:0]              rw_in_valid_i     [NumRwPl],
  output logic [3:0]              rw_in_ready_o     [NumRwPl],
  input  req_flit_t               rw_in_data_i      [NumRwPl][4],
  output logic [3:0]              rw_out_valid_o    [NumRwPl],
  input  logic [3:0]              rw_out_ready_i    [NumRwPl],
  output req_flit_t               rw_out_data_o     [NumRwPl][4],
  // Read-only request mesh planes
  input  logic [3:0]              ro_in_valid_i     [NumRoPl],
  output logic [3:0]              ro_in_ready_o     [NumRoPl],
  input  ro_req_flit_t            ro_in_data_i      [NumRoPl][4],
  output logic [3:0]              ro_out_valid_o    [NumRoPl],
  input  logic [3:0]              ro_out_ready_i    [NumRoPl],
  output ro_req_flit_t            ro_out_data_o     [NumRoPl][4],
  // Response mesh planes
  input  logic [3:0]              rsp_in_valid_i    [NumPl],
  output logic [3:0]              rsp_in_ready_o    [NumPl],
  input  rsp_flit_t               rsp_in_data_i     [NumPl][4],
  output logic [3:0]              rsp_out_valid_o   [NumPl],
  input  logic [3:0]              rsp_out_ready_i   [NumPl],
  output rsp_flit_t               rsp_out_data_o    [NumPl][4]
);

  localparam int unsigned NumPorts  = 1 + NumRouter;
  localparam int unsigned TileOff   = 2 + $clog2(NumBanks);
  localparam int unsigned GroupOff  = TileOff + $clog2(NumTiles);
  localparam int unsigned TileSelW  = (NumTiles > 1) ? $clog2(NumTiles) : 1;
  localparam int unsigned NumRemap  = NumTiles / RemapSize;

  coord_t my_xy;
  assign my_xy = group_coord(int'(group_id_i), DimY);

  // ---------------------------------------------------------------------------------------------
  // Tiles
  // ---------------------------------------------------------------------------------------------
  logic [NumPorts-1:0] t_req_o_valid [NumTiles], t_req_o_ready [NumTiles];
  tcdm_req_t           t_req_o       [NumTiles][NumPorts];
  logic [NumPorts-1:0] t_req_i_valid [NumTiles], t_req_i_ready [NumTiles];
  tcdm_req_t           t_req_i       [NumTiles][NumPorts];
  logic [NumPorts-1:0] t_rsp_o_valid [NumTiles], t_rsp_o_ready [NumTiles];
  tcdm_rsp_t           t_rsp_o       [NumTiles][NumPorts];
  logic [NumPorts-1:0] t_rsp_i_valid [NumTiles], t_rsp_i_ready [NumTiles];
  tcdm_rsp_t           t_rsp_i       [NumTiles][NumPorts];

  for (genvar t = 0; t < NumTiles; t++) begin : gen_tile
    tcdm_req_t c_req [NumCores];
    tcdm_rsp_t c_rsp [NumCores];
    for (genvar c = 0; c < NumCores; c++) begin : gen_c
      assign c_req[c]                      = core_req_i[t*NumCores + c];
      assign core_rsp_o[t*NumCores + c]    = c_rsp[c];
    end

    tile #(
      .NumCores (NumCores), .NumBanks (NumBanks), .NumTiles (NumTiles), .NumGrps (NumGrps),
      .NumRouter(NumRouter), .NumRo (NumRo), .NumWords (NumWords)
    ) i_tile (
      .clk_i, .rst_ni,
      .group_id_i,
      .tile_id_i        (TileIdWidth'(t)),
      .core_req_valid_i (core_req_valid_i[t*NumCores +: NumCores]),
      .core_req_ready_o (core_req_ready_o[t*NumCores +: NumCores]),
      .core_req_i       (c_req),
      .core_rsp_valid_o (core_rsp_valid_o[t*NumCores +: NumCores]),
      .core_rsp_ready_i (core_rsp_ready_i[t*NumCores +: NumCores]),
      .core_rsp_o       (c_rsp),
      .req_o_valid_o    (t_req_o_valid[t]),
      .req_o_ready_i    (t_req_o_ready[t]),
      .req_o_o          (t_req_o[t]),
      .req_i_valid_i    (t_req_i_valid[t]),
      .req_i_ready_o    (t_req_i_ready[t]),
      .req_i_i          (t_req_i[t]),
      .rsp_o_valid_o    (t_rsp_o_valid[t]),
      .rsp_o_ready_i    (t_rsp_o_ready[t]),
      .rsp_o_o          (t_rsp_o[t]),
      .rsp_i_valid_i    (t_rsp_i_valid[t]),
      .rsp_i_ready_o    (t_rsp_i_ready[t]),
      .rsp_i_i          (t_rsp_i[t])
    );
  end

  // ---------------------------------------------------------------------------------------------
  // Tile-to-tile crossbars (port 0)
  // ---------------------------------------------------------------------------------------------
  begin : gen_h0_to_h0
    logic [NumTiles-1:0] rq_in_valid, rq_in_ready, rq_out_valid, rq_out_ready;
    logic [NumTiles-1:0] rs_in_valid, rs_in_ready, rs_out_valid, rs_out_ready;
    tcdm_req_t           rq_in  [NumTiles], rq_out [NumTiles];
    tcdm_rsp_t           rs_in  [NumTiles], rs_out [NumTiles];
    logic [TileSelW-1:0] rq_sel [NumTiles], rs_sel [NumTiles];
    logic [TileSelW-1:0] rq_src [NumTiles], rs_src [NumTiles];

    for (genvar t = 0; t < NumTiles; t++) begin : gen_t
      assign rq_in_valid[t]      = t_req_o_valid[t][0];
      assign t_req_o_ready[t][0] = rq_in_ready[t];
      assign rq_in[t]            = t_req_o[t][0];
      assign rq_sel[t]           = TileSelW'((t_req_o[t][0].addr >> TileOff) % NumTiles);
      assign t_req_i_valid[t][0] = rq_out_valid[t];
      assign rq_out_ready[t]     = t_req_i_ready[t][0];
      assign t_req_i[t][0]       = rq_out[t];

      assign rs_in_valid[t]      = t_rsp_o_valid[t][0];
      assign t_rsp_o_ready[t][0] = rs_in_ready[t];
      assign rs_in[t]            = t_rsp_o[t][0];
      assign rs_sel[t]           = TileSelW'(t_rsp_o[t][0].ini.tile);
      assign t_rsp_i_valid[t][0] = rs_out_valid[t];
      assign rs_out_ready[t]     = t_rsp_i_ready[t][0];
      assign t_rsp_i[t][0]       = rs_out[t];
    end

    log_xbar #(.NumIn(NumTiles), .NumOut(NumTiles), .T(tcdm_req_t)) i_req_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (rq_in_valid), .in_ready_o (rq_in_ready), .in_data_i (rq_in), .in_sel_i (rq_sel),
      .out_valid_o (rq_out_valid), .out_ready_i (rq_out_ready), .out_data_o (rq_out),
      .out_src_o (rq_src)
    );

    log_xbar #(.NumIn(NumTiles), .NumOut(NumTiles), .T(tcdm_rsp_t)) i_rsp_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (rs_in_valid), .in_ready_o (rs_in_ready), .in_data_i (rs_in), .in_sel_i (rs_sel),
      .out_valid_o (rs_out_valid), .out_ready_i (rs_out_ready), .out_data_o (rs_out),
      .out_src_o (rs_src)
    );
  end

  // ---------------------------------------------------------------------------------------------
  // Mesh side: per router port k, remappers, routers and router-to-tile crossbars
  // ---------------------------------------------------------------------------------------------
  for (genvar k = 0; k < NumRouter; k++) begin : gen_port
    localparam bit IsRo = (k >= NumRw);

    // Local ports of this port's Q request and Q response routers, indexed j*q + i.
    logic [NumTiles-1:0] lq_in_valid, lq_in_ready, lq_out_valid, lq_out_ready;
    logic [NumTiles-1:0] ls_in_valid, ls_in_ready, ls_out_valid, ls_out_ready;
    req_flit_t           lq_in  [NumTiles], lq_out [NumTiles];
    rsp_flit_t           ls_in  [NumTiles], ls_out [NumTiles];

    // Remappers
    for (genvar j = 0; j < NumRemap; j++) begin : gen_remap
      logic [RemapSize-1:0] rq_v, rq_r, rs_v, rs_r, oq_v, oq_r, os_v, os_r;
      req_flit_t            rq_d [RemapSize], oq_d [RemapSize];
      rsp_flit_t            rs_d [RemapSize], os_d [RemapSize];

      for (genvar i = 0; i < RemapSize; i++) begin : gen_in
        localparam int unsigned T = RemapStride ? (i * NumRemap + j) : (j * RemapSize + i);
        assign rq_v[i]                 = t_req_o_valid[T][1+k];
        assign t_req_o_ready[T][1+k]   = rq_r[i];
        assign rq_d[i].dst             = group_coord((t_req_o[T][1+k].addr >> GroupOff) % NumGrps, DimY);
        assign rq_d[i].payload         = t_req_o[T][1+k];
        assign rs_v[i]                 = t_rsp_o_valid[T][1+k];
        assign t_rsp_o_ready[T][1+k]   = rs_r[i];
        assign rs_d[i].dst             = group_coord(int'(t_rsp_o[T][1+k].ini.group), DimY);
        assign rs_d[i].payload         = t_rsp_o[T][1+k];

        assign lq_in_valid[j*RemapSize + i] = oq_v[i];
        assign oq_r[i]                      = lq_in_ready[j*RemapSize + i];
        assign lq_in[j*RemapSize + i]       = oq_d[i];
        assign ls_in_valid[j*RemapSize + i] = os_v[i];
        assign os_r[i]                      = ls_in_ready[j*RemapSize + i];
        assign ls_in[j*RemapSize + i]       = os_d[i];
      end

      router_remapper #(
        .NumPorts (RemapSize), .T (req_flit_t), .Seed (8'(8'hA5 + 8'd37 * 8'(k * NumRemap + j)))
      ) i_req_remap (
        .clk_i, .rst_ni,
        .in_valid_i (rq_v), .in_ready_o (rq_r), .in_data_i (rq_d),
        .out_valid_o (oq_v), .out_ready_i (oq_r), .out_data_o (oq_d)
      );

      router_remapper #(
        .NumPorts (RemapSize), .T (rsp_flit_t), .Seed (8'(8'h5A + 8'd29 * 8'(k * NumRemap + j)))
      ) i_rsp_remap (
        .clk_i, .rst_ni,
        .in_valid_i (rs_v), .in_ready_o (rs_r), .in_data_i (rs_d),
        .out_valid_o (os_v), .out_ready_i (os_r), .out_data_o (os_d)
      );
    end

    // Routers of this port's planes
    for (genvar r = 0; r < NumTiles; r++) begin : gen_router
      localparam int unsigned Pl = k * NumTiles + r;

      // Request router
      if (IsRo) begin : gen_ro
        localparam int unsigned RoPl = Pl - NumRwPl;
        logic [4:0]   iv, ir, ov, orr;
        ro_req_flit_t id [5], od [5];
        for (genvar d = 0; d < 4; d++) begin : gen_d
          assign iv[d]                = ro_in_valid_i[RoPl][d];
          assign ro_in_ready_o[RoPl][d] = ir[d];
          assign id[d]                = ro_in_data_i[RoPl][d];
          assign ro_out_valid_o[RoPl][d] = ov[d];
          assign orr[d]               = ro_out_ready_i[RoPl][d];
          assign ro_out_data_o[RoPl][d] = od[d];
        end
        assign iv[4]          = lq_in_valid[r];
        assign lq_in_ready[r] = ir[4];
        assign id[4]          = '{dst: lq_in[r].dst, payload: to_ro(lq_in[r].payload.addr, lq_in[r].payload.ini)};
        assign lq_out_valid[r] = ov[4];
        assign orr[4]          = lq_out_ready[r];
        assign lq_out[r]       = '{dst: od[4].dst, payload: from_ro(od[4].payload)};

        router #(.flit_t(ro_req_flit_t), .FifoDepth(FifoDepth)) i_req_router (
          .clk_i, .rst_ni, .xy_i (my_xy),
          .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
          .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od)
        );
      end else begin : gen_rw
        logic [4:0] iv, ir, ov, orr;
        req_flit_t  id [5], od [5];
        for (genvar d = 0; d < 4; d++) begin : gen_d
          assign iv[d]                 = rw_in_valid_i[Pl][d];
          assign rw_in_ready_o[Pl][d]  = ir[d];
          assign id[d]                 = rw_in_data_i[Pl][d];
          assign rw_out_valid_o[Pl][d] = ov[d];
          assign orr[d]                = rw_out_ready_i[Pl][d];
          assign rw_out_data_o[Pl][d]  = od[d];
        end
        assign iv[4]           = lq_in_valid[r];
        assign lq_in_ready[r]  = ir[4];
        assign id[4]           = lq_in[r];
        assign lq_out_valid[r] = ov[4];
        assign orr[4]          = lq_out_ready[r];
        assign lq_out[r]       = od[4];

        router #(.flit_t(req_flit_t), .FifoDepth(FifoDepth)) i_req_router (
          .clk_i, .rst_ni, .xy_i (my_xy),
          .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
          .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od)
        );
      end

      // Response router
      begin : gen_rsp
        logic [4:0] iv, ir, ov, orr;
        rsp_flit_t  id [5], od [5];
        for (genvar d = 0; d < 4; d++) begin : gen_d
          assign iv[d]                  = rsp_in_valid_i[Pl][d];
          assign rsp_in_ready_o[Pl][d]  = ir[d];
          assign id[d]                  = rsp_in_data_i[Pl][d];
          assign rsp_out_valid_o[Pl][d] = ov[d];
          assign orr[d]                 = rsp_out_ready_i[Pl][d];
          assign rsp_out_data_o[Pl][d]  = od[d];
        end
        assign iv[4]           = ls_in_valid[r];
        assign ls_in_ready[r]  = ir[4];
        assign id[4]           = ls_in[r];
        assign ls_out_valid[r] = ov[4];
        assign orr[4]          = ls_out_ready[r];
        assign ls_out[r]       = od[4];

        router #(.flit_t(rsp_flit_t), .FifoDepth(FifoDepth)) i_rsp_router (
          .clk_i, .rst_ni, .xy_i (my_xy),
          .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
          .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od)
        );
      end
    end

    // Router-to-tile crossbars
    logic [NumTiles-1:0] xq_out_valid, xq_out_ready, xs_out_valid, xs_out_ready;
    tcdm_req_t           xq_in [NumTiles], xq_out [NumTiles];
    tcdm_rsp_t           xs_in [NumTiles], xs_out [NumTiles];
    logic [TileSelW-1:0] xq_sel [NumTiles], xs_sel [NumTiles];
    logic [TileSelW-1:0] xq_src [NumTiles], xs_src [NumTiles];

    for (genvar r = 0; r < NumTiles; r++) begin : gen_x
      assign xq_in[r]  = lq_out[r].payload;
      assign xq_sel[r] = TileSelW'((lq_out[r].payload.addr >> TileOff) % NumTiles);
      assign xs_in[r]  = ls_out[r].payload;
      assign xs_sel[r] = TileSelW'(ls_out[r].payload.ini.tile);

      assign t_req_i_valid[r][1+k] = xq_out_valid[r];
      assign xq_out_ready[r]       = t_req_i_ready[r][1+k];
      assign t_req_i[r][1+k]       = xq_out[r];
      assign t_rsp_i_valid[r][1+k] = xs_out_valid[r];
      assign xs_out_ready[r]       = t_rsp_i_ready[r][1+k];
      assign t_rsp_i[r][1+k]       = xs_out[r];
    end

    log_xbar #(.NumIn(NumTiles), .NumOut(NumTiles), .T(tcdm_req_t)) i_r2h_req_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (lq_out_valid), .in_ready_o (lq_out_ready), .in_data_i (xq_in), .in_sel_i (xq_sel),
      .out_valid_o (xq_out_valid), .out_ready_i (xq_out_ready), .out_data_o (xq_out),
      .out_src_o (xq_src)
    );

    log_xbar #(.NumIn(NumTiles), .NumOut(NumTiles), .T(tcdm_rsp_t)) i_r2h_rsp_xbar (
      .clk_i, .rst_ni,
      .in_valid_i (ls_out_valid), .in_ready_o (ls_out_ready), .in_data_i (xs_in), .in_sel_i (xs_sel),
      .out_valid_o (xs_out_valid), .out_ready_i (xs_out_ready), .out_data_o (xs_out),
      .out_src_o (xs_src)
    );
  end

  // Without read-only ports the read-only plane arrays have one unused entry.
  if (NumRo == 0) begin : gen_no_ro
    assign ro_in_ready_o[0]  = '1;
    assign ro_out_valid_o[0] = '0;
    for (genvar d = 0; d < 4; d++) begin : gen_d
      assign ro_out_data_o[0][d] = '0;
    end
  end

  initial begin
    assert (NumTiles % RemapSize == 0) else $fatal(1, "group: Q must be a multiple of q");
    assert (NumRo < NumRouter) else $fatal(1, "group: at least one read-write port is needed");
  end

endmodule
