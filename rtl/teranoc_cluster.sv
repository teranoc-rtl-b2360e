// TeraNoC cluster: NumGrps groups joined by a multi-channel 2D mesh, the top of the design.
//
// The cluster is a single shared-L1 machine: every core can load and store every word of every
// SPM bank. A core port takes one 32-bit request per cycle (valid/ready) and returns responses in
// any order, tagged with the transaction id the core gave. Access latency depends on distance:
// 1 cycle round trip to a bank of the own tile, 3 cycles to another tile of the own group, and
// 3 + 4*R cycles to another group whose requests pass R routers (R-1 mesh hops), e.g. 31 cycles
// between opposite corners of the 4x4 mesh.
//
// The groups sit on a MeshDimX x MeshDimY grid; group g is at x = g / MeshDimY, y = g mod
// MeshDimY. Each group has K*Q request routers and K*Q response routers, one per mesh plane;
// router p of a group is linked only to router p of its four neighbours, so the mesh is K*Q
// independent planes per direction (32 request and 32 response channels on every link with the
// default sizes). Ports on the edge of the grid are left open (no input, always ready).
//
// The cores themselves, their instruction caches, the DMA and the wide AXI network to main
// memory are not part of this RTL: the core ports are the top's ports.
//
// From the TeraNoC paper: 1024 cores, 4096 banks of 1 KiB, 16 groups in a 4x4 mesh, 1 cycle local,
// 3 cycles inside the group, and 31 cycles to the farthest group. Design choice: every router
// on the path adds 2 cycles each way, so a neighbouring group costs 11 cycles where the paper's
// text gives 7; the mesh edges are tied off.
module teranoc_cluster import teranoc_pkg::*; #(
  parameter int unsigned DimX        = MeshDimX,
  parameter int unsigned DimY        = MeshDimY,
  parameter int unsigned NumTiles    = NumTilesPerGroup,
  parameter int unsigned NumCores    = NumCoresPerTile,
  parameter int unsigned NumBanks    = NumBanksPerTile,
  parameter int unsigned NumRouter   = NumRouterPorts,
  parameter int unsigned NumRo       = NumRoPorts,
  parameter int unsigned RemapSize   = RemapGroupSize,
  parameter bit          RemapStride = 1'b0,
  parameter int unsigned NumWords    = BankWords,
  parameter int unsigned FifoDepth   = RouterFifoDepth,
  localparam int unsigned NumGrps     = DimX * DimY,
  localparam int unsigned NumAllCores = NumGrps * NumTiles * NumCores
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [NumAllCores-1:0] core_req_valid_i,
  output logic [NumAllCores-1:0] core_req_ready_o,
  input  tcdm_req_t              core_req_i       [NumAllCores],
  output logic [NumAllCores-1:0] core_rsp_valid_o,
  input  logic [NumAllCores-1:0] core_rsp_ready_i,
  output tcdm_rsp_t              core_rsp_o       [NumAllCores]
);

  localparam int unsigned NumGrpCores = NumTiles * NumCores;
  localparam int unsigned NumRw       = NumRouter - NumRo;
  localparam int unsigned NumRwPl     = NumRw * NumTiles;
  localparam int unsigned NumRoPl     = (NumRo > 0) ? NumRo * NumTiles : 1;
  localparam int unsigned NumPl       = NumRouter * NumTiles;

  logic [3:0]   rw_in_v  [NumGrps][NumRwPl], rw_in_r  [NumGrps][NumRwPl];
  logic [3:0]   rw_out_v [NumGrps][NumRwPl], rw_out_r [NumGrps][NumRwPl];
  req_flit_t    rw_in_d  [NumGrps][NumRwPl][4], rw_out_d [NumGrps][NumRwPl][4];
  logic [3:0]   ro_in_v  [NumGrps][NumRoPl], ro_in_r  [NumGrps][NumRoPl];
  logic [3:0]   ro_out_v [NumGrps][NumRoPl], ro_out_r [NumGrps][NumRoPl];
  ro_req_flit_t ro_in_d  [NumGrps][NumRoPl][4], ro_out_d [NumGrps][NumRoPl][4];
  logic [3:0]   rs_in_v  [NumGrps][NumPl], rs_in_r  [NumGrps][NumPl];
  logic [3:0]   rs_out_v [NumGrps][NumPl], rs_out_r [NumGrps][NumPl];
  rsp_flit_t    rs_in_d  [NumGrps][NumPl][4], rs_out_d [NumGrps][NumPl][4];

  for (genvar g = 0; g < NumGrps; g++) begin : gen_group
    tcdm_req_t c_req [NumGrpCores];
    tcdm_rsp_t c_rsp [NumGrpCores];
    for (genvar c = 0; c < NumGrpCores; c++) begin : gen_c
      assign c_req[c]                     = core_req_i[g*NumGrpCores + c];
      assign core_rsp_o[g*NumGrpCores + c] = c_rsp[c];
    end

    group #(
      .NumTiles (NumTiles), .NumCores (NumCores), .NumBanks (NumBanks), .NumGrps (NumGrps),
      .DimY (DimY), .NumRouter (NumRouter), .NumRo (NumRo), .RemapSize (RemapSize),
      .RemapStride (RemapStride), .NumWords (NumWords), .FifoDepth (FifoDepth)
    ) i_group (
      .clk_i, .rst_ni,
      .group_id_i       (GroupIdWidth'(g)),
      .core_req_valid_i (core_req_valid_i[g*NumGrpCores +: NumGrpCores]),
      .core_req_ready_o (core_req_ready_o[g*NumGrpCores +: NumGrpCores]),
      .core_req_i       (c_req),
      .core_rsp_valid_o (core_rsp_valid_o[g*NumGrpCores +: NumGrpCores]),
      .core_rsp_ready_i (core_rsp_ready_i[g*NumGrpCores +: NumGrpCores]),
      .core_rsp_o       (c_rsp),
      .rw_in_valid_i    (rw_in_v[g]),  .rw_in_ready_o  (rw_in_r[g]),  .rw_in_data_i  (rw_in_d[g]),
      .rw_out_valid_o   (rw_out_v[g]), .rw_out_ready_i (rw_out_r[g]), .rw_out_data_o (rw_out_d[g]),
      .ro_in_valid_i    (ro_in_v[g]),  .ro_in_ready_o  (ro_in_r[g]),  .ro_in_data_i  (ro_in_d[g]),
      .ro_out_valid_o   (ro_out_v[g]), .ro_out_ready_i (ro_out_r[g]), .ro_out_data_o (ro_out_d[g]),
      .rsp_in_valid_i   (rs_in_v[g]),  .rsp_in_ready_o (rs_in_r[g]),  .rsp_in_data_i (rs_in_d[g]),
      .rsp_out_valid_o  (rs_out_v[g]), .rsp_out_ready_i(rs_out_r[g]), .rsp_out_data_o(rs_out_d[g])
    );

    // Mesh links. Direction d of group g faces direction (d+2) mod 4 of its neighbour.
    localparam int unsigned X = g / DimY;
    localparam int unsigned Y = g % DimY;
    for (genvar d = 0; d < 4; d++) begin : gen_dir
      localparam bit HasNb = (d == 0) ? (Y + 1 < DimY) :
                             (d == 1) ? (X + 1 < DimX) :
                             (d == 2) ? (Y > 0) : (X > 0);
      localparam int unsigned Nb = (d == 0) ? g + 1 :
                                   (d == 1) ? g + DimY :
                                   (d == 2) ? g - 1 : g - DimY;
      localparam int unsigned Od = (d + 2) % 4;
      if (HasNb) begin : gen_link
        for (genvar p = 0; p < NumRwPl; p++) begin : gen_rw
          assign rw_in_v[g][p][d]  = rw_out_v[Nb][p][Od];
          assign rw_in_d[g][p][d]  = rw_out_d[Nb][p][Od];
          assign rw_out_r[g][p][d] = rw_in_r[Nb][p][Od];
        end
        for (genvar p = 0; p < NumRoPl; p++) begin : gen_ro
          assign ro_in_v[g][p][d]  = ro_out_v[Nb][p][Od];
          assign ro_in_d[g][p][d]  = ro_out_d[Nb][p][Od];
          assign ro_out_r[g][p][d] = ro_in_r[Nb][p][Od];
        end
        for (genvar p = 0; p < NumPl; p++) begin : gen_rs
          assign rs_in_v[g][p][d]  = rs_out_v[Nb][p][Od];
          assign rs_in_d[g][p][d]  = rs_out_d[Nb][p][Od];
          assign rs_out_r[g][p][d] = rs_in_r[Nb][p][Od];
        end
      end else begin : gen_edge
        for (genvar p = 0; p < NumRwPl; p++) begin : gen_rw
          assign rw_in_v[g][p][d]  = 1'b0;
          assign rw_in_d[g][p][d]  = '0;
          assign rw_out_r[g][p][d] = 1'b1;
        end
        for (genvar p = 0; p < NumRoPl; p++) begin : gen_ro
          assign ro_in_v[g][p][d]  = 1'b0;
          assign ro_in_d[g][p][d]  = '0;
          assign ro_out_r[g][p][d] = 1'b1;
        end
        for (genvar p = 0; p < NumPl; p++) begin : gen_rs
          assign rs_in_v[g][p][d]  = 1'b0;
          assign rs_in_d[g][p][d]  = '0;
          assign rs_out_r[g][p][d] = 1'b1;
        end
      end
    end
  end

endmodule
