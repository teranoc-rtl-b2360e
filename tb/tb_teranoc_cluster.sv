// End-to-end test of the cluster at reduced size: 2x2 groups, 4 tiles of 2 cores and 4 banks of
// 16 words, K = 2 router ports (one read-only), remappers over 2 tiles.
//
// The core traffic model first measures the round-trip latency to the own tile, another tile of
// the group and each other group (1, 3 and 3 + 4*R cycles), then every core stores its share of
// the words and finally loads random words from the whole cluster and checks their values.
// The test also counts how often each mechanism of the interconnect was used and fails if one
// never was: local, intra-group and inter-group accesses (the last ones bypass the tile-to-tile
// crossbar), core stalls, bank conflicts, loads on the read-only channels, stores on the
// read-write channels, remapper permutations other than the identity, and back-pressure inside
// the mesh.
// The sizes are reduced from the paper's; the latency figures 1 and 3 are the paper's, the mesh
// figures follow this design's router timing (2 cycles per router each way).
module tb_teranoc_cluster;
  import teranoc_pkg::*;

  localparam int unsigned DimX = 2, DimY = 2, Q = 4, M = 2, N = 4, K = 2, Ro = 1, Rq = 2, W = 16;
  localparam int unsigned G = DimX * DimY;
  localparam int unsigned NumAll = G * Q * M;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NumAll-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  tcdm_req_t         req [NumAll];
  tcdm_rsp_t         rsp [NumAll];
  logic              done;
  int unsigned       checks_m, failures_m, n_local, n_intra, n_inter, n_stall, n_lat;

  teranoc_cluster #(
    .DimX (DimX), .DimY (DimY), .NumTiles (Q), .NumCores (M), .NumBanks (N), .NumRouter (K),
    .NumRo (Ro), .RemapSize (Rq), .NumWords (W)
  ) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_valid_i (req_valid), .core_req_ready_o (req_ready), .core_req_i (req),
    .core_rsp_valid_o (rsp_valid), .core_rsp_ready_i (rsp_ready), .core_rsp_o (rsp)
  );

  core_traffic #(
    .NumGrps (G), .DimY (DimY), .NumTiles (Q), .NumCores (M), .NumBanks (N),
    .WordsPerCore (8), .ReadsPerCore (64)
  ) i_cores (
    .clk_i (clk), .rst_ni (rst_n),
    .req_valid_o (req_valid), .req_ready_i (req_ready), .req_o (req),
    .rsp_valid_i (rsp_valid), .rsp_ready_o (rsp_ready), .rsp_i (rsp),
    .done_o (done), .checks_o (checks_m), .failures_o (failures_m),
    .n_local_o (n_local), .n_intra_o (n_intra), .n_inter_o (n_inter), .n_stall_o (n_stall),
    .n_lat_checked_o (n_lat)
  );

  // Mechanism probes in group 0
  int unsigned n_ro_load, n_rw_store, n_remap, n_mesh_bp, n_bank_conflict;
  for (genvar r = 0; r < Q; r++) begin : gen_probe
    always @(posedge clk) if (rst_n) begin
      if (i_dut.gen_group[0].i_group.gen_port[1].gen_router[r].gen_ro.i_req_router.in_valid_i[4] &&
          i_dut.gen_group[0].i_group.gen_port[1].gen_router[r].gen_ro.i_req_router.in_ready_o[4])
        n_ro_load++;
      if (i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rw.i_req_router.in_valid_i[4] &&
          i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rw.i_req_router.in_ready_o[4] &&
          i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rw.i_req_router.in_data_i[4].payload.wen)
        n_rw_store++;
      if ((i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rw.i_req_router.in_valid_i &
           ~i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rw.i_req_router.in_ready_o) != '0 ||
          (i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rsp.i_rsp_router.out_valid_o &
           ~i_dut.gen_group[0].i_group.gen_port[0].gen_router[r].gen_rsp.i_rsp_router.out_ready_i) != '0)
        n_mesh_bp++;
      if ((i_dut.gen_group[0].i_group.gen_tile[r].i_tile.xreq_valid &
           ~i_dut.gen_group[0].i_group.gen_tile[r].i_tile.xreq_ready) != '0)
        n_bank_conflict++;
    end
  end
  for (genvar j = 0; j < Q / Rq; j++) begin : gen_probe_remap
    always @(posedge clk) if (rst_n) begin
      if (i_dut.gen_group[0].i_group.gen_port[0].gen_remap[j].i_req_remap.in_valid_i != '0 &&
          i_dut.gen_group[0].i_group.gen_port[0].gen_remap[j].i_req_remap.offset != 0)
        n_remap++;
    end
  end

  int unsigned checks, failures;
  task automatic mech(string name, int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", name);
    end else $display("mechanism %-28s %0d", name, n);
  endtask

  initial begin
    n_ro_load = 0; n_rw_store = 0; n_remap = 0; n_mesh_bp = 0; n_bank_conflict = 0;
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    @(posedge clk);
    checks   += checks_m;
    failures += failures_m;
    checks++;
    if (n_lat != G + 1) begin
      failures++;
      $display("FAIL: %0d latency measurements, expected %0d", n_lat, G + 1);
    end
    mech("local tile access", n_local);
    mech("intra-group access", n_intra);
    mech("inter-group access (bypass)", n_inter);
    mech("core request stall", n_stall);
    mech("bank conflict", n_bank_conflict);
    mech("load on read-only channel", n_ro_load);
    mech("store on read-write channel", n_rw_store);
    mech("remapper permutation", n_remap);
    mech("mesh back-pressure", n_mesh_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
