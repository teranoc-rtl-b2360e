// End-to-end test of the cluster at its full default size: 16 groups in a 4x4 mesh, 1024 cores,
// 4096 banks. The core traffic model measures the round-trip latency from core 0 (group 0, at a
// corner of the mesh) to its own tile (1 cycle), another tile of its group (3 cycles) and every
// other group (3 + 4*R cycles, 11 for a neighbour, 31 for the opposite corner), then all 1024
// cores store 2 words each and load 8 random words each from the whole cluster, checking every
// value.
// All sizes are the paper's (the cluster's defaults); the access pattern is this design's choice.
module tb_teranoc_cluster_full;
  import teranoc_pkg::*;

  localparam int unsigned NumAll = NumGroups * NumTilesPerGroup * NumCoresPerTile;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NumAll-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  tcdm_req_t         req [NumAll];
  tcdm_rsp_t         rsp [NumAll];
  logic              done;
  int unsigned       checks_m, failures_m, n_local, n_intra, n_inter, n_stall, n_lat;
  int unsigned       checks = 0, failures = 0;

  teranoc_cluster i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_valid_i (req_valid), .core_req_ready_o (req_ready), .core_req_i (req),
    .core_rsp_valid_o (rsp_valid), .core_rsp_ready_i (rsp_ready), .core_rsp_o (rsp)
  );

  core_traffic #(
    .NumGrps (NumGroups), .DimY (MeshDimY), .NumTiles (NumTilesPerGroup),
    .NumCores (NumCoresPerTile), .NumBanks (NumBanksPerTile),
    .WordsPerCore (2), .ReadsPerCore (8)
  ) i_cores (
    .clk_i (clk), .rst_ni (rst_n),
    .req_valid_o (req_valid), .req_ready_i (req_ready), .req_o (req),
    .rsp_valid_i (rsp_valid), .rsp_ready_o (rsp_ready), .rsp_i (rsp),
    .done_o (done), .checks_o (checks_m), .failures_o (failures_m),
    .n_local_o (n_local), .n_intra_o (n_intra), .n_inter_o (n_inter), .n_stall_o (n_stall),
    .n_lat_checked_o (n_lat)
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    @(posedge clk);
    checks   = checks_m + 1;
    failures = failures_m;
    if (n_lat != NumGroups + 1) begin
      failures++;
      $display("FAIL: %0d latency measurements, expected %0d", n_lat, NumGroups + 1);
    end
    $display("requests: %0d local, %0d intra-group, %0d inter-group; %0d stall cycles",
             n_local, n_intra, n_inter, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
