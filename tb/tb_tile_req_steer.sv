// Test of the request steering of a tile (group 3, tile 5, default sizes). Random requests from
// the 4 cores go to the own tile, other tiles of the group and other groups, loads and stores.
// For each the test works out the expected path itself (local crossbar, port 0, read-write port 1
// for stores and core-0/2 loads, read-only port 2 for core-1/3 loads) and checks the valid
// outputs, the payload on each port (the round-robin winner among the cores wanting it) and each
// core's ready.
// The 1 + K ports are the paper's; the address map and the load-port rule are this design's
// choice.
module tb_tile_req_steer;
  import teranoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] core_valid, core_ready, local_valid, local_ready;
  logic [2:0] port_valid, port_ready;
  tcdm_req_t  core_req [4], port_req [3];
  int unsigned checks = 0, failures = 0, ptr [3];
  int unsigned n_path [4];

  tile_req_steer dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd3), .tile_id_i(4'd5),
    .core_valid_i(core_valid), .core_ready_o(core_ready), .core_req_i(core_req),
    .local_valid_o(local_valid), .local_ready_i(local_ready),
    .port_valid_o(port_valid), .port_ready_i(port_ready), .port_req_o(port_req));

  function automatic int exp_path(int c, tcdm_req_t r);  // 0..2 ports, 3 local
    int g = (r.addr >> 10) & 15, t = (r.addr >> 6) & 15;
    if (g == 3 && t == 5) return 3;
    if (g == 3) return 0;
    if (r.wen) return 1;
    return 1 + (c % 2);
  endfunction

  initial begin
    core_valid = '0; local_ready = '0; port_ready = '0;
    for (int p = 0; p < 3; p++) ptr[p] = 0;
    for (int p = 0; p < 4; p++) n_path[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      automatic int path [4];
      @(negedge clk);
      for (int c = 0; c < 4; c++) begin
        automatic int kind = $urandom_range(2);
        automatic int g = (kind == 2) ? ((3 + 1 + $urandom_range(14)) % 16) : 3;
        automatic int t = (kind == 0) ? 5 : (kind == 1 ? ((5 + 1 + $urandom_range(14)) % 16) : $urandom_range(15));
        core_req[c] = '0;
        core_req[c].addr  = {10'($urandom), 8'($urandom), 4'(g), 4'(t), 4'($urandom), 2'b00};
        core_req[c].wen   = $urandom_range(3) == 0;
        core_req[c].wdata = $urandom;
        core_req[c].ini.core = 2'(c);
        path[c] = exp_path(c, core_req[c]);
      end
      core_valid  = 4'($urandom);
      local_ready = 4'($urandom);
      port_ready  = 3'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        automatic int w = -1;
        for (int k = 0; k < 4; k++) begin
          automatic int c = (ptr[p] + k) % 4;
          if (w < 0 && core_valid[c] && path[c] == p) w = c;
        end
        checks++;
        if ((w < 0) ? port_valid[p] : (!port_valid[p] || port_req[p] != core_req[w])) begin
          failures++;
          $display("port %0d: valid %0d, expected core %0d", p, port_valid[p], w);
        end
        for (int c = 0; c < 4; c++) if (core_valid[c] && path[c] == p) begin
          checks++;
          if (core_ready[c] != (c == w && port_ready[p])) begin
            failures++;
            $display("core %0d ready %0d wrong (port %0d)", c, core_ready[c], p);
          end
        end
        if (w >= 0 && port_ready[p]) ptr[p] = (w + 1) % 4;
      end
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (local_valid[c] != (core_valid[c] && path[c] == 3) ||
            (core_valid[c] && path[c] == 3 && core_ready[c] != local_ready[c])) begin
          failures++;
          $display("core %0d local path wrong", c);
        end
        if (core_valid[c]) n_path[path[c]]++;
      end
    end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (n_path[p] == 0) begin failures++; $display("path %0d never used", p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
