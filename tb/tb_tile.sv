// Test of a tile (group 2, tile 7, default sizes: 4 cores, 16 banks, 1+2 remote ports).
// Directed transactions, each checked for its path, its payload and its cycle of arrival:
// a local store and load (response 1 cycle after the request is taken), two cores on one bank in
// the same cycle (one waits), requests to another tile of the group (port 0), stores and loads to
// another group (read-write port 1, and read-only port 2 for loads of cores 1 and 3, which carries
// no write data), each leaving through the spill register one cycle after being taken; incoming
// remote requests on ports 0 and 1 (response on the same outgoing port 2 cycles later), and an
// incoming remote response delivered to its core in the same cycle.
// The 4 cores, 16 banks and 1-cycle local access are the paper's; the port rules are this
// design's choice.
module tb_tile;
  import teranoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] creq_v, creq_r, crsp_v, crsp_r;
  tcdm_req_t  creq [4];
  tcdm_rsp_t  crsp [4];
  logic [2:0] rqo_v, rqo_r, rqi_v, rqi_r, rso_v, rso_r, rsi_v, rsi_r;
  tcdm_req_t  rqo [3], rqi [3];
  tcdm_rsp_t  rso [3], rsi [3];
  int unsigned checks = 0, failures = 0;

  tile dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd2), .tile_id_i(4'd7),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_rsp_valid_o(crsp_v), .core_rsp_ready_i(crsp_r), .core_rsp_o(crsp),
    .req_o_valid_o(rqo_v), .req_o_ready_i(rqo_r), .req_o_o(rqo),
    .req_i_valid_i(rqi_v), .req_i_ready_o(rqi_r), .req_i_i(rqi),
    .rsp_o_valid_o(rso_v), .rsp_o_ready_i(rso_r), .rsp_o_o(rso),
    .rsp_i_valid_i(rsi_v), .rsp_i_ready_o(rsi_r), .rsp_i_i(rsi));

  function automatic tcdm_req_t mk(int g, int t, int b, int row, bit wen, logic [31:0] d, int core, int id);
    tcdm_req_t r = '0;
    r.addr = {10'd0, 8'(row), 4'(g), 4'(t), 4'(b), 2'b00};
    r.wen = wen; r.be = wen ? 4'hF : 4'h0; r.wdata = wen ? d : 32'h0;
    r.ini = '{group: 4'd2, tile: 4'd7, core: 2'(core), id: 3'(id)};
    return r;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Offer one core request at the next negedge; return after the edge that takes it.
  task automatic issue(int c, tcdm_req_t r);
    @(negedge clk);
    creq_v[c] = 1'b1; creq[c] = r;
    #1;
    while (!creq_r[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    creq_v[c] = 1'b0;
  endtask

  initial begin
    tcdm_req_t r;
    creq_v = '0; crsp_r = '1; rqo_r = '1; rqi_v = '0; rso_r = '1; rsi_v = '0;
    for (int i = 0; i < 4; i++) creq[i] = '0;
    for (int i = 0; i < 3; i++) begin rqi[i] = '0; rsi[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. local store, then load: one cycle each
    issue(0, mk(2, 7, 3, 10, 1, 32'hCAFE0001, 0, 1));
    @(negedge clk); #1;
    check(crsp_v[0] && crsp[0].wen && crsp[0].ini.id == 1, "local store acknowledged after 1 cycle");
    issue(1, mk(2, 7, 3, 10, 0, 0, 1, 2));
    @(negedge clk); #1;
    check(crsp_v[1] && !crsp[1].wen && crsp[1].rdata == 32'hCAFE0001 && crsp[1].ini.id == 2,
          "local load returns stored word after 1 cycle");

    // 2. bank conflict: cores 0 and 1 on bank 3 in the same cycle
    @(negedge clk);
    creq_v[1:0] = 2'b11;
    creq[0] = mk(2, 7, 3, 10, 0, 0, 0, 3);
    creq[1] = mk(2, 7, 3, 11, 0, 0, 1, 4);
    #1;
    check(creq_r[1:0] == 2'b01 || creq_r[1:0] == 2'b10, "one of two cores on one bank waits");
    @(posedge clk); #1;
    if (creq_r[0]) creq_v[0] = 1'b0; else creq_v[1] = 1'b0;
    @(negedge clk); #1;
    check(creq_r[0] || creq_r[1], "waiting core served next cycle");
    @(posedge clk); #1; creq_v = '0;

    // 3. remote requests leave through the spill registers one cycle after being taken
    repeat (2) @(posedge clk);
    r = mk(2, 9, 1, 4, 0, 0, 2, 0);
    issue(2, r);
    @(negedge clk); #1;
    check(rqo_v == 3'b001 && rqo[0] == r, "intra-group load on port 0");
    r = mk(5, 0, 2, 7, 1, 32'h12345678, 3, 1);
    issue(3, r);
    @(negedge clk); #1;
    check(rqo_v == 3'b010 && rqo[1] == r, "inter-group store on read-write port 1");
    r = mk(5, 0, 2, 7, 0, 0, 3, 2);
    r.wdata = 32'hFFFFFFFF;   // ignored on a load; must not leave a read-only port
    issue(3, r);
    @(negedge clk); #1;
    r.wdata = '0;
    check(rqo_v == 3'b100 && rqo[2] == r, "core-3 load on read-only port 2 without write data");
    r = mk(5, 0, 2, 7, 0, 0, 2, 3);
    issue(2, r);
    @(negedge clk); #1;
    check(rqo_v == 3'b010 && rqo[1] == r, "core-2 load on read-write port 1");

    // 4. incoming remote requests: response on the same outgoing port 2 cycles later
    @(negedge clk);
    rqi_v[1] = 1'b1;
    rqi[1] = mk(2, 7, 3, 10, 0, 0, 0, 5);
    rqi[1].ini.group = 4'd9; rqi[1].ini.tile = 4'd1;
    #1; check(rqi_r[1], "incoming request taken");
    @(posedge clk); #1; rqi_v[1] = 1'b0;
    @(negedge clk); #1;
    check(rso_v == 3'b000, "no response after 1 cycle");
    @(negedge clk); #1;
    check(rso_v == 3'b010 && rso[1].rdata == 32'hCAFE0001 && rso[1].ini.group == 4'd9 &&
          rso[1].ini.id == 3'd5, "remote load answered on port 1 after 2 cycles");
    @(negedge clk);
    rqi_v[0] = 1'b1;
    rqi[0] = mk(2, 7, 15, 0, 1, 32'hBEEF, 1, 6);
    rqi[0].ini.tile = 4'd0;
    @(posedge clk); #1; rqi_v[0] = 1'b0;
    @(negedge clk); @(negedge clk); #1;
    check(rso_v == 3'b001 && rso[0].wen && rso[0].ini.tile == 4'd0, "remote store acknowledged on port 0");

    // 5. incoming response reaches its core in the same cycle
    @(negedge clk);
    rsi_v[2] = 1'b1;
    rsi[2] = '{rdata: 32'h600DF00D, wen: 1'b0, ini: '{group: 4'd2, tile: 4'd7, core: 2'd3, id: 3'd2}};
    #1;
    check(crsp_v == 4'b1000 && crsp[3].rdata == 32'h600DF00D && rsi_r[2], "remote response to core 3");
    @(posedge clk); #1; rsi_v = '0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
