// Test of a group (Hier-L1) at reduced size: 4 tiles of 2 cores and 4 banks of 16 words, K = 2
// router ports (port 2 read-only), remappers over 2 tiles, in a 1x2 mesh as group 0 at (0,0).
// The testbench plays the neighbouring group 1 at (0,1): it takes every request flit leaving the
// north side of a request plane, answers it from its own memory model one cycle later on the
// north side of the response plane of the same tile port, and also sends requests of its own into
// group 0 and checks the response flits that come back.
// Checked: round-trip latency from core 0 to its own tile (1 cycle), to another tile (3) and to
// group 1 (6 = spill 1 + router 2 + the model's 1 + router 2); then every core stores to and
// loads back words in both groups (values checked); the header of each flit leaving the group
// (destination (0,1)); no flit leaves by a side with no neighbour.
// Sizes are reduced from the paper's (16 tiles of 4 cores and 16 banks) to keep the run short;
// the expected 1- and 3-cycle latencies are the paper's, the 6-cycle figure follows from this
// design's router timing.
module tb_group;
  import teranoc_pkg::*;
  localparam int unsigned Q = 4, M = 2, N = 4, G = 2, K = 2, W = 16;
  localparam int unsigned NC = Q * M, NPl = K * Q, NRw = Q, NRo = Q;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  logic [NC-1:0] creq_v, creq_r, crsp_v, crsp_r;
  tcdm_req_t     creq [NC];
  tcdm_rsp_t     crsp [NC];
  logic [3:0]    rw_iv [NRw], rw_ir [NRw], rw_ov [NRw], rw_or [NRw];
  req_flit_t     rw_id [NRw][4], rw_od [NRw][4];
  logic [3:0]    ro_iv [NRo], ro_ir [NRo], ro_ov [NRo], ro_or [NRo];
  ro_req_flit_t  ro_id [NRo][4], ro_od [NRo][4];
  logic [3:0]    rs_iv [NPl], rs_ir [NPl], rs_ov [NPl], rs_or [NPl];
  rsp_flit_t     rs_id [NPl][4], rs_od [NPl][4];
  int unsigned   checks = 0, failures = 0;

  group #(.NumTiles(Q), .NumCores(M), .NumBanks(N), .NumGrps(G), .DimY(2), .NumRouter(K),
          .NumRo(1), .RemapSize(2), .NumWords(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd0),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_rsp_valid_o(crsp_v), .core_rsp_ready_i(crsp_r), .core_rsp_o(crsp),
    .rw_in_valid_i(rw_iv), .rw_in_ready_o(rw_ir), .rw_in_data_i(rw_id),
    .rw_out_valid_o(rw_ov), .rw_out_ready_i(rw_or), .rw_out_data_o(rw_od),
    .ro_in_valid_i(ro_iv), .ro_in_ready_o(ro_ir), .ro_in_data_i(ro_id),
    .ro_out_valid_o(ro_ov), .ro_out_ready_i(ro_or), .ro_out_data_o(ro_od),
    .rsp_in_valid_i(rs_iv), .rsp_in_ready_o(rs_ir), .rsp_in_data_i(rs_id),
    .rsp_out_valid_o(rs_ov), .rsp_out_ready_i(rs_or), .rsp_out_data_o(rs_od));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- model of group 1 ------------------------------------------------------------------------
  logic [31:0] mem1 [int];
  rsp_flit_t   rq [NPl][$];    // responses waiting per response plane
  req_flit_t   inj_q [$];      // requests of group 1 into group 0 (on plane 0)
  int unsigned inj_sent = 0, inj_back = 0, flits_out = 0;
  logic [31:0] inj_exp [int];

  function automatic rsp_flit_t answer(tcdm_req_t r);
    rsp_flit_t f;
    int a = int'(r.addr);
    f.dst = '{x: 2'd0, y: 2'd0};
    f.payload.ini = r.ini;
    f.payload.wen = r.wen;
    f.payload.rdata = mem1.exists(a) ? mem1[a] : 32'h0;
    if (r.wen) mem1[a] = r.wdata;
    return f;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPl; p++) begin
      // response accepted?
      if (rs_iv[p][0] && rs_ir[p][0]) void'(rq[p].pop_front());
    end
    for (int p = 0; p < NRw; p++) begin
      for (int d = 1; d < 4; d++) if (rw_ov[p][d]) begin
        failures++; $display("FAIL: request flit left plane %0d towards side %0d without neighbour", p, d);
      end
      if (rw_ov[p][0]) begin
        checks++; flits_out++;
        if (rw_od[p][0].dst != '{x: 2'd0, y: 2'd1}) begin failures++; $display("FAIL: bad header"); end
        rq[p].push_back(answer(rw_od[p][0].payload));
      end
    end
    for (int p = 0; p < NRo; p++) if (ro_ov[p][0]) begin
      checks++; flits_out++;
      if (ro_od[p][0].dst != '{x: 2'd0, y: 2'd1} ) begin failures++; $display("FAIL: bad header"); end
      rq[NRw + p].push_back(answer(from_ro(ro_od[p][0].payload)));
    end
    // responses to group 1's own requests
    for (int p = 0; p < NPl; p++) if (rs_ov[p][0]) begin
      automatic tcdm_rsp_t r = rs_od[p][0].payload;
      checks++;
      if (rs_od[p][0].dst != '{x: 2'd0, y: 2'd1} || r.ini.group != 4'd1 || !inj_exp.exists(int'(r.ini.id))
          || (!r.wen && r.rdata != inj_exp[int'(r.ini.id)])) begin
        failures++; $display("FAIL: response to group 1 wrong: %h", r);
      end
      inj_back++;
    end
    if (rw_iv[0][0] && rw_ir[0][0]) begin void'(inj_q.pop_front()); inj_sent++; end
    // drive next values
    for (int p = 0; p < NPl; p++) begin
      rs_iv[p][0] <= rq[p].size() > 0;
      if (rq[p].size() > 0) rs_id[p][0] <= rq[p][0];
    end
    rw_iv[0][0] <= inj_q.size() > 0;
    if (inj_q.size() > 0) rw_id[0][0] <= inj_q[0];
  end

  // ---- cores -----------------------------------------------------------------------------------
  function automatic logic [31:0] addr_of(int grp, int tile, int bank, int row);
    return {18'd0, 4'(row), 1'(grp), 2'(tile), 2'(bank), 2'b00};
  endfunction

  task automatic access(int c, logic [31:0] a, bit wen, logic [31:0] d, output logic [31:0] rd,
                        output int lat);
    int t0;
    @(negedge clk);
    creq_v[c] = 1'b1;
    creq[c] = '0;
    creq[c].addr = a; creq[c].wen = wen; creq[c].be = 4'hF; creq[c].wdata = d;
    creq[c].ini = '{group: 4'd0, tile: 4'(c / M), core: 2'(c % M), id: 3'd0};
    #1;
    while (!creq_r[c]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    t0 = cyc;
    creq_v[c] = 1'b0;
    while (!crsp_v[c]) begin @(posedge clk); #1; end
    rd = crsp[c].rdata;
    lat = cyc - t0 + 1;
    checks++;
    if (crsp[c].wen != wen || crsp[c].ini.core != 2'(c % M) || crsp[c].ini.tile != 4'(c / M)) begin
      failures++; $display("FAIL: core %0d response fields", c);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] rd;
    int lat;
    creq_v = '0; crsp_r = '1;
    for (int c = 0; c < NC; c++) creq[c] = '0;
    for (int p = 0; p < NRw; p++) begin rw_iv[p] = '0; rw_or[p] = '1; for (int d = 0; d < 4; d++) rw_id[p][d] = '0; end
    for (int p = 0; p < NRo; p++) begin ro_iv[p] = '0; ro_or[p] = '1; for (int d = 0; d < 4; d++) ro_id[p][d] = '0; end
    for (int p = 0; p < NPl; p++) begin rs_iv[p] = '0; rs_or[p] = '1; for (int d = 0; d < 4; d++) rs_id[p][d] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // latencies from core 0 (tile 0)
    access(0, addr_of(0, 0, 1, 0), 1, 32'hA0, rd, lat); check(lat == 1, $sformatf("own tile: %0d cycles", lat));
    access(0, addr_of(0, 2, 1, 0), 1, 32'hA1, rd, lat); check(lat == 3, $sformatf("other tile: %0d cycles", lat));
    access(0, addr_of(1, 2, 1, 0), 1, 32'hA2, rd, lat); check(lat == 6, $sformatf("group 1: %0d cycles", lat));
    access(1, addr_of(1, 2, 1, 0), 0, 0, rd, lat);      check(lat == 6 && rd == 32'hA2, $sformatf("group 1 load (read-only channel): %0d cycles, %h", lat, rd));

    // every core: store then load back words of both groups, in parallel
    for (int cc = 0; cc < NC; cc++) begin
      automatic int c = cc;
      fork begin
        logic [31:0] v;
        int l;
        for (int n = 0; n < 6; n++) begin
          automatic logic [31:0] a = addr_of(n % 2, (c + n) % Q, c % N, 1 + c + 2 * (n / 2));
          access(c, a, 1, {16'(c), 16'(n)}, v, l);
          access(c, a, 0, 0, v, l);
          check(v == {16'(c), 16'(n)}, $sformatf("core %0d word %0d read %h", c, n, v));
        end
      end join_none
    end
    // group 1 reads and writes group 0 at the same time
    for (int i = 0; i < 8; i++) begin
      automatic req_flit_t f;
      f.dst = '{x: 2'd0, y: 2'd0};
      f.payload = '0;
      f.payload.addr = addr_of(0, 0, 1, 0);
      f.payload.ini = '{group: 4'd1, tile: 4'd3, core: 2'd1, id: 3'(i)};
      inj_exp[i] = 32'hA0;
      inj_q.push_back(f);
    end
    wait fork;
    repeat (30) @(posedge clk);
    check(inj_back == 8, $sformatf("%0d of 8 requests of group 1 answered", inj_back));
    check(flits_out > 20, $sformatf("%0d request flits left towards group 1", flits_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
