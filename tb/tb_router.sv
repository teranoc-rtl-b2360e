// Test of the mesh router at position (1,1) of a 4x4 grid.
// Directed part: single flits injected one at a time on various ports must leave by the port XY
// routing gives (x first, then y, local on arrival) exactly 2 cycles after entry.
// Random part: every port injects flits with random destinations that a real mesh could deliver
// to that port (no U-turns), outputs stall at random; every flit must leave once, by its correct
// port, and flits between one pair of ports keep their order.
// XY routing and the 2-cycle hop follow the paper; the grid position is chosen for the test.
module tb_router;
  import teranoc_pkg::*;
  typedef struct packed {
    coord_t      dst;
    logic [15:0] tag;
  } flit_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t      in_data [5], out_data [5];
  coord_t     me;
  int unsigned checks = 0, failures = 0, cyc = 0;
  flit_t      exp_q [5][$];   // expected flits per output, in order per input
  int         t_in [int];

  router #(.flit_t(flit_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .xy_i(me), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_data_i(in_data), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  always @(posedge clk) cyc++;

  function automatic int xy_port(coord_t d);
    if (d.x > me.x) return DirEast;
    if (d.x < me.x) return DirWest;
    if (d.y > me.y) return DirNorth;
    if (d.y < me.y) return DirSouth;
    return DirLocal;
  endfunction

  // A destination a flit entering on port p may have.
  function automatic coord_t legal_dst(int p);
    coord_t d;
    do begin
      d.x = 2'($urandom); d.y = 2'($urandom);
    end while ((p == DirEast && d.x > me.x) || (p == DirWest && d.x < me.x) ||
               (p == DirNorth && (d.x != me.x || d.y > me.y)) ||
               (p == DirSouth && (d.x != me.x || d.y < me.y)));
    // a flit from the east travels west; flits from north or south travel in y only
    return d;
  endfunction

  // Collect outputs every cycle.
  logic [4:0] took;
  int unsigned got = 0;
  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      automatic int hit = -1;
      checks++;
      // the flit must be the oldest expected one from its input on this output
      for (int k = 0; k < exp_q[o].size(); k++)
        if (hit < 0 && exp_q[o][k].tag[15:13] == out_data[o].tag[15:13]) hit = k;
      if (hit < 0 || exp_q[o][hit] != out_data[o]) begin
        failures++;
        $display("output %0d: unexpected flit %h", o, out_data[o]);
      end else begin
        if (t_in.exists(int'(out_data[o].tag)) && t_in[int'(out_data[o].tag)] >= 0) begin
          checks++;
          if (cyc - t_in[int'(out_data[o].tag)] != 2) begin
            failures++;
            $display("flit %h: %0d cycles, expected 2", out_data[o].tag, cyc - t_in[int'(out_data[o].tag)]);
          end
        end
        exp_q[o].delete(hit);
        got++;
      end
    end
  end

  task automatic send(int p, coord_t d, logic [12:0] n, bit timed);
    flit_t f;
    f.dst = d; f.tag = {3'(p), n};
    @(negedge clk);
    in_valid = '0;
    in_valid[p] = 1'b1; in_data[p] = f;
    exp_q[xy_port(d)].push_back(f);
    t_in[int'(f.tag)] = timed ? cyc : -1;
    @(posedge clk);
    #1;
    while (!in_ready[p]) begin @(posedge clk); #1; end
  endtask

  initial begin
    me = '{x: 2'd1, y: 2'd1};
    in_valid = '0; out_ready = '1;
    for (int p = 0; p < 5; p++) in_data[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Directed, timed
    send(DirLocal, '{x: 2'd3, y: 2'd1}, 1, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirLocal, '{x: 2'd0, y: 2'd3}, 2, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirLocal, '{x: 2'd1, y: 2'd3}, 3, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirLocal, '{x: 2'd1, y: 2'd0}, 4, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirWest,  '{x: 2'd1, y: 2'd1}, 5, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirWest,  '{x: 2'd1, y: 2'd2}, 6, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    send(DirSouth, '{x: 2'd1, y: 2'd3}, 7, 1); @(negedge clk); in_valid = '0; repeat (4) @(posedge clk);
    checks++;
    if (got != 7) begin failures++; $display("directed: %0d of 7 flits out", got); end
    // Random, untimed: all five inputs in parallel
    fork
      begin
        repeat (3000) begin
          @(negedge clk);
          out_ready = 5'($urandom);
        end
        out_ready = '1;
      end
      for (int pp = 0; pp < 5; pp++) begin
        automatic int p = pp;
        fork begin
          for (int n = 100; n < 400; n++) begin
            automatic flit_t f;
            f.dst = legal_dst(p); f.tag = {3'(p), 13'(n)};
            @(negedge clk);
            in_valid[p] = 1'b1; in_data[p] = f;
            exp_q[xy_port(f.dst)].push_back(f);
            t_in[int'(f.tag)] = -1;
            @(posedge clk); #1;
            while (!in_ready_q(p)) begin @(posedge clk); #1; end
            in_valid[p] = 1'b0;
          end
        end join_none
      end
    join
    repeat (50) @(posedge clk);
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (exp_q[o].size() != 0) begin failures++; $display("output %0d: %0d flits missing", o, exp_q[o].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ready as seen at the last clock edge
  logic [4:0] ready_at_edge;
  always @(posedge clk) ready_at_edge <= in_ready;
  function automatic bit in_ready_q(int p);
    return ready_at_edge[p];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
