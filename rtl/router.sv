// Word-width mesh router with five ports (north, east, south, west, local) and XY routing.
//
// Every input has a FIFO and every output has a FIFO (RouterFifoDepth = 2 entries each). The
// flit at the head of an input FIFO is routed by dimension order on the destination coordinates
// in its header: first along x (east if the destination lies to the east, west if to the west),
// then along y (north if above, south if below), and to the local port on arrival. A 5x5
// crossbar with a round-robin arbiter per output moves at most one flit per output per cycle from
// the input heads into the output FIFOs. The payload is carried unchanged: one 32-bit core
// request or response per flit, no packetisation. The flit type is a parameter, so the same
// router serves the read-write request, read-only request and response meshes; the flit type must
// have a field dst of type coord_t.
//
// Timing: a flit entering in cycle t leaves from the output FIFO in cycle t+2 (one cycle in each
// FIFO), the per-hop latency of 2 cycles of the implemented cluster. Throughput is one flit per
// port per cycle. Coordinates grow eastwards (x) and northwards (y).
//
// From the TeraNoC paper: 5x5 ports, XY routing, input and output FIFOs of depth 2, per-hop
// latency 2 cycles. Design choice: separate router instances for requests and responses and a
// round-robin switch; the switch's winner index (sw_src) is used only by the U-turn check.
module router import teranoc_pkg::*; #(
  parameter type         flit_t    = req_flit_t,
  parameter int unsigned FifoDepth = RouterFifoDepth
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  coord_t                   xy_i,
  input  logic [NumRouterDirs-1:0] in_valid_i,
  output logic [NumRouterDirs-1:0] in_ready_o,
  input  flit_t                    in_data_i   [NumRouterDirs],
  output logic [NumRouterDirs-1:0] out_valid_o,
  input  logic [NumRouterDirs-1:0] out_ready_i,
  output flit_t                    out_data_o  [NumRouterDirs]
);

  logic [NumRouterDirs-1:0] head_valid, head_ready;
  flit_t                    head_data [NumRouterDirs];
  logic [2:0]               route     [NumRouterDirs];
  logic [NumRouterDirs-1:0] sw_valid, sw_ready;
  flit_t                    sw_data   [NumRouterDirs];
  logic [2:0]               sw_src    [NumRouterDirs];

  for (genvar d = 0; d < NumRouterDirs; d++) begin : gen_in
    stream_fifo #(.Depth(FifoDepth), .T(flit_t)) i_in_fifo (
      .clk_i, .rst_ni,
      .in_valid_i  (in_valid_i[d]),
      .in_ready_o  (in_ready_o[d]),
      .in_data_i   (in_data_i[d]),
      .out_valid_o (head_valid[d]),
      .out_ready_i (head_ready[d]),
      .out_data_o  (head_data[d])
    );

    // Dimension-ordered (XY) route computation.
    always_comb begin
      dir_e dir;
      if      (head_data[d].dst.x > xy_i.x) dir = DirEast;
      else if (head_data[d].dst.x < xy_i.x) dir = DirWest;
      else if (head_data[d].dst.y > xy_i.y) dir = DirNorth;
      else if (head_data[d].dst.y < xy_i.y) dir = DirSouth;
      else                                  dir = DirLocal;
      route[d] = dir;
    end
  end

  log_xbar #(.NumIn(NumRouterDirs), .NumOut(NumRouterDirs), .T(flit_t)) i_switch (
    .clk_i, .rst_ni,
    .in_valid_i  (head_valid),
    .in_ready_o  (head_ready),
    .in_data_i   (head_data),
    .in_sel_i    (route),
    .out_valid_o (sw_valid),
    .out_ready_i (sw_ready),
    .out_data_o  (sw_data),
    .out_src_o   (sw_src)
  );

  for (genvar d = 0; d < NumRouterDirs; d++) begin : gen_out
    stream_fifo #(.Depth(FifoDepth), .T(flit_t)) i_out_fifo (
      .clk_i, .rst_ni,
      .in_valid_i  (sw_valid[d]),
      .in_ready_o  (sw_ready[d]),
      .in_data_i   (sw_data[d]),
      .out_valid_o (out_valid_o[d]),
      .out_ready_i (out_ready_i[d]),
      .out_data_o  (out_data_o[d])
    );
  end

  // A flit is never sent back the way it came (XY routing has no U-turn): no output is fed
  // from the input of the same side.
  for (genvar d = 0; d < NumRouterDirs - 1; d++) begin : gen_check
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     sw_valid[d] |-> (sw_src[d] != 3'(d)))
      else $error("router: U-turn on port %0d", d);
  end

endmodule
