// Fully combinational, fully connected crossbar with valid/ready handshake.
//
// NumIn initiators, NumOut targets. Each initiator presents a payload and the index of its target
// (in_sel_i). Every target has a round-robin arbiter over the initiators that address it; the
// winner's payload is multiplexed to the target, and the target's ready is returned to the winner
// only. There is no register on the path, so a request crosses in the cycle it is issued. The
// index of the winning initiator is also given per target (out_src_o), so that a target can send
// its response back the same way. Used for the core-to-bank crossbars inside a tile, the
// tile-to-tile crossbars of a group and the router-to-tile crossbars.
//
// The cluster's crossbars are logarithmic (staged trees of arbitration nodes); here each target
// has one flat round-robin arbiter and multiplexer, which routes the same requests with the same
// fairness in one cycle.
//
// From the TeraNoC paper: a fully combinational, fully connected crossbar with round-robin
// arbitration and single-cycle traversal. Design choice: one multiplexer and one arbiter per
// output instead of logarithmic staging. out_src_o reports the winning input; the routers
// check it, the tile and group crossbars do not need it.
module log_xbar #(
  parameter int unsigned NumIn   = 4,
  parameter int unsigned NumOut  = 4,
  parameter type         T       = logic [31:0],
  localparam int unsigned SelWidth = (NumOut > 1) ? $clog2(NumOut) : 1,
  localparam int unsigned SrcWidth = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumIn-1:0]    in_valid_i,
  output logic [NumIn-1:0]    in_ready_o,
  input  T                    in_data_i  [NumIn],
  input  logic [SelWidth-1:0] in_sel_i   [NumIn],
  output logic [NumOut-1:0]   out_valid_o,
  input  logic [NumOut-1:0]   out_ready_i,
  output T                    out_data_o [NumOut],
  output logic [SrcWidth-1:0] out_src_o  [NumOut]
);

  logic [NumIn-1:0] gnt [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : gen_out
    logic [NumIn-1:0] req;
    for (genvar i = 0; i < NumIn; i++) begin : gen_req
      assign req[i] = in_valid_i[i] && (in_sel_i[i] == SelWidth'(o));
    end

    rr_arbiter #(.NumReq(NumIn)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (req),
      .advance_i (out_ready_i[o]),
      .gnt_o     (gnt[o]),
      .idx_o     (out_src_o[o]),
      .valid_o   (out_valid_o[o])
    );

    assign out_data_o[o] = in_data_i[out_src_o[o]];
  end

  for (genvar i = 0; i < NumIn; i++) begin : gen_ready
    always_comb begin
      in_ready_o[i] = 1'b0;
      for (int unsigned o = 0; o < NumOut; o++) begin
        if (in_sel_i[i] == SelWidth'(o)) in_ready_o[i] = out_ready_i[o] && gnt[o][i];
      end
    end

    // An initiator must address an existing target.
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     in_valid_i[i] |-> (int'(in_sel_i[i]) < NumOut))
      else $error("log_xbar: initiator %0d addresses target %0d of %0d", i, in_sel_i[i], NumOut);
  end

endmodule
