// Round-robin arbiter.
//
// Grants one of NumReq requesters per cycle. The search for a requester starts at a priority
// pointer; after a grant is used (advance_i high while a grant is given) the pointer moves to the
// requester after the one granted, so every requester is served within NumReq grants. The grant
// is combinational in the requests (no cycle of latency); only the pointer is a register, reset
// to requester 0. This is the conflict resolution the crossbars and routers of the interconnect
// use; the pointer scheme is this design's choice.
//
// From the TeraNoC paper: round-robin arbitration on every crossbar output. Design choice: a flat
// priority scan from the pointer rather than a tree of two-input arbiters.
module rr_arbiter #(
  parameter int unsigned NumReq = 4,
  localparam int unsigned IdxWidth = (NumReq > 1) ? $clog2(NumReq) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumReq-1:0]   req_i,
  input  logic                advance_i,
  output logic [NumReq-1:0]   gnt_o,
  output logic [IdxWidth-1:0] idx_o,
  output logic                valid_o
);

  logic [IdxWidth-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned o = 0; o < NumReq; o++) begin
      logic [IdxWidth-1:0] cand;
      cand = IdxWidth'((int'(ptr_q) + o) % NumReq);
      if (!valid_o && req_i[cand]) begin
        valid_o     = 1'b1;
        idx_o       = cand;
        gnt_o[cand] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (valid_o && advance_i) begin
      ptr_q <= IdxWidth'((int'(idx_o) + 1) % NumReq);
    end
  end

endmodule
