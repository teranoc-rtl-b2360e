// Router remapper: connects the port-k channels of q tiles to q routers through a small
// crossbar whose mapping changes every cycle in a pseudorandom way.
//
// An 8-bit Fibonacci LFSR (taps 8, 6, 5, 4), loaded with Seed at reset, steps every cycle. Its
// value modulo q is a rotation offset: in a cycle with offset s, input i is connected to output
// (i - s) mod q, i.e. output o takes input (o + s) mod q. Every mapping is a permutation, so all
// q inputs can pass in the same cycle, and over time each tile's traffic is spread over all q
// routers instead of always loading the same one. A request that is not accepted simply waits at
// its input and may leave through another router in a later cycle; requests carry their own
// routing information, so the router used does not matter for delivery. Purely combinational
// datapath, no added latency.
//
// The shift register with a seed is what the cluster uses; the choice of polynomial and of a
// rotation as the permutation is this design's.
//
// From the TeraNoC paper: a seeded shift register producing a pseudorandom mapping of tile ports
// to routers. Design choices: the 8-bit LFSR polynomial, the rotation form of the permutation
// and the seed.
module router_remapper #(
  parameter int unsigned NumPorts = 4,
  parameter type         T        = logic [31:0],
  parameter logic [7:0]  Seed     = 8'hA5
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumPorts-1:0] in_valid_i,
  output logic [NumPorts-1:0] in_ready_o,
  input  T                    in_data_i   [NumPorts],
  output logic [NumPorts-1:0] out_valid_o,
  input  logic [NumPorts-1:0] out_ready_i,
  output T                    out_data_o  [NumPorts]
);

  localparam int unsigned IdxW = (NumPorts > 1) ? $clog2(NumPorts) : 1;

  logic [7:0]  lfsr_q;
  int unsigned offset;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lfsr_q <= (Seed == 8'h00) ? 8'h01 : Seed;
    end else begin
      lfsr_q <= {lfsr_q[6:0], lfsr_q[7] ^ lfsr_q[5] ^ lfsr_q[4] ^ lfsr_q[3]};
    end
  end

  assign offset = int'(lfsr_q) % NumPorts;

  for (genvar o = 0; o < NumPorts; o++) begin : gen_out
    logic [IdxW-1:0] src;
    assign src            = IdxW'((o + offset) % NumPorts);
    assign out_valid_o[o] = in_valid_i[src];
    assign out_data_o[o]  = in_data_i[src];
  end

  for (genvar i = 0; i < NumPorts; i++) begin : gen_in
    logic [IdxW-1:0] dst;
    assign dst           = IdxW'((i + NumPorts - offset) % NumPorts);
    assign in_ready_o[i] = out_ready_i[dst];
  end

endmodule
