// Spill register: a one-cycle valid/ready pipeline stage that registers both the forward path
// (valid, data) and the backward path (ready).
//
// Two slots, A and B. Input data always enters slot A; when the output stalls while A holds data,
// that data moves to slot B so A can still accept. in_ready_o is high while either slot is free,
// a function of registers only. Latency is one cycle, throughput one transfer per cycle. The
// cluster places these at the outgoing request and response ports of every tile to cut the long
// wires between tiles; the two-slot structure is this design's choice.
//
// From the TeraNoC paper: spill registers at the outgoing tile boundary. Design choice: the
// two-slot form that keeps full throughput under back-pressure.
module spill_register #(
  parameter type T = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o
);

  T     a_data_q, b_data_q;
  logic a_full_q, b_full_q;
  logic a_fill, a_drain, b_fill, b_drain;

  assign a_fill  = in_valid_i && in_ready_o;
  assign a_drain = a_full_q && !b_full_q;
  assign b_fill  = a_drain && !out_ready_i;
  assign b_drain = b_full_q && out_ready_i;

  assign in_ready_o  = !a_full_q || !b_full_q;
  assign out_valid_o = a_full_q || b_full_q;
  assign out_data_o  = b_full_q ? b_data_q : a_data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
    end else begin
      a_full_q <= a_fill || (a_full_q && !a_drain);
      b_full_q <= b_fill || (b_full_q && !b_drain);
    end
  end

  always_ff @(posedge clk_i) begin
    if (a_fill) a_data_q <= in_data_i;
    if (b_fill) b_data_q <= a_data_q;
  end

endmodule
