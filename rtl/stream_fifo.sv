// Valid/ready FIFO, used as the input and output buffers of the mesh routers.
//
// Depth entries of type T in a circular buffer. Data written in one cycle is visible at the
// output in the next (no fall-through), so a FIFO adds one cycle of latency; with two entries it
// sustains one transfer per cycle. in_ready_o depends only on the fill level (a register), which
// cuts the ready path. The router buffers have two entries, as in the implemented cluster.
//
// From the TeraNoC paper: FIFO buffers of depth 2 at router inputs and outputs. Design choice: no
// fall-through path, so each FIFO is one cycle of latency.
module stream_fifo #(
  parameter int unsigned Depth = 2,
  parameter type         T     = logic [31:0]
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

  localparam int unsigned PtrWidth = (Depth > 1) ? $clog2(Depth) : 1;

  T                    mem_q [Depth];
  logic [PtrWidth-1:0] wr_ptr_q, rd_ptr_q;
  logic [PtrWidth:0]   count_q;
  logic                push, pop;

  assign in_ready_o  = (count_q < (PtrWidth+1)'(Depth));
  assign out_valid_o = (count_q != '0);
  assign out_data_o  = mem_q[rd_ptr_q];
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      count_q  <= '0;
    end else begin
      if (push) wr_ptr_q <= (wr_ptr_q == PtrWidth'(Depth - 1)) ? '0 : wr_ptr_q + 1'b1;
      if (pop)  rd_ptr_q <= (rd_ptr_q == PtrWidth'(Depth - 1)) ? '0 : rd_ptr_q + 1'b1;
      count_q <= count_q + (PtrWidth+1)'(push) - (PtrWidth+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= in_data_i;
  end

endmodule
