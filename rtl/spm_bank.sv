// One L1 scratchpad (SPM) bank: 1 KiB as 256 words of 32 bits, single-cycle access.
//
// A request accepted in cycle t reads (and, for a store, writes with byte enables) the word at
// req_row_i; the response is valid in cycle t+1 and holds the word as it was before the write
// (read-first) together with the request's metadata (meta_t: who to answer and how). The response
// sits in a register until it is taken, and the bank accepts a new request only when that register
// is free or being emptied in the same cycle, so a stalled response path back-pressures the bank
// instead of losing data. The memory array models the SRAM macro of the implemented cluster and
// is not reset; the response register is.
//
// From the TeraNoC paper: 1 KiB banks with single-cycle access. Design choices: stores are
// acknowledged with a response, the bank is read-first, and it stalls while its response waits.
module spm_bank #(
  parameter int unsigned NumWords = 256,
  parameter type         meta_t   = logic [7:0],
  localparam int unsigned RowWidth = $clog2(NumWords)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                req_valid_i,
  output logic                req_ready_o,
  input  logic [RowWidth-1:0] req_row_i,
  input  logic                req_wen_i,
  input  logic [3:0]          req_be_i,
  input  logic [31:0]         req_wdata_i,
  input  meta_t               req_meta_i,
  output logic                rsp_valid_o,
  input  logic                rsp_ready_i,
  output logic [31:0]         rsp_rdata_o,
  output meta_t               rsp_meta_o
);

  logic [31:0] mem_q [NumWords];
  logic        rsp_valid_q;
  logic [31:0] rdata_q;
  meta_t       meta_q;
  logic        accept;

  assign req_ready_o = !rsp_valid_q || rsp_ready_i;
  assign accept      = req_valid_i && req_ready_o;
  assign rsp_valid_o = rsp_valid_q;
  assign rsp_rdata_o = rdata_q;
  assign rsp_meta_o  = meta_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_q <= 1'b0;
    end else if (accept) begin
      rsp_valid_q <= 1'b1;
    end else if (rsp_ready_i) begin
      rsp_valid_q <= 1'b0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (accept) begin
      rdata_q <= mem_q[req_row_i];
      meta_q  <= req_meta_i;
      if (req_wen_i) begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (req_be_i[b]) mem_q[req_row_i][8*b +: 8] <= req_wdata_i[8*b +: 8];
        end
      end
    end
  end

endmodule
