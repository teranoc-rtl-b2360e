// Test of the SPM bank: random loads and stores with random byte enables and random stalls of
// the response, against a memory model. It checks that the response comes exactly one cycle
// after the request is accepted, holds the word as it was before a store (read first) with the
// request's metadata, stays while stalled, and that the bank takes no request while its response
// is stalled. The model memory is first filled by full-word stores.
// Single-cycle access is the paper's; read-first and store acknowledgments are this design's choice.
module tb_spm_bank;
  localparam int unsigned W = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        req_valid, req_ready, req_wen, rsp_valid, rsp_ready;
  logic [7:0]  row, meta_in, meta_out;
  logic [3:0]  be;
  logic [31:0] wdata, rdata;
  logic [31:0] model [W];
  logic        pend, pend_known;
  bit          known [W];
  logic [31:0] pend_data;
  logic [7:0]  pend_meta;
  int unsigned checks = 0, failures = 0;

  spm_bank #(.NumWords(W), .meta_t(logic [7:0])) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_row_i(row),
    .req_wen_i(req_wen), .req_be_i(be), .req_wdata_i(wdata), .req_meta_i(meta_in),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_rdata_o(rdata), .rsp_meta_o(meta_out));

  task automatic cycle_op(bit v, bit we, logic [7:0] r, logic [3:0] b, logic [31:0] d, bit rr);
    bit taken, acc;
    @(negedge clk);
    req_valid = v; req_wen = we; row = r; be = b; wdata = d; meta_in = 8'($urandom); rsp_ready = rr;
    #1;
    checks++;
    if (rsp_valid != pend || (pend && ((pend_known && rdata != pend_data) || meta_out != pend_meta)) ||
        req_ready != (!pend || rsp_ready)) begin
      failures++;
      $display("rsp valid %0d (exp %0d) data %h (exp %h) meta %h (exp %h) ready %0d", rsp_valid, pend,
               rdata, pend_data, meta_out, pend_meta, req_ready);
    end
    taken = pend && rsp_ready;
    acc = req_valid && req_ready;
    @(posedge clk);
    if (taken) pend = 1'b0;
    if (acc) begin
      pend = 1'b1;
      pend_known = known[row];
      known[row] = 1'b1;
      pend_data = model[row];
      pend_meta = meta_in;
      if (req_wen) for (int k = 0; k < 4; k++) if (be[k]) model[row][8*k +: 8] = wdata[8*k +: 8];
    end
  endtask

  initial begin
    req_valid = 0; rsp_ready = 1; pend = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < W; i++) begin
      known[i] = 1'b0;
      cycle_op(1, 1, 8'(i), 4'hF, $urandom, 1);
    end
    repeat (4000) begin
      automatic bit we = $urandom_range(2) == 0;
      cycle_op($urandom_range(3) != 0, we, 8'($urandom), 4'($urandom), $urandom, $urandom_range(3) != 0);
    end
    cycle_op(0, 0, 0, 0, 0, 1);
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
