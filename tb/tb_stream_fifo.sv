// Test of the stream_fifo: random valid and ready against a queue model. Every cycle it checks that the
// output shows the oldest entry, that valid and ready follow the fill level (at most 2 entries),
// that a word written in one cycle is visible in the next, and that data leave in order. A run
// with valid and ready held high checks one transfer per cycle.
// Depth 2 is the paper's; no fall-through is this design's choice.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [15:0] q[$];
  int unsigned checks = 0, failures = 0, moved = 0;

  stream_fifo #(.Depth(2), .T(logic [15:0])) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  task automatic step(bit rnd);
    bit pop, push;
    @(negedge clk);
    in_valid  = rnd ? ($urandom_range(2) != 0) : 1'b1;
    in_data   = 16'($urandom);
    out_ready = rnd ? ($urandom_range(2) != 0) : 1'b1;
    #1;
    checks++;
    if (out_valid != (q.size() > 0) || in_ready != (q.size() < 2) ||
        (out_valid && out_data != q[0])) begin
      failures++;
      $display("size %0d: valid %0d ready %0d data %h exp %h", q.size(), out_valid, in_ready,
               out_data, (q.size() > 0) ? q[0] : 16'h0);
    end
    pop = out_valid && out_ready;
    push = in_valid && in_ready;
    @(posedge clk);
    if (pop) begin void'(q.pop_front()); moved++; end
    if (push) q.push_back(in_data);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) step(1'b1);
    // Full throughput: after filling, one transfer per cycle for 100 cycles.
    repeat (4) step(1'b0);
    moved = 0;
    repeat (100) step(1'b0);
    checks++;
    if (moved != 100) begin failures++; $display("throughput: %0d of 100", moved); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
