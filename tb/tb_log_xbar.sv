// Test of the crossbar with 5 initiators and 3 targets under random traffic and random target
// readiness. Each initiator sends numbered words to random targets and holds each until it is
// taken. Every cycle the test checks, against its own model: which initiator each target shows
// (round-robin from a per-target pointer), that the payload and out_src_o belong to it, that an
// initiator is ready exactly when it won and its target is ready, and that each initiator's words
// arrive in order, in the same cycle they are offered.
// The round-robin rule and single-cycle crossing are the paper's; the sizes are chosen for the test.
module tb_log_xbar;
  localparam int unsigned NI = 5, NO = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NI-1:0] in_valid, in_ready;
  logic [NO-1:0] out_valid, out_ready;
  logic [15:0]   in_data [NI], out_data [NO];
  logic [1:0]    in_sel [NI];
  logic [2:0]    out_src [NO];
  int unsigned   seq [NI], ptr [NO];
  logic [NI-1:0] acc;
  int unsigned   checks = 0, failures = 0, delivered = 0;

  log_xbar #(.NumIn(NI), .NumOut(NO), .T(logic [15:0])) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .in_sel_i(in_sel), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .out_src_o(out_src));

  initial begin
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) begin seq[i] = 0; in_sel[i] = 0; in_data[i] = 0; end
    for (int o = 0; o < NO; o++) ptr[o] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) begin
        if (!in_valid[i] && $urandom_range(1)) begin
          in_valid[i] = 1'b1;
          in_sel[i]   = 2'($urandom_range(NO - 1));
          in_data[i]  = {3'(i), 13'(seq[i])};
        end
      end
      out_ready = NO'($urandom);
      #1;
      for (int o = 0; o < NO; o++) begin
        automatic int w = -1;
        for (int k = 0; k < NI; k++) begin
          automatic int c = (ptr[o] + k) % NI;
          if (w < 0 && in_valid[c] && in_sel[c] == o) w = c;
        end
        checks++;
        if (w < 0 ? out_valid[o] : (!out_valid[o] || out_src[o] != w || out_data[o] != in_data[w])) begin
          failures++;
          $display("target %0d: valid %0d src %0d data %h, expected initiator %0d", o, out_valid[o],
                   out_src[o], out_data[o], w);
        end
        for (int i = 0; i < NI; i++) if (in_valid[i] && in_sel[i] == o) begin
          checks++;
          if (in_ready[i] != (i == w && out_ready[o])) begin
            failures++;
            $display("initiator %0d: ready %0d wrong", i, in_ready[i]);
          end
        end
        if (w >= 0 && out_ready[o]) ptr[o] = (w + 1) % NI;
      end
      acc = in_valid & in_ready;
      @(posedge clk);
      #1;
      for (int i = 0; i < NI; i++) if (acc[i]) begin
        in_valid[i] = 1'b0;
        seq[i]++;
        delivered++;
      end
    end
    checks++;
    if (delivered < 1000) begin failures++; $display("only %0d delivered", delivered); end
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
