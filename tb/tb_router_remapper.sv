// Test of the router remapper with q = 4. Every cycle it checks that the mapping is a
// permutation (each output shows exactly one input, with its data and valid), that each input's
// ready is the ready of the output it is mapped to, and, over the run, that every input has been
// sent to every output at least once (the load is spread). The mapping must not stay fixed.
// The paper asks for a seeded pseudorandom mapping; the checks accept any permutation sequence.
module tb_router_remapper;
  localparam int unsigned Q = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [Q-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [7:0]   in_data [Q], out_data [Q];
  int unsigned  seen [Q][Q];
  int unsigned  checks = 0, failures = 0, changes = 0;
  int           prev_map0 = -1;

  router_remapper #(.NumPorts(Q), .T(logic [7:0]), .Seed(8'h3C)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  initial begin
    for (int i = 0; i < Q; i++) for (int o = 0; o < Q; o++) seen[i][o] = 0;
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < Q; i++) in_data[i] = 8'(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (500) begin
      @(negedge clk);
      in_valid  = Q'($urandom);
      out_ready = Q'($urandom);
      for (int i = 0; i < Q; i++) in_data[i] = {4'($urandom), 4'(i)};
      #1;
      begin
        automatic logic [Q-1:0] used = '0;
        for (int o = 0; o < Q; o++) begin
          automatic int src = int'(out_data[o][3:0]);
          checks++;
          if (src >= Q || used[src] || out_data[o] != in_data[src] || out_valid[o] != in_valid[src]
              || in_ready[src] != out_ready[o]) begin
            failures++;
            $display("output %0d: data %h valid %0d, not a permutation of the inputs", o, out_data[o], out_valid[o]);
          end else begin
            used[src] = 1'b1;
            seen[src][o]++;
            if (o == 0) begin
              if (prev_map0 >= 0 && prev_map0 != src) changes++;
              prev_map0 = src;
            end
          end
        end
      end
    end
    for (int i = 0; i < Q; i++) for (int o = 0; o < Q; o++) begin
      checks++;
      if (seen[i][o] == 0) begin failures++; $display("input %0d never reached output %0d", i, o); end
    end
    checks++;
    if (changes < 100) begin failures++; $display("mapping changed only %0d times", changes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
