// Test of the round-robin arbiter: random requests and random use of the grant, compared every
// cycle with a reference model of the priority pointer.
// Round robin is the paper's rule; the exact pointer update is this design's choice.
module tb_rr_arbiter;
  localparam int unsigned N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, gnt;
  logic [2:0]   idx;
  logic         valid, advance;
  int unsigned  checks = 0, failures = 0, ptr = 0;

  rr_arbiter #(.NumReq(N)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .advance_i(advance),
                                .gnt_o(gnt), .idx_o(idx), .valid_o(valid));

  initial begin
    req = '0; advance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      req = N'($urandom);
      advance = $urandom_range(3) != 0;
      #1;
      begin
        automatic int exp_idx = -1;
        for (int o = 0; o < N; o++) if (exp_idx < 0 && req[(ptr + o) % N]) exp_idx = (ptr + o) % N;
        checks++;
        if ((exp_idx < 0) ? (valid || gnt != '0)
                          : (!valid || idx != exp_idx || gnt != (N'(1) << exp_idx))) begin
          failures++;
          $display("req %b ptr %0d: got valid %0d idx %0d gnt %b, expected %0d", req, ptr, valid, idx, gnt, exp_idx);
        end
        if (exp_idx >= 0 && advance) ptr = (exp_idx + 1) % N;
      end
    end
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
