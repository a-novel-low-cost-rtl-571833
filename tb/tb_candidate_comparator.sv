// tb_candidate_comparator: random candidate moments (with deliberate ties); the
// output must be the first candidate with the largest M00 and its moments, one cycle
// after in_valid.
module tb_candidate_comparator;
  localparam int N = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [39:0] m00 [N];
  logic [39:0] m10 [N];
  logic [39:0] m01 [N];
  logic [39:0] cnt [N];
  logic [3:0] best;
  logic [39:0] best_m00, best_m10, best_m01, best_cnt;
  int checks = 0, failures = 0;

  candidate_comparator #(.N(N), .MW(40)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int e;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        m00[i] = $urandom_range(0, 20); m10[i] = $urandom; m01[i] = $urandom; cnt[i] = $urandom;
      end
      e = 0;
      for (int i = 1; i < N; i++) if (m00[i] > m00[e]) e = i;
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || best != e || best_m00 != m00[e] || best_m10 != m10[e] || best_m01 != m01[e] || best_cnt != cnt[e]) begin
        failures++; $display("best %0d exp %0d", best, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
