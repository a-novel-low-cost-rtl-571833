// tb_roi_classifier: random HSV pixels (many near the means) with random means,
// thresholds and weights summing to 256; the expected bit is Eq. 1-3 evaluated in the
// testbench with real weights. Pixels whose weighted distance lies within one level
// of the threshold are skipped (fixed-point rounding). Latency must be two cycles.
module tb_roi_classifier;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_h = 0, in_s = 0, in_v = 0, mean_h = 0, mean_s = 0, mean_v = 0;
  logic [7:0] thr_h = 0, thr_s = 0, thr_v = 0, thr_a = 0;
  logic [8:0] alpha = 0, beta = 0, gamma = 0;
  logic out_valid, out_sof, out_eol, out_roi;
  int checks = 0, failures = 0, cyc = 0, ones = 0;
  typedef struct { bit roi, skip; int t; } e_t;
  e_t q [$];

  roi_classifier dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    e_t e; e = q.pop_front();
    if (!e.skip) begin
      checks++;
      if (out_roi !== e.roi || cyc - e.t != 2) begin failures++; $display("roi %0d exp %0d", out_roi, e.roi); end
      if (e.roi) ones++;
    end
  end

  function automatic int ad(int a, int b); return a > b ? a - b : b - a; endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int blk = 0; blk < 8; blk++) begin
      @(negedge clk);
      in_valid = 0;
      mean_h = $urandom; mean_s = $urandom; mean_v = $urandom;
      thr_h = $urandom_range(5, 60); thr_s = $urandom_range(5, 60); thr_v = $urandom_range(5, 60);
      thr_a = $urandom_range(5, 40);
      alpha = $urandom_range(0, 256); beta = $urandom_range(0, 256 - alpha); gamma = 256 - alpha - beta;
      @(negedge clk); @(negedge clk);
      for (int i = 0; i < 200; i++) begin
        int h, s, v; real w; bit r;
        h = (mean_h + $urandom_range(0, 80) - 40) & 255;
        s = (mean_s + $urandom_range(0, 80) - 40) & 255;
        v = (mean_v + $urandom_range(0, 80) - 40) & 255;
        w = (alpha * ad(h, mean_h) + beta * ad(s, mean_s) + gamma * ad(v, mean_v)) / 256.0;
        r = ad(h, mean_h) < thr_h && ad(s, mean_s) < thr_s && ad(v, mean_v) < thr_v && w < thr_a;
        @(negedge clk);
        in_valid = 1; in_h = h; in_s = s; in_v = v;
        q.push_back('{r, (w > thr_a - 1.0) && (w < thr_a + 1.0), cyc});
      end
      @(negedge clk); in_valid = 0;
      repeat (4) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++; if (ones < 20) begin failures++; $display("too few ROI pixels %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
