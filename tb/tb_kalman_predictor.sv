// tb_kalman_predictor: an object moving at constant velocity (+7, -3 pixels per
// frame) is measured each frame; the prediction must follow the alpha-beta
// recursion computed in the testbench in real arithmetic (within one pixel) and,
// after settling, predict the next position within one pixel. Then init resets it.
module tb_kalman_predictor;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, update = 0;
  logic [CW-1:0] init_x = 0, init_y = 0, meas_x = 0, meas_y = 0, pred_x, pred_y;
  int checks = 0, failures = 0;

  kalman_predictor dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit near(int a, real b); return (a - b <= 1.01) && (b - a <= 1.01); endfunction

  initial begin
    real p [2], v [2];
    int zx, zy;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); init = 1; init_x = 400; init_y = 300; @(negedge clk); init = 0;
    p[0] = 400; p[1] = 300; v[0] = 0; v[1] = 0;
    for (int f = 1; f <= 30; f++) begin
      real r;
      zx = 400 + 7 * f; zy = 300 - 3 * f;
      checks++;
      if (!near(pred_x, p[0] + v[0]) || !near(pred_y, p[1] + v[1])) begin
        failures++; $display("f%0d pred %0d,%0d exp %f,%f", f, pred_x, pred_y, p[0] + v[0], p[1] + v[1]);
      end
      if (f > 20) begin
        checks++;
        if (!near(pred_x, zx) || !near(pred_y, zy)) begin failures++; $display("not converged"); end
      end
      @(negedge clk); update = 1; meas_x = zx; meas_y = zy;
      @(negedge clk); update = 0;
      r = zx - (p[0] + v[0]); p[0] = p[0] + v[0] + r / 2; v[0] = v[0] + r / 4;
      r = zy - (p[1] + v[1]); p[1] = p[1] + v[1] + r / 2; v[1] = v[1] + r / 4;
    end
    @(negedge clk); init = 1; init_x = 10; init_y = 20; @(negedge clk); init = 0;
    checks++; if (pred_x != 10 || pred_y != 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
