// tb_kalman_correction: random Camshift boxes, previous boxes and predictions; the
// final box must be the Camshift box when width and height changed by at most the
// threshold and the object is not lost, and otherwise the previous size centred on
// the prediction (clipped to the frame). Both outcomes must occur.
module tb_kalman_correction;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, cs_lost = 0, out_valid, used_kalman;
  box_t cs_box = '0, prev_box = '0, final_box, kalman_box;
  logic [CW-1:0] pred_x = 0, pred_y = 0, size_thr = 0, final_cx, final_cy;
  int checks = 0, failures = 0, nk = 0, nc = 0;

  kalman_correction dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ad(int a, int b); return a > b ? a - b : b - a; endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int cw, ch, pw, ph, x0, y0; bit k; box_t e;
      @(negedge clk);
      cw = $urandom_range(10, 100); ch = $urandom_range(10, 100);
      pw = cw + $urandom_range(0, 40) - 20; ph = ch + $urandom_range(0, 40) - 20;
      if (pw < 5) pw = 5; if (ph < 5) ph = 5;
      cs_box.x0 = $urandom_range(0, 1700); cs_box.y0 = $urandom_range(0, 900);
      cs_box.x1 = cs_box.x0 + cw - 1; cs_box.y1 = cs_box.y0 + ch - 1;
      prev_box.x0 = $urandom_range(0, 1700); prev_box.y0 = $urandom_range(0, 900);
      prev_box.x1 = prev_box.x0 + pw - 1; prev_box.y1 = prev_box.y0 + ph - 1;
      pred_x = $urandom_range(0, 1919); pred_y = $urandom_range(0, 1079);
      size_thr = $urandom_range(2, 15); cs_lost = ($urandom_range(0, 9) == 0);
      k = cs_lost || ad(cw, pw) > size_thr || ad(ch, ph) > size_thr;
      x0 = pred_x - pw / 2; y0 = pred_y - ph / 2;
      if (x0 < 0) x0 = 0; if (y0 < 0) y0 = 0;
      if (x0 + pw > 1920) x0 = 1920 - pw; if (y0 + ph > 1080) y0 = 1080 - ph;
      e = k ? box_t'({12'(x0), 12'(y0), 12'(x0 + pw - 1), 12'(y0 + ph - 1)}) : cs_box;
      in_valid = 1; @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || used_kalman != k || final_box != e || final_cx != (e.x0 + e.x1) / 2) begin
        failures++; $display("t%0d kalman %0d exp %0d", t, used_kalman, k);
      end
      if (k) nk++; else nc++;
    end
    checks++; if (nk == 0 || nc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
