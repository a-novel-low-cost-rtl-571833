// tb_camshift_pe: a random 64x48 ROI bit map is streamed through one thread for
// several candidate centres and box sizes; M00, M10, M01 and CNT must equal the
// weighted sums computed in the testbench (weights 4/2/1 by distance ring, zero
// outside the doubled window).
module tb_camshift_pe;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, pix_valid = 0, pix_roi = 0;
  logic [CW-1:0] pix_x = 0, pix_y = 0, cx = 0, cy = 0, hw = 0, hh = 0;
  logic [39:0] m00, m10, m01, cnt;
  int checks = 0, failures = 0;

  camshift_pe #(.MW(40)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ad(int a, int b); return a > b ? a - b : b - a; endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      longint e00, e10, e01, ec;
      e00 = 0; e10 = 0; e01 = 0; ec = 0;
      @(negedge clk);
      cx = $urandom_range(0, 63); cy = $urandom_range(0, 47); hw = $urandom_range(1, 12); hh = $urandom_range(1, 12);
      clear = 1; @(negedge clk); clear = 0;
      for (int y = 0; y < 48; y++) for (int x = 0; x < 64; x++) begin
        int w, dx, dy; bit b;
        b = ($urandom_range(0, 2) == 0);
        dx = ad(x, cx); dy = ad(y, cy);
        w = !b ? 0 : (dx <= hw / 2 && dy <= hh / 2) ? 4 : (dx <= hw && dy <= hh) ? 2 : (dx <= 2 * hw && dy <= 2 * hh) ? 1 : 0;
        e00 += w; e10 += w * x; e01 += w * y; if (w != 0) ec++;
        pix_valid = 1; pix_x = x; pix_y = y; pix_roi = b;
        @(negedge clk);
        pix_valid = ($urandom_range(0, 3) == 0);   // pixels with valid low must not count
        pix_roi = 1; pix_x = cx; pix_y = cy;
        if (pix_valid) begin pix_valid = 0; @(negedge clk); end
      end
      pix_valid = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (m00 != e00 || m10 != e10 || m01 != e01 || cnt != ec) begin
        failures++; $display("m00 %0d/%0d m10 %0d/%0d m01 %0d/%0d cnt %0d/%0d", m00, e00, m10, e10, m01, e01, cnt, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
