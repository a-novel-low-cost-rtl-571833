// tb_rgb_to_hsv: primaries, greys and random colours through the converter; the
// reference computes hue in real degrees (halved), saturation and value, and the
// outputs must agree within one level (the hardware truncates), with wrap-around of
// hue at 180 allowed, and with a latency of two cycles.
module tb_rgb_to_hsv;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_r = 0, in_g = 0, in_b = 0;
  logic out_valid, out_sof, out_eol;
  logic [7:0] out_h, out_s, out_v;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { real h, s; int v, t; } e_t;
  e_t q [$];

  rgb_to_hsv dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    e_t e; real dh;
    e = q.pop_front();
    dh = out_h - e.h;
    if (dh > 90) dh -= 180;
    if (dh < -90) dh += 180;
    checks++;
    if (dh > 1.01 || dh < -1.01 || out_s - e.s > 1.01 || e.s - out_s > 1.01 || out_v != e.v || cyc - e.t != 2) begin
      failures++; $display("hsv %0d %0d %0d exp %f %f %0d", out_h, out_s, out_v, e.h, e.s, e.v);
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      int r, g, b, mx, mn; real h, s;
      case (i)
        0: begin r = 255; g = 0; b = 0; end
        1: begin r = 0; g = 255; b = 0; end
        2: begin r = 0; g = 0; b = 255; end
        3: begin r = 90; g = 90; b = 90; end
        4: begin r = 255; g = 0; b = 1; end
        default: begin r = $urandom_range(0, 255); g = $urandom_range(0, 255); b = $urandom_range(0, 255); end
      endcase
      mx = r; if (g > mx) mx = g; if (b > mx) mx = b;
      mn = r; if (g < mn) mn = g; if (b < mn) mn = b;
      if (mx == mn) h = 0;
      else if (mx == r) h = 30.0 * (g - b) / (mx - mn);
      else if (mx == g) h = 60.0 + 30.0 * (b - r) / (mx - mn);
      else h = 120.0 + 30.0 * (r - g) / (mx - mn);
      if (h < 0) h += 180.0;
      s = (mx == 0) ? 0 : 255.0 * (mx - mn) / mx;
      @(negedge clk);
      in_valid = 1; in_r = r; in_g = g; in_b = b;
      q.push_back('{h, s, mx, cyc});
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
