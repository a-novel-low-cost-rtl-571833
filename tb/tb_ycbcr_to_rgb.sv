// tb_ycbcr_to_rgb: random and corner YCbCr values through the converter; each
// result is compared with the BT.709 studio-range formula evaluated in real
// arithmetic (allowed error one level, from the 8-bit coefficient rounding), and the
// latency must be two cycles.
module tb_ycbcr_to_rgb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_y = 0, in_cb = 0, in_cr = 0;
  logic out_valid, out_sof, out_eol;
  logic [7:0] out_r, out_g, out_b;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { int r, g, b, t; } e_t;
  e_t q [$];

  ycbcr_to_rgb dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int clip(real v);
    int i; i = $rtoi(v + 0.5 + 1000.0) - 1000;
    return i < 0 ? 0 : i > 255 ? 255 : i;
  endfunction
  function automatic bit near(int a, int b); return (a - b <= 1) && (b - a <= 1); endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    e_t e; e = q.pop_front();
    checks++;
    if (!near(out_r, e.r) || !near(out_g, e.g) || !near(out_b, e.b) || cyc - e.t != 2) begin
      failures++; $display("rgb %0d %0d %0d exp %0d %0d %0d lat %0d", out_r, out_g, out_b, e.r, e.g, e.b, cyc - e.t);
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int y, cb, cr; real yy;
      y = (i < 4) ? (i[0] ? 235 : 16) : $urandom_range(0, 255);
      cb = (i < 4) ? (i[1] ? 240 : 16) : $urandom_range(0, 255);
      cr = $urandom_range(0, 255);
      @(negedge clk);
      in_valid = 1; in_y = y; in_cb = cb; in_cr = cr;
      yy = 1.164 * (y - 16);
      q.push_back('{clip(yy + 1.793 * (cr - 128)), clip(yy - 0.213 * (cb - 128) - 0.533 * (cr - 128)),
                    clip(yy + 2.112 * (cb - 128)), cyc});
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
