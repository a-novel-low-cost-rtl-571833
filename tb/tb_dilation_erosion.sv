// tb_dilation_erosion: two random-noise 16x10 frames with a solid block through the
// filter (line length 16). The reference computes, in the testbench, the 3x3 maximum
// and then the 3x3 minimum over the causal window (rows y-2..y, columns x-2..x,
// clipped at the frame edge) for every channel, and every output pixel must match.
module tb_dilation_erosion;
  localparam int W = 16, H = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [23:0] in_rgb = 0;
  logic out_valid, out_sof, out_eol;
  logic [23:0] out_rgb;
  int checks = 0, failures = 0;
  logic [23:0] img [H][W];
  logic [23:0] d [H][W];
  logic [23:0] e [H][W];
  logic [23:0] q [$];

  dilation_erosion #(.H_ACT(W)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [23:0] win(input logic [23:0] a [H][W], input int x, input int y, input bit mx);
    logic [23:0] r;
    r = a[y][x];
    for (int ch = 0; ch < 3; ch++)
      for (int dy = 0; dy <= 2; dy++)
        for (int dx = 0; dx <= 2; dx++)
          if (y - dy >= 0 && x - dx >= 0) begin
            logic [7:0] v; v = a[y-dy][x-dx][ch*8 +: 8];
            if (mx ? (v > r[ch*8 +: 8]) : (v < r[ch*8 +: 8])) r[ch*8 +: 8] = v;
          end
    return r;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [23:0] x; x = q.pop_front();
    checks++;
    if (out_rgb !== x) begin failures++; if (failures < 10) $display("got %h exp %h", out_rgb, x); end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[y][x] = (x >= 4 && x < 10 && y >= 3 && y < 8 && $urandom_range(0, 5) != 0) ? 24'hE0_30_40 : 24'($urandom);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) d[y][x] = win(img, x, y, 1);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin e[y][x] = win(d, x, y, 0); q.push_back(e[y][x]); end
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_valid = 1; in_sof = (x == 0 && y == 0); in_eol = (x == W - 1); in_rgb = img[y][x];
        end
        @(negedge clk); in_valid = 0; in_sof = 0; in_eol = 0;
        repeat (3) @(negedge clk);
      end
    end
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
