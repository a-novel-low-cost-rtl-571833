// tb_position_joiner: two 40x30 frames of random video with different boxes; every
// output pixel must be the box colour on the 3-pixel outline inside the box and the
// input pixel elsewhere, one cycle later with the side-band delayed alike. A third
// frame with enable low must pass unchanged, and every input pixel must come out.
module tb_position_joiner;
  import tracker_pkg::*;
  localparam int W = 40, H = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 1, in_valid = 0, in_sof = 0, in_eol = 0, out_valid;
  box_t box = '0;
  logic [23:0] in_rgb = 0, out_rgb;
  logic [2:0] in_side = 0, out_side;
  int checks = 0, failures = 0, drawn = 0, outs = 0;
  logic [26:0] q [$];

  position_joiner #(.THICK(3), .COLOR(24'hFF00FF), .SIDE(3)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [26:0] e; e = q.pop_front();
    checks++; outs++;
    if ({out_side, out_rgb} !== e) begin failures++; $display("got %h exp %h", {out_side, out_rgb}, e); end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      box.x0 = $urandom_range(0, 15); box.x1 = box.x0 + $urandom_range(8, 20);
      box.y0 = $urandom_range(0, 10); box.y1 = box.y0 + $urandom_range(8, 15);
      enable = (f != 2);
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          bit on;
          @(negedge clk);
          in_valid = 1; in_sof = (x == 0 && y == 0); in_eol = (x == W - 1);
          in_rgb = $urandom; in_side = $urandom;
          on = enable && x >= box.x0 && x <= box.x1 && y >= box.y0 && y <= box.y1 &&
               !(x >= box.x0 + 3 && x + 3 <= box.x1 && y >= box.y0 + 3 && y + 3 <= box.y1);
          if (on) drawn++;
          q.push_back({in_side, on ? 24'hFF00FF : in_rgb});
        end
        @(negedge clk); in_valid = 0; in_sof = 0; in_eol = 0;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++; if (drawn == 0) failures++;
    checks++; if (outs != 3 * W * H || q.size() != 0) begin failures++; $display("%0d output pixels", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
