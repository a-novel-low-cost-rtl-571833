// tb_hsv_mean: five 24x12 frames of random HSV with a different box each frame;
// after each frame the means must equal the testbench's own integer averages of the
// pixels inside the box, and `mean_valid` must pulse. The last two frames enable
// `sel_en` with a random `in_sel`, so only selected pixels may count. A last check
// uses `load`.
module tb_hsv_mean;
  import tracker_pkg::*;
  localparam int W = 24, H = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0, load = 0, in_sel = 0, sel_en = 0;
  logic [7:0] in_h = 0, in_s = 0, in_v = 0, load_h = 0, load_s = 0, load_v = 0;
  box_t box = '0;
  logic [7:0] mean_h, mean_s, mean_v;
  logic mean_valid;
  int checks = 0, failures = 0, pulses = 0;

  hsv_mean #(.H_ACT(W), .V_ACT(H)) dut (.*);
  always @(posedge clk) if (rst_n && mean_valid) pulses++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      int sh, ss, sv, n;
      sh = 0; ss = 0; sv = 0; n = 0;
      box.x0 = $urandom_range(0, 10); box.x1 = box.x0 + $urandom_range(0, 12);
      box.y0 = $urandom_range(0, 5);  box.y1 = box.y0 + $urandom_range(3, 6);
      sel_en = (f >= 3);
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_valid = 1; in_sof = (x == 0 && y == 0); in_eol = (x == W - 1);
          in_h = $urandom; in_s = $urandom; in_v = $urandom; in_sel = $urandom_range(0, 1);
          if (x >= box.x0 && x <= box.x1 && y >= box.y0 && y <= box.y1 && (in_sel || !sel_en)) begin
            sh += in_h; ss += in_s; sv += in_v; n++;
          end
        end
        @(negedge clk); in_valid = 0; in_sof = 0; in_eol = 0;
      end
      repeat (300) @(negedge clk);
      checks++;
      if (mean_h != sh / n || mean_s != ss / n || mean_v != sv / n || pulses != f + 1) begin
        failures++; $display("means %0d %0d %0d exp %0d %0d %0d", mean_h, mean_s, mean_v, sh / n, ss / n, sv / n);
      end
    end
    @(negedge clk); load = 1; load_h = 11; load_s = 22; load_v = 33;
    @(negedge clk); load = 0;
    checks++; if (mean_h != 11 || mean_s != 22 || mean_v != 33) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
