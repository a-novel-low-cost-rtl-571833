// tb_video_timing_gen: two frames at the default 1080p60 timing. Counts per frame
// must be: 2,475,000 clocks (2200 x 1125), 1920 x 1080 data-enable clocks, one sof,
// 1080 eol, one vblank_start after the last active line, hsync 44 clocks per line
// starting 88 after active video, and vsync 5 lines long starting 4 lines after it.
module tb_video_timing_gen;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic de, hsync, vsync, sof, eol, vblank_start;
  logic [CW-1:0] x, y;
  int checks = 0, failures = 0;
  longint cyc = 0, n_de = 0, n_eol = 0, n_hs = 0, n_vs = 0, t_sof = -1, period = 0, n_vbs = 0;
  int hs_start_bad = 0, vbs_bad = 0;

  video_timing_gen dut (.*);
  initial begin
    repeat (5100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (sof) begin
      if (t_sof >= 0) begin
        checks++;
        if (cyc - t_sof != 2475000 || n_de != 1920 * 1080 || n_eol != 1080 || n_hs != 44 * 1125 ||
            n_vs != 5 * 2200 || n_vbs != 1) begin
          failures++;
          $display("period %0d de %0d eol %0d hs %0d vs %0d vbs %0d", cyc - t_sof, n_de, n_eol, n_hs, n_vs, n_vbs);
        end
        period++;
      end
      t_sof = cyc; n_de = 0; n_eol = 0; n_hs = 0; n_vs = 0; n_vbs = 0;
    end
    if (de) n_de++;
    if (eol) n_eol++;
    if (hsync) n_hs++;
    if (vsync) n_vs++;
    if (vblank_start) begin n_vbs++; if (y != 1080 || x != 0) vbs_bad++; end
    if (hsync && x == 2008 && $past(x) != 2007) hs_start_bad++;
    if (hsync && !$past(hsync) && x != 2008) hs_start_bad++;
    if (vsync && !$past(vsync) && !(y == 1084 && x == 0)) hs_start_bad++;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (period == 2);
    checks++; if (hs_start_bad != 0 || vbs_bad != 0) begin failures++; $display("sync edges %0d %0d", hs_start_bad, vbs_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
