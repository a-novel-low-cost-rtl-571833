// tb_camshift_tracker: the tracker on a 256x128 ROI frame (search region 128x128,
// 128-pixel words), served directly by the testbench, which answers each read burst
// from its own bit map. Scenes: a filled 20x20 square near the previous box, which
// the result must centre on within 4 pixels with a side of 19..21 (one search is a
// single weighted mean-shift step from the best of nine positions, so a residual
// pull towards the candidate's centre remains); a square moved by 8 pixels; a 30x30
// square, for which the box must grow and move towards it; and an empty frame (lost, the
// previous box returned). The search must finish within the scan-time bound.
module tb_camshift_tracker;
  import tracker_pkg::*;
  localparam int W = 256, H = 128, SW = 128, SH = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, req, gnt = 0, burst_done = 0, rvalid = 0;
  logic [AW-1:0] frame_base = 24'h100;
  box_t prev_box = '0, result_box;
  mem_req_t req_info;
  logic [DW-1:0] rdata = 0;
  logic busy, result_valid, lost;
  logic [3:0] best_cand;
  logic [39:0] best_m00;
  int checks = 0, failures = 0;
  bit frame [H][W];

  camshift_tracker #(.H_ACT(W), .V_ACT(H), .SW(SW), .SH(SH), .GRID(3), .MIN_BOX(8), .MAX_BOX(48)) dut (.*);
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory server: word address a -> row (a-base)/2, word (a-base)%2
  initial begin
    forever begin
      @(negedge clk);
      if (req) begin
        int a;
        gnt = 1; a = int'(req_info.addr) - 'h100;
        @(negedge clk); gnt = 0;
        repeat (5) @(negedge clk);
        for (int k = 0; k < int'(req_info.len); k++) begin
          for (int i = 0; i < DW; i++) rdata[i] = frame[(a + k) / 2][((a + k) % 2) * DW + i];
          rvalid = 1; @(negedge clk);
        end
        rvalid = 0; burst_done = 1; @(negedge clk); burst_done = 0;
      end
    end
  end

  task automatic scene(input int ox, input int oy, input int side, input box_t pb,
                       input bit expect_lost, input bit grow);
    int cyc, cx, cy, rs;
    foreach (frame[y, x]) frame[y][x] = (side > 0 && x >= ox && x < ox + side && y >= oy && y < oy + side);
    @(negedge clk); prev_box = pb; start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!result_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > SH * (SW / DW) * (DW + 2) + SH * 12 + 300) begin failures++; $display("slow: %0d cycles", cyc); end
    checks++;
    if (expect_lost) begin
      if (!lost || result_box != pb) begin failures++; $display("lost case wrong"); end
    end else begin
      cx = (result_box.x0 + result_box.x1) / 2; cy = (result_box.y0 + result_box.y1) / 2;
      rs = result_box.x1 - result_box.x0 + 1;
      if (grow ? (lost || rs <= int'(pb.x1 - pb.x0 + 1) || rs > side + 1 || cx < ox + side / 2 - 7 || cy < oy + side / 2 - 7)
               : (lost || cx < ox + side / 2 - 4 || cx > ox + side / 2 + 4 || cy < oy + side / 2 - 4 ||
                  cy > oy + side / 2 + 4 || rs < side - 1 || rs > side + 1)) begin
        failures++;
        $display("box %0d,%0d-%0d,%0d for object at %0d,%0d side %0d", result_box.x0, result_box.y0,
                 result_box.x1, result_box.y1, ox, oy, side);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    scene(100, 50, 20, '{x0: 104, y0: 53, x1: 123, y1: 72}, 0, 0);
    scene(108, 58, 20, result_box, 0, 0);
    scene(105, 55, 30, result_box, 0, 1);
    scene(0, 0, 0, result_box, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
