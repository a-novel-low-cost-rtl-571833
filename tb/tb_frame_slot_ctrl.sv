// tb_frame_slot_ctrl: ten frame starts; after each, the write slot must be n mod 4,
// the tracking slot (n-1) mod 4 and the display slot (n-2) mod 4, all different,
// and the base addresses must follow the address map.
module tb_frame_slot_ctrl;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start = 0;
  logic [1:0] wr_slot, trk_slot, disp_slot;
  logic [AW-1:0] rgb_wr_base, roi_wr_base, roi_trk_base, rgb_disp_base;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;

  frame_slot_ctrl dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 1; n <= 10; n++) begin
      @(negedge clk); frame_start = 1;
      @(negedge clk); frame_start = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (wr_slot != n % 4 || trk_slot != (n + 3) % 4 || disp_slot != (n + 2) % 4 || frame_count != n ||
          rgb_wr_base != AW'((n % 4) * 'h80000) || roi_wr_base != AW'('h200000 + (n % 4) * 'h4000) ||
          roi_trk_base != AW'('h200000 + ((n + 3) % 4) * 'h4000) || rgb_disp_base != AW'(((n + 2) % 4) * 'h80000)) begin
        failures++; $display("n=%0d slots %0d %0d %0d", n, wr_slot, trk_slot, disp_slot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
