// video_timing_gen: display timing of the frame information output (the HDMI side).
//
// Free-running counters over H_TOTAL x V_TOTAL clocks generate data enable, the
// horizontal and vertical syncs (active high), the pixel position and three frame
// markers: `sof` and `eol` in the active area like the video streams, and
// `vblank_start`, one pulse when the last active line has ended, which lets the
// frame-buffer reader start fetching the next frame during vertical blanking. The
// defaults are the CEA-861 1080p60 timing, 2200 x 1125 clocks at 148.5 MHz, the
// paper's system clock.
module video_timing_gen
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT   = 1920,
  parameter int unsigned H_FP    = 88,
  parameter int unsigned H_SYNC  = 44,
  parameter int unsigned H_TOTAL = 2200,
  parameter int unsigned V_ACT   = 1080,
  parameter int unsigned V_FP    = 4,
  parameter int unsigned V_SYNC  = 5,
  parameter int unsigned V_TOTAL = 1125
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          de,
  output logic          hsync,
  output logic          vsync,
  output logic          sof,
  output logic          eol,
  output logic          vblank_start,
  output logic [CW-1:0] x,
  output logic [CW-1:0] y
);
  logic [CW-1:0] hc, vc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0; vc <= '0;
    end else if (32'(hc) == H_TOTAL - 1) begin
      hc <= '0;
      vc <= (32'(vc) == V_TOTAL - 1) ? '0 : vc + 1'b1;
    end else begin
      hc <= hc + 1'b1;
    end
  end

  assign de           = (32'(hc) < H_ACT) && (32'(vc) < V_ACT);
  assign hsync        = (32'(hc) >= H_ACT + H_FP) && (32'(hc) < H_ACT + H_FP + H_SYNC);
  assign vsync        = (32'(vc) >= V_ACT + V_FP) && (32'(vc) < V_ACT + V_FP + V_SYNC);
  assign sof          = (hc == '0) && (vc == '0);
  assign eol          = de && (32'(hc) == H_ACT - 1);
  assign vblank_start = (hc == '0) && (32'(vc) == V_ACT);
  assign x            = hc;
  assign y            = vc;
endmodule
