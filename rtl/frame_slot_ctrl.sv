// frame_slot_ctrl: frame-slot rotation of the two DDR3 regions.
//
// Each region (RGB and ROI) holds four frame slots. With a frame counter n advanced
// at each camera frame start (`frame_start`), the frame being captured goes to slot
// n mod 4, the tracker works on slot (n-1) mod 4, the frame captured before that,
// and the display shows slot (n-2) mod 4. So capture, tracking and display work on
// three different frames at once and never touch the same slot. The module also
// returns the word base address of each slot in both regions. The slot numbers
// change one cycle after `frame_start`.
//
// The three-stage overlap (convert frame N, track N-1, show N-2) and four frames per
// region are the paper's; the address map is this design's (tracker_pkg).
module frame_slot_ctrl
  import tracker_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_start,
  output logic [1:0]    wr_slot,
  output logic [1:0]    trk_slot,
  output logic [1:0]    disp_slot,
  output logic [AW-1:0] rgb_wr_base,
  output logic [AW-1:0] roi_wr_base,
  output logic [AW-1:0] roi_trk_base,
  output logic [AW-1:0] rgb_disp_base,
  output logic [31:0]   frame_count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_slot <= 2'd0; trk_slot <= 2'd3; disp_slot <= 2'd2; frame_count <= '0;
    end else if (frame_start) begin
      wr_slot     <= wr_slot + 2'd1;
      trk_slot    <= wr_slot;
      disp_slot   <= trk_slot;
      frame_count <= frame_count + 1'b1;
    end
  end

  assign rgb_wr_base   = RGB_REGION_BASE + AW'(wr_slot)   * RGB_SLOT_STRIDE;
  assign roi_wr_base   = ROI_REGION_BASE + AW'(wr_slot)   * ROI_SLOT_STRIDE;
  assign roi_trk_base  = ROI_REGION_BASE + AW'(trk_slot)  * ROI_SLOT_STRIDE;
  assign rgb_disp_base = RGB_REGION_BASE + AW'(disp_slot) * RGB_SLOT_STRIDE;
endmodule
