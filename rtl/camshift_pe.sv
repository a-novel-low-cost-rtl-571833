// camshift_pe: one thread of the parallel Camshift search (one P_i).
//
// The tracker broadcasts the ROI pixels of the search region, one per clock, to all
// threads. Each thread owns one candidate position (cx, cy) of the box, whose half
// size is (hw, hh), and accumulates the weighted moments of the ROI pixels inside
// its window, which reaches twice the box size (|x-cx| <= 2hw, |y-cy| <= 2hh):
//   M00 = sum w,  M10 = sum w*x,  M01 = sum w*y,  CNT = number of ROI pixels,
// with a weight that grows towards the previous centre:
//   w = 4 if |x-cx| <= hw/2 and |y-cy| <= hh/2   (inner half of the box)
//   w = 2 if |x-cx| <= hw   and |y-cy| <= hh     (rest of the box)
//   w = 1 elsewhere in the window.
// `clear` zeroes the sums; a pixel is added one cycle after it is presented.
//
// The weighted moments are the paper's (its Eq. 4, "the closer to the centre, the
// larger the weight"); the three weight rings and the doubled window are this
// design's choices.
module camshift_pe
  import tracker_pkg::*;
#(
  parameter int unsigned MW = 40    // moment accumulator width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          pix_valid,
  input  logic [CW-1:0] pix_x,
  input  logic [CW-1:0] pix_y,
  input  logic          pix_roi,
  input  logic [CW-1:0] cx,
  input  logic [CW-1:0] cy,
  input  logic [CW-1:0] hw,
  input  logic [CW-1:0] hh,
  output logic [MW-1:0] m00,
  output logic [MW-1:0] m10,
  output logic [MW-1:0] m01,
  output logic [MW-1:0] cnt
);
  logic [2:0]    w_q;      // weight of the registered pixel, 0 if not counted
  logic [CW-1:0] x_q, y_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q <= '0; x_q <= '0; y_q <= '0;
      m00 <= '0; m10 <= '0; m01 <= '0; cnt <= '0;
    end else begin
      logic [CW-1:0] dx, dy;
      dx = absdiff(pix_x, cx);
      dy = absdiff(pix_y, cy);
      x_q <= pix_x;
      y_q <= pix_y;
      if (!pix_valid || !pix_roi || clear)                 w_q <= 3'd0;
      else if (dx <= (hw >> 1) && dy <= (hh >> 1))         w_q <= 3'd4;
      else if (dx <= hw && dy <= hh)                       w_q <= 3'd2;
      else if ({1'b0, dx} <= {hw, 1'b0} && {1'b0, dy} <= {hh, 1'b0}) w_q <= 3'd1;
      else                                                 w_q <= 3'd0;
      if (clear) begin
        m00 <= '0; m10 <= '0; m01 <= '0; cnt <= '0;
      end else if (w_q != 0) begin
        m00 <= m00 + MW'(w_q);
        m10 <= m10 + MW'(w_q) * MW'(x_q);
        m01 <= m01 + MW'(w_q) * MW'(y_q);
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
