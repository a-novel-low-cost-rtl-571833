// position_joiner: draws the bounding box into the displayed video.
//
// The RGB stream read back from the frame buffer passes through with one cycle of
// latency; pixels on the box outline, THICK pixels wide and inside the box, are
// replaced by COLOR. The pixel position is counted from `sof` and `eol`; `box` is
// sampled at `sof`, so the box of a frame is drawn on that same frame. `enable` low
// passes the video unchanged. The side-band signals (syncs, data enable) of the
// display path are delayed alongside in `in_side`/`out_side`.
//
// The paper combines the tracking window with the image at its position; the
// outline width and colour are this design's choices.
module position_joiner
  import tracker_pkg::*;
#(
  parameter int unsigned THICK = 3,
  parameter logic [23:0] COLOR = 24'hFF_00_FF,
  parameter int unsigned SIDE  = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  input  box_t            box,
  input  logic            in_valid,
  input  logic            in_sof,
  input  logic            in_eol,
  input  logic [23:0]     in_rgb,
  input  logic [SIDE-1:0] in_side,
  output logic            out_valid,
  output logic [23:0]     out_rgb,
  output logic [SIDE-1:0] out_side
);
  logic [CW-1:0] x, y;
  box_t          bx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; bx <= '0; out_valid <= 1'b0; out_rgb <= '0; out_side <= '0;
    end else begin
      logic [CW-1:0] xa, ya;
      box_t b;
      logic in_box, inner;
      xa = in_sof ? '0 : x;
      ya = in_sof ? '0 : y;
      b  = in_sof ? box : bx;
      in_box = (xa >= b.x0) && (xa <= b.x1) && (ya >= b.y0) && (ya <= b.y1);
      inner  = (32'(xa) >= 32'(b.x0) + THICK) && (32'(xa) + THICK <= 32'(b.x1)) &&
               (32'(ya) >= 32'(b.y0) + THICK) && (32'(ya) + THICK <= 32'(b.y1));
      out_valid <= in_valid;
      out_side  <= in_side;
      out_rgb   <= (in_valid && enable && in_box && !inner) ? COLOR : in_rgb;
      if (in_valid) begin
        if (in_sof) bx <= box;
        if (in_eol) begin x <= '0; y <= ya + 1'b1; end
        else begin x <= xa + 1'b1; y <= ya; end
      end
    end
  end
endmodule
