// morph3x3: 3x3 grey-level dilation (maximum) or erosion (minimum) of an RGB stream,
// applied to each 8-bit colour channel on its own.
//
// Two line buffers hold the previous two lines. With pixel (x,y) arriving, the
// window covers columns x-2..x and rows y-2..y; its result is the filtered value of
// pixel (x-1,y-1) and is emitted, registered, one cycle later in the place of (x,y).
// The output stream therefore has the input's timing and flags, and the image is
// shifted by one pixel right and down. Neighbours outside the frame (first two
// lines and columns) are left out of the window. One pixel per clock.
//
// IS_DILATE selects maximum (1) or minimum (0). H_ACT bounds the line length.
// The paper names dilation and erosion only; the 3x3 square window, the per-channel
// grey-level operation and the causal window are this design's choices.
module morph3x3 #(
  parameter int unsigned H_ACT     = 1920,
  parameter bit          IS_DILATE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic        in_eol,
  input  logic [23:0] in_rgb,
  output logic        out_valid,
  output logic        out_sof,
  output logic        out_eol,
  output logic [23:0] out_rgb
);
  localparam int unsigned XW = $clog2(H_ACT);

  logic [23:0] lb1 [H_ACT];   // line y-1
  logic [23:0] lb2 [H_ACT];   // line y-2
  logic [XW-1:0] x;
  logic [1:0]    rows;        // lines seen in this frame, saturating at 2
  logic [23:0]   c1 [3];      // column x-1: rows y, y-1, y-2
  logic [23:0]   c2 [3];      // column x-2
  logic [23:0]   c0 [3];
  logic [XW-1:0] xa;
  logic [1:0]    ra;
  logic [23:0]   res;

  // Column and row position of the arriving pixel (sof restarts the frame).
  always_comb begin
    xa = in_sof ? '0 : x;
    ra = in_sof ? 2'd0 : rows;
    c0[0] = in_rgb;
    c0[1] = lb1[xa];
    c0[2] = lb2[xa];
  end

  always_comb begin
    logic [7:0] acc, v;
    res = '0;
    for (int ch = 0; ch < 3; ch++) begin
      acc = in_rgb[ch*8 +: 8];
      v   = acc;
      for (int r = 0; r < 3; r++) begin
        for (int c = 0; c < 3; c++) begin
          if (r <= int'(ra) && c <= int'(xa)) begin
            v = (c == 0) ? c0[r][ch*8 +: 8] : (c == 1) ? c1[r][ch*8 +: 8] : c2[r][ch*8 +: 8];
            if (IS_DILATE) acc = (v > acc) ? v : acc;
            else           acc = (v < acc) ? v : acc;
          end
        end
      end
      res[ch*8 +: 8] = acc;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb1[xa] <= in_rgb;
      lb2[xa] <= lb1[xa];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; rows <= '0; out_valid <= 1'b0; out_sof <= 1'b0; out_eol <= 1'b0; out_rgb <= '0;
      for (int r = 0; r < 3; r++) begin c1[r] <= '0; c2[r] <= '0; end
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      out_eol   <= in_valid & in_eol;
      if (in_valid) begin
        out_rgb <= res;
        c2 <= c1;
        c1 <= c0;
        if (in_eol) begin
          x <= '0;
          rows <= (ra == 2'd2) ? 2'd2 : ra + 2'd1;
        end else begin
          x <= xa + 1'b1;
          rows <= ra;
        end
      end
    end
  end
endmodule
