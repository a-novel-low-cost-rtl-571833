// rgb_to_hsv: pipelined RGB to HSV conversion, one pixel per clock.
//
//   V = max(R,G,B)                       0..255
//   S = 255*(max-min)/max  (0 if max=0)  0..255
//   H in units of 2 degrees, 0..179:
//     max=R: 30*(G-B)/d   (taken mod 180),  max=G: 60 + 30*(B-R)/d,
//     max=B: 120 + 30*(R-G)/d,   d = max-min, H=0 if d=0.
// Quotients truncate toward zero. Ties for the maximum prefer R, then G.
//
// Stage one finds max, min and the sector; stage two divides. Latency two cycles,
// flags travel alongside.
//
// The paper converts RGB to HSV but gives no formula or number format; the
// 2-degree hue unit (so hue fits 8 bits) and the integer division are this design's
// choices.
module rgb_to_hsv (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_r,
  input  logic [7:0] in_g,
  input  logic [7:0] in_b,
  output logic       out_valid,
  output logic       out_sof,
  output logic       out_eol,
  output logic [7:0] out_h,
  output logic [7:0] out_s,
  output logic [7:0] out_v
);
  typedef enum logic [1:0] {SEC_R, SEC_G, SEC_B} sector_e;

  logic [7:0] mx, dl;
  logic [8:0] diff_mag;   // |numerator colour difference|
  logic       diff_neg;
  sector_e    sec;
  logic [2:0] f1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mx <= '0; dl <= '0; diff_mag <= '0; diff_neg <= 1'b0; sec <= SEC_R; f1 <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_eol <= 1'b0;
      out_h <= '0; out_s <= '0; out_v <= '0;
    end else begin
      // stage 1
      logic [7:0] mn;
      mn = (in_r < in_g) ? in_r : in_g;
      mn = (in_b < mn) ? in_b : mn;
      f1 <= {in_valid, in_valid & in_sof, in_valid & in_eol};
      if (in_r >= in_g && in_r >= in_b) begin
        mx <= in_r; sec <= SEC_R;
        diff_neg <= in_g < in_b;
        diff_mag <= (in_g < in_b) ? 9'(in_b - in_g) : 9'(in_g - in_b);
        dl <= in_r - mn;
      end else if (in_g >= in_b) begin
        mx <= in_g; sec <= SEC_G;
        diff_neg <= in_b < in_r;
        diff_mag <= (in_b < in_r) ? 9'(in_r - in_b) : 9'(in_b - in_r);
        dl <= in_g - mn;
      end else begin
        mx <= in_b; sec <= SEC_B;
        diff_neg <= in_r < in_g;
        diff_mag <= (in_r < in_g) ? 9'(in_g - in_r) : 9'(in_r - in_g);
        dl <= in_b - mn;
      end
      // stage 2
      {out_valid, out_sof, out_eol} <= f1;
      out_v <= mx;
      if (dl == 0) begin
        out_s <= 8'd0;
        out_h <= 8'd0;
      end else begin
        logic [7:0] q;
        logic [8:0] base, h;
        out_s <= 8'((16'd255 * 16'(dl)) / 16'(mx));
        q = 8'((14'd30 * 14'(diff_mag)) / 14'(dl));
        base = (sec == SEC_R) ? 9'd0 : (sec == SEC_G) ? 9'd60 : 9'd120;
        if (diff_neg) h = (sec == SEC_R) ? ((q == 0) ? 9'd0 : 9'd180 - 9'(q)) : base - 9'(q);
        else          h = base + 9'(q);
        out_h <= h[7:0];
      end
    end
  end
endmodule
