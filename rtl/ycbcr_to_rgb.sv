// ycbcr_to_rgb: BT.709 studio-range YCbCr to 8-bit RGB.
//
//   R = 1.164(Y-16)               + 1.793(Cr-128)
//   G = 1.164(Y-16) - 0.213(Cb-128) - 0.533(Cr-128)
//   B = 1.164(Y-16) + 2.112(Cb-128)
//
// Coefficients are held as 8-bit fractions (298, 459, 55, 136, 541 over 256). Stage
// one forms the products, stage two sums, rounds and clamps to 0..255, so a pixel
// leaves two cycles after it enters; one pixel per clock. Stream flags travel
// alongside.
//
// The paper only states that the camera data are converted to RGB; the BT.709
// matrix (the HD standard) and the fixed-point format are this design's choices.
module ycbcr_to_rgb (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_y,
  input  logic [7:0] in_cb,
  input  logic [7:0] in_cr,
  output logic       out_valid,
  output logic       out_sof,
  output logic       out_eol,
  output logic [7:0] out_r,
  output logic [7:0] out_g,
  output logic [7:0] out_b
);
  logic signed [18:0] py, pr_cr, pg_cb, pg_cr, pb_cb;
  logic [2:0] f1;

  function automatic logic [7:0] clamp8(input logic signed [19:0] v);
    logic signed [19:0] s;
    s = (v + 20'sd128) >>> 8;
    if (s < 0)   return 8'd0;
    if (s > 255) return 8'd255;
    return s[7:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      py <= '0; pr_cr <= '0; pg_cb <= '0; pg_cr <= '0; pb_cb <= '0; f1 <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_eol <= 1'b0;
      out_r <= '0; out_g <= '0; out_b <= '0;
    end else begin
      py    <= 19'sd298 * (signed'({11'd0, in_y}) - 19'sd16);
      pr_cr <= 19'sd459 * (signed'({11'd0, in_cr}) - 19'sd128);
      pg_cb <= 19'sd55  * (signed'({11'd0, in_cb}) - 19'sd128);
      pg_cr <= 19'sd136 * (signed'({11'd0, in_cr}) - 19'sd128);
      pb_cb <= 19'sd541 * (signed'({11'd0, in_cb}) - 19'sd128);
      f1    <= {in_valid, in_sof & in_valid, in_eol & in_valid};
      {out_valid, out_sof, out_eol} <= f1;
      out_r <= clamp8(20'(py) + 20'(pr_cr));
      out_g <= clamp8(20'(py) - 20'(pg_cb) - 20'(pg_cr));
      out_b <= clamp8(20'(py) + 20'(pb_cb));
    end
  end
endmodule
