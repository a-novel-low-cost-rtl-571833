// dilation_erosion: morphological clean-up of the RGB image before colour
// classification, as a dilation followed by an erosion (a 3x3 closing on each colour
// channel). It fills small dark holes and thin gaps inside a coloured object so the
// classifier sees a more solid region.
//
// Two morph3x3 stages in series; each adds one cycle of latency and shifts the image
// by one pixel right and down, so the result is the closed image shifted by (2,2)
// with the input's timing. One pixel per clock.
//
// The paper names this stage only; the 3x3 structuring element, the dilate-then-erode
// order (taken from the stage's name) and working on RGB (its place in the
// preprocessing chain) are this design's choices.
module dilation_erosion #(
  parameter int unsigned H_ACT = 1920
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
  logic        m_valid, m_sof, m_eol;
  logic [23:0] m_rgb;

  morph3x3 #(.H_ACT(H_ACT), .IS_DILATE(1'b1)) u_dilate (
    .clk, .rst_n, .in_valid, .in_sof, .in_eol, .in_rgb,
    .out_valid(m_valid), .out_sof(m_sof), .out_eol(m_eol), .out_rgb(m_rgb));

  morph3x3 #(.H_ACT(H_ACT), .IS_DILATE(1'b0)) u_erode (
    .clk, .rst_n, .in_valid(m_valid), .in_sof(m_sof), .in_eol(m_eol), .in_rgb(m_rgb),
    .out_valid, .out_sof, .out_eol, .out_rgb);
endmodule
