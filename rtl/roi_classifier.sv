// roi_classifier: the binary HSV classifier that turns each pixel into one ROI bit.
//
// With means Hm, Sm, Vm of the previous frame's bounding box, a pixel is ROI when
//   |H-Hm| < HT  and  |S-Sm| < ST  and  |V-Vm| < VT                     (per channel)
//   and  (alpha*|H-Hm| + beta*|S-Sm| + gamma*|V-Vm|) / 256 < AT         (weighted)
// The weights are fractions of 256 and should sum to 256 (alpha+beta+gamma = 1).
// Stage one forms the absolute differences, stage two the weighted sum and the four
// comparisons; the bit leaves two cycles after the pixel, flags alongside.
//
// The four tests and their AND are the paper's (its Eq. 1-3). The plain difference
// of hue without wrap-around follows the paper's formula; the 8-bit weight format is
// this design's choice.
module roi_classifier (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_h,
  input  logic [7:0] in_s,
  input  logic [7:0] in_v,
  input  logic [7:0] mean_h,
  input  logic [7:0] mean_s,
  input  logic [7:0] mean_v,
  input  logic [7:0] thr_h,
  input  logic [7:0] thr_s,
  input  logic [7:0] thr_v,
  input  logic [7:0] thr_a,
  input  logic [8:0] alpha,
  input  logic [8:0] beta,
  input  logic [8:0] gamma,
  output logic       out_valid,
  output logic       out_sof,
  output logic       out_eol,
  output logic       out_roi
);
  logic [7:0] dh, ds, dv;
  logic [2:0] f1;

  function automatic logic [7:0] ad(input logic [7:0] a, input logic [7:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dh <= '0; ds <= '0; dv <= '0; f1 <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_eol <= 1'b0; out_roi <= 1'b0;
    end else begin
      logic [18:0] w;
      dh <= ad(in_h, mean_h);
      ds <= ad(in_s, mean_s);
      dv <= ad(in_v, mean_v);
      f1 <= {in_valid, in_valid & in_sof, in_valid & in_eol};
      w = 19'(alpha) * 19'(dh) + 19'(beta) * 19'(ds) + 19'(gamma) * 19'(dv);
      {out_valid, out_sof, out_eol} <= f1;
      out_roi <= f1[2] & (dh < thr_h) & (ds < thr_s) & (dv < thr_v) & ((w >> 8) < 19'(thr_a));
    end
  end
endmodule
