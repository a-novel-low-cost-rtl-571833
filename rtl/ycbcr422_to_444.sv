// ycbcr422_to_444: chroma up-sampling of the camera's YCbCr 4:2:2 stream.
//
// The camera delivers one 16-bit word per pixel: luma Y and one chroma sample C,
// with Cb on the even pixels of a line and Cr on the odd ones (BT.656 order). Each
// pixel pair shares its Cb/Cr, so both output pixels carry the pair's Cb and Cr
// (sample replication, the simplest up-sampler). The first pixel of a pair is
// emitted when its Cr arrives and the second one cycle later, so every pixel leaves
// exactly two cycles after it entered and the output rate equals the input rate.
// The line phase restarts at `sof` and after `eol`.
//
// The paper names this stage (the 4:2:2 to 4:4:4 converter of its preprocessing);
// the chroma order, replication and the two-cycle latency are this design's choices.
module ycbcr422_to_444 (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_y,
  input  logic [7:0] in_c,
  output logic       out_valid,
  output logic       out_sof,
  output logic       out_eol,
  output logic [7:0] out_y,
  output logic [7:0] out_cb,
  output logic [7:0] out_cr
);
  logic       odd;                 // next pixel is the odd one of its pair
  logic [7:0] y0, cb0;
  logic       sof0, eol0;
  logic       pend;                // second pixel of a pair waits one cycle
  logic [7:0] py, pcb, pcr;
  logic       psof, peol;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      odd <= 1'b0; pend <= 1'b0; out_valid <= 1'b0;
      out_sof <= 1'b0; out_eol <= 1'b0; out_y <= '0; out_cb <= '0; out_cr <= '0;
      y0 <= '0; cb0 <= '0; sof0 <= 1'b0; eol0 <= 1'b0;
      py <= '0; pcb <= '0; pcr <= '0; psof <= 1'b0; peol <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
      if (pend) begin
        out_valid <= 1'b1; out_sof <= psof; out_eol <= peol;
        out_y <= py; out_cb <= pcb; out_cr <= pcr;
        pend <= 1'b0;
      end
      if (in_valid) begin
        if (!odd || in_sof) begin
          y0 <= in_y; cb0 <= in_c; sof0 <= in_sof; eol0 <= in_eol;
          odd <= ~in_eol;
        end else begin
          out_valid <= 1'b1; out_sof <= sof0; out_eol <= eol0;
          out_y <= y0; out_cb <= cb0; out_cr <= in_c;
          pend <= 1'b1; py <= in_y; pcb <= cb0; pcr <= in_c;
          psof <= 1'b0; peol <= in_eol;
          odd <= 1'b0;
        end
      end
    end
  end
endmodule
