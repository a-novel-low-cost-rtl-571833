// kalman_correction: chooses between the Camshift box and the Kalman prediction.
//
// The size of the box Camshift found is compared with the size of the previous
// frame's final box. If width or height changed by more than `size_thr` pixels, or
// Camshift lost the object, the Camshift box is not trusted and the final box is the
// previous box's size placed at the Kalman-predicted centre; otherwise the Camshift
// box is the final box. The choice is registered: `out_valid` follows `in_valid` by
// one cycle, with `used_kalman` telling which source won and `kalman_box` holding the
// prediction-based box either way. `final_cx/final_cy` are the
// final centre, the measurement fed back to the predictor.
//
// The size comparison against a preset threshold and the fall-back to the Kalman
// predictor are the paper's; comparing width and height separately in pixels and
// treating a lost object the same way are this design's choices.
module kalman_correction
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT = 1920,
  parameter int unsigned V_ACT = 1080
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  box_t          cs_box,
  input  logic          cs_lost,
  input  box_t          prev_box,
  input  logic [CW-1:0] pred_x,
  input  logic [CW-1:0] pred_y,
  input  logic [CW-1:0] size_thr,
  output logic          out_valid,
  output box_t          final_box,
  output logic          used_kalman,
  output box_t          kalman_box,
  output logic [CW-1:0] final_cx,
  output logic [CW-1:0] final_cy
);
  logic [CW-1:0] cw, ch, pw, ph;
  logic          jump;
  box_t          kbox;

  always_comb begin
    int x0, y0;
    cw = cs_box.x1 - cs_box.x0 + 1'b1;
    ch = cs_box.y1 - cs_box.y0 + 1'b1;
    pw = prev_box.x1 - prev_box.x0 + 1'b1;
    ph = prev_box.y1 - prev_box.y0 + 1'b1;
    jump = cs_lost || (absdiff(cw, pw) > size_thr) || (absdiff(ch, ph) > size_thr);
    x0 = int'(pred_x) - int'(pw) / 2;
    y0 = int'(pred_y) - int'(ph) / 2;
    if (x0 < 0) x0 = 0;
    if (y0 < 0) y0 = 0;
    if (x0 + int'(pw) > int'(H_ACT)) x0 = int'(H_ACT) - int'(pw);
    if (y0 + int'(ph) > int'(V_ACT)) y0 = int'(V_ACT) - int'(ph);
    kbox.x0 = CW'(x0);
    kbox.y0 = CW'(y0);
    kbox.x1 = CW'(x0 + int'(pw) - 1);
    kbox.y1 = CW'(y0 + int'(ph) - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; final_box <= '0; used_kalman <= 1'b0; final_cx <= '0; final_cy <= '0;
      kalman_box <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        box_t f;
        f = jump ? kbox : cs_box;
        final_box   <= f;
        kalman_box  <= kbox;
        used_kalman <= jump;
        final_cx    <= CW'((int'(f.x0) + int'(f.x1)) / 2);
        final_cy    <= CW'((int'(f.y0) + int'(f.y1)) / 2);
      end
    end
  end
endmodule
