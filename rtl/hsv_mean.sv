// hsv_mean: mean H, S and V of the pixels inside the current bounding box, measured
// over one frame and handed to the classifier for the next one.
//
// While a frame streams in, the unit sums H, S and V and counts the pixels whose
// position lies inside `box` (inclusive corners; the box is sampled at `sof`). After
// the frame's last pixel (eol on line V_ACT-1) it divides the three sums by the count
// with one sequential divider used three times, and updates `mean_h`, `mean_s`, `mean_v` in turn,
// pulsing `mean_valid` with the last, about 3*(sum width+1) cycles later, well inside vertical blanking. If the
// box held no pixel, the previous means are kept. `load` sets the means directly.
// With `sel_en` (sampled at `sof`) only pixels with `in_sel` set count, so that
// background inside a box that lags the object does not pull the means away.
//
// The paper specifies the means as those of the pixels in the previous frame's
// bounding box; the accumulate-then-divide structure and the `in_sel` selection
// (used in the design with the classifier's ROI bit) are this design's choice.
module hsv_mean
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT = 1920,
  parameter int unsigned V_ACT = 1080
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_h,
  input  logic [7:0] in_s,
  input  logic [7:0] in_v,
  input  logic       in_sel,
  input  box_t       box,
  input  logic       sel_en,
  input  logic       load,
  input  logic [7:0] load_h,
  input  logic [7:0] load_s,
  input  logic [7:0] load_v,
  output logic [7:0] mean_h,
  output logic [7:0] mean_s,
  output logic [7:0] mean_v,
  output logic       mean_valid
);
  localparam int unsigned NW = $clog2(H_ACT * V_ACT + 1);   // count width
  localparam int unsigned SW = NW + 8;                       // sum width

  logic [CW-1:0] x, y;
  box_t          bx;
  logic          sel_q;
  logic [SW-1:0] sum_h, sum_s, sum_v, sh, ss, sv;
  logic [NW-1:0] cnt, cn;
  logic [1:0]    phase;
  logic          div_start, div_busy, div_done;
  logic [SW-1:0] div_a, quo;
  logic [NW-1:0] rem;
  logic          running;

  seq_divider #(.N(SW), .D(NW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(cn),
    .busy(div_busy), .done(div_done), .quotient(quo), .remainder(rem));

  always_comb begin
    case (phase)
      2'd0:    div_a = sh;
      2'd1:    div_a = ss;
      default: div_a = sv;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; bx <= '0; sel_q <= 1'b0;
      sum_h <= '0; sum_s <= '0; sum_v <= '0; cnt <= '0;
      sh <= '0; ss <= '0; sv <= '0; cn <= '0;
      phase <= '0; div_start <= 1'b0; running <= 1'b0;
      mean_h <= '0; mean_s <= '0; mean_v <= '0; mean_valid <= 1'b0;
    end else begin
      logic [CW-1:0] xa, ya;
      logic          in_box;
      div_start  <= 1'b0;
      mean_valid <= 1'b0;
      xa = in_sof ? '0 : x;
      ya = in_sof ? '0 : y;
      if (in_valid) begin
        box_t b;
        b = in_sof ? box : bx;
        if (in_sof) begin bx <= box; sel_q <= sel_en; end
        in_box = (xa >= b.x0) && (xa <= b.x1) && (ya >= b.y0) && (ya <= b.y1)
                 && (in_sel || !(in_sof ? sel_en : sel_q));
        if (in_sof) begin
          sum_h <= in_box ? SW'(in_h) : '0;
          sum_s <= in_box ? SW'(in_s) : '0;
          sum_v <= in_box ? SW'(in_v) : '0;
          cnt   <= in_box ? NW'(1) : '0;
        end else if (in_box) begin
          sum_h <= sum_h + SW'(in_h);
          sum_s <= sum_s + SW'(in_s);
          sum_v <= sum_v + SW'(in_v);
          cnt   <= cnt + 1'b1;
        end
        if (in_eol) begin
          x <= '0;
          y <= ya + 1'b1;
          if (ya == CW'(V_ACT - 1)) begin
            // frame complete: snapshot the sums (including this pixel)
            sh <= in_box ? sum_h + SW'(in_h) : sum_h;
            ss <= in_box ? sum_s + SW'(in_s) : sum_s;
            sv <= in_box ? sum_v + SW'(in_v) : sum_v;
            cn <= in_box ? cnt + 1'b1 : cnt;
            if (in_box || cnt != 0) begin
              phase <= 2'd0; div_start <= 1'b1; running <= 1'b1;
            end
          end
        end else begin
          x <= xa + 1'b1;
          y <= ya;
        end
      end
      if (running && div_done) begin
        case (phase)
          2'd0: mean_h <= quo[7:0];
          2'd1: mean_s <= quo[7:0];
          default: begin mean_v <= quo[7:0]; mean_valid <= 1'b1; end
        endcase
        if (phase == 2'd2) running <= 1'b0;
        else begin phase <= phase + 1'b1; div_start <= 1'b1; end
      end
      if (load) begin
        mean_h <= load_h; mean_s <= load_s; mean_v <= load_v;
      end
    end
  end
endmodule
