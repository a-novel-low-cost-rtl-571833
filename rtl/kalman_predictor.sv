// kalman_predictor: constant-velocity predictor of the box centre.
//
// For each axis it keeps a position p and a velocity v (per frame) with 4 fraction
// bits and runs the steady-state Kalman filter of a constant-velocity model, whose
// gains are constant:
//   prediction   p' = p + v
//   update (z)   r = z - p',  p <= p' + r/2,  v <= v + r/4
// `pred_x/pred_y` always show the rounded prediction p + v for the coming frame,
// clipped to the frame. `update` applies one measurement (the final centre of the
// frame just tracked); `init` sets p to the given centre and v to zero. The update
// takes one cycle.
//
// The paper uses a Kalman predictor to estimate the object's motion but gives no
// model; the constant-velocity model and the fixed gains 1/2 and 1/4 (an alpha-beta
// filter, the Kalman filter's steady state) are this design's choices.
module kalman_predictor
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT = 1920,
  parameter int unsigned V_ACT = 1080
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [CW-1:0] init_x,
  input  logic [CW-1:0] init_y,
  input  logic          update,
  input  logic [CW-1:0] meas_x,
  input  logic [CW-1:0] meas_y,
  output logic [CW-1:0] pred_x,
  output logic [CW-1:0] pred_y
);
  localparam int unsigned FW = 4;           // fraction bits
  localparam int unsigned SW = CW + FW + 2; // signed state width

  logic signed [SW-1:0] p [2];
  logic signed [SW-1:0] v [2];
  logic signed [SW-1:0] pp [2];

  function automatic logic [CW-1:0] to_pix(input logic signed [SW-1:0] q, input int hi);
    logic signed [SW-1:0] r;
    r = (q + SW'(1 <<< (FW - 1))) >>> FW;
    if (r < 0)  return '0;
    if (int'(r) > hi) return CW'(hi);
    return r[CW-1:0];
  endfunction

  always_comb begin
    for (int a = 0; a < 2; a++) pp[a] = p[a] + v[a];
  end
  assign pred_x = to_pix(pp[0], int'(H_ACT - 1));
  assign pred_y = to_pix(pp[1], int'(V_ACT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < 2; a++) begin p[a] <= '0; v[a] <= '0; end
    end else if (init) begin
      p[0] <= SW'({init_x, FW'(0)}); p[1] <= SW'({init_y, FW'(0)});
      v[0] <= '0; v[1] <= '0;
    end else if (update) begin
      logic signed [SW-1:0] z [2];
      logic signed [SW-1:0] r;
      z[0] = SW'({meas_x, FW'(0)});
      z[1] = SW'({meas_y, FW'(0)});
      for (int a = 0; a < 2; a++) begin
        r = z[a] - pp[a];
        p[a] <= pp[a] + (r >>> 1);
        v[a] <= v[a] + (r >>> 2);
      end
    end
  end
endmodule
