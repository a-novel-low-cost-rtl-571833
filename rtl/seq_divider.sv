// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A `start` pulse loads dividend and divisor; `done` pulses N+1 cycles later with the
// quotient and remainder, which then hold until the next start. Division by zero
// returns an all-ones quotient. Used for the per-frame means and centroids, which
// have a whole frame's blanking to finish in. The paper does not say how it divides;
// a bit-serial divider is this design's low-cost choice.
module seq_divider #(
  parameter int unsigned N = 32,   // dividend and quotient width
  parameter int unsigned D = 32    // divisor width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [D-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] quotient,
  output logic [D-1:0] remainder
);
  logic [$clog2(N+1)-1:0] cnt;
  logic [N-1:0] q;
  logic [D:0]   r;
  logic [D-1:0] dv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; q <= '0; r <= '0; dv <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q <= dividend; r <= '0; dv <= divisor; cnt <= ($clog2(N+1))'(N); busy <= 1'b1;
      end else if (busy) begin
        logic [D:0] t;
        t = {r[D-1:0], q[N-1]};
        if (t >= {1'b0, dv}) begin
          r <= t - {1'b0, dv};
          q <= {q[N-2:0], 1'b1};
        end else begin
          r <= t;
          q <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // The shift registers hold the result once the last step is done.
  assign quotient  = q;
  assign remainder = r[D-1:0];
endmodule
