// isqrt: sequential integer square root, floor(sqrt(x)), one result bit per clock
// (digit-by-digit method). `done` pulses N/2+1 cycles after `start`; `root` then
// holds until the next start. N must be even. It sizes the Camshift box from the
// ROI pixel count; the paper gives no size rule, so this helper is this design's own.
module isqrt #(
  parameter int unsigned N = 40
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N-1:0]   x,
  output logic           done,
  output logic [N/2-1:0] root
);
  logic [N-1:0]   rem_x;      // remaining input bits, consumed two at a time
  logic [N/2+1:0] r;          // partial remainder
  logic [$clog2(N/2+1)-1:0] cnt;
  logic busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_x <= '0; r <= '0; root <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem_x <= x; r <= '0; root <= '0; cnt <= ($clog2(N/2+1))'(N/2); busy <= 1'b1;
      end else if (busy) begin
        logic [N/2+1:0] t, trial;
        t     = {r[N/2-1:0], rem_x[N-1:N-2]};
        trial = {root, 2'b01};
        rem_x <= rem_x << 2;
        if (t >= trial) begin
          r    <= t - trial;
          root <= {root[N/2-2:0], 1'b1};
        end else begin
          r    <= t;
          root <= {root[N/2-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
